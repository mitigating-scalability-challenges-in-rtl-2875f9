// tb_lutmu_adder_tree: feeds an adder tree of N = 5 inputs (not a power of
// two) with random signed 8-bit partial products over sums of 1 to 6 rounds
// and checks the 16-bit total against a plain integer sum that starts from
// the init (bias) value in the first round. Includes the extreme case of
// all inputs at -128 to exercise the sign extension.
module tb_lutmu_adder_tree;
  import lutmu_tb_pkg::*;

  localparam int N = 5, IN_W = 8, OUT_W = 16;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                    en = 0, first = 0;
  logic signed [OUT_W-1:0] init = '0;
  logic [N-1:0][IN_W-1:0]  in = '0;
  logic signed [OUT_W-1:0] total;

  lutmu_adder_tree #(.N(N), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_sum, rounds, v;
    @(negedge clk);
    for (int t = 0; t < 1000; t++) begin
      rounds = int'($urandom_range(6, 1));
      ref_sum = rand_signed(10);
      init = OUT_W'(ref_sum);
      for (int r = 0; r < rounds; r++) begin
        en = 1; first = (r == 0);
        for (int n = 0; n < N; n++) begin
          v = (t == 0) ? -128 : rand_signed(IN_W);
          in[n] = IN_W'(v);
          ref_sum += v;
        end
        #1;
        checks++;
        if (int'(total) != ref_sum) begin
          failures++;
          $display("sum %0d expected %0d (round %0d)", total, ref_sum, r);
        end
        @(negedge clk);
        // A cycle with en low must not change the accumulator.
        if (r == 0) begin
          en = 0; in = '1; @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
