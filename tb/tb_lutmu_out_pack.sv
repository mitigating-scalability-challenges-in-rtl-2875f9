// tb_lutmu_out_pack: sends vectors as E = 4 packages of O/E = 2 activations
// (W = 4) and checks that each released O*W-bit package holds activation o
// at bits [o*W +: W], i.e. package e fills elements e*(O/E) .. e*(O/E)+1,
// that exactly one package leaves per vector and that it leaves one cycle
// after the last slide is accepted. Random back-pressure.
module tb_lutmu_out_pack;
  import lutmu_tb_pkg::*;

  localparam int O = 8, E = 4, W = 4, J = O / E;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                in_valid = 0, in_ready, in_last = 0;
  logic [1:0]          in_slide = '0;
  logic [J-1:0][W-1:0] in_act = '0;
  logic                out_valid, out_ready = 0;
  logic [O*W-1:0]      out_data;

  lutmu_out_pack #(.O(O), .E(E), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [O*W-1:0] exp_q [$];
  bit bp = 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= bp ? ($urandom_range(2, 0) != 0) : 1'b1;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      logic [O*W-1:0] ex;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("extra package");
      end else begin
        ex = exp_q.pop_front();
        if (out_data !== ex) begin
          failures++; $display("package %h expected %h", out_data, ex);
        end
      end
    end
  end

  initial begin
    logic [O*W-1:0] vec;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 500; v++) begin
      for (int o = 0; o < O; o++) vec[o*W +: W] = W'($urandom);
      exp_q.push_back(vec);
      for (int e = 0; e < E; e++) begin
        @(negedge clk);
        in_valid = 1; in_slide = 2'(e); in_last = (e == E - 1);
        for (int j = 0; j < J; j++) in_act[j] = vec[(e*J + j)*W +: W];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1 in_valid = 0;
        if (v == 499 && e == E - 1) begin
          checks++;
          if (!out_valid) begin failures++; $display("latency"); end
        end
      end
    end
    bp = 0;
    while (exp_q.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
