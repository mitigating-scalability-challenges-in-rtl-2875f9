// tb_lutmu_allocator: sends random input packages (C = 8 codebooks, I = 3
// clusters, S = 4 rounds, so 2 encoder lanes) and checks that in round s
// lane k carries the I blocks of codebook k*S+s, cluster 0 first, with the
// right round number and last flag, under random back-pressure. A second
// phase without back-pressure checks that a package is accepted every S
// cycles and that the first round appears two cycles after the handshake.
module tb_lutmu_allocator;
  import lutmu_tb_pkg::*;

  localparam int C = 8, I = 3, S = 4, W = 4, K = C / S, SW = $clog2(S);

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                  in_valid = 0, in_ready;
  logic [I*C*W-1:0]      in_data = '0;
  logic                  out_valid, out_ready = 0, out_last;
  logic [SW-1:0]         out_round;
  logic [K-1:0][I*W-1:0] out_blocks;

  lutmu_allocator #(.C(C), .I(I), .S(S), .W(W)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  logic [I*C*W-1:0] sent [$];
  logic [I*C*W-1:0] cur;
  int  rnd = 0, pkgs_out = 0;
  bit  bp = 1;
  int  accept_cyc [$];
  int  first_round_cyc [$];

  always @(posedge clk) cycle++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= bp ? ($urandom_range(2, 0) != 0) : 1'b1;

  always @(posedge clk) begin
    if (in_valid && in_ready) accept_cyc.push_back(cycle);
    if (out_valid && out_ready) begin
      if (rnd == 0) begin
        cur = sent.pop_front();
        first_round_cyc.push_back(cycle);
      end
      for (int k = 0; k < K; k++)
        for (int i = 0; i < I; i++) begin
          checks++;
          if (out_blocks[k][i*W +: W] !== cur[(i*C + k*S + rnd)*W +: W]) begin
            failures++;
            $display("block mismatch lane %0d cluster %0d round %0d", k, i, rnd);
          end
        end
      checks++;
      if (int'(out_round) != rnd || out_last != (rnd == S - 1)) begin
        failures++; $display("round/last mismatch");
      end
      if (rnd == S - 1) begin rnd = 0; pkgs_out++; end
      else rnd++;
    end
  end

  task automatic send(int n);
    for (int p = 0; p < n; p++) begin
      @(negedge clk);
      in_valid = 1;
      for (int b = 0; b < I*C; b++) in_data[b*W +: W] = W'($urandom);
      sent.push_back(in_data);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
  endtask

  initial begin
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send(200);
    while (pkgs_out != 200) @(posedge clk);
    // Throughput phase.
    bp = 0;
    accept_cyc.delete();
    first_round_cyc.delete();
    repeat (3) @(posedge clk);
    send(20);
    while (pkgs_out != 220) @(posedge clk);
    for (int p = 2; p < 20; p++) begin
      checks++;
      if (accept_cyc[p] - accept_cyc[p-1] != S) begin
        failures++; $display("II %0d != %0d", accept_cyc[p] - accept_cyc[p-1], S);
      end
    end
    checks++;
    if (first_round_cyc[0] - accept_cyc[0] != 2) begin
      failures++; $display("latency %0d", first_round_cyc[0] - accept_cyc[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
