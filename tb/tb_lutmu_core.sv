// tb_lutmu_core: end-to-end check of the LUT-MU (allocator, encoders, ID
// buffer, aggregator) with C = 8 codebooks, 2^I = 16 prototypes, O = 8
// outputs, S = 2, E = 2, W = 4. Random split values, LUTs and biases are
// loaded; random pruned input vectors go in and every sum package is
// compared with a model that encodes each codebook by walking its decision
// tree and adds up the selected LUT entries. Phase 1 uses random input gaps
// and output back-pressure; phase 2 streams back-to-back and checks the
// initiation interval S*E and the latency 2S+5 to the first package.
module tb_lutmu_core;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int C = 8, I = 4, O = 8, S = 2, E = 2, W = 4;
  localparam int J = O / E, G = 1 << I, NODES = G - 1;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t               cfg = CFG_IDLE;
  logic                  in_valid = 0, in_ready;
  logic [I*C*W-1:0]      in_data = '0;
  logic                  out_valid, out_ready = 0, out_last;
  logic [0:0]            out_slide;
  logic [J-1:0][4*W-1:0] out_sums;

  lutmu_core #(.C(C), .I(I), .O(O), .S(S), .E(E), .W(W)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  lutmu_model m;
  int exp_sums [$];
  int slide = 0, vecs_out = 0;
  bit bp = 1;
  int acc_cyc [$], out_cyc [$];

  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= bp ? ($urandom_range(2, 0) != 0) : 1'b1;

  always @(posedge clk) begin
    if (in_valid && in_ready) acc_cyc.push_back(cycle);
    if (out_valid && out_ready) begin
      if (slide == 0) out_cyc.push_back(cycle);
      checks++;
      if (int'(out_slide) != slide || out_last != (slide == E - 1)) begin
        failures++; $display("slide mismatch");
      end
      for (int j = 0; j < J; j++) begin
        int ex;
        ex = exp_sums.pop_front();
        checks++;
        if (sext(out_sums[j], 4*W) != ex) begin
          failures++;
          $display("vec %0d o %0d: %0d expected %0d", vecs_out, slide*J + j, sext(out_sums[j], 4*W), ex);
        end
      end
      if (slide == E - 1) begin slide = 0; vecs_out++; end
      else slide++;
    end
  end

  task automatic wr(cfg_target_e t, int a, int d);
    cfg.we = 1; cfg.target = t; cfg.addr = 32'(a); cfg.data = 32'(d);
    @(negedge clk);
    cfg = CFG_IDLE;
  endtask

  task automatic send(int n, bit gaps);
    int x [], sums [], act [], ids [];
    x = new[I*C];
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      if (gaps) repeat ($urandom_range(3, 0) == 0 ? $urandom_range(6, 1) : 0) @(negedge clk);
      for (int b = 0; b < I*C; b++) begin
        x[b] = int'($urandom_range((1 << W) - 1, 0));
        in_data[b*W +: W] = W'(x[b]);
      end
      m.compute(x, sums, act, ids);
      foreach (sums[o]) exp_sums.push_back(sums[o]);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
  endtask

  initial begin
    m = new(C, I, O, W);
    m.randomize_tables();
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < C; c++)
      for (int n = 0; n < NODES; n++) wr(CFG_SPLIT, c*NODES + n, m.split[c][n]);
    for (int o = 0; o < O; o++) begin
      wr(CFG_BIAS, o, m.bias[o]);
      for (int c = 0; c < C; c++)
        for (int g = 0; g < G; g++) wr(CFG_LUT, (o*C + c)*G + g, m.lut[o][c][g]);
    end
    send(400, 1);
    while (vecs_out != 400) @(posedge clk);
    bp = 0;
    acc_cyc.delete(); out_cyc.delete();
    repeat (2) @(posedge clk);
    send(30, 0);
    while (vecs_out != 430) @(posedge clk);
    // The first vectors fill the buffers of the pipeline faster than S*E.
    for (int v = 8; v < 30; v++) begin
      checks++;
      if (acc_cyc[v] - acc_cyc[v-1] != S*E) begin
        failures++; $display("II %0d expected %0d", acc_cyc[v] - acc_cyc[v-1], S*E);
      end
    end
    checks++;
    if (out_cyc[0] - acc_cyc[0] != 2*S + 5) begin
      failures++; $display("latency %0d expected %0d", out_cyc[0] - acc_cyc[0], 2*S + 5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
