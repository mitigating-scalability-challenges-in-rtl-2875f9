// tb_lutmu_top_full: the computation unit at its default size, the LUT
// shape (C_in, 2^I_in, C_out*I_out) = (32, 16, 64) with partition factors
// (S, E) = (8, 1) and W = 4: 4 encoders, 256 ROMs of 128 entries and 64
// adder trees. All tables (480 split values, 32768 LUT entries, 64 biases,
// 960 thresholds) are loaded with random values; then 60 random pruned
// input vectors are streamed, first with random back-pressure and then
// back-to-back. Every 4W-bit sum (observed at the LUT-MU output) and every
// output activation is compared with a model; the back-to-back phase
// checks the initiation interval of S*E = 8 cycles and the latency of
// (E+1)*S+7 = 23 cycles from input to output package.
module tb_lutmu_top_full;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int C = 32, I = 4, O = 64, S = 8, E = 1, W = 4;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t          cfg = CFG_IDLE;
  logic             in_valid = 0, in_ready;
  logic [I*C*W-1:0] in_data = '0;
  logic             out_valid, out_ready = 0;
  logic [O*W-1:0]   out_data;

  lutmu_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  lutmu_model m;
  int exp_sum [$], exp_act [$];
  int vecs = 0, sum_vecs = 0;
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

  always @(negedge clk) out_ready <= bp ? ($urandom_range(2, 0) == 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) acc_cyc.push_back(cycle);
    if (dut.u_core.out_valid && dut.u_core.out_ready) begin
      for (int o = 0; o < O; o++) begin
        int ex;
        ex = exp_sum.pop_front();
        checks++;
        if (sext(dut.u_core.out_sums[o], 4*W) != ex) begin
          failures++; $display("vec %0d sum %0d: %0d expected %0d", sum_vecs, o, sext(dut.u_core.out_sums[o], 4*W), ex);
        end
      end
      sum_vecs++;
    end
    if (out_valid && out_ready) begin
      out_cyc.push_back(cycle);
      for (int o = 0; o < O; o++) begin
        int ex;
        ex = exp_act.pop_front();
        checks++;
        if (int'(out_data[o*W +: W]) != ex) begin
          failures++; $display("vec %0d act %0d: %0d expected %0d", vecs, o, out_data[o*W +: W], ex);
        end
      end
      vecs++;
    end
  end

  task automatic wr(cfg_target_e t, int a, int d);
    cfg.we = 1; cfg.target = t; cfg.addr = 32'(a); cfg.data = 32'(d);
    @(negedge clk);
  endtask

  task automatic send(int n);
    int x [], sums [], act [], ids [];
    x = new[I*C];
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      for (int b = 0; b < I*C; b++) begin
        x[b] = int'($urandom_range((1 << W) - 1, 0));
        in_data[b*W +: W] = W'(x[b]);
      end
      m.compute(x, sums, act, ids);
      foreach (sums[o]) exp_sum.push_back(sums[o]);
      foreach (act[o]) exp_act.push_back(act[o]);
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
      for (int n = 0; n < m.NODES; n++) wr(CFG_SPLIT, c*m.NODES + n, m.split[c][n]);
    for (int o = 0; o < O; o++) begin
      wr(CFG_BIAS, o, m.bias[o]);
      for (int t = 0; t < m.T; t++) wr(CFG_THRESH, o*m.T + t, m.thr[o][t]);
      for (int c = 0; c < C; c++)
        for (int g = 0; g < m.G; g++) wr(CFG_LUT, (o*C + c)*m.G + g, m.lut[o][c][g]);
    end
    cfg = CFG_IDLE;

    send(30);
    while (vecs != 30) @(posedge clk);
    bp = 0;
    acc_cyc.delete(); out_cyc.delete();
    repeat (4) @(posedge clk);
    send(30);
    while (vecs != 60) @(posedge clk);
    for (int v = 8; v < 30; v++) begin
      checks++;
      if (acc_cyc[v] - acc_cyc[v-1] != S*E) begin
        failures++; $display("II %0d expected %0d", acc_cyc[v] - acc_cyc[v-1], S*E);
      end
    end
    checks++;
    if (out_cyc[0] - acc_cyc[0] != (E + 1)*S + 7) begin
      failures++; $display("latency %0d expected %0d", out_cyc[0] - acc_cyc[0], (E + 1)*S + 7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
