// tb_lutmu_workloads: runs the evaluated layer shapes on the default
// computation unit (C = 32, 2^I = 16, O = 64, S = 8, E = 1, W = 4), each
// with random tables:
//   1. 256x256 MLP layer, LUT shape (32, 8, 48): 2^I = 8, a tree one level
//      shallower than the build, and 48 of the 64 outputs;
//   2. 256x256 MLP layer, LUT shape (32, 16, 64): the native shape;
//   3. MLP hidden layer with (C, 2^I) = (4, 16) codebooks and 4x4 = 16
//      retained outputs;
//   4. 256-wide problem with input d_sub = 8 and output C = 8: C = 32,
//      O = 8*4 = 32.
// A smaller layer is embedded in the build: unused codebooks and outputs
// get zero LUT entries, and a shallower tree gets its extra levels split
// values of 2^W-1 (never exceeded), so its ID is the shallow ID shifted
// left and only those LUT rows are filled. The inputs of unused codebooks
// and clusters are random, to show they cannot disturb the result. Every
// retained activation is compared with a model of the layer at its own
// size, and the unit must keep its 8-cycle initiation interval.
module tb_lutmu_workloads;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int C = 32, I = 4, O = 64, S = 8, E = 1, W = 4;
  localparam int G = 1 << I, NODES = G - 1, T = (1 << W) - 1;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t          cfg = CFG_IDLE;
  logic             in_valid = 0, in_ready;
  logic [I*C*W-1:0] in_data = '0;
  logic             out_valid, out_ready = 1;
  logic [O*W-1:0]   out_data;

  lutmu_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int exp_q [$];     // retained activations per vector, -1 = unused output
  int vecs_out = 0;
  int acc_cyc [$];
  string wl_name;

  always @(posedge clk) cycle++;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) acc_cyc.push_back(cycle);
    if (out_valid && out_ready) begin
      for (int o = 0; o < O; o++) begin
        int ex;
        ex = exp_q.pop_front();
        if (ex >= 0) begin
          checks++;
          if (int'(out_data[o*W +: W]) != ex) begin
            failures++;
            $display("%s vec %0d o %0d: %0d expected %0d", wl_name, vecs_out, o, out_data[o*W +: W], ex);
          end
        end
      end
      vecs_out++;
    end
  end

  task automatic wr(cfg_target_e t, int a, int d);
    cfg.we = 1; cfg.target = t; cfg.addr = 32'(a); cfg.data = 32'(d);
    @(negedge clk);
  endtask

  // Loads model m (m.C <= C, m.I <= I, m.O <= O) into the unit, padded.
  task automatic load_padded(lutmu_model m);
    int sh;
    sh = I - m.I;
    for (int c = 0; c < C; c++)
      for (int l = 0; l < I; l++)
        for (int p = 0; p < (1 << l); p++) begin
          int v;
          if (c >= m.C)     v = 0;
          else if (l < m.I) v = m.split[c][(1 << l) - 1 + p];
          else              v = (1 << W) - 1;
          wr(CFG_SPLIT, c*NODES + (1 << l) - 1 + p, v);
        end
    for (int o = 0; o < O; o++) begin
      wr(CFG_BIAS, o, (o < m.O) ? m.bias[o] : 0);
      for (int t = 0; t < T; t++) wr(CFG_THRESH, o*T + t, (o < m.O) ? m.thr[o][t] : 0);
      for (int c = 0; c < C; c++)
        for (int g = 0; g < G; g++) begin
          int v;
          v = 0;
          if (o < m.O && c < m.C && (g % (1 << sh)) == 0) v = m.lut[o][c][g >> sh];
          wr(CFG_LUT, (o*C + c)*G + g, v);
        end
    end
    cfg = CFG_IDLE;
  endtask

  task automatic run(string name, int mc, int mi, int mo, int n);
    lutmu_model m;
    int x [], xw [], sums [], act [], ids [];
    int base;
    wl_name = name;
    m = new(mc, mi, mo, W);
    m.randomize_tables();
    load_padded(m);
    x = new[I*C]; xw = new[mi*mc];
    acc_cyc.delete();
    base = vecs_out;
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      for (int l = 0; l < I; l++)
        for (int c = 0; c < C; c++) begin
          x[l*C + c] = int'($urandom_range((1 << W) - 1, 0));
          in_data[(l*C + c)*W +: W] = W'(x[l*C + c]);
          if (l < mi && c < mc) xw[l*mc + c] = x[l*C + c];
        end
      m.compute(xw, sums, act, ids);
      for (int o = 0; o < O; o++) exp_q.push_back((o < mo) ? act[o] : -1);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
    while (vecs_out != base + n) @(posedge clk);
    for (int v = 8; v < n; v++) begin
      checks++;
      if (acc_cyc[v] - acc_cyc[v-1] != S*E) begin
        failures++; $display("%s: II %0d", name, acc_cyc[v] - acc_cyc[v-1]);
      end
    end
    $display("%s: %0d vectors done", name, n);
  endtask

  initial begin
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run("SFC layer 2, LUT shape (32,8,48)", 32, 3, 48, 40);
    run("SFC layer 2, LUT shape (32,16,64)", 32, 4, 64, 40);
    run("MLP hidden layer, (C,2^I) = (4,16)", 4, 4, 16, 40);
    run("256-wide layer, output C = 8", 32, 4, 32, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
