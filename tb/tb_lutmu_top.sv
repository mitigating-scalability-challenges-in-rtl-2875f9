// tb_lutmu_top: two cascaded LUT-MU computation units, end to end.
//
// Layer A: C = 8 codebooks, 2^I = 16 prototypes, O = 16 retained outputs,
// S = 4, E = 2, W = 4. Its 16 activations form the pruned input of layer B
// (2 clusters x 8 codebooks, 2^I = 4 prototypes, O = 8, S = 2, E = 1), so
// the test also exercises the output reshape that lets units chain. Both
// layers are loaded with random split values, LUTs, biases and thresholds;
// every output package of A and of B is compared with a model of the layer
// (tree-walk encode, LUT sum, threshold count).
//
// Each mechanism of the design is counted and must occur at least once:
// multi-round accumulation, multiple slides, encoding of the next vector
// while the aggregator is busy, an ID vector waiting for the aggregator,
// an aggregator stall under back-pressure (in either layer), activations at 0 and at 2^W-1,
// and vectors passing from A into B. A back-to-back phase checks the
// initiation interval S*E of layer A and its input-to-output latency.
module tb_lutmu_top;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int CA = 8, IA = 4, OA = 16, SA = 4, EA = 2, W = 4;
  localparam int CB = 8, IB = 2, OB = 8, SB = 2, EB = 1;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t             cfg_a = CFG_IDLE, cfg_b = CFG_IDLE;
  logic                in_valid = 0, in_ready;
  logic [IA*CA*W-1:0]  in_data = '0;
  logic                ab_valid, ab_ready;
  logic [OA*W-1:0]     ab_data;
  logic                out_valid, out_ready = 0;
  logic [OB*W-1:0]     out_data;

  lutmu_top #(.C(CA), .I(IA), .O(OA), .S(SA), .E(EA), .W(W)) u_a (
    .clk(clk), .rst_n(rst_n), .cfg(cfg_a),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(ab_valid), .out_ready(ab_ready), .out_data(ab_data));

  lutmu_top #(.C(CB), .I(IB), .O(OB), .S(SB), .E(EB), .W(W)) u_b (
    .clk(clk), .rst_n(rst_n), .cfg(cfg_b),
    .in_valid(ab_valid), .in_ready(ab_ready), .in_data(ab_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));

  int checks = 0, failures = 0, cycle = 0;
  lutmu_model ma, mb;
  int exp_a [$], exp_b [$];   // O activations per vector
  int vecs_a = 0, vecs_b = 0;
  bit bp = 1;
  int acc_cyc [$], outa_cyc [$];

  // Mechanism counters.
  int n_rounds = 0, n_slides = 0, n_overlap = 0, n_idwait = 0, n_stall = 0;
  int n_act0 = 0, n_actmax = 0, n_cascade = 0;

  always @(posedge clk) cycle++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= bp ? ($urandom_range(3, 0) == 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (u_a.u_core.u_aggr.acc_en && !u_a.u_core.u_aggr.p1_first) n_rounds++;
    if (u_a.u_core.out_valid && u_a.u_core.out_ready && u_a.u_core.out_slide != 0) n_slides++;
    if (u_a.u_core.u_aggr.busy && u_a.u_core.al_valid) n_overlap++;
    if (u_a.u_core.idbuf_full && !u_a.u_core.ag_id_ready) n_idwait++;
    if (u_a.u_core.u_aggr.stall || u_b.u_core.u_aggr.stall) n_stall++;
    if (ab_valid && ab_ready) n_cascade++;
    if (in_valid && in_ready) acc_cyc.push_back(cycle);

    if (ab_valid && ab_ready) begin
      outa_cyc.push_back(cycle);
      for (int o = 0; o < OA; o++) begin
        int ex;
        ex = exp_a.pop_front();
        checks++;
        if (int'(ab_data[o*W +: W]) != ex) begin
          failures++; $display("layer A vec %0d o %0d: %0d expected %0d", vecs_a, o, ab_data[o*W +: W], ex);
        end
        if (ex == 0) n_act0++;
        if (ex == (1 << W) - 1) n_actmax++;
      end
      vecs_a++;
    end
    if (out_valid && out_ready) begin
      for (int o = 0; o < OB; o++) begin
        int ex;
        ex = exp_b.pop_front();
        checks++;
        if (int'(out_data[o*W +: W]) != ex) begin
          failures++; $display("layer B vec %0d o %0d: %0d expected %0d", vecs_b, o, out_data[o*W +: W], ex);
        end
      end
      vecs_b++;
    end
  end

  task automatic load(lutmu_model m, bit to_b);
    cfg_wr_t w;
    for (int c = 0; c < m.C; c++)
      for (int n = 0; n < m.NODES; n++) begin
        w = '{we: 1'b1, target: CFG_SPLIT, addr: 32'(c*m.NODES + n), data: 32'(m.split[c][n])};
        if (to_b) cfg_b = w; else cfg_a = w;
        @(negedge clk);
      end
    for (int o = 0; o < m.O; o++) begin
      w = '{we: 1'b1, target: CFG_BIAS, addr: 32'(o), data: 32'(m.bias[o])};
      if (to_b) cfg_b = w; else cfg_a = w;
      @(negedge clk);
      for (int t = 0; t < m.T; t++) begin
        w = '{we: 1'b1, target: CFG_THRESH, addr: 32'(o*m.T + t), data: 32'(m.thr[o][t])};
        if (to_b) cfg_b = w; else cfg_a = w;
        @(negedge clk);
      end
      for (int c = 0; c < m.C; c++)
        for (int g = 0; g < m.G; g++) begin
          w = '{we: 1'b1, target: CFG_LUT, addr: 32'((o*m.C + c)*m.G + g), data: 32'(m.lut[o][c][g])};
          if (to_b) cfg_b = w; else cfg_a = w;
          @(negedge clk);
        end
    end
    cfg_a = CFG_IDLE; cfg_b = CFG_IDLE;
  endtask

  task automatic send(int n, bit gaps);
    int x [], sa [], aa [], ia [], sb [], ab [], ib [];
    x = new[IA*CA];
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      if (gaps) repeat ($urandom_range(3, 0) == 0 ? $urandom_range(20, 1) : 0) @(negedge clk);
      for (int b = 0; b < IA*CA; b++) begin
        x[b] = int'($urandom_range((1 << W) - 1, 0));
        in_data[b*W +: W] = W'(x[b]);
      end
      ma.compute(x, sa, aa, ia);
      foreach (aa[o]) exp_a.push_back(aa[o]);
      mb.compute(aa, sb, ab, ib);
      foreach (ab[o]) exp_b.push_back(ab[o]);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
  endtask

  initial begin
    ma = new(CA, IA, OA, W);
    mb = new(CB, IB, OB, W);
    ma.randomize_tables();
    mb.randomize_tables();
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    load(ma, 0);
    load(mb, 1);

    send(200, 1);
    send(100, 0);
    while (vecs_b != 300) @(posedge clk);

    bp = 0;
    acc_cyc.delete(); outa_cyc.delete();
    repeat (4) @(posedge clk);
    send(30, 0);
    while (vecs_b != 330) @(posedge clk);
    // The first vectors fill the buffers of the pipeline faster than S*E.
    for (int v = 8; v < 30; v++) begin
      checks++;
      if (acc_cyc[v] - acc_cyc[v-1] != SA*EA) begin
        failures++; $display("II %0d expected %0d", acc_cyc[v] - acc_cyc[v-1], SA*EA);
      end
    end
    checks++;
    if (outa_cyc[0] - acc_cyc[0] != (EA + 1)*SA + 7) begin
      failures++; $display("latency %0d expected %0d", outa_cyc[0] - acc_cyc[0], (EA + 1)*SA + 7);
    end

    $display("mechanisms: rounds %0d slides %0d overlap %0d idwait %0d stall %0d act0 %0d actmax %0d cascade %0d",
             n_rounds, n_slides, n_overlap, n_idwait, n_stall, n_act0, n_actmax, n_cascade);
    checks += 8;
    if (n_rounds == 0)  begin failures++; $display("no multi-round accumulation"); end
    if (n_slides == 0)  begin failures++; $display("no second slide"); end
    if (n_overlap == 0) begin failures++; $display("no encode/aggregate overlap"); end
    if (n_idwait == 0)  begin failures++; $display("no ID vector waiting"); end
    if (n_stall == 0)   begin failures++; $display("no aggregator stall"); end
    if (n_act0 == 0)    begin failures++; $display("no zero activation"); end
    if (n_actmax == 0)  begin failures++; $display("no saturated activation"); end
    if (n_cascade == 0) begin failures++; $display("no cascade transfer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
