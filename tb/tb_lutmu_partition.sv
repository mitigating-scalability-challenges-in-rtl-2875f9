// tb_lutmu_partition: the partition configurations (S, E) evaluated for
// the 256x256 layer, on four computation units built side by side:
//   unit 0: LUT shape (32, 16, 64), (S, E) = (8, 4)
//   unit 1: LUT shape (32, 16, 64), (S, E) = (8, 8)
//   unit 2: LUT shape (32, 8, 48),  (S, E) = (8, 3)
//   unit 3: LUT shape (32, 8, 48),  (S, E) = (8, 6)
// Units 0 and 1 share one set of random tables on one configuration bus,
// units 2 and 3 another. Each unit is then fed its own back-to-back stream
// of random vectors. Every activation is compared with the layer model,
// the first vector's latency must be (E+1)*S + 7 cycles and the steady
// initiation interval S*E cycles (32, 64, 24 and 48).
module tb_lutmu_partition;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int C = 32, S = 8, W = 4;
  localparam int NV = 24;
  localparam int UI [4] = '{4, 4, 3, 3};
  localparam int UO [4] = '{64, 64, 48, 48};
  localparam int UE [4] = '{4, 8, 3, 6};

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t        cfg_a = CFG_IDLE, cfg_b = CFG_IDLE;
  logic [3:0]     in_valid = '0, in_ready, out_valid;
  logic [4*C*W-1:0] in_data [4];
  logic [64*W-1:0]  out_data [4];

  initial for (int d = 0; d < 4; d++) in_data[d] = '0;

  lutmu_top #(.C(C), .I(4), .O(64), .S(S), .E(4), .W(W)) u0 (
    .clk, .rst_n, .cfg(cfg_a), .in_valid(in_valid[0]), .in_ready(in_ready[0]),
    .in_data(in_data[0]), .out_valid(out_valid[0]), .out_ready(1'b1), .out_data(out_data[0]));
  lutmu_top #(.C(C), .I(4), .O(64), .S(S), .E(8), .W(W)) u1 (
    .clk, .rst_n, .cfg(cfg_a), .in_valid(in_valid[1]), .in_ready(in_ready[1]),
    .in_data(in_data[1]), .out_valid(out_valid[1]), .out_ready(1'b1), .out_data(out_data[1]));
  lutmu_top #(.C(C), .I(3), .O(48), .S(S), .E(3), .W(W)) u2 (
    .clk, .rst_n, .cfg(cfg_b), .in_valid(in_valid[2]), .in_ready(in_ready[2]),
    .in_data(in_data[2][3*C*W-1:0]), .out_valid(out_valid[2]), .out_ready(1'b1),
    .out_data(out_data[2][48*W-1:0]));
  lutmu_top #(.C(C), .I(3), .O(48), .S(S), .E(6), .W(W)) u3 (
    .clk, .rst_n, .cfg(cfg_b), .in_valid(in_valid[3]), .in_ready(in_ready[3]),
    .in_data(in_data[3][3*C*W-1:0]), .out_valid(out_valid[3]), .out_ready(1'b1),
    .out_data(out_data[3][48*W-1:0]));

  assign out_data[2][64*W-1:48*W] = '0;
  assign out_data[3][64*W-1:48*W] = '0;

  int checks = 0, failures = 0, cycle = 0;
  int exp_q [4][$];
  int acc_cyc [4][$];
  int out_cyc [4][$];

  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < 4; d++) begin
      if (in_valid[d] && in_ready[d]) acc_cyc[d].push_back(cycle);
      if (out_valid[d]) begin
        out_cyc[d].push_back(cycle);
        for (int o = 0; o < UO[d]; o++) begin
          int ex;
          ex = exp_q[d].pop_front();
          checks++;
          if (int'(out_data[d][o*W +: W]) != ex) begin
            failures++;
            $display("unit %0d vec %0d o %0d: %0d expected %0d", d,
                     out_cyc[d].size() - 1, o, out_data[d][o*W +: W], ex);
          end
        end
      end
    end
  end

  task automatic load(ref cfg_wr_t cfg, input lutmu_model m);
    int g, nodes, t;
    g = 1 << m.I; nodes = g - 1; t = (1 << W) - 1;
    for (int c = 0; c < m.C; c++)
      for (int n = 0; n < nodes; n++) begin
        cfg = '{we: 1'b1, target: CFG_SPLIT, addr: 32'(c*nodes + n), data: 32'(m.split[c][n])};
        @(negedge clk);
      end
    for (int o = 0; o < m.O; o++) begin
      cfg = '{we: 1'b1, target: CFG_BIAS, addr: 32'(o), data: 32'(m.bias[o])};
      @(negedge clk);
      for (int k = 0; k < t; k++) begin
        cfg = '{we: 1'b1, target: CFG_THRESH, addr: 32'(o*t + k), data: 32'(m.thr[o][k])};
        @(negedge clk);
      end
      for (int c = 0; c < m.C; c++)
        for (int p = 0; p < g; p++) begin
          cfg = '{we: 1'b1, target: CFG_LUT, addr: 32'((o*m.C + c)*g + p), data: 32'(m.lut[o][c][p])};
          @(negedge clk);
        end
    end
    cfg = CFG_IDLE;
  endtask

  task automatic drive(int d, lutmu_model m);
    int x [], sums [], act [], ids [];
    x = new[m.I*m.C];
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < m.I*m.C; i++) begin
        x[i] = int'($urandom_range((1 << W) - 1, 0));
        in_data[d][i*W +: W] = W'(x[i]);
      end
      m.compute(x, sums, act, ids);
      for (int o = 0; o < m.O; o++) exp_q[d].push_back(act[o]);
      in_valid[d] = 1'b1;
      @(posedge clk);
      while (!in_ready[d]) @(posedge clk);
      #1 in_valid[d] = 1'b0;
      @(negedge clk);
    end
  endtask

  initial begin
    lutmu_model ma, mb;
    ma = new(C, 4, 64, W);
    mb = new(C, 3, 48, W);
    ma.randomize_tables();
    mb.randomize_tables();
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      load(cfg_a, ma);
      load(cfg_b, mb);
    join
    @(negedge clk);
    fork
      drive(0, ma);
      drive(1, ma);
      drive(2, mb);
      drive(3, mb);
    join
    for (int d = 0; d < 4; d++)
      while (out_cyc[d].size() != NV) @(posedge clk);
    for (int d = 0; d < 4; d++) begin
      checks++;
      if (out_cyc[d][0] - acc_cyc[d][0] != (UE[d] + 1)*S + 7) begin
        failures++;
        $display("unit %0d latency %0d expected %0d", d, out_cyc[d][0] - acc_cyc[d][0], (UE[d] + 1)*S + 7);
      end
      for (int v = 8; v < NV; v++) begin
        checks++;
        if (acc_cyc[d][v] - acc_cyc[d][v-1] != S*UE[d]) begin
          failures++;
          $display("unit %0d II %0d expected %0d", d, acc_cyc[d][v] - acc_cyc[d][v-1], S*UE[d]);
        end
      end
      $display("unit %0d (I=%0d, O=%0d, S=%0d, E=%0d): II %0d, latency %0d", d, UI[d], UO[d], S, UE[d],
               acc_cyc[d][NV-1] - acc_cyc[d][NV-2], out_cyc[d][0] - acc_cyc[d][0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
