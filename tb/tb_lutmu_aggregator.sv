// tb_lutmu_aggregator: loads random LUTs and biases into an aggregator with
// C = 8, 2^I = 4, O = 6, S = 2, E = 3 and sends random ID vectors. Every
// output package must carry, for slide e and slot j, bias[o] +
// sum_c LUT[o][c][ID_c] with o = e*(O/E)+j, slides in order and the last
// flag on slide E-1. Phase 1 runs with random back-pressure; phase 2 runs
// back-to-back and checks the initiation interval S*E and the latency S+2
// from the ID handshake to the first package.
module tb_lutmu_aggregator;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int C = 8, I = 2, O = 6, S = 2, E = 3, W = 4;
  localparam int K = C / S, J = O / E, G = 1 << I;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t                 cfg = CFG_IDLE;
  logic                    id_valid = 0, id_ready;
  logic [C-1:0][I-1:0]     ids = '0;
  logic                    out_valid, out_ready = 0, out_last;
  logic [1:0]              out_slide;
  logic [J-1:0][4*W-1:0]   out_sums;

  lutmu_aggregator #(.C(C), .I(I), .O(O), .S(S), .E(E), .W(W)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int lut [O][C][G];
  int bias [O];
  int exp_sums [$];   // O sums per vector
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
    if (id_valid && id_ready) acc_cyc.push_back(cycle);
    if (out_valid && out_ready) begin
      if (slide == 0) out_cyc.push_back(cycle);
      checks++;
      if (int'(out_slide) != slide || out_last != (slide == E - 1)) begin
        failures++; $display("slide %0d last %0d, expected slide %0d", out_slide, out_last, slide);
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

  task automatic send(int n);
    int id [C];
    int sum;
    for (int v = 0; v < n; v++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        id[c] = int'($urandom_range(G - 1, 0));
        ids[c] = I'(id[c]);
      end
      for (int o = 0; o < O; o++) begin
        sum = bias[o];
        for (int c = 0; c < C; c++) sum += lut[o][c][id[c]];
        exp_sums.push_back(sum);
      end
      id_valid = 1;
      @(posedge clk);
      while (!id_ready) @(posedge clk);
      #1 id_valid = 0;
    end
  endtask

  initial begin
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int o = 0; o < O; o++) begin
      bias[o] = rand_signed(10);
      wr(CFG_BIAS, o, bias[o]);
      for (int c = 0; c < C; c++)
        for (int g = 0; g < G; g++) begin
          lut[o][c][g] = rand_signed(2*W);
          wr(CFG_LUT, (o*C + c)*G + g, lut[o][c][g]);
        end
    end
    send(300);
    while (vecs_out != 300) @(posedge clk);
    bp = 0;
    acc_cyc.delete(); out_cyc.delete();
    repeat (2) @(posedge clk);
    send(20);
    while (vecs_out != 320) @(posedge clk);
    for (int v = 1; v < 20; v++) begin
      checks++;
      if (acc_cyc[v] - acc_cyc[v-1] != S*E) begin
        failures++; $display("II %0d expected %0d", acc_cyc[v] - acc_cyc[v-1], S*E);
      end
    end
    checks++;
    if (out_cyc[0] - acc_cyc[0] != S + 2) begin
      failures++; $display("latency %0d expected %0d", out_cyc[0] - acc_cyc[0], S + 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
