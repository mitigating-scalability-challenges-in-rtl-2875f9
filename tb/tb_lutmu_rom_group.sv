// tb_lutmu_rom_group: fills the distributed ROM group (C = 8 codebooks,
// 2^I = 4 prototypes, O = 6 outputs, S = 2, E = 3, so 3 x 4 ROMs of 24
// entries) with random LUT entries through the cfg bus and then reads it
// with random selection signals (s, e) and IDs. ROM (j, k) must return
// LUT[e*(O/E)+j][k*S+s][ID_k] one cycle after the read, and must hold its
// output while rd_en is low.
module tb_lutmu_rom_group;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int C = 8, I = 2, O = 6, S = 2, E = 3, W = 4;
  localparam int K = C / S, J = O / E, G = 1 << I;

  logic clk = 0;
  always #5 clk = ~clk;

  cfg_wr_t                   cfg = CFG_IDLE;
  logic                      rd_en = 0;
  logic [0:0]                rd_s = '0;
  logic [1:0]                rd_e = '0;
  logic [K-1:0][I-1:0]       rd_ids = '0;
  logic [J-1:0][K-1:0][2*W-1:0] rd_data;

  lutmu_rom_group #(.C(C), .I(I), .O(O), .S(S), .E(E), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  int lut [O][C][G];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(int s, int e, int ids []);
    for (int j = 0; j < J; j++)
      for (int k = 0; k < K; k++) begin
        checks++;
        if (sext(rd_data[j][k], 2*W) != lut[e*J + j][k*S + s][ids[k]]) begin
          failures++;
          $display("ROM (%0d,%0d) s %0d e %0d: %0d expected %0d", j, k, s, e,
                   sext(rd_data[j][k], 2*W), lut[e*J + j][k*S + s][ids[k]]);
        end
      end
  endtask

  initial begin
    int ids [];
    int s, e;
    ids = new[K];
    @(negedge clk);
    for (int o = 0; o < O; o++)
      for (int c = 0; c < C; c++)
        for (int g = 0; g < G; g++) begin
          lut[o][c][g] = rand_signed(2*W);
          cfg.we = 1; cfg.target = CFG_LUT;
          cfg.addr = 32'((o*C + c)*G + g); cfg.data = 32'(lut[o][c][g]);
          @(negedge clk);
        end
    // Writes to other targets must not disturb the LUTs.
    cfg.target = CFG_BIAS; cfg.addr = 0; cfg.data = 32'hff;
    @(negedge clk);
    cfg = CFG_IDLE;

    for (int t = 0; t < 2000; t++) begin
      s = int'($urandom_range(S - 1, 0));
      e = int'($urandom_range(E - 1, 0));
      rd_en = 1; rd_s = 1'(s); rd_e = 2'(e);
      for (int k = 0; k < K; k++) begin
        ids[k] = int'($urandom_range(G - 1, 0));
        rd_ids[k] = I'(ids[k]);
      end
      @(negedge clk);
      check_read(s, e, ids);
      // Output holds while rd_en is low, whatever the address does.
      rd_en = 0; rd_s = ~rd_s; rd_ids = ~rd_ids;
      @(negedge clk);
      check_read(s, e, ids);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
