// lutmu_top: one LUT-MU based computation unit (layer).
//
// A layer of a LUT-MU network replaces the quantised matrix multiplication
// with the LUT-MU and folds scaling, batch normalisation and activation into
// successive thresholding. Here the pruned W-bit input package of layer i
// (I clusters x C blocks) goes through
//   lutmu_core      - allocator, C/S encoders, distributed ROMs, adder trees;
//   lutmu_threshold - 2^W-1 thresholds per output, 4W-bit sum -> W bits;
//   lutmu_out_pack  - E packages reassembled into the pruned input package
//                     of layer i+1 (O/C_{i+1} clusters x C_{i+1} blocks).
// Units of this kind chain directly: out_data of one is in_data of the next
// when its O equals the next one's I*C.
//
// Defaults are the LUT shape (C_in, 2^I_in, C_out*I_out) = (32, 16, 64)
// with partition factors (S, E) = (8, 1) and W = 4. All tables are filled
// through the cfg bus before inference (see lutmu_pkg). A new input package
// is accepted every S*E cycles; latency from input handshake to output
// package is (E+1)*S+7 cycles without back-pressure (23 at the defaults).
module lutmu_top
  import lutmu_pkg::*;
#(
  parameter int unsigned C = 32,
  parameter int unsigned I = 4,
  parameter int unsigned O = 64,
  parameter int unsigned S = 8,
  parameter int unsigned E = 1,
  parameter int unsigned W = 4,
  localparam int unsigned J  = O / E,
  localparam int unsigned EW = (E > 1) ? $clog2(E) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [I*C*W-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [O*W-1:0]   out_data
);

  logic                  mu_valid, mu_ready, mu_last;
  logic [EW-1:0]         mu_slide;
  logic [J-1:0][4*W-1:0] mu_sums;

  lutmu_core #(.C(C), .I(I), .O(O), .S(S), .E(E), .W(W)) u_core (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (cfg),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   (in_data),
    .out_valid (mu_valid),
    .out_ready (mu_ready),
    .out_slide (mu_slide),
    .out_last  (mu_last),
    .out_sums  (mu_sums)
  );

  logic                th_valid, th_ready, th_last;
  logic [EW-1:0]       th_slide;
  logic [J-1:0][W-1:0] th_act;

  lutmu_threshold #(.N(J), .O(O), .W(W)) u_thr (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (cfg),
    .in_valid  (mu_valid),
    .in_ready  (mu_ready),
    .in_slide  (mu_slide),
    .in_last   (mu_last),
    .in_sums   (mu_sums),
    .out_valid (th_valid),
    .out_ready (th_ready),
    .out_slide (th_slide),
    .out_last  (th_last),
    .out_act   (th_act)
  );

  lutmu_out_pack #(.O(O), .E(E), .W(W)) u_pack (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (th_valid),
    .in_ready  (th_ready),
    .in_slide  (th_slide),
    .in_last   (th_last),
    .in_act    (th_act),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_data)
  );

endmodule
