// lutmu_core: the LUT-based approximate matrix multiplication unit (LUT-MU).
//
// Computes, for each pruned input vector, the O = I_{i+1}*C_{i+1} retained
// outputs bias[o] + sum_c LUT_o[c][encode_c(a)], where encode_c is the
// MADDNESS decision tree of codebook c. Three units form a pipeline:
//   allocator   - takes the I x C package and, in S rounds, gives each of
//                 the C/S encoders the I blocks of one of its codebooks;
//   encoders    - C/S parallel decision-tree encoders, one ID each per round;
//   aggregator  - distributed ROM group plus O/E adder trees, S*E cycles
//                 per vector.
// Between the encoders and the aggregator an ID buffer collects the S rounds
// of IDs of one vector (C IDs). The aggregator copies the buffer when it
// starts a vector, so the allocator and encoders already work on the next
// vector while the aggregator still reads the ROMs: the initiation interval
// is max(S, S*E) = S*E cycles, S when E = 1 (the paper's S = 8, E = 1
// reaches II = 8).
//
// Interface: input packages on in_valid/in_ready (I clusters x C blocks, W
// bits, block (i,c) at bits (i*C+c)*W); sum packages on out_*, E per vector,
// O/E signed 4W-bit sums each; one cfg bus loads split values, LUTs and
// biases. Latency from the input handshake to the first sum package:
// 2 (allocator) + S (encode rounds) + 1 (ID buffer) + S + 2 (aggregator).
// The ID buffer and the valid/ready flow control are this design's own.
module lutmu_core
  import lutmu_pkg::*;
#(
  parameter int unsigned C = 32,
  parameter int unsigned I = 4,
  parameter int unsigned O = 64,
  parameter int unsigned S = 8,
  parameter int unsigned E = 1,
  parameter int unsigned W = 4,
  localparam int unsigned K  = C / S,
  localparam int unsigned J  = O / E,
  localparam int unsigned SW = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned EW = (E > 1) ? $clog2(E) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_wr_t               cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [I*C*W-1:0]      in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [EW-1:0]         out_slide,
  output logic                  out_last,
  output logic [J-1:0][4*W-1:0] out_sums
);

  // ------------------------------------------------------------- allocator
  logic                  al_valid, al_ready, al_last;
  logic [SW-1:0]         al_round;
  logic [K-1:0][I*W-1:0] al_blocks;

  lutmu_allocator #(.C(C), .I(I), .S(S), .W(W)) u_alloc (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (in_valid),
    .in_ready   (in_ready),
    .in_data    (in_data),
    .out_valid  (al_valid),
    .out_ready  (al_ready),
    .out_round  (al_round),
    .out_last   (al_last),
    .out_blocks (al_blocks)
  );

  // -------------------------------------------------------------- encoders
  // The encoders run in lockstep: they share the round and the handshake.
  logic [K-1:0]          en_in_ready, en_valid, en_last_k;
  logic [K-1:0][SW-1:0]  en_round_k;
  logic [K-1:0][I-1:0]   en_id;
  logic                  en_ready;

  for (genvar k = 0; k < K; k++) begin : g_enc
    lutmu_encoder #(.I(I), .S(S), .W(W), .ENC_IDX(k)) u_enc (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg       (cfg),
      .in_valid  (al_valid),
      .in_ready  (en_in_ready[k]),
      .in_round  (al_round),
      .in_last   (al_last),
      .in_blocks (al_blocks[k]),
      .out_valid (en_valid[k]),
      .out_ready (en_ready),
      .out_round (en_round_k[k]),
      .out_last  (en_last_k[k]),
      .out_id    (en_id[k])
    );
  end

  assign al_ready = en_in_ready[0];

  // ------------------------------------------------------------- ID buffer
  logic [C-1:0][I-1:0] idbuf_q;
  logic                idbuf_full;
  logic                ag_id_ready, handoff, en_fire;

  assign handoff  = idbuf_full && ag_id_ready;
  assign en_ready = !idbuf_full || handoff;
  assign en_fire  = en_valid[0] && en_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idbuf_full <= 1'b0;
    end else if (en_fire && en_last_k[0]) begin
      idbuf_full <= 1'b1;
    end else if (handoff) begin
      idbuf_full <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (en_fire)
      for (int k = 0; k < int'(K); k++)
        idbuf_q[k*S + int'(en_round_k[0])] <= en_id[k];
  end

  // ------------------------------------------------------------ aggregator
  lutmu_aggregator #(.C(C), .I(I), .O(O), .S(S), .E(E), .W(W)) u_aggr (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (cfg),
    .id_valid  (idbuf_full),
    .id_ready  (ag_id_ready),
    .ids       (idbuf_q),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_slide (out_slide),
    .out_last  (out_last),
    .out_sums  (out_sums)
  );

  // The encoders must stay in lockstep.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                                en_valid == {K{en_valid[0]}});

endmodule
