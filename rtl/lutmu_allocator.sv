// lutmu_allocator: unpacks one pruned input package and hands it to the
// C/S parallel encoders in S rounds.
//
// An input package carries I clusters of C blocks of W bits: after data
// pruning and data reshape, cluster i holds, for every codebook c, the value
// of the i-th split dimension of that codebook. Block (i, c) sits at bits
// [(i*C + c)*W +: W]. Following the paper, the package first enters a
// tree-structured register group that cuts fan-out: a root register holding
// the whole package, then C/S leaf registers of I*S*W bits, leaf k holding
// the blocks of codebooks k*S .. k*S+S-1. An S-to-1 multiplexer per leaf
// then picks codebook k*S+s in round s, so encoder k receives its codebook's
// I blocks (cluster 0 first) in each of S consecutive rounds.
//
// Interface: valid/ready on both sides. The root accepts a new package while
// the leaves still issue the previous one, so one package is taken every S
// cycles when the encoders never stall. Latency: two cycles from in_valid to
// the first round on out_*. The two-level tree and the handshake are this
// design's choices; the paper shows a register tree and muxes without depth
// or flow control.
module lutmu_allocator #(
  parameter int unsigned C = 32,  // input codebooks C_i
  parameter int unsigned I = 4,   // split dimensions per codebook I_i
  parameter int unsigned S = 8,   // partition factor S_i (rounds)
  parameter int unsigned W = 4,   // activation bit width
  localparam int unsigned K  = C / S,
  localparam int unsigned SW = (S > 1) ? $clog2(S) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [I*C*W-1:0]     in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [SW-1:0]        out_round,
  output logic                 out_last,
  output logic [K-1:0][I*W-1:0] out_blocks
);

  // Root of the register tree.
  logic               root_v;
  logic [I*C*W-1:0]   root_q;
  // Leaves: leaf[k][i][s] = block (cluster i, codebook k*S+s).
  logic               leaf_v;
  logic [W-1:0]       leaf_q [K][I][S];
  logic [SW-1:0]      s_q;

  logic leaf_done, leaf_load;

  assign leaf_done = leaf_v && out_ready && (s_q == SW'(S-1));
  assign leaf_load = root_v && (!leaf_v || leaf_done);
  assign in_ready  = !root_v || leaf_load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      root_v <= 1'b0;
      leaf_v <= 1'b0;
      s_q    <= '0;
    end else begin
      if (in_valid && in_ready) root_v <= 1'b1;
      else if (leaf_load)       root_v <= 1'b0;

      if (leaf_load)      leaf_v <= 1'b1;
      else if (leaf_done) leaf_v <= 1'b0;

      if (leaf_v && out_ready)
        s_q <= (s_q == SW'(S-1)) ? '0 : s_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) root_q <= in_data;
    if (leaf_load)
      for (int k = 0; k < K; k++)
        for (int i = 0; i < I; i++)
          for (int s = 0; s < S; s++)
            leaf_q[k][i][s] <= root_q[(i*C + k*S + s)*W +: W];
  end

  // Per-encoder multiplexers selecting the s-th codebook.
  always_comb begin
    for (int k = 0; k < K; k++)
      for (int i = 0; i < I; i++)
        out_blocks[k][i*W +: W] = leaf_q[k][i][s_q];
  end

  assign out_valid = leaf_v;
  assign out_round = s_q;
  assign out_last  = (s_q == SW'(S-1));

  initial begin
    assert (C % S == 0) else $error("S must divide C");
  end

endmodule
