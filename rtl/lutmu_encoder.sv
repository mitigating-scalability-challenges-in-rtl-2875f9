// lutmu_encoder: decision-tree encoder of one codebook per round.
//
// MADDNESS encodes a sub-vector with an I-level binary decision tree: at
// level l the value of the l-th split dimension (cluster l) is compared with
// the split value of the current node, and the next ID is
// current_ID*2 + bias, bias = 1 when the value is greater than the split
// value and 0 otherwise. Walking the tree level by level creates a chain of
// data dependencies, so, as in the paper, this encoder evaluates every node
// at once: level l has 2^l comparators, one per node, all fed by the block of
// cluster l. For each of the 2^I leaves an AND gate checks that every
// comparator on the path to that leaf agrees with the leaf's ID bits; exactly
// one AND output is high, and a 2^I-to-I encoder turns it into the ID.
//
// The encoder serves S codebooks (k*S .. k*S+S-1 for encoder ENC_IDX = k)
// and keeps one set of 2^I-1 split values per codebook, selected by the
// round number s. Split values are held in registers loaded over the cfg
// bus (node order: level l, path prefix p -> node 2^l-1+p). Values and split
// values are unsigned W-bit numbers.
//
// Timing: the comparison is combinational; the ID is registered, so out_*
// follows in_* by one cycle. valid/ready; in_ready = !out_valid || out_ready.
// Heap ordering of the nodes, unsigned comparison and the register storage
// of the split values are this design's choices; the paper gives the
// comparator arrays, the AND gates, the 2^I-to-I encoder and the rule
// "Next ID = Current ID x 2 + Bias".
module lutmu_encoder
  import lutmu_pkg::*;
#(
  parameter int unsigned I       = 4,
  parameter int unsigned S       = 8,
  parameter int unsigned W       = 4,
  parameter int unsigned ENC_IDX = 0,
  localparam int unsigned G     = 1 << I,
  localparam int unsigned NODES = G - 1,
  localparam int unsigned SW    = (S > 1) ? $clog2(S) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_wr_t         cfg,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [SW-1:0]   in_round,
  input  logic            in_last,
  input  logic [I*W-1:0]  in_blocks,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [SW-1:0]   out_round,
  output logic            out_last,
  output logic [I-1:0]    out_id
);

  // Split values of the S codebooks of this encoder.
  logic [W-1:0] split_q [S][NODES];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.target == CFG_SPLIT &&
        cfg.addr >= 32'(ENC_IDX*S*NODES) && cfg.addr < 32'((ENC_IDX+1)*S*NODES)) begin
      automatic int unsigned a = int'(cfg.addr) - ENC_IDX*S*NODES;
      split_q[a / NODES][a % NODES] <= cfg.data[W-1:0];
    end
  end

  // Comparator arrays: gt[n] for every node n of the tree.
  logic [NODES-1:0] gt;
  // AND gates: one per leaf.
  logic [G-1:0]     hit;
  logic [I-1:0]     id;

  always_comb begin
    for (int l = 0; l < int'(I); l++)
      for (int p = 0; p < (1 << l); p++)
        gt[(1 << l) - 1 + p] = in_blocks[l*W +: W] > split_q[in_round][(1 << l) - 1 + p];

    for (int g = 0; g < int'(G); g++) begin
      hit[g] = 1'b1;
      for (int l = 0; l < int'(I); l++) begin
        // Path prefix above level l is the top l bits of g; the decision at
        // level l is bit I-1-l of g.
        automatic int p = g >> (I - l);
        hit[g] &= (gt[(1 << l) - 1 + p] == g[I-1-l]);
      end
    end

    // 2^I-to-I encoder.
    id = '0;
    for (int g = 0; g < int'(G); g++)
      if (hit[g]) id |= I'(g);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      out_id    <= id;
      out_round <= in_round;
      out_last  <= in_last;
    end
  end

  // Exactly one path of the tree matches.
  always_comb begin
    if (in_valid) assert ($onehot(hit));
  end

endmodule
