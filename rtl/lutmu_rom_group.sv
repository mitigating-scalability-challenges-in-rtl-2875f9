// lutmu_rom_group: the distributed ROM group holding the pruned LUTs.
//
// The aggregator keeps O = I_{i+1}*C_{i+1} LUTs, one per retained output
// element, each with 2^I rows (prototype IDs) and C columns (input
// codebooks); entry (o, c, g) is the 2W-bit partial dot product of
// prototype g of codebook c with the weights of output o. For one input
// vector exactly one row per column is needed, so the columns can be spread
// over separate memories and read in parallel. As in the paper, the LUTs are
// cut into (O*C)/(S*E) dual-port ROMs of S*E columns each:
//   ROM (j, k), j < O/E, k < C/S, holds the columns of codebooks k*S+s
//   (s < S) of output elements e*(O/E)+j (e < E),
//   at local address (e*S + s)*2^I + g.
// In a cycle with selection signals s (s-th codebook) and e (e-th slide)
// every ROM (j, k) is addressed by the ID of codebook k*S+s, which is the
// ID encoder k produced in round s. All O/E x C/S ROMs answer at once, one
// cycle after rd_en (synchronous read).
//
// The LUTs are filled through the cfg bus (target CFG_LUT, address
// (o*C + c)*2^I + g), which this module decodes into a ROM and local
// address. The mapping of o and c onto (j, e) and (k, s) is this design's
// choice; the paper gives the ROM count and the S*E columns per ROM.
module lutmu_rom_group
  import lutmu_pkg::*;
#(
  parameter int unsigned C = 32,
  parameter int unsigned I = 4,
  parameter int unsigned O = 64,
  parameter int unsigned S = 8,
  parameter int unsigned E = 1,
  parameter int unsigned W = 4,
  localparam int unsigned K     = C / S,
  localparam int unsigned J     = O / E,
  localparam int unsigned G     = 1 << I,
  localparam int unsigned DEPTH = S * E * G,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned SW    = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned EW    = (E > 1) ? $clog2(E) : 1
) (
  input  logic                    clk,
  input  cfg_wr_t                 cfg,
  input  logic                    rd_en,
  input  logic [SW-1:0]           rd_s,
  input  logic [EW-1:0]           rd_e,
  input  logic [K-1:0][I-1:0]     rd_ids,
  output logic [J-1:0][K-1:0][2*W-1:0] rd_data
);

  // Decode of a LUT write into ROM (j, k) and local address.
  logic          wr_hit;
  int unsigned   wr_o, wr_c, wr_g;
  logic [AW-1:0] wr_local;

  always_comb begin
    wr_hit   = cfg.we && cfg.target == CFG_LUT && cfg.addr < 32'(O*C*G);
    wr_g     = int'(cfg.addr) % G;
    wr_c     = (int'(cfg.addr) / G) % C;
    wr_o     = int'(cfg.addr) / (G*C);
    wr_local = AW'((((wr_o / J) * S) + (wr_c % S)) * G + wr_g);
  end

  for (genvar j = 0; j < J; j++) begin : g_out
    for (genvar k = 0; k < K; k++) begin : g_cb
      logic [AW-1:0] rd_addr;
      logic          wr_en;
      assign rd_addr = AW'((int'(rd_e) * S + int'(rd_s)) * G + int'(rd_ids[k]));
      assign wr_en   = wr_hit && (wr_o % J == j) && (wr_c / S == k);
      lutmu_dp_rom #(.DEPTH(DEPTH), .DW(2*W)) u_rom (
        .clk     (clk),
        .rd_en   (rd_en),
        .rd_addr (rd_addr),
        .rd_data (rd_data[j][k]),
        .wr_en   (wr_en),
        .wr_addr (wr_local),
        .wr_data (cfg.data[2*W-1:0])
      );
    end
  end

endmodule
