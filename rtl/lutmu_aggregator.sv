// lutmu_aggregator: looks up and sums the partial dot products of one input
// vector.
//
// Given the prototype IDs of all C input codebooks, output element o of the
// LUT-MU is bias[o] + sum_c LUT_o[c][ID_c]. The LUTs live in the distributed
// ROM group (lutmu_rom_group) as (O*C)/(S*E) ROMs, and O/E parallel adder
// trees (lutmu_adder_tree) each add C/S values per cycle. A sequencer walks
// the two selection signals the paper names, e (slide) in the outer loop and
// s (codebook within an encoder's group) in the inner one:
//   cycle (e, s): every ROM (j, k) is read at the ID of codebook k*S+s;
//   the S rounds of slide e are accumulated in the adder trees' output
//   registers and, after round S-1, the O/E sums of output elements
//   e*(O/E) .. e*(O/E)+O/E-1 leave as one package.
// One vector therefore occupies the ROMs for S*E cycles (the paper's
// alpha*S*E read-blocking latency with alpha = 1); a new ID vector is taken
// in the cycle its predecessor issues its last read, so back-to-back vectors
// run with an initiation interval of exactly S*E cycles.
//
// Interface: ID vectors in on id_valid/id_ready (ids[c] is the I-bit ID of
// codebook c); sum packages out on out_valid/out_ready with the slide
// number and a last-slide flag; 4W-bit two's complement sums. Biases (4W
// bits, cfg target CFG_BIAS) and LUT entries (CFG_LUT) arrive on the cfg
// bus. Latency: S+2 cycles from the ID handshake to the first package.
// A full output register stalls the whole pipeline (ROM reads, adder trees
// and sequencer) until it drains. The stall scheme and the loop order are
// this design's choices.
module lutmu_aggregator
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
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,
  input  logic                      id_valid,
  output logic                      id_ready,
  input  logic [C-1:0][I-1:0]       ids,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [EW-1:0]             out_slide,
  output logic                      out_last,
  output logic [J-1:0][4*W-1:0]     out_sums
);

  // ---------------------------------------------------------------- biases
  logic signed [4*W-1:0] bias_q [O];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.target == CFG_BIAS && cfg.addr < 32'(O))
      bias_q[cfg.addr] <= cfg.data[4*W-1:0];
  end

  // ------------------------------------------------------------- sequencer
  logic [C-1:0][I-1:0] ids_q;
  logic                busy;
  logic [SW-1:0]       s_q;
  logic [EW-1:0]       e_q;
  logic                stall, issue, last_issue, id_fire;

  assign stall      = out_valid && !out_ready;
  assign issue      = busy && !stall;
  assign last_issue = (s_q == SW'(S-1)) && (e_q == EW'(E-1));
  assign id_ready   = !busy || (issue && last_issue);
  assign id_fire    = id_valid && id_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      s_q  <= '0;
      e_q  <= '0;
    end else begin
      if (id_fire) begin
        busy <= 1'b1;
        s_q  <= '0;
        e_q  <= '0;
      end else if (issue) begin
        if (last_issue) begin
          busy <= 1'b0;
          s_q  <= '0;
          e_q  <= '0;
        end else if (s_q == SW'(S-1)) begin
          s_q <= '0;
          e_q <= e_q + 1'b1;
        end else begin
          s_q <= s_q + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (id_fire) ids_q <= ids;
  end

  // ---------------------------------------------------- distributed ROMs
  logic [K-1:0][I-1:0]        rd_ids;
  logic [J-1:0][K-1:0][2*W-1:0] rd_data;

  always_comb begin
    for (int k = 0; k < int'(K); k++)
      rd_ids[k] = ids_q[k*S + int'(s_q)];
  end

  lutmu_rom_group #(.C(C), .I(I), .O(O), .S(S), .E(E), .W(W)) u_roms (
    .clk     (clk),
    .cfg     (cfg),
    .rd_en   (issue),
    .rd_s    (s_q),
    .rd_e    (e_q),
    .rd_ids  (rd_ids),
    .rd_data (rd_data)
  );

  // Read stage tags (ROM output is valid one cycle after the read).
  logic          p1_v;
  logic [SW-1:0] p1_s;
  logic [EW-1:0] p1_e;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_v <= 1'b0;
    end else if (!stall) begin
      p1_v <= issue;
    end
  end

  always_ff @(posedge clk) begin
    if (!stall && issue) begin
      p1_s <= s_q;
      p1_e <= e_q;
    end
  end

  // ---------------------------------------------------------- adder trees
  logic                  acc_en, p1_first, p1_last;
  logic signed [4*W-1:0] total [J];

  assign acc_en   = p1_v && !stall;
  assign p1_first = (p1_s == '0);
  assign p1_last  = (p1_s == SW'(S-1));

  for (genvar j = 0; j < J; j++) begin : g_tree
    lutmu_adder_tree #(.N(K), .IN_W(2*W), .OUT_W(4*W)) u_tree (
      .clk   (clk),
      .en    (acc_en),
      .first (p1_first),
      .init  (bias_q[int'(p1_e)*J + j]),
      .in    (rd_data[j]),
      .total (total[j])
    );
  end

  // -------------------------------------------------------- output stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (acc_en && p1_last) begin
      out_valid <= 1'b1;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (acc_en && p1_last) begin
      for (int j = 0; j < int'(J); j++) out_sums[j] <= total[j];
      out_slide <= p1_e;
      out_last  <= (p1_e == EW'(E-1));
    end
  end

endmodule
