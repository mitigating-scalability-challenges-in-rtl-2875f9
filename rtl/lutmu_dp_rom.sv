// lutmu_dp_rom: one dual-port ROM of the distributed ROM group.
//
// Holds DEPTH entries of DW bits. Port A is the synchronous read port used
// during inference: the address is sampled when rd_en is high and the word
// appears on rd_data one cycle later; rd_data holds while rd_en is low.
// Port B is a write port used only to fill the table with the results of
// offline training before inference starts; the contents are read-only
// while the LUT-MU computes. Using the second port of the paper's dual-port
// ROMs for filling is this design's choice.
module lutmu_dp_rom #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned DW    = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

endmodule
