// lutmu_out_pack: reshapes the activations of one vector into the next
// layer's input package.
//
// Parameter pruning keeps only the LUTs of outputs that are split dimensions
// of the next layer, and offline training orders them cluster by cluster:
// output element o = i'*C_{i+1} + c' is the i'-th split-dimension value of
// codebook c' of the next layer. The activations leave the thresholding unit
// as E packages of O/E W-bit values; this module writes package e into
// bits [e*(O/E)*W +: (O/E)*W] of an O*W-bit register and releases the
// whole package, now I_{i+1} clusters of C_{i+1} blocks in exactly the
// format lutmu_allocator expects, after the slide flagged last.
//
// Timing: valid/ready; in_ready = !out_valid || out_ready, so a new vector
// can start filling in the cycle the previous one leaves. The output is
// registered. Assembling by slide number is this design's choice; the paper
// states that the output feature map is restructured to match the next
// LUT-MU's input.
module lutmu_out_pack #(
  parameter int unsigned O = 64,
  parameter int unsigned E = 1,
  parameter int unsigned W = 4,
  localparam int unsigned J  = O / E,
  localparam int unsigned EW = (E > 1) ? $clog2(E) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [EW-1:0]       in_slide,
  input  logic                in_last,
  input  logic [J-1:0][W-1:0] in_act,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [O*W-1:0]      out_data
);

  logic [O*W-1:0] buf_q;
  logic           in_fire;

  assign in_ready = !out_valid || out_ready;
  assign in_fire  = in_valid && in_ready;
  assign out_data = buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  out_valid <= 1'b0;
    else if (in_fire && in_last) out_valid <= 1'b1;
    else if (out_ready)          out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (in_fire) buf_q[int'(in_slide)*J*W +: J*W] <= in_act;
  end

endmodule
