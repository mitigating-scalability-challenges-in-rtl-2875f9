// lutmu_adder_tree: adder tree with round accumulator for one output slot.
//
// Sums the N = C/S signed partial dot products read from the ROMs in one
// cycle in a balanced binary tree of ceil(log2 N) levels, sign-extending
// them from IN_W = 2W to OUT_W = 4W bits so that nothing overflows. As the
// paper describes, an extra adder and an output register group add up the S
// rounds of one output element: in the round flagged `first` the tree sum is
// added to `init` (the bias) instead of to the register.
//
// Timing: `total` = (first ? init : acc) + tree sum, combinational; acc is
// loaded with `total` on each clock edge with en high. The caller samples
// `total` in the last round. Feeding the bias through `init` is this
// design's choice (the paper: "bias is added if required").
module lutmu_adder_tree #(
  parameter int unsigned N     = 4,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = 16,
  localparam int unsigned LV   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned NP   = 1 << LV
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic                    first,
  input  logic signed [OUT_W-1:0] init,
  input  logic [N-1:0][IN_W-1:0]  in,
  output logic signed [OUT_W-1:0] total
);

  logic signed [OUT_W-1:0] node [LV+1][NP];
  logic signed [OUT_W-1:0] acc;

  always_comb begin
    for (int n = 0; n < int'(NP); n++)
      node[0][n] = (n < int'(N)) ? OUT_W'(signed'(in[n])) : '0;
    for (int l = 0; l < int'(LV); l++)
      for (int n = 0; n < int'(NP); n++)
        node[l+1][n] = (n < (int'(NP) >> (l + 1))) ? node[l][2*n] + node[l][2*n+1] : '0;
    total = (first ? init : acc) + node[LV][0];
  end

  always_ff @(posedge clk) begin
    if (en) acc <= total;
  end

endmodule
