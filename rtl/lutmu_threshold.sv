// lutmu_threshold: successive-thresholding activation after the LUT-MU.
//
// In the FINN flow that the LUT-MU plugs into, scaling, batch normalisation
// and the uniform quantised activation of a layer are folded into one set of
// 2^W-1 thresholds per output channel: the W-bit activation is the number of
// thresholds that the accumulated sum reaches, act = sum_t (x >= T_t).
// This module applies that rule to the O/E sums of one aggregator package,
// in parallel, picking the thresholds of output element slide*(O/E)+j for
// slot j. Thresholds are 4W-bit two's complement numbers loaded over the cfg
// bus (target CFG_THRESH, address o*(2^W-1)+t); they need not be sorted.
//
// Timing: one register stage, valid/ready, in_ready = !out_valid ||
// out_ready; slide and last travel with the data. The paper names this
// operator and its function but not its hardware; the parallel compare-and-
// count structure, the ">=" convention and the register storage are this
// design's choices.
module lutmu_threshold
  import lutmu_pkg::*;
#(
  parameter int unsigned N = 64,  // elements per package, O/E
  parameter int unsigned O = 64,  // output elements per vector
  parameter int unsigned W = 4,
  localparam int unsigned T  = (1 << W) - 1,
  localparam int unsigned E  = O / N,
  localparam int unsigned EW = (E > 1) ? $clog2(E) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_wr_t               cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [EW-1:0]         in_slide,
  input  logic                  in_last,
  input  logic [N-1:0][4*W-1:0] in_sums,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [EW-1:0]         out_slide,
  output logic                  out_last,
  output logic [N-1:0][W-1:0]   out_act
);

  logic signed [4*W-1:0] thr_q [O][T];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.target == CFG_THRESH && cfg.addr < 32'(O*T))
      thr_q[int'(cfg.addr) / T][int'(cfg.addr) % T] <= cfg.data[4*W-1:0];
  end

  logic [N-1:0][W-1:0] act;

  always_comb begin
    for (int j = 0; j < int'(N); j++) begin
      automatic int o = int'(in_slide) * N + j;
      act[j] = '0;
      for (int t = 0; t < int'(T); t++)
        act[j] += W'(signed'(in_sums[j]) >= thr_q[o][t]);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      out_act   <= act;
      out_slide <= in_slide;
      out_last  <= in_last;
    end
  end

endmodule
