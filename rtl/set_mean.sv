// set_mean: the permutation-invariant aggregation S of the Deep Sets classifier.
// It averages the 32-value phi embeddings of the N constituents of a jet,
// element by element, which turns the (N x 32) matrix into one 32-value vector
// that does not depend on the order of the constituents.
//
// The embeddings arrive as RF slices of LANES = N/RF embeddings each.  A slice
// is marked in_first / in_last; the block sums each slice across lanes, adds it
// to a running sum (restarted by in_first) and, with the last slice, divides by
// N with an arithmetic right shift (N must be a power of two; truncating).
// Timing: y and out_valid appear one cycle after the last slice; slices of the
// next jet may follow the last slice of the previous one without a gap.
//
// Averaging (not maximum) is the aggregation of the classifier; slicing, the
// shift-based division and truncation are choices of this design.
module set_mean
  import jet_pkg::*;
#(
  parameter int N     = 8,
  parameter int RF    = 2,
  parameter int D     = PHI_NODES,
  localparam int LANES = N / RF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_first,
  input  logic in_last,
  input  act_t x [LANES][D],
  output logic out_valid,
  output act_t y [D]
);

  localparam int SUM_W = ACT_W + $clog2(N) + 1;

  initial begin
    if ((1 << $clog2(N)) != N || RF * LANES != N)
      $error("set_mean: N must be a power of two and a multiple of RF");
  end

  logic signed [SUM_W-1:0] acc      [D];
  logic signed [SUM_W-1:0] acc_next [D];

  always_comb begin
    for (int d = 0; d < D; d++) begin
      acc_next[d] = in_first ? '0 : acc[d];
      for (int l = 0; l < LANES; l++) acc_next[d] += SUM_W'(x[l][d]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc <= acc_next;
      if (in_last)
        for (int d = 0; d < D; d++) y[d] <= sat_act(32'(acc_next[d] >>> $clog2(N)));
    end
  end

endmodule
