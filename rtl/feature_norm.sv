// feature_norm: input scaling of the jet constituents.  Each feature (pT, eta_rel,
// phi_rel) is divided by a power of two close to its [5, 95] % inter-quantile
// range, which brings the three features to the same order of magnitude, and is
// then saturated to the 8-bit activation format.  The division is a shift, so the
// block is a few multiplexers per bit and adds no register stage.
//
// Interface: raw_feat[c][f] is feature f of constituent c as a RAW_W-bit
// two's-complement number with the same number of fraction bits as an
// activation (jet_pkg::ACT_FRAC).  SHIFT[f] >= 0 divides by 2^SHIFT[f] (arithmetic
// shift, truncating); SHIFT[f] < 0 multiplies by 2^-SHIFT[f].  Zero-padded
// constituents stay zero.
//
// Scaling by a shift instead of a divider follows the classifier's input
// processing; the raw input format and the default shift amounts are this
// design's choices, as the ranges depend on the data set.
module feature_norm
  import jet_pkg::*;
#(
  parameter int N     = 8,
  parameter int RAW_W = 16,
  parameter int SHIFT [N_FEAT] = '{6, 0, 0}
) (
  input  logic signed [RAW_W-1:0] raw_feat  [N][N_FEAT],
  output act_t                    norm_feat [N][N_FEAT]
);

  always_comb begin
    for (int c = 0; c < N; c++) begin
      for (int f = 0; f < N_FEAT; f++) begin
        logic signed [31:0] v;
        v = 32'(raw_feat[c][f]);
        if (SHIFT[f] >= 0) v = v >>> SHIFT[f];
        else               v = v <<< (-SHIFT[f]);
        norm_feat[c][f] = sat_act(v);
      end
    end
  end

endmodule
