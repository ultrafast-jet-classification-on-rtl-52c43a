// dense_layer: one quantized fully-connected layer with optional ReLU, computed
// fully in parallel (MIN x MOUT multipliers, reuse factor 1 inside the layer).
//
// y[o] = act( sat( (sum_i x[i]*w[o][i] + (b[o] << ACT_FRAC)) >>> W_FRAC ) )
// where x and y are 8-bit activations (jet_pkg::act_t), w and b are 8-bit Q0.7
// weights, the sum is exact, the right shift truncates, and act is ReLU when RELU
// is set and the identity otherwise.  Saturation to the 8-bit range happens after
// the ReLU, so a ReLU output lies in [0, 127].
//
// Timing: one register stage.  Inputs sampled with in_valid are seen on y one
// cycle later with out_valid; in_tag travels alongside unchanged so that callers
// can mark slices of a jet.  A new input can be taken every cycle.  Only the
// valid bit is reset.  The weights are plain inputs; the layer neither stores nor
// changes them.
//
// The layer arithmetic follows the 8-bit quantization of the classifier; the
// single pipeline stage and the truncating rounding are choices of this design.
module dense_layer
  import jet_pkg::*;
#(
  parameter int  MIN   = 3,
  parameter int  MOUT  = 32,
  parameter bit  RELU  = 1'b1,
  parameter int  TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  act_t             x [MIN],
  input  wgt_t             w [MOUT][MIN],
  input  wgt_t             b [MOUT],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output act_t             y [MOUT]
);

  // Exact sum: MIN products of 8 x 8 bits plus the aligned bias, with a sign bit.
  localparam int ACC_W = ACT_W + W_W + $clog2(MIN + 1) + 1;

  act_t y_next [MOUT];

  always_comb begin
    for (int o = 0; o < MOUT; o++) begin
      logic signed [ACC_W-1:0] acc;
      logic signed [ACC_W-1:0] q;
      acc = ACC_W'(b[o]) <<< ACT_FRAC;
      for (int i = 0; i < MIN; i++) acc += ACC_W'(x[i]) * ACC_W'(w[o][i]);
      q = acc >>> W_FRAC;
      if (RELU && q < 0) q = '0;
      y_next[o] = sat_act(32'(q));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      y       <= y_next;
      out_tag <= in_tag;
    end
  end

endmodule
