// softmax: turns the five class scores of a jet into class probabilities,
// p[k] = exp(z[k]) / sum_j exp(z[j]).
//
// How it works: the largest score is found and every score is replaced by its
// distance d = max - z[k] (0..255 activation codes), which keeps exp() within
// (0, 1].  exp(-d / 2^ACT_FRAC) is read from a 256-entry table of unsigned Q1.16
// values built at elaboration by repeated multiplication with exp(-2^-ACT_FRAC)
// (EXP_STEP, rounded to 16 fraction bits); no real arithmetic is needed.  The five
// exponentials and their sum are registered; the next stage divides each by the
// sum and outputs an unsigned Q0.8 probability, saturated at 255 (= 0.996).
//
// Timing: two register stages; a new jet can enter every cycle.
//
// The softmax itself is the output activation of the classifier; the
// max-subtraction, the table, its size and the divider are this design's choices.
module softmax
  import jet_pkg::*;
#(
  parameter int K = N_CLASSES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  act_t  z [K],
  output logic  out_valid,
  output prob_t p [K]
);

  localparam int E_W = 17;                       // Q1.16, 1.0 = 65536
  localparam int S_W = E_W + $clog2(K);
  // round(exp(-1/16) * 65536) for ACT_FRAC = 4
  localparam logic [16:0] EXP_STEP = 17'd61565;

  typedef logic [E_W-1:0] exp_tab_t [256];

  function automatic exp_tab_t build_exp_tab();
    exp_tab_t t;
    logic [33:0] m;
    t[0] = 17'd65536;
    for (int k = 1; k < 256; k++) begin
      m    = 34'(t[k-1]) * 34'(EXP_STEP) + 34'd32768;
      t[k] = E_W'(m >> 16);
    end
    return t;
  endfunction

  localparam exp_tab_t EXP_TAB = build_exp_tab();

  // Stage 1: exponentials and their sum.
  logic [E_W-1:0] e   [K];
  logic [E_W-1:0] e_r [K];
  logic [S_W-1:0] sum, sum_r;
  logic           v1;

  always_comb begin
    act_t zmax;
    zmax = z[0];
    for (int k = 1; k < K; k++) if (z[k] > zmax) zmax = z[k];
    sum = '0;
    for (int k = 0; k < K; k++) begin
      logic [7:0] d;
      d    = 8'(10'(zmax) - 10'(z[k]));
      e[k] = EXP_TAB[d];
      sum += S_W'(e[k]);
    end
  end

  // Stage 2: normalisation.
  prob_t p_next [K];

  always_comb begin
    for (int k = 0; k < K; k++) begin
      logic [S_W+8-1:0] q;
      q = (S_W+8)'({e_r[k], 8'd0}) / (S_W+8)'(sum_r);
      p_next[k] = (q > 255) ? 8'd255 : q[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      e_r   <= e;
      sum_r <= sum;
    end
    if (v1) p <= p_next;
  end

endmodule
