// ds_jet_tagger: a Deep Sets jet-origin classifier for a Level-1 trigger.  It
// takes the N highest-pT constituents of a jet, in any order, each described by
// pT, eta_rel and phi_rel, and returns the probabilities that the jet comes from
// a light quark, a gluon, a W boson, a Z boson or a top quark.  Because the
// constituents are first processed one by one by the same network phi and then
// averaged, the answer does not depend on their order.
//
// Datapath (all fixed point, 8-bit weights and activations, see jet_pkg):
//   feature_norm   per-feature shift to a common scale, saturating to 8 bits
//   ds_phi_array   LANES = N/RF copies of phi (3 -> 32 -> 32 -> 32, ReLU), each
//                  reused RF times
//   set_mean       average of the N embeddings (aggregation S)
//   rho_mlp        32 -> 32 (ReLU) -> 5 class scores
//   softmax        class probabilities, unsigned Q0.8
//   weight_store   the 3,461 parameters, written through the cfg port
//
// Interface and timing: a jet is offered on in_feat with in_valid and taken in a
// cycle where in_ready is high; a new jet can be taken every RF cycles.  The
// probabilities of a jet taken in cycle 0 appear with out_valid in cycle RF + 8
// (10 cycles for N = 8, RF = 2).  Results leave in the order the jets came; there
// is no output back-pressure, as in a fixed-latency trigger path.  Zero-padded
// constituents are fed as all-zero features and take part in the average, as in
// the classifier's training.  Parameters may be rewritten through cfg_* at any
// time; a jet in flight then sees a mix of old and new values.
//
// The network shape, aggregation, 8-bit quantization and the N/RF lane structure
// follow the classifier; the run-time weight memory, the handshake, the
// activation format and the one-stage-per-layer pipelining are this design's
// choices, which give a shorter latency than the HLS build of the classifier.
module ds_jet_tagger
  import jet_pkg::*;
#(
  parameter int N     = 8,
  parameter int RF    = 2,
  parameter int RAW_W = 16,
  parameter int SHIFT [N_FEAT] = '{6, 0, 0}
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // parameter memory
  input  logic                    cfg_we,
  input  logic [PADDR_W-1:0]      cfg_addr,
  input  wgt_t                    cfg_wdata,
  output wgt_t                    cfg_rdata,
  // jets in
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [RAW_W-1:0] in_feat [N][N_FEAT],
  // class probabilities out (q, g, W, Z, t)
  output logic                    out_valid,
  output prob_t                   out_prob [N_CLASSES]
);

  localparam int LANES = N / RF;

  wgt_t w_phi0 [PHI_NODES][N_FEAT];
  wgt_t b_phi0 [PHI_NODES];
  wgt_t w_phi1 [PHI_NODES][PHI_NODES];
  wgt_t b_phi1 [PHI_NODES];
  wgt_t w_phi2 [PHI_NODES][PHI_NODES];
  wgt_t b_phi2 [PHI_NODES];
  wgt_t w_rho0 [RHO_NODES][PHI_NODES];
  wgt_t b_rho0 [RHO_NODES];
  wgt_t w_out  [N_CLASSES][RHO_NODES];
  wgt_t b_out  [N_CLASSES];

  weight_store u_weights (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .w_phi0, .b_phi0, .w_phi1, .b_phi1, .w_phi2, .b_phi2,
    .w_rho0, .b_rho0, .w_out, .b_out);

  act_t norm_feat [N][N_FEAT];

  feature_norm #(.N(N), .RAW_W(RAW_W), .SHIFT(SHIFT)) u_norm (
    .raw_feat(in_feat), .norm_feat);

  logic emb_valid, emb_first, emb_last;
  act_t emb [LANES][PHI_NODES];

  ds_phi_array #(.N(N), .RF(RF)) u_phi (
    .clk, .rst_n, .in_valid, .in_ready, .feat(norm_feat),
    .w0(w_phi0), .b0(b_phi0), .w1(w_phi1), .b1(b_phi1), .w2(w_phi2), .b2(b_phi2),
    .out_valid(emb_valid), .out_first(emb_first), .out_last(emb_last), .emb);

  logic agg_valid;
  act_t agg [PHI_NODES];

  set_mean #(.N(N), .RF(RF), .D(PHI_NODES)) u_mean (
    .clk, .rst_n, .in_valid(emb_valid), .in_first(emb_first), .in_last(emb_last),
    .x(emb), .out_valid(agg_valid), .y(agg));

  logic logit_valid;
  act_t logit [N_CLASSES];

  rho_mlp u_rho (
    .clk, .rst_n, .in_valid(agg_valid), .x(agg),
    .w0(w_rho0), .b0(b_rho0), .w1(w_out), .b1(b_out),
    .out_valid(logit_valid), .logit);

  softmax #(.K(N_CLASSES)) u_softmax (
    .clk, .rst_n, .in_valid(logit_valid), .z(logit),
    .out_valid, .p(out_prob));

endmodule
