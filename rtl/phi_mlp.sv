// phi_mlp: the per-constituent network phi of the Deep Sets classifier.  It maps
// the three normalised features of one jet constituent (pT, eta_rel, phi_rel) to a
// 32-value embedding through three fully-connected layers of 32 nodes, each
// followed by ReLU (3 -> 32 -> 32 -> 32).
//
// Timing: three register stages, one per layer (see dense_layer).  A constituent
// can enter every cycle; its embedding appears three cycles later with out_valid,
// carrying in_tag along.  Weights and biases are inputs, shared with every other
// phi lane of the design.
//
// The layer count, widths and ReLU are those of the classifier; the pipelining is
// this design's choice.
module phi_mlp
  import jet_pkg::*;
#(
  parameter int TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  act_t             x  [N_FEAT],
  input  wgt_t             w0 [PHI_NODES][N_FEAT],
  input  wgt_t             b0 [PHI_NODES],
  input  wgt_t             w1 [PHI_NODES][PHI_NODES],
  input  wgt_t             b1 [PHI_NODES],
  input  wgt_t             w2 [PHI_NODES][PHI_NODES],
  input  wgt_t             b2 [PHI_NODES],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output act_t             y  [PHI_NODES]
);

  logic             v1, v2;
  logic [TAG_W-1:0] t1, t2;
  act_t             h1 [PHI_NODES];
  act_t             h2 [PHI_NODES];

  dense_layer #(.MIN(N_FEAT), .MOUT(PHI_NODES), .RELU(1'b1), .TAG_W(TAG_W)) u_l0 (
    .clk, .rst_n, .in_valid, .in_tag, .x, .w(w0), .b(b0),
    .out_valid(v1), .out_tag(t1), .y(h1));

  dense_layer #(.MIN(PHI_NODES), .MOUT(PHI_NODES), .RELU(1'b1), .TAG_W(TAG_W)) u_l1 (
    .clk, .rst_n, .in_valid(v1), .in_tag(t1), .x(h1), .w(w1), .b(b1),
    .out_valid(v2), .out_tag(t2), .y(h2));

  dense_layer #(.MIN(PHI_NODES), .MOUT(PHI_NODES), .RELU(1'b1), .TAG_W(TAG_W)) u_l2 (
    .clk, .rst_n, .in_valid(v2), .in_tag(t2), .x(h2), .w(w2), .b(b2),
    .out_valid, .out_tag, .y);

endmodule
