// rho_mlp: the jet-level network rho of the Deep Sets classifier.  It maps the
// 32-value aggregated jet embedding to five class scores (logits) through one
// hidden fully-connected layer of 32 nodes with ReLU and a 5-node output layer
// without activation (32 -> 32 -> 5); the softmax follows in its own block.
//
// Timing: two register stages, one per layer; one jet per cycle can enter.
// Weights and biases are inputs.
//
// The widths and the ReLU follow the classifier; keeping the logits at 8 bits
// (the activation format) and the pipelining are this design's choices.
module rho_mlp
  import jet_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t x  [PHI_NODES],
  input  wgt_t w0 [RHO_NODES][PHI_NODES],
  input  wgt_t b0 [RHO_NODES],
  input  wgt_t w1 [N_CLASSES][RHO_NODES],
  input  wgt_t b1 [N_CLASSES],
  output logic out_valid,
  output act_t logit [N_CLASSES]
);

  logic       v1;
  logic [0:0] t1, t2;
  act_t       h1 [RHO_NODES];

  dense_layer #(.MIN(PHI_NODES), .MOUT(RHO_NODES), .RELU(1'b1), .TAG_W(1)) u_l0 (
    .clk, .rst_n, .in_valid, .in_tag(1'b0), .x, .w(w0), .b(b0),
    .out_valid(v1), .out_tag(t1), .y(h1));

  dense_layer #(.MIN(RHO_NODES), .MOUT(N_CLASSES), .RELU(1'b0), .TAG_W(1)) u_l1 (
    .clk, .rst_n, .in_valid(v1), .in_tag(t1), .x(h1), .w(w1), .b(b1),
    .out_valid, .out_tag(t2), .y(logit));

endmodule
