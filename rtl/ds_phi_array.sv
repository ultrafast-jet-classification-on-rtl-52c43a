// ds_phi_array: the parallel pointwise stage of the Deep Sets classifier.  It
// applies the constituent network phi to all N constituents of a jet using
// LANES = N/RF copies of phi, each reused RF times (RF = reuse factor), so that
// N*MIN*MOUT/RF multipliers per layer serve the whole jet.
//
// How it works: an accepted jet is copied into a buffer.  In the following RF
// cycles ("slices" t = 0 .. RF-1) lane j processes constituent j*RF + t.  Every
// slice carries a first / last tag through the phi pipeline so that the
// aggregation can tell where a jet begins and ends.
//
// Interface and timing: in_valid / in_ready handshake on a whole jet.  in_ready is
// high when the buffer is free or is delivering its last slice, so jets can be
// accepted every RF cycles (initiation interval RF).  A jet accepted in cycle 0
// yields slice t at the outputs in cycle 4 + t (one cycle to the buffer, three phi
// layers).  There is no back-pressure on the output.
//
// Splitting the constituents over N/RF reused phi instances follows the
// classifier's pointwise-layer implementation; the buffer, the slice order and
// the handshake are this design's choices.
module ds_phi_array
  import jet_pkg::*;
#(
  parameter  int N     = 8,
  parameter  int RF    = 2,
  localparam int LANES = N / RF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  act_t feat [N][N_FEAT],
  input  wgt_t w0 [PHI_NODES][N_FEAT],
  input  wgt_t b0 [PHI_NODES],
  input  wgt_t w1 [PHI_NODES][PHI_NODES],
  input  wgt_t b1 [PHI_NODES],
  input  wgt_t w2 [PHI_NODES][PHI_NODES],
  input  wgt_t b2 [PHI_NODES],
  output logic out_valid,
  output logic out_first,
  output logic out_last,
  output act_t emb [LANES][PHI_NODES]
);

  localparam int SL_W = (RF > 1) ? $clog2(RF) : 1;

  initial begin
    if (RF < 1 || LANES * RF != N) $error("ds_phi_array: N must be a multiple of RF");
  end

  act_t            jet_buf [N][N_FEAT];
  logic            busy;
  logic [SL_W-1:0] slice;
  logic            last_slice;
  logic            accept;

  assign last_slice = (int'(slice) == RF - 1);
  assign in_ready   = !busy || last_slice;
  assign accept     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      slice <= '0;
    end else if (accept) begin
      busy  <= 1'b1;
      slice <= '0;
    end else if (busy) begin
      if (last_slice) busy  <= 1'b0;
      else            slice <= slice + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (accept) jet_buf <= feat;
  end

  // A jet that is taken is delivered as RF consecutive slices starting at slice 0,
  // and no jet is taken while an earlier one still has more than one slice to go.
  a_start: assert property (@(posedge clk) disable iff (!rst_n) accept |=> busy && slice == '0);
  a_hold:  assert property (@(posedge clk) disable iff (!rst_n) busy && !last_slice |-> !in_ready);

  logic [1:0] tag_out [LANES];
  logic       lane_valid [LANES];

  for (genvar j = 0; j < LANES; j++) begin : g_lane
    act_t x [N_FEAT];
    always_comb begin
      x = jet_buf[0];
      for (int t = 0; t < RF; t++)
        if (int'(slice) == t) x = jet_buf[j*RF + t];
    end

    phi_mlp #(.TAG_W(2)) u_phi (
      .clk, .rst_n,
      .in_valid (busy),
      .in_tag   ({(slice == '0), last_slice}),
      .x,
      .w0, .b0, .w1, .b1, .w2, .b2,
      .out_valid(lane_valid[j]),
      .out_tag  (tag_out[j]),
      .y        (emb[j]));
  end

  assign out_valid = lane_valid[0];
  assign out_first = tag_out[0][1];
  assign out_last  = tag_out[0][0];

endmodule
