// weight_store: the parameter memory of the Deep Sets classifier.  It holds the
// 3,461 weights and biases (8-bit Q0.7 each) of the five fully-connected layers
// in registers and presents every one of them at once, as per-layer arrays, to
// the fully parallel datapath.
//
// Interface: a simple synchronous configuration port.  cfg_we writes cfg_wdata to
// address cfg_addr at the clock edge; cfg_rdata returns the word at cfg_addr one
// cycle later, for read-back.  Writes to addresses at or above N_PARAMS are
// ignored.  Reset clears every parameter to zero.  The address map is the one in
// jet_pkg: per layer, MOUT*MIN weights in [out][in] order, then MOUT biases;
// layers phi0, phi1, phi2, rho0, out.
//
// The parameter count and the 8-bit width are those of the classifier.  In the
// original firmware the trained weights are constants compiled into the logic;
// holding them in a writable register file is this design's choice, since the
// trained values are not part of the design description.
module weight_store
  import jet_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [PADDR_W-1:0] cfg_addr,
  input  wgt_t               cfg_wdata,
  output wgt_t               cfg_rdata,
  output wgt_t               w_phi0 [PHI_NODES][N_FEAT],
  output wgt_t               b_phi0 [PHI_NODES],
  output wgt_t               w_phi1 [PHI_NODES][PHI_NODES],
  output wgt_t               b_phi1 [PHI_NODES],
  output wgt_t               w_phi2 [PHI_NODES][PHI_NODES],
  output wgt_t               b_phi2 [PHI_NODES],
  output wgt_t               w_rho0 [RHO_NODES][PHI_NODES],
  output wgt_t               b_rho0 [RHO_NODES],
  output wgt_t               w_out  [N_CLASSES][RHO_NODES],
  output wgt_t               b_out  [N_CLASSES]
);

  wgt_t mem [N_PARAMS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < N_PARAMS; a++) mem[a] <= '0;
    end else if (cfg_we && int'(cfg_addr) < N_PARAMS) begin
      mem[cfg_addr] <= cfg_wdata;
    end
  end

  always_ff @(posedge clk) begin
    cfg_rdata <= (int'(cfg_addr) < N_PARAMS) ? mem[cfg_addr] : '0;
  end

  localparam int B0 = layer_base(0);
  localparam int B1 = layer_base(1);
  localparam int B2 = layer_base(2);
  localparam int B3 = layer_base(3);
  localparam int B4 = layer_base(4);

  always_comb begin
    for (int o = 0; o < PHI_NODES; o++) begin
      for (int i = 0; i < N_FEAT; i++)    w_phi0[o][i] = mem[B0 + o*N_FEAT + i];
      for (int i = 0; i < PHI_NODES; i++) w_phi1[o][i] = mem[B1 + o*PHI_NODES + i];
      for (int i = 0; i < PHI_NODES; i++) w_phi2[o][i] = mem[B2 + o*PHI_NODES + i];
      b_phi0[o] = mem[B0 + PHI_NODES*N_FEAT + o];
      b_phi1[o] = mem[B1 + PHI_NODES*PHI_NODES + o];
      b_phi2[o] = mem[B2 + PHI_NODES*PHI_NODES + o];
    end
    for (int o = 0; o < RHO_NODES; o++) begin
      for (int i = 0; i < PHI_NODES; i++) w_rho0[o][i] = mem[B3 + o*PHI_NODES + i];
      b_rho0[o] = mem[B3 + RHO_NODES*PHI_NODES + o];
    end
    for (int o = 0; o < N_CLASSES; o++) begin
      for (int i = 0; i < RHO_NODES; i++) w_out[o][i] = mem[B4 + o*RHO_NODES + i];
      b_out[o] = mem[B4 + N_CLASSES*RHO_NODES + o];
    end
  end

endmodule
