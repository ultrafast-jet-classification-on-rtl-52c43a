// jet_pkg: number formats, network dimensions and weight-memory layout shared by
// the Deep Sets jet classifier.
//
// Arithmetic follows the quantization scheme of the classifier: every weight and
// bias is an 8-bit two's-complement fraction with no integer bits (Q0.7, value =
// code/128), and every activation, including the normalised input features, is an
// 8-bit two's-complement number.  The split of an activation into integer and
// fraction bits is a choice of this design (ACT_FRAC = 4, i.e. Q3.4); it is kept
// in one place here so that it can be changed.  Products of an activation and a
// weight therefore carry ACT_FRAC + W_FRAC fraction bits; a bias is aligned to that
// by a left shift of ACT_FRAC, and a layer output is brought back to the
// activation format by an arithmetic right shift of W_FRAC (truncation toward
// minus infinity) followed by saturation.
//
// The network shape is the Deep Sets model: phi = 3 -> 32 -> 32 -> 32 with ReLU,
// mean aggregation over the constituents, rho = 32 -> 32 (ReLU) -> 5 outputs,
// followed by a softmax.  Its 3,461 parameters are stored in one flat memory;
// layer l occupies MOUT*MIN weights in row-major [out][in] order followed by MOUT
// biases, layers in network order.
package jet_pkg;

  localparam int ACT_W    = 8;   // activation width
  localparam int ACT_FRAC = 4;   // activation fraction bits (design choice)
  localparam int W_W      = 8;   // weight / bias width
  localparam int W_FRAC   = 7;   // weight fraction bits (no integer bits)

  localparam int N_FEAT    = 3;  // pT, eta_rel, phi_rel
  localparam int PHI_NODES = 32; // width of every phi layer
  localparam int RHO_NODES = 32; // hidden width of rho
  localparam int N_CLASSES = 5;  // q, g, W, Z, t

  localparam int PROB_W = 8;     // softmax output width, unsigned Q0.8

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic        [PROB_W-1:0] prob_t;

  // Layers of the network, in the order they are stored.
  typedef enum logic [2:0] {L_PHI0, L_PHI1, L_PHI2, L_RHO0, L_OUT} layer_e;
  localparam int N_LAYERS = 5;

  function automatic int layer_min(int l);
    return (l == 0) ? N_FEAT : (l == 4) ? RHO_NODES : PHI_NODES;
  endfunction

  function automatic int layer_mout(int l);
    return (l == 4) ? N_CLASSES : (l == 3) ? RHO_NODES : PHI_NODES;
  endfunction

  // Number of stored parameters (weights and biases) of layer l.
  function automatic int layer_size(int l);
    return layer_mout(l) * layer_min(l) + layer_mout(l);
  endfunction

  // Address of the first weight of layer l in the parameter memory.
  function automatic int layer_base(int l);
    int b = 0;
    for (int i = 0; i < l; i++) b += layer_size(i);
    return b;
  endfunction

  localparam int N_PARAMS   = layer_base(N_LAYERS);   // 3461
  localparam int PADDR_W    = $clog2(N_PARAMS);

  // Saturate a wide signed value to the activation range.
  function automatic act_t sat_act(logic signed [31:0] v);
    if (v > 32'sd127)       return act_t'(127);
    else if (v < -32'sd128) return act_t'(-128);
    else                    return act_t'(v);
  endfunction

endpackage
