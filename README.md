# Deep Sets jet-origin classifier for a Level-1 trigger

This is synthesizable SystemVerilog for a small neural network that decides where a
particle jet came from. It answers light quark, gluon, W boson, Z boson or top quark
within a few tens of nanoseconds. It is meant for the hardware trigger of a
high-luminosity collider experiment. There, a new collision arrives every 25 ns, the
whole selection must finish within about a microsecond, and one classifier may use
only a small share of an FPGA.

The network, its quantization and its lane structure follow the Deep Sets
classifier of P. Odagiu et al., "Ultrafast jet classification at the HL-LHC"
(FERMILAB-PUB-24-0030). The RTL here is an independent register-level
implementation, not the authors' firmware.

The network is a **Deep Sets** model. A jet arrives as a set of up to N constituents,
the N highest-pT particles. Each constituent has three features: transverse momentum
pT, and pseudorapidity and azimuth relative to the jet axis (eta_rel, phi_rel). The
trigger does not sort the particles, so they can arrive in any order. The network
therefore:

1. applies the same small network **phi** to every constituent on its own
   (3 -> 32 -> 32 -> 32, ReLU after each layer);
2. averages the N resulting 32-value embeddings, element by element (the aggregation
   **S**). An average does not depend on the order of its inputs, so the jet is now one
   32-value vector whatever order its constituents came in;
3. applies a second network **rho** to that vector (32 -> 32 with ReLU, then 32 -> 5);
4. turns the five scores into probabilities with a **softmax**.

The network has 3,461 weights and biases: 2,240 in phi, 1,056 in the rho hidden layer
and 165 in the output layer. Every weight and every activation is 8 bits wide.

```
 in_feat[N][3] --> feature_norm --> ds_phi_array --------> set_mean --> rho_mlp --> softmax --> out_prob[5]
 (raw, RAW_W)      (shift, sat.)    N/RF lanes of phi_mlp   (mean S)     32-32-5     Q0.8
                                    each reused RF times
                        weight_store (3,461 x 8 bit, cfg port) --> all layers
```

## Number formats

The arithmetic decides whether results match a trained model, so it is set out here.
All formats live in `rtl/jet_pkg.sv`.

| quantity | format | range |
|---|---|---|
| weight, bias | signed Q0.7 (8 bits, no integer bits) | [-1, 0.992] |
| activation, normalised input, class score | signed Q3.4 (8 bits, `ACT_FRAC = 4`) | [-8, 7.94] |
| probability | unsigned Q0.8 | [0, 0.996] |

A layer computes, for every output o:

```
acc  = sum_i x[i] * w[o][i]  +  (b[o] << ACT_FRAC)     exact, Q.11 (ACT_FRAC + 7 fraction bits)
q    = acc >>> 7                                       back to Q3.4, truncating toward -inf
y[o] = saturate_to_8_bits( ReLU ? max(q, 0) : q )
```

The weights have no integer bits, as in the training scheme. The split of the 8
activation bits (3 integer, 4 fraction) is this design's choice. To use another split,
change `ACT_FRAC`: every block and testbench follows it, except for the softmax's
`EXP_STEP` constant, which has to be recomputed as round(exp(-2^-ACT_FRAC) * 65536).

The mean in `set_mean` adds the N embeddings exactly and divides by N with an
arithmetic shift. N must be a power of two, as are all three sizes used (8, 16, 32).
Zero-padded constituents (a jet with fewer than N particles is padded with all-zero
features) go through phi and count in the average, the same way the network was
trained.

The softmax subtracts the largest score from every score, so each difference
d = max - z lies in 0..255. It reads exp(-d/16) from a 256-entry table of Q1.16
values. The table is built at elaboration by repeated multiplication with
exp(-1/16) = 61565/65536, so the RTL has no real arithmetic. The next stage divides
each exponential by the sum of the five. The result is within 2/256 of the exact
softmax; the softmax testbench checks this.

`feature_norm` scales each input feature by a power of two (`SHIFT[f]`; a negative
value means a left shift) and then saturates it. The shift stands for division by the
feature's [5 %, 95 %] inter-quantile range. That range depends on the data, so the
default shifts {6, 0, 0} are placeholders to set per data set. Raw inputs are
`RAW_W`-bit two's-complement numbers with `ACT_FRAC` fraction bits.

## Lanes, reuse factor and timing

Running phi fully in parallel for all constituents would need N x (96 + 1024 + 1024)
multipliers. `ds_phi_array` builds LANES = N/RF copies of phi instead. RF is the
reuse factor, and each copy processes RF constituents in RF successive cycles
("slices"). In slice t, lane j takes constituent j*RF + t. Each slice carries a
first/last tag down the phi pipeline. `set_mean` uses the tag to restart its running
sum and to know when the jet is complete.

The three reference configurations all use four lanes:

| N constituents | RF | lanes | initiation interval | latency |
|---|---|---|---|---|
| 8  | 2 | 4 | 2 cycles | 10 cycles |
| 16 | 4 | 4 | 4 cycles | 12 cycles |
| 32 | 8 | 4 | 8 cycles | 16 cycles |

Each block has one register stage per layer. Counting from the cycle a jet is taken
(cycle 0):

```
cycle 0          in_valid & in_ready: jet copied into the jet buffer (after feature_norm)
cycles 1..RF     slice t = cycle-1 enters the phi lanes
cycle t+4        phi output of slice t           (3 layers)
cycle RF+4       mean of the jet                 (set_mean, after the last slice)
cycle RF+6       five class scores               (rho_mlp, 2 layers)
cycle RF+8       out_valid, out_prob             (softmax, 2 stages)
```

`in_ready` is high when the jet buffer is empty, and also in the cycle that delivers
its last slice. A source that keeps `in_valid` high therefore gets a jet taken every
RF cycles. Results come out in order and cannot be held back (there is no output
ready), as in a fixed-latency trigger path. At 200 MHz the default configuration takes
a jet every 10 ns and answers 50 ns later.

## Interface of `ds_jet_tagger`

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset (clears valid bits, the slice control and all parameters) |
| cfg_we, cfg_addr, cfg_wdata | in | 1, 12, 8 | write one parameter |
| cfg_rdata | out | 8 | parameter at cfg_addr, one cycle later |
| in_valid / in_ready | in / out | 1 | jet handshake |
| in_feat | in | N x 3 x RAW_W | constituents, features in order pT, eta_rel, phi_rel |
| out_valid | out | 1 | one-cycle pulse per jet |
| out_prob | out | 5 x 8 | probabilities in order q, g, W, Z, t (Q0.8) |

Parameters: `N` (default 8), `RF` (2), `RAW_W` (16), `SHIFT` ({6, 0, 0}).

Parameter memory map. Layers are stored in network order. Each layer stores MOUT x MIN
weights in [out][in] order (address = base + out*MIN + in), followed by its MOUT
biases.

| layer | shape | base address | weights | biases |
|---|---|---|---|---|
| phi 0 | 3 -> 32 | 0 | 0..95 | 96..127 |
| phi 1 | 32 -> 32 | 128 | 128..1151 | 1152..1183 |
| phi 2 | 32 -> 32 | 1184 | 1184..2207 | 2208..2239 |
| rho 0 | 32 -> 32 | 2240 | 2240..3263 | 3264..3295 |
| output | 32 -> 5 | 3296 | 3296..3455 | 3456..3460 |

Reset clears every parameter to zero. The parameters are registers, and all of them
reach the datapath at once. A parameter may be rewritten at any time, but a jet in
flight then sees a mix of old and new values. A pruned network needs no special
handling: its removed weights are written as zero.

## Where this design departs from the reference firmware

The reference implementation was generated by high-level synthesis, with the trained
weights compiled into the logic. This RTL follows its network, its quantization and its
lane/reuse-factor structure. It differs in these points:

* **Latency and initiation interval.** The reference reports 19 cycles latency and an
  initiation interval of 3 cycles (95 ns and 15 ns at 200 MHz) for N = 8, RF = 2. Here
  each layer is one register stage, which gives 10 cycles and 2 cycles. A 32-input
  multiply-add in one 5 ns cycle is unlikely to close timing on an FPGA. To get there,
  add pipeline stages inside `dense_layer`; the first/last tags and valid bits already
  travel with the data, so nothing else has to change.
* **Weights.** Trained weights are not part of the design. They are loaded at run time
  through the cfg port into a 3,461-byte register file. A build with fixed weights would
  replace `weight_store` by constants, and the synthesis tool would then drop the
  multipliers for zero (pruned) weights.
* **Softmax, rounding, formats, input shifts.** The exp table, the truncating rounding,
  the Q3.4 activation split, the Q0.8 output and the input shift amounts are choices of
  this design (see above).
* **Other models.** The same study also built a plain multilayer perceptron and an
  interaction network (a graph network over all constituent pairs) for comparison.
  They are not included here. Deep Sets was the model that balanced accuracy, latency
  and resources best.
* **Not included.** Also outside this RTL are the experiment-specific I/O shell that
  would feed the classifier from optical links, and the time multiplexing of events
  across several trigger boards. The jet input is a set of plain parallel ports.

## Workloads

| configuration | runs on the defaults? |
|---|---|
| N = 8, RF = 2, 8-bit weights | yes: the default build |
| N = 8 with 4- or 6-bit weights | yes: Q0.3 and Q0.5 values are exact in Q0.7, so write them shifted left by 4 or 2 |
| N = 16, RF = 4 | with `N = 16, RF = 4`; same four lanes, II 4, latency 12 |
| N = 32, RF = 8, 50 % pruned | with `N = 32, RF = 8`; pruned weights written as zero; II 8, latency 16 |

A trigger that processes 10 jets per event, time-multiplexed over 6 boards, has
150 ns per event, so 15 ns per jet. The default build takes a jet every 10 ns at
200 MHz. At N = 16 (20 ns) or N = 32 (40 ns) it would need a smaller RF, that is,
more lanes.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block against a
reference model written separately from the RTL (`tb/ds_ref_pkg.sv`). The model
computes each layer in real arithmetic (floor((sum x*w + 16 b)/128), ReLU, saturation)
and the softmax with `$exp`. The testbenches also check every latency and initiation
interval given above.

| testbench | what it checks |
|---|---|
| tb_dense_layer | random layers with and without ReLU, extreme values, tag and 1-cycle latency |
| tb_phi_mlp | streamed constituents with gaps, two weight sets, 3-cycle latency |
| tb_rho_mlp | streamed jet vectors, 2-cycle latency |
| tb_set_mean | means of jets sent as slices, back to back and with gaps, 1-cycle latency |
| tb_softmax | random and corner-case scores against exact softmax (within 2/256), 2-cycle latency |
| tb_feature_norm | right and left shifts, saturation, zero padding |
| tb_weight_store | full write/read-back, address map of every layer, writes past the end ignored, reset |
| tb_ds_phi_array | lane/slice mapping, first/last tags, in_ready, II = RF, latency 4 + t |
| tb_ds_jet_tagger | whole classifier at its default size, against the reference model |
| tb_ds_workloads | whole classifier built for N = 16, RF = 4 and for N = 32, RF = 8 (through `ds_tagger_workload`) |

`tb_ds_jet_tagger` loads two random parameter images through the cfg port and sends
about 290 jets. It checks every probability against the reference model and every
latency (RF + 8). It also checks that a reversed copy of a jet gives bit-identical
probabilities, which tests permutation invariance. The test counts how often each
mechanism occurs: jets taken back to back at II = RF, input stalls (in_valid while
in_ready is low), zero-padded jets, saturated inputs, permuted jets and a parameter
reload. A mechanism that never occurs counts as a failure.

Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>`. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/jet_pkg.sv tb/ds_ref_pkg.sv \
          tb/tb_ds_jet_tagger.sv --top-module tb_ds_jet_tagger -Mdir obj && ./obj/Vtb_ds_jet_tagger
```

Replace the testbench name to run another. The full-size test builds in under a
minute and runs in under a second; `tb_ds_workloads` takes about a minute and a half to build.

Not verified: timing closure at 200 MHz, FPGA resource use, and accuracy with
trained weights, which are not available here. The random weights used in the tests
check the arithmetic, not the physics performance.

## Files

`rtl/`: `jet_pkg.sv` (formats, sizes, memory map), `dense_layer.sv`, `phi_mlp.sv`,
`ds_phi_array.sv`, `set_mean.sv`, `rho_mlp.sv`, `softmax.sv`, `feature_norm.sv`,
`weight_store.sv`, `ds_jet_tagger.sv` (top).
`tb/`: `ds_ref_pkg.sv` (reference model) and one `tb_<block>.sv` per block.
