// tb_ds_jet_tagger: end-to-end test of the Deep Sets jet classifier at its
// default size (N = 8 constituents, reuse factor 2).  Parameters are written
// through the configuration port and read back; jets of random, partly
// zero-padded constituents are offered with random gaps; each result is compared
// with a reference model built from the network equations (shift-normalise,
// phi per constituent, mean, rho, softmax in real arithmetic; probabilities
// within 2/256).  It also checks the RF + 8 cycle latency and the RF-cycle
// initiation interval, that a shuffled copy of a jet gives the same answer, and
// that a second parameter image takes effect.  Each mechanism (back-to-back
// jets, input stall, zero padding, input saturation, permutation, parameter
// reload) must occur at least once.
module tb_ds_jet_tagger;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  localparam int N = 8, RF = 2, RAW_W = 16, LAT = RF + 8;
  localparam int SHIFT [N_FEAT] = '{6, 0, 0};   // the top's defaults

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               cfg_we = 0;
  logic [PADDR_W-1:0] cfg_addr = '0;
  wgt_t               cfg_wdata = '0, cfg_rdata;
  logic               in_valid = 0, in_ready, out_valid;
  logic signed [RAW_W-1:0] in_feat [N][N_FEAT];
  prob_t              out_prob [N_CLASSES];

  ds_jet_tagger dut (.*);

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- reference model ----------------
  int img [N_PARAMS];

  function automatic ivec slice(int base, int n);
    ivec v = new[n];
    foreach (v[i]) v[i] = img[base + i];
    return v;
  endfunction

  function automatic ivec ref_jet(int raw [N][N_FEAT]);
    // layer bases: phi0 0, phi1 128, phi2 1184, rho0 2240, out 3296
    ivec w0 = slice(0, 96),     b0 = slice(96, 32);
    ivec w1 = slice(128, 1024), b1 = slice(1152, 32);
    ivec w2 = slice(1184, 1024), b2 = slice(2208, 32);
    ivec w3 = slice(2240, 1024), b3 = slice(3264, 32);
    ivec w4 = slice(3296, 160),  b4 = slice(3456, 5);
    int  sum [PHI_NODES];
    ivec m = new[PHI_NODES];
    foreach (sum[d]) sum[d] = 0;
    for (int c = 0; c < N; c++) begin
      ivec x = new[N_FEAT];
      ivec h;
      foreach (x[f]) x[f] = sat8(longint'($floor(real'(raw[c][f]) / real'(1 << SHIFT[f]))));
      h = dense(dense(dense(x, w0, b0, 3, 32, 1), w1, b1, 32, 32, 1), w2, b2, 32, 32, 1);
      foreach (sum[d]) sum[d] += h[d];
    end
    foreach (m[d]) m[d] = sat8(longint'($floor(real'(sum[d]) / N)));
    return ds_ref_pkg::softmax(dense(dense(m, w3, b3, 32, 32, 1), w4, b4, 32, 5, 0));
  endfunction

  // ---------------- parameter loading ----------------
  task automatic load_image(int seed_kind);
    for (int i = 0; i < N_PARAMS; i++) begin
      if (i < 96)        img[i] = rand_range(-128, 127);     // phi0 weights
      else if (i < 128)  img[i] = rand_range(-32, 32);       // phi0 biases
      else if (i < 3296) img[i] = rand_range(-30, 30 + seed_kind * 5);
      else               img[i] = rand_range(-24, 24);       // output layer
    end
    for (int i = 0; i < N_PARAMS; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = PADDR_W'(i); cfg_wdata = wgt_t'(img[i]);
    end
    @(negedge clk);
    cfg_we = 0;
    // read back a sample of addresses
    for (int k = 0; k < 200; k++) begin
      int a = int'($urandom_range(N_PARAMS - 1, 0));
      cfg_addr = PADDR_W'(a);
      @(negedge clk);
      check(int'(cfg_rdata) == img[a], $sformatf("parameter read-back at %0d", a));
    end
  endtask

  // ---------------- scoreboard ----------------
  typedef struct { ivec p; int due; int perm_of; } res_t;
  res_t exp_q [$];
  ivec  got_hist [$];
  int   n_out = 0, n_perm = 0, n_b2b = 0, n_stall = 0, n_pad = 0, n_sat = 0, n_reload = 0;
  int   n_distinct_class [N_CLASSES];
  int   last_accept = -100;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      res_t r;
      automatic ivec g = new[N_CLASSES];
      automatic int best = 0;
      foreach (g[k]) g[k] = int'(out_prob[k]);
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        r = exp_q.pop_front();
        check(cycles == r.due, $sformatf("latency: result at %0d, due %0d", cycles, r.due));
        foreach (g[k]) begin
          automatic int diff = g[k] - r.p[k];
          check(diff <= 2 && diff >= -2, $sformatf("jet %0d p[%0d]=%0d exp %0d", n_out, k, g[k], r.p[k]));
          if (g[k] > g[best]) best = k;
        end
        n_distinct_class[best]++;
        if (r.perm_of >= 0) begin
          check(g == got_hist[r.perm_of], "shuffled jet gives identical probabilities");
          n_perm++;
        end
        got_hist.push_back(g);
        n_out++;
      end
    end
  end

  task automatic send_jet(int raw [N][N_FEAT], int perm_of);
    res_t r;
    @(negedge clk);
    foreach (in_feat[c, f]) in_feat[c][f] = RAW_W'(raw[c][f]);
    in_valid = 1;
    while (!in_ready) begin
      n_stall++;
      @(negedge clk);
    end
    if (cycles - last_accept == RF) n_b2b++;
    check(cycles - last_accept >= RF, "initiation interval at least RF");
    last_accept = cycles;
    r.p = ref_jet(raw); r.due = cycles + LAT; r.perm_of = perm_of;
    exp_q.push_back(r);
    if ($urandom_range(3, 0) == 0) begin
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(2, 0)) @(negedge clk);
    end
  endtask

  initial begin
    int raw [N][N_FEAT];
    int jets_sent = 0;
    foreach (in_feat[c, f]) in_feat[c][f] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int image = 0; image < 2; image++) begin
      load_image(image);
      if (image == 1) n_reload++;
      for (int j = 0; j < 120; j++) begin
        automatic int n_real = (j % 3 == 0) ? int'($urandom_range(N - 1, 1)) : N;
        automatic bit sat = 0;
        for (int c = 0; c < N; c++) begin
          if (c < n_real) begin
            raw[c][0] = rand_range(0, (j % 7 == 0) ? 20000 : 5000);   // pT, 4 fraction bits
            raw[c][1] = rand_range(-120, 120);                         // eta_rel
            raw[c][2] = rand_range(-120, 120);                         // phi_rel
            if (j % 11 == 0) raw[c][1] = 300;                          // out of range
          end else begin
            raw[c][0] = 0; raw[c][1] = 0; raw[c][2] = 0;               // zero padding
          end
          for (int f = 0; f < N_FEAT; f++)
            if ((raw[c][f] >>> SHIFT[f]) > 127 || (raw[c][f] >>> SHIFT[f]) < -128) sat = 1;
        end
        // scatter the padding among the real constituents
        for (int c = N - 1; c > 0; c--) begin
          automatic int k = int'($urandom_range(c, 0));
          for (int f = 0; f < N_FEAT; f++) begin
            automatic int tmp = raw[c][f]; raw[c][f] = raw[k][f]; raw[k][f] = tmp;
          end
        end
        if (n_real < N) n_pad++;
        if (sat) n_sat++;
        send_jet(raw, -1);
        jets_sent++;
        if (j % 5 == 0) begin
          // the same jet again, constituents in reverse order
          int rev [N][N_FEAT];
          for (int c = 0; c < N; c++) rev[c] = raw[N - 1 - c];
          send_jet(rev, jets_sent - 1);
          jets_sent++;
        end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (LAT + 4) @(negedge clk);
      check(exp_q.size() == 0, "all results of this image seen");
    end
    check(n_out == got_hist.size() && n_out > 200, "results counted");
    $display("mechanisms: back_to_back=%0d stall=%0d zero_pad=%0d saturation=%0d permutation=%0d reload=%0d",
             n_b2b, n_stall, n_pad, n_sat, n_perm, n_reload);
    $display("argmax classes: %0d %0d %0d %0d %0d", n_distinct_class[0], n_distinct_class[1],
             n_distinct_class[2], n_distinct_class[3], n_distinct_class[4]);
    check(n_b2b > 0,    "back-to-back jets at II = RF happened");
    check(n_stall > 0,  "input stall happened");
    check(n_pad > 0,    "zero-padded jets happened");
    check(n_sat > 0,    "input saturation happened");
    check(n_perm > 0,   "permuted jets compared");
    check(n_reload > 0, "parameter reload happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
