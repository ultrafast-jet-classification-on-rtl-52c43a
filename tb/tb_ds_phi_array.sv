// tb_ds_phi_array: jets offered with random gaps to the N/RF-lane phi stage.
// Checks that jets are taken every RF cycles when offered continuously, that
// in_ready drops while a jet is being sliced, and that slice t of lane j is
// phi(constituent j*RF + t) with the right first/last tags, 4 + t cycles after
// the jet was taken.
module tb_ds_phi_array;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  localparam int N = 8, RF = 2, LANES = N / RF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_first, out_last;
  act_t feat [N][N_FEAT];
  wgt_t w0 [PHI_NODES][N_FEAT];
  wgt_t b0 [PHI_NODES];
  wgt_t w1 [PHI_NODES][PHI_NODES];
  wgt_t b1 [PHI_NODES];
  wgt_t w2 [PHI_NODES][PHI_NODES];
  wgt_t b2 [PHI_NODES];
  act_t emb [LANES][PHI_NODES];

  ds_phi_array #(.N(N), .RF(RF)) dut (.clk, .rst_n, .in_valid, .in_ready, .feat,
    .w0, .b0, .w1, .b1, .w2, .b2, .out_valid, .out_first, .out_last, .emb);

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  ivec wv0, bv0, wv1, bv1, wv2, bv2;
  typedef struct { ivec e [LANES]; int first; int last; int due; } slice_t;
  slice_t exp_q [$];
  int n_out = 0, n_b2b = 0, n_stall = 0, last_accept = -100;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      slice_t s;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        s = exp_q.pop_front();
        check(cycles == s.due, $sformatf("slice at %0d, due %0d", cycles, s.due));
        check(int'(out_first) == s.first && int'(out_last) == s.last, "first/last tags");
        for (int l = 0; l < LANES; l++)
          for (int o = 0; o < PHI_NODES; o++)
            check(int'(emb[l][o]) == s.e[l][o], $sformatf("lane %0d y[%0d]", l, o));
        n_out++;
      end
    end
  end

  initial begin
    wv0 = new[PHI_NODES*N_FEAT]; wv1 = new[PHI_NODES*PHI_NODES]; wv2 = new[PHI_NODES*PHI_NODES];
    bv0 = new[PHI_NODES]; bv1 = new[PHI_NODES]; bv2 = new[PHI_NODES];
    foreach (wv0[i]) wv0[i] = rand_range(-128, 127);
    foreach (wv1[i]) wv1[i] = rand_range(-40, 40);
    foreach (wv2[i]) wv2[i] = rand_range(-40, 40);
    foreach (bv0[i]) bv0[i] = rand_range(-64, 64);
    foreach (bv1[i]) bv1[i] = rand_range(-64, 64);
    foreach (bv2[i]) bv2[i] = rand_range(-64, 64);
    foreach (w0[o, i]) w0[o][i] = wgt_t'(wv0[o*N_FEAT + i]);
    foreach (w1[o, i]) w1[o][i] = wgt_t'(wv1[o*PHI_NODES + i]);
    foreach (w2[o, i]) w2[o][i] = wgt_t'(wv2[o*PHI_NODES + i]);
    foreach (b0[o]) begin b0[o] = wgt_t'(bv0[o]); b1[o] = wgt_t'(bv1[o]); b2[o] = wgt_t'(bv2[o]); end
    foreach (feat[c, f]) feat[c][f] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < 150; j++) begin
      int fv [N][N_FEAT];
      foreach (fv[c, f]) fv[c][f] = rand_range(-128, 127);
      @(negedge clk);
      foreach (feat[c, f]) feat[c][f] = act_t'(fv[c][f]);
      in_valid = 1;
      while (!in_ready) begin
        n_stall++;
        @(negedge clk);
      end
      // accepted at the coming edge
      if (cycles - last_accept == RF) n_b2b++;
      check(cycles - last_accept >= RF, "initiation interval at least RF");
      last_accept = cycles;
      for (int t = 0; t < RF; t++) begin
        slice_t s;
        for (int l = 0; l < LANES; l++) begin
          ivec xv = new[N_FEAT];
          foreach (xv[f]) xv[f] = fv[l*RF + t][f];
          s.e[l] = dense(dense(dense(xv, wv0, bv0, N_FEAT, PHI_NODES, 1),
                               wv1, bv1, PHI_NODES, PHI_NODES, 1),
                         wv2, bv2, PHI_NODES, PHI_NODES, 1);
        end
        s.first = (t == 0); s.last = (t == RF - 1); s.due = cycles + 4 + t;
        exp_q.push_back(s);
      end
      if ($urandom_range(2, 0) == 0) begin
        @(negedge clk);
        in_valid = 0;
        foreach (feat[c, f]) feat[c][f] = act_t'($urandom);
        repeat ($urandom_range(3, 0)) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0 && n_out == 150 * RF, "all slices seen");
    check(n_b2b > 20, $sformatf("back-to-back jets at II=RF seen %0d times", n_b2b));
    check(n_stall > 20, $sformatf("in_ready low while offered %0d times", n_stall));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
