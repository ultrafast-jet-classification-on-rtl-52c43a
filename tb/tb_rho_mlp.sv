// tb_rho_mlp: random jet embeddings through rho, back to back, compared with the
// reference model; checks the two-cycle latency.
module tb_rho_mlp;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid;
  act_t x  [PHI_NODES];
  wgt_t w0 [RHO_NODES][PHI_NODES];
  wgt_t b0 [RHO_NODES];
  wgt_t w1 [N_CLASSES][RHO_NODES];
  wgt_t b1 [N_CLASSES];
  act_t logit [N_CLASSES];

  rho_mlp dut (.clk, .rst_n, .in_valid, .x, .w0, .b0, .w1, .b1, .out_valid, .logit);

  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  ivec wv0, bv0, wv1, bv1;
  ivec exp_q [$];
  int  time_q [$];
  int  n_out = 0;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      ivec e;
      int  tm;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front(); tm = time_q.pop_front();
        check(cycles - tm == 2, $sformatf("latency %0d", cycles - tm));
        for (int o = 0; o < N_CLASSES; o++)
          check(int'(logit[o]) == e[o], $sformatf("logit[%0d]=%0d exp %0d", o, logit[o], e[o]));
        n_out++;
      end
    end
  end

  initial begin
    wv0 = new[RHO_NODES*PHI_NODES]; bv0 = new[RHO_NODES];
    wv1 = new[N_CLASSES*RHO_NODES]; bv1 = new[N_CLASSES];
    foreach (wv0[i]) wv0[i] = rand_range(-40, 40);
    foreach (wv1[i]) wv1[i] = rand_range(-60, 60);
    foreach (bv0[i]) bv0[i] = rand_range(-128, 127);
    foreach (bv1[i]) bv1[i] = rand_range(-128, 127);
    foreach (w0[o, i]) w0[o][i] = wgt_t'(wv0[o*PHI_NODES + i]);
    foreach (w1[o, i]) w1[o][i] = wgt_t'(wv1[o*RHO_NODES + i]);
    foreach (b0[o]) b0[o] = wgt_t'(bv0[o]);
    foreach (b1[o]) b1[o] = wgt_t'(bv1[o]);
    foreach (x[i]) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic ivec xv = new[PHI_NODES];
      @(negedge clk);
      in_valid = ($urandom_range(2, 0) != 0);
      foreach (xv[i]) xv[i] = rand_range(0, (t % 2) ? 127 : 30);
      foreach (x[i]) x[i] = act_t'(xv[i]);
      if (in_valid) begin
        exp_q.push_back(dense(dense(xv, wv0, bv0, PHI_NODES, RHO_NODES, 1),
                              wv1, bv1, RHO_NODES, N_CLASSES, 0));
        time_q.push_back(cycles);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0 && n_out > 100, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
