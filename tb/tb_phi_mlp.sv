// tb_phi_mlp: streams random constituents (with random gaps) through phi and
// compares each embedding, its tag and its three-cycle latency with the
// reference model.  Weights are random and change between two runs.
module tb_phi_mlp;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, out_valid;
  logic [7:0] in_tag = 0, out_tag;
  act_t x [N_FEAT];
  wgt_t w0 [PHI_NODES][N_FEAT];
  wgt_t b0 [PHI_NODES];
  wgt_t w1 [PHI_NODES][PHI_NODES];
  wgt_t b1 [PHI_NODES];
  wgt_t w2 [PHI_NODES][PHI_NODES];
  wgt_t b2 [PHI_NODES];
  act_t y [PHI_NODES];

  phi_mlp #(.TAG_W(8)) dut (.clk, .rst_n, .in_valid, .in_tag, .x,
    .w0, .b0, .w1, .b1, .w2, .b2, .out_valid, .out_tag, .y);

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

  ivec wv0, bv0, wv1, bv1, wv2, bv2;
  ivec exp_q [$];
  int  tag_q [$];
  int  time_q [$];
  int  n_out = 0;

  task automatic load_weights();
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
  endtask

  // Output monitor, sampling between clock edges.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      ivec e;
      int  tg, tm;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front(); tg = tag_q.pop_front(); tm = time_q.pop_front();
        check(int'(out_tag) == tg, "tag");
        check(cycles - tm == 3, $sformatf("latency %0d", cycles - tm));
        for (int o = 0; o < PHI_NODES; o++)
          check(int'(y[o]) == e[o], $sformatf("y[%0d]=%0d exp %0d", o, y[o], e[o]));
        n_out++;
      end
    end
  end

  initial begin
    foreach (x[i]) x[i] = '0;
    load_weights();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      for (int t = 0; t < 200; t++) begin
        automatic ivec xv = new[N_FEAT];
        @(negedge clk);
        in_valid = ($urandom_range(3, 0) != 0);
        foreach (xv[i]) xv[i] = rand_range(-128, 127);
        foreach (x[i]) x[i] = act_t'(xv[i]);
        in_tag = 8'(t);
        if (in_valid) begin
          exp_q.push_back(dense(dense(dense(xv, wv0, bv0, N_FEAT, PHI_NODES, 1),
                                      wv1, bv1, PHI_NODES, PHI_NODES, 1),
                                wv2, bv2, PHI_NODES, PHI_NODES, 1));
          tag_q.push_back(t % 256);
          time_q.push_back(cycles);
        end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (6) @(negedge clk);
      load_weights();
    end
    check(exp_q.size() == 0 && n_out > 100, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
