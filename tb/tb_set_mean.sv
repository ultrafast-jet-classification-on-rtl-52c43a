// tb_set_mean: jets of N embeddings, delivered as RF slices of N/RF lanes with
// first/last tags, back to back and with gaps; the output must be the
// truncated mean of each jet, one cycle after its last slice.
module tb_set_mean;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  localparam int N = 8, RF = 2, D = PHI_NODES, LANES = N / RF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_first = 0, in_last = 0, out_valid;
  act_t x [LANES][D];
  act_t y [D];

  set_mean #(.N(N), .RF(RF), .D(D)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last,
    .x, .out_valid, .y);

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
        check(cycles - tm == 1, $sformatf("latency %0d", cycles - tm));
        for (int d = 0; d < D; d++)
          check(int'(y[d]) == e[d], $sformatf("y[%0d]=%0d exp %0d", d, y[d], e[d]));
        n_out++;
      end
    end
  end

  initial begin
    foreach (x[l, d]) x[l][d] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < 200; j++) begin
      int  emb [N][D];
      ivec e = new[D];
      automatic int hi = (j % 4 == 0) ? 127 : 60;
      for (int c = 0; c < N; c++)
        for (int d = 0; d < D; d++) emb[c][d] = rand_range((j % 5 == 0) ? -128 : 0, hi);
      for (int d = 0; d < D; d++) begin
        automatic int s = 0;
        for (int c = 0; c < N; c++) s += emb[c][d];
        e[d] = sat8(longint'($floor(real'(s) / N)));
      end
      for (int t = 0; t < RF; t++) begin
        @(negedge clk);
        in_valid = 1; in_first = (t == 0); in_last = (t == RF - 1);
        for (int l = 0; l < LANES; l++)
          for (int d = 0; d < D; d++) x[l][d] = act_t'(emb[l*RF + t][d]);
        if (in_last) begin exp_q.push_back(e); time_q.push_back(cycles); end
        // occasionally a gap inside or between jets
        if ($urandom_range(3, 0) == 0) begin
          @(negedge clk);
          in_valid = 0; in_first = 0; in_last = 0;
          foreach (x[l, d]) x[l][d] = act_t'($urandom);
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    check(exp_q.size() == 0 && n_out == 200, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
