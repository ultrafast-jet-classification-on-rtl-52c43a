// tb_softmax: random and corner-case class scores; the probabilities must agree
// with exp()/sum computed in real arithmetic to within 2/256, and appear two
// cycles after the scores.
module tb_softmax;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  in_valid = 0, out_valid;
  act_t  z [N_CLASSES];
  prob_t p [N_CLASSES];

  softmax #(.K(N_CLASSES)) dut (.clk, .rst_n, .in_valid, .z, .out_valid, .p);

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
        check(cycles - tm == 2, $sformatf("latency %0d", cycles - tm));
        for (int k = 0; k < N_CLASSES; k++) begin
          automatic int diff = int'(p[k]) - e[k];
          check(diff <= 2 && diff >= -2, $sformatf("p[%0d]=%0d exp %0d", k, p[k], e[k]));
        end
        n_out++;
      end
    end
  end

  initial begin
    foreach (z[k]) z[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      ivec zv = new[N_CLASSES];
      @(negedge clk);
      in_valid = ($urandom_range(3, 0) != 0);
      case (t)
        0: foreach (zv[k]) zv[k] = 0;                        // uniform
        1: foreach (zv[k]) zv[k] = (k == 2) ? 127 : -128;    // one certain class
        2: foreach (zv[k]) zv[k] = -128;
        default: foreach (zv[k]) zv[k] = rand_range((t % 2) ? -128 : -20, (t % 2) ? 127 : 20);
      endcase
      if (t < 3) in_valid = 1;
      foreach (z[k]) z[k] = act_t'(zv[k]);
      if (in_valid) begin
        exp_q.push_back(ds_ref_pkg::softmax(zv));
        time_q.push_back(cycles);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    check(exp_q.size() == 0 && n_out > 200, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
