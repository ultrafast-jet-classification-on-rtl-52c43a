// tb_dense_layer: random vectors through two dense layers (with and without ReLU)
// compared with the reference model; checks the one-cycle latency and the tag.
module tb_dense_layer;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  localparam int MIN = 6, MOUT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  logic [3:0] in_tag, tag_r, tag_l;
  act_t x [MIN];
  wgt_t w [MOUT][MIN];
  wgt_t b [MOUT];
  logic v_r, v_l;
  act_t y_r [MOUT];
  act_t y_l [MOUT];

  dense_layer #(.MIN(MIN), .MOUT(MOUT), .RELU(1'b1), .TAG_W(4)) dut_relu (
    .clk, .rst_n, .in_valid, .in_tag, .x, .w, .b, .out_valid(v_r), .out_tag(tag_r), .y(y_r));
  dense_layer #(.MIN(MIN), .MOUT(MOUT), .RELU(1'b0), .TAG_W(4)) dut_lin (
    .clk, .rst_n, .in_valid, .in_tag, .x, .w, .b, .out_valid(v_l), .out_tag(tag_l), .y(y_l));

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    ivec xv, wv, bv, er, el;
    int big;
    in_valid = 0; in_tag = 0;
    foreach (x[i]) x[i] = '0;
    foreach (w[o, i]) w[o][i] = '0;
    foreach (b[o]) b[o] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!v_r && !v_l, "valid low after reset");
    for (int t = 0; t < 300; t++) begin
      big = (t % 3 == 0) ? 127 : 40;
      xv = new[MIN]; wv = new[MIN*MOUT]; bv = new[MOUT];
      foreach (xv[i]) xv[i] = rand_range(-big, big);
      foreach (wv[i]) wv[i] = rand_range(-128, 127);
      foreach (bv[i]) bv[i] = rand_range(-128, 127);
      @(negedge clk);
      foreach (x[i]) x[i] = act_t'(xv[i]);
      foreach (w[o, i]) w[o][i] = wgt_t'(wv[o*MIN + i]);
      foreach (b[o]) b[o] = wgt_t'(bv[o]);
      in_valid = 1; in_tag = 4'(t);
      @(negedge clk);
      in_valid = 0;
      er = dense(xv, wv, bv, MIN, MOUT, 1'b1);
      el = dense(xv, wv, bv, MIN, MOUT, 1'b0);
      check(v_r && v_l, "valid one cycle after input");
      check(tag_r == 4'(t) && tag_l == 4'(t), "tag follows data");
      for (int o = 0; o < MOUT; o++) begin
        check(int'(y_r[o]) == er[o], $sformatf("relu y[%0d]=%0d exp %0d", o, y_r[o], er[o]));
        check(int'(y_l[o]) == el[o], $sformatf("lin  y[%0d]=%0d exp %0d", o, y_l[o], el[o]));
      end
      @(negedge clk);
      check(!v_r, "valid is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
