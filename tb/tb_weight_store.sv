// tb_weight_store: writes a random image of all parameters (plus writes beyond
// the end, which must be ignored), reads every word back and checks that each
// per-layer output shows the word at its documented address; then checks reset.
module tb_weight_store;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               cfg_we = 0;
  logic [PADDR_W-1:0] cfg_addr = '0;
  wgt_t               cfg_wdata = '0, cfg_rdata;
  wgt_t w_phi0 [PHI_NODES][N_FEAT];
  wgt_t b_phi0 [PHI_NODES];
  wgt_t w_phi1 [PHI_NODES][PHI_NODES];
  wgt_t b_phi1 [PHI_NODES];
  wgt_t w_phi2 [PHI_NODES][PHI_NODES];
  wgt_t b_phi2 [PHI_NODES];
  wgt_t w_rho0 [RHO_NODES][PHI_NODES];
  wgt_t b_rho0 [RHO_NODES];
  wgt_t w_out  [N_CLASSES][RHO_NODES];
  wgt_t b_out  [N_CLASSES];

  weight_store dut (.*);

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

  int img [N_PARAMS];

  initial begin
    int a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(N_PARAMS == 3461, "parameter count 3461");
    foreach (img[i]) img[i] = rand_range(-128, 127);
    for (int i = 0; i < N_PARAMS + 20; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = PADDR_W'(i);
      cfg_wdata = (i < N_PARAMS) ? wgt_t'(img[i]) : wgt_t'(8'h55);
    end
    @(negedge clk);
    cfg_we = 0;
    for (int i = 0; i < N_PARAMS; i++) begin
      cfg_addr = PADDR_W'(i);
      @(negedge clk);
      check(int'(cfg_rdata) == img[i], $sformatf("readback %0d", i));
    end
    // per-layer views, address = base + o*MIN + i, biases after the weights
    a = 0;
    for (int o = 0; o < 32; o++) for (int i = 0; i < 3; i++)  check(int'(w_phi0[o][i]) == img[a + o*3 + i], "w_phi0");
    for (int o = 0; o < 32; o++) check(int'(b_phi0[o]) == img[a + 96 + o], "b_phi0");
    a = 128;
    for (int o = 0; o < 32; o++) for (int i = 0; i < 32; i++) check(int'(w_phi1[o][i]) == img[a + o*32 + i], "w_phi1");
    for (int o = 0; o < 32; o++) check(int'(b_phi1[o]) == img[a + 1024 + o], "b_phi1");
    a = 128 + 1056;
    for (int o = 0; o < 32; o++) for (int i = 0; i < 32; i++) check(int'(w_phi2[o][i]) == img[a + o*32 + i], "w_phi2");
    for (int o = 0; o < 32; o++) check(int'(b_phi2[o]) == img[a + 1024 + o], "b_phi2");
    a = 128 + 2*1056;
    for (int o = 0; o < 32; o++) for (int i = 0; i < 32; i++) check(int'(w_rho0[o][i]) == img[a + o*32 + i], "w_rho0");
    for (int o = 0; o < 32; o++) check(int'(b_rho0[o]) == img[a + 1024 + o], "b_rho0");
    a = 128 + 3*1056;
    for (int o = 0; o < 5; o++) for (int i = 0; i < 32; i++) check(int'(w_out[o][i]) == img[a + o*32 + i], "w_out");
    for (int o = 0; o < 5; o++) check(int'(b_out[o]) == img[a + 160 + o], "b_out");
    // reset clears
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    check(w_phi1[7][9] == '0 && b_out[4] == '0 && w_out[2][31] == '0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
