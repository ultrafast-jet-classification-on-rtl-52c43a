// tb_feature_norm: random and extreme raw features through two scalings (the
// default shifts and one with a left shift); checks the shifted, saturated codes.
module tb_feature_norm;
  import jet_pkg::*;
  import ds_ref_pkg::*;

  localparam int N = 4, RAW_W = 16;
  localparam int SH_A [N_FEAT] = '{6, 0, 0};
  localparam int SH_B [N_FEAT] = '{3, -2, 1};

  logic signed [RAW_W-1:0] raw [N][N_FEAT];
  act_t ya [N][N_FEAT];
  act_t yb [N][N_FEAT];

  feature_norm #(.N(N), .RAW_W(RAW_W)) dut_a (.raw_feat(raw), .norm_feat(ya));
  feature_norm #(.N(N), .RAW_W(RAW_W), .SHIFT(SH_B)) dut_b (.raw_feat(raw), .norm_feat(yb));

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_norm(int v, int sh);
    real q = (sh >= 0) ? $floor(real'(v) / real'(1 << sh)) : real'(v) * real'(1 << -sh);
    return sat8(longint'(q));
  endfunction

  initial begin
    for (int t = 0; t < 500; t++) begin
      foreach (raw[c, f]) begin
        case ($urandom_range(3, 0))
          0: raw[c][f] = RAW_W'($urandom);
          1: raw[c][f] = RAW_W'(rand_range(-300, 300));
          2: raw[c][f] = RAW_W'(rand_range(-40, 40));
          default: raw[c][f] = (t % 2) ? 16'sh7fff : -16'sh8000;
        endcase
      end
      if (t == 0) foreach (raw[c, f]) raw[c][f] = '0;   // zero padding
      #10;
      foreach (raw[c, f]) begin
        check(int'(ya[c][f]) == ref_norm(int'(raw[c][f]), SH_A[f]),
              $sformatf("A raw=%0d sh=%0d got %0d", raw[c][f], SH_A[f], ya[c][f]));
        check(int'(yb[c][f]) == ref_norm(int'(raw[c][f]), SH_B[f]),
              $sformatf("B raw=%0d sh=%0d got %0d", raw[c][f], SH_B[f], yb[c][f]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
