// tb_ds_workloads: the classifier in its two larger reference configurations,
// N = 16 constituents with reuse factor 4 and N = 32 with reuse factor 8 (both
// keep four phi lanes), each run end to end by ds_tagger_workload.
module tb_ds_workloads;
  logic done16, done32;
  int   c16, f16, c32, f32;
  int   ticks = 0;

  ds_tagger_workload #(.N(16), .RF(4)) u_n16 (.done(done16), .checks(c16), .failures(f16));
  ds_tagger_workload #(.N(32), .RF(8)) u_n32 (.done(done32), .checks(c32), .failures(f32));

  initial begin
    fork
      begin
        wait (done16 && done32);
        $display("TB_RESULT checks=%0d failures=%0d", c16 + c32, f16 + f32);
      end
      begin
        while (ticks < 400000) begin #10; ticks++; end
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", c16 + c32, f16 + f32 + 1);
      end
    join_any
    $finish;
  end
endmodule
