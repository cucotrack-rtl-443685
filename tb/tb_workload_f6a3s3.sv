// tb_workload_f6a3s3: fill-and-replace workload (tb_workload_core) with the
// 12-bit fingerprint split f = 6, a = 3, alpha = 3, on two tables of
// 512 buckets of 4 cells filled to 95 %, followed by 20000 replacements.
module tb_workload_f6a3s3;
  int checks, failures;
  bit finished;

  tb_workload_core #(.IDX_W(9), .F_W(6), .A_W(3), .ALPHA_W(3), .OCC_PCT(95), .N_REPL(20000))
    u_core (.checks, .failures, .finished);

  initial begin
    #20ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge finished) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
