// tb_workload_f8a2s4: fill-and-replace workload (tb_workload_core) with the
// 14-bit fingerprint split f = 8, a = 2, alpha = 4, on two tables of
// 512 buckets of 4 cells filled to 95 %, followed by 20000 replacements.
module tb_workload_f8a2s4;
  int checks, failures;
  bit finished;

  tb_workload_core #(.IDX_W(9), .F_W(8), .A_W(2), .ALPHA_W(4), .OCC_PCT(95), .N_REPL(20000))
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
