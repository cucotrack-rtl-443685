// tb_cucotrack_hash: checks the hash front end against the reference H3
// model for random keys at the default sizes (104-bit key, 19-bit bucket
// index, f = 8, a = 3, alpha = 5): p1, f, p2 = p1 xor h2(f) and every
// adaptive value h_alpha. Also checks that p1 follows from p2 and f alone.
module tb_cucotrack_hash;
  import tb_ref_pkg::*;

  localparam int KEY_W = 104, IDX_W = 19, F_W = 8, A_W = 3, ALPHA_W = 5;
  localparam int AV_W = A_W << ALPHA_W;

  logic [KEY_W-1:0] key;
  logic [IDX_W-1:0] p1, p2;
  logic [F_W-1:0]   f;
  logic [AV_W-1:0]  avec;
  int checks = 0, failures = 0;

  cucotrack_hash #(.KEY_W(KEY_W), .IDX_W(IDX_W), .F_W(F_W), .A_W(A_W), .ALPHA_W(ALPHA_W))
    dut (.key, .p1, .p2, .f, .avec);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s key=%h", what, key);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] e_p1, e_f, e_h2, e_av;
    for (int n = 0; n < 200; n++) begin
      key = (n == 0) ? '0 : (n == 1) ? '1 : KEY_W'(rand_key(KEY_W));
      #1;
      e_p1 = ref_h3(256'(key), KEY_W, R_SEED_H1, IDX_W);
      e_f  = ref_h3(256'(key), KEY_W, R_SEED_HF, F_W);
      e_h2 = ref_h3(e_f, F_W, R_SEED_H2, IDX_W);
      e_av = ref_h3(256'(key), KEY_W, R_SEED_HA, AV_W);
      check(p1 == e_p1[IDX_W-1:0], "p1");
      check(f == e_f[F_W-1:0], "f");
      check(p2 == (e_p1[IDX_W-1:0] ^ e_h2[IDX_W-1:0]), "p2");
      check((p2 ^ e_h2[IDX_W-1:0]) == p1, "p1 from p2 and f");
      for (int s = 0; s < (1 << ALPHA_W); s++)
        check(avec[s*A_W +: A_W] == e_av[s*A_W +: A_W], "h_alpha");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
