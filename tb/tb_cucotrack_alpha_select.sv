// tb_cucotrack_alpha_select: selector choice for colliding groups.
// First the three-element example (x, y, z with four selectors and values
// a, b, c): the only usable selectors are 0 for x, 1 for y and 2 for z.
// Then random groups are checked against an independent model: a selector
// is usable for a member when no other member has the same value under it;
// the current selector is kept when usable, else the lowest usable one.
module tb_cucotrack_alpha_select;
  localparam int A_W = 2, ALPHA_W = 2, M = 9;
  localparam int AV_W = A_W << ALPHA_W, NS = 1 << ALPHA_W;

  logic [M-1:0] member, keep, ok;
  logic [M-1:0][AV_W-1:0] avec;
  logic [M-1:0][ALPHA_W-1:0] cur_alpha, sel_alpha;
  logic [M-1:0][A_W-1:0] sel_a;
  logic all_ok;
  int checks = 0, failures = 0;
  int n_fail_groups = 0, n_kept = 0, n_moved = 0;

  cucotrack_alpha_select #(.A_W(A_W), .ALPHA_W(ALPHA_W), .M(M)) dut (.*);

  task automatic check(input bit ok_i, input string what);
    checks++;
    if (!ok_i) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [AV_W-1:0] pack4(input int v0, v1, v2, v3);
    return {A_W'(v3), A_W'(v2), A_W'(v1), A_W'(v0)};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit e_use [M][NS];
    bit e_ok, e_all;
    int e_sel;
    // worked example: a = 0, b = 1, c = 2; rows are selectors 0..3
    member = '0; keep = '0; cur_alpha = '0; avec = '0;
    member[2:0] = 3'b111;
    avec[0] = pack4(0, 2, 0, 0);   // x: a c a a
    avec[1] = pack4(1, 0, 0, 0);   // y: b a a a
    avec[2] = pack4(1, 2, 1, 0);   // z: b c b a
    #1;
    check(all_ok, "example solvable");
    check(sel_alpha[0] == 0 && sel_a[0] == 0, "x takes selector 0");
    check(sel_alpha[1] == 1 && sel_a[1] == 0, "y takes selector 1");
    check(sel_alpha[2] == 2 && sel_a[2] == 1, "z takes selector 2");
    // same values, z made unsolvable: under selector 2 z equals x
    avec[2] = pack4(1, 2, 0, 0);
    #1;
    check(!all_ok && !ok[2] && ok[0] && ok[1], "example with z blocked");

    for (int n = 0; n < 3000; n++) begin
      for (int m = 0; m < M; m++) begin
        member[m]    = ($urandom % 3) != 0;
        keep[m]      = 1'($urandom % 2);
        cur_alpha[m] = ALPHA_W'($urandom);
        avec[m]      = AV_W'($urandom);
      end
      #1;
      e_all = 1;
      for (int m = 0; m < M; m++) begin
        e_ok = 0; e_sel = -1;
        for (int s = 0; s < NS; s++) begin
          e_use[m][s] = 1;
          for (int w = 0; w < M; w++)
            if (w != m && member[w] && avec[w][s*A_W +: A_W] == avec[m][s*A_W +: A_W])
              e_use[m][s] = 0;
          if (e_use[m][s] && e_sel < 0) e_sel = s;
        end
        e_ok = e_sel >= 0;
        if (keep[m] && e_use[m][cur_alpha[m]]) e_sel = int'(cur_alpha[m]);
        if (member[m] && !e_ok) e_all = 0;
        check(ok[m] == e_ok, "ok");
        if (e_ok) begin
          check(int'(sel_alpha[m]) == e_sel, "selector");
          check(sel_a[m] == avec[m][e_sel*A_W +: A_W], "selected value");
          if (member[m] && keep[m]) begin
            if (e_sel == int'(cur_alpha[m])) n_kept++; else n_moved++;
          end
        end
      end
      check(all_ok == e_all, "all_ok");
      if (!e_all) n_fail_groups++;
    end
    check(n_fail_groups > 10 && n_kept > 10 && n_moved > 10, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
