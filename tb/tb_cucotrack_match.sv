// tb_cucotrack_match: random bucket pairs compared with an independent
// model of the match rule. Cells are drawn so that many share the probe's
// fixed fingerprint and some carry the probe's adaptive value under their
// own selector, so hits, multiple hits, group and free cells all occur.
// Small fields (f = 3, a = 2, alpha = 2) make coincidences frequent.
module tb_cucotrack_match;
  localparam int F_W = 3, A_W = 2, ALPHA_W = 2, VAL_W = 8, CELLS = 4;
  localparam int CELL_W = 1 + F_W + ALPHA_W + A_W + VAL_W;
  localparam int AV_W = A_W << ALPHA_W, NC = 2 * CELLS;

  typedef struct packed {
    logic valid; logic [F_W-1:0] f; logic [ALPHA_W-1:0] alpha; logic [A_W-1:0] a; logic [VAL_W-1:0] v;
  } tcell_t;

  logic [CELLS*CELL_W-1:0] bkt1, bkt2;
  logic [F_W-1:0] f;
  logic [AV_W-1:0] avec;
  logic [NC-1:0] hit, group, free;
  logic hit_any, multi;
  logic [$clog2(NC)-1:0] hit_cell;
  logic [VAL_W-1:0] hit_value;
  int checks = 0, failures = 0;
  int n_hit = 0, n_multi = 0;

  cucotrack_match #(.F_W(F_W), .A_W(A_W), .ALPHA_W(ALPHA_W), .VAL_W(VAL_W), .CELLS(CELLS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tcell_t c [NC];
    logic [NC-1:0] e_hit, e_group, e_free;
    int first;
    for (int n = 0; n < 3000; n++) begin
      f    = F_W'($urandom);
      avec = AV_W'($urandom);
      for (int k = 0; k < NC; k++) begin
        c[k].valid = ($urandom % 4) != 0;
        c[k].f     = ($urandom % 2) != 0 ? f : F_W'($urandom);
        c[k].alpha = ALPHA_W'($urandom);
        c[k].a     = ($urandom % 2) != 0 ? avec[c[k].alpha*A_W +: A_W] : A_W'($urandom);
        c[k].v     = VAL_W'($urandom);
        if (k < CELLS) bkt1[k*CELL_W +: CELL_W] = c[k];
        else           bkt2[(k-CELLS)*CELL_W +: CELL_W] = c[k];
      end
      #1;
      first = -1;
      for (int k = 0; k < NC; k++) begin
        e_free[k]  = !c[k].valid;
        e_group[k] = c[k].valid && c[k].f == f;
        e_hit[k]   = e_group[k] && A_W'(avec >> (c[k].alpha * A_W)) == c[k].a;
        if (e_hit[k] && first < 0) first = k;
      end
      check(hit == e_hit, "hit mask");
      check(group == e_group, "group mask");
      check(free == e_free, "free mask");
      check(hit_any == (e_hit != 0), "hit_any");
      check(multi == ($countones(e_hit) > 1), "multi");
      if (first >= 0) begin
        n_hit++;
        check(int'(hit_cell) == first, "hit_cell");
        check(hit_value == c[first].v, "hit_value");
      end
      if ($countones(e_hit) > 1) n_multi++;
    end
    check(n_hit > 100 && n_multi > 10, "coverage of hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
