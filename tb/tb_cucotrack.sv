// tb_cucotrack: end-to-end test of the CuCoTrack engine through its
// request/response interface, in a small configuration (8 buckets per
// table, f = 3, a = 2, alpha = 2, 32-bit keys, MAX_KICKS = 16) where every
// mechanism occurs often.
//
// A model holds the stored set. Inserts, deletes and bursts of back-to-back
// lookups are issued at random. Checked: every lookup of a stored key hits
// with the key's value, never matches two cells, and answers exactly 3
// cycles after acceptance, one per cycle in a burst; the table contents
// agree with the model after every update (one matching cell per stored
// key, full key beside it); a refused insert is really unsolvable and a
// solvable one is accepted; a homeless element was stored; a delete of a
// key with no cell of its fingerprint in its buckets reports ST_NOT_FOUND.
// Counted, and required to occur: selector adaptation of the new key,
// re-adaptation of stored keys, refused inserts, displacement, full table,
// lookup bursts, and stalls of the request port behind an update.
module tb_cucotrack;
  import cucotrack_pkg::*;
  import tb_ref_pkg::*;

  localparam int KEY_W = 32, VAL_W = 8, IDX_W = 3, F_W = 3, A_W = 2, ALPHA_W = 2;
  localparam int CELLS = 4, MAX_KICKS = 16;
  localparam int CELL_W = 1 + F_W + ALPHA_W + A_W + VAL_W;
  localparam int AV_W = A_W << ALPHA_W, NC = 2 * CELLS, NB = 1 << IDX_W, NS = 1 << ALPHA_W;
  localparam int KC_W = $clog2(MAX_KICKS + 1);

  typedef struct packed {
    logic valid; logic [F_W-1:0] f; logic [ALPHA_W-1:0] alpha; logic [A_W-1:0] a; logic [VAL_W-1:0] v;
  } tcell_t;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  op_e req_op;
  logic [KEY_W-1:0] req_key;
  logic [VAL_W-1:0] req_value;
  logic resp_valid, resp_multi;
  op_e resp_op;
  status_e resp_status;
  logic [VAL_W-1:0] resp_value, resp_homeless_value;
  logic [ALPHA_W-1:0] resp_alpha;
  logic [$clog2(NC+1)-1:0] resp_readapted;
  logic [KC_W-1:0] resp_kicks;
  logic [KEY_W-1:0] resp_homeless_key;

  cucotrack #(.KEY_W(KEY_W), .VAL_W(VAL_W), .IDX_W(IDX_W), .F_W(F_W), .A_W(A_W),
              .ALPHA_W(ALPHA_W), .CELLS(CELLS), .MAX_KICKS(MAX_KICKS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ins = 0, n_adapt = 0, n_readapt = 0, n_coll = 0, n_kick = 0, n_full = 0;
  int n_del = 0, n_miss = 0, n_lookup = 0, n_burst = 0, n_stall = 0, n_follow = 0;
  longint cycle = 0;
  logic [VAL_W-1:0] model [logic [KEY_W-1:0]];

  always @(posedge clk) begin
    cycle <= cycle + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void rh(input logic [KEY_W-1:0] k, output int e_p1, output int e_p2,
                             output int e_f, output logic [AV_W-1:0] e_av);
    logic [255:0] h1, hf, h2, ha;
    h1 = ref_h3(256'(k), KEY_W, R_SEED_H1, IDX_W);
    hf = ref_h3(256'(k), KEY_W, R_SEED_HF, F_W);
    h2 = ref_h3(hf, F_W, R_SEED_H2, IDX_W);
    ha = ref_h3(256'(k), KEY_W, R_SEED_HA, AV_W);
    e_p1 = int'(h1[IDX_W-1:0]);
    e_p2 = e_p1 ^ int'(h2[IDX_W-1:0]);
    e_f  = int'(hf[F_W-1:0]);
    e_av = ha[AV_W-1:0];
  endfunction

  function automatic tcell_t cell_at(input int t, input int b, input int c);
    return t == 0 ? tcell_t'(dut.g_tbl[0].u_filter.mem[b][c]) : tcell_t'(dut.g_tbl[1].u_filter.mem[b][c]);
  endfunction
  function automatic logic [KEY_W-1:0] key_at(input int t, input int b, input int c);
    return t == 0 ? dut.g_tbl[0].u_full.mem[b][c] : dut.g_tbl[1].u_full.mem[b][c];
  endfunction

  task automatic check_all();
    int nvalid = 0, nm, e_p1, e_p2, e_f;
    logic [AV_W-1:0] e_av;
    tcell_t x;
    for (int t = 0; t < 2; t++)
      for (int b = 0; b < NB; b++)
        for (int c = 0; c < CELLS; c++)
          if (cell_at(t, b, c).valid) nvalid++;
    check(nvalid == model.size(), "number of valid cells");
    foreach (model[k]) begin
      rh(k, e_p1, e_p2, e_f, e_av);
      nm = 0;
      for (int t = 0; t < 2; t++)
        for (int c = 0; c < CELLS; c++) begin
          x = cell_at(t, t == 0 ? e_p1 : e_p2, c);
          if (x.valid && x.f == F_W'(e_f) && x.a == e_av[x.alpha*A_W +: A_W]) begin
            nm++;
            check(x.v == model[k] && key_at(t, t == 0 ? e_p1 : e_p2, c) == k, "cell contents");
          end
        end
      check(nm == 1, "stored key matches exactly one cell");
    end
  endtask

  function automatic bit unsolvable(input logic [KEY_W-1:0] ks [$]);
    logic [AV_W-1:0] av [$];
    int a, b, c;
    logic [AV_W-1:0] e;
    bit any, u;
    foreach (ks[i]) begin rh(ks[i], a, b, c, e); av.push_back(e); end
    foreach (ks[m]) begin
      any = 0;
      for (int s = 0; s < NS; s++) begin
        u = 1;
        foreach (ks[w]) if (w != m && av[w][s*A_W +: A_W] == av[m][s*A_W +: A_W]) u = 0;
        if (u) any = 1;
      end
      if (!any) return 1;
    end
    return 0;
  endfunction

  // One update: wait for ready, present it for one accepted cycle, wait for
  // its response.
  // Captured update response and, when a lookup of the same key was queued
  // right behind the update, the lookup's response.
  status_e            u_status, l_status;
  logic [ALPHA_W-1:0] u_alpha;
  logic [$clog2(NC+1)-1:0] u_readapted;
  logic [KC_W-1:0]    u_kicks;
  logic [KEY_W-1:0]   u_hl_key;
  logic [VAL_W-1:0]   u_hl_val, l_value;
  logic               l_multi;

  task automatic do_update(input op_e o, input logic [KEY_W-1:0] k, input logic [VAL_W-1:0] v,
                           input bit follow = 0);
    bit got_u = 0, got_l = !follow, l_acc = 0;
    longint acc = 0;
    int stall = 0;
    @(negedge clk);
    req_valid = 1; req_op = o; req_key = k; req_value = v;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    if (follow) req_op = OP_LOOKUP;
    else req_valid = 0;
    while (!(got_u && got_l)) begin
      if (resp_valid && !got_u) begin
        got_u = 1;
        check(resp_op == o, "response operation");
        u_status = resp_status; u_alpha = resp_alpha; u_readapted = resp_readapted;
        u_kicks = resp_kicks; u_hl_key = resp_homeless_key; u_hl_val = resp_homeless_value;
      end else if (resp_valid && l_acc) begin
        got_l = 1;
        check(resp_op == OP_LOOKUP, "lookup answered after the update");
        check(cycle - acc == 3, "lookup latency 3 cycles");
        l_status = resp_status; l_value = resp_value; l_multi = resp_multi;
      end
      if (follow && req_valid && req_ready) begin
        acc = cycle; l_acc = 1;
        check(!got_u, "lookup held until the update is done");
        @(negedge clk);
        req_valid = 0;
      end else begin
        if (follow && req_valid) stall++;
        @(negedge clk);
      end
    end
    if (follow) begin
      check(stall > 0, "lookup stalled behind update");
      n_stall += stall;
    end
  endtask

  // A burst of back-to-back lookups of stored keys; responses must come in
  // order, 3 cycles after each acceptance.
  task automatic lookup_burst(input int len);
    logic [KEY_W-1:0] keys [$], sel [$];
    longint acc [$];
    int got = 0;
    foreach (model[q]) keys.push_back(q);
    if (keys.size() == 0) return;
    for (int i = 0; i < len; i++) sel.push_back(keys[$urandom % keys.size()]);
    fork
      begin
        @(negedge clk);
        foreach (sel[i]) begin
          req_valid = 1; req_op = OP_LOOKUP; req_key = sel[i]; req_value = '0;
          while (!req_ready) @(negedge clk);
          acc.push_back(cycle);
          @(negedge clk);
        end
        req_valid = 0;
      end
      begin
        while (got < len) begin
          @(negedge clk);
          if (resp_valid) begin
            check(resp_op == OP_LOOKUP && resp_status == ST_OK, "lookup of stored key hits");
            check(resp_value == model[sel[got]], "lookup value");
            check(!resp_multi, "lookup matches a single cell");
            check(cycle - acc[got] == 3, "lookup latency 3 cycles");
            got++;
          end
        end
      end
    join
    n_lookup += len;
    n_burst++;
  endtask

  initial begin
    int e_p1, e_p2, e_f, r;
    logic [AV_W-1:0] e_av;
    logic [KEY_W-1:0] k, keys [$], grp [$];
    bit clean;
    req_op = OP_LOOKUP; req_key = '0; req_value = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // a request waiting through INIT
    do_update(OP_DELETE, KEY_W'(32'h1234_5678), '0);
    check(u_status == ST_NOT_FOUND, "delete in empty tables");
    check(cycle >= longint'(NB), "requests held off during INIT");

    for (int n = 0; n < 600; n++) begin
      r = $urandom % 10;
      if (r < (n < 300 ? 6 : 3) || model.size() == 0) begin
        k = KEY_W'($urandom);
        while (model.exists(k)) k = KEY_W'($urandom);
        rh(k, e_p1, e_p2, e_f, e_av);
        grp.delete();
        foreach (model[q]) begin
          int q1, q2, qf; logic [AV_W-1:0] qa;
          rh(q, q1, q2, qf, qa);
          if (q1 == e_p1 && qf == e_f) grp.push_back(q);
        end
        grp.push_back(k);
        do_update(OP_INSERT, k, VAL_W'($urandom), ($urandom % 2) == 1);
        if (u_status == ST_COLLISION) begin
          n_coll++;
          check(unsolvable(grp), "refused insert is really unsolvable");
        end else begin
          check(!unsolvable(grp), "solvable insert accepted");
          model[k] = req_value;
          if (u_status == ST_FULL) begin
            n_full++;
            check(model.exists(u_hl_key) && model[u_hl_key] == u_hl_val,
                  "homeless element was stored");
            model.delete(u_hl_key);
          end else begin
            check(u_status == ST_OK, "insert status");
            n_ins++;
          end
          if (u_alpha != 0) n_adapt++;
          if (u_readapted != 0) n_readapt++;
          if (u_kicks != 0) n_kick++;
        end
        if (req_op == OP_LOOKUP && model.exists(k)) begin
          check(l_status == ST_OK && l_value == model[k] && !l_multi, "lookup right behind insert sees it");
          n_follow++;
        end
        check_all();
      end else if (r < 7) begin
        keys.delete();
        foreach (model[q]) keys.push_back(q);
        k = keys[$urandom % keys.size()];
        do_update(OP_DELETE, k, '0);
        check(u_status == ST_OK, "delete of stored key");
        model.delete(k);
        n_del++;
        check_all();
      end else if (r < 8) begin
        do begin
          k = KEY_W'($urandom);
          rh(k, e_p1, e_p2, e_f, e_av);
          clean = !model.exists(k);
          for (int c = 0; c < CELLS; c++) begin
            if (cell_at(0, e_p1, c).valid && cell_at(0, e_p1, c).f == F_W'(e_f)) clean = 0;
            if (cell_at(1, e_p2, c).valid && cell_at(1, e_p2, c).f == F_W'(e_f)) clean = 0;
          end
        end while (!clean);
        do_update(OP_DELETE, k, '0);
        check(u_status == ST_NOT_FOUND, "delete of absent key");
        n_miss++;
      end else begin
        lookup_burst(1 + $urandom % 8);
      end
    end
    $display("inserts ok=%0d adapted=%0d readapted=%0d refused=%0d displaced=%0d full=%0d",
             n_ins, n_adapt, n_readapt, n_coll, n_kick, n_full);
    $display("deletes=%0d misses=%0d lookups=%0d bursts=%0d stall cycles=%0d lookups behind inserts=%0d",
             n_del, n_miss, n_lookup, n_burst, n_stall, n_follow);
    check(n_adapt > 0, "adaptation happened");
    check(n_readapt > 0, "re-adaptation happened");
    check(n_coll > 0, "refused insert happened");
    check(n_kick > 0, "displacement happened");
    check(n_full > 0, "full table happened");
    check(n_miss > 0 && n_del > 0, "deletes happened");
    check(n_burst > 0, "lookup bursts happened");
    check(n_stall > 0, "stall behind an update happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
