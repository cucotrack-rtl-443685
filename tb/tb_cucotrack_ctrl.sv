// tb_cucotrack_ctrl: the insert/delete controller with real tables.
//
// Small configuration (8 buckets per table, f = 3, a = 2, alpha = 2,
// 32-bit keys, MAX_KICKS = 16) so that colliding groups, re-adaptation,
// refused inserts, displacement and full tables all happen. After every
// operation the table contents are checked against a model of the stored
// set, with hashes from the reference model: each stored key matches
// exactly one cell of its two buckets, with its value and its full key, and
// no other valid cell exists. A refused insert is checked to be really
// unsolvable; a delete of an absent key must report ST_NOT_FOUND. Cycle
// counts of the simple cases (delete 3, insert into a free cell 4) and of
// the INIT sweep are checked.
module tb_cucotrack_ctrl;
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
  logic start = 0;
  op_e op;
  logic [KEY_W-1:0] key;
  logic [VAL_W-1:0] value;
  logic [IDX_W-1:0] p1, p2;
  logic [F_W-1:0] f;
  logic [AV_W-1:0] avec;
  logic busy, done;
  status_e status;
  logic [ALPHA_W-1:0] new_alpha;
  logic [$clog2(NC+1)-1:0] readapted;
  logic [KC_W-1:0] kicks;
  logic [KEY_W-1:0] homeless_key;
  logic [VAL_W-1:0] homeless_value;
  logic [1:0] rd_en, wr_en, wr_key_en;
  logic [1:0][IDX_W-1:0] rd_idx, wr_idx;
  logic [1:0][CELLS*CELL_W-1:0] rd_bkt, wr_bkt;
  logic [1:0][CELLS*KEY_W-1:0] rd_keys, wr_keys;
  logic [1:0][CELLS-1:0] wr_mask;

  cucotrack_hash #(.KEY_W(KEY_W), .IDX_W(IDX_W), .F_W(F_W), .A_W(A_W), .ALPHA_W(ALPHA_W))
    u_hash (.key, .p1, .p2, .f, .avec);

  cucotrack_ctrl #(.KEY_W(KEY_W), .VAL_W(VAL_W), .IDX_W(IDX_W), .F_W(F_W), .A_W(A_W),
                   .ALPHA_W(ALPHA_W), .CELLS(CELLS), .MAX_KICKS(MAX_KICKS)) dut (.*);

  cucotrack_filter_table #(.IDX_W(IDX_W), .CELLS(CELLS), .CELL_W(CELL_W)) u_f0 (
    .clk, .rd_en(rd_en[0]), .rd_idx(rd_idx[0]), .rd_bkt(rd_bkt[0]),
    .wr_en(wr_en[0]), .wr_idx(wr_idx[0]), .wr_mask(wr_mask[0]), .wr_bkt(wr_bkt[0]));
  cucotrack_filter_table #(.IDX_W(IDX_W), .CELLS(CELLS), .CELL_W(CELL_W)) u_f1 (
    .clk, .rd_en(rd_en[1]), .rd_idx(rd_idx[1]), .rd_bkt(rd_bkt[1]),
    .wr_en(wr_en[1]), .wr_idx(wr_idx[1]), .wr_mask(wr_mask[1]), .wr_bkt(wr_bkt[1]));
  cucotrack_full_table #(.KEY_W(KEY_W), .IDX_W(IDX_W), .CELLS(CELLS)) u_k0 (
    .clk, .rd_en(rd_en[0]), .rd_idx(rd_idx[0]), .rd_keys(rd_keys[0]),
    .wr_en(wr_key_en[0]), .wr_idx(wr_idx[0]), .wr_mask(wr_mask[0]), .wr_keys(wr_keys[0]));
  cucotrack_full_table #(.KEY_W(KEY_W), .IDX_W(IDX_W), .CELLS(CELLS)) u_k1 (
    .clk, .rd_en(rd_en[1]), .rd_idx(rd_idx[1]), .rd_keys(rd_keys[1]),
    .wr_en(wr_key_en[1]), .wr_idx(wr_idx[1]), .wr_mask(wr_mask[1]), .wr_keys(wr_keys[1]));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ok_ins = 0, n_adapt = 0, n_readapt = 0, n_coll = 0, n_kick = 0, n_full = 0;
  int n_del = 0, n_miss = 0;
  logic [VAL_W-1:0] model [logic [KEY_W-1:0]];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference hashes
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
    return t == 0 ? tcell_t'(u_f0.mem[b][c]) : tcell_t'(u_f1.mem[b][c]);
  endfunction
  function automatic logic [KEY_W-1:0] key_at(input int t, input int b, input int c);
    return t == 0 ? u_k0.mem[b][c] : u_k1.mem[b][c];
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
            check(x.v == model[k], "stored value");
            check(key_at(t, t == 0 ? e_p1 : e_p2, c) == k, "full key beside fingerprint");
          end
        end
      check(nm == 1, "stored key matches exactly one cell");
    end
  endtask

  // Is a group of keys impossible to separate with the selectors?
  function automatic bit unsolvable(input logic [KEY_W-1:0] ks [$]);
    logic [AV_W-1:0] av [$];
    int a, b, c;
    logic [AV_W-1:0] e;
    bit any;
    foreach (ks[i]) begin rh(ks[i], a, b, c, e); av.push_back(e); end
    foreach (ks[m]) begin
      any = 0;
      for (int s = 0; s < NS; s++) begin
        bit u = 1;
        foreach (ks[w]) if (w != m && av[w][s*A_W +: A_W] == av[m][s*A_W +: A_W]) u = 0;
        if (u) any = 1;
      end
      if (!any) return 1;
    end
    return 0;
  endfunction

  task automatic do_op(input op_e o, input logic [KEY_W-1:0] k, input logic [VAL_W-1:0] v,
                       output int cyc);
    @(negedge clk);
    op = o; key = k; value = v; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc, init_cyc, e_p1, e_p2, e_f;
    logic [AV_W-1:0] e_av;
    logic [KEY_W-1:0] k, keys [$], grp [$];
    op = OP_LOOKUP; key = '0; value = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    init_cyc = 0;
    while (busy) begin @(negedge clk); init_cyc++; end
    check(init_cyc == NB, "INIT sweep takes one cycle per bucket");
    check_all();

    for (int n = 0; n < 600; n++) begin
      int r;
      r = $urandom % 10;
      if (r < (n < 300 ? 8 : 4) || model.size() == 0) begin
        // insert a fresh key
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
        do_op(OP_INSERT, k, VAL_W'($urandom), cyc);
        if (status == ST_COLLISION) begin
          n_coll++;
          check(unsolvable(grp), "refused insert is really unsolvable");
        end else begin
          check(!unsolvable(grp), "solvable group accepted");
          model[k] = value;
          if (status == ST_FULL) begin
            n_full++;
            check(model.exists(homeless_key) && model[homeless_key] == homeless_value,
                  "homeless element was stored");
            model.delete(homeless_key);
          end else begin
            check(status == ST_OK, "insert status");
            n_ok_ins++;
          end
          if (new_alpha != 0) n_adapt++;
          if (readapted != 0) n_readapt++;
          if (kicks != 0) n_kick++;
          if (grp.size() == 1 && kicks == 0) check(cyc == 4, "insert latency 4");
        end
      end else if (r < 9) begin
        // delete a stored key
        keys.delete();
        foreach (model[q]) keys.push_back(q);
        k = keys[$urandom % keys.size()];
        do_op(OP_DELETE, k, '0, cyc);
        check(status == ST_OK, "delete of stored key");
        check(cyc == 3, "delete latency 3");
        model.delete(k);
        n_del++;
      end else begin
        // delete of a key whose buckets hold no cell with its fingerprint
        bit clean;
        do begin
          k = KEY_W'($urandom);
          rh(k, e_p1, e_p2, e_f, e_av);
          clean = !model.exists(k);
          for (int c = 0; c < CELLS; c++) begin
            if (cell_at(0, e_p1, c).valid && cell_at(0, e_p1, c).f == F_W'(e_f)) clean = 0;
            if (cell_at(1, e_p2, c).valid && cell_at(1, e_p2, c).f == F_W'(e_f)) clean = 0;
          end
        end while (!clean);
        do_op(OP_DELETE, k, '0, cyc);
        check(status == ST_NOT_FOUND, "delete of absent key");
        n_miss++;
      end
      check_all();
    end
    $display("inserts ok=%0d adapted=%0d readapted=%0d refused=%0d displaced=%0d full=%0d deletes=%0d misses=%0d",
             n_ok_ins, n_adapt, n_readapt, n_coll, n_kick, n_full, n_del, n_miss);
    check(n_adapt > 0 && n_readapt > 0 && n_coll > 0 && n_kick > 0 && n_full > 0 && n_miss > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
