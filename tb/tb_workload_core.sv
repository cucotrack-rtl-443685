// tb_workload_core: occupancy-and-replacement workload on the CuCoTrack
// engine, shared by the tb_workload_* testbenches.
//
// The tables are filled with random 104-bit 5-tuples to OCC_PCT percent of
// their cells, then N_REPL replacements are made, each deleting a random
// stored connection and inserting a new one. This is the experiment used to
// judge the fingerprint splits, at a smaller table size. Counted: inserts
// refused because their collision could not be removed, during filling and
// during replacements, and displacement-chain failures. Printed beside
// them: the expected counts from the Poisson estimates of the analysis
// (N for the filling, F per replacement insert).
// Checked: every refused insert is really unsolvable (some member of its
// group has no selector under which its value is unique, computed with the
// reference hashes); the target occupancy is reached; at the end every
// stored connection is looked up and must return its own value on a single
// cell.
module tb_workload_core #(
  parameter int IDX_W   = 9,
  parameter int F_W     = 8,
  parameter int A_W     = 3,
  parameter int ALPHA_W = 5,
  parameter int OCC_PCT = 95,
  parameter int N_REPL  = 20000
) (
  output int checks,
  output int failures,
  output bit finished
);
  import cucotrack_pkg::*;
  import tb_ref_pkg::*;

  localparam int KEY_W = 104, VAL_W = 16, CELLS = 4;
  localparam int NC = 2 * CELLS, NS = 1 << ALPHA_W, AV_W = A_W << ALPHA_W;
  localparam int NCELLS = 2 * CELLS * (1 << IDX_W);
  localparam int TARGET = NCELLS * OCC_PCT / 100;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  op_e req_op = OP_LOOKUP;
  logic [KEY_W-1:0] req_key = '0;
  logic [VAL_W-1:0] req_value = '0;
  logic resp_valid, resp_multi;
  op_e resp_op;
  status_e resp_status;
  logic [VAL_W-1:0] resp_value, resp_homeless_value;
  logic [ALPHA_W-1:0] resp_alpha;
  logic [$clog2(NC+1)-1:0] resp_readapted;
  logic [8:0] resp_kicks;
  logic [KEY_W-1:0] resp_homeless_key;

  cucotrack #(.IDX_W(IDX_W), .F_W(F_W), .A_W(A_W), .ALPHA_W(ALPHA_W)) dut (.*);

  always #5 clk = ~clk;

  // stored set: key -> value, key -> (p1, f) group tag, adaptive values
  logic [VAL_W-1:0] val_of [logic [KEY_W-1:0]];
  int               tag_of [logic [KEY_W-1:0]];
  logic [AV_W-1:0]  av_of  [logic [KEY_W-1:0]];
  logic [KEY_W-1:0] list [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [KEY_W-1:0] new_key();
    logic [KEY_W-1:0] k;
    do begin
      for (int w = 0; w < 4; w++) k[w*32 +: 32] = $urandom;
      k[KEY_W-1:96] = 8'd6;
    end while (val_of.exists(k));
    return k;
  endfunction

  function automatic void hashes(input logic [KEY_W-1:0] k, output int tag, output logic [AV_W-1:0] av);
    logic [255:0] h1, hf;
    h1  = ref_h3(256'(k), KEY_W, R_SEED_H1, IDX_W);
    hf  = ref_h3(256'(k), KEY_W, R_SEED_HF, F_W);
    av  = AV_W'(ref_h3(256'(k), KEY_W, R_SEED_HA, AV_W));
    tag = int'(h1[IDX_W-1:0]) * (1 << F_W) + int'(hf[F_W-1:0]);
  endfunction

  function automatic bit unsolvable(input logic [AV_W-1:0] av [$]);
    bit any, u;
    foreach (av[m]) begin
      any = 0;
      for (int s = 0; s < NS; s++) begin
        u = 1;
        foreach (av[w]) if (w != m && av[w][s*A_W +: A_W] == av[m][s*A_W +: A_W]) u = 0;
        if (u) any = 1;
      end
      if (!any) return 1;
    end
    return 0;
  endfunction

  task automatic forget(input logic [KEY_W-1:0] k);
    val_of.delete(k); tag_of.delete(k); av_of.delete(k);
    foreach (list[i]) if (list[i] == k) begin list.delete(i); break; end
  endtask

  task automatic request(input op_e o, input logic [KEY_W-1:0] k, input logic [VAL_W-1:0] v);
    @(negedge clk);
    req_valid = 1; req_op = o; req_key = k; req_value = v;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
  endtask

  // Insert a fresh key; returns 1 on a refused (non-removable) collision.
  int n_full = 0;  // displacement chains that gave up
  task automatic insert_one(output bit refused);
    logic [KEY_W-1:0] k;
    logic [VAL_W-1:0] v;
    logic [AV_W-1:0] av, grp [$];
    int tag;
    k = new_key();
    v = VAL_W'($urandom);
    hashes(k, tag, av);
    foreach (list[i]) if (tag_of[list[i]] == tag) grp.push_back(av_of[list[i]]);
    grp.push_back(av);
    request(OP_INSERT, k, v);
    refused = resp_status == ST_COLLISION;
    if (refused) check(unsolvable(grp), "refused insert is unsolvable");
    else begin
      check(!unsolvable(grp), "solvable insert accepted");
      val_of[k] = v; tag_of[k] = tag; av_of[k] = av; list.push_back(k);
      if (resp_status == ST_FULL) begin
        n_full++;
        forget(resp_homeless_key);
      end
    end
  endtask

  // Poisson estimates of the analysis (o = occupancy, c = 4).
  function automatic real pf(input int i);
    real q = 1.0 - (1.0 - (1.0 / real'(1 << A_W))) ** (i - 1);
    if (i == 2) return 2.0 ** (-(A_W * (1 << ALPHA_W)));
    return real'(i) * (q ** real'(1 << ALPHA_W));
  endfunction
  function automatic real poisson(input real lam, input int i);
    real fact = 1.0;
    for (int j = 2; j <= i; j++) fact *= real'(j);
    return (lam ** i) / fact * $exp(-lam);
  endfunction

  initial begin
    bit refused;
    automatic int n_ref_fill = 0, n_ref_repl = 0, n_look = 0;
    int n_filled, n_full_fill;
    real lam, est_n, est_f;
    checks = 0; failures = 0; finished = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!req_ready) @(negedge clk);
    // fill
    for (int n = 0; n < 2 * TARGET && list.size() < TARGET; n++) begin
      insert_one(refused);
      if (refused) n_ref_fill++;
    end
    check(list.size() >= TARGET, "target occupancy reached");
    n_filled    = list.size();
    n_full_fill = n_full;
    // replacements
    for (int r = 0; r < N_REPL; r++) begin
      int i;
      logic [KEY_W-1:0] k;
      i = $urandom % list.size();
      k = list[i];
      request(OP_DELETE, k, '0);
      check(resp_status == ST_OK, "delete of stored connection");
      forget(k);
      insert_one(refused);
      if (refused) n_ref_repl++;
    end
    // every stored connection must still be found
    foreach (list[i]) begin
      request(OP_LOOKUP, list[i], '0);
      check(resp_status == ST_OK && resp_value == val_of[list[i]] && !resp_multi,
            "lookup of stored connection");
      n_look++;
    end
    lam   = 2.0 * (real'(OCC_PCT) / 100.0) * real'(CELLS) / real'(1 << F_W);
    est_n = 0.0;
    for (int i = 2; i <= 8; i++) est_n += poisson(lam, i) * pf(i);
    est_n *= real'(1 << IDX_W) * real'(1 << F_W);
    est_f = 0.0;
    for (int i = 1; i <= 7; i++) est_f += poisson(lam, i) * pf(i + 1);
    $display("f=%0d a=%0d alpha=%0d, %0d cells: filled to %0d, refused while filling %0d (estimate N %.3g), chain failures while filling %0d",
             F_W, A_W, ALPHA_W, NCELLS, n_filled, n_ref_fill, est_n, n_full_fill);
    $display("  %0d replacements: refused %0d (estimate %.3g), chain failures %0d, %0d stored at the end, all looked up",
             N_REPL, n_ref_repl, est_f * N_REPL, n_full - n_full_fill, n_look);
    finished = 1;
  end
endmodule
