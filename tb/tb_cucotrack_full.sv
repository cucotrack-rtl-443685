// tb_cucotrack_full: the engine at its default size (two tables of 512K
// buckets of 4 cells, 104-bit IPv4 5-tuple keys, f = 8, a = 3, alpha = 5,
// 16-bit values), with no parameter overridden.
//
// Waits for the INIT sweep (one cycle per bucket), inserts N_KEYS random
// connections, looks every one of them up in back-to-back bursts, deletes
// half of them, and looks the rest up again. Checks every lookup of a
// stored connection hits with its value on a single cell, 3 cycles after
// acceptance, every insert succeeds (the tables are nearly empty) and
// every delete of a stored connection succeeds.
module tb_cucotrack_full;
  import cucotrack_pkg::*;

  localparam int KEY_W = 104, VAL_W = 16, N_KEYS = 4000, NBKT = 1 << 19;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  op_e req_op = OP_LOOKUP;
  logic [KEY_W-1:0] req_key = '0;
  logic [VAL_W-1:0] req_value = '0;
  logic resp_valid, resp_multi;
  op_e resp_op;
  status_e resp_status;
  logic [VAL_W-1:0] resp_value, resp_homeless_value;
  logic [4:0] resp_alpha;
  logic [3:0] resp_readapted;
  logic [8:0] resp_kicks;
  logic [KEY_W-1:0] resp_homeless_key;

  cucotrack dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  logic [KEY_W-1:0] keys [N_KEYS];
  logic [VAL_W-1:0] vals [N_KEYS];
  bit live [N_KEYS];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (NBKT + 400 * N_KEYS) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic update(input op_e o, input logic [KEY_W-1:0] k, input logic [VAL_W-1:0] v);
    @(negedge clk);
    req_valid = 1; req_op = o; req_key = k; req_value = v;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    check(resp_op == o && resp_status == ST_OK, o == OP_INSERT ? "insert" : "delete");
  endtask

  // Look up every live key, one request per cycle.
  task automatic lookup_all();
    int idx [$];
    longint acc [$];
    int got = 0;
    for (int i = 0; i < N_KEYS; i++) if (live[i]) idx.push_back(i);
    fork
      begin
        @(negedge clk);
        foreach (idx[j]) begin
          req_valid = 1; req_op = OP_LOOKUP; req_key = keys[idx[j]];
          while (!req_ready) @(negedge clk);
          acc.push_back(cycle);
          @(negedge clk);
        end
        req_valid = 0;
      end
      begin
        while (got < idx.size()) begin
          @(negedge clk);
          if (resp_valid) begin
            check(resp_status == ST_OK && resp_value == vals[idx[got]] && !resp_multi,
                  "lookup of stored connection");
            check(cycle - acc[got] == 3, "lookup latency");
            got++;
          end
        end
      end
    join
  endtask

  initial begin
    longint t0;
    for (int i = 0; i < N_KEYS; i++) begin
      for (int w = 0; w < 4; w++) keys[i][w*32 +: 32] = $urandom;  // 5-tuple bits
      keys[i][KEY_W-1:96] = 8'(6 + 11 * ($urandom % 2));              // protocol TCP/UDP
      vals[i] = VAL_W'($urandom);
      live[i] = 1;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!req_ready) @(negedge clk);
    check(cycle >= longint'(NBKT), "INIT sweep covers every bucket");
    $display("tables cleared after %0d cycles", cycle);
    for (int i = 0; i < N_KEYS; i++) update(OP_INSERT, keys[i], vals[i]);
    t0 = cycle;
    lookup_all();
    $display("%0d lookups in %0d cycles", N_KEYS, cycle - t0);
    check(cycle - t0 <= longint'(N_KEYS) + 10, "one lookup per cycle");
    for (int i = 0; i < N_KEYS; i += 2) begin
      update(OP_DELETE, keys[i], '0);
      live[i] = 0;
    end
    lookup_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
