// cucotrack: CuCoTrack connection-tracking engine (top level).
//
// Stores a set of connections (5-tuple keys, KEY_W bits) with a VAL_W-bit
// value each, but keeps on chip only a short fingerprint per connection:
// a fixed part f (F_W bits) that, with the key, fixes the connection's two
// candidate buckets, and an adaptive part (selector alpha, ALPHA_W bits,
// and value a = h_alpha(key), A_W bits). Selectors are chosen at insertion
// so that no stored connection can be mistaken for another one in the same
// buckets; a lookup of a stored connection therefore always returns its own
// value after reading one bucket in each of the two tables.
//
// Blocks: cucotrack_hash (front end), two cucotrack_filter_table instances
// (table 1 at p1, table 2 at p2), two cucotrack_full_table instances (full
// keys, used only by updates), cucotrack_match (lookup compare) and
// cucotrack_ctrl (insert/delete/initialisation).
//
// Interface: requests on req_* with a valid/ready handshake; one response
// per request on resp_*, in request order. resp_status is ST_OK on a
// lookup hit, a successful insert or delete, ST_NOT_FOUND when nothing
// matched, ST_COLLISION when an insert is refused because no selector
// separates it from the elements it collides with, ST_FULL when the
// displacement chain gave up (resp_homeless_* is the element left out).
//
// Timing: after reset req_ready stays low for 2^IDX_W cycles while the
// tables are cleared. Lookups are accepted every cycle; a lookup accepted
// in cycle 0 is hashed and reads both buckets in cycle 1, is compared in
// cycle 2 and has resp_valid in cycle 3. An insert or delete accepted in
// cycle 0 starts the controller in cycle 2 and is answered in cycle 3 + T,
// T being the controller time (delete 3, simple insert 4, see
// cucotrack_ctrl). req_ready is low from the cycle after an update is
// accepted until the cycle its controller finishes, so a later request
// waits (stall) and always sees the update's effect.
// The two-table layout, fingerprints and two-access lookup follow the
// paper; the pipeline, the handshake and the in-order stall are this
// design's own.
module cucotrack
  import cucotrack_pkg::*;
#(
  parameter int KEY_W     = 104,
  parameter int VAL_W     = 16,
  parameter int IDX_W     = 19,
  parameter int F_W       = 8,
  parameter int A_W       = 3,
  parameter int ALPHA_W   = 5,
  parameter int CELLS     = 4,
  parameter int MAX_KICKS = 500,
  localparam int CELL_W   = 1 + F_W + ALPHA_W + A_W + VAL_W,
  localparam int AV_W     = A_W << ALPHA_W,
  localparam int NC       = 2 * CELLS,
  localparam int KC_W     = $clog2(MAX_KICKS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // requests
  input  logic                    req_valid,
  output logic                    req_ready,
  input  op_e                     req_op,
  input  logic [KEY_W-1:0]        req_key,
  input  logic [VAL_W-1:0]        req_value,
  // responses
  output logic                    resp_valid,
  output op_e                     resp_op,
  output status_e                 resp_status,
  output logic [VAL_W-1:0]        resp_value,
  output logic                    resp_multi,
  output logic [ALPHA_W-1:0]      resp_alpha,
  output logic [$clog2(NC+1)-1:0] resp_readapted,
  output logic [KC_W-1:0]         resp_kicks,
  output logic [KEY_W-1:0]        resp_homeless_key,
  output logic [VAL_W-1:0]        resp_homeless_value
);
  // ------------------------------------------------------------ stage 1
  logic             s1_v;
  op_e              s1_op;
  logic [KEY_W-1:0] s1_key;
  logic [VAL_W-1:0] s1_val;

  logic [IDX_W-1:0] h_p1, h_p2;
  logic [F_W-1:0]   h_f;
  logic [AV_W-1:0]  h_avec;

  cucotrack_hash #(.KEY_W(KEY_W), .IDX_W(IDX_W), .F_W(F_W), .A_W(A_W), .ALPHA_W(ALPHA_W)) u_hash (
    .key(s1_key), .p1(h_p1), .p2(h_p2), .f(h_f), .avec(h_avec)
  );

  // ------------------------------------------------------------ stage 2
  logic             s2_v;
  op_e              s2_op;
  logic [KEY_W-1:0] s2_key;
  logic [VAL_W-1:0] s2_val;
  logic [IDX_W-1:0] s2_p1, s2_p2;
  logic [F_W-1:0]   s2_f;
  logic [AV_W-1:0]  s2_avec;

  // ------------------------------------------------------------ control
  logic                          c_busy, c_done;
  status_e                       c_status;
  logic [ALPHA_W-1:0]            c_alpha;
  logic [$clog2(NC+1)-1:0]       c_readapted;
  logic [KC_W-1:0]               c_kicks;
  logic [KEY_W-1:0]              c_hl_key;
  logic [VAL_W-1:0]              c_hl_val;
  logic [1:0]                    c_rd_en, c_wr_en, c_wr_key_en;
  logic [1:0][IDX_W-1:0]         c_rd_idx, c_wr_idx;
  logic [1:0][CELLS-1:0]         c_wr_mask;
  logic [1:0][CELLS*CELL_W-1:0]  c_wr_bkt, rd_bkt;
  logic [1:0][CELLS*KEY_W-1:0]   c_wr_keys, rd_keys;

  logic s1_upd, s2_upd, accept, c_start;
  assign s1_upd    = s1_v && s1_op != OP_LOOKUP;
  assign s2_upd    = s2_v && s2_op != OP_LOOKUP;
  assign req_ready = !c_busy && !s1_upd && !s2_upd;
  assign accept    = req_valid && req_ready;
  assign c_start   = s2_upd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v    <= 1'b0;
      s1_op   <= OP_LOOKUP;
      s1_key  <= '0;
      s1_val  <= '0;
      s2_v    <= 1'b0;
      s2_op   <= OP_LOOKUP;
      s2_key  <= '0;
      s2_val  <= '0;
      s2_p1   <= '0;
      s2_p2   <= '0;
      s2_f    <= '0;
      s2_avec <= '0;
    end else begin
      s1_v <= accept;
      if (accept) begin
        s1_op  <= req_op;
        s1_key <= req_key;
        s1_val <= req_value;
      end
      s2_v <= s1_v;
      if (s1_v) begin
        s2_op   <= s1_op;
        s2_key  <= s1_key;
        s2_val  <= s1_val;
        s2_p1   <= h_p1;
        s2_p2   <= h_p2;
        s2_f    <= h_f;
        s2_avec <= h_avec;
      end
    end
  end

  // -------------------------------------------------------------- tables
  // The lookup stage reads the fingerprint tables when the controller does
  // not; the two never overlap because updates stall new requests.
  logic                  lk_rd;
  logic [1:0]            t_rd_en;
  logic [1:0][IDX_W-1:0] t_rd_idx;
  assign lk_rd    = s1_v && s1_op == OP_LOOKUP;
  assign t_rd_en  = c_rd_en | {2{lk_rd}};
  assign t_rd_idx = (c_rd_en != '0) ? c_rd_idx : {h_p2, h_p1};

  for (genvar t = 0; t < 2; t++) begin : g_tbl
    cucotrack_filter_table #(.IDX_W(IDX_W), .CELLS(CELLS), .CELL_W(CELL_W)) u_filter (
      .clk, .rd_en(t_rd_en[t]), .rd_idx(t_rd_idx[t]), .rd_bkt(rd_bkt[t]),
      .wr_en(c_wr_en[t]), .wr_idx(c_wr_idx[t]), .wr_mask(c_wr_mask[t]), .wr_bkt(c_wr_bkt[t])
    );
    cucotrack_full_table #(.KEY_W(KEY_W), .IDX_W(IDX_W), .CELLS(CELLS)) u_full (
      .clk, .rd_en(c_rd_en[t]), .rd_idx(c_rd_idx[t]), .rd_keys(rd_keys[t]),
      .wr_en(c_wr_key_en[t]), .wr_idx(c_wr_idx[t]), .wr_mask(c_wr_mask[t]), .wr_keys(c_wr_keys[t])
    );
  end

  // ----------------------------------------------------------- controller
  cucotrack_ctrl #(
    .KEY_W(KEY_W), .VAL_W(VAL_W), .IDX_W(IDX_W), .F_W(F_W), .A_W(A_W),
    .ALPHA_W(ALPHA_W), .CELLS(CELLS), .MAX_KICKS(MAX_KICKS)
  ) u_ctrl (
    .clk, .rst_n,
    .start(c_start), .op(s2_op), .key(s2_key), .value(s2_val),
    .p1(s2_p1), .p2(s2_p2), .f(s2_f), .avec(s2_avec),
    .busy(c_busy), .done(c_done), .status(c_status), .new_alpha(c_alpha),
    .readapted(c_readapted), .kicks(c_kicks),
    .homeless_key(c_hl_key), .homeless_value(c_hl_val),
    .rd_en(c_rd_en), .rd_idx(c_rd_idx), .rd_bkt(rd_bkt), .rd_keys(rd_keys),
    .wr_en(c_wr_en), .wr_key_en(c_wr_key_en), .wr_idx(c_wr_idx), .wr_mask(c_wr_mask),
    .wr_bkt(c_wr_bkt), .wr_keys(c_wr_keys)
  );

  // --------------------------------------------------------- lookup compare
  logic [NC-1:0]           lk_hit, lk_group, lk_free;
  logic                    lk_any, lk_multi;
  logic [$clog2(NC)-1:0]   lk_cell;
  logic [VAL_W-1:0]        lk_value;

  cucotrack_match #(.F_W(F_W), .A_W(A_W), .ALPHA_W(ALPHA_W), .VAL_W(VAL_W), .CELLS(CELLS)) u_match (
    .bkt1(rd_bkt[0]), .bkt2(rd_bkt[1]), .f(s2_f), .avec(s2_avec),
    .hit(lk_hit), .group(lk_group), .free(lk_free), .hit_any(lk_any), .multi(lk_multi),
    .hit_cell(lk_cell), .hit_value(lk_value)
  );

  // ------------------------------------------------------------ response
  logic s2_lk;
  assign s2_lk = s2_v && s2_op == OP_LOOKUP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid          <= 1'b0;
      resp_op             <= OP_LOOKUP;
      resp_status         <= ST_OK;
      resp_value          <= '0;
      resp_multi          <= 1'b0;
      resp_alpha          <= '0;
      resp_readapted      <= '0;
      resp_kicks          <= '0;
      resp_homeless_key   <= '0;
      resp_homeless_value <= '0;
    end else begin
      resp_valid <= s2_lk || c_done;
      if (s2_lk) begin
        resp_op             <= OP_LOOKUP;
        resp_status         <= lk_any ? ST_OK : ST_NOT_FOUND;
        resp_value          <= lk_value;
        resp_multi          <= lk_multi;
        resp_alpha          <= '0;
        resp_readapted      <= '0;
        resp_kicks          <= '0;
        resp_homeless_key   <= '0;
        resp_homeless_value <= '0;
      end else if (c_done) begin
        resp_op             <= s2_op;
        resp_status         <= c_status;
        resp_value          <= '0;
        resp_multi          <= 1'b0;
        resp_alpha          <= c_alpha;
        resp_readapted      <= c_readapted;
        resp_kicks          <= c_kicks;
        resp_homeless_key   <= c_hl_key;
        resp_homeless_value <= c_hl_val;
      end
    end
  end

  // A lookup result and a controller result never fall in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(s2_lk && c_done))
    else $error("lookup and update responses collide");
  // The controller is idle whenever an update reaches it.
  assert property (@(posedge clk) disable iff (!rst_n) c_start |-> !c_busy)
    else $error("update issued to a busy controller");
endmodule
