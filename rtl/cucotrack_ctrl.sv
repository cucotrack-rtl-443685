// cucotrack_ctrl: insert / delete sequencer of CuCoTrack.
//
// After reset it clears every bucket of both fingerprint tables (INIT, one
// bucket per cycle, 2^IDX_W cycles) and then accepts one operation at a
// time (start, with the element's hashes already computed):
//
// Delete: read the two candidate buckets, clear the cell that matches f_x
//   and h_alpha(x) under its stored selector (as in a cuckoo filter).
// Insert:
//   1. Read the two candidate buckets of x from both fingerprint and full
//      tables (one access per table).
//   2. The group is every stored cell with the same fixed fingerprint f_x;
//      only these can be confused with x. If it is empty, x takes selector 0.
//   3. Otherwise re-hash the full key of each of the 2*CELLS cells, one per
//      cycle, to get every member's adaptive values under every selector,
//      and let cucotrack_alpha_select choose a selector for x and for every
//      member. Members whose selector changes are rewritten (selector and
//      adaptive value only; they do not move). If some member has no
//      usable selector the insert is refused with ST_COLLISION and nothing
//      is changed.
//   4. Place x in the first free cell of bucket p1 (table 1), else of p2
//      (table 2). If both are full, displace a cell of p1 or p2, table and
//      cell chosen by an LFSR as in a standard cuckoo filter, and move the
//      victim to its other bucket, p xor h2(f_victim), in the
//      other table, carrying its full key and keeping its selector;
//      repeat up to MAX_KICKS times. If still homeless the insert ends
//      with ST_FULL and the homeless element is reported.
// The collision check, the adaptation through the full table and the
// displacement that leaves selectors untouched follow the paper. Steps
// and their cycle counts, the group re-hash order, victim choice, MAX_KICKS
// and the refusal/homeless reporting are this design's own choices.
//
// Timing (cycles from start to done): delete 3; insert with empty group and
// a free cell 4; a non-empty group adds 2*CELLS+1; each displacement adds 2.
// busy is high from INIT until done.
`include "cucotrack_cell.svh"
module cucotrack_ctrl
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
  input  logic                          clk,
  input  logic                          rst_n,
  // operation
  input  logic                          start,
  input  op_e                           op,
  input  logic [KEY_W-1:0]              key,
  input  logic [VAL_W-1:0]              value,
  input  logic [IDX_W-1:0]              p1,
  input  logic [IDX_W-1:0]              p2,
  input  logic [F_W-1:0]                f,
  input  logic [AV_W-1:0]               avec,
  output logic                          busy,
  output logic                          done,
  output status_e                       status,
  output logic [ALPHA_W-1:0]            new_alpha,
  output logic [$clog2(NC+1)-1:0]       readapted,
  output logic [KC_W-1:0]               kicks,
  output logic [KEY_W-1:0]              homeless_key,
  output logic [VAL_W-1:0]              homeless_value,
  // table ports, index 0 = table 1, index 1 = table 2
  output logic [1:0]                    rd_en,
  output logic [1:0][IDX_W-1:0]         rd_idx,
  input  logic [1:0][CELLS*CELL_W-1:0]  rd_bkt,
  input  logic [1:0][CELLS*KEY_W-1:0]   rd_keys,
  output logic [1:0]                    wr_en,
  output logic [1:0]                    wr_key_en,
  output logic [1:0][IDX_W-1:0]         wr_idx,
  output logic [1:0][CELLS-1:0]         wr_mask,
  output logic [1:0][CELLS*CELL_W-1:0]  wr_bkt,
  output logic [1:0][CELLS*KEY_W-1:0]   wr_keys
);
  `CUCO_CELL_T

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_EVAL, S_HASH, S_SEL, S_PLACE, S_KADDR, S_KREAD, S_DONE
  } state_e;

  localparam int CI_W = $clog2(CELLS);
  localparam int NI_W = $clog2(NC);

  state_e                        state;
  op_e                           op_q;
  logic [KEY_W-1:0]              key_q;
  logic [VAL_W-1:0]              val_q;
  logic [IDX_W-1:0]              p1_q, p2_q;
  logic [F_W-1:0]                f_q;
  logic [AV_W-1:0]               avec_q;
  logic [IDX_W-1:0]              init_idx;
  cell_t                         cell_q [NC];  // the two buckets, cell k
  logic [NC-1:0][KEY_W-1:0]      ckey_q;     // their full keys
  logic [NC-1:0]                 group_q;
  logic [NC-1:0][AV_W-1:0]       mavec_q;    // members' adaptive values
  logic [NI_W-1:0]               hk;         // member being re-hashed
  logic [ALPHA_W-1:0]            nalpha_q;
  logic [A_W-1:0]                na_q;
  cell_t                         vcell_q;    // displaced element
  logic [KEY_W-1:0]              vkey_q;
  logic                          vtbl_q;     // table it was displaced from
  logic [IDX_W-1:0]              vidx_q;
  logic                          ntbl_q;     // table being probed
  logic [IDX_W-1:0]              nidx_q;
  logic [15:0]                   lfsr;

  // ---------------------------------------------------------------- match
  logic [NC-1:0]            m_hit, m_group, m_free;
  logic                     m_hit_any, m_multi;
  logic [NI_W-1:0]          m_hit_cell;
  logic [VAL_W-1:0]         m_hit_value;

  cucotrack_match #(.F_W(F_W), .A_W(A_W), .ALPHA_W(ALPHA_W), .VAL_W(VAL_W), .CELLS(CELLS)) u_match (
    .bkt1(rd_bkt[0]), .bkt2(rd_bkt[1]), .f(f_q), .avec(avec_q),
    .hit(m_hit), .group(m_group), .free(m_free), .hit_any(m_hit_any), .multi(m_multi),
    .hit_cell(m_hit_cell), .hit_value(m_hit_value)
  );

  // ------------------------------------------------- member re-hashing
  logic [AV_W-1:0] h_avec;
  h3_hash #(.IN_W(KEY_W), .OUT_W(AV_W), .SEED(SEED_HA)) u_ha (.din(ckey_q[hk]), .dout(h_avec));

  // h2 of the displaced element's fixed fingerprint
  logic [IDX_W-1:0] v_h2;
  h3_hash #(.IN_W(F_W), .OUT_W(IDX_W), .SEED(SEED_H2)) u_h2 (.din(vcell_q.f), .dout(v_h2));

  // ---------------------------------------------------- alpha selection
  localparam int M = NC + 1;
  logic [M-1:0]              s_member, s_keep, s_ok;
  logic [M-1:0][AV_W-1:0]    s_avec;
  logic [M-1:0][ALPHA_W-1:0] s_cur, s_alpha;
  logic [M-1:0][A_W-1:0]     s_a;
  logic                      s_all_ok;

  always_comb begin
    for (int k = 0; k < NC; k++) begin
      s_member[k] = group_q[k];
      s_keep[k]   = 1'b1;
      s_avec[k]   = mavec_q[k];
      s_cur[k]    = cell_q[k].alpha;
    end
    s_member[NC] = 1'b1;
    s_keep[NC]   = 1'b0;
    s_avec[NC]   = avec_q;
    s_cur[NC]    = '0;
  end

  cucotrack_alpha_select #(.A_W(A_W), .ALPHA_W(ALPHA_W), .M(M)) u_sel (
    .member(s_member), .avec(s_avec), .cur_alpha(s_cur), .keep(s_keep),
    .sel_alpha(s_alpha), .sel_a(s_a), .ok(s_ok), .all_ok(s_all_ok)
  );

  // ------------------------------------------------------- helpers
  cell_t new_cell;
  assign new_cell = '{valid: 1'b1, f: f_q, alpha: nalpha_q, a: na_q, v: val_q};

  // free cells of the latched buckets and of the probed bucket
  logic [NC-1:0]    q_free;
  logic [CELLS-1:0] n_free;
  logic [CI_W-1:0]  n_free_cell, t1_free_cell, t2_free_cell;
  logic [CI_W-1:0]  rnd_cell;
  logic             rnd_tbl;
  logic [NC-1:0]    changed;

  always_comb begin
    for (int k = 0; k < NC; k++) begin
      q_free[k]  = !cell_q[k].valid;
      changed[k] = group_q[k] && (s_alpha[k] != cell_q[k].alpha);
    end
    for (int c = 0; c < CELLS; c++)
      n_free[c] = !rd_bkt[ntbl_q][c*CELL_W + CELL_W - 1];
    n_free_cell  = '0;
    t1_free_cell = '0;
    t2_free_cell = '0;
    for (int c = CELLS - 1; c >= 0; c--) begin
      if (n_free[c])          n_free_cell  = CI_W'(c);
      if (q_free[c])          t1_free_cell = CI_W'(c);
      if (q_free[CELLS + c])  t2_free_cell = CI_W'(c);
    end
    rnd_cell = CI_W'(lfsr % CELLS);
    rnd_tbl  = lfsr[8];
  end

  // --------------------------------------------------------- outputs
  assign busy = (state != S_IDLE);

  cell_t upd;

  always_comb begin
    upd       = '0;
    rd_en     = '0;
    rd_idx    = '0;
    wr_en     = '0;
    wr_key_en = '0;
    wr_idx    = '0;
    wr_mask   = '0;
    wr_bkt    = '0;
    wr_keys   = '0;
    unique case (state)
      S_INIT: begin
        wr_en  = 2'b11;
        wr_idx = {init_idx, init_idx};
        wr_mask = {2{{CELLS{1'b1}}}};
      end
      S_IDLE: if (start) begin
        rd_en  = 2'b11;
        rd_idx = {p2, p1};
      end
      S_EVAL: if (op_q == OP_DELETE && m_hit_any) begin
        // clear the matching cell; wr_bkt stays all-zero (valid = 0)
        wr_en[m_hit_cell[NI_W-1]]   = 1'b1;
        wr_idx                      = {p2_q, p1_q};
        wr_mask[m_hit_cell[NI_W-1]] = CELLS'(1) << m_hit_cell[CI_W-1:0];
      end
      S_SEL: if (s_all_ok) begin
        wr_idx = {p2_q, p1_q};
        for (int t = 0; t < 2; t++) begin
          wr_en[t] = |changed[t*CELLS +: CELLS];
          wr_mask[t] = changed[t*CELLS +: CELLS];
          for (int c = 0; c < CELLS; c++) begin
            upd       = cell_q[t*CELLS + c];
            upd.alpha = s_alpha[t*CELLS + c];
            upd.a     = s_a[t*CELLS + c];
            wr_bkt[t][c*CELL_W +: CELL_W] = upd;
          end
        end
      end
      S_PLACE: begin
        wr_idx  = {p2_q, p1_q};
        wr_bkt  = {2{{CELLS{new_cell}}}};
        wr_keys = {2{{CELLS{key_q}}}};
        if (|q_free[CELLS-1:0]) begin
          wr_en[0] = 1'b1; wr_key_en[0] = 1'b1;
          wr_mask[0] = CELLS'(1) << t1_free_cell;
        end else if (|q_free[NC-1:CELLS]) begin
          wr_en[1] = 1'b1; wr_key_en[1] = 1'b1;
          wr_mask[1] = CELLS'(1) << t2_free_cell;
        end else begin
          wr_en[rnd_tbl] = 1'b1; wr_key_en[rnd_tbl] = 1'b1;
          wr_mask[rnd_tbl] = CELLS'(1) << rnd_cell;
        end
      end
      S_KADDR: begin
        rd_en[!vtbl_q]  = 1'b1;
        rd_idx[!vtbl_q] = vidx_q ^ v_h2;
      end
      S_KREAD: begin
        if (|n_free || kicks < KC_W'(MAX_KICKS)) begin
          wr_en[ntbl_q]     = 1'b1;
          wr_key_en[ntbl_q] = 1'b1;
          wr_idx[ntbl_q]    = nidx_q;
          wr_mask[ntbl_q]   = CELLS'(1) << (|n_free ? n_free_cell : rnd_cell);
          wr_bkt[ntbl_q]    = {CELLS{vcell_q}};
          wr_keys[ntbl_q]   = {CELLS{vkey_q}};
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_INIT;
      init_idx       <= '0;
      done           <= 1'b0;
      status         <= ST_OK;
      lfsr           <= 16'hACE1;
      op_q           <= OP_LOOKUP;
      key_q          <= '0;
      val_q          <= '0;
      p1_q           <= '0;
      p2_q           <= '0;
      f_q            <= '0;
      avec_q         <= '0;
      for (int k = 0; k < NC; k++) cell_q[k] <= '0;
      ckey_q         <= '0;
      group_q        <= '0;
      mavec_q        <= '0;
      hk             <= '0;
      nalpha_q       <= '0;
      na_q           <= '0;
      vcell_q        <= '0;
      vkey_q         <= '0;
      vtbl_q         <= 1'b0;
      vidx_q         <= '0;
      ntbl_q         <= 1'b0;
      nidx_q         <= '0;
      new_alpha      <= '0;
      readapted      <= '0;
      kicks          <= '0;
      homeless_key   <= '0;
      homeless_value <= '0;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      done <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (&init_idx) state <= S_IDLE;
        end
        S_IDLE: if (start) begin
          op_q      <= op;
          key_q     <= key;
          val_q     <= value;
          p1_q      <= p1;
          p2_q      <= p2;
          f_q       <= f;
          avec_q    <= avec;
          readapted <= '0;
          kicks     <= '0;
          new_alpha <= '0;
          state     <= S_EVAL;
        end
        S_EVAL: begin
          for (int c = 0; c < CELLS; c++) begin
            cell_q[c]         <= rd_bkt[0][c*CELL_W +: CELL_W];
            cell_q[CELLS + c] <= rd_bkt[1][c*CELL_W +: CELL_W];
            ckey_q[c]         <= rd_keys[0][c*KEY_W +: KEY_W];
            ckey_q[CELLS + c] <= rd_keys[1][c*KEY_W +: KEY_W];
          end
          group_q <= m_group;
          if (op_q == OP_DELETE) begin
            status <= m_hit_any ? ST_OK : ST_NOT_FOUND;
            state  <= S_DONE;
          end else if (m_group == '0) begin
            nalpha_q <= '0;
            na_q     <= avec_q[A_W-1:0];
            state    <= S_PLACE;
          end else begin
            hk    <= '0;
            state <= S_HASH;
          end
        end
        S_HASH: begin
          mavec_q[hk] <= h_avec;
          hk          <= hk + 1'b1;
          if (hk == NI_W'(NC - 1)) state <= S_SEL;
        end
        S_SEL: begin
          if (!s_all_ok) begin
            status <= ST_COLLISION;
            state  <= S_DONE;
          end else begin
            for (int k = 0; k < NC; k++) begin
              cell_t u;
              u       = cell_q[k];
              u.alpha = s_alpha[k];
              u.a     = s_a[k];
              if (group_q[k]) cell_q[k] <= u;
            end
            readapted <= ($clog2(NC+1))'($countones(changed));
            nalpha_q  <= s_alpha[NC];
            na_q      <= s_a[NC];
            new_alpha <= s_alpha[NC];
            state     <= S_PLACE;
          end
        end
        S_PLACE: begin
          if (|q_free) begin
            status <= ST_OK;
            state  <= S_DONE;
          end else begin
            vcell_q <= cell_q[NI_W'(rnd_tbl) * NI_W'(CELLS) + NI_W'(rnd_cell)];
            vkey_q  <= ckey_q[NI_W'(rnd_tbl) * NI_W'(CELLS) + NI_W'(rnd_cell)];
            vtbl_q  <= rnd_tbl;
            vidx_q  <= rnd_tbl ? p2_q : p1_q;
            kicks   <= KC_W'(1);
            state   <= S_KADDR;
          end
        end
        S_KADDR: begin
          ntbl_q <= !vtbl_q;
          nidx_q <= vidx_q ^ v_h2;
          state  <= S_KREAD;
        end
        S_KREAD: begin
          if (|n_free) begin
            status <= ST_OK;
            state  <= S_DONE;
          end else if (kicks >= KC_W'(MAX_KICKS)) begin
            status         <= ST_FULL;
            homeless_key   <= vkey_q;
            homeless_value <= vcell_q.v;
            state          <= S_DONE;
          end else begin
            vcell_q <= cell_t'(rd_bkt[ntbl_q][rnd_cell*CELL_W +: CELL_W]);
            vkey_q  <= rd_keys[ntbl_q][rnd_cell*KEY_W +: KEY_W];
            vtbl_q  <= ntbl_q;
            vidx_q  <= nidx_q;
            kicks   <= kicks + 1'b1;
            state   <= S_KADDR;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The match of a stored element must be unique (checked on deletes).
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_EVAL && op_q == OP_DELETE) |-> !m_multi)
    else $error("delete matched more than one cell");
endmodule
