// cucotrack_match: compares the two candidate buckets of an element x.
//
// Cells are numbered 0..2*CELLS-1: cells 0..CELLS-1 are bucket p1 of
// table 1, the rest bucket p2 of table 2. For every cell:
//   group[k] = valid and f == f_x            (same fixed fingerprint)
//   hit[k]   = group[k] and a == h_alpha(x)  with alpha the cell's own
//              selector, i.e. avec slice alpha
//   free[k]  = not valid
// hit_any/hit_cell/hit_value report the lowest hit; multi flags more than
// one hit, which the adaptation rules out for stored elements. The match
// rule (fixed fingerprint and adaptive value under the stored selector)
// follows the paper; cell numbering and priority are this design's own.
// Purely combinational.
`include "cucotrack_cell.svh"
module cucotrack_match #(
  parameter int F_W     = 8,
  parameter int A_W     = 3,
  parameter int ALPHA_W = 5,
  parameter int VAL_W   = 16,
  parameter int CELLS   = 4,
  localparam int CELL_W = 1 + F_W + ALPHA_W + A_W + VAL_W,
  localparam int AV_W   = A_W << ALPHA_W,
  localparam int NC     = 2 * CELLS
) (
  input  logic [CELLS*CELL_W-1:0] bkt1,
  input  logic [CELLS*CELL_W-1:0] bkt2,
  input  logic [F_W-1:0]          f,
  input  logic [AV_W-1:0]         avec,
  output logic [NC-1:0]           hit,
  output logic [NC-1:0]           group,
  output logic [NC-1:0]           free,
  output logic                    hit_any,
  output logic                    multi,
  output logic [$clog2(NC)-1:0]   hit_cell,
  output logic [VAL_W-1:0]        hit_value
);
  `CUCO_CELL_T

  cell_t cells [NC];

  always_comb begin
    for (int c = 0; c < CELLS; c++) begin
      cells[c]         = cell_t'(bkt1[c*CELL_W +: CELL_W]);
      cells[CELLS + c] = cell_t'(bkt2[c*CELL_W +: CELL_W]);
    end
    hit_any   = 1'b0;
    multi     = 1'b0;
    hit_cell  = '0;
    hit_value = '0;
    for (int k = 0; k < NC; k++) begin
      group[k] = cells[k].valid && (cells[k].f == f);
      hit[k]   = group[k] && (cells[k].a == avec[cells[k].alpha*A_W +: A_W]);
      free[k]  = !cells[k].valid;
      if (hit[k]) begin
        if (hit_any) multi = 1'b1;
        else begin
          hit_cell  = ($clog2(NC))'(k);
          hit_value = cells[k].v;
        end
        hit_any = 1'b1;
      end
    end
  end
endmodule
