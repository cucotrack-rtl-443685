// Layout of one CuCoTrack cell, shared by every module that reads cells.
// Field order follows the cell drawing: fixed fingerprint f, selector
// alpha, adaptive value a, associated value v; a valid bit is prepended.
`ifndef CUCOTRACK_CELL_SVH
`define CUCOTRACK_CELL_SVH
`define CUCO_CELL_T \
  typedef struct packed { \
    logic                 valid; \
    logic [F_W-1:0]       f; \
    logic [ALPHA_W-1:0]   alpha; \
    logic [A_W-1:0]       a; \
    logic [VAL_W-1:0]     v; \
  } cell_t;
`endif
