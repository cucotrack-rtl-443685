// cucotrack_filter_table: one of the two CuCoTrack fingerprint tables.
//
// 2^IDX_W buckets of CELLS cells; a cell is CELL_W bits holding
// {valid, f, alpha, a, v} (layout in cucotrack_cell.svh). A whole bucket is
// read in one access, so a query costs one access per table. The bucket
// organisation (four cells of fingerprints plus value) follows the paper;
// the valid bit and the port arrangement are this design's own.
//
// Ports: a synchronous read port (rd_bkt valid the cycle after rd_en) and a
// write port with one enable per cell (wr_mask). Read and write are
// independent (simple dual-port RAM); a read of a bucket being written in
// the same cycle returns the old contents. The array has no reset: the
// controller clears every bucket after reset.
module cucotrack_filter_table #(
  parameter int IDX_W  = 19,
  parameter int CELLS  = 4,
  parameter int CELL_W = 33
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [IDX_W-1:0]        rd_idx,
  output logic [CELLS*CELL_W-1:0] rd_bkt,
  input  logic                    wr_en,
  input  logic [IDX_W-1:0]        wr_idx,
  input  logic [CELLS-1:0]        wr_mask,
  input  logic [CELLS*CELL_W-1:0] wr_bkt
);
  logic [CELLS-1:0][CELL_W-1:0] mem [2**IDX_W];

  always_ff @(posedge clk) begin
    if (rd_en) rd_bkt <= mem[rd_idx];
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < CELLS; c++)
        if (wr_mask[c]) mem[wr_idx][c] <= wr_bkt[c*CELL_W +: CELL_W];
  end
endmodule
