// cucotrack_full_table: full-key store mirroring one fingerprint table.
//
// Same geometry as cucotrack_filter_table, but each cell holds the complete
// KEY_W-bit key of the element whose fingerprint sits in the same table,
// bucket and cell. The paper keeps these copies, possibly in a larger and
// slower external memory, so that an element's selector can be changed
// (its adaptive value recomputed from the key) and so that a displaced
// element can be moved. Only the insert/delete controller uses it; queries
// never do. Here it is an on-chip array with the same one-cycle read as the
// fingerprint table (this design's simplification). No reset: a cell is
// only read where the fingerprint table marks it valid.
module cucotrack_full_table #(
  parameter int KEY_W = 104,
  parameter int IDX_W = 19,
  parameter int CELLS = 4
) (
  input  logic                   clk,
  input  logic                   rd_en,
  input  logic [IDX_W-1:0]       rd_idx,
  output logic [CELLS*KEY_W-1:0] rd_keys,
  input  logic                   wr_en,
  input  logic [IDX_W-1:0]       wr_idx,
  input  logic [CELLS-1:0]       wr_mask,
  input  logic [CELLS*KEY_W-1:0] wr_keys
);
  logic [CELLS-1:0][KEY_W-1:0] mem [2**IDX_W];

  always_ff @(posedge clk) begin
    if (rd_en) rd_keys <= mem[rd_idx];
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < CELLS; c++)
        if (wr_mask[c]) mem[wr_idx][c] <= wr_keys[c*KEY_W +: KEY_W];
  end
endmodule
