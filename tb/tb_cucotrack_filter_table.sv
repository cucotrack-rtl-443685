// tb_cucotrack_filter_table: random reads and per-cell masked writes on a
// 16-bucket fingerprint table, compared with a model array. Checks the
// one-cycle read latency and that a masked write leaves other cells alone.
module tb_cucotrack_filter_table;
  localparam int IDX_W = 4, CELLS = 4, CELL_W = 33;
  localparam int NB = 1 << IDX_W;

  logic clk = 0;
  logic rd_en, wr_en;
  logic [IDX_W-1:0] rd_idx, wr_idx;
  logic [CELLS-1:0] wr_mask;
  logic [CELLS*CELL_W-1:0] rd_bkt, wr_bkt;
  logic [CELLS*CELL_W-1:0] model [NB];
  int checks = 0, failures = 0;

  cucotrack_filter_table #(.IDX_W(IDX_W), .CELLS(CELLS), .CELL_W(CELL_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [CELLS*CELL_W-1:0] rnd_bkt();
    logic [CELLS*CELL_W-1:0] b;
    for (int i = 0; i < CELLS*CELL_W; i += 32) b[i +: 32] = $urandom;
    return b;
  endfunction

  initial begin
    logic [CELLS*CELL_W-1:0] exp_q;
    rd_en = 0; wr_en = 0; rd_idx = 0; wr_idx = 0; wr_mask = 0; wr_bkt = 0;
    // fill every bucket
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = IDX_W'(b); wr_mask = '1; wr_bkt = rnd_bkt();
      model[b] = wr_bkt;
    end
    @(negedge clk); wr_en = 0;
    // random mix of reads and masked writes to other buckets
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      rd_en  = 1; rd_idx = IDX_W'($urandom);
      exp_q  = model[rd_idx];
      wr_en  = 1'($urandom % 2); wr_idx = IDX_W'($urandom); wr_mask = CELLS'($urandom);
      if (wr_idx == rd_idx) wr_idx = wr_idx + 1'b1;
      wr_bkt = rnd_bkt();
      if (wr_en)
        for (int c = 0; c < CELLS; c++)
          if (wr_mask[c]) model[wr_idx][c*CELL_W +: CELL_W] = wr_bkt[c*CELL_W +: CELL_W];
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_bkt !== exp_q) begin
        failures++;
        $display("FAIL read bucket %0d", rd_idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
