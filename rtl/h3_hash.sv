// h3_hash: one H3 hash function, OUT_W bits from an IN_W-bit input.
//
// Output = XOR of the matrix rows Q[i] for every set input bit i. The
// matrix is fixed at elaboration from SEED (see cucotrack_pkg::h3_word),
// so in hardware this is a tree of XOR gates with no state. Purely
// combinational; the choice of H3 is this design's own.
module h3_hash #(
  parameter int          IN_W  = 104,
  parameter int          OUT_W = 19,
  parameter logic [63:0] SEED  = 64'h1
) (
  input  logic [IN_W-1:0]  din,
  output logic [OUT_W-1:0] dout
);
  import cucotrack_pkg::*;

  typedef logic [IN_W-1:0][OUT_W-1:0] matrix_t;

  function automatic matrix_t gen_matrix();
    matrix_t     m;
    logic [63:0] w;
    for (int i = 0; i < IN_W; i++) begin
      for (int j = 0; j < OUT_W; j++) begin
        if (j % 64 == 0) w = h3_word(SEED, i, j / 64);
        m[i][j] = w[j % 64];
      end
    end
    return m;
  endfunction

  localparam matrix_t Q = gen_matrix();

  always_comb begin
    dout = '0;
    for (int i = 0; i < IN_W; i++)
      if (din[i]) dout ^= Q[i];
  end
endmodule
