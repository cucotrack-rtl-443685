// cucotrack_pkg: constants, operation and status encodings, and the
// generator for the hash-function constants shared by the CuCoTrack
// connection tracker.
//
// All hash functions of the design (h1, hf, h2 and the adaptive family
// h_alpha) are H3 hashes: every output bit is the XOR of the key bits
// selected by a fixed random matrix. The matrix rows are derived from a
// seed with the SplitMix64 mixer, so the tables are computed at elaboration
// time and no table file is needed. The choice of H3 and of the seeds is
// this design's own; the structure only requires independent hashes.
package cucotrack_pkg;

  // Request operations.
  typedef enum logic [1:0] {
    OP_LOOKUP = 2'd0,
    OP_INSERT = 2'd1,
    OP_DELETE = 2'd2
  } op_e;

  // Response status.
  typedef enum logic [1:0] {
    ST_OK        = 2'd0,  // lookup hit, insert placed, delete removed
    ST_NOT_FOUND = 2'd1,  // lookup or delete found no matching cell
    ST_COLLISION = 2'd2,  // insert refused: collision no selector removes
    ST_FULL      = 2'd3   // insert ran out of displacements; one element homeless
  } status_e;

  // Seeds of the independent hash functions.
  localparam logic [63:0] SEED_H1 = 64'h243F_6A88_85A3_08D3;
  localparam logic [63:0] SEED_HF = 64'h1319_8A2E_0370_7344;
  localparam logic [63:0] SEED_H2 = 64'hA409_3822_299F_31D0;
  localparam logic [63:0] SEED_HA = 64'h082E_FA98_EC4E_6C89;

  // SplitMix64 output function.
  function automatic logic [63:0] mix64(input logic [63:0] z);
    logic [63:0] t;
    t = (z ^ (z >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    t = (t ^ (t >> 27)) * 64'h94D0_49BB_1331_11EB;
    return t ^ (t >> 31);
  endfunction

  // 64 pseudo-random bits of row i, word w of the H3 matrix with this seed.
  function automatic logic [63:0] h3_word(input logic [63:0] seed, input int i, input int w);
    return mix64(seed + 64'(i) * 64'h9E37_79B9_7F4A_7C15 + 64'(w) * 64'hD1B5_4A32_D192_ED03);
  endfunction

endpackage
