// cucotrack_hash: all hashes CuCoTrack needs for one element x.
//
//   p1   = h1(x)                 bucket in table 1
//   f    = hf(x)                 fixed fingerprint
//   p2   = h1(x) xor h2(f)       bucket in table 2
//   avec = {h_alpha(x)}          adaptive value for every selector alpha;
//                                 slice [alpha*A_W +: A_W] is h_alpha(x)
//
// The two bucket positions depend only on x and f, never on the selector,
// so adaptation cannot move an element (this follows the paper). Because
// p2 is p1 xor h2(f), either bucket is found from the other and f alone,
// which is what cuckoo displacement uses. The adaptive family is one wide
// H3 hash cut into 2^ALPHA_W slices, an independent function per selector;
// the hash type is this design's own choice. Purely combinational.
module cucotrack_hash #(
  parameter int KEY_W   = 104,
  parameter int IDX_W   = 19,
  parameter int F_W     = 8,
  parameter int A_W     = 3,
  parameter int ALPHA_W = 5,
  localparam int AV_W   = A_W << ALPHA_W
) (
  input  logic [KEY_W-1:0] key,
  output logic [IDX_W-1:0] p1,
  output logic [IDX_W-1:0] p2,
  output logic [F_W-1:0]   f,
  output logic [AV_W-1:0]  avec
);
  import cucotrack_pkg::*;

  logic [IDX_W-1:0] h2f;

  h3_hash #(.IN_W(KEY_W), .OUT_W(IDX_W), .SEED(SEED_H1)) u_h1 (.din(key), .dout(p1));
  h3_hash #(.IN_W(KEY_W), .OUT_W(F_W),   .SEED(SEED_HF)) u_hf (.din(key), .dout(f));
  h3_hash #(.IN_W(F_W),   .OUT_W(IDX_W), .SEED(SEED_H2)) u_h2 (.din(f),   .dout(h2f));
  h3_hash #(.IN_W(KEY_W), .OUT_W(AV_W),  .SEED(SEED_HA)) u_ha (.din(key), .dout(avec));

  assign p2 = p1 ^ h2f;
endmodule
