// tb_ref_pkg: reference model of the CuCoTrack hash functions for the
// testbenches, written independently of the RTL.
//
// Each hash is H3: output bit j is the parity of (key AND column j of a
// matrix). Row i, bits 64w..64w+63, of the matrix are the SplitMix64 output
// of seed + i*0x9E3779B97F4A7C15 + w*0xD1B54A32D192ED03. The seeds are those
// of the design: h1, hf, h2 (on the fixed fingerprint) and the adaptive
// family (one wide hash, slice alpha is h_alpha).
package tb_ref_pkg;

  localparam logic [63:0] R_SEED_H1 = 64'h243F6A8885A308D3;
  localparam logic [63:0] R_SEED_HF = 64'h13198A2E03707344;
  localparam logic [63:0] R_SEED_H2 = 64'hA4093822299F31D0;
  localparam logic [63:0] R_SEED_HA = 64'h082EFA98EC4E6C89;

  function automatic logic [63:0] ref_mix(input logic [63:0] x);
    logic [63:0] z;
    z = x;
    z = z ^ (z >> 30);
    z = z * 64'hBF58476D1CE4E5B9;
    z = z ^ (z >> 27);
    z = z * 64'h94D049BB133111EB;
    z = z ^ (z >> 31);
    return z;
  endfunction

  // H3 hash of the low in_w bits of key, out_w (<= 256) bits of result.
  function automatic logic [255:0] ref_h3(input logic [255:0] key, input int in_w,
                                          input logic [63:0] seed, input int out_w);
    logic [255:0] r;
    logic [63:0]  row;
    r = '0;
    for (int j = 0; j < out_w; j++) begin
      logic bitv;
      bitv = 1'b0;
      for (int i = 0; i < in_w; i++) begin
        row  = ref_mix(seed + 64'(i) * 64'h9E3779B97F4A7C15 + 64'(j / 64) * 64'hD1B54A32D192ED03);
        bitv = bitv ^ (key[i] & row[j % 64]);
      end
      r[j] = bitv;
    end
    return r;
  endfunction

  // Random key of w bits.
  function automatic logic [255:0] rand_key(input int w);
    logic [255:0] k;
    for (int i = 0; i < 8; i++) k[i*32 +: 32] = $urandom;
    return w >= 256 ? k : k & ((256'd1 << w) - 1);
  endfunction

endpackage
