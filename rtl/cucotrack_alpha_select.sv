// cucotrack_alpha_select: chooses the hash selector of every element of a
// colliding group.
//
// A group is the set of elements stored in (or being inserted into) the
// same pair of buckets with the same fixed fingerprint; only they can be
// confused by a query. Member m gives avec[m], its adaptive value under
// each of the 2^ALPHA_W selectors. Under selector s, member m is usable if
// its value differs from the value of every other valid member under the
// same s: a query for any other member w computes h_s(w) when it reaches
// m's cell, so h_s(w) != h_s(m) is exactly what keeps it from matching.
// Each member's choice is therefore independent of the others', as in the
// paper's worked example and its failure model: the group fails only if
// some member has no usable selector.
//
// Selection rule (this design's own): keep the member's current selector
// if keep[m] and it is still usable (no rewrite needed), otherwise take the
// lowest usable selector. ok[m] is 0 if member m has none; all_ok is the
// AND over valid members. Purely combinational.
module cucotrack_alpha_select #(
  parameter int A_W     = 3,
  parameter int ALPHA_W = 5,
  parameter int M       = 9,
  localparam int AV_W   = A_W << ALPHA_W,
  localparam int NS     = 1 << ALPHA_W
) (
  input  logic [M-1:0]              member,
  input  logic [M-1:0][AV_W-1:0]    avec,
  input  logic [M-1:0][ALPHA_W-1:0] cur_alpha,
  input  logic [M-1:0]              keep,
  output logic [M-1:0][ALPHA_W-1:0] sel_alpha,
  output logic [M-1:0][A_W-1:0]     sel_a,
  output logic [M-1:0]              ok,
  output logic                      all_ok
);
  logic [M-1:0][NS-1:0] usable;

  always_comb begin
    for (int m = 0; m < M; m++)
      for (int s = 0; s < NS; s++) begin
        usable[m][s] = 1'b1;
        for (int w = 0; w < M; w++)
          if (w != m && member[w] && avec[w][s*A_W +: A_W] == avec[m][s*A_W +: A_W])
            usable[m][s] = 1'b0;
      end
  end

  always_comb begin
    all_ok = 1'b1;
    for (int m = 0; m < M; m++) begin
      ok[m]        = 1'b0;
      sel_alpha[m] = '0;
      for (int s = NS - 1; s >= 0; s--)
        if (usable[m][s]) begin
          ok[m]        = 1'b1;
          sel_alpha[m] = ALPHA_W'(s);
        end
      if (keep[m] && usable[m][cur_alpha[m]]) sel_alpha[m] = cur_alpha[m];
      sel_a[m] = avec[m][sel_alpha[m]*A_W +: A_W];
      if (member[m] && !ok[m]) all_ok = 1'b0;
    end
  end
endmodule
