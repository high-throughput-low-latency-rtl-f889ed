// gf_cubic_lut - root LUT {k}_B for the cubic B(X) = X^3 + X + k.
//
// Returns the three roots r1 < r2 < r3 (as unsigned vectors) when X^3 + X + k
// has three distinct roots in GF(2^M); valid is 0 otherwise (one root, no
// root or a repeated root), because the decoder can only use fully split
// cubics. The roots always satisfy r1 + r2 + r3 = 0 (no X^2 term). The
// 2^M-entry ROM is built at elaboration time by running X over the field and
// collecting, for each k = X^3 + X, the X that produce it. Combinational.
//
// Follows the published {}_B table. Valid only for three distinct roots, and
// ascending order, are this design's own.
module gf_cubic_lut #(
  parameter int M = 8
) (
  input  logic [M-1:0] k,
  output logic [M-1:0] r1,
  output logic [M-1:0] r2,
  output logic [M-1:0] r3,
  output logic         valid
);
`include "gf_func.svh"

  localparam int W = 3*M + 1;

  function automatic logic [(2**M)*W-1:0] build_cubic();
    logic [(2**M)*W-1:0] t;
    logic [M-1:0]        xe;
    logic [M-1:0]        kk;
    int                  cnt [2**M];
    t = '0;
    for (int i = 0; i < 2**M; i++) cnt[i] = 0;
    for (int i = 0; i < 2**M; i++) begin
      xe = M'(i);
      kk = gf_mult(gf_sq(xe), xe) ^ xe;
      if (cnt[int'(kk)] < 3) t[int'(kk)*W + cnt[int'(kk)]*M +: M] = xe;
      cnt[int'(kk)] = cnt[int'(kk)] + 1;
    end
    for (int i = 0; i < 2**M; i++) t[i*W + 3*M] = (cnt[i] == 3);
    return t;
  endfunction

  localparam logic [(2**M)*W-1:0] ROM = build_cubic();

  logic [W-1:0] entry;
  always_comb begin
    entry = ROM[k*W +: W];
    r1    = entry[0   +: M];
    r2    = entry[M   +: M];
    r3    = entry[2*M +: M];
    valid = entry[3*M];
  end

endmodule
