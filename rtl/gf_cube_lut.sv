// gf_cube_lut - root LUT {k}_C for C(X) = X^3 + k, i.e. the cube roots of k.
//
// When 3 divides 2^M - 1 (M even) every non-zero cube has three distinct cube
// roots r1 < r2 < r3 (they differ by the cube roots of unity and sum to zero)
// and valid is 1. For odd M cubing is a bijection, so only one root exists:
// valid is 0, but cbrt still returns that single cube root. For k = 0 the
// only root is 0 (valid = 0, cbrt = 0). The 2^M-entry ROM is built at
// elaboration time by cubing every field element. Combinational.
//
// Follows the published {}_C table (three outputs, three roots only when 3
// divides 2^m - 1). Computing the entries at elaboration is this design's own.
module gf_cube_lut #(
  parameter int M = 8
) (
  input  logic [M-1:0] k,
  output logic [M-1:0] r1,
  output logic [M-1:0] r2,
  output logic [M-1:0] r3,
  output logic         valid,
  output logic [M-1:0] cbrt
);
`include "gf_func.svh"

  localparam int W = 3*M + 1;

  function automatic logic [(2**M)*W-1:0] build_cube();
    logic [(2**M)*W-1:0] t;
    logic [M-1:0]        xe;
    logic [M-1:0]        kk;
    int                  cnt [2**M];
    t = '0;
    for (int i = 0; i < 2**M; i++) cnt[i] = 0;
    for (int i = 0; i < 2**M; i++) begin
      xe = M'(i);
      kk = gf_mult(gf_sq(xe), xe);
      if (cnt[int'(kk)] < 3) t[int'(kk)*W + cnt[int'(kk)]*M +: M] = xe;
      cnt[int'(kk)] = cnt[int'(kk)] + 1;
    end
    for (int i = 0; i < 2**M; i++) t[i*W + 3*M] = (cnt[i] == 3);
    return t;
  endfunction

  localparam logic [(2**M)*W-1:0] ROM = build_cube();

  logic [W-1:0] entry;
  always_comb begin
    entry = ROM[k*W +: W];
    r1    = entry[0   +: M];
    r2    = entry[M   +: M];
    r3    = entry[2*M +: M];
    valid = entry[3*M];
    cbrt  = entry[0 +: M];
  end

endmodule
