// gf_sqrt_lut - GF(2^M) square root by lookup table.
//
// y = a^(1/2), the unique element with y*y = a (squaring is a bijection in
// GF(2^m)). For a = alpha^k the root is alpha^(k/2) for even k and
// alpha^((k+2^M-1)/2) for odd k; the 2^M-entry ROM is filled with these values
// at elaboration time. Purely combinational.
//
// Follows the published square root by lookup table, computed at elaboration
// here.
module gf_sqrt_lut #(
  parameter int M = 8
) (
  input  logic [M-1:0] a,
  output logic [M-1:0] y
);
`include "gf_func.svh"

  localparam int NB = 2**M - 1;

  function automatic logic [(2**M)*M-1:0] build_sqrt();
    logic [(2**M)*M-1:0] t;
    logic [NB*M-1:0]     pw;
    logic [M-1:0]        el;
    int                  h;
    t  = '0;
    pw = gf_alpha_table();
    for (int k = 0; k < NB; k++) begin
      el = pw[k*M +: M];
      h = (k % 2 == 0) ? k / 2 : (k + NB) / 2;
      t[int'(el)*M +: M] = pw[h*M +: M];
    end
    return t;
  endfunction

  localparam logic [(2**M)*M-1:0] ROM = build_sqrt();

  always_comb y = ROM[a*M +: M];

endmodule
