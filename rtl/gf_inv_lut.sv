// gf_inv_lut - GF(2^M) inversion by lookup table.
//
// y = a^-1 for a != 0 and y = 0 for a = 0. Every non-zero element has exactly
// one inverse, so the inverse is read from a 2^M-entry ROM indexed by a. The
// ROM contents are computed at elaboration time from the power table:
// (alpha^k)^-1 = alpha^((2^M-1-k) mod (2^M-1)). Purely combinational.
// Division elsewhere in the design is this LUT followed by a gf_mult.
//
// Follows the published inversion by lookup table; the entry for 0 and
// computing the table at elaboration are this design's own.
module gf_inv_lut #(
  parameter int M = 8
) (
  input  logic [M-1:0] a,
  output logic [M-1:0] y
);
`include "gf_func.svh"

  localparam int NB = 2**M - 1;

  function automatic logic [(2**M)*M-1:0] build_inv();
    logic [(2**M)*M-1:0] t;
    logic [NB*M-1:0]     pw;
    logic [M-1:0]        el;
    t  = '0;
    pw = gf_alpha_table();
    for (int k = 0; k < NB; k++) begin
      el = pw[k*M +: M];
      t[int'(el)*M +: M] = pw[((NB - k) % NB)*M +: M];
    end
    return t;
  endfunction

  localparam logic [(2**M)*M-1:0] ROM = build_inv();

  always_comb y = ROM[a*M +: M];

endmodule
