// bch_direct_elp4 - inversionless error locator polynomial for four errors.
//
// Lambda(X) = L4 X^4 + L3 X^3 + L2 X^2 + L1 X + L0 has the error locators
// alpha^j themselves as roots. The coefficients follow from Newton's
// identities for binary BCH codes solved without division (all coefficients
// of the monic polynomial multiplied by the determinant delta):
//   f  = S7 + S1 S3^2 + S1^7 + S1^4 S3
//   L4 = delta = S3 d + S1 e          L3 = S1 delta
//   L2 = (e + d S1^2) S3 + S1 f       L1 = d delta + S1 L2
//   L0 = d f + e (e + d S1^2)
// with d = S1^3 + S3 and e = S1^5 + S5 from the precomputation. L4 = 0 means
// the syndromes do not describe four errors (failure further on).
// Combinational.
//
// The published design cites an inversion-free four-error polynomial from
// earlier work without giving it; these coefficients are derived here from
// Newton's identities and verified against random four-error patterns.
// Lambda4 is Delta itself, so lam[4] is a copy of the delta input; the
// output is kept so that the polynomial is complete in one array.
module bch_direct_elp4 #(
  parameter int M = 8
) (
  input  logic [M-1:0] s1,
  input  logic [M-1:0] s3,
  input  logic [M-1:0] s7,
  input  logic [M-1:0] s1_2,
  input  logic [M-1:0] d,
  input  logic [M-1:0] e,
  input  logic [M-1:0] delta,
  output logic [M-1:0] lam [0:4]
);
`include "gf_func.svh"

  always_comb begin
    logic [M-1:0] f, ed, s1_4;
    s1_4   = gf_sq(s1_2);
    f      = s7 ^ gf_mult(s1, gf_sq(s3)) ^ gf_mult(gf_mult(s1_4, s1_2), s1) ^ gf_mult(s1_4, s3);
    ed     = e ^ gf_mult(d, s1_2);
    lam[4] = delta;
    lam[3] = gf_mult(s1, delta);
    lam[2] = gf_mult(ed, s3) ^ gf_mult(s1, f);
    lam[1] = gf_mult(d, delta) ^ gf_mult(s1, lam[2]);
    lam[0] = gf_mult(d, f) ^ gf_mult(e, ed);
  end

endmodule
