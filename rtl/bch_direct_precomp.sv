// bch_direct_precomp - precomputation stage of the direct decoder.
//
// From the odd syndromes S1, S3, S5, S7 (higher ones tied to zero when T < 4)
// it forms the power sums and combinations that the error-count decision and
// the root formulas share:
//   d  = S1^3 + S3           e  = S1^5 + S5            g = S1^7 + S7
//   delta = S3 d + S1 e       (zero for at most two errors)
//   c2 = S1 S7 + S1^2 S3^2 + S5 d  (zero when S7 fits two errors; the
//        printed table has S1^7 for S1 S7, which two-error words do not satisfy)
//   c3 = (S1 S7 + S1^2 S3^2 + S3 e) d + S5 d^2 + S1 e^2   (zero for three errors)
//   c3z = S3 S7 + S5^2        (three-error test when S1 = 0)
// Powers are unrolled multiplications; everything is combinational, the
// decoder places its pipeline register after this block.
//
// The published design names this block only; the set of terms is whatever the
// published error conditions and root formulas share. c2 uses S1 S7 in place
// of the printed S1^7.
module bch_direct_precomp #(
  parameter int M = 8
) (
  input  logic [M-1:0] s1,
  input  logic [M-1:0] s3,
  input  logic [M-1:0] s5,
  input  logic [M-1:0] s7,
  output logic [M-1:0] s1_2,
  output logic [M-1:0] d,
  output logic [M-1:0] e,
  output logic [M-1:0] g,
  output logic [M-1:0] delta,
  output logic [M-1:0] c2,
  output logic [M-1:0] c3,
  output logic [M-1:0] c3z
);
`include "gf_func.svh"

  always_comb begin
    logic [M-1:0] p3, p5, p7, s3_2, s12s32;
    s1_2   = gf_sq(s1);
    p3     = gf_mult(s1_2, s1);
    p5     = gf_mult(p3, s1_2);
    p7     = gf_mult(p5, s1_2);
    s3_2   = gf_sq(s3);
    s12s32 = gf_mult(s1_2, s3_2);
    d      = p3 ^ s3;
    e      = p5 ^ s5;
    g      = p7 ^ s7;
    delta  = gf_mult(s3, d) ^ gf_mult(s1, e);
    c2     = gf_mult(s1, s7) ^ s12s32 ^ gf_mult(s5, d);
    c3     = gf_mult(gf_mult(s1, s7) ^ s12s32 ^ gf_mult(s3, e), d)
           ^ gf_mult(s5, gf_sq(d)) ^ gf_mult(s1, gf_sq(e));
    c3z    = gf_mult(s3, s7) ^ gf_sq(s5);
  end

endmodule
