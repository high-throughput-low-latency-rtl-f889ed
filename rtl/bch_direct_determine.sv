// bch_direct_determine - "determine errors" stage of the direct decoder.
//
// Decides from the syndromes and the precomputed terms how many errors the
// word holds, following the error-distribution tables of the direct method:
//   T=1: S1 = 0 -> none, else one.
//   T=2: S1 = S3 = 0 -> none; S1 != 0, d = 0 -> one; S1 != 0, d != 0 -> two;
//        S1 = 0, S3 != 0 -> failure.
//   T=3: all zero -> none; d = e = 0 -> one; d = 0, e != 0 -> failure;
//        delta = 0 -> two; e != 0 -> three (cubic X^3+X+k);
//        e = 0 -> three (X^3+k) if 3 divides 2^M-1, else failure.
//   T=4: all zero -> none; d = e = g = 0 -> one;
//        delta = 0, S1 != 0, c2 = 0 -> two;
//        (c3 = 0, d != 0, S1 != 0) or (c3z = 0, S1 = 0) -> three
//        (cubic form chosen as for T=3); otherwise four.
// Rows are tested in the order listed. Combinational.
//
// Follows the published error-count tables for t = 2, 3 and 4, with one
// correction: the t = 4 two-error test uses S1 S7 where the table prints S1^7
// (only S1 S7 holds for two-error patterns). The t = 1 rule is this design's
// own.
module bch_direct_determine
  import bch_pkg::*;
#(
  parameter int M = 8,
  parameter int T = 4
) (
  input  logic [M-1:0] s1,
  input  logic [M-1:0] s3,
  input  logic [M-1:0] s5,
  input  logic [M-1:0] s7,
  input  logic [M-1:0] d,
  input  logic [M-1:0] e,
  input  logic [M-1:0] g,
  input  logic [M-1:0] delta,
  input  logic [M-1:0] c2,
  input  logic [M-1:0] c3,
  input  logic [M-1:0] c3z,
  output err_class_e   cls
);

  // X^3 + k has three roots only when 3 divides 2^M - 1, i.e. M even.
  localparam bit CUBE3 = ((2**M - 1) % 3) == 0;

  always_comb begin
    err_class_e three;
    logic z1, z3, z5, z7;
    z1 = (s1 == '0);
    z3 = (s3 == '0);
    z5 = (s5 == '0);
    z7 = (s7 == '0);
    three = (e != '0) ? EC_THREE_B : (CUBE3 ? EC_THREE_C : EC_FAIL);
    cls = EC_FAIL;
    if (T <= 1) begin
      cls = z1 ? EC_ZERO : EC_ONE;
    end else if (T == 2) begin
      if (z1 && z3)       cls = EC_ZERO;
      else if (z1)        cls = EC_FAIL;
      else if (d == '0)   cls = EC_ONE;
      else                cls = EC_TWO;
    end else if (T == 3) begin
      if (z1 && z3 && z5)             cls = EC_ZERO;
      else if (d == '0 && e == '0)    cls = EC_ONE;
      else if (d == '0)               cls = EC_FAIL;
      else if (delta == '0)           cls = EC_TWO;
      else                            cls = three;
    end else begin
      if (z1 && z3 && z5 && z7)                      cls = EC_ZERO;
      else if (d == '0 && e == '0 && g == '0)        cls = EC_ONE;
      else if (delta == '0 && !z1 && c2 == '0)       cls = EC_TWO;
      else if ((c3 == '0 && d != '0 && !z1) || (c3z == '0 && z1)) cls = three;
      else                                           cls = EC_FOUR;
    end
  end

endmodule
