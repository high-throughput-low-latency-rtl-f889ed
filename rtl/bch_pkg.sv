// bch_pkg - types shared by the eBCH decoder modules.
//
// err_class_e is the decision of the direct decoder's "determine errors"
// stage (how many errors the syndromes indicate and, for three errors, which
// cubic form the locator polynomial reduces to). quartic_case_e selects one of
// the four substitutions that turn a degree-4 locator polynomial into a
// depressed quartic (rows of the four-case table: Lambda2/Lambda3/q2 zero or
// not). QF_* tell which depressed form the quartic solver receives.
//
// The classes and cases are those of the published decoding tables; the
// encodings are this design's own.
package bch_pkg;

  typedef enum logic [2:0] {
    EC_ZERO    = 3'd0,  // no error
    EC_ONE     = 3'd1,  // one error
    EC_TWO     = 3'd2,  // two errors
    EC_THREE_B = 3'd3,  // three errors, reduces to X^3 + X + k
    EC_THREE_C = 3'd4,  // three errors, reduces to X^3 + k
    EC_FOUR    = 3'd5,  // four errors (t = 4 only)
    EC_FAIL    = 3'd6   // more errors than the code corrects: detected failure
  } err_class_e;

  typedef enum logic [1:0] {
    QC_DIRECT    = 2'd0,  // Lambda2 = Lambda3 = 0: X = Z, Z^4 + k1 Z + k2
    QC_SCALE     = 2'd1,  // Lambda3 = 0, Lambda2 != 0: X = Z (L2/L4)^(1/2)
    QC_INV       = 2'd2,  // Lambda3 != 0, q2 = 0: X = 1/Z + (L1/L3)^(1/2)
    QC_INV_SCALE = 2'd3   // Lambda3 != 0, q2 != 0: X = (q4/q2)^(1/2)/Z + (L1/L3)^(1/2)
  } quartic_case_e;

  // The two depressed quartic forms: with a Z^2 term (roots via {}_B) or without ({}_C).
  function automatic logic quartic_has_z2(input quartic_case_e c);
    return (c == QC_SCALE) || (c == QC_INV_SCALE);
  endfunction

endpackage
