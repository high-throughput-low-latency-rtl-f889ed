// bch_direct_roots123 - closed-form roots for one, two and three errors.
//
// Part one (lookups):
//   one error  : Lambda(X) = 1 + S1 X, root S1^-1 (inversion LUT). This root is
//                in reciprocal form: the error is at position (n - log root) mod n,
//                signalled by recip = 1.
//   two errors : k = d / S1^3 with d = S1^3 + S3, Y1,Y2 = {k}_A.
//   three, C   : (S1^5 = S5) Y1..Y3 = {d}_C.
//   three, B   : a = e / d with e = S1^5 + S5, s = a^(1/2),
//                k = d / s^3 (= d^(5/2) e^(-3/2)), Z1..Z3 = {k}_B.
// Part two (back-substitution):
//   two        : X_i = S1 Y_i      three, C : X_i = Y_i + S1
//   three, B   : X_i = s Z_i + S1
// X are the error locators alpha^j (for one error, alpha^-j). A root LUT that
// has no full set of roots for its argument gives fail = 1. MID_REG = 1 puts a
// pipeline register between the two parts (one extra cycle of latency);
// MID_REG = 0 makes the module purely combinational.
//
// Follows the published closed forms. The three-error scale factor uses the
// exponent +1/2, which agrees with the published k = d^(5/2) e^(-3/2); the
// published substitution prints -1/2. The optional middle register is this
// design's own.
// With MID_REG = 0 the clk input is unused (lint reports it); it stays in
// the port list so that both variants have the same interface. nexp is at
// most 3, so its upper bits are constant zero.
module bch_direct_roots123
  import bch_pkg::*;
#(
  parameter int M       = 8,
  parameter bit MID_REG = 1'b0
) (
  input  logic         clk,
  input  err_class_e   cls,
  input  logic [M-1:0] s1,
  input  logic [M-1:0] d,
  input  logic [M-1:0] e,
  output logic [M-1:0] x     [1:3],
  output logic [7:0]   nexp,
  output logic         recip,
  output logic         fail
);
`include "gf_func.svh"

  // ---------------- part one: LUT lookups ----------------
  logic [M-1:0] inv_s1, inv_d, a, s, inv_s, k2, kb;
  logic [M-1:0] ya1, ya2, yc1, yc2, yc3, zb1, zb2, zb3, cbrt_unused;
  logic         va, vc, vb;

  gf_inv_lut  #(.M(M)) u_inv_s1 (.a(s1), .y(inv_s1));
  gf_inv_lut  #(.M(M)) u_inv_d  (.a(d),  .y(inv_d));
  gf_sqrt_lut #(.M(M)) u_sqrt_a (.a(a),  .y(s));
  gf_inv_lut  #(.M(M)) u_inv_s  (.a(s),  .y(inv_s));

  always_comb begin
    a  = gf_mult(e, inv_d);
    k2 = gf_mult(d, gf_pow(inv_s1, 3));
    kb = gf_mult(d, gf_pow(inv_s, 3));
  end

  gf_quad_lut  #(.M(M)) u_lut_a (.k(k2), .y1(ya1), .y2(ya2), .valid(va));
  gf_cube_lut  #(.M(M)) u_lut_c (.k(d),  .r1(yc1), .r2(yc2), .r3(yc3), .valid(vc), .cbrt(cbrt_unused));
  gf_cubic_lut #(.M(M)) u_lut_b (.k(kb), .r1(zb1), .r2(zb2), .r3(zb3), .valid(vb));

  // ---------------- optional pipeline register ----------------
  typedef struct packed {
    err_class_e   cls;
    logic [M-1:0] s1, inv_s1, s, ya1, ya2, yc1, yc2, yc3, zb1, zb2, zb3;
    logic         va, vc, vb;
  } mid_t;

  mid_t mid_c, mid;

  always_comb mid_c = '{cls: cls, s1: s1, inv_s1: inv_s1, s: s, ya1: ya1, ya2: ya2,
                        yc1: yc1, yc2: yc2, yc3: yc3, zb1: zb1, zb2: zb2, zb3: zb3,
                        va: va, vc: vc, vb: vb};

  if (MID_REG) begin : g_reg
    always_ff @(posedge clk) mid <= mid_c;
  end else begin : g_comb
    assign mid = mid_c;
  end

  // ---------------- part two: back-substitution ----------------
  logic [M-1:0] x2a, x2b, x3a, x3b, x3c;

  gf_mul #(.M(M)) u_m2a (.a(mid.s1), .b(mid.ya1), .p(x2a));
  gf_mul #(.M(M)) u_m2b (.a(mid.s1), .b(mid.ya2), .p(x2b));
  gf_mul #(.M(M)) u_m3a (.a(mid.s),  .b(mid.zb1), .p(x3a));
  gf_mul #(.M(M)) u_m3b (.a(mid.s),  .b(mid.zb2), .p(x3b));
  gf_mul #(.M(M)) u_m3c (.a(mid.s),  .b(mid.zb3), .p(x3c));

  always_comb begin
    x     = '{default: '0};
    nexp  = '0;
    recip = 1'b0;
    fail  = 1'b0;
    unique case (mid.cls)
      EC_ZERO: ;
      EC_ONE: begin
        x[1]  = mid.inv_s1;
        nexp  = 8'd1;
        recip = 1'b1;
      end
      EC_TWO: begin
        x[1] = x2a;
        x[2] = x2b;
        nexp = 8'd2;
        fail = !mid.va;
      end
      EC_THREE_C: begin
        x[1] = mid.yc1 ^ mid.s1;
        x[2] = mid.yc2 ^ mid.s1;
        x[3] = mid.yc3 ^ mid.s1;
        nexp = 8'd3;
        fail = !mid.vc;
      end
      EC_THREE_B: begin
        x[1] = x3a ^ mid.s1;
        x[2] = x3b ^ mid.s1;
        x[3] = x3c ^ mid.s1;
        nexp = 8'd3;
        fail = !mid.vb;
      end
      default: fail = 1'b1;
    endcase
  end

endmodule
