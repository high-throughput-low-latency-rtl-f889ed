// bch_direct_k1k2 - reduce the four-error locator polynomial to a depressed
// quartic (k1 and k2 of the block diagram). Two pipeline stages.
//
// Stage 1 normalises by L4 and forms the quantities of the reciprocal
// substitution X = 1/Y + x0, x0 = (L1/L3)^(1/2):
//   q1 = L3/L4, q2 = L2/L4 + (L1 L3)^(1/2)/L4,
//   q4 = L0/L4 + L1 L2/(L3 L4) + (L1/L3)^2,
// and selects the case:
//   L3 = 0, L2 = 0  (QC_DIRECT)   : X = Z,              k1 = L1/L4,  k2 = L0/L4
//   L3 = 0, L2 != 0 (QC_SCALE)    : X = s Z, s = (L2/L4)^(1/2),
//                                   k1 = L1 L4^(1/2) / L2^(3/2),  k2 = L0 L4 / L2^2
//   L3 != 0, q2 = 0 (QC_INV)      : X = 1/Z + x0,       k1 = q1/q4,  k2 = 1/q4
//   L3 != 0, q2 != 0 (QC_INV_SCALE): X = w/Z + x0, w = (q4/q2)^(1/2),
//                                   k1 = q1 (q4/q2^3)^(1/2),  k2 = q4/q2^2
// Stage 2 computes k1, k2 and the scale factor (s or w, 1 otherwise).
// QC_SCALE and QC_INV_SCALE give Z^4 + Z^2 + k1 Z + k2, the other two
// Z^4 + k1 Z + k2. L4 = 0, or q4 = 0 in the reciprocal cases (x0 itself a
// root), gives fail = 1. Divisions are inversion LUTs and multiplications,
// square roots are the square-root LUT. Latency 2 cycles, data registers
// only (no reset).
//
// Follows the published table of four substitutions. Differences: q1 = L3/L4
// (the text prints L3/L1, which does not match the substitution), L2 = 0 with
// L3 != 0 goes to the reciprocal cases, and q4 = 0 (x0 would be a double root)
// is flagged as a failure. The two-stage split is this design's own.
module bch_direct_k1k2
  import bch_pkg::*;
#(
  parameter int M = 8
) (
  input  logic          clk,
  input  logic [M-1:0]  lam [0:4],
  output logic [M-1:0]  k1,
  output logic [M-1:0]  k2,
  output quartic_case_e qcase,
  output logic [M-1:0]  scale,
  output logic [M-1:0]  x0,
  output logic          fail
);
`include "gf_func.svh"

  // ---------------- stage 1 ----------------
  logic [M-1:0] inv_l4, inv_l3, r, x0_c;
  logic [M-1:0] a0, a1, a2, q1, q2, q4;
  quartic_case_e case_c;

  gf_inv_lut  #(.M(M)) u_inv_l4 (.a(lam[4]), .y(inv_l4));
  gf_inv_lut  #(.M(M)) u_inv_l3 (.a(lam[3]), .y(inv_l3));
  gf_sqrt_lut #(.M(M)) u_sqrt_r (.a(r),      .y(x0_c));

  always_comb begin
    a0 = gf_mult(lam[0], inv_l4);
    a1 = gf_mult(lam[1], inv_l4);
    a2 = gf_mult(lam[2], inv_l4);
    q1 = gf_mult(lam[3], inv_l4);
    r  = gf_mult(lam[1], inv_l3);
    q2 = a2 ^ gf_mult(gf_mult(lam[3], x0_c), inv_l4);
    q4 = a0 ^ gf_mult(r, a2) ^ gf_sq(r);
    if (lam[3] == '0) case_c = (lam[2] == '0) ? QC_DIRECT : QC_SCALE;
    else              case_c = (q2 == '0)     ? QC_INV    : QC_INV_SCALE;
  end

  quartic_case_e case_q;
  logic [M-1:0]  a0_q, a1_q, a2_q, q1_q, q2_q, q4_q, x0_q;
  logic          fail_q;

  always_ff @(posedge clk) begin
    case_q <= case_c;
    a0_q   <= a0;
    a1_q   <= a1;
    a2_q   <= a2;
    q1_q   <= q1;
    q2_q   <= q2;
    q4_q   <= q4;
    x0_q   <= x0_c;
    fail_q <= (lam[4] == '0);
  end

  // ---------------- stage 2 ----------------
  logic [M-1:0] s_sc, inv_s, inv_q4, inv_q2, w_in, w_sc;

  gf_sqrt_lut #(.M(M)) u_sqrt_a2 (.a(a2_q), .y(s_sc));
  gf_inv_lut  #(.M(M)) u_inv_s   (.a(s_sc), .y(inv_s));
  gf_inv_lut  #(.M(M)) u_inv_q4  (.a(q4_q), .y(inv_q4));
  gf_inv_lut  #(.M(M)) u_inv_q2  (.a(q2_q), .y(inv_q2));
  gf_sqrt_lut #(.M(M)) u_sqrt_w  (.a(w_in), .y(w_sc));

  logic [M-1:0] k1_c, k2_c, scale_c;
  logic         fail_c;

  always_comb begin
    w_in    = gf_mult(q4_q, inv_q2);
    k1_c    = a1_q;
    k2_c    = a0_q;
    scale_c = M'(1);
    fail_c  = fail_q;
    unique case (case_q)
      QC_DIRECT: ;
      QC_SCALE: begin
        k1_c    = gf_mult(a1_q, gf_pow(inv_s, 3));
        k2_c    = gf_mult(a0_q, gf_pow(inv_s, 4));
        scale_c = s_sc;
      end
      QC_INV: begin
        k1_c   = gf_mult(q1_q, inv_q4);
        k2_c   = inv_q4;
        fail_c = fail_q || (q4_q == '0);
      end
      default: begin  // QC_INV_SCALE
        k1_c    = gf_mult(gf_mult(q1_q, w_sc), inv_q2);
        k2_c    = gf_mult(q4_q, gf_sq(inv_q2));
        scale_c = w_sc;
        fail_c  = fail_q || (q4_q == '0);
      end
    endcase
  end

  always_ff @(posedge clk) begin
    k1    <= k1_c;
    k2    <= k2_c;
    qcase <= case_q;
    scale <= scale_c;
    x0    <= x0_q;
    fail  <= fail_c;
  end

endmodule
