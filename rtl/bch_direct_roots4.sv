// bch_direct_roots4 - roots of the depressed quartic and back-substitution to
// the four error locators X1..X4.
//
// Stage 1 (registered): the resolvent cubic gives the sums of root pairs.
//   Z^4 + Z^2 + k1 Z + k2: b1, b2 = {k1}_B (roots of b^3 + b + k1),
//                          T = {k2 / (1 + b1^4)}_A
//   Z^4 + k1 Z + k2      : c1, c2 = {k1}_C (cube roots of k1),
//                          T = {k2 / c1^4}_A
// Stage 2 (registered):
//   Z1 = b1 {(1 + b1^-2) T}_A   or   Z1 = c1 {T}_A,
//   Z2 = Z1 + b1 (c1), Z3 = Z1 + b2 (c2), Z4 = Z1 + Z2 + Z3.
// Stage 3 (combinational output): X = Z, X = s Z, X = 1/Z + x0 or
// X = w/Z + x0 according to the case chosen by bch_direct_k1k2 (scale holds
// s or w). fail = 1 when a LUT has no full set of roots for its argument or an
// earlier stage failed. Latency 2 cycles to the combinational outputs, data
// registers only.
//
// Follows the published root formulas for both quartic forms. One datapath
// serves all four cases, selected by qcase, where a block diagram would show
// four parallel branches; the stage split is this design's own.
module bch_direct_roots4
  import bch_pkg::*;
#(
  parameter int M = 8
) (
  input  logic          clk,
  input  logic [M-1:0]  k1,
  input  logic [M-1:0]  k2,
  input  quartic_case_e qcase,
  input  logic [M-1:0]  scale,
  input  logic [M-1:0]  x0,
  input  logic          fail_in,
  output logic [M-1:0]  x [1:4],
  output logic          fail
);
`include "gf_func.svh"

  // ---------------- stage 1: resolvent cubic and first quadratic ----------------
  logic [M-1:0] b1, b2, b3_unused, c1, c2, c3_unused, cbrt_unused;
  logic         vb, vc;
  logic         with_z2;
  logic [M-1:0] r1, r2, denom, inv_den, u, t1, t1_unused;
  logic         vt;

  gf_cubic_lut #(.M(M)) u_lut_b (.k(k1), .r1(b1), .r2(b2), .r3(b3_unused), .valid(vb));
  gf_cube_lut  #(.M(M)) u_lut_c (.k(k1), .r1(c1), .r2(c2), .r3(c3_unused), .valid(vc),
                                 .cbrt(cbrt_unused));
  gf_inv_lut   #(.M(M)) u_inv_d (.a(denom), .y(inv_den));
  gf_quad_lut  #(.M(M)) u_lut_a1 (.k(u), .y1(t1), .y2(t1_unused), .valid(vt));

  always_comb begin
    with_z2 = quartic_has_z2(qcase);
    r1      = with_z2 ? b1 : c1;
    r2      = with_z2 ? b2 : c2;
    denom   = with_z2 ? (gf_pow(r1, 4) ^ M'(1)) : gf_pow(r1, 4);
    u       = gf_mult(k2, inv_den);
  end

  logic          with_z2_q, ok1_q, fail1_q;
  logic [M-1:0]  r1_q, r2_q, t_q, scale1_q, x01_q;
  quartic_case_e case1_q;

  always_ff @(posedge clk) begin
    with_z2_q <= with_z2;
    r1_q      <= r1;
    r2_q      <= r2;
    t_q       <= t1;
    ok1_q     <= (with_z2 ? vb : vc) && vt && (denom != '0);
    fail1_q   <= fail_in;
    case1_q   <= qcase;
    scale1_q  <= scale;
    x01_q     <= x0;
  end

  // ---------------- stage 2: first root and the other three ----------------
  logic [M-1:0] inv_r1, w, y, y_unused;
  logic         vy;

  gf_inv_lut  #(.M(M)) u_inv_r1 (.a(r1_q), .y(inv_r1));
  gf_quad_lut #(.M(M)) u_lut_a2 (.k(w), .y1(y), .y2(y_unused), .valid(vy));

  always_comb
    w = with_z2_q ? gf_mult(gf_sq(inv_r1) ^ M'(1), t_q) : t_q;

  logic [M-1:0]  z_q [1:4];
  logic          fail2_q;
  logic [M-1:0]  scale2_q, x02_q;
  quartic_case_e case2_q;

  always_ff @(posedge clk) begin
    z_q[1]   <= gf_mult(r1_q, y);
    z_q[2]   <= gf_mult(r1_q, y) ^ r1_q;
    z_q[3]   <= gf_mult(r1_q, y) ^ r2_q;
    z_q[4]   <= gf_mult(r1_q, y) ^ r1_q ^ r2_q;
    fail2_q  <= fail1_q || !ok1_q || !vy;
    case2_q  <= case1_q;
    scale2_q <= scale1_q;
    x02_q    <= x01_q;
  end

  // ---------------- stage 3: back to the error locators ----------------
  logic [M-1:0] zi [1:4];

  for (genvar i = 1; i <= 4; i++) begin : g_inv
    gf_inv_lut #(.M(M)) u_inv_z (.a(z_q[i]), .y(zi[i]));
  end

  always_comb begin
    for (int i = 1; i <= 4; i++) begin
      unique case (case2_q)
        QC_DIRECT:    x[i] = z_q[i];
        QC_SCALE:     x[i] = gf_mult(scale2_q, z_q[i]);
        QC_INV:       x[i] = zi[i] ^ x02_q;
        default:      x[i] = gf_mult(scale2_q, zi[i]) ^ x02_q;
      endcase
    end
    fail = fail2_q;
  end

endmodule
