// bch_direct_decoder - direct (closed-form) eBCH decoder for T <= 4.
//
// Code: extended binary BCH of length N = 2^M (bit N-1 is the overall parity
// bit). Instead of an iterative locator search the decoder evaluates closed
// formulas of the odd syndromes S1, S3, S5, S7 and finds the roots of the
// locator polynomial through small root tables. Five parts, all pipelined for
// one word per clock cycle:
//   1 syndromes                     (bch_syndrome)
//   2 precomputation                (bch_direct_precomp)
//   3 determine the error count     (bch_direct_determine)
//   4 roots: one to three errors    (bch_direct_roots123);
//            four errors: locator polynomial (bch_direct_elp4), reduction to
//            a depressed quartic (bch_direct_k1k2), quartic roots and
//            back-substitution (bch_direct_roots4)
//   5 correction                    (bch_locator_match, bch_correct)
// Latency from in_valid to out_valid: 3 cycles for T <= 2, 4 for T = 3 and
// 8 for T = 4. Register placement:
//   T<=2: [syndrome] [precomp+determine] [roots+correction]
//   T=3 : [syndrome] [precomp+determine] [root LUTs] [back-substitution+correction]
//   T=4 : [syndrome] [precomp] [determine+Lambda] [k1k2 stage 1] [k1k2 stage 2]
//         [cubic LUT+quadratic LUT] [second quadratic LUT] [back-substitution+correction]
//         The one-to-three-error path finishes after cycle 5 and waits in a
//         three-stage delay line.
// out_fail flags a detected uncorrectable word (then passed through unchanged);
// out_nerr counts the corrected bits including the extension bit.
//
// Follows the published five-part structure and the latencies of 3, 4 and 8
// cycles for t = 2, 3 and 4. Where the registers sit, the early computation of
// the one-to-three-error roots for t = 4, the shared quartic datapath and the
// latency of 3 for t = 1 are this design's own.
module bch_direct_decoder
  import bch_pkg::*;
#(
  parameter int M = 8,
  parameter int T = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [2**M-1:0] in_cw,
  output logic            out_valid,
  output logic [2**M-1:0] out_cw,
  output logic            out_fail,
  output logic [7:0]      out_nerr
);

  localparam int N   = 2**M;
  localparam int LAT = (T >= 4) ? 8 : (T == 3) ? 4 : 3;

  // ---------------- 1: syndromes (cycle 1) ----------------
  logic [M-1:0] syn [1:2*T];
  logic         par;
  logic [M-1:0] s1_q, s3_q, s5_q, s7_q;

  bch_syndrome #(.M(M), .T(T)) u_syn (.cw(in_cw), .s(syn), .parity(par));

  always_ff @(posedge clk) begin
    s1_q <= syn[1];
    s3_q <= (T >= 2) ? syn[(T >= 2) ? 3 : 1] : '0;
    s5_q <= (T >= 3) ? syn[(T >= 3) ? 5 : 1] : '0;
    s7_q <= (T >= 4) ? syn[(T >= 4) ? 7 : 1] : '0;
  end

  // received word and its parity wait for the correction stage
  logic [N:0] cwp_d;
  logic       v_d;
  bch_delay #(.W(N+1), .D(LAT-1)) u_dly (
    .clk, .rst_n, .in_valid, .d({par, in_cw}), .out_valid(v_d), .q(cwp_d));

  // ---------------- 2: precomputation ----------------
  logic [M-1:0] s1_2, d, e, g, delta, c2, c3, c3z;

  bch_direct_precomp #(.M(M)) u_pre (
    .s1(s1_q), .s3(s3_q), .s5(s5_q), .s7(s7_q),
    .s1_2, .d, .e, .g, .delta, .c2, .c3, .c3z);

  // roots of the final stage
  logic [M-1:0] x_f [1:4];
  logic [7:0]   nexp_f;
  logic         recip_f, fail_f;

  if (T >= 4) begin : g_t4
    // cycle 2 register: precomputed terms
    logic [M-1:0] p_s1, p_s3, p_s5, p_s7, p_s1_2, p_d, p_e, p_g, p_delta, p_c2, p_c3, p_c3z;
    always_ff @(posedge clk) begin
      p_s1 <= s1_q;  p_s3 <= s3_q;  p_s5 <= s5_q;  p_s7 <= s7_q;
      p_s1_2 <= s1_2; p_d <= d; p_e <= e; p_g <= g;
      p_delta <= delta; p_c2 <= c2; p_c3 <= c3; p_c3z <= c3z;
    end

    // ---------------- 3: determine errors + Lambda(X) (cycle 3) ----------------
    err_class_e   cls_c, cls_q;
    logic [M-1:0] lam_c [0:4];
    logic [M-1:0] lam_q [0:4];
    logic [M-1:0] r_s1, r_d, r_e;

    bch_direct_determine #(.M(M), .T(T)) u_det (
      .s1(p_s1), .s3(p_s3), .s5(p_s5), .s7(p_s7), .d(p_d), .e(p_e), .g(p_g),
      .delta(p_delta), .c2(p_c2), .c3(p_c3), .c3z(p_c3z), .cls(cls_c));

    bch_direct_elp4 #(.M(M)) u_elp (
      .s1(p_s1), .s3(p_s3), .s7(p_s7), .s1_2(p_s1_2), .d(p_d), .e(p_e),
      .delta(p_delta), .lam(lam_c));

    always_ff @(posedge clk) begin
      cls_q <= cls_c;
      lam_q <= lam_c;
      r_s1  <= p_s1;
      r_d   <= p_d;
      r_e   <= p_e;
    end

    // ---------------- 4a: one to three errors (cycles 4-5, then delayed) ----------------
    logic [M-1:0] x3 [1:3];
    logic [7:0]   n3;
    logic         rc3, f3;

    bch_direct_roots123 #(.M(M), .MID_REG(1'b1)) u_r123 (
      .clk, .cls(cls_q), .s1(r_s1), .d(r_d), .e(r_e),
      .x(x3), .nexp(n3), .recip(rc3), .fail(f3));

    // the one-to-three-error roots are ready in cycle 5 and wait three cycles
    logic [3*M+8+2-1:0] r123_d;
    logic               unused_v;
    bch_delay #(.W(3*M+8+2), .D(3)) u_r123_dly (
      .clk, .rst_n, .in_valid(1'b0),
      .d({x3[1], x3[2], x3[3], n3, rc3, f3}),
      .out_valid(unused_v), .q(r123_d));
    err_class_e   cls_f;
    logic [M-1:0] x3_f [1:3];
    logic [7:0]   n3_f;
    logic         rc3_f, f3_f;
    always_comb {x3_f[1], x3_f[2], x3_f[3], n3_f, rc3_f, f3_f} = r123_d;

    // ---------------- 4b: four errors (cycles 4-8) ----------------
    logic [M-1:0]  k1, k2, scale, x0;
    quartic_case_e qcase;
    logic          f_k;
    logic [M-1:0]  x4 [1:4];
    logic          f4;

    bch_direct_k1k2 #(.M(M)) u_k (
      .clk, .lam(lam_q), .k1, .k2, .qcase, .scale, .x0, .fail(f_k));

    bch_direct_roots4 #(.M(M)) u_r4 (
      .clk, .k1, .k2, .qcase, .scale, .x0, .fail_in(f_k), .x(x4), .fail(f4));

    // class of the word now in cycle 8 (cls_q delayed by 4 more cycles)
    logic [2:0] cls_d [1:4];
    always_ff @(posedge clk) begin
      cls_d[1] <= cls_q;
      for (int i = 2; i <= 4; i++) cls_d[i] <= cls_d[i-1];
    end
    assign cls_f = err_class_e'(cls_d[4]);

    always_comb begin
      if (cls_f == EC_FOUR) begin
        x_f     = x4;
        nexp_f  = 8'd4;
        recip_f = 1'b0;
        fail_f  = f4;
      end else begin
        x_f[1]  = x3_f[1];
        x_f[2]  = x3_f[2];
        x_f[3]  = x3_f[3];
        x_f[4]  = '0;
        nexp_f  = n3_f;
        recip_f = rc3_f;
        fail_f  = f3_f;
      end
    end
  end else begin : g_t123
    // ---------------- 3: determine errors (cycle 2) ----------------
    err_class_e   cls_c, cls_q;
    logic [M-1:0] r_s1, r_d, r_e;

    bch_direct_determine #(.M(M), .T(T)) u_det (
      .s1(s1_q), .s3(s3_q), .s5(s5_q), .s7(s7_q), .d, .e, .g,
      .delta, .c2, .c3, .c3z, .cls(cls_c));

    always_ff @(posedge clk) begin
      cls_q <= cls_c;
      r_s1  <= s1_q;
      r_d   <= d;
      r_e   <= e;
    end

    // ---------------- 4: roots (cycle 3, and cycle 4 for T = 3) ----------------
    logic [M-1:0] x3 [1:3];
    bch_direct_roots123 #(.M(M), .MID_REG(T == 3)) u_r123 (
      .clk, .cls(cls_q), .s1(r_s1), .d(r_d), .e(r_e),
      .x(x3), .nexp(nexp_f), .recip(recip_f), .fail(fail_f));

    always_comb begin
      x_f[1] = x3[1];
      x_f[2] = x3[2];
      x_f[3] = x3[3];
      x_f[4] = '0;
    end
  end

  // ---------------- 5: correction (last cycle) ----------------
  logic [N-2:0] err_vec;
  logic [N-1:0] cw_c;
  logic [7:0]   nerr_c;
  logic         fail_c;

  bch_locator_match #(.M(M), .NR(4)) u_match (
    .x(x_f), .nexp(nexp_f), .recip(recip_f), .err_vec);

  bch_correct #(.M(M), .T(T)) u_cor (
    .cw(cwp_d[N-1:0]), .err_vec, .nerr_exp(nexp_f), .fail_in(fail_f),
    .parity(cwp_d[N]), .cw_out(cw_c), .nerr(nerr_c), .fail(fail_c));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_d;

  always_ff @(posedge clk) begin
    out_cw   <= cw_c;
    out_nerr <= nerr_c;
    out_fail <= fail_c;
  end

endmodule
