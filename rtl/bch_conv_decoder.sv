// bch_conv_decoder - conventional eBCH decoder: syndromes, simplified
// Berlekamp-Massey, fully parallel Chien search and correction.
//
// Code: extended binary BCH, length N = 2^M (n = 2^M - 1 plus an overall
// parity bit at index N-1), correcting T errors. One word is accepted every
// clock cycle (in_valid may stay high) and leaves 2T + 2 cycles later:
//   cycle 1        : syndromes S_1 .. S_2T and BM initialisation
//                    (Lambda^(-1/2) = Lambda^(0) = 1, d^(-1/2) = 1, d^(0) = S_1,
//                    l = 0, rho = -1/2), registered;
//   cycles 2..2T+1 : T chained BM iterations of two cycles each;
//   cycle 2T+2     : Chien search on Lambda^(T), correction, output register.
// A locator polynomial of degree above T, or one whose number of roots differs
// from its degree, gives out_fail = 1 and the word leaves uncorrected.
// out_nerr counts the corrected bits, extension bit included.
//
// Follows the published structure and latency (one cycle of syndromes plus
// initialisation, two cycles per iteration, one cycle of Chien search: 2T +
// 2). Own choices: the delay line for the word, the popcount check for a
// polynomial without a full set of roots, the extension-bit rule, and reset of
// the valid bits only. The assertion a_align checks that the word delay line
// and the iteration pipeline stay in step; Verilator notes that rst_n feeds
// both flops and this assertion, which is intended.
module bch_conv_decoder #(
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

  localparam int N  = 2**M;
  localparam int NC = 2*T;

  // ---------------- cycle 1: syndromes + BM initialisation ----------------
  logic [M-1:0] syn [1:NC];
  logic         par;

  bch_syndrome #(.M(M), .T(T)) u_syn (.cw(in_cw), .s(syn), .parity(par));

  logic              v0;
  logic [M-1:0]      s0   [1:NC];
  logic [M-1:0]      lmu0 [0:NC-1];
  logic [M-1:0]      lrh0 [0:NC-1];
  logic [M-1:0]      dmu0, drh0;
  logic [7:0]        lm0, lr0;
  logic signed [7:0] r20;
  logic [N-1:0]      cw0;
  logic              par0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= in_valid;

  always_ff @(posedge clk) begin
    s0   <= syn;
    for (int i = 0; i < NC; i++) begin
      lmu0[i] <= (i == 0) ? M'(1) : '0;
      lrh0[i] <= (i == 0) ? M'(1) : '0;
    end
    dmu0 <= syn[1];
    drh0 <= M'(1);
    lm0  <= '0;
    lr0  <= '0;
    r20  <= -8'sd1;
    cw0  <= in_cw;
    par0 <= par;
  end

  // ---------------- T BM iterations ----------------
  logic              vv   [0:T];
  logic [M-1:0]      ss   [0:T][1:NC];
  logic [M-1:0]      lmu  [0:T][0:NC-1];
  logic [M-1:0]      lrh  [0:T][0:NC-1];
  logic [M-1:0]      dmu  [0:T];
  logic [M-1:0]      drh  [0:T];
  logic [7:0]        lm   [0:T];
  logic [7:0]        lr   [0:T];
  logic signed [7:0] r2   [0:T];

  assign vv[0]  = v0;
  assign ss[0]  = s0;
  assign lmu[0] = lmu0;
  assign lrh[0] = lrh0;
  assign dmu[0] = dmu0;
  assign drh[0] = drh0;
  assign lm[0]  = lm0;
  assign lr[0]  = lr0;
  assign r2[0]  = r20;

  for (genvar mu = 0; mu < T; mu++) begin : g_it
    bch_bm_iter #(.M(M), .T(T), .MU(mu)) u_it (
      .clk, .rst_n,
      .in_valid   (vv[mu]),
      .s_in       (ss[mu]),
      .lam_mu_in  (lmu[mu]),
      .lam_rho_in (lrh[mu]),
      .d_mu_in    (dmu[mu]),
      .d_rho_in   (drh[mu]),
      .l_mu_in    (lm[mu]),
      .l_rho_in   (lr[mu]),
      .rho2_in    (r2[mu]),
      .out_valid  (vv[mu+1]),
      .s_out      (ss[mu+1]),
      .lam_mu_out (lmu[mu+1]),
      .lam_rho_out(lrh[mu+1]),
      .d_mu_out   (dmu[mu+1]),
      .d_rho_out  (drh[mu+1]),
      .l_mu_out   (lm[mu+1]),
      .l_rho_out  (lr[mu+1]),
      .rho2_out   (r2[mu+1])
    );
  end

  // received word and its parity travel alongside the 2T BM cycles
  logic [N:0] cwp_d;
  logic       vd;
  bch_delay #(.W(N+1), .D(2*T)) u_dly (
    .clk, .rst_n, .in_valid(v0), .d({par0, cw0}), .out_valid(vd), .q(cwp_d));

  // ---------------- last cycle: Chien search + correction ----------------
  logic [M-1:0]   lam_f [0:T];
  logic [N-2:0]   err_vec;
  logic [N-1:0]   cw_c;
  logic [7:0]     nerr_c;
  logic           fail_c;

  always_comb for (int k = 0; k <= T; k++) lam_f[k] = lmu[T][k];

  bch_chien #(.M(M), .T(T)) u_chien (.lam(lam_f), .err_vec(err_vec));

  bch_correct #(.M(M), .T(T)) u_cor (
    .cw(cwp_d[N-1:0]), .err_vec(err_vec), .nerr_exp(lm[T]),
    .fail_in(int'(lm[T]) > T), .parity(cwp_d[N]),
    .cw_out(cw_c), .nerr(nerr_c), .fail(fail_c));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= vv[T];

  always_ff @(posedge clk) begin
    out_cw   <= cw_c;
    out_nerr <= nerr_c;
    out_fail <= fail_c;
  end

  // the codeword delay line and the BM chain must stay in step
  a_align: assert property (@(posedge clk) disable iff (!rst_n) vd == vv[T]);

endmodule
