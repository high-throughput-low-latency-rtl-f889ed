// bch_bm_iter - one iteration (mu -> mu+1) of the simplified binary
// Berlekamp-Massey algorithm, pipelined over two clock cycles.
//
// State carried between iterations: the current locator polynomial
// Lambda^(mu)(X) and discrepancy d^(mu), the stored earlier iteration rho with
// Lambda^(rho)(X), d^(rho) and the degrees l^(mu), l^(rho). rho can be the
// half iteration -1/2, so it travels doubled (rho2 = 2*rho, signed).
//   cycle 1: Lambda^(mu+1) = Lambda^(mu) + d^(mu)/d^(rho) X^(2(mu-rho)) Lambda^(rho)
//            and l^(mu+1) = deg Lambda^(mu+1)   (division = inversion LUT + multiply)
//   cycle 2: d^(mu+1) = sum_i S_(2mu+3-i) Lambda_i^(mu+1) (S_j = 0 outside 1..2T),
//            and iteration mu replaces rho when d^(mu) != 0 and
//            2rho - l^(rho) < 2mu - l^(mu).
// Polynomials hold 2T coefficients (degree <= 2T-1, the largest degree the
// update can produce in T iterations). The syndromes ride along so that the
// iterations can be chained. Initial values (iteration mu = 0, rho = -1/2,
// Lambda = 1, d^(-1/2) = 1, d^(0) = S_1, l = 0) are applied by the caller.
// Latency 2 cycles, one new word per cycle. Data registers have no reset;
// only the valid bit is reset.
//
// Follows the published two-cycle split of a simplified Berlekamp-Massey
// iteration (new polynomial in the first cycle, discrepancy and rho update in
// the second). Own choices: the discrepancy sum covers every coefficient whose
// syndrome index is in 1..2T (the published listing stops at i = mu, which
// drops terms once the degree exceeds mu), rho is stored doubled as a signed
// integer, and polynomials keep 2T coefficients.
// Degrees are carried in 8-bit fields for any T; a degree computed here is
// below 2T, so for small T the upper bits of l_mu_out are constant zero.
module bch_bm_iter #(
  parameter int M  = 8,
  parameter int T  = 4,
  parameter int MU = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [M-1:0]      s_in       [1:2*T],
  input  logic [M-1:0]      lam_mu_in  [0:2*T-1],
  input  logic [M-1:0]      lam_rho_in [0:2*T-1],
  input  logic [M-1:0]      d_mu_in,
  input  logic [M-1:0]      d_rho_in,
  input  logic [7:0]        l_mu_in,
  input  logic [7:0]        l_rho_in,
  input  logic signed [7:0] rho2_in,
  output logic              out_valid,
  output logic [M-1:0]      s_out       [1:2*T],
  output logic [M-1:0]      lam_mu_out  [0:2*T-1],
  output logic [M-1:0]      lam_rho_out [0:2*T-1],
  output logic [M-1:0]      d_mu_out,
  output logic [M-1:0]      d_rho_out,
  output logic [7:0]        l_mu_out,
  output logic [7:0]        l_rho_out,
  output logic signed [7:0] rho2_out
);
`include "gf_func.svh"

  localparam int NC = 2*T;

  // ---------------- cycle 1: polynomial update ----------------
  logic [M-1:0] d_rho_inv;
  logic [M-1:0] ratio;
  logic [M-1:0] lam_next [0:NC-1];
  logic [7:0]   l_next;

  gf_inv_lut #(.M(M)) u_inv (.a(d_rho_in), .y(d_rho_inv));

  always_comb begin
    int shift;
    ratio = gf_mult(d_mu_in, d_rho_inv);
    shift = 2*MU - int'(rho2_in);
    for (int i = 0; i < NC; i++) begin
      lam_next[i] = lam_mu_in[i];
      if (i - shift >= 0 && i - shift < NC)
        lam_next[i] = lam_next[i] ^ gf_mult(ratio, lam_rho_in[i - shift]);
    end
    l_next = '0;
    for (int i = 0; i < NC; i++) if (lam_next[i] != '0) l_next = 8'(i);
  end

  logic              v1;
  logic [M-1:0]      s1_q       [1:NC];
  logic [M-1:0]      lam_new_q  [0:NC-1];
  logic [M-1:0]      lam_mu_q   [0:NC-1];
  logic [M-1:0]      lam_rho_q  [0:NC-1];
  logic [M-1:0]      d_mu_q, d_rho_q;
  logic [7:0]        l_new_q, l_mu_q, l_rho_q;
  logic signed [7:0] rho2_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;

  always_ff @(posedge clk) begin
    s1_q      <= s_in;
    lam_new_q <= lam_next;
    lam_mu_q  <= lam_mu_in;
    lam_rho_q <= lam_rho_in;
    d_mu_q    <= d_mu_in;
    d_rho_q   <= d_rho_in;
    l_new_q   <= l_next;
    l_mu_q    <= l_mu_in;
    l_rho_q   <= l_rho_in;
    rho2_q    <= rho2_in;
  end

  // ---------------- cycle 2: discrepancy and rho selection ----------------
  logic [M-1:0]      d_next;
  logic              take_mu;

  always_comb begin
    int j;
    d_next = '0;
    for (int i = 0; i < NC; i++) begin
      j = 2*MU + 3 - i;
      if (j >= 1 && j <= NC) d_next = d_next ^ gf_mult(s1_q[j], lam_new_q[i]);
    end
    take_mu = (d_mu_q != '0) &&
              ((int'(rho2_q) - int'(l_rho_q)) < (2*MU - int'(l_mu_q)));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;

  always_ff @(posedge clk) begin
    s_out      <= s1_q;
    lam_mu_out <= lam_new_q;
    d_mu_out   <= d_next;
    l_mu_out   <= l_new_q;
    if (take_mu) begin
      lam_rho_out <= lam_mu_q;
      d_rho_out   <= d_mu_q;
      l_rho_out   <= l_mu_q;
      rho2_out    <= 8'(2*MU);
    end else begin
      lam_rho_out <= lam_rho_q;
      d_rho_out   <= d_rho_q;
      l_rho_out   <= l_rho_q;
      rho2_out    <= rho2_q;
    end
  end

endmodule
