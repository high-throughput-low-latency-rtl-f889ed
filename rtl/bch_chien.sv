// bch_chien - fully parallel Chien search.
//
// Evaluates the error locator polynomial Lambda(X) = sum_k Lambda_k X^k
// (Lambda_0 = 1, reciprocal form: its roots are the inverses of the error
// locators) at every X = alpha^i, 0 <= i < n, n = 2^M - 1, in one
// combinational pass. Each evaluation is a sum of products with the constants
// alpha^(i*k), so it reduces to XOR trees. A root alpha^i marks an error at
// bit position e = (n - i) mod n of the received word; err_vec has one bit per
// position of the BCH part (the extension bit is handled by bch_correct).
// Only coefficients 0..T are used: a polynomial of larger degree is rejected
// earlier as a decoding failure. Combinational.
//
// Follows the published fully parallel Chien search and the position rule e =
// (n - i) mod n. Evaluating every Lambda(alpha^i) with constant multipliers in
// one combinational block is the direct reading of that description.
module bch_chien #(
  parameter int M = 8,
  parameter int T = 4
) (
  input  logic [M-1:0]    lam [0:T],
  output logic [2**M-2:0] err_vec
);
`include "gf_func.svh"

  localparam int NB = 2**M - 1;
  localparam logic [NB*M-1:0] ALPHA = gf_alpha_table();

  // one evaluator per field element: Lambda(alpha^i), i = 0 .. n-1
  for (genvar i = 0; i < NB; i++) begin : g_eval
    logic [M-1:0] v;
    always_comb begin
      v = lam[0];
      for (int k = 1; k <= T; k++)
        v = v ^ gf_mult(lam[k], ALPHA[((i * k) % NB)*M +: M]);
    end
    assign err_vec[(NB - i) % NB] = (v == '0);
  end

endmodule
