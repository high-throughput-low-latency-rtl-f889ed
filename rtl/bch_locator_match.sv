// bch_locator_match - turns error locators into an error pattern.
//
// Bit j of err_vec (0 <= j < n = 2^M - 1) is set when one of the first nexp
// locators equals alpha^j, or alpha^-j when recip = 1 (the one-error case,
// whose root S1^-1 is the reciprocal of the locator, i.e. the error is at
// (n - i) mod n for root alpha^i). Each position compares against its own
// constant, so the whole word is handled in parallel. Combinational.
//
// Own helper: the published description does not say how locators become bit
// positions. Comparing each position with a constant alpha^j avoids a
// logarithm table.
module bch_locator_match #(
  parameter int M  = 8,
  parameter int NR = 4
) (
  input  logic [M-1:0]    x [1:NR],
  input  logic [7:0]      nexp,
  input  logic            recip,
  output logic [2**M-2:0] err_vec
);
`include "gf_func.svh"

  localparam int NB = 2**M - 1;
  localparam logic [NB*M-1:0] ALPHA = gf_alpha_table();

  always_comb begin
    logic [M-1:0] loc;
    for (int j = 0; j < NB; j++) begin
      loc = recip ? ALPHA[((NB - j) % NB)*M +: M] : ALPHA[j*M +: M];
      err_vec[j] = 1'b0;
      for (int l = 1; l <= NR; l++)
        if (l <= int'(nexp) && x[l] == loc) err_vec[j] = 1'b1;
    end
  end

endmodule
