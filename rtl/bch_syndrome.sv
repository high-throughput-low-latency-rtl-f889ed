// bch_syndrome - syndrome components of an extended BCH word.
//
// Computes S_i = r(alpha^i) = sum_j r_j alpha^(i*j) for i = 1 .. 2T over the
// first n = 2^M - 1 bits of the received word, i.e. S = r H^T with the
// 2T x n parity-check matrix H. Since H is fixed at elaboration time the
// product is unrolled: each syndrome bit is the XOR of the received bits whose
// column alpha^(i*j) has that bit set. The last bit of the N = 2^M bit word is
// the extension (overall parity) bit; it does not enter the syndromes, and the
// module also returns the parity of the whole word, which the error-correction
// stage uses. Combinational; the decoders register the outputs.
//
// Follows the published unrolled product S = r H^T. Bit order and the
// extension bit at N - 1 are this design's own.
module bch_syndrome #(
  parameter int M = 8,
  parameter int T = 4
) (
  input  logic [2**M-1:0] cw,
  output logic [M-1:0]    s [1:2*T],
  output logic            parity
);
`include "gf_func.svh"

  localparam int NB = 2**M - 1;
  localparam logic [NB*M-1:0] ALPHA = gf_alpha_table();

  always_comb begin
    for (int i = 1; i <= 2*T; i++) begin
      s[i] = '0;
      for (int j = 0; j < NB; j++)
        if (cw[j]) s[i] = s[i] ^ ALPHA[((i * j) % NB)*M +: M];
    end
    parity = ^cw;
  end

endmodule
