// gf_mul - combinational GF(2^M) multiplier.
//
// p = a * b in GF(2^M), polynomial basis, primitive polynomial from
// gf_func.svh. The multiplication is unrolled into M partial products of a
// shifted by alpha^i and gated by b[i], as the decoders' arithmetic is
// described: only AND and XOR gates, no clock. Zero latency.
//
// Follows the published unrolled AND/XOR multiplication; the field polynomial
// is a standard choice of this design.
module gf_mul #(
  parameter int M = 8
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] p
);
`include "gf_func.svh"

  always_comb p = gf_mult(a, b);

endmodule
