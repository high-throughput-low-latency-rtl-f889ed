// gf_quad_lut - root LUT {k}_A for the quadratic A(X) = X^2 + X + k.
//
// If y solves y^2 + y = k then so does y + 1, so the table stores, for each k,
// the root whose constant bit (coefficient of alpha^0) is zero; the second
// output is that root plus one. valid is 0 when X^2 + X + k has no root in
// GF(2^M) (half of all k). The 2^M-entry ROM is built at elaboration time by
// running y over the whole field. Purely combinational.
//
// Follows the published {}_A table with two outputs; storing one root and
// forming the other as root + 1 is this design's own.
module gf_quad_lut #(
  parameter int M = 8
) (
  input  logic [M-1:0] k,
  output logic [M-1:0] y1,
  output logic [M-1:0] y2,
  output logic         valid
);
`include "gf_func.svh"

  function automatic logic [(2**M)*(M+1)-1:0] build_quad();
    logic [(2**M)*(M+1)-1:0] t;
    logic [M-1:0]            y;
    logic [M-1:0]            kk;
    t = '0;
    for (int i = 0; i < 2**M; i++) begin
      y  = M'(i);
      kk = gf_sq(y) ^ y;
      if (!y[0]) t[int'(kk)*(M+1) +: M+1] = {1'b1, y};
    end
    return t;
  endfunction

  localparam logic [(2**M)*(M+1)-1:0] ROM = build_quad();

  logic [M:0] entry;
  always_comb begin
    entry = ROM[k*(M+1) +: M+1];
    valid = entry[M];
    y1    = entry[M-1:0];
    y2    = entry[M-1:0] ^ M'(1);
  end

endmodule
