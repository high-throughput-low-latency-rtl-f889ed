// bch_correct - error-correction stage shared by both decoders.
//
// Inputs are the received N = 2^M bit word (bit N-1 is the extension parity
// bit), the error pattern of the BCH part found by the root search
// (err_vec, one bit per position 0 .. N-2), the number of errors the locator
// polynomial claims (nerr_exp), a failure flag from earlier stages and the
// parity of the received word. The number of marked positions must equal
// nerr_exp, otherwise the locator polynomial did not split into distinct
// field roots and the word is flagged as a failure and passed on unchanged.
// The extension bit then provides the extra detection of eBCH codes: if the
// number of corrected bits has the same parity as the received word, the
// pattern is applied; if not, the extension bit itself is in error and is
// flipped too, provided fewer than T errors were found, else a failure
// (T+1 errors) is declared. Combinational.
//
// The published design only names an error-correction stage. The count check
// and the extension-bit rule are this design's own: together they correct any
// T errors in the N bits and flag every pattern of T + 1.
module bch_correct #(
  parameter int M = 8,
  parameter int T = 4
) (
  input  logic [2**M-1:0] cw,
  input  logic [2**M-2:0] err_vec,
  input  logic [7:0]      nerr_exp,
  input  logic            fail_in,
  input  logic            parity,
  output logic [2**M-1:0] cw_out,
  output logic [7:0]      nerr,
  output logic            fail
);

  localparam int NB = 2**M - 1;

  logic [7:0] cnt;

  always_comb begin
    cnt = '0;
    for (int j = 0; j < NB; j++) cnt = cnt + 8'(err_vec[j]);
    cw_out = cw;
    nerr   = '0;
    fail   = 1'b0;
    if (fail_in || cnt != nerr_exp) begin
      fail = 1'b1;
    end else if (cnt[0] == parity) begin
      cw_out = cw ^ {1'b0, err_vec};
      nerr   = cnt;
    end else if (int'(cnt) < T) begin
      cw_out = cw ^ {1'b1, err_vec};
      nerr   = cnt + 8'd1;
    end else begin
      fail = 1'b1;
    end
  end

endmodule
