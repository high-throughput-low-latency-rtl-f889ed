// bch_decoder - top level: fully pipelined extended BCH decoder.
//
// Decodes one N = 2^M bit extended binary BCH word (BCH code of length
// 2^M - 1 plus an overall parity bit at index N-1) per clock cycle,
// correcting up to T bit errors and flagging T+1 errors. Two architectures,
// chosen at elaboration time:
//   DIRECT = 1: closed-form decoder for T <= 4 (bch_direct_decoder),
//               latency 3 / 3 / 4 / 8 cycles for T = 1 / 2 / 3 / 4;
//   DIRECT = 0: syndromes, simplified Berlekamp-Massey and parallel Chien
//               search for any T (bch_conv_decoder), latency 2T + 2 cycles.
// Defaults: the (256, 223) eBCH code (M = 8, T = 4) with the direct decoder.
// Interface: in_valid/in_cw are sampled on every rising clock edge (no
// back-pressure); out_valid/out_cw/out_fail/out_nerr are registered outputs.
// out_fail = 1 marks a detected uncorrectable word, passed through unchanged;
// out_nerr is the number of bits corrected, extension bit included.
// rst_n is an asynchronous active-low reset of the valid pipeline only.
//
// Follows the published pair of architectures with code size and t fixed at
// compile time, one word per cycle. The valid/data interface without back-
// pressure, registered outputs and the DIRECT switch are this design's own.
module bch_decoder #(
  parameter int M      = 8,
  parameter int T      = 4,
  parameter bit DIRECT = 1'b1
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

  if (DIRECT) begin : g_direct
    if (T < 1 || T > 4) begin : g_bad_t
      $error("bch_decoder: the direct decoder supports 1 <= T <= 4");
    end
    bch_direct_decoder #(.M(M), .T(T)) u_dec (
      .clk, .rst_n, .in_valid, .in_cw, .out_valid, .out_cw, .out_fail, .out_nerr);
  end else begin : g_conv
    bch_conv_decoder #(.M(M), .T(T)) u_dec (
      .clk, .rst_n, .in_valid, .in_cw, .out_valid, .out_cw, .out_fail, .out_nerr);
  end

endmodule
