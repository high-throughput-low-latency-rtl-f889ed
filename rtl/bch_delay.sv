// bch_delay - D-stage register delay line with a valid bit.
//
// Carries the received codeword (and other side data) alongside a decoder
// pipeline so that it reaches the error-correction stage together with the
// error locations. D = 0 is a plain wire. Only the valid bits are reset.
//
// A generic helper of this design (the published description does not detail
// how the word travels alongside the decoder).
module bch_delay #(
  parameter int W = 8,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] d,
  output logic         out_valid,
  output logic [W-1:0] q
);

  if (D == 0) begin : g_wire
    assign q         = d;
    assign out_valid = in_valid;
  end else begin : g_regs
    logic [W-1:0] pipe [D];
    logic [D-1:0] vpipe;
    always_ff @(posedge clk) begin
      pipe[0] <= d;
      for (int i = 1; i < D; i++) pipe[i] <= pipe[i-1];
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) vpipe <= '0;
      else        vpipe <= D'({vpipe, in_valid});
    assign q         = pipe[D-1];
    assign out_valid = vpipe[D-1];
  end

endmodule
