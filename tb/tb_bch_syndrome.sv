// tb_bch_syndrome - compares S_1 .. S_8 and the word parity of the syndrome
// block (M = 8, T = 4) with the reference for random words, for codewords
// (all syndromes zero) and for single-bit words (S_i = alpha^(i*j)).
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_syndrome;
  import bch_ref_pkg::*;

  localparam int M = 8;
  localparam int T = 4;
  localparam int N = 2**M;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] cw;
  logic [M-1:0] s [1:2*T];
  logic         parity;
  int checks = 0;
  int failures = 0;

  bch_syndrome #(.M(M), .T(T)) dut (.cw(cw), .s(s), .parity(parity));

  task automatic check_word(input word_t w);
    bit p;
    cw = w[N-1:0];
    @(posedge clk);
    for (int i = 1; i <= 2*T; i++) begin
      checks++;
      if (int'(s[i]) != syndrome(w, i)) begin
        failures++;
        if (failures < 5) $display("FAIL S%0d = %0d, expected %0d", i, s[i], syndrome(w, i));
      end
    end
    p = ^w[N-1:0];
    checks++;
    if (parity != p) failures++;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t w;
    ref_init(M);
    for (int n = 0; n < 200; n++) begin
      for (int b = 0; b < N; b++) w[b] = 1'($urandom_range(1, 0));
      check_word(w);
    end
    for (int n = 0; n < 50; n++) check_word(rand_codeword(T));
    for (int j = 0; j < N; j += 7) begin
      w = '0;
      w[j] = 1'b1;
      check_word(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
