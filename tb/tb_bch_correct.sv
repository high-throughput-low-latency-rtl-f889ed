// tb_bch_correct - checks the correction stage (M = 8, T = 4) on random
// words: pattern applied when its weight matches the claimed count and the
// word parity; extension bit flipped in addition when the parity disagrees and
// fewer than T errors were found; failure (word unchanged) for a count
// mismatch, an upstream failure, or a parity disagreement with T errors.
//
// Expected values come from the independent reference in bch_ref_pkg; where
// the published design gives a latency, the cycle count is checked as well.
module tb_bch_correct;
  import bch_ref_pkg::*;

  localparam int M = 8;
  localparam int T = 4;
  localparam int N = 2**M;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] cw, cw_out;
  logic [N-2:0] err_vec;
  logic [7:0]   nerr_exp, nerr;
  logic         fail_in, parity, fail;
  int checks = 0;
  int failures = 0;
  int seen [0:4];

  bch_correct #(.M(M), .T(T)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    word_t ev, w;
    int e, kind;
    logic [N-1:0] exp_cw;
    int exp_n;
    bit exp_f;
    ref_init(M);
    for (int i = 0; i < 5; i++) seen[i] = 0;
    for (int n = 0; n < 500; n++) begin
      for (int b = 0; b < N; b++) w[b] = 1'($urandom_range(1, 0));
      e = $urandom_range(T, 0);
      ev = rand_err(e, N - 1);
      kind = $urandom_range(4, 0);
      cw       = w[N-1:0];
      err_vec  = ev[N-2:0];
      nerr_exp = 8'(e);
      fail_in  = 1'b0;
      parity   = 1'(e & 1);
      exp_cw = w[N-1:0] ^ ev[N-1:0];
      exp_n  = e;
      exp_f  = 0;
      case (kind)
        1: begin nerr_exp = 8'(e + 1); exp_f = 1; end               // count mismatch
        2: begin fail_in = 1'b1; exp_f = 1; end                     // upstream failure
        3: begin                                                    // parity disagrees
          parity = ~parity;
          if (e < T) begin exp_cw[N-1] = ~exp_cw[N-1]; exp_n = e + 1; end
          else exp_f = 1;
        end
        default: ;
      endcase
      if (exp_f) begin exp_cw = w[N-1:0]; exp_n = 0; end
      seen[kind]++;
      @(posedge clk);
      checks++;
      if (cw_out != exp_cw || int'(nerr) != exp_n || fail != exp_f) begin
        failures++;
        if (failures < 5) $display("FAIL case %0d e=%0d", kind, e);
      end
    end
    for (int i = 0; i < 4; i++) begin checks++; if (seen[i] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
