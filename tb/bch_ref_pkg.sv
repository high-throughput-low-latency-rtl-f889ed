// bch_ref_pkg - software reference model used by the testbenches.
//
// Independent of the RTL: field arithmetic uses exponent/logarithm tables
// built at run time (the RTL uses unrolled shift-and-add multiplication and
// elaboration-time ROMs). Also provides the BCH generator polynomial (product
// of (x + alpha^j) over the cyclotomic cosets of alpha^1, alpha^3, ...,
// alpha^(2t-1)), a non-systematic encoder c(x) = msg(x) * g(x) with the
// extended parity bit at index 2^m - 1, syndromes and random error patterns.
// Codewords are held in a 1024-bit vector (m <= 10); bit j is the
// coefficient of x^j.
//
// Independent of the RTL: log/antilog tables instead of unrolled multipliers,
// and a generator polynomial built from cyclotomic cosets. Uses the same field
// polynomials as the RTL.
package bch_ref_pkg;

  typedef bit [1023:0] word_t;

  int ref_m = 8;
  int ref_n = 255;
  int exp_t [0:2047];
  int log_t [0:1023];

  function automatic void ref_init(input int m);
    int poly;
    int x;
    case (m)
      3: poly = 'h00B;
      4: poly = 'h013;
      5: poly = 'h025;
      6: poly = 'h043;
      7: poly = 'h089;
      8: poly = 'h11D;
      9: poly = 'h211;
      default: poly = 'h409;
    endcase
    ref_m = m;
    ref_n = (1 << m) - 1;
    x = 1;
    for (int i = 0; i < ref_n; i++) begin
      exp_t[i]         = x;
      exp_t[i + ref_n] = x;
      log_t[x]         = i;
      x = x << 1;
      if ((x >> m) & 1) x = x ^ poly;
    end
    log_t[0] = 0;
  endfunction

  function automatic int mul(input int a, input int b);
    if (a == 0 || b == 0) return 0;
    return exp_t[log_t[a] + log_t[b]];
  endfunction

  function automatic int inv(input int a);
    if (a == 0) return 0;
    return exp_t[(ref_n - log_t[a]) % ref_n];
  endfunction

  function automatic int alpha(input longint k);
    longint r;
    r = k % ref_n;
    if (r < 0) r = r + ref_n;
    return exp_t[int'(r)];
  endfunction

  function automatic int pw(input int a, input int e);
    if (e == 0) return 1;
    if (a == 0) return 0;
    return alpha(longint'(log_t[a]) * e);
  endfunction

  function automatic int gf_log(input int a);
    return log_t[a];
  endfunction

  // S_i = r(alpha^i) over the first n bits.
  function automatic int syndrome(input word_t cw, input int i);
    int s;
    s = 0;
    for (int j = 0; j < ref_n; j++) if (cw[j]) s = s ^ alpha(longint'(i) * j);
    return s;
  endfunction

  // Generator polynomial coefficients (0/1), returned with its degree.
  function automatic void gen_poly(input int t, output bit g [0:1023], output int deg);
    bit mark [0:1023];
    int gg [0:1023];
    int nw [0:1023];
    int j;
    for (int i = 0; i < 1024; i++) begin mark[i] = 0; gg[i] = 0; g[i] = 0; end
    for (int i = 1; i < 2*t; i += 2) begin
      j = i % ref_n;
      do begin
        mark[j] = 1;
        j = (2 * j) % ref_n;
      end while (j != i % ref_n);
    end
    gg[0] = 1;
    deg = 0;
    for (int r = 0; r < ref_n; r++) if (mark[r]) begin
      for (int k = 0; k <= deg + 1; k++)
        nw[k] = (k > 0 ? gg[k-1] : 0) ^ mul(gg[k], alpha(r));
      deg++;
      for (int k = 0; k <= deg; k++) gg[k] = nw[k];
    end
    for (int k = 0; k <= deg; k++) g[k] = bit'(gg[k] & 1);
  endfunction

  // Random extended codeword: msg(x) * g(x), parity bit at index n.
  function automatic word_t rand_codeword(input int t);
    bit g [0:1023];
    int deg;
    word_t c;
    bit p;
    gen_poly(t, g, deg);
    c = '0;
    for (int i = 0; i < ref_n - deg; i++) if ($urandom_range(1, 0) == 1)
      for (int k = 0; k <= deg; k++) c[i+k] = c[i+k] ^ g[k];
    p = 0;
    for (int j = 0; j < ref_n; j++) p = p ^ c[j];
    c[ref_n] = p;
    return c;
  endfunction

  // e distinct error positions drawn from [0, npos).
  function automatic word_t rand_err(input int e, input int npos);
    word_t v;
    int p;
    v = '0;
    for (int i = 0; i < e; i++) begin
      do p = $urandom_range(npos - 1, 0); while (v[p]);
      v[p] = 1'b1;
    end
    return v;
  endfunction

  // Four errors in the BCH part whose locators sum to zero (S1 = 0): reaches
  // the quartic cases with Lambda3 = 0.
  function automatic word_t rand_err_s1zero();
    word_t v;
    int j1, j2, j3, x4, j4;
    forever begin
      j1 = $urandom_range(ref_n - 1, 0);
      j2 = $urandom_range(ref_n - 1, 0);
      j3 = $urandom_range(ref_n - 1, 0);
      x4 = alpha(j1) ^ alpha(j2) ^ alpha(j3);
      if (j1 == j2 || j1 == j3 || j2 == j3 || x4 == 0) continue;
      j4 = log_t[x4];
      if (j4 == j1 || j4 == j2 || j4 == j3) continue;
      break;
    end
    v = '0;
    v[j1] = 1'b1;
    v[j2] = 1'b1;
    v[j3] = 1'b1;
    v[j4] = 1'b1;
    return v;
  endfunction

  // Four errors with S1 = 0 and S3 * S5 = 0: Lambda2 = Lambda3 = 0, the
  // quartic case without substitution.
  // Small fields may have no such pattern: after 20000 tries the last
  // S1 = 0 pattern is returned.
  function automatic word_t rand_err_l23zero();
    word_t v;
    for (int i = 0; i < 20000; i++) begin
      v = rand_err_s1zero();
      if (syndrome(v, 3) == 0 || syndrome(v, 5) == 0) break;
    end
    return v;
  endfunction

  // Four errors with sigma1 != 0 and sigma2^2 = sigma1 sigma3 (sigma_i the
  // elementary symmetric functions of the locators): q2 = 0, the quartic case
  // with the plain reciprocal substitution. Gives up after 20000 tries and
  // returns the last random four-error pattern.
  function automatic word_t rand_err_q2zero();
    word_t v;
    int xl [4], s1, s2, s3;
    for (int i = 0; i < 20000; i++) begin
      v = rand_err(4, ref_n);
      s1 = 0;
      for (int j = 0, k = 0; j < ref_n; j++) if (v[j]) begin xl[k] = alpha(j); k++; end
      s1 = xl[0] ^ xl[1] ^ xl[2] ^ xl[3];
      s2 = 0;
      for (int a = 0; a < 4; a++) for (int b = a + 1; b < 4; b++) s2 ^= mul(xl[a], xl[b]);
      s3 = mul(mul(xl[0], xl[1]), xl[2] ^ xl[3]) ^ mul(mul(xl[2], xl[3]), xl[0] ^ xl[1]);
      if (s1 != 0 && mul(s2, s2) == mul(s1, s3)) break;
    end
    return v;
  endfunction

endpackage
