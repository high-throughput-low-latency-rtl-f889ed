// gf_func.svh - GF(2^M) helper functions shared by all datapath modules.
//
// Include inside a module body that declares an int parameter M (the field
// power). Elements are M-bit vectors in the polynomial basis: bit i is the
// coefficient of alpha^i, where alpha is a root of the primitive polynomial
// returned by gf_prim_poly(M). Multiplication is fully unrolled into AND/XOR
// gates; powers with a constant exponent are unrolled square-and-multiply
// chains, so synthesis removes most of their gates (squaring is linear in
// GF(2^m)). The tables (alpha^k) are evaluated at elaboration time.

// Primitive polynomials (standard choices; the bit for x^M included).
function automatic logic [M:0] gf_prim_poly(input int m);
  case (m)
    3:       return (M+1)'('h00B);
    4:       return (M+1)'('h013);
    5:       return (M+1)'('h025);
    6:       return (M+1)'('h043);
    7:       return (M+1)'('h089);
    8:       return (M+1)'('h11D);
    9:       return (M+1)'('h211);
    10:      return (M+1)'('h409);
    11:      return (M+1)'('h805);
    default: return (M+1)'('h1053);
  endcase
endfunction

// Multiply by alpha (one shift of the LFSR).
localparam logic [M:0] GF_POLY = gf_prim_poly(M);

function automatic logic [M-1:0] gf_xtime(input logic [M-1:0] fx);
  return fx[M-1] ? ((fx << 1) ^ GF_POLY[M-1:0]) : (fx << 1);
endfunction

// Unrolled shift-and-add multiplication.
function automatic logic [M-1:0] gf_mult(input logic [M-1:0] fx, input logic [M-1:0] fy);
  logic [M-1:0] acc;
  logic [M-1:0] sh;
  acc = '0;
  sh  = fx;
  for (int i = 0; i < M; i++) begin
    if (fy[i]) acc = acc ^ sh;
    sh = gf_xtime(sh);
  end
  return acc;
endfunction

function automatic logic [M-1:0] gf_sq(input logic [M-1:0] fx);
  return gf_mult(fx, fx);
endfunction

// a^e for a constant, non-negative exponent e (square-and-multiply).
function automatic logic [M-1:0] gf_pow(input logic [M-1:0] fx, input int fe);
  logic [M-1:0] r;
  logic [M-1:0] sq;
  r = M'(1);
  sq = fx;
  for (int i = 0; i < 31; i++) begin
    if (fe[i]) r = gf_mult(r, sq);
    sq = gf_sq(sq);
  end
  return r;
endfunction

// alpha^k for 0 <= k < 2^M - 1 (elaboration-time helper).
function automatic logic [M-1:0] gf_alpha_pow(input int fk);
  logic [M-1:0] r;
  r = M'(1);
  for (int i = 0; i < fk; i++) r = gf_xtime(r);
  return r;
endfunction

// Packed table: entry k (bits k*M +: M) holds alpha^k, k = 0 .. 2^M-2.
function automatic logic [(2**M-1)*M-1:0] gf_alpha_table();
  logic [(2**M-1)*M-1:0] t;
  logic [M-1:0] r;
  r = M'(1);
  for (int j = 0; j < 2**M-1; j++) begin
    t[j*M +: M] = r;
    r = gf_xtime(r);
  end
  return t;
endfunction
