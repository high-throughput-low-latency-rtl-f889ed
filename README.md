# Pipelined BCH decoders: direct solution up to four errors, and Berlekamp–Massey for any t

Fibre-optic links and data-centre interconnects protect their data with
product codes built from many short extended BCH (eBCH) component codes.
Decoding those components is the bottleneck. A component decoder has to take
one whole codeword per clock cycle and return it after only a few cycles.

This RTL implements two fully pipelined decoders for binary eBCH codes of
length N = 2^m. Both accept one codeword per clock cycle.

* **Direct decoder** (t ≤ 4). It never searches for the roots of the
  error-locator polynomial. It computes them with closed-form formulas from
  the syndromes. Every cube root, square root, inverse and quadratic or
  cubic equation is a table lookup. Latency is **3, 4 and 8 cycles** for
  t = 2, 3 and 4, and also 3 cycles for t = 1.
* **Conventional decoder** (any t). It computes syndromes, runs t iterations
  of simplified Berlekamp–Massey, then a fully parallel Chien search. Latency
  is **2t + 2 cycles**.

The default configuration is the (256, 223) eBCH code (m = 8, t = 4), decoded
by the direct decoder. Its four-error solver is the most involved part of the
design, and most of this document is about it.

## 1. Code, conventions and interface

* **Field.** The field is GF(2^m) in polynomial basis, generated by a fixed
  primitive polynomial. For m = 8 it is x^8 + x^4 + x^3 + x^2 + 1. The table
  for m = 3 … 12 is in `rtl/gf_func.svh`. α is the root of that polynomial.
* **Code.** The BCH part has length n = 2^m − 1. Bit j of the word
  (0 ≤ j < n) is the coefficient of X^j. Bit N − 1 is the overall parity
  (extension) bit, so every valid N-bit word has even weight. The syndromes are
  S_i = Σ_j r_j α^{ij}. Only the odd-index syndromes S1, S3, S5, S7 carry
  information, because S_{2i} = S_i².
* **Error locators.** An error at position j has locator X = α^j. The
  conventional decoder finds the roots α^i of Λ(X) = Π(1 + X_l X) and maps
  each one to position (n − i) mod n. The direct decoder finds the locators
  X_l themselves. The one exception is its single-error path, which returns
  S1^{-1} = α^{-j}.
* **Top level: `bch_decoder #(M = 8, T = 4, DIRECT = 1)`.**

  | port | dir | width | meaning |
  |---|---|---|---|
  | `clk` | in | 1 | clock, rising edge |
  | `rst_n` | in | 1 | asynchronous active-low reset of the valid pipeline |
  | `in_valid` | in | 1 | a word is on `in_cw` this cycle |
  | `in_cw` | in | 2^M | received word |
  | `out_valid` | out | 1 | a decoded word is on the outputs |
  | `out_cw` | out | 2^M | corrected word, or the received word if `out_fail` |
  | `out_fail` | out | 1 | uncorrectable word detected |
  | `out_nerr` | out | 8 | bits corrected, extension bit included |

  * There is no back-pressure. `in_valid` may stay high forever, and idle
    cycles may be inserted anywhere.
  * Every word leaves exactly LAT cycles after it entered.
  * All outputs are registered.
  * Only the valid bits are reset. Data registers start at arbitrary values,
    and a word that is not valid is never looked at.
* **The extension bit and detection of t + 1 errors.** Both decoders share
  the last stage, `bch_correct`. It counts the error positions found in the
  BCH part (cnt) and compares that count with the count the decoder expects.
  * If the two counts differ, the word is uncorrectable: a root is missing
    or lies outside the field.
  * If cnt has the same parity as the received word, the positions found are
    flipped.
  * Otherwise, if cnt < t, the extension bit is flipped as well.
  * Otherwise t errors were found in the BCH part but the overall parity says
    the number of errors is odd. That means at least t + 1 errors, and the
    word is flagged.

  With this rule every pattern of up to t errors anywhere in the N bits is
  corrected, and every pattern of t + 1 errors is flagged.

## 2. Shared Galois-field arithmetic

All arithmetic is combinational and unrolled:

* **Multiplication** (`gf_mul`, and the function `gf_mult` in
  `gf_func.svh`) is an AND/XOR array with the reduction by the field
  polynomial folded in.
* **Powers with a constant exponent** are square-and-multiply chains. Squaring
  is linear over GF(2), so synthesis shrinks these chains considerably.
* **Division** is an inversion table followed by a multiplier.
* **Square roots and cube roots** are tables.
* **The three root tables** of the method are also tables:
  * **{k}_A** (`gf_quad_lut`): roots of X² + X + k. It stores one root. The
    other root is that root + 1. A valid bit says whether roots exist, which
    is when the trace of k is 0.
  * **{k}_B** (`gf_cubic_lut`): the three roots of X³ + X + k. They are valid
    only when all three lie in the field.
  * **{k}_C** (`gf_cube_lut`): the three cube roots of k. Three cube roots
    exist only when 3 divides 2^m − 1, that is, for even m. For odd m this
    table never reports three roots.

Every table has 2^m entries. A constant function computes each one at
elaboration time by enumerating the field, so no data file is read. For
m = 8 the largest table, {}_B or {}_C, holds 256 × 25 bits.

## 3. The direct decoder

### 3.1 Pipeline

| cycle | t ≤ 2 | t = 3 | t = 4 |
|---|---|---|---|
| 1 | syndromes → reg | syndromes → reg | syndromes → reg |
| 2 | precompute, classify → reg | precompute, classify → reg | precompute → reg |
| 3 | roots, correct → out reg | root lookups → reg | classify, build Λ(X) → reg |
| 4 | | back-substitute, correct → out reg | k1/k2, first half → reg (1–3-error lookups → reg) |
| 5 | | | k1/k2, second half → reg (1–3-error roots wait in a 3-stage delay line) |
| 6 | | | resolvent cubic and first quadratic → reg |
| 7 | | | second quadratic, Z1…Z4 → reg |
| 8 | | | back-transform to X, correct → out reg |

* The received word travels alongside the pipeline in a delay line.
* The error class also travels alongside. For t = 4, the 1–3-error results
  are delayed until the quartic result is ready. The last stage picks one of
  the two results by class.

### 3.2 Precomputation and error count

`bch_direct_precomp` forms the syndrome terms that all later stages share:

* D = S1³ + S3
* E = S1⁵ + S5
* G = S1⁷ + S7
* Δ = S3·D + S1·E
* c2 = S1·S7 + S1²·S3² + S5·D
* c3 = (S1·S7 + S1²·S3² + S3·E)·D + S5·D² + S1·E²
* c3z = S3·S7 + S5²

`bch_direct_determine` classifies the word from these terms:

| errors | t = 2 | t = 3 | t = 4 |
|---|---|---|---|
| 0 | S1 = S3 = 0 | S1 = S3 = S5 = 0 | S1 = S3 = S5 = S7 = 0 |
| 1 | S1 ≠ 0, D = 0 | D = E = 0 | D = E = G = 0 |
| 2 | S1 ≠ 0, D ≠ 0 | Δ = 0, D ≠ 0 | Δ = 0, S1 ≠ 0, c2 = 0 |
| 3 | — | Δ ≠ 0, D ≠ 0 | c3 = 0 with S1 ≠ 0 and D ≠ 0, or c3z = 0 with S1 = 0 |
| 4 | — | — | otherwise |
| fail | S1 = 0, S3 ≠ 0 | D = 0, E ≠ 0 | — |

* Three errors come in two forms. If E ≠ 0 the cubic reduces to X³ + X + k.
  If E = 0 it reduces to X³ + k, which has three roots only when m is even.
  For odd m the decoder flags the E = 0 case.
* The two-error test for t = 4 uses **S1·S7** where the original
  description of the method prints S1⁷. Only S1·S7 is satisfied by real
  two-error patterns. This was checked exhaustively against random
  patterns, and the three-error condition of the same description uses the
  same term.

### 3.3 One, two and three errors (`bch_direct_roots123`)

* **One error.** Λ(X) = 1 + S1·X has root S1^{-1} = α^{-j}. That value goes
  straight to the correction stage, marked as reciprocal.
* **Two errors.** Substituting X = S1·Y gives Y² + Y + D/S1³. The locators
  are X1,2 = S1·{D/S1³}_A.
* **Three errors, E = 0.** Substituting X = Y + S1 gives Y³ + D. The locators
  are X_i = {D}_C + S1.
* **Three errors, E ≠ 0.** Let s = (E/D)^{1/2}. Substituting X = s·Z + S1
  gives Z³ + Z + k with k = D/s³ = D^{5/2}·E^{−3/2}. The locators are
  X_i = s·{k}_B + S1. The scale factor has exponent **+1/2**. The original
  text gives the substitution with −1/2, but its own formula for k holds only
  with +1/2.

With `MID_REG = 1` (t = 3 and t = 4), a register separates the table lookups
from the back-substitution.

### 3.4 Four errors: from syndromes to a quartic (`bch_direct_elp4`)

The locator polynomial Λ(X) = Λ4·X⁴ + Λ3·X³ + Λ2·X² + Λ1·X + Λ0 has the
locators X_l as roots. It is built without any division. Newton's identities
for four unknowns give, with F = S7 + S1·S3² + S1⁷ + S1⁴·S3:

```
Λ4 = Δ                      Λ3 = S1·Δ
Λ2 = (E + D·S1²)·S3 + S1·F  Λ1 = D·Δ + S1·Λ2
Λ0 = D·F + E·(E + D·S1²)
```

For four errors Δ ≠ 0, so Λ4 ≠ 0.

### 3.5 Reduction to a depressed quartic (`bch_direct_k1k2`)

A quartic over GF(2^m) is solved by bringing it to one of two forms:

* Z⁴ + Z² + k1·Z + k2, the "with Z²" form, or
* Z⁴ + k1·Z + k2, the "without Z²" form.

The coefficients decide which of four substitutions applies:

| case | condition | substitution | k1 | k2 | form |
|---|---|---|---|---|---|
| `QC_DIRECT` | Λ3 = Λ2 = 0 | X = Z | Λ1/Λ4 | Λ0/Λ4 | without Z² |
| `QC_SCALE` | Λ3 = 0, Λ2 ≠ 0 | X = s·Z, s = (Λ2/Λ4)^{1/2} | Λ1·Λ4^{1/2}/Λ2^{3/2} | Λ0·Λ4/Λ2² | with Z² |
| `QC_INV` | Λ3 ≠ 0, q2 = 0 | X = 1/Z + x0 | q1/q4 | 1/q4 | without Z² |
| `QC_INV_SCALE` | Λ3 ≠ 0, q2 ≠ 0 | X = w/Z + x0, w = (q4/q2)^{1/2} | q1·(q4/q2³)^{1/2} | q4/q2² | with Z² |

The quantities in the last two rows are:

* x0 = (Λ1/Λ3)^{1/2}
* q1 = Λ3/Λ4
* q2 = Λ2/Λ4 + (Λ1·Λ3)^{1/2}/Λ4
* q4 = Λ0/Λ4 + Λ1·Λ2/(Λ3·Λ4) + (Λ1/Λ3)²

These come from putting X = 1/Y + x0 into Λ. The x0 is chosen so that the
cubic term cancels. The result is q4·Y⁴ + q2·Y² + q1·Y + 1.

Points worth knowing:

* **q1 is Λ3/Λ4.** It is not Λ3/Λ1, as one line of the original description
  reads. Only Λ3/Λ4 makes the substitution exact.
* **Λ3 ≠ 0 with Λ2 = 0** is not listed separately in the original case
  table. The reciprocal substitution does not need Λ2, so rows 3 and 4 handle
  it.
* **q4 = 0 raises the failure flag.** q4 is zero exactly when x0 is a root of
  Λ. x0 is always a root of the derivative Λ3·X² + Λ1, so x0 would then be a
  double root. A genuine four-error pattern has no double root, so no
  correctable word is lost.
* Λ3 = S1·Λ4, so Λ3 = 0 means S1 = 0. Random patterns almost never reach
  `QC_DIRECT`, `QC_SCALE` or `QC_INV`. The testbenches build such patterns on
  purpose.

### 3.6 Roots of the depressed quartic (`bch_direct_roots4`)

In characteristic 2, the sums of pairs of roots of a depressed quartic are
the roots of a resolvent cubic.

* **Form with Z².** The resolvent is b³ + b + k1, so its roots are
  b1, b2 = {k1}_B. Then:
  * T = {k2/(1 + b1⁴)}_A
  * Z1 = b1·{(1 + b1^{−2})·T}_A
* **Form without Z².** The resolvent is c³ = k1, so c1, c2 = {k1}_C. Then
  Z1 = c1·{{k2/c1⁴}_A}_A.

The other roots follow by addition: Z2 = Z1 + r1, Z3 = Z1 + r2 and
Z4 = Z1 + r1 + r2, where (r1, r2) is (b1, b2) or (c1, c2). The back-transform
of the chosen case then gives X1 … X4.

The four cases share one datapath, and a multiplexer selects by case. A
drawing with four parallel branches would compute the same values. Sharing
uses one set of tables instead of four, and each word uses only one case
anyway.

The failure flag is raised when any table reports no roots, or when a
quotient would need a zero divisor. This is how five or more errors that
were classified as four are caught.

### 3.7 Correction

`bch_locator_match` turns locators into an N − 1 bit error vector. Each
position j is compared with α^j, or with α^{−j} in the reciprocal one-error
form, using only constant comparisons, with no logarithm table. Then
`bch_correct` applies the rule from section 1.

## 4. The conventional decoder (`bch_conv_decoder`)

* **Cycle 1.** The syndromes S1 … S2t are computed by a constant matrix
  product. The Berlekamp–Massey state is initialised in the same register:
  Λ^(−1/2) = Λ^(0) = 1, d^(−1/2) = 1, d^(0) = S1, l = 0, ρ = −1/2.
* **Cycles 2 … 2t + 1.** t instances of `bch_bm_iter` run one after another,
  two cycles each:
  * First cycle: Λ^(μ+1) = Λ^(μ) + (d^(μ)/d^(ρ))·X^{2(μ−ρ)}·Λ^(ρ), and the
    new degree.
  * Second cycle: the next discrepancy d^(μ+1) = Σ_i S_{2μ+3−i}·Λ_i^(μ+1),
    summed over every coefficient whose syndrome index lies in 1 … 2t. The
    same cycle updates ρ when d^(μ) ≠ 0 and 2ρ − l^(ρ) < 2μ − l^(μ).
  * ρ is stored doubled (2ρ = −1 at the start), so all arithmetic on it is
    integer.
* **Cycle 2t + 2.** A fully parallel Chien search evaluates Λ(α^i) for all
  i. Correction follows, ending in the output register.
* **Failure.** The word is flagged when deg Λ > t, or when the number of
  roots differs from the degree.

The discrepancy sum deliberately covers more than the bound i ≤ μ in the
original algorithm listing. With that bound, terms are lost once the degree
of Λ exceeds μ, for example after two errors were found in the first
iteration. The full sum is the textbook form.

## 5. Where this RTL departs from, or adds to, the original description

| topic | this RTL |
|---|---|
| t = 4 two-error condition | S1·S7 instead of S1⁷ (3.2) |
| three-error scale factor | (E/D)^{+1/2}, consistent with the stated k (3.3) |
| q1 | Λ3/Λ4 instead of Λ3/Λ1 (3.5) |
| Λ2 = 0, Λ3 ≠ 0 | handled by the reciprocal cases (3.5) |
| q4 = 0 | failure, since it implies a double root (3.5) |
| four-error ELP | derived here from Newton's identities, no divisions (3.4) |
| quartic datapath | one shared, case-multiplexed path (3.6) |
| BM discrepancy | sum over all coefficients in range (4) |
| extension bit, t + 1 detection | rule of section 1 |
| pipeline register positions | chosen to meet the stated latencies 3 / 4 / 8 and 2t + 2 |
| interface, reset, bit order, field polynomial | own choices (section 1) |
| t = 2 latency | 3 cycles, as stated in cycles. One summary figure quotes 2 ns at 1 GHz for the same code; the cycle count is followed. |

Not modelled: the technology-specific timing, area and FPGA results. They
depend on a synthesis flow, not on the RTL.

## 6. Files

| file | contents |
|---|---|
| `rtl/gf_func.svh` | field polynomial, multiply, square, powers, table of α^k (included inside modules) |
| `rtl/gf_mul.sv`, `gf_inv_lut.sv`, `gf_sqrt_lut.sv` | multiplier, inversion, square root |
| `rtl/gf_quad_lut.sv`, `gf_cubic_lut.sv`, `gf_cube_lut.sv` | {}_A, {}_B, {}_C root tables |
| `rtl/bch_pkg.sv` | error class and quartic-case enums |
| `rtl/bch_syndrome.sv` | syndromes and overall parity |
| `rtl/bch_bm_iter.sv`, `bch_chien.sv`, `bch_conv_decoder.sv` | conventional decoder |
| `rtl/bch_direct_*.sv`, `bch_locator_match.sv` | direct decoder and its stages |
| `rtl/bch_correct.sv`, `bch_delay.sv` | shared correction, delay line |
| `rtl/bch_decoder.sv` | top level |
| `tb/bch_ref_pkg.sv` | log/antilog reference field, syndromes, random codewords (generator polynomial built from cyclotomic cosets), error-pattern generators |
| `tb/bch_dec_harness.sv` | streaming stimulus and checker shared by the decoder testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_bch_decoder_full` (top with defaults) and `tb_bch_decoder_sizes` (other code lengths) |

## 7. Verification

Each testbench checks against values computed independently. The reference
is a log/antilog field model in `bch_ref_pkg`, plus injected error patterns.
Each testbench prints `TB_RESULT checks=… failures=…` and has a watchdog.

* **Tables.** Exhaustive over GF(2^8), including every k for the root
  tables. The cube-root table is also checked at m = 7, where no k has three
  cube roots.
* **Precomputation, classification, ELP.** Random syndromes against the
  formulas, and real one- to five-error patterns against the expected class.
  The four-error polynomial must vanish at all four locators.
* **k1/k2 and quartic roots.** Polynomials c·Π(X + X_l) with random or
  specially built roots: sum zero, σ2 = 0, and q2 = 0. Also random
  polynomials, which must be solved if and only if they have four distinct
  roots. Every one of the four cases is required to occur.
* **Decoders.** Streams of random codewords carrying 0 … t + 1 errors:
  * mostly back to back, with random idle cycles;
  * some errors placed on the extension bit;
  * four-error patterns steered into each quartic case.

  Checked per word: the corrected word, the count, the failure flag and the
  exact latency. Each testbench fails if any error count, quartic case,
  extension-bit error, detected failure or idle cycle never happened.
* **Configurations simulated:**
  * direct t = 1, 2, 3, 4 and conventional t = 4 at N = 256;
  * the top with all defaults (`tb_bch_decoder_full`);
  * N = 16 … 1024 with t = 2 … 4 in both architectures, including the
    direct t = 4 decoder at N = 1024, and the conventional t = 6 at N = 256
    (`tb_bch_decoder_sizes`).

  The size sweep does not force the rare quartic cases at N ≠ 256; some
  small fields have no pattern that reaches them.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_bch_decoder_full \
    tb/bch_ref_pkg.sv rtl/bch_pkg.sv tb/tb_bch_decoder_full.sv -y rtl -y tb
./obj_dir/Vtb_bch_decoder_full
```

Replace the module name to run any other `tb_*` testbench.

## 8. Changing the design

* **Other codes.** Set `M` (3 … 12) and `T` on `bch_decoder`.
  * `DIRECT = 1` requires 1 ≤ T ≤ 4. Elaboration stops with an error
    otherwise.
  * `DIRECT = 0` accepts any T with 2T < 2^M − 1.
* **Other field polynomial.** Edit `gf_prim_poly` in `gf_func.svh`. The
  tables follow automatically. The reference model in `tb/bch_ref_pkg.sv`
  has its own copy of the polynomial (for m ≤ 10), so change it there as well.
* **Latency.** The direct decoder's latency is set by `LAT` in
  `bch_direct_decoder.sv`, which must match its register stages. The
  testbenches take the expected latency as a parameter of the harness.
* **Size.** Syndromes and Chien search grow as n·t multipliers or constant
  XOR trees. The root tables grow as 2^m entries.
