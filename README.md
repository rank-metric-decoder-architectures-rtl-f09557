# A pipelined Gabidulin decoder over GF(2^8) in normal-basis arithmetic

In random linear network coding, a packet arrives as an unknown linear mix of
the packets that were sent. Errors injected anywhere in the network are mixed
too. So the useful measure of damage is the *rank* of the error, not the number
of corrupted symbols. Gabidulin codes are the rank-metric counterpart of
Reed-Solomon codes. A codeword is a vector of n symbols from GF(2^m). Seen as an
m x n binary matrix, an (n, k) Gabidulin code corrects any error whose matrix has
rank at most t = (n-k)/2.

This RTL implements a hardware decoder for the (8,4) Gabidulin code over GF(2^8).
It corrects every error of rank 1 or 2 in an 8-symbol word. It reports a decoding
failure when it cannot decode, and then passes the word through unchanged. The
decoder is a five-stage block pipeline, so five words are in flight at once:

```
 r ──► syndromes ──► key equation ──► root space ──► Gabidulin's ──► error word ──► c, e
       (S = H r)     (RiBMA: S→Λ)     (E_j: Λ(E)=0)   algorithm (X_j)  (e, c = r+e)
   r, S and E travel alongside in pipeline buffers
```

## Why everything is in a normal basis

Every field element is held in the normal basis h_i = β^(2^i), i = 0..m-1, where
β is a root of the field polynomial. Bit i is the coefficient of h_i. This
choice makes the operations a rank decoder needs most either cheap or free:

* **Squaring is a one-bit rotation.** `a^2 = {a[M-2:0], a[M-1]}` and the square
  root is the opposite rotation. Linearized polynomials (Σ a_j x^(2^j)) are
  built entirely from such powers, so the shifts cost no gates.
* **The unit element is all ones**, and h_i is the one-hot vector e_i.
* **The code locators are the basis itself.** The code has n = m and
  h_0..h_7 as its locators. Then h_i^(2^l) = h_{(i+l) mod m} is a one-hot
  constant, so every syndrome multiplier is a constant multiplier.
* **Reading off error locations is free.** In the last step, the error location
  vector L_j of a locator X_j is simply the bit vector of X_j.

General products use a Massey-Omura multiplier (`gf_nb_mul`):
c_k = Σ λ_ij a_{i+k} b_{j+k}, indices mod m. The binary matrix λ is computed at
elaboration time from the field polynomial by the function `nb_lambda` in
`gf_pkg`. A different field therefore needs only a different `POLY` parameter.
`gf_pkg::nb_complexity` counts the ones in λ; this count is the usual complexity
measure C_N.

**Field polynomial.** The GF(2^8) polynomial often quoted for a minimal-C_N
normal basis is x^8+x^7+x^5+x^3+x+1. It has an even number of terms, so it is
divisible by x+1 and does not define a field. This design uses x^8+x^7+x^5+x^3+1
(`POLY_GF256 = 0x1A9`) instead. It is irreducible, has a normal basis, and its
C_N is 21, the minimum for GF(2^8). For GF(2^16), `POLY_GF65536 = 0x1BDAF` gives
C_N = 85. The testbench checks both values.

## The stages

### Syndromes (`syndrome_unit`, 8 clocks)

The syndromes are S_l = Σ_i h_i^(2^l) r_i, l = 0..2t-1. The received word is
shifted in one symbol per clock. Each of the 2t accumulators adds r_i times a
one-hot constant, so there are no general multipliers. This takes n clocks.

### Key equation: the RiBMA (`ribma`, `ribma_be`, 2t = 4 clocks)

This stage finds the error span polynomial Λ(x) = Σ_{j≤t} Λ_j x^(2^j). Its roots
form exactly the space spanned by the error values. The architecture is a
reformulated, inversion-free Berlekamp-Massey algorithm. It uses a linear array
of 3t+1 identical cells (`ribma_be`) and one control cell.

Each cell holds a pair (Δ̃_i, Θ̃_i). Each iteration it computes:

```
Δ̃_i ← Γ · Δ̃_{i+1} + Δ̃_0 · Θ̃_{i+1}
Θ̃_i ← (ct ? Δ̃_i : Θ̃_i)^2          (a rotation)
```

The control cell keeps a counter b and the scalar Γ:

* **When ct = (Δ̃_0 ≠ 0 and b ≥ 0):** b ← -(b+1) and Γ ← Δ̃_0^2.
* **Otherwise:** b ← b+1 and Γ ← Γ^2.

After 2t iterations, Λ_j sits in cell t+j.

**The hardest part to get right was the initialisation.** The register contents
that make this array equal to the plain (verified) Berlekamp-Massey recursion are
the following:

* Δ̃ starts as S_0..S_{2t-1} in cells 0..2t-1, with a one in cell 3t. The
  one represents Λ(x) = x.
* Θ̃ starts *one cell to the right*: Θ̃_k = S_{k-1}^2 for k = 1..2t, and the other
  cells start at zero. This is the product B(x) ⊗ S(x) for B(x) = x, already
  squared once.
* The input Θ̃_{3t+1} of the last cell is the constant 1 until the first
  iteration with ct = 1, and 0 after it. This input stands in for the B(x) = x
  term that has no cell of its own.

A simpler start, with Θ̃ equal to Δ̃ and zeros shifted in, does *not* give the
error span polynomial. For example, it goes wrong whenever S_0 = 1. The
initialisation above was checked against rank-0, 1 and 2 errors.

### Root space (`root_space`, `gauss_elim`, `ge_pe`)

Λ is linear over GF(2), so its roots form a vector space. The stage first
evaluates Λ on each basis element: Λ(h_i) = Σ_j Λ_j h_{i+j}. These are constant
multiplications and take one clock. The resulting 8 x 8 bit matrix M goes into a
pivoting elimination array. Next to M sits a matrix B, initially the identity,
which records every row operation.

The array is a grid of one-bit cells (`ge_pe`) with a small controller. Each
clock it does one of three things to the whole array:

* **Eliminate.** The top-left bit is 1. Every row i < m-1 becomes row i+1
  reduced by row 0, the pivot row moves to the bottom, and all columns rotate
  left by one. B gets the same row operations but no column rotation.
* **Shift up.** The top-left bit is 0, and some rows below may still hold a
  pivot. Row 0 moves down to position m-1-i, where i is the number of pivots
  found so far, and the rows in between move up.
* **Shift left.** No pivot exists in this column. The columns rotate left.

After m columns, the first m - rank rows of M are zero. The matching rows of B
are therefore linearly independent roots of Λ. These are the error values E_j.
This elimination handles singular matrices, which is essential here: the matrix
is always singular when there is an error.

**Latency.** For a full-rank matrix, the column costs add up to at most
m(m+1)/2 = 36 clocks. A column without a pivot costs a full search, so a very
rank-deficient matrix takes longer (64 clocks for the zero matrix). For words
that decode, the worst case seen in simulation was 26 + 1 clocks. Only words
that end in a decoding failure take longer than 36 clocks.

**Failure.** Decoding fails when Λ = 0, or when the root space dimension differs
from the q-degree of Λ (the highest j with Λ_j ≠ 0). In that case the roots do
not determine a unique error.

### Error locators: Gabidulin's algorithm (`gabidulin_solver`, ≤ 19 clocks)

With τ independent error values E_j known, the syndromes satisfy
S_l = Σ_j X_j^(2^l) E_j. This is a Moore-matrix system in the unknown locators
X_j.

1. **Forward pass.** One row per clock, τ-1 clocks in all, makes the Moore
   matrix triangular. For GF(2) it can be done without division:
   A_{i,j} = A_{i-1,j} + √(A_{i-1,j} A_{i-1,i-1}). The same step updates the
   syndrome column.
2. **Back substitution.** It runs from the last locator to the first. Each
   locator needs one inversion. The inversion is computed as
   a^(-1) = a^2 · a^4 ··· a^(2^(m-1)), a chain of squarings (free) and m-2
   multiplications, one per clock.
3. **Cost.** Each locator takes m+1 clocks, so the total is
   (τ-1) + τ(m+1) = 19 clocks for τ = 2. A zero pivot means the E_j were
   dependent, and it raises `fail`.

**Difference from a systolic design.** A fully systolic form moves the matrix
along a triangular array of cells, so the pivot is always in the upper-left
corner. This implementation keeps the matrix in a register array and selects
rows with multiplexers instead. The arithmetic and the clock budget are the
same; the layout is not.

### Error word (`error_word`, τ clocks)

The error word is e_i = Σ_j X_j[i] · E_j, and the output is c = r + e. One term
j is added per clock. One clock is used when τ = 0.

## The pipeline (`gab_decoder`)

The five units run concurrently on five different words. Buffers carry what
later stages still need:

* the received word, through four buffers;
* the syndromes, to the key equation stage and to Gabidulin's algorithm;
* the error values, from the root space stage to the error word stage;
* the failure flag.

The pipeline advances in lock step. All units start together, and only when
every one of them is idle. The throughput is therefore set by the slowest stage,
normally the root space elimination.

**Interface.**

* **Input.** A word is accepted on a clock edge where `in_ready` is high. The
  source holds `r_in` and raises `in_valid`. `in_ready` is high for one clock
  each time the pipeline advances.
* **Output.** `out_valid` pulses for one clock with `c_out`, `e_out` and
  `out_fail`.
* **Flushing.** The pipeline keeps advancing while words are still inside it,
  even without new input, so the last word always comes out.

**Measured timing at the default size.**

* A rank-0 word goes through in 43 clocks.
* With back-to-back input, accepted words are never more than 24 clocks apart.

For comparison, the stage latencies sum to n(n+3)/2 + (n+5)t = 70 clocks, and
the root-space bound is 36 clocks.

## Parameters and sizes

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `M` | 8 | field degree m, symbol width |
| `N` | 8 | code length n (must equal M: the locators are the normal basis) |
| `T` | 2 | rank of the errors corrected, t = (n-k)/2 |
| `POLY` | `0x1A9` | field polynomial (17-bit vector, bit i = coefficient of x^i) |

The (16,8) code over GF(2^16), which corrects errors of rank up to 4, uses
M = N = 16, T = 4 and `POLY = gf_pkg::POLY_GF65536`. Nothing else changes.
`tb_gab_decoder16` runs it against a separate GF(2^16) reference model. At that
size a rank-0 word goes through in about 80 clocks, and words are at most 72
clocks apart. The worst-case estimates are 236 clocks of latency and 136 clocks
of root space elimination.

## Where this RTL departs from the published architecture

* **Field polynomial for GF(2^8).** The published polynomial is reducible (see
  above), so this design uses 0x1A9, one term different.
* **Multiplier.** The published multiplier shares XOR subexpressions to get a
  smaller gate count. Here the plain Massey-Omura sum is written out, and any
  sharing is left to synthesis. The function is the same; the gate count is not
  claimed.
* **RiBMA start.** The initial register alignment and the injected constant
  differ from the published description, which does not decode as written. The
  counter test is b ≥ 0, with b ← -(b+1). The cell and the 2t-clock schedule are
  unchanged.
* **Elimination latency.** The published m(m+1)/2 bound is met for full-rank
  matrices and for every decodable word seen in simulation. Rank-deficient
  inputs, which only arise for words that fail to decode, can take up to m^2
  clocks.
* **Gabidulin's algorithm.** It uses a register array with row multiplexers
  instead of the moving triangular array. It takes (τ-1) + τ(m+1) clocks.
* **Failure rule.** A word is flagged when the root space dimension differs from
  the q-degree of Λ in either direction, or when Λ = 0.
* **Pipeline handshake.** Each stage spends one clock on its start and one on
  its done signal. The published stage latencies do not count these clocks.
* **Implementation figures.** No area, clock period or power figures are
  reproduced. The RTL has only been simulated and checked by synthesis front
  ends.

## What is not here

The same family of decoders extends to KK (lifted Gabidulin) codes, which also
handle erasures and deviations. That extension needs further blocks:

* reduction of the received subspace to a reduced row echelon form;
* minimal-polynomial construction;
* symbolic products of linearized polynomials;
* a generalised key-equation start.

None of those is included. Cartesian products of short codes for long packets
also rely on that extension, so they are not included either.

## Verification

Each module has a self-checking testbench in `tb/`. Reference values come from
`tb/gf_ref_pkg.sv`, which does its arithmetic in a polynomial basis and converts
to and from the normal basis by table. It therefore does not share the
Massey-Omura logic under test.

| Testbench | What it checks |
|-----------|----------------|
| `tb_gf_nb_mul` | all 256 × (all ones) products and random pairs against the reference; C_N = 21 and 85; unit, commutativity, squaring and distributivity at GF(2^16) |
| `tb_syndrome_unit` | syndromes of random words; exactly n clocks |
| `tb_ribma_be`, `tb_ge_pe` | single-cell update rules |
| `tb_ribma` | Λ vanishes on every error value; q-degree equals the error rank; exactly 2t clocks |
| `tb_gauss_elim` | rank; that the reported rows of B are independent null combinations; clock count equal to a software run of the same elimination procedure; ≤ 36 clocks at full rank, and exactly 36 for the reversed identity |
| `tb_root_space` | polynomials with a known root space, and random ones: dimension, that the roots are independent and span the right space, the failure flag, ≤ 37 clocks when decodable |
| `tb_gabidulin_solver` | exact locators for τ = 0..4; `fail` on dependent values; (τ-1) + τ(m+1) clocks |
| `tb_error_word` | error and corrected words; bypass; τ clocks |
| `tb_gab_decoder` | 200 words streamed back to back, at the default parameters |
| `tb_gab_decoder16` | the same for the (16,8) code over GF(2^16), errors of rank 0..4, with reference model `tb/gf16_ref_pkg.sv` |

What `tb_gab_decoder` covers:

* codewords with errors of rank 0, 1 and 2, which must be corrected exactly;
* some errors of rank 3 and 4, which must be flagged as failures (and passed
  through) or decode to a valid codeword;
* counts of input stalls, a full pipeline, failures, rank-0 words and rank-t
  words, each of which must occur at least once;
* the spacing between accepted words and the first-word latency.

To run a testbench with Verilator, compile the packages first:

```
verilator --binary --timing -Irtl -Itb rtl/gf_pkg.sv tb/gf_ref_pkg.sv rtl/*.sv \
    tb/tb_gab_decoder.sv --top-module tb_gab_decoder -o sim
./obj_dir/sim
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`.
