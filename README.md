# Tridiagonal-seeded Neumann MMSE detector for massive-MIMO uplink

A base station with N antennas receives K users at once. To separate them it
needs the linear MMSE estimate

    s_hat = W^-1 · Γ^H · y,    W = Γ^H Γ + η² I      (W is K×K, Hermitian)

Γ is the N×K channel, y the received vector and η² the noise variance.
Inverting W exactly (Cholesky, Gauss-Jordan) is the expensive step.
With many more antennas than users, W is strongly diagonally dominant.
When the antennas are correlated, though, much of its weight sits on the two
diagonals next to the main one.

This design takes the **tridiagonal band** X of W as its first guess at the
inverse and refines it with a short Neumann series:

    W^-1(1)   = X^-1
    W^-1(l+1) = Θ · W^-1(l) + X^-1,     Θ = I − X^-1 W = −X^-1 (W − X)

After L terms, W^-1(L) replaces W^-1. The band captures the neighbour
coupling that correlated antennas create, so Θ is small and few terms are
enough. The same hardware runs the classic diagonal seed (X = diag W) when
the sub-diagonal input is zeroed. In the RTL the two modes are called **TMA**
(tridiagonal) and **DNS** (diagonal).

The default configuration is N = 128 antennas, K = 8 users, 15-bit words and
up to 15 series terms.

## Data flow

```
 Γ rows, y ──► systolic array ──► + η² ──► W ──► tridiagonal ──► X^-1 ──► Θ = −X^-1 E ──┐
   (one row      (Γ^H Γ)                          inverter                 (tri_mult)    │
    per clock)                                                                          ▼
            └──► matched filter ŷ = Γ^H y                    systolic array (shared) ◄── Θ
                         │                                     Θ · W^-1(l) + X^-1 ◄─ loop
                         ▼                                               │
                   estimation:  s_hat = W^-1(L) · ŷ  ◄──────────────────┘
```

| File | Role |
|---|---|
| `rtl/tma_pkg.sv` | fixed-point types (`fx_t`, `cplx_t`), rounding, saturation, complex helpers |
| `rtl/recip_lut.sv` | table-based reciprocal |
| `rtl/tri_inv.sv` | folded tridiagonal (or diagonal) inverter |
| `rtl/tri_mult.sv` | tridiagonal × matrix multiplier that forms Θ |
| `rtl/systolic_pe.sv`, `rtl/systolic_array.sv` | lower-triangular array of complex MAC cells |
| `rtl/noise_add.sv` | W = Γ^H Γ + η² I, Hermitian completion |
| `rtl/matrix_adder.sv` | Θ·W^-1(l) + X^-1, Hermitian completion |
| `rtl/estimation_module.sv` | ŷ = Γ^H y and s_hat = W^-1(L) ŷ |
| `rtl/tma_detector.sv` | top: sequencing, register banks, mode and term count |

## Number format

Every value is a 15-bit two's-complement fixed-point number with 11 fraction
bits. That gives a range of [−8, 8) and a step of 1/2048. Complex values are
`{re, im}` pairs of these. Products are formed at full width and rounded
half-up once, then saturated.

Γ must be scaled by about 1/sqrt(N) (unit-power entries). The Gram matrix
then has diagonal entries near 1 and the inverse stays well inside the range.
The 15-bit word length is the paper's. The 3/11 split, rounding and
saturation are this design's choices.

## The tridiagonal inverter (`tri_inv`)

This is the least obvious part. For a Hermitian tridiagonal X with diagonal
w_ii and sub-diagonal w_i(i−1), the inverse is dense. The design keeps only
its band, which is a good approximation when the band dominates. Two
recurrences give that band.

A forward elimination runs down the diagonal:

    p_1 = w_11,     p_i = w_ii − |w_i(i−1)|² / p_(i−1)

Each pivot is then corrected by its lower neighbour:

    d_i = p_i − |w_(i+1)i|² / w_(i+1)(i+1)        (the term is 0 for i = K)

The band of the inverse follows:

    φ_ii     = 1 / d_i
    φ_i(i−1) = −(w_i(i−1) / p_(i−1)) · φ_ii

Both recurrences have the same shape: a ratio, a product with a conjugate
and a subtraction. The inverter therefore has one such path and uses it
twice per index:

* **Odd clock (phase A):** the reciprocal of the previous pivot gives the
  ratio −w_i(i−1)/p_(i−1). Subtracting its product with the conjugate from
  w_ii gives the new pivot p_i, which is held.
* **Even clock (phase B):** the reciprocal of w_(i+1)(i+1) gives the
  correction for d_i. A second reciprocal gives φ_ii, and φ_i(i−1) is the
  held ratio times φ_ii.

One index completes every two clocks. φ_i leaves 2(i+1) clocks after
`start`, so all K are done in 2K clocks, with `done` on the last. The
hardware is one real adder, two reciprocal units and the complex
multipliers of the shared path. With every sub-diagonal input at zero the
same circuit returns 1/w_ii, the diagonal inverse.

### Reciprocal

`recip_lut` normalises x so that its leading one sits at a fixed position. It
reads 2^10 midpoint reciprocals, entry `round(2^(RB+11) / (2^11 + 2·idx + 1))`
with RB = 14, and shifts back by the normalising amount. A constant function
computes the table at elaboration, so no data file is needed. Inputs ≤ 0
saturate to the largest value. The relative error is about 2^-11, which is
below the 15-bit output step for values near 1.

## Forming Θ (`tri_mult`)

Θ = −X^-1 E, where E = W − X is W with its band removed (or with only its
diagonal removed in DNS mode). Row t of X^-1 has at most three entries, so
row t of Θ mixes rows t−1, t and t+1 of E. The multiplier takes one row of E
per clock, together with φ_tt and φ_(t+1)t. Three banks of K complex
multipliers all see the same row E_t:

* **left:** φ_(t+1)t · E_t goes into a register. It is the first term of
  row t+1.
* **middle:** φ_tt · E_t plus the left register goes into a second
  register. It holds row t so far.
* **right:** conj(φ_t(t−1)) · E_t plus the middle register completes row
  t−1. The conjugated coefficient comes from the previous step's
  sub-diagonal input and is held one step in its own register.

That is 3K multipliers, two banks of K registers and 2K adders.

Row t−1 of Θ, negated, leaves one clock after step t. A final zero step
flushes row K−1, so Θ is complete K+1 clocks after the first row goes in.

## The shared systolic array

`systolic_array` is a lower-triangular grid of K(K+1)/2 complex MAC cells.
Cell (i, j) accumulates conj(a_i)·b_j over a stream of vector pairs:

* **Gram matrix:** a = b = a row of Γ, N vectors. This gives Γ^H Γ.
* **Neumann product:** a_i = conj(Θ_ik) and b_j = W^-1(l)_kj for k = 0..K−1.
  This gives (Θ·W^-1(l))_ij.

Only the lower triangle is computed. All three matrices involved (W, W^-1(l)
and X^-1) are Hermitian, so the upper triangle is the conjugate mirror.
`noise_add` and `matrix_adder` fill it in.

**Skew.** Operand a_i enters row i and is delayed i clocks. Operand b_j is
delayed 2j clocks and enters column j at the diagonal cell (j, j). From
there, a values move right and b values move down one cell per clock.
Control tokens `first`/`last` travel with a. Cell (i, j) therefore sees
vector k at clock k + i + j. Results appear along anti-diagonals, and the
last cell (K−1, K−1) finishes 2K−1 clocks after the last vector.

**Wavefront Neumann loop.** The term after W^-1(l) needs W^-1(l) row by row.
Entry (k, j) is needed at cell (j, j) at clock t0 + k + 2j, where t0 is when
the next product's first vector is issued. The previous product's cell
(k, j) (or (j, k) mirrored) finishes at t_prev + K + k + j. Issuing each
product K clocks after the previous one makes every entry final in time: the
condition reduces to j ≥ 0. The entry also stays valid until used: the next
product overwrites that cell only after j < K clocks more.

The top therefore injects operands directly at the diagonal cells, through
the `b_inj_en`/`b_inj` ports. Each column has a delay line of depth 2j that
carries (valid, first product, k). At its end the top injects either X^-1
(first product, from the loop register) or (Θ·W^-1(l−1) + X^-1)_kj, taken
combinationally from the array results through `matrix_adder`. The loop
itself adds no storage; only W^-1(L) is captured, once.

The accumulators are 2·15 + log2(N) + 2 bits wide and round once at the end,
so a 128-term Gram sum cannot overflow inside the array.

## Top-level sequencing (`tma_detector`)

| Phase | Clocks (no input stalls) |
|---|---|
| Stream N rows of Γ and y; the array accumulates Γ^H Γ; the matched filter accumulates ŷ | N |
| Tridiagonal (or diagonal) inverse, started 2 clocks after the last row, overlapping the array drain | 2K + 3 |
| Θ rows; capture W^-1(1) = X^-1 | K + 2 |
| L−1 Neumann products back to back, one drain, capture W^-1(L) | (L−1)K + 2K − 1 (only if L ≥ 2) |
| s_hat = W^-1(L) ŷ | K + 2 |

**Inverter overlap.** The array's diagonal cell (i, i) finishes 2i clocks
after cell (0, 0). The folded inverter also consumes one diagonal entry
every two clocks. It therefore starts 2 clocks after the last row and reads
W directly from the array results, through `noise_add`, while the array is
still draining. At that start time, index i's second phase needs
w_(i+1)(i+1) in exactly the clock that cell finishes. One clock earlier
gives wrong results, so the margin is zero by design. W is still captured
into a register once complete, for forming Θ.

Total latency from the first accepted row to `out_valid`:

* L = 1: N + 4K + 6 = 166 clocks;
* L ≥ 2: N + 6K + 5 + (L−1)K. At N = 128, K = 8 that is 197 for L = 3,
  205 for L = 4 and 213 for L = 5.

**Interface.** Rows are accepted when `in_valid && in_ready`, and gaps are
allowed. Mode (`cfg_mode`: `MODE_TMA` / `MODE_DNS`), term count
(`cfg_iter`, 1..15; 0 counts as 1) and `eta2` are sampled with the first
row. `in_ready` is low from the last row until `out_valid`, which is high
for one clock with `s_hat`. The reset is asynchronous and active-low.

With L = 1 the loop is skipped and s_hat = X^-1 ŷ. Assertions in the top
check three things:

* the shared array only finishes a product in a phase that expects one;
* the inverter reports results only in the inversion phase;
* the estimation unit reports results only in the estimation phase.

## Where this departs from the published architecture

* **Latency.** The published design overlaps every stage and reaches
  L(K+1) + N + 2K − 2 clocks, or 169 at L = 3. Here two overlaps are built:
  the inverter runs while the array drains, and the Neumann products run
  back to back. Θ, however, is formed only after the whole inverse, and the
  first product only after the whole of Θ. That gives 197 at L = 3. The
  published DNS latency is 2 clocks shorter than TMA. Here DNS takes as long
  as TMA, because the inverter still takes two clocks per index.
* **Matrix adder.** The published adder is serial (one real adder plus two
  complex adders). Here the whole band is added at once, so the sum is
  available in the same clock as the array result. The injection scheme
  relies on that.
* **ŷ = Γ^H y.** This is computed inside the estimation unit while Γ streams
  in, using K extra complex MACs. The published block diagram does not say
  where ŷ is formed.
* **Inverter bookkeeping.** The printed folded algorithm reuses the
  sub-diagonal storage for the pivot. The RTL keeps the pivot and the
  corrected pivot in their own registers. The arithmetic is the same.
* **Not built:**
  * the unfolded (one index per clock) inverter, an alternative to the
    folded one;
  * the "improved" Neumann series that the published work leaves for
    future study;
  * the ten parallel instances needed to meet the LTE-Advanced per-user
    rate;
  * a K = 16 configuration (the parameter K can be changed, but it is only
    simulated at 8).

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_recip_lut` | every positive 15-bit input against the exact reciprocal, within the table error |
| `tb_tri_inv` | random diagonally dominant Hermitian bands against a floating-point model of the recurrences; the 2(i+1) clock timing; DNS use |
| `tb_tri_mult` | Θ rows against a real-valued model, with idle gaps between rows |
| `tb_systolic_array` | bit-exact against integer sums for 1..128-term streams with gaps and extreme values; the 2K−1 drain; the same results when every column operand is injected at the diagonal cells instead |
| `tb_noise_add`, `tb_matrix_adder` | exact fixed-point results, Hermitian symmetry |
| `tb_estimation_module` | bit-exact matched filter and matrix–vector product; K+1 timing |
| `tb_tma_detector` | full size (N = 128, K = 8, defaults) end to end; see below |

`tb_tma_detector` generates Rayleigh channels with exponential antenna
correlation ζ^|m−n| (ζ = 0, 0.3, 0.5), 16-QAM symbols and Gaussian noise.
Each frame is checked three ways:

* against a floating-point model of the same algorithm (tolerance 0.03;
  the observed difference is below 0.004);
* against the exact MMSE solution, for information;
* for latency, against the formula above.

It covers both modes, L = 1 (bypass), L = 3..8, frames with random input
stalls, and a convergence check: L = 6 must come much closer to exact MMSE
than L = 1 on the same channel. At L = 3 the TMA error is about 0.02 (about
0.34 at L = 1). It counts how often each of these occurred and fails if any
never did.

To run one with Verilator:

```
verilator --binary --timing -Wno-fatal --top-module tb_tma_detector \
  rtl/tma_pkg.sv tb/tb_util_pkg.sv rtl/recip_lut.sv rtl/tri_inv.sv rtl/tri_mult.sv \
  rtl/systolic_pe.sv rtl/systolic_array.sv rtl/noise_add.sv rtl/matrix_adder.sv \
  rtl/estimation_module.sv rtl/tma_detector.sv tb/tb_tma_detector.sv
./obj_dir/Vtb_tma_detector
```

The block testbenches need `tma_pkg.sv`, `tb_util_pkg.sv`, the block and its
sub-blocks (`systolic_pe` for the array, `recip_lut` for the inverter).
Verilator lint reports a few unused signals: the estimation unit's `busy`
and `yhat` at the top, and the low product bits that rounding drops. It also
reports the reset used both by the flops and by the assertions'
`disable iff`. None of these affects the logic.
