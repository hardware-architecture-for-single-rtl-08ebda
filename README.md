# Single-iteration compressive-sensing reconstruction engine

A signal that is sparse in frequency, meaning its N-point spectrum has only a
few non-zero bins, can be rebuilt from a random subset of its time samples. The
single-iteration reconstruction algorithm (SIRA) does this without any
iterative optimisation. It works in two steps:

1. **Detect.** Take the DFT of the kept samples, with the missing samples set
   to zero. Random sampling spreads the missing energy over all bins like
   noise. The real components stand out above a threshold T computed from
   statistics, so every bin with |V(f)| > T is taken as a component.
2. **Estimate.** With the K component frequencies known, the amplitudes follow
   from one least-squares solve, X = (A_CS^H A_CS)^-1 A_CS^H v. Here A_CS is
   the M x K part of the inverse-DFT matrix for the kept rows and the detected
   columns, and v is the vector of kept samples.

This RTL builds the whole chain as one synthesizable engine. It takes N streamed
samples and returns the reconstructed N-point spectrum. The default size is
N = 512 samples, of which M = 256 are kept, with up to KMAX = 32 components.

## Dataflow

```
 x(n) ─► rand_select ─► v, P_v ─► fft_r2 ─► V(f) ─► threshold_compare ─► Cr(f)
           (Block 1)               (Block 2)           (Block 3)    ▲
 |A_i|, P ─────────────────────────► threshold_calc (Block 4) ──── T
 Cr ─► column_select (5) ─► pos[0..K-1]
 pos, P_v ─► row_select (6) ─► A_CS (M x K) ─► herm_transpose (7) ─► A_CS^H
 A_CS^H · A_CS ─► A_P (K x K)          A_CS^H · v ─► X_P (K)      [cmat_mul x2]
 A_P ─► cmat_inv ─► A_P^-1 ;  A_P^-1 · X_P ─► X_TP  [cmat_mul] ─► spectral_position ─► X(f)
```

`sira_ctrl` starts each block as soon as the blocks it depends on have finished.
The threshold calculation overlaps sample collection and the FFT. The A_P and
X_P products run at the same time. Each sequential block has the same
interface: a one-cycle `start` pulse, a `busy` level and a one-cycle `done`
pulse.

| Module | Role |
|---|---|
| `sira_pkg` | number formats, complex multiply and format conversions |
| `rand_select` | keeps M of N samples at random positions, and stores v and P_v |
| `fft_r2` | in-place radix-2 DIT FFT of the zero-filled measurement vector |
| `twiddle_rom` | the N values exp(-j2πk/N), used as FFT twiddles and as DFT-matrix elements |
| `threshold_calc` | threshold T, built from `seq_divider`, `pow_unit`, `log10_unit` (with `log2_lut`) and `nr_sqrt` |
| `threshold_compare` | Cr(f) = (\|V(f)\|² > T²) |
| `column_select` | list of the bins with Cr = 1, plus the count K and an overflow flag |
| `row_select` | A_CS(m,i) = exp(+j2π·P_v(m)·pos(i)/N) |
| `herm_transpose` | conjugate transpose, by column-wise reads and realigned writes |
| `cmat_mul` | serial complex matrix multiplier, instantiated three times |
| `cmem` | matrix register: one write port, several combinational read ports |
| `cmat_inv` | Gauss-Jordan inversion of A_P |
| `spectral_position` | places X_TP at the detected bins and writes zero everywhere else |
| `sira_ctrl` | sequencer |
| `sira_top` | the engine |

## Using the top

1. Hold `seed` (the LFSR seed) and `p_i` (P in Q0.32) stable.
2. Pulse `start`.
3. Stream the N samples on `x_i` while `x_ready` is high, qualified by
   `x_valid`. Samples are Q1.15 complex.
4. Stream the K component amplitudes |A_i| on `amp_i` (unsigned Q1.15) while
   `amp_ready` is high, qualified by `amp_valid`, with `amp_last` on the final
   one. Steps 3 and 4 may be interleaved.
5. Wait for `done` to pulse. `x_rd_addr` then selects a bin, and `x_rd_data`
   returns X(f) with 24 fractional bits.

These outputs stay valid until the next start: T (`t_o`), Cr (`cr_o`), K (`k_o`),
`overflow_o` (more than KMAX bins were above T, and only the first KMAX were
used), `singular_o` (a zero pivot was met), and the measurement vector through
`v_rd_addr`.

The amplitudes entering the threshold are the user's estimate of the component
strengths. The algorithm needs them to set the variance of the noise caused by
the missing samples.

## The threshold datapath

This is the most involved piece of arithmetic in the design. The unit computes

```
S_A = Σ |A_i|²
var = M·(N−M)/(N−1) · S_A
T   = sqrt( var · (−log10(1 − P^(1/N))) )
```

P is the probability that no noise bin crosses T. The steps run in this order:

1. **Divisions.** Two 40-bit restoring dividers (`seq_divider`) form
   (N−M)/(N−1) and 1/N in parallel. Each takes W cycles.
2. **P^(1/N).** `pow_unit` evaluates 2^(log2(P)/N). It first takes log2 P from
   the logarithm table. It then builds the power of two bit by bit: for each set
   bit k of the fractional exponent it multiplies by the constant 2^(−2^−k).
   The result is Q0.32 in 34 cycles.
3. **log10.** The logarithm of 1 − P^(1/N) comes from `log10_unit`.
   `log2_lut` finds the leading one, which gives the exponent x_e. The next 12
   mantissa bits address a table holding round(2^15·log2(x_m)). The sum
   x_e·2^15 + LUT is then multiplied by round(2^16/log2 10) = 19728 and shifted
   right by 16. The table is computed at elaboration time, so no data file is
   needed.
4. **Products.** var is multiplied by the positive logarithm, giving the
   radicand in units of 2^-30.
5. **Square root.** `nr_sqrt` is a 32-bit non-restoring square root, one
   iteration per clock, 17 cycles in all. It returns a 16-bit root and a 17-bit
   remainder. A wider radicand is first shifted right by an even amount 2s, and
   the root is shifted back left by s. This costs at most about 2^-16 of
   relative accuracy.

T comes out in the LSB scale of the initial DFT, 2^-15 of a sample unit. The
DFT is not divided by N.

**Accuracy.** Near P = 1, 1 − P^(1/N) is tiny. Its accuracy is limited by the
2^15 scale of the log2 table: the relative error is about
(2^-12/ln 2 + 2^-15)/|log2 P|. At P = 0.99 that is roughly 3 % on
1 − P^(1/N). Because it sits inside a logarithm and a square root, it is
well under 1 % on T.

## Number formats

| Type | Width per part | Scale | Used for |
|---|---|---|---|
| `sample_t` | 16 | Q1.15 | input samples, v |
| `spec_t` | 32 | LSB = 2^-15 | V(f): the FFT grows without any per-stage scaling |
| `tw_t` | 16 | Q2.14 | twiddles and DFT-matrix elements |
| `mat_t` | 40 | 24 fractional bits, range ±32768 | A_CS, A_P, A_P^-1, X_P, X_TP, X |

Complex products are formed at full width, 81 bits, and then shifted right
arithmetically by 24 bits. A_P holds sums of M unit-magnitude products, so its
diagonal equals M. Its inverse therefore has entries near 1/M, about 2^16 LSBs
at M = 256. That precision is what sets the error of the result.

## Matrix inversion

`cmat_inv` copies A_P into an internal K x 2K array, augmented with the
identity. It then runs Gauss-Jordan elimination. For each pivot p:

1. The reciprocal conj(a_pp)/|a_pp|² is formed. A 96-bit sequential divider
   computes 2^88/|a_pp|², and the result is rescaled.
2. Row p is scaled by the reciprocal.
3. Each other row r gets a_rp times row p subtracted from it.

There is no pivot search. A_P = A_CS^H A_CS is Hermitian positive definite
whenever the selected columns are independent, so its diagonal pivots cannot
vanish. A zero pivot sets `singular_o` instead. Cycle count:
K² + K·(99 + 2K + (K−1)(2K+1)), which is about 8.7 k cycles for K = 14 and
71 k cycles for K = 32.

## Memories and the transpose

A_CS is stored with its columns side by side at address m·KMAX + i.
`herm_transpose` reads it column by column and writes the conjugate to
i·M + m, so every row of A_CS^H occupies adjacent addresses. `cmat_mul` takes
base strides as parameters. The same serial multiply-accumulate engine then
computes A_CS^H·A_CS, A_CS^H·v (where v is read straight from the sample store
through its own read port) and A_P^-1·X_P. All memories are arrays with
combinational reads, one write port and several read ports.

## Timing at the default size

| Stage | Cycles |
|---|---|
| sample collection | N |
| FFT | N + M + log2(N)·N/2 = 3073 |
| comparator, column selection, spectral positioning | N each |
| row selection, transpose | M·K each |
| A_P | K·K·M |
| X_P | K·M |
| inversion | see above |
| X_TP | K·K |

In the end-to-end test a 14-component signal at P = 0.99 selects K = 21 bins.
The whole operation takes about 151 k cycles. The A_P product dominates.

## Departures from the published description

- **Threshold formula.** The printed equation for T squares the variance and
  divides by N. The drawn datapath does neither. This design follows the
  datapath. That matches an FFT without 1/N normalisation.
- **Amplitudes.** The drawn datapath sums plain amplitudes, while the variance
  formula sums their squares. Squares are used here.
- **Square-root width.** The text calls the square-root result both "17-bit"
  and W(15:0). A 16-bit root with a 17-bit remainder is built.
- **Matrix inversion.** QR-decomposition based recursive least squares is
  suggested for the inversion, but its structure is not given. Gauss-Jordan
  elimination replaces it.
- **Streaming.** The samples, the amplitudes and the DFT bins are handled one
  per clock, where the block diagrams draw them in parallel.
- **Chosen details.** The random selection method, all word widths, the DFT
  matrix sign convention (A(n,f) = exp(+j2πnf/N), so that v = A_CS·X), the
  overflow behaviour and the sizes N = 512, M = 256 and KMAX = 32 are choices
  of this design.
- **No inverse DFT.** The optional inverse DFT back to the time domain is not
  part of the engine.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each
one compares the module against values computed independently in
floating-point or integer SystemVerilog, and checks the latency where it is
fixed. Each ends by printing `TB_RESULT checks=… failures=…`, and each has a
watchdog.

`tb_sira_top` runs the engine at its default parameters on a 14-component
signal, twice:

- P = 0.99 must detect all 14 components. Every bin of the spectrum is
  compared against a floating-point least-squares solve over the same
  selected columns.
- P = 0.01 forces the column-overflow path.

This testbench also recomputes T, V(f) and Cr independently.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/sira_pkg.sv tb/tb_sira_top.sv \
          --top-module tb_sira_top -o sim && obj_dir/sim
```

Replace `tb_sira_top` with any other testbench name to run it. The full-size
end-to-end run takes about a second once compiled.

## Changing the design

- `N` must be a power of two.
- `M` must be less than N.
- `KMAX` bounds K and sets the size of every matrix memory.
- The number formats live in `sira_pkg`. Changing `MF` or `MWD` changes every
  matrix stage together.
- `LAW` sets the depth of the log2 table, 2^LAW entries. It is the main knob
  for threshold accuracy near P = 1.
