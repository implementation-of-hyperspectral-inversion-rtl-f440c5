# Spectrum inversion engines for Fourier-transform hyperspectral imaging

An imaging Fourier-transform spectrometer does not measure a spectrum. For every
pixel it records an **interferogram** `y`: M samples of light intensity taken at M
optical path differences. The spectrum `x` (N values) has to be computed from it,
and the cost of that step is paid once per pixel. This RTL computes it in hardware
in four ways and lets one input pick the method per pixel:

| method | what is computed | cost per pixel | character |
|---|---|---|---|
| FFT  | discrete Fourier transform of `y` | (M/2)·log2 M butterflies | fastest; lowest quality, assumes an ideal instrument |
| PINV | `x = A† y`, `A†` = pseudo-inverse of the instrument's transfer matrix | N·M multiply-adds | models the real instrument; noise is not controlled |
| TSVD | `x = V Ξ' Uᵀ y`, keeping only the R' largest singular values | R'(2N+M) multiply-adds | regularised by rank cut |
| TIK  | the same with Tikhonov weights `ξ/(ξ²+λ²)` on all R values | R(2N+M) multiply-adds | best quality; needs more input bits |

The design has two main ideas:

- **The FFT is a single-butterfly, memory-based radix-2 transform in block floating point (BFP).**
  The normalisation step that decides each stage's scale is moved *behind* the
  butterfly. This keeps the loop free of a feedback path, so it issues one butterfly
  per clock with no stall between butterflies.
- **Each matrix method is a matrix-vector product whose matrix is split by rows over
  K independent memories.** Each memory has its own multiply-accumulate lane, and all
  lanes share the one vector element read per clock. K memories give K rows per
  pass, so the run time falls almost exactly by K. The main configuration is K = 6.

All sizes are parameters. The defaults are N = M = R = 256, K = 6, 16-bit
interferogram samples and 16-bit coefficients with 12 fraction bits.

## Contents

- [Block-floating-point FFT engine](#block-floating-point-fft-engine)
  - [Two banks and the rotations](#two-banks-and-the-rotations)
  - [Post-butterfly normalisation](#post-butterfly-normalisation)
  - [Pipeline and timing](#pipeline-and-timing)
- [K-memory matrix-vector product](#k-memory-matrix-vector-product)
- [PINV engine](#pinv-engine)
- [Penalised-SVD engine (TSVD and TIK)](#penalised-svd-engine-tsvd-and-tik)
  - [Penalizer arithmetic](#penalizer-arithmetic)
- [Fixed-point formats](#fixed-point-formats)
- [Top level: `hsi_inversion_top`](#top-level-hsi_inversion_top)
- [Measured latencies](#measured-latencies)
- [Where this RTL departs from the reference design](#where-this-rtl-departs-from-the-reference-design)
- [Simulating](#simulating)
- [File map](#file-map)

---

## Block-floating-point FFT engine

`bfp_fft` holds the M complex points in memory. It runs log2 M stages, and each stage
makes M/2 passes of the one butterfly (`fft_butterfly`) over the data, in place.
All values of one stage share a single exponent (block floating point). The
mantissas are DW = 16 bits, and the engine reports the true result as
`mantissa · 2^exponent`.

One butterfly step goes through these parts, in order:

```
 fft_agu ──addr──► fft_bank_mem (2 banks) ──► pre_bf_rotation ──► fft_butterfly
    │ rot, twiddle index                                             │ (DW+2 bits)
    ▼                                                                ▼
 twiddle_rom ─────────── w ─────────────────────────────────►  bfp_shifter (>>shamt)
                                                                      │ (DW bits)
 leading_bit_calc ◄── every word written ◄── fft_bank_mem ◄── post_bf_rotation
    │ nbits at end of stage
    └──► next shamt = nbits − (DW−1−GUARD), exponent += shamt
```

### Two banks and the rotations

A butterfly needs two operands per clock, and each memory bank has one read port.
The points therefore sit in two banks, and each butterfly's pair must come from
different banks.

- **Which bank.** Point `i` lives in bank `parity(i)`, the XOR of all its index
  bits, at address `i >> 1`.
- **Why the pair never collides.** In stage `s` a butterfly pairs points `i` and
  `i | 2^s`. The two indices differ in exactly one bit, so their parities differ and
  their banks differ. `bfp_fft` checks this with an assertion on every butterfly.
- **Why rotations are needed.** Which of the two banks holds the "upper" operand
  changes from butterfly to butterfly.
  - `pre_bf_rotation` swaps the two bank outputs into operand order, by the
    parity of the upper index (`rot`, from `fft_agu`).
  - `post_bf_rotation` applies the inverse swap, so each result goes back to the
    bank its operand came from.
- Both rotation blocks are written for R banks (`dout[i] = din[(i+rot) mod R]` and
  its inverse), so they also serve a radix-R variant. The engine uses R = 2.

`fft_agu` turns the stage number and the butterfly counter `j` into the two
indices, the two bank addresses, `rot` and the twiddle index:

- the upper index is `j` with a 0 inserted at bit `s`;
- the twiddle index is `(j mod 2^s) · 2^(log2 M − 1 − s)`.

The points are loaded in natural order and stored in bit-reversed positions. The
transform is decimation-in-time, so the results come out in natural order.

### Post-butterfly normalisation

This is the heart of the FFT engine and the least obvious part of it.

In block floating point, a stage's inputs are scaled so that the largest value just
fits the word. That way small signals keep their precision and large ones do not
overflow. The scale comes from the **leading bit** of the largest magnitude in the
block, and finding it needs the whole previous stage.

There are two ways to do this:

- **Pre-butterfly (the classic way).** Shift stage T's inputs by what the
  leading-bit calculator found at the end of stage T−1. The shift then sits in a
  loop with the butterfly: the last result of T−1 must pass through the butterfly
  and the leading-bit logic before the first operand of T can be shifted. Once the
  butterfly takes more than a clock, this dependency forces either a gap between
  stages or a lower clock rate.
- **Post-butterfly (this design).** The shift is applied to the butterfly's
  **outputs**, on their way back to memory. The shift used while writing stage s
  comes from the leading bit of the results of stage s−1 (for stage 0, of the loaded
  samples). So a stage's own growth is corrected only one stage later, and two
  stages of growth can pile up before a shift removes them.

A radix-2 stage can grow a magnitude by up to 1 + √2 ≈ 2.41, a bit more than one
bit. Two successive stages therefore need about 3 bits of headroom, not the 4 a
naive count gives. The engine keeps **GUARD = 3** integer bits free: after each
shift the largest magnitude has `TARGET = DW − 1 − GUARD = 12` bits. The butterfly
itself works two bits wider (DW + 2) so that its unshifted result never wraps.

The shift amount is signed:

- **Scale down.** A positive shift is an arithmetic right shift (`bfp_shifter`),
  used when the data have grown past TARGET bits.
- **Scale up.** A negative shift is a left shift, used when the data are small, so
  weak interferograms gain precision instead of losing it.

The shifter saturates rather than wraps. The shifts add up into `exponent`, an
EW = 8-bit signed register.

`leading_bit_calc` ORs together the one's-complement magnitude of every word
written in a stage. `~v` is used for negative `v`, so −2^k counts as k bits, the
same as 2^k−1. The index of the highest set bit, plus one, is `nbits`. This needs
no comparator tree, and an OR register is the whole state.

### Pipeline and timing

A butterfly goes through four steps:

1. issue (address generation);
2. bank read and twiddle ROM;
3. two butterfly pipeline stages;
4. shift, rotate and write.

One butterfly is issued per clock. At the end of each stage the engine waits
DRAIN = 4 clocks, so that the next stage reads only words already written and the
leading-bit result is complete. Start to `done` therefore takes
`log2 M · (M/2 + 4) + 1` clocks, which is **1057 clocks for M = 256**.

The twiddle table (`twiddle_rom`) is computed while the design is elaborated. It
uses `$cos`/`$sin` in a constant function, with TW = 16-bit entries and 14
fraction bits so that +1.0 is exact. `inverse` conjugates the twiddles. The inverse
transform is not divided by M; that factor is simply part of the exponent the
caller applies.

## K-memory matrix-vector product

`kmem_matvec` is the common engine of every matrix method.

- **Storage.** The ROWS × COLS matrix is split by rows over K banks (`sdp_ram`),
  with one `mac_lane` (multiplier, then accumulator) per bank.
- **One clock.** Each clock the engine reads one vector element, broadcasts it to
  all lanes, and reads one coefficient from each bank.
- **One row.** After COLS clocks every lane has finished a row, and K rows finish
  together.

Two row layouts are available:

- `INTERLEAVE = 0` (contiguous blocks): bank k holds rows `k·BR … k·BR+BR−1`, with
  `BR = ceil(ROWS/K)`. This is what the row results need when they are collected
  into K output segments.
- `INTERLEAVE = 1`: bank k holds rows k, k+K, k+2K, …. A run limited to the first n
  rows then still keeps all K lanes busy. This is needed when TSVD uses only the
  first R' rows of Uᵀ.

A run over `n_cols` columns takes `rows_per_lane · n_cols + 3` clocks, where
`rows_per_lane` is `min(BR, n_rows)` for contiguous blocks and `ceil(n_rows/K)` when
interleaved. The +3 is the memory read, the product register and the final
accumulate.

Each row result is `(Σ products) >>> FRAC`, saturated to OW = 24 bits, and comes
with its global row number and a mask for rows past the end of the matrix. When K
does not divide ROWS, the last bank has rows that do not exist; the mask stops their
results from being stored.

## PINV engine

`pinv_engine` is a `kmem_matvec` over the N × M matrix `A†`, plus K small output
memories (one segment of N/K spectrum values per lane).

- **Loading.** The host writes `A†` one element at a time by (row, column). The
  engine computes the bank (`row / BR`) and the bank address.
- **Reading.** The spectrum is read back by index, one clock after the index is
  given.
- **Run time.** `ceil(N/K) · M + 3` clocks: **11011 for K = 6** and 65539 for
  K = 1.

## Penalised-SVD engine (TSVD and TIK)

The transfer matrix factors as `A = U Ξ Vᵀ` (singular value decomposition), with R
singular values `ξ_r`, so `A† = V Ξ⁻¹ Uᵀ`. Dividing by the small `ξ_r` is what
amplifies noise. Regularising therefore replaces the diagonal `1/ξ_r` by a
penalised weight `ζ_r`:

- TSVD: `ζ_r = 1/ξ_r` for r < R', and 0 beyond;
- TIK: `ζ_r = ξ_r / (ξ_r² + λ²)` for all r.

With R' = R (or λ = 0) both reduce to PINV. Both R' and λ may change from pixel to pixel, so `Ξ'` cannot be folded into the
stored matrices. The engine stores Uᵀ (R × M), V (N × R) and the values ξ, and
computes

```
O2 = Uᵀ y                         (K banks, interleaved rows, first R' rows only)
ζ  = penalise(ξ)  ─►  O1 = V·diag(ζ)   (sv_penalizer, then kmem_colscale)
x  = O1 · O2                      (K banks, contiguous rows, first R' columns)
```

The first line and the second line are independent, so they run side by side.

- **First line.** `kmem_matvec` with `INTERLEAVE = 1` computes O2, which is kept in
  a register array of R words.
- **Second line.** The penalizer computes ζ. Then `kmem_colscale` walks through V
  bank by bank and multiplies each element by the ζ of its column. It writes the
  products of O1 directly into the banks of the third product, so O1 is never
  stored twice.
- **Third line.** When both are done, a contiguous-row matrix-vector pass computes
  `x = O1·O2` over the first R' columns. Its results go into K spectrum segments,
  as in PINV.

**Shared lanes.** The first and third lines never run at the same time, so they
share one `kmem_matvec` and its K multiply-accumulate lanes.

- Each of its K banks holds a block of Uᵀ rows (interleaved) and, behind it at
  address `BASE2 = ceil(R/K)·M`, a block of O1 rows (contiguous).
- A run's `sel2` input picks the region, and with it the row layout and the row
  length.
- `kmem_colscale` writes O1 into the second region while the first is being read.
- The lane's vector input is switched from `y` to O2 for the third line.

The engine therefore has **2K multipliers**: K lanes plus K column scalers, as in
the reference, and one divider.

The work is `R'(2N + M)` multiply-adds divided by K. A run takes

```
max( ceil(R'/K)·M + 3 ,  P + 1 + ceil(N/K)·R' + 2 )  +  ceil(N/K)·R' + 5   clocks
```

where P ≤ R'(CW + 2) + 1 is the penalizer's time. At full rank this is **26633
clocks for K = 6**. Lowering R' shortens all three products: at the default size,
R' = 85 takes 8849 clocks with K = 6.

TSVD keeps the **first** R' stored values. The host must store the singular values,
and the matching rows of Uᵀ and columns of V, largest first.

### Penalizer arithmetic

`sv_penalizer` reads `ξ_r` and computes `num · 2^(2·FRAC) / den`:

- TSVD: `num = 1`, `den = ξ`;
- TIK: `num = ξ`, `den = ξ² + λ²`.

The division is a restoring divider, one quotient bit per clock. Each value takes
at most CW + 2 clocks.

Results that do not fit (a tiny ξ, or a zero denominator) saturate to the largest
positive code. Negative ξ are treated as 0.

One divider serves all R values. It runs while Uᵀy is being computed. At full
rank with K = 6, the penalizer followed by `V·diag(ζ)` (about 4.6k + 10.9k clocks)
is the longer of the two parallel paths, so the penalizer's 4.6k clocks show in
the run time. A faster divider (for example one producing two quotient bits per
clock) would shorten TIK and full-rank TSVD by up to that amount.

## Fixed-point formats

| quantity | width | format |
|---|---|---|
| interferogram `y` | DW = 16 | signed integer samples |
| `A†`, Uᵀ, V, ξ, λ, ζ, O1 | CW = 16 | signed, FRAC = 12 fraction bits |
| O2, matrix-method spectrum `x` | OW = 24 | signed, same scale as `y` |
| FFT mantissa | DW = 16 | signed, shared `exponent` (EW = 8) |
| twiddles | TW = 16 | signed, 14 fraction bits |

- **Narrowing.** Every narrowing is an arithmetic shift right by FRAC followed by
  saturation (`hsi_pkg::sat`), never a wrap-around. The testbench models mirror
  this exactly, so the matrix-method results are checked bit for bit.
- **Accumulators.** These are wide enough never to overflow:
  CW + VW + log2(COLS) + 1 bits.

## Top level: `hsi_inversion_top`

The top joins the three engines around one interferogram buffer.

**Loading, done once and kept:**

- `y_we / y_idx / y_data` write sample `y_idx` of the interferogram. The sample goes
  into the shared buffer used by the matrix methods, and also, with a zero imaginary
  part, into the FFT's bank memory.
- `c_we / c_sel / c_row / c_col / c_data` write one coefficient. `c_sel` (from
  `hsi_pkg::coef_sel_e`) picks the matrix:
  - `SEL_PINV_A`: `A†`;
  - `SEL_SVD_UT`: Uᵀ;
  - `SEL_SVD_V`: V;
  - `SEL_SVD_XI`: ξ, indexed by `c_col`.

**Per pixel:**

- Load `y`.
- Set `method`: `METH_FFT`, `METH_PINV`, `METH_TSVD` or `METH_TIK`.
- Set the method's knob:
  - `inverse` for the FFT;
  - `r_keep` (1…R) for TSVD;
  - `lambda` for TIK.
- Pulse `start`.

`busy` is high during the run and `done` pulses at the end. Then set `out_idx`;
one clock later `out_re` shows that spectrum point. For the FFT, `out_im` and
`out_exp` show the imaginary part and the block exponent; for the matrix methods
they read 0. Keep `method` steady until the spectrum has been read.

A `start` while busy is flagged by an assertion. The FFT transforms its own memory
in place, so reload `y` before a second FFT run on the same pixel.

M must be a power of two, for the FFT. N, R and K are free.

## Measured latencies

Clock counts from simulation at the default size (N = M = R = 256). The SVD column
uses full rank (R' = R, also the TIK case). For comparison, the reference HLS
implementations on a Zynq-7020 reported the figures in brackets for their own
(unstated) problem size, which the latency figures suggest is somewhat smaller than
256.

| K | PINV | TSVD/TIK |
|---|---|---|
| 1 | 65539 (53965) | 135689 (154673) |
| 2 | 32771 (27559) | 70153 (77918) |
| 3 | 22019 (18529) | 48649 (52118) |
| 4 | 16387 (14014) | 37385 (39218) |
| 5 | 13315 (11434) | 31241 (31693) |
| 6 | 11011 (9499) | 26633 (26318) |

FFT, M = 256: 1057 clocks (reference: about 4.3 k clocks).

**Storage.** PINV needs N·M·16 bits = 1 Mbit, about the 27 36-kbit block RAMs
reported for it. TSVD/TIK needs 3 Mbit for Uᵀ, V and O1; 73 to 78 block RAMs were
reported.

**Input precision.** A synthetic spectrum is sent through an orthonormal cosine
transform and back through the PINV engine, with the interferogram quantised to b
bits (`tb_workload_precision`). The reconstruction SNR is:

| bits | 4 | 6 | 8 | 10 | 12 | 14 | 16 |
|---|---|---|---|---|---|---|---|
| SNR (dB) | 13.3 | 23.3 | 31.0 | 43.2 | 53.3 | 57.8 | 58.7 |

The curve levels off near 58 dB, set by the 16-bit coefficients with 12 fraction
bits. Wider CW or FRAC raise that ceiling. Samples wider than 16 bits need a larger
DW.

## Where this RTL departs from the reference design

These are deliberate choices, or points the reference leaves open.

- **Problem size.** The reference does not state N and M. 256 is used because the
  FFT needs a power of two.
- **Order of the SVD products.** Uᵀy runs beside the penalizer and `V Ξ'`, as the
  reference's block diagram draws them, not strictly one after the other. Uᵀy and
  `O1·O2` share lanes, so the count stays at 2K multipliers.
- **Penalised values computed in hardware.** The reference shows `Ξ'` as an input.
  Here it is computed on chip each run, so that R' and λ can change per pixel without
  the host preparing new tables.
- **FFT details.** The following were not specified and are this design's choices:
  - the decimation-in-time ordering;
  - the parity bank mapping;
  - the 4-clock drain between stages;
  - the DW + 2 butterfly width;
  - truncation in the butterfly;
  - saturation in the shifter.

  The reference reports 5 multipliers for its FFT; this butterfly uses 4 real
  multipliers.
- **Block diagram versus text.** The reference diagram places the data shift before
  the butterfly. Its text prefers post-butterfly normalisation, which is what is
  built.
- **Ordering of singular values.** The reference describes the singular values as
  stored in increasing order. Truncation only makes sense when the largest are kept,
  so the engine keeps the first R' stored values and leaves the ordering to the host.
- **Not built:**
  - the host processor and its memory interface (the engines only expose load and
    read ports);
  - a DCT-based variant of the FFT inversion, which the reference only cites.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one:

- prints `TB_RESULT checks=<n> failures=<n>` and stops with `$finish`;
- has a watchdog that counts a failure if the test hangs;
- uses `$urandom` for stimulus.

Build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hsi_pkg.sv tb/tb_bfp_fft.sv \
          --top-module tb_bfp_fft -o sim
./obj_dir/sim
```

Useful tests:

| testbench | what it shows |
|---|---|
| `tb_bfp_fft` | 256-point forward and inverse FFTs of random, tiny and full-scale inputs against a double-precision DFT; exact latency; the exponent moves both ways |
| `tb_pinv_engine`, `tb_svd_engine` | bit-exact spectra against a fixed-point model; K not dividing N; several ranks and λ; latencies |
| `tb_hsi_inversion_top` | the whole core at N = M = 16, R = 12, K = 3. It counts every mechanism it exercises: forward and inverse FFT, scaling up and down, PINV, full and truncated TSVD, TIK and method switches |
| `tb_hsi_full` | the same sequence on the core at its default parameters (about 10 s) |
| `tb_workload_k_sweep` | PINV and full-rank TSVD for K = 1…6 at the default size; all K give identical spectra; prints the latency table above |
| `tb_workload_precision` | interferogram precision 4…16 bits through the full-size PINV engine: bit-exact results and the reconstruction SNR per precision |

The small unit tests (`tb_sdp_ram`, `tb_fft_agu`, `tb_leading_bit_calc`, …) each
check one block exhaustively or with random vectors.

## File map

`rtl/`:

| file | role |
|---|---|
| `hsi_pkg.sv` | method and coefficient-select enums, saturation helper |
| `hsi_inversion_top.sv` | top: shared `y` buffer, method select, output mux |
| `bfp_fft.sv` | BFP FFT engine (controller, exponent, pipeline) |
| `fft_agu.sv` | butterfly indices, bank addresses, rotation, twiddle index |
| `fft_bank_mem.sv` | R-bank data memory |
| `pre_bf_rotation.sv`, `post_bf_rotation.sv` | bank-to-operand swap and its inverse |
| `fft_butterfly.sv` | radix-2 DIT butterfly, two-stage pipeline |
| `bfp_shifter.sv` | signed shift with saturation |
| `leading_bit_calc.sv` | block maximum bit-length |
| `twiddle_rom.sv` | elaboration-time twiddle table |
| `kmem_matvec.sv` | K-bank matrix-vector product, one or two stored matrices |
| `mac_lane.sv` | one multiply-accumulate lane |
| `kmem_colscale.sv` | K-bank column scaling `V·diag(ζ)` |
| `sv_penalizer.sv` | TSVD/TIK weights by restoring division |
| `pinv_engine.sv`, `svd_engine.sv` | the two matrix-method engines |
| `sdp_ram.sv` | simple dual-port RAM with registered read |
