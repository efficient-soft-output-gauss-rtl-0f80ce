# Soft-output Gauss-Seidel detector for a 128 × 8 massive-MIMO uplink

A base station with Nr = 128 antennas receives Nt = 8 users at once. To separate them, the MMSE
detector has to solve the linear system W s = y_MF with

    W    = H^H H + N0 I        (8 × 8, Hermitian, positive definite)
    y_MF = H^H y

and then turn each estimate s_i into six soft bits (LLRs) for a 64-QAM decoder. Inverting W
exactly is expensive. Because Nr ≫ Nt, W is strongly diagonally dominant: its diagonal is close
to Nr and its off-diagonal entries are small. This design uses that fact three times:

1. **A good starting point.** A two-term Neumann series gives an approximate inverse
   `W2^-1 = D^-1 − D^-1 E D^-1`, where D is the diagonal of W and E is the rest. The initial
   estimate is `s0 = W2^-1 y_MF`.
2. **One cheap refinement.** The estimate is improved by Gauss-Seidel sweeps. One sweep is
   usually enough at this antenna ratio. The number of sweeps K is chosen at run time.
3. **Short storage.** The stored entries of W are compressed from 15 bits to 9 bits. The diagonal
   entries, which sit near Nr, are stored as their distance from Nr.

The SINR of each user comes almost for free from the diagonal of W. It scales the max-log LLRs.

`igs_top` holds ten independent detector cores, one per subcarrier. Each core (`igs_core`) runs
one detection at a time through four stages:

| Stage | Units | Work |
|---|---|---|
| 1 | PU: `mv_systolic` (MF), `rgm_array`, `w_compress` | y_MF and W from 128 streamed columns; W compressed and stored |
| 2 | `iscu` and `fs_unit` in parallel | initial solution s0; the GS matrix N' = Nr (D+L)^-1 |
| 3 | `gsmu` and `scu` in parallel | K Gauss-Seidel sweeps; SINR ρ_i and 1/μ_i |
| 4 | `lcu` | 6 LLRs per user, one user per clock |

## Number formats

All words are signed two's complement unless noted. The widths follow the published design. The
binary-point positions are this design's own choice. They are defined once in `igs_pkg`.

| Signal | Bits | Format | Note |
|---|---|---|---|
| H, entries of H^H | 15 | Q2.12 | unit-variance channel |
| y | 15 | Q4.10 | |
| N0 | 15 | Q4.10 | |
| W, y_MF | 15 | Q9.5 | range ±512, diagonal ≈ 128 |
| MAC accumulators | 22 | Q9.12 before rounding | |
| compressed W | 9 | 1 flag + 8 bits, Q7.1 | see below |
| s, s0, N', W2^-1, d^-1 | 15 | Q2.12 | normalised by Nr, see below |
| ρ (SINR) | 12 | unsigned Q10.2 | saturates at 1023.75 |
| 1/μ | 12 | unsigned Q1.11 | |
| z = s/μ (LCU input) | 12 | Q2.9 | |
| LLR | 10 | integer | saturating |

**Normalisation by Nr.** Every entry of W is about Nr times larger than what the solver needs.
A Q9.5 word read as Q2.12 is the same word divided by 2^7 = 128. So the units after the PU read
W and y_MF as W/Nr and y_MF/Nr without any arithmetic. The solution of (W/Nr) s = y_MF/Nr is the
same s. The diagonal reciprocal `d^-1` is therefore Nr/d_i, close to 1, and fits Q2.12 well.
The scale 2^7 is fixed by the two formats; the parameter `LOG2_NR` names it and must stay 7.
For Nr = 128 it equals the antenna count. A core built for Nr = 64 (`NR = 64`, `LOG2_NR = 7`)
works too, with the normalised diagonal near 0.5 and one bit less precision; `tb_igs_core_64`
runs that configuration.

## Preprocessing: two systolic arrays on one input stream

The PU takes one beat per clock. Each beat is one column of H^H (8 complex values) and one entry
y_k. A detection takes 128 beats. `in_valid`/`in_ready` let the source pause. A beat arriving
while `in_ready` is low is an error, and an assertion in `igs_core` flags it.

* **Matched filter (`mv_systolic`).** This is a linear chain of 8 complex MAC cells. Cell i
  accumulates `conj(h_ki) · y_k`. The vector entry moves one cell down per clock, so cell i must
  see its matrix entry i clocks late. The array delays the inputs internally, so the caller hands
  over a whole column in one beat.
* **Gram matrix (`rgm_array`).** This is a triangle of 36 cells, one per lower-triangle entry of
  W. Each row of the triangle receives its own entry of the column. That entry travels right
  through the row. At the diagonal cell it is conjugated and turned down the column. The cell at
  (i, j) therefore meets `h*_ki` from the left and `h_kj` from above, and accumulates their
  product. The diagonal cells add N0 in their output register.

Both arrays finish 2·Nt − 1 clocks after the last beat, when the skew has drained. Their 22-bit
accumulators are rounded to 15 bits. W is compressed and written into the register file. Only the
lower triangle is kept. The upper entries that the Gauss-Seidel step needs (L^H) are the
conjugates of stored ones, so they are rebuilt by `w_unpack` when read.

## Offset-flag compression of W

The real and imaginary parts of each W entry are compressed separately (`w_compress`). The
9-bit code is a flag and 8 remaining bits:

    flag = (2·w > Nr)          // the value is in the upper half, near Nr
    rem  = flag ? w − Nr : w   // rounded to one fractional bit, saturated to 8 bits

The decompressor (`w_decompress`) adds Nr back when the flag is set. The diagonal entries sit
near Nr = 128, so with the flag set they keep about ±64 of headroom at half-unit resolution.
Off-diagonal entries are of order √Nr and use the code without the flag. The compression error is
at most a quarter unit, about 0.2 % of a diagonal entry. Values that fall between Nr/2 and the
top of the remainder range saturate. With an unloaded 128 × 8 channel such values do not occur.

The published text describes the comparison against Nt/2 and an offset of Nt. The accompanying
block diagram and histogram use Nr, and only Nr makes the scheme work at these sizes. This design
uses Nr.

## Initial solution and the reciprocal table

`iscu` first takes the reciprocal of the 8 diagonal entries in parallel, with one `recip_lut` each.
A reciprocal unit works like this:

* It normalises its operand with a leading-one detector.
* It reads the 10 bits after the leading one as the address of a 1024-word × 15-bit table.
  Entry a holds `round(2^25 / (1024 + a))`, clipped to 15 bits. The table is built by a constant
  function at elaboration. It is read synchronously, so it can map to block RAM.
* It shifts the result back into place.

The latency is 3 clocks. The relative error is below 2^-10.

The approximate inverse is then built one row per clock. The datapath is combinational:

    W2^-1[i][j] = d_i^-1                           (i = j)
                = −d_i^-1 · w_ij · d_j^-1           (i ≠ j)

Finally, the MF array is used again to form s0 = W2^-1 · y_MF. It takes 2·Nt − 1 clocks. `done`
comes 3·Nt + 4 clocks after `start`.

## Gauss-Seidel matrix by forward substitution

The sweep is written as `s(k) = N' (y' + M s(k−1) / Nr)` with

* M = −L^H, the strictly upper part of −W;
* N' = Nr · (D + L)^-1;
* y' = y_MF / Nr.

`fs_unit` computes the lower-triangular N' by forward substitution. Row i needs rows 0 … i−1,
so it is done row by row with 8 complex MACs in parallel:

* row i takes i MAC clocks and one scaling clock;
* the diagonal of N' is d^-1, reused from the ISCU;
* the unit starts as soon as the ISCU reports `dinv_valid`.

The total is Nt(Nt+1)/2 + 1 = 37 clocks. This runs alongside the ISCU and is the longest part of
stage 2. The published design uses a dedicated forward-substitution systolic array that takes
3·Nt − 1 clocks. That array is not described in enough detail to copy, so this unit is the simple
replacement.

## The sweep: triangular arrays with a reversed schedule

`gsmu` holds two `tri_mv_systolic` arrays. Both products of the sweep are triangular:

* **mul-C:** c = M · s. M is strictly upper triangular, so row i uses only s_{i+1 …}.
* **mul-D:** s = N' · b. N' is lower triangular, so row i uses only b_{0 … i}.

In a plain linear array, cell p starts p clocks late and the product takes 2·Nt − 1 clocks. Each
triangular array instead feeds the vector in the order that lets every cell start at once.

* **mul-C (MODE 0)** feeds the vector reversed, s_7 first. Cell p works on row p and meets entry
  s_{7−(t−p)} at clock t. The entries it needs come first. The zeros of its row fall into the
  clocks before the skew would have let it start anyway.
* **mul-D (MODE 1)** feeds the vector in natural order, b_0 first. The cells work on the rows in
  reverse: cell p works on row 7 − p.

Either product finishes in Nt clocks plus one output register.

Between the two products, c is shifted right by log2(Nr) and added to y'. Then mul-D produces
s(k), which is fed back for the next sweep. One sweep takes 2·Nt + 3 clocks, against the
published 2·Nt + 1. The two extra clocks are the hand-over registers between the arrays.

## SINR and LLRs

With W' = W^-1 approximated by its diagonal, the post-equalisation gain is `μ_i = 1 − N0 / d_i`.
The SINR is `ρ_i = μ_i / (1 − μ_i)`.

`scu` computes these from N0 and the d^-1 that the ISCU already holds:

* x = N0 · d^-1 / Nr, which is 1 − μ;
* μ = 1 − x;
* ρ = μ · (1/x);
* 1/μ.

The two reciprocals come from two more `recip_lut` instances. The SCU handles one user per clock.
ρ saturates at 1023.75, about 30 dB. Above that, the LLR magnitudes are limited, which the
decoder tolerates.

`lcu` computes the max-log LLRs of 64-QAM:

    L_ib = ρ_i · ( min over symbols with bit b = 0 of |z − a|²
                 − min over symbols with bit b = 1 of |z − a|² ),   z = s_i / μ_i

A positive LLR favours a 1. With a Gray-labelled square constellation, the real and imaginary
parts separate into two 8-PAM problems.

* **Cost per level.** For each of the 8 levels, `|z − a|² − z² = a² − 2az` is a constant plus a
  multiple of z.
* **Bit metric.** Each bit's metric is the difference of two 4-way minima over these costs. This
  is exact, with no piecewise-linear approximation.
* **Levels.** The 8 levels are (2k − 7)/√42 in Q2.9, i.e. 79·(2k − 7).
* **Labels.** The labels use the binary-reflected Gray code k ^ (k >> 1). Bits 0–2 come from the
  real part and bits 3–5 from the imaginary part. The first bit of each triple is the sign bit.

The unit is three pipeline stages: z, then λ, then ρ·λ. It emits one user per clock on
`llr_valid`/`llr_user`/`llr`. The first user comes 4 clocks after start.

## Timing of one detection

| Stage | Clocks in this RTL | Published |
|---|---|---|
| PU: 128 beats + drain + store | Nr + 2Nt + 2 = 146 | 2Nt + Nr − 1 = 143 |
| ISCU ∥ FS | 4 + Nt(Nt+1)/2 + 1 = 41 | 3Nt − 1 = 23 |
| GSMU (K sweeps) ∥ SCU | 1 + K(2Nt + 3) + 1 = 21 / 40 / 59 | K(2Nt + 1) |
| LCU | Nt + 3 = 11 | Nt |
| **Total, K = 1 / 2 / 3** | **218 / 237 / 256** | 202 / 219 / 236 |

The totals are measured from `start` to `done` without input gaps, and the testbenches check them
exactly. At the published 308 MHz clock, ten cores give 10 × 48 bits per detection, i.e.
678 / 624 / 578 Mb/s for K = 1 / 2 / 3. The published figures are 732 / 675 / 626 Mb/s. Most of
the gap is the forward-substitution schedule described above. No clock frequency has been
measured for this RTL.

## Departures from the published design

* Forward substitution is row-sequential: 37 clocks instead of 23.
* Each sweep and each stage hand-over costs a few extra register clocks, so K = 1 takes 218
  clocks instead of 202.
* The binary points, the rounding (round half up everywhere), the Gray labelling, the 9-bit code
  split, and the contents of the reciprocal table are this design's own choices.
* The compressor uses Nr, not Nt, as explained above.
* The LLR unit is an exact max-log evaluation of its own design. The published work refers
  elsewhere for its insides.
* The ISCU also works in the normalised domain (W/Nr). It reuses the MF array for s0, as
  published.
* The upper triangle of W is not stored. It is rebuilt by conjugation.
* The input handshake, the run-time `k_iter` input (0 is treated as 1) and the synchronous
  active-low reset are this design's own.
* The ten cores share nothing. The published design does not say how its ten instances share
  inputs.

## Simulating

Every unit has a self-checking testbench in `tb/`. Each compares against a double-precision model
(`igs_tb_pkg`) written from the equations, not from the RTL. Each ends by printing
`TB_RESULT checks=… failures=…`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/igs_pkg.sv tb/igs_tb_pkg.sv \
        $(ls rtl/*.sv | grep -v igs_pkg) tb/tb_igs_core.sv --top-module tb_igs_core
    ./obj_dir/Vtb_igs_core

The package files come first because the other files import them. The testbenches:

* **`tb_igs_core`** runs one core at full size through five detections:
  * random Rayleigh channels;
  * 64-QAM data at SNRs from 10 to 35 dB;
  * K = 1, 2 and 3;
  * random input gaps.

  It checks the LLRs against the floating-point detector (the sign wherever the reference is
  clearly non-zero, and the value within a tolerance) and the exact latency. It counts each mechanism it exercises: every K,
  stalls, flagged and unflagged compressed entries, and LLR saturation.
* **`tb_igs_top`** runs all ten cores at the default size, at the same time, with different data
  and K per core and stalls on half of them.
* **`tb_igs_core_64`** repeats the core test with 64 receive antennas (`NR = 64`), the other
  configuration of the published fixed-point study. Its LLR tolerance is wider, 15 % instead of
  8 %, because the normalised values lose a bit there.
* **`tb_pu`** runs at a reduced size (Nt = 4, Nr = 16) through parameter overrides.

**Tolerances.** LLR comparisons allow a few units plus a few percent, which covers the 15-bit
datapath. Tighter tolerances hold for the individual units.
