# Approximate VVC intra angular prediction with averaged-coefficient MCM blocks

A VVC encoder tries every directional intra mode on every coding unit and
keeps the one with the lowest rate-distortion cost. For luma, every predicted
sample of every mode is a 4-tap filter:

    p(x, y) = Clip((f[k][0]*r[x+i0] + f[k][1]*r[x+i0+1] + f[k][2]*r[x+i0+2] + f[k][3]*r[x+i0+3] + 32) >> 6)

where `r` is the line of reference samples next to the block, `i0` the
integer part and `k` (0..31) the 1/32 fractional part of the projected
displacement of row `y`, and `f` one of two 32 x 4 coefficient tables: the
DCT-based interpolation filter `fC` or the smoothing filter `fG`. Together
the two tables hold 57 distinct coefficients.

In an ASIC the multiplications by these constants can be built without
multipliers, as multiple-constant-multiplication (MCM) blocks of shifts,
adders and negations. The cost of an MCM block grows with the number of
distinct constants it must produce. This design cuts that number by
approximating the tables: each column is split into runs of `n` consecutive
rows and every entry of a run is replaced by the run's average. With
`n = 16` each tap of each filter has only two distinct coefficients instead
of up to 32. The approximation is meant for the encoder's mode decision
only; the prediction that goes into the bitstream must stay exact, or the
decoder would drift from the encoder.

The RTL is a 512-sample-per-cycle accelerator built from equal prediction
units, each made of MCM blocks, control multiplexers and an add / shift /
clip stage. `n` is a parameter: 2, 4, 8, 16 (default) and 32 give the
approximate variants, and 1 gives an exact MCM datapath.

## The averaged coefficient tables

For run length `n`, the coefficient used at row `k`, tap `i` is

    f_n[k][i] = trunc( (sum of f[j][i] for j = n*floor(k/n) .. n*floor(k/n)+n-1) / n )

with `trunc` rounding toward zero. Truncation is the rounding that
reproduces the published worked example of the method. In that example, column
2 of `fC` averages to 1, 5, 11, 14, ... for `n = 2` (so 5.5 becomes 5). The
16-row averages of column 0 are -3.625 and -2.375, and they become -3 and -2.

With the default `n = 16` the whole table reduces to:

| filter | rows   | tap 0 | tap 1 | tap 2 | tap 3 | sum |
|--------|--------|------:|------:|------:|------:|----:|
| fC     | 0..15  |   -3  |   53  |   16  |   -2  |  64 |
| fC     | 16..31 |   -2  |   18  |   51  |   -3  |  64 |
| fG     | 0..15  |   12  |   28  |   19  |    3  |  62 |
| fG     | 16..31 |    4  |   20  |   27  |   11  |  62 |

So the MCM block of tap 0 must produce only -3x, -2x, 12x and 4x, and the
block of tap 2 only 16x, 51x, 19x and 27x. The approximated rows do not
always sum to 64. For example, the `fG` rows above have a gain of 62/64. The
clip stage absorbs the resulting excursions.

All tables are computed while the design is elaborated, by functions in
`intra_pkg`. No coefficient memory exists at run time. The exact tables are
the ones in the VVC standard. `fG` is written there as its closed form
`{16 - k/2, 32 - k/2, 16 + k/2, k/2}`.

## Datapath of one predicted sample

    r[0] -> mcm_block -> coef_mux --\
    r[1] -> mcm_block -> coef_mux ---+-> sum_shift_clip -> p
    r[2] -> mcm_block -> coef_mux ---|
    r[3] -> mcm_block -> coef_mux --/
                            ^
                     filter, k (control)

* **`mcm_block`** takes one reference sample `x` and outputs `c*x` for every
  coefficient `c` of the taps it serves. The output is an array indexed by
  `c` (-64..64), and unused indices are 0. Each distinct magnitude is built
  once, as the canonical-signed-digit sum of shifted copies of `x`. A
  negative coefficient is the negation of that network's output. `x*1`
  is `x` itself, `x*(-1)` is its negation and `x*0` is 0, so no adders are
  spent on them. A coefficient of 64 (exact table, `k = 0`) is a shift.
  The original blocks were produced by an MCM optimisation tool and can
  share more partial sums between constants. The CSD form is this design's
  simpler substitute: it computes the same products with more adders.
* **`coef_mux`** is the control multiplexer of one tap. It has
  `2 * 32 / n` inputs, one per (filter, row group). The group is `k / n`,
  which is the top bits of `k`. Which product feeds which input is fixed
  at elaboration.
* **`sum_shift_clip`** adds the four products and 32, shifts right
  arithmetically by 6 and clips to `0 .. 2^BIT_DEPTH - 1`. Sums below zero
  come from the negative `fC` taps. Sums above the range come from the
  overshoot of `fC`.

Widths: products are `BIT_DEPTH + 8` bits signed and the sum is
`BIT_DEPTH + 10` bits, which is enough for any `|c| <= 64`.

## Parallel units: sharing MCM blocks between samples

`pred_unit` predicts `SAMPLES` horizontally adjacent samples of one row.
They share the filter and `k`, because both depend only on the row and the
mode. The unit reads a window of `SAMPLES + 3` reference samples. Window
entry `j` is tap `j - x` of sample `x`, so entry `j` gets one `mcm_block`
that serves all taps `t` with `0 <= j - t < SAMPLES` (parameter
`COL_MASK`). In a 4-sample unit, the middle entries feed four samples
through four different taps from a single block.

With `SAMPLES = 1` the unit is the plain four-block datapath above. Larger
units, up to 64 samples, trade a wider reference window for fewer MCM
adders per sample. This design groups the samples of a unit within one row.
That grouping is its own reading of how the parallel units are organised.

## Control: from mode and row to `k` and `i0`

`angular_ctrl` holds the VVC `intraPredAngle` table. The angle runs from 32
down to -32 and back to 32 over the regular modes 2..66. The wide-angle modes
-14..-1 and 67..80 reach 35..512. For row `y` the block computes

    pos = (y + 1) * angle,   k = pos & 31,   i0 = pos >>> 5

It also flags non-directional modes (planar 0, DC 1, out of range),
wide-angle modes and horizontal-class modes (below 34). For horizontal-class
modes the same arithmetic applies with rows and columns exchanged. Building
the reference line for that case is the job of the reference sample buffer.

Two parts of an encoder's intra stage are not in this RTL:

* the reference sample buffer, which stores the neighbouring
  reconstructed samples and extends or projects them;
* the rule that picks `fC` or `fG` for a block, which in VVC depends on
  the mode and the block size.

The top therefore exports `i0` and the flags, and it takes the reference
windows and the filter choice as inputs.

## Top level: `intra_angular_accel`

Parameters: `BIT_DEPTH = 10`, `N_AVG = 16`, `TOTAL_SAMPLES = 512`,
`SAMPLES_PER_UNIT = 1`. There are `NU = TOTAL_SAMPLES / SAMPLES_PER_UNIT`
units. Each unit has its own `angular_ctrl` and `pred_unit`.

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; synchronous active-low reset of the output register |
| `in_valid` | in | this cycle's inputs are an operation |
| `mode[NU]` | in | signed mode, -14..80 |
| `row_y[NU]` | in | row within the block, 0..63 |
| `filt_sel[NU]` | in | 0 = `fC`, 1 = `fG` |
| `ref_ofs[NU]` | out | `i0` of each unit, combinational from `mode`/`row_y` |
| `ref_hor`, `ref_waip` | out | horizontal-class and wide-angle flags per unit |
| `ref_win[NU][SAMPLES_PER_UNIT+3]` | in | reference window starting at `r[i0 + xb]` (`xb` = unit's first column) |
| `out_valid` | out | `pred` holds a result |
| `out_dir_ok[NU]` | out | the unit's mode was directional; otherwise its samples are 0 |
| `pred[TOTAL_SAMPLES]` | out | predicted samples, unit `u` sample `s` at `u*SAMPLES_PER_UNIT + s` |

Timing: the path from `mode`/`row_y` to `ref_ofs` is combinational, and so is
the path from `ref_win` to the output register. The buffer must return the
windows in the same cycle. Results appear one clock after `in_valid` with
`out_valid`. A new operation can start every cycle, and there are no stalls.

### Throughput

A 64 x 64 region at 512 samples per cycle takes 8 cycles per mode and block
shape. The original sizing works as follows:

* square CUs: 65 angular modes for each of 5 square sizes;
* rectangular CUs: 28 wide-angle modes for each of 12 rectangular sizes;
* total: 8 x (65 x 5 + 28 x 12) = 5288 cycles per 64 x 64 region.

A 1080p frame holds 506.25 such regions, so it takes 2,677,050 cycles. At
30 frames/s the accelerator needs about 80 MHz. 4K and higher frame rates
scale this linearly.

## What follows the original design and what is this design's own

Taken from the design as published:

* the averaging method and its run lengths;
* an MCM datapath in which multiplexers select products under control bits,
  followed by add, shift and clip;
* the prediction equation at the top of this document;
* units that share MCM blocks across parallel samples;
* 512 samples per cycle from equal units;
* the coefficient sets of the 16-row blocks.

This design's own choices:

* 10-bit samples;
* truncation toward zero as the averaging rounding, inferred from the
  worked examples;
* CSD shift-add networks instead of the tool-generated adder graphs;
* the grouping of parallel samples within a row;
* the control encoding;
* the VVC `k`/`i0` arithmetic and angle table, with wide-angle modes
  67..80 (the original text gives the upper range as 66..80, which would
  overlap the last regular mode; VVC numbers it 67..80);
* the single output register, the valid/reset handling, zero output for
  non-directional modes, and the port layout.

The conventional multiplier datapath, with a coefficient ROM and four
multipliers, served as the reference point for the approximate design. It is
not included.

## Verification

Each module has a self-checking testbench in `tb/`. All of them use a
reference model, `tb_ref_pkg`, which spells out both tables and the angle
table in full and does its own averaging.

* `tb_mcm_block`: checks every output index of six differently
  parameterised blocks. The 16-row blocks must produce exactly the
  coefficient sets in the table above.
* `tb_coef_mux`: tags each product input, then sweeps all filters, rows
  and taps for n = 1, 2, 16 and 32.
* `tb_sum_shift_clip`: directed cases at the rounding and clip boundaries,
  plus random cases.
* `tb_pred_unit`: a single-sample n = 16 unit, a 4-sample n = 8 unit and
  an 8-sample exact unit, fed random windows and 0 / max patterns that
  drive both clip limits.
* `tb_angular_ctrl`: sweeps modes -16..82 and all 64 rows.
* `tb_intra_angular_accel`: end to end, with a 32-sample accelerator
  built from 4-sample units. The testbench models the reference buffer
  and gives every unit random modes, rows and filters, with idle cycles
  in between. It checks every sample one cycle later, and it requires
  each of these to occur: both filters, both clip limits, wide-angle,
  horizontal, non-directional, negative offsets, integer positions and
  idle cycles.
* `tb_accel_parallel64`: the same end-to-end test on two 64-sample units
  with 8-row averaging. Each unit covers a whole 64-sample row.
* `tb_intra_angular_accel_full`: the same random test on the accelerator at
  its default parameters (512 units). It then runs every one of the 93
  directional modes over a whole 64 x 64 block, which is 8 cycles of 8 rows
  per mode, back to back.

Run any of them with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/intra_pkg.sv tb/tb_ref_pkg.sv tb/tb_pred_unit.sv --top-module tb_pred_unit
    ./obj_dir/Vtb_pred_unit

Each testbench ends by printing `TB_RESULT checks=N failures=M`. The
512-unit testbench produces a large C++ model. Expect it to take minutes to
build.

## Changing the design

* Approximation: set `N_AVG` on the top to 1, 2, 4, 8, 16 or 32. Every
  table, MCM block and multiplexer follows automatically.
* Parallelism: set `SAMPLES_PER_UNIT` to a divisor of `TOTAL_SAMPLES`,
  for example 64 for eight 64-sample units. The reference windows widen
  to match.
* Bit depth: set `BIT_DEPTH`. All widths derive from it.
