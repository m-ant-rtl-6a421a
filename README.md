# MANT accelerator: group-quantized LLM inference with an adaptive 4-bit type

Large language models are usually quantized group by group: every 64
neighbouring weights (or KV-cache values) share one scale factor. A fixed
4-bit grid (INT4, or a float-like grid) fits some groups well and others
badly. MANT ("mathematically adaptive numerical type") gives every group its
own grid from a one-parameter family:

    value(i) = sign(i) * (a * |i| + 2^|i|) * s        |i| = 0..7, 4-bit code {sign, |i|}

With `a = 0` the grid is power-of-two (float-like, dense near zero); as `a`
grows it becomes nearly uniform (INT-like). One 8-bit coefficient `a` per group
therefore selects between sixteen types: fifteen values of `a`
(0, 5, 10, 17, 20, 30, 40, 50, 60, 70, 80, 90, 100, 110, 120) and plain INT.
The type code (0..15, 15 = INT) is stored with the group.

The hardware trick is that the dot product never needs the decoded weight:

    sum_k x_k * w_k = a * sum_k x_k*|i_k|*sgn_k  +  sum_k x_k * 2^|i_k| * sgn_k
                    = a * psum1 + psum2

so a systolic array only has to carry two integer partial sums, one from a
multiplier and one from a shifter, and `a`, the scales and the final fusion are
applied once per output, below the array. The same chip also quantizes its
own outputs on the fly: activations to INT8, the K cache to 4-bit MANT along
rows, and the V cache to 4-bit MANT along columns, choosing `a` per group from
the group's variance.

This repository holds synthesizable SystemVerilog of that accelerator: the PE
and PE group, the 32x32 array, the dequantization vector units and
accumulators, the 32 real-time quantization units (RQUs), the 12-cycle
divider, the variance-based type selector, the MANT encoder, the two-phase V
window for decoding, the banked buffers and a controller that runs a complete
tiled GEMM plus its output quantization.

## Number formats

| quantity | format |
|---|---|
| activation `x` | INT8, two's complement |
| weight, W8 mode | INT8, two's complement |
| weight, W4 mode | 4-bit MANT `{sign, |i|}`, two per byte (low nibble first) |
| weight, W2 mode | 2-bit `{sign, m}`, value `a*m + 2^m`, four per byte |
| type code | 4 bits, 0..14 index the `a` table, 15 = INT |
| scales `sX`, `sW`, output scale | 16-bit unsigned, 8 fraction bits |
| psum1, psum2 | 32-bit signed |
| dequantized value | 24-bit signed integer, saturating |
| variance thresholds | 16-bit, value / 65536, of variance / max² |

The scale and value formats are this design's choice. The source publication
describes the RQU accumulators as FP16 in one place and speaks of fixed-point
arithmetic in another; the RTL is entirely fixed point.

## PE and PE group (`mant_pe`, `mant_peg`)

A PE takes one INT8 activation and a 2-bit weight slice and produces two
11-bit results: `x * slice` (multiplier path) and `x << slice` (shifter
path). Four PEs make a PE group (PEG), the unit that sits at each of the
32x32 array positions. How the four PEs are used depends on `mode`:

* **W8**: all four PEs see the same activation; the weight byte is cut into
  four 2-bit slices (the top slice signed) and the products are added with
  shifts of 0, 2, 4, 6. psum2 is unused. The array acts as 32x32 INT8.
* **W4**: the byte holds two MANT weights and the PEG takes two activations.
  Weight `j` uses PEs `2j` and `2j+1`: PE `2j` multiplies by `|i|[1:0]`, PE
  `2j+1` by `|i|[2]` (shifted by 2 when added), giving `x*|i|`; the shifter
  of PE `2j` gives `x << |i|[1:0]`, shifted once more by 4 when `|i|[2]` is set,
  giving `x * 2^|i|`. The sign bit negates both terms. The array acts as 64x32.
* **W2**: four 2-bit weights and four activations, one per PE, each weight
  `{sign, m}` giving `x*m` and `x*2^m`. The array acts as 128x32.

Each PEG adds its terms to the psum1/psum2 coming from above and registers
them, and registers the activations it passes to the right.

## Array timing (`mant_array`)

The array is weight-stationary. Weights are written one PEG row per cycle.
Input row `r` enters column 0 after an `r`-cycle skew, activations move one
column right per cycle and psums one row down per cycle. Column `c` therefore
delivers the result for an input vector `R + c` cycles after the vector was
presented: the rightmost column is `C - 1` cycles behind the leftmost. This
staircase is what the real-time quantization units below the array exploit.
`out_vld[c]` marks valid psums at column `c`.

## Dequantization and accumulation (`mant_vector_unit`, `mant_accum`)

Because all 32 (or 64, 128) elements that meet in one array column belong to
one quantization group of the weights (group size 64 is at least the array's
accumulation depth), the scales can be applied after the array. Per column:

    comb  = (type == INT) ? psum1 : a * psum1 + psum2
    value = round(comb * sX * sW / 2^16)           saturated to 24 bits

`sW` and the type code are fixed per column and weight tile; `sX` belongs to
the input row, and since the columns deliver successive rows in the same
cycle, the `sX` of consecutive rows are stored in consecutive banks of the
quantization buffer so that all 32 columns read theirs without a conflict.
The accumulation unit adds the dequantized value of each K tile to the running
sum read back from the output buffer (the first K tile overwrites).

## Real-time quantization units (`mant_rqu`, `mant_rqu_array`)

Each RQU holds a comparator (largest |v|) and two accumulators (sum and sum
of squares, needed for the variance). They run in two modes:

* **Spatial**: the units are chained. RQU `c` combines its column's value with
  what RQU `c-1` passed one cycle earlier and hands the result on, so the
  array's staircase output flows straight through the chain and RQU 31 gives
  the max, sum and square sum of a whole output row, one row per cycle once
  the chain is full. A group of 64 elements spans two 32-wide column tiles:
  the result of the first round is fed back into RQU 0 (`cin_*`) for the
  second. This serves activations (INT8) and the K cache (MANT along rows).
* **Temporal**: every RQU accumulates its own column over successive rows,
  cleared at the start of a group. A group is 64 rows of one column. This
  serves the V cache in the prefill phase.

## Choosing `a`: variance selection (`mant_asel`)

Groups with a wide, flat spread prefer large `a` (INT-like grids); groups with
a few large values and many small ones prefer small `a`. The selector
computes the variance of the group normalized by its max,
`var = (s2/n - (s1/n)²) / max²`, and counts how many of 15 programmable
thresholds it reaches; that bin number indexes a 16-entry table that gives
the type code. No division is needed:

    (n*s2 - s1²) * 2^16  >=  thr_j * n² * max²

The thresholds and the bin table are inputs (`cfg_thr`, `cfg_bin_code`) because
the ranges depend on the data distribution and are calibrated offline; only
an example of such a range is known (a variance of 0.104 to 0.118 for `a = 40`).

## Encoding to MANT (`mant_enc`) and the divider (`mant_div`)

Given the group max and type, the scale is `max / grid(7)` and an element `v`
is coded as the index of the nearest grid point to `v / scale`. The encoder
does this without dividing, comparing `2|v| * grid(7)` with
`max * (grid(i) + grid(i+1))` for the seven midpoints and counting; ties go to
the lower index.

The divider is a restoring divider that produces `ceil(40/12)` quotient bits
per cycle, so it takes exactly 12 cycles and is not pipelined. The controller
uses it for the group scale (`round(max * 2^8 / qmax)`, 16 bits) and for INT8
element quantization (`round(127 * |v| / max)`), one divider per lane.

## The V window in decoding (`mant_vwin`)

During decoding one new V vector arrives per token, so a 64-element group
along the token dimension is only complete every 64 tokens. The window unit
works in two phases:

1. Each new vector is quantized at once to INT8 with per-channel scales
   (given as `1/scale` with 16 fraction bits, rounded, clamped to ±127),
   emitted on `q8`, stored in a 64-entry window, and folded into one
   temporal-mode RQU per channel.
2. When the 64th vector has been taken, the unit chooses a type per channel
   from the accumulated statistics and re-encodes the 64 stored tokens to
   4-bit MANT, one token per cycle (`mq`, `mq_tok`, `grp_code`, `grp_max`).
   `in_rdy` is low during this pass (65 cycles), which the top reports as
   `vstall`.

So all but the newest few V vectors are held in 4 bits, and the newest are held in
INT8 until their window fills.

## Top level and command flow (`mant_accel`)

The top holds four 32-bank buffers of 128 KB each (input, weight, output,
quantization; 512 KB in total), the array, 32 vector units, 32 accumulators,
the RQU chain, 32 type selectors, 32 dividers, 32 encoders, the V window and
the controller. A host port writes any buffer row and reads the output or
quantization buffer when the accelerator is idle; it stands in for the DRAM
interface, which is not part of the RTL.

A command (`cmd_start`, configuration held until `done`) computes
`(M x K) * (K x N)` with `K = cfg_kt` array tiles and `N = cfg_nt * 32` columns:

    for nt, for kt: load the weight tile (R+1 cycles), stream M input rows,
                    drain; dequantize and accumulate into the output buffer
    then, by cfg_oq:
      OQ_NONE   keep the 24-bit results in the output buffer
      OQ_ACT8   per row group of cfg_nt*32: max via the RQU chain, INT8 codes
      OQ_KMANT  per row group: max, sum, square sum, type, MANT codes
      OQ_VMANT  per 64-row column group (temporal): type, MANT codes
    if cfg_vdec: row 0 of the result goes to the V window

Group parameters leave on `qp_*` (type code, max, scale per lane) and codes
on `qo_*`. The buffer layouts are listed in the opening comment of
`rtl/mant_accel.sv`. With a spatial group of 64, set `cfg_nt = 2`.

## Where this design departs from the source publication

* All arithmetic is fixed point; the RQU is described there with FP16
  accumulators and comparator.
* The output quantization pass runs after the GEMM of a command and is not
  overlapped with the next tile's GEMM. The publication hides it behind the
  GEMM of later K iterations.
* INT8 element quantization uses one 12-cycle divider per lane per output row
  rather than a single shared divider; MANT element coding uses the
  comparator encoder rather than a division.
* The variance ranges that map to `a` are programmable rather than fixed.
* The V window computes its statistics on the INT8 values it stores.
* The activation-function unit and the DRAM interface are not built; the
  buffers are written and read through host ports instead.
* The buffer split (four 128 KB buffers), the buffer layout, the command
  interface and all widths are this design's own.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing -Irtl -y rtl +libext+.sv rtl/mant_pkg.sv \
        tb/tb_mant_peg.sv --top-module tb_mant_peg -Mdir obj_peg
    obj_peg/Vtb_mant_peg

The testbenches compute their expected values from the format definitions
(for example, the worked MANT example where `psum1 = 680`, `psum2 = 3824`,
`a = 17` give 15384), and check the latencies that are fixed by design: the
array's `R + c` cycles and the divider's 12 cycles.

`tb/tb_mant_accel.sv` runs the whole accelerator end to end: a W4 GEMM with
two K tiles and two column tiles followed by INT8 quantization (two-round
RQU groups) and an output-buffer read-back; a W8 GEMM with K-cache MANT
quantization; a 64-row W2 GEMM with V-cache temporal quantization; and 65
decode steps through the V window. It counts each mechanism and fails if one
never occurs. It builds the top with an 8x8 array of PE groups; it has also
passed with 16x16, which is the largest size simulated. The default 32x32
build is valid RTL but Verilator's C++ output for it is too large to compile
in reasonable time, so the full-size top has not been simulated.

## Files

`rtl/mant_pkg.sv` holds the shared constants, enums and the MANT grid
functions; every other file in `rtl/` is one module named after the file.
