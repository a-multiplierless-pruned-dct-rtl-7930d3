# Pruned 8x8 approximate DCT in 10 additions per 1-D pass

Block-transform image and video coders (JPEG, H.26x, HEVC) spend much of their
arithmetic on the 8-point DCT, yet after quantisation most high-frequency
coefficients of an 8x8 block are zero anyway. This design combines two savings:

* **Approximation.** The DCT is replaced by the *modified rounded DCT*, an 8x8
  matrix `T` whose entries are only 0 and +-1. Applying it needs additions only.
* **Pruning.** Only the four lowest-frequency rows of `T` are kept (`T4`, below).
  In 2-D this keeps the top-left 4x4 of the 64 coefficients; the other 48 are
  treated as zero and never computed.

The result is a 1-D transform of 8 samples into 4 coefficients that takes 10
additions and no multiplications or shifts, and a 2-D transform of an 8x8 block
into a 4x4 block that takes 120 additions. The RTL computes the 2-D transform
exactly (no rounding anywhere) at one 8x8 block every 8 clock cycles.

## The pruned transform

```
        x0 x1 x2 x3 x4 x5 x6 x7
T4 = [   1  1  1  1  1  1  1  1 ]   X0  (DC)
     [   1  0  0  0  0  0  0 -1 ]   X1
     [   1  0  0 -1 -1  0  0  1 ]   X2
     [   0  0 -1  0  0  1  0  0 ]   X3
```

`X = T4 * x`. The true orthonormal approximation is `C4 = D4 * T4` with
`D4 = 1/2 * diag(1/sqrt2, sqrt2, 1, sqrt2)`. `D4` is not built: in a codec each
coefficient is divided by a quantiser step anyway, so the four scale factors
are folded into the quantisation table (for the 2-D block, coefficient
`B'[k][j]` is scaled by `d[k]*d[j]`). The hardware therefore outputs the integer
products with `T4` only.

The 2-D transform of an 8x8 block `A` is

```
B' = T4 * A * T4^T          (4x4)
```

and stands for the full 8x8 spectrum with `B'` in its top-left corner and zeros
elsewhere. The corresponding inverse is `A ~ C4^T * B' * C4` (the transpose of
`C4` is its pseudo-inverse). The inverse is not part of this RTL; only the
forward transform was built as hardware.

## The 10-adder network (`pruned_dct1d`)

Written out, the four rows of `T4` would need 7 + 1 + 3 + 1 = 12 additions.
Sharing partial sums brings this to 10. The network is a factorisation
`T4 = P * A3 * A2 * A1` into sparse stages:

| stage | adders | outputs |
|-------|--------|---------|
| A1    | 6      | `a0 = x0+x7`, `a1 = x1+x6`, `a2 = x2+x5`, `a3 = x3+x4`, `a4 = x5-x2`, `a5 = x0-x7` |
| A2    | 3      | `b0 = a0+a3`, `b1 = a1+a2`, `b2 = a0-a3` (plus `a4`, `a5` passed on) |
| A3    | 1      | `c0 = b0+b1` |
| P     | 0      | `X0 = c0`, `X1 = a5`, `X2 = b2`, `X3 = a4` |

In the original factorisation A1 forms `x2-x5` and A2 negates it; the RTL folds
the negation into the subtractor and forms `x5-x2` directly, which is the same
adder count. The critical path is three adders deep (A1 -> A2 -> A3, DC path
only).

Word growth: `X0` is the sum of eight samples, so an `IN_W`-bit signed input
needs `IN_W+3` bits to be exact. Every output of the unit is `IN_W+3` bits wide
(X1 and X3 would fit in `IN_W+1`, X2 in `IN_W+2`; the uniform width keeps the
transpose buffer regular).

The unit registers its four outputs: latency 1 cycle, one vector per cycle.

## The 2-D datapath (`pruned_dct2d`)

```
 in_row[0..7]        row coefs[0..3]          column[0..7]         out_coef[0..3]
 8 x IN_W  ---> [row pruned_dct1d] ---> [transpose_buffer] ---> [column pruned_dct1d] --->
                 IN_W -> IN_W+3          2 banks of 8x4           IN_W+3 -> IN_W+6
                 8 passes per block      ping-pong                4 passes per block
```

The transform is separable. The row unit transforms each of the 8 rows of the
block, giving an 8x4 intermediate `Y = A * T4^T`. The column unit then needs only
the 4 surviving columns of `Y`, not 8: each column of 8 values passes through
the same 10-adder network and gives one column of `B'`. That is why the 2-D
cost is 8 x 10 + 4 x 10 = 120 additions instead of 16 x 10.

### Transpose buffer (`transpose_buffer`)

The row unit produces `Y` one row (4 words) at a time; the column unit consumes
it one column (8 words) at a time. The buffer has two banks of 8x4 words of
`IN_W+3` bits (704 bits in all at the defaults):

* rows are written into the current write bank in order 0..7;
* on the clock edge that writes row 7, the banks swap and a read-out of the
  full bank starts: one column per cycle, columns 0..3 on four consecutive
  cycles, registered;
* meanwhile the next block's rows go into the other bank.

Filling a bank takes at least 8 cycles and emptying one takes 4, so the
read-out always ends before the other bank fills. There is therefore no stall
or back-pressure signal; the input may simply pause between rows. An immediate
assertion in the buffer flags a bank completing while the other is still being
read, which cannot happen with in-order rows.

### Timing

With `in_valid` high every cycle, one 8x8 block enters per 8 cycles and one
4x4 block leaves per 8 cycles (4 cycles with `out_valid` high, then 4 idle).
Per block:

```
edge   0..7  rows 0..7 sampled by the row unit
edge   1..8  row results written to the transpose buffer (row 7 at edge 8)
edge   9..12 columns 0..3 registered at the buffer output
edge  10..13 columns 0..3 of B' registered at the output (out_col = 0..3)
```

So column 0 of a block leaves 3 cycles after the edge that samples its 8th row,
and column 3 three cycles after that. The column unit is busy 4 cycles out of 8.

At a 288 MHz clock (the figure the original authors report after 45 nm
place-and-route) this is 36 million blocks per second. A 1920x1080 RGB frame is
97,200 blocks, i.e. 777,600 cycles, or about 370 frames per second; the
original authors quote 327 frames per second for the same case, which is not
what 36 M blocks/s gives for that frame size, so treat that figure with care.

## Interface of `pruned_dct2d`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock, rising edge |
| `rst_n` | in | 1 | synchronous, active low; clears the valid flags and buffer pointers |
| `in_valid` | in | 1 | `in_row` holds the next row of the current block |
| `in_row[0:7]` | in | 8 x `IN_W` signed | one row of the block, `in_row[n]` = column n |
| `out_valid` | out | 1 | `out_coef` holds one column of `B'` |
| `out_col` | out | 2 | which column `j` of `B'` (0..3); 0 marks a new block |
| `out_coef[0:3]` | out | 4 x (`IN_W+6`) signed | `out_coef[k] = B'[k][j]` |

Parameter `IN_W` (default 8). Samples are signed two's complement. For 8-bit
unsigned pixels subtract 128 first (as JPEG does), or set `IN_W = 9`. For HEVC
residuals of 8-bit video (range -255..255) `IN_W = 9` is needed. Output width
grows with it: `IN_W+6` bits (14 at the default) holds every coefficient
exactly; the largest magnitude, `64 * 2^(IN_W-1)`, occurs for the DC of a
constant block.

The rows of a block must arrive in order, top row first, and blocks must not
be interleaved. Nothing marks the first row of a block on the input: the
buffer counts rows modulo 8 from reset.

`dct_pkg` holds the shared constants `N_PTS = 8`, `N_KEEP = 4` and
`GROWTH = 3`.

## Where this RTL departs from, or adds to, the original design

The algorithm (the matrix `T4`, the 10-adder factorisation, the separable
row/transpose/column structure with two 1-D units and 120 additions per block)
and the block rate of one block per 8 cycles follow the original design. The
following are this implementation's own choices, because the original
description does not give them:

* row-parallel input, 8 samples per cycle (chosen to meet 8 cycles per block);
* word widths: signed input, full-precision growth of 3 bits per pass, no
  truncation or rounding;
* one register stage in each 1-D unit and at the buffer output (3-cycle
  latency); the original critical path and pipelining are not known;
* the ping-pong organisation of the transpose buffer and the column-by-column
  output order;
* synchronous active-low reset.

Not included: the `D4` scaling (belongs to the quantiser), the inverse
transform, and the JTAG hardware-in-the-loop harness used to test the original
FPGA prototype. The reported FPGA, 45 nm area and power figures describe the
original implementation, not this RTL. For orientation, this RTL at the
defaults has 203 flip-flops plus the 704 bits of the transpose buffer.

## Verification

All testbenches are self-checking; each prints
`TB_RESULT checks=N failures=M` and stops. Reference values are computed in the
testbench directly from the matrix `T4` (sums of products), not from the adder
network.

* `tb_pruned_dct1d` — 3000 vectors (random, full-scale +-extremes, small
  values) with random idle cycles; checks all four outputs and the 1-cycle
  latency.
* `tb_transpose_buffer` — 400 blocks, back to back and with idle cycles
  between rows; checks every word of the transposed read-out, the column
  order, the read-out timing and alternation of the banks.
* `tb_pruned_dct2d` — the whole design at default parameters: 12,000 blocks
  (random, full-scale patterns such as all +127, all -128 and checkerboards, and
  small values), every coefficient checked, plus the 3-cycle latency and the
  8-cycle block spacing. It counts and requires full-rate blocks, blocks with
  input gaps, read-outs of both buffer banks and full-scale blocks.
* `tb_image_workloads` — whole synthetic pictures in raster block order:
  512x512 grey, 416x240 grey and one 1920x1080 RGB frame (3 planes, 97,200
  blocks). Checks every coefficient and that each picture takes exactly
  8 cycles per block plus the pipeline latency.

Each simulation finishes in about a second. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl \
    rtl/dct_pkg.sv rtl/pruned_dct1d.sv rtl/transpose_buffer.sv rtl/pruned_dct2d.sv \
    tb/tb_pruned_dct2d.sv --top-module tb_pruned_dct2d
./obj_dir/Vtb_pruned_dct2d
```

For the other testbenches change the top module and file; `tb_pruned_dct1d`
needs only `dct_pkg.sv` and `pruned_dct1d.sv`, `tb_transpose_buffer` only
`dct_pkg.sv` and `transpose_buffer.sv`. Lint with
`verilator --lint-only -Wall` and the same file list.

## Files

| file | contents |
|------|----------|
| `rtl/dct_pkg.sv` | shared constants |
| `rtl/pruned_dct1d.sv` | 10-adder pruned 8-point transform, registered |
| `rtl/transpose_buffer.sv` | ping-pong 8x4 transpose buffer |
| `rtl/pruned_dct2d.sv` | top: row unit, buffer, column unit |
| `tb/tb_*.sv` | testbenches described above |
