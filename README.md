# Pruned 8-point MRDCT: a multiplierless 2-D block-transform core

Image and video coders transform 8x8 pixel blocks with the DCT, quantise the
coefficients, and in practice throw most of the high-frequency ones away. This
core exploits both facts. It replaces the DCT by the *modified rounded DCT*
(MRDCT), an approximation whose matrix holds only 0 and ±1, so the transform
needs nothing but additions. It also *prunes* the transform: only the first K
of the 8 coefficients of each 1-D pass are computed, and the adders that would
feed the others are removed. With the default K = 6, a 1-D pass costs 12
additions instead of 14, and the 2-D result keeps the 6x6 low-frequency corner
of each 8x8 block.

The 2-D transform is separable. A row pass transforms the eight rows of a
block, a transpose buffer turns the result into columns, and a second,
identical pass transforms the columns. Both passes are three-stage pipelines
of adders and registers. The core accepts one 8-pixel row per clock and
delivers one 8-coefficient column per clock, so it sustains one block every
eight clocks.

## The transform

Let T be the 8x8 MRDCT matrix (rows are coefficients X0..X7, columns are
samples x0..x7):

```
 X0 =  x0 + x1 + x2 + x3 + x4 + x5 + x6 + x7
 X1 =  x0                               - x7
 X2 =  x0           - x3 - x4           + x7
 X3 =            -x2           + x5
 X4 =  x0 - x1 - x2 + x3 + x4 - x5 - x6 + x7
 X5 =      -x1                     + x6
 X6 =      -x1 + x2           + x5 - x6
 X7 =                -x3 + x4
```

T_K is the first K rows of T. For an 8x8 block A the core computes

```
 B = T_K · A · T_K^T        (a K x K matrix)
```

and outputs it as an 8x8 block whose entries outside the top-left K x K
corner are zero. Because T_K is just the top of T, the result for a smaller K
is the corner of the result for a larger one. Coefficient X0 is the block sum
and X4 the alternating sum.

T is not orthonormal. A diagonal scaling S_K = sqrt(diag((T_K T_K^T)^-1))
would make S_K T_K orthonormal. Its factors are irrational. The core leaves it
out: a coder folds it into the quantiser step sizes at no extra cost. The
outputs are therefore unscaled. For example, a flat block of value v gives
B[0][0] = 64·v.

## The adder network and how pruning cuts it

One 1-D pass (`mrdct_1d`) is a three-stage network with a register after
each stage:

| stage | operations | outputs that leave the network here |
|---|---|---|
| 1 | a_i = x_i + x_(7-i) for i = 0..3; X1 = x0 − x7; X3 = x5 − x2; X5 = x6 − x1; X7 = x4 − x3 | X1, X3, X5, X7 (then delayed) |
| 2 | c0 = a0 + a3; c1 = a1 + a2; X2 = a0 − a3; X6 = a2 − a1 | X2, X6 (then delayed) |
| 3 | X0 = c0 + c1; X4 = c0 − c1 | X0, X4 |

X0 always needs the four stage-1 sums, the two stage-2 sums and the final
addition, which is 7 adders. Each further coefficient costs exactly one more
adder, so a K-coefficient pass has **K + 6** adders:

| K | coefficients kept | adders (stage 1 / 2 / 3) |
|---|---|---|
| 1 | X0 | 7 (4/2/1) |
| 2 | + X1 | 8 (5/2/1) |
| 3 | + X2 | 9 (5/3/1) |
| 4 | + X3 | 10 (6/3/1) |
| 5 | + X4 | 11 (6/3/2) |
| 6 | + X5 | 12 (7/3/2) |
| 7 | + X6 | 13 (7/4/2) |
| 8 | + X7 (full MRDCT) | 14 (8/4/2) |

The RTL builds the network with `if (K >= n)` generate blocks, so a pruned
adder and its registers simply do not exist. A pruned output lane is the
constant 0. This is why a synthesis report shows the upper lanes of `y` as
constant outputs; that is intended.

Every output lane has three registers. Coefficients that are finished in
stage 1 or 2 are delayed, so all K coefficients of a vector leave in the same
clock. This costs a few registers on the odd lanes; see the list of departures
below.

## Dataflow and timing of the 2-D core

```
 in_row ──► mrdct_1d (row pass) ──► transpose_buffer ──► mrdct_1d (column pass) ──► out_col
 8 x 8 bit     3 clocks, 8 x 11 bit      1 clock              3 clocks, 8 x 14 bit
```

* **Input.** Whenever `in_valid` is high, `in_row` holds one row of a block.
  Rows arrive in order 0..7 and every eighth valid row closes a block. There
  is no start-of-block signal: after reset the first valid row is row 0.
  Rows may come back to back or with idle cycles anywhere between them.
* **Row pass.** Row r becomes Y[r][0..7] = T_K · A[r][·] three clocks later.
  Only Y[r][0..K−1] can be non-zero.
* **Transpose.** When row 7 of a block enters the buffer, the buffer starts
  reading that block out column by column. Column k carries Y[0..7][k].
* **Column pass.** Column k becomes B[0..7][k] = T_K · Y[·][k] three clocks
  later. `out_idx` = k travels alongside.
* **Output.** Column 0 of a block is on `out_col` exactly
  `LAT_2D_LAST_ROW` = 7 clocks after the clock in which row 7 of that block
  was accepted. Columns 1..7 follow on the next seven clocks without a gap,
  with `out_valid` high. Columns k ≥ K are all zero. Within a column, entries
  m ≥ K are zero.

The column pass handles all eight columns, and 8 − K of them are zero. A
software count of the 2-D cost, (8 + K)(K + 6) additions per block, includes
only the K non-zero column transforms. In this pipeline the zero columns pass
through the same adders, which then do not toggle.

There is no backpressure anywhere. The output has to be taken when it
appears. A downstream quantiser can do that, since it works at the same rate.

## The transpose buffer

`transpose_buffer` holds two banks of 8 rows × K columns, used in ping-pong
fashion. Rows are written into one bank. When its row 7 arrives, that bank
is read out over the next eight clocks, one column per clock, while the
following block fills the other bank. The reader needs 8 clocks and the next
block needs at least 8 rows, so a bank is always empty before it is reused.
An assertion (`a_no_overrun`) states this rule.

Only the K columns that can be non-zero are stored. Entries K..7 of an
incoming row are ignored, and columns K..7 are emitted as zeros without being
read. With K = 6 and 11-bit words, the storage is 2 × 8 × 6 × 11 = 1056 bits,
against 1408 bits for a full 8x8 ping-pong buffer.

## Word lengths and ports

Each stage may grow the magnitude by one bit, and the core keeps full
precision. Nothing is rounded or truncated.

| signal | width (default) | meaning |
|---|---|---|
| `clk` | 1 | clock, all registers on the rising edge |
| `rst_n` | 1 | synchronous, active low. Clears the valid pipeline and the row and column counters; datapath registers are not reset |
| `in_valid` | 1 | `in_row` carries a row this clock |
| `in_row[0:7]` | 8 × `IN_W` = 8 × 8, signed | one block row, e.g. pixel − 128 |
| `out_valid` | 1 | `out_col` carries a column this clock |
| `out_idx` | 3 | column index k of B |
| `out_col[0:7]` | 8 × (`IN_W` + 6) = 8 × 14, signed | B[0..7][k] |

Parameters of `mrdct2d_top`:

| parameter | default | meaning |
|---|---|---|
| `K` | 6 | coefficients kept per pass, 1..8 (8 = full MRDCT) |
| `IN_W` | 8 | input sample width, signed |
| `OUT_W` | `IN_W` + 6 | output width; must be at least `IN_W` + 6 |

The middle word, between the passes, is `IN_W` + 3 bits wide. The bounds are
tight: an all −128 block gives B[0][0] = −8192, which is the most negative
14-bit value.

## What follows the source design and what does not

Taken from the source design:

* the MRDCT matrix;
* the three-stage adder network and its pruning to K + 6 adders;
* K = 6 as the proposed configuration;
* the row pass, then transposition, then the same pruned pass on the columns;
* one register stage after each adder stage;
* 8x8 output blocks with zeros in the pruned positions.

Choices made here, where the source is silent:

* **Word lengths.** The input is 8-bit signed with full-precision growth. The
  source gives no word lengths.
* **Equal latency on all lanes.** The published architecture drawing shows
  three registers on the lanes of X0, X2, X4, X6 but only two on those of X1,
  X3, X5, X7. Here every lane has three, so the K coefficients of one row
  leave together. Without this, a row-per-clock stream would mix rows.
* **Output order.** Coefficients come out in natural order X0..X7. The
  drawing lists them in the network's internal order (X0, X4, X6, X2, X7, X3,
  X5, X1).
* **Transpose buffer.** The source only says that a transpose buffer sits
  between the passes. The ping-pong organisation, the storage of K columns
  only and the framing by row count are this design's.
* **Handshake and reset.** The valid/no-backpressure handshake, the
  synchronous active-low reset and the `out_idx` side signal are this
  design's.
* **Scaling.** The scaling S_K is not part of the core, as discussed above.

The source also compares pruned versions of other approximations (BAS-2008,
BAS-2013) and describes the FPGA test set-up. Those are not part of this
design.

## Fitness for typical workloads

* **Still-image coding.** Take 8-bit grey-scale images, e.g. 512 × 512,
  split into 8x8 blocks and level-shifted to −128..127. These fit as they
  are. A 512 × 512 image is 4096 blocks, or 32,768 clocks. The default K = 6
  output also contains every smaller K, as its corner.
* **K = 7 or 8.** These need the parameter `K` set accordingly. At the
  default, X6 and X7 are not computed.
* **Video residuals (for example an HEVC 8x8 forward transform).** Residuals
  of 8-bit video lie in −255..255 and need `IN_W` = 9 (`tb_hevc_residual`
  runs this configuration on a CIF frame). The rate is no issue.
  CIF at 25 frames/s with 4:2:0 chroma is about 59,400 blocks/s, and the core
  takes a block every 8 clocks.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
The reference model (`tb/mrdct_ref_pkg.sv`) holds T entry by entry and uses
plain matrix products, not the fast network.

| testbench | what it exercises |
|---|---|
| `tb_mrdct_1d` | eight instances, K = 1..8, on random and extreme vectors with random idle cycles. Every coefficient, the zeros of the pruned ones, and the 3-clock latency are checked each cycle |
| `tb_transpose_buffer` | K = 6 and K = 8 on random rows, with junk in the ignored entries. Covers back-to-back blocks, gaps inside and between blocks, the exact output cycle and `out_idx` |
| `tb_mrdct2d_top` | the core at its default parameters, end to end. Covers random blocks, extreme blocks (all −128, all +127, a ±checkerboard, and the pattern that gives the largest positive B[4][4] = 8160), back-to-back and gapped streams, the latency and rate, and reads from both transpose banks. Each mechanism is counted and must occur |
| `tb_image_workload` | a 512 × 512 synthetic image (formula in the file) through eight cores, K = 1..8, back to back. Every output is checked, and the share of unscaled coefficient energy in each K x K corner is reported for information |
| `tb_hevc_residual` | the core with `IN_W` = 9 and K = 6 on one 352 × 288 frame of residuals (1584 blocks, back to back), including all −255, all +255 and sign-pattern blocks that reach ±16,320, close to the ends of the 15-bit output range |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mrdct_pkg.sv tb/mrdct_ref_pkg.sv \
    rtl/mrdct_1d.sv rtl/transpose_buffer.sv rtl/mrdct2d_top.sv \
    tb/tb_mrdct2d_top.sv --top-module tb_mrdct2d_top
./obj_dir/Vtb_mrdct2d_top
```

Each testbench finishes in well under a second.

To change K, override it on `mrdct2d_top` (for example `#(.K(8))`). To
widen the input, override `IN_W`. The transpose buffer and the column pass
follow from these.

## Files

| file | content |
|---|---|
| `rtl/mrdct_pkg.sv` | shared constants: N = 8, pipeline depth, latency, bit growth, the index type |
| `rtl/mrdct_1d.sv` | pruned 1-D MRDCT pass |
| `rtl/transpose_buffer.sv` | ping-pong transpose buffer |
| `rtl/mrdct2d_top.sv` | the 2-D core |
| `tb/mrdct_ref_pkg.sv` | reference matrix and golden model |
| `tb/tb_*.sv` | the testbenches listed above |
