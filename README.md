# A multiplierless 8x8 approximate Tchebichef transform

Block transform coders (JPEG, H.264) turn each 8x8 block of pixels into 64
coefficients whose energy is packed into a few entries. The discrete
Tchebichef transform (DTT) does this about as well as the DCT, but its exact
form needs irrational scale factors and many operations. This RTL implements
a low-complexity approximation of the 8-point DTT, proposed by P. A. M.
Oliveira, R. J. Cintra, F. M. Bayer, S. Kulasekera, A. Madanayake and
V. A. Coutinho ("Low-complexity Image and Video Coding Based on an
Approximate Discrete Tchebichef Transform"). The approximation is an integer
matrix with entries in {0, ±1, ±2}. A sparse factorization computes it with
24 additions, 6 shifts by one bit, and no multiplier. On top of that 1-D kernel
sits a streaming 2-D transform. It takes one row of 8 samples per clock and
returns one column of 8 coefficients per clock. The same hardware also
computes the approximate inverse.

All arithmetic is exact integer arithmetic: no rounding and no clipping. Every
node is wide enough for the worst case.

## The transform matrix

The 8-point approximation is `T = S * T8`. `S` is a diagonal scale and `T8`
is this integer matrix:

```
      n:  0   1   2   3   4   5   6   7
k=0       1   1   1   1   1   1   1   1
k=1      -2  -1  -1   0   0   1   1   2
k=2       2   0  -1  -1  -1  -1   0   2
k=3      -2   1   2   1  -1  -2  -1   2
k=4       1  -2   0   1   1   0  -2   1
k=5      -1   2  -1  -1   1   1  -2   1
k=6       0  -1   2  -1  -1   2  -1   0
k=7       0   0  -1   2  -2   1   0   0
```

Each row of `T8` follows the sign and shape of one Tchebichef polynomial.
`S = diag(1/sqrt(8), 1/sqrt(12), 1/sqrt(12), 1/sqrt(20), 1/sqrt(12),
1/sqrt(14), 1/sqrt(12), 1/sqrt(10))` gives each row unit length. The hardware
computes only `T8`, and `S` is never applied. A coder folds it into its
quantisation table: every coefficient is divided by a quantiser step anyway,
so dividing by a step that already includes the scale costs nothing. The
quantiser is therefore not part of this RTL.

`T8` is not exactly orthogonal. `T8 * T8^T` has small off-diagonal entries
(±2 against diagonal entries of 8 to 20). The inverse is therefore
approximated by the transpose: `x ≈ T8^T * S² * y`, where `S²` again belongs
in the dequantiser. The near-inverse therefore costs what the forward
transform costs. The reconstruction is not perfect, and that is a property of
the approximation, not of this RTL.

## The forward flow graph (`adtt8_fwd`)

The paper factors `T8 = P * A2 * A1 * B8`. Each factor is one layer of the
datapath. The node equations below are exactly what `rtl/adtt8_fwd.sv` computes,
with `<<< 1` meaning ×2.

**B8: butterflies** (8 additions). Each output pairs an input with its mirror:

```
b0 = x0 + x7   b1 = x1 + x6   b2 = x2 + x5   b3 = x3 + x4
b4 = x3 - x4   b5 = x2 - x5   b6 = x1 - x6   b7 = x0 - x7
```

The even rows of `T8` are symmetric and use only `b0..b3`. The odd rows are
antisymmetric and use only `b4..b7`. From here on the two halves never mix.

**A1: 10 outputs** (9 additions, 5 shifts):

```
a0 = b2                 a5 = 2 b4 - b5
a1 = b0 + b3            a6 = b4 + b5
a2 = b1                 a7 = b5 + b6
a3 = 2 b2 - b1 - b3     a8 = 2 b6 - b7
a4 = 2 b0 - b2 - b3     a9 = -2 b7
```

**A2: 8 outputs** (7 additions, 1 shift):

```
c0 = a0 + a1 + a2       c4 = a5
c1 = a1 - 2 a2          c5 = a6 + a7 + a9
c2 = a3                 c6 = a9 - a7
c3 = a4                 c7 = a8 - a6
```

**P: output order** (wiring only):
`y0 = c0, y1 = c6, y2 = c3, y3 = c5, y4 = c1, y5 = c7, y6 = c2, y7 = c4`.

This gives 24 additions and 6 shifts. The negation in `a9` costs no adder: a
synthesis tool folds it into the two subtractions that use `a9`. Compared
with other 8-point transforms, the integer DCT of H.264 needs 32 additions
and 14 shifts, and the fast algorithm for the exact DTT needs 44 additions
and 29 shifts. The equations above are read off the paper's four factor
matrices, and their product has been checked against `T8` entry by entry.

## The inverse flow graph (`adtt8_inv`)

`T8^T = B8^T * A1^T * A2^T * P^T`. Transposing a flow graph reverses every
arrow: a node that fans out becomes an adder, and an adder becomes a fan-out.
`B8` is symmetric, so the last layer is the same butterfly layer. The
resulting equations:

```
P^T:   c0=y0 c6=y1 c3=y2 c5=y3 c1=y4 c7=y5 c2=y6 c4=y7
A2^T:  w0 = c0           w5 = c4
       w1 = c0 + c1      w6 = c5 - c7
       w2 = c0 - 2 c1    w7 = c5 - c6
       w3 = c2           w8 = c7
       w4 = c3           w9 = c5 + c6
A1^T:  u0 = w1 + 2 w4            u4 = 2 w5 + w6
       u1 = w2 - w3              u5 = w6 + w7 - w5
       u2 = w0 + 2 w3 - w4       u6 = w7 + 2 w8
       u3 = w1 - w3 - w4         u7 = -w8 - 2 w9
B8:    x0 = u0 + u7 ... x7 = u0 - u7 (as in the forward graph)
```

This gives 5 + 11 + 8 = 24 additions and 6 shifts. Forward and inverse
together therefore cost 48 additions, the figure the paper quotes. The paper
gives the inverse only as a matrix and an operation count. The transposed
graph is this design's derivation.

## Word lengths

The paper gives no word lengths. The ones used here follow from the matrix:

* The largest row L1 norm of `T8` is 12 (row 3), and the largest column L1
  norm is 9. Every intermediate node of either graph stays below 16 times
  the largest input magnitude. One 1-D pass therefore grows a word by 4 bits
  (`adtt_pkg::GROWTH`), and each kernel runs at a single width, `IN_W + 4`.
* The 2-D transform grows a word by 8 bits. With 8-bit signed samples
  (JPEG level-shifts pixels to -128..127 before the transform), the output
  is 16 bits. The worst case is `|M| <= 144 * 128 = 18432`, and the
  testbench reaches `-18360`.

Inputs are signed two's complement. Unsigned pixels must be level-shifted
first (subtract 128), or the design must be instantiated with `IN_W = 9`.

## The 2-D datapath (`adtt2d`)

```
 in_row ──► adtt8_1d (rows) ──► transpose_buffer ──► adtt8_1d (columns) ──► out_col
 8 x IN_W        8 x IN_W+4        2 banks of 8x8          8 x IN_W+8
```

The 2-D transform of a block `f` is `M = T8 * f * T8^T`. The first stage
transforms each row of `f`. The transpose buffer collects the eight
transformed rows. The second stage transforms the columns of that
intermediate block. The paper builds its 2-D hardware the same way, from two
1-D units and a transpose buffer, but it does not describe the buffer or the
interface. Both are this design's own.

**1-D stage (`adtt8_1d`).** This stage contains both kernels and one output
register. The `inv` bit of the tag that travels with each vector selects
which kernel's result is registered. Latency is 1 clock, and throughput is
1 vector per clock.

**Transpose buffer (`transpose_buffer`).** This is a ping-pong pair of 8x8
register banks. Rows are written into the current write bank. When row 7
arrives, the bank is marked full and writing moves to the other bank. A full
bank is read out one column per clock and then released. A bank drains in
exactly 8 clocks and cannot refill in fewer than 8. The write side therefore
never catches a bank that is still being read, and the design needs no
back-pressure anywhere. An assertion (`a_no_overrun`) states this rule, and
a second one (`a_row_order`) checks that rows arrive in order. The block's
`inv` bit is stored per bank with row 0.

**Mode.** `in_inv` is sampled with row 0 of each block, and its value on
rows 1..7 is ignored. With `in_inv = 1`, both stages use the transposed
graph, and the design computes `T8^T * M * T8` (the near-inverse, still
unscaled). Consecutive blocks may use different modes. Each block's mode
travels through the pipeline with it, so no flush is needed.

### Interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid` | in | 1 | `in_row` carries the next row of the current block |
| `in_inv` | in | 1 | mode for the block, sampled with row 0 |
| `in_row[0..7]` | in | 8 × `IN_W` signed | row r of the block, r = 0..7 in order |
| `out_valid` | out | 1 | `out_col` carries a result column |
| `out_idx` | out | 3 | column index q, 0..7 in order |
| `out_inv` | out | 1 | mode of that block |
| `out_col[0..7]` | out | 8 × (`IN_W`+8) signed | `out_col[p] = M[p][q]` |

Rows may come with gaps, but blocks are not framed by any signal. After
reset, every 8 valid rows form a block. The result leaves in column order,
not transposed back to rows. A consumer that wants row order, for example a
zig-zag scanner, reads the columns into its own buffer.

```
value held after edge:  0   1   2  ..  7   8   9   10  11 .. 17
in_row sampled:         r0  r1  r2 ..  r7
row-stage register:     r0  r1  r2 ..  r7
transpose bank write:       r0  r1 ..  r6  r7
transpose column reg:                          c0  c1  c2 .. 
out_col:                                           c0  c1 .. c7
```

Column 0 leaves 10 clocks after row 0 enters. At full rate the design takes
a new block every 8 clocks and puts out one column every clock.

## Verification

Each testbench is self-checking. Each one compares against
`tb/adtt_ref_pkg.sv`, which holds `T8` as a literal table and computes
`T8 x`, `T8^T y` and `K f K^T` by plain matrix products. It is independent
of the factorization.

| testbench | what it runs |
|---|---|
| `tb_adtt8_fwd` | unit vectors, extreme vectors along every row's sign pattern, 4000 random vectors |
| `tb_adtt8_inv` | the same for the transpose at 12-bit input, plus forward-transform outputs as input |
| `tb_adtt8_1d` | 5000 clocks of random valid/mode/data; checks latency 1 and the kernel select |
| `tb_transpose_buffer` | 400 blocks, back-to-back and with gaps; checks data, column index, mode and the 2-clock read latency |
| `tb_adtt2d` | default parameters, 10000 blocks in both modes, mixed modes between back-to-back blocks, stretches with gaps, extreme blocks; checks every coefficient, the timing (column q at row 7 + 4 + q), and that each of these situations occurred |
| `tb_adtt2d_roundtrip` | encoder at the defaults, scale folded in by the testbench, decoder at `IN_W = 16` in inverse mode; 2000 smooth and random blocks; checks the decoder exactly and the round trip against the real-valued model `R f R^T`, `R = T8^T S² T8` |
| `tb_adtt2d_video` | `IN_W = 9`, one 4:2:0 CIF frame (2376 blocks) of residuals in -255..255, back to back; checks exactness, the 17-bit extreme, and 8 clocks per block |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/adtt_pkg.sv tb/adtt_ref_pkg.sv rtl/adtt8_fwd.sv rtl/adtt8_inv.sv \
  rtl/adtt8_1d.sv rtl/transpose_buffer.sv rtl/adtt2d.sv tb/tb_adtt2d.sv \
  --top-module tb_adtt2d -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb_adtt2d` makes 800000 checks and runs in under a second.

## Fit for the coding applications

* **JPEG encoding, 8-bit images.** This fits at the defaults. A 512x512
  image is 4096 blocks, or 32768 clocks, and needs no frame memory.
* **JPEG decoding.** The near-inverse runs on the same hardware, but its
  input is dequantised coefficients with both scales folded in. With 8
  fraction bits, `Mq = round(256 M[p][q] / (d_p d_q))` with `d = 8, 12, 12, 20,
  12, 14, 12, 10`, these need 16 bits, more than the default `IN_W = 8`. A
  decoder is therefore a second instance with `IN_W = 16` (24-bit output, to
  be divided by 256). `tb_adtt2d_roundtrip` runs such a pair. The decoder is
  exact, and the reconstruction misses the original block by 10.5 grey levels
  on average, by at most 8.6 on smooth blocks, and by up to about 100 on pure
  noise. That loss comes from `T8` not being orthogonal
  (`T8^T S² T8` has a diagonal of 0.90 to 1.15), not from the hardware.
* **H.264 encoding.** Residuals of 8-bit video need 9 bits, so use
  `IN_W = 9`. `tb_adtt2d_video` runs a full CIF frame this way. Three
  hundred frames take 5.7 M clocks.

## Where this RTL departs from, or goes beyond, the paper

* The paper reports FPGA and ASIC results (Virtex-6: 1671 CLBs, 5455 FFs,
  186.7 MHz; 0.18 µm CMOS: 0.366 mm², 225.5 MHz) but not the architecture
  behind them: pipelining, widths, buffer and interface are unknown. Their
  flip-flop count suggests deeper pipelining than the single register per
  stage used here. This RTL has not been synthesised for timing, and those
  figures should not be expected from it.
* The paper notes that "the factor of 2 of the first matrix row can be
  absorbed into the diagonal matrix". The printed factors already multiply
  to `T8` with no factor left over, so nothing is absorbed here.
* The run-time forward/inverse mode and the transposed inverse graph are this
  design's own. The paper says only that the same algorithm serves both
  directions.
* The diagonal scale and the quantiser are not implemented (see above).
* The source also derives a 4-point approximation by the same method. It
  turns out to equal the well-known H.264 4x4 integer transform, and the
  source builds hardware only for the 8-point one. Only the 8-point
  transform is implemented here.
