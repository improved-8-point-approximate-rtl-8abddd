# A 14-addition approximate 8x8 DCT in SystemVerilog

Block transforms in image and video codecs (JPEG, MPEG, H.264, HEVC) spend most
of their arithmetic on the 8-point discrete cosine transform. An *approximate*
DCT replaces the cosine matrix by a matrix of small integers whose rows are
still orthogonal, and leaves the remaining per-row scale factors to the
quantizer that follows anyway. The matrix used here has entries in {0, +1, -1}
only and a fast algorithm with **14 additions and no multiplications or
shifts**, which is as cheap as 8-point DCT approximations get.

This RTL implements that transform as a pipelined 1-D engine and builds a 2-D
8x8 transform from two of them with a transposition buffer between them,
following the published architecture of the transform (Potluri, Madanayake,
Cintra, Bayer, Kulasekera, Edirisuriya, "Improved 8-point approximate DCT for
image and video compression requiring only 14 additions"). The choices that
description leaves open are listed in the section "Departures and choices".

## The transform

The 1-D transform computes y = T* x with

```
        [ 1  1  1  1  1  1  1  1 ]
        [ 0  1  0  0  0  0 -1  0 ]
        [ 1  0  0 -1 -1  0  0  1 ]
   T* = [ 1  0  0  0  0  0  0 -1 ]
        [ 1 -1 -1  1  1 -1 -1  1 ]
        [ 0  0  0  1 -1  0  0  0 ]
        [ 0 -1  1  0  0  1 -1  0 ]
        [ 0  0  1  0  0 -1  0  0 ]
```

The DCT approximation itself is D* T* with D* = diag(1/sqrt8, 1/sqrt2, 1/2,
1/sqrt2, 1/sqrt8, 1/sqrt2, 1/2, 1/sqrt2). The hardware computes only T*; a
codec folds D* (and, in 2-D, D* on both sides) into its quantization table.

T* factors into sparse stages, T* = P4 A12 A11 A1:

| stage | operation                                                        | adders |
|-------|------------------------------------------------------------------|--------|
| A1    | a_i = x_i + x_(7-i) for i = 0..3; a4 = x3-x4, a5 = x2-x5, a6 = x1-x6, a7 = x0-x7 | 8 |
| A11   | b0 = a0+a3, b1 = a1+a2, b2 = a1-a2, b3 = a0-a3; b4..b7 = a4..a7  | 4      |
| A12   | c0 = b0+b1, c1 = b0-b1, c2 = -b2; c3..c7 = b3..b7                | 2      |
| P4    | y = (c0, c6, c3, c7, c1, c4, c2, c5), wiring only                | 0      |

P4 is the cyclic permutation (2 5 6 8 4 3 7) in 1-based indices: node 2 goes
to output 5, node 5 to output 6, and so on. The sign change in A12 is a
two's-complement negation, not counted as an addition.

## 1-D engine: `approx_dct8_1d`

Each of the three stages A1, A11, A12 ends in a register bank, so a vector
entering with `in_valid` at clock edge t leaves with `out_valid` after edge
t+3, and a new vector can enter every cycle. Samples are signed two's
complement. Each stage keeps full precision and grows the word by one bit,
so a W-bit input gives a (W+3)-bit output; nothing overflows and nothing is
rounded. Only the `in_valid` pipeline is reset; the data registers are not.

## Transposition buffer: `transposition_buffer`

This is the part that sets how the 2-D transform behaves, and it is the
least obvious. Rows of the row-transformed block arrive eight samples wide,
one per accepted cycle. The buffer is:

* a delay line of seven row registers, giving eight taps: tap 0 is the row
  at the input, tap m the row accepted m rows earlier;
* eight 8-to-1 multiplexers, one per tap, each picking one sample of its row;
* a 6-bit row counter i. Its low three bits j = i mod 8 are the row number
  within the block, its high three bits k = floor(i/8) mod 8 the column to
  pick. The select k reaches multiplexer m through a chain of m registers,
  so each multiplexer uses the select that belonged to the row it holds.

In the cycle in which row 7 of a block is at the input, tap m holds row 7-m
of the same block and every multiplexer selects sample k, so the eight
multiplexer outputs are column k of the block. Output lane i is wired to tap
7-i, which gives `col[i]` = X(i,k). `col_valid` marks that cycle and `col_k`
carries k. The outputs are combinational from the input row, so the buffer
adds no latency.

Consequences worth knowing:

* **One column per block.** A delay line keeps a row only for seven more
  rows, so by the time column k+1 could be read, row 0 of the block is gone.
  Each 8-row block therefore yields exactly one column, and the column number
  advances by one per block: 0, 1, ..., 7, 0, ...
* **A full 8x8 result needs the block eight times.** Presenting the same
  block in eight consecutive 8-row periods produces its columns 0 to 7. A
  stream of distinct blocks produces column (b mod 8) of block b.
* **Rows are counted from reset.** The first accepted row after reset is
  row 0 of a block and selects column 0. A cycle with `in_valid` low
  freezes the delay line and the counter, so idle cycles may fall anywhere.

```
accepted row i :  0  1  ...  7 |  8  9 ... 15 | ... | 56 ... 63 | 64 ...
row j          :  0  1  ...  7 |  0  1 ...  7 | ... |  0 ...  7 |  0 ...
col_valid      :  .  .  ...  1 |  .  . ...  1 | ... |  . ...  1 |  . ...
col_k          :  0  0  ...  0 |  1  1 ...  1 | ... |  7 ...  7 |  0 ...
```

## 2-D transform: `dct2d_top`

```
x (8 x L) --> approx_dct8_1d --(8 x L+3)--> transposition_buffer --(8 x L+3)--> approx_dct8_1d --> y (8 x L+6)
 rows            rows of X = A T*^T           column k of X            column k of T* A T*^T
```

| port        | dir | width          | meaning                                          |
|-------------|-----|----------------|--------------------------------------------------|
| `clk`       | in  | 1              | clock                                            |
| `rst_n`     | in  | 1              | synchronous, active low; restarts the row count  |
| `in_valid`  | in  | 1              | `x` holds a row                                  |
| `x[0:7]`    | in  | 8 x L signed   | one row of the 8x8 input block                   |
| `out_valid` | out | 1              | `y` and `out_k` hold a result column             |
| `out_k`     | out | 3              | column index k of the result                     |
| `y[0:7]`    | out | 8 x (L+6) signed | Y(0..7, k) of Y = T* A T*^T                    |

Timing: the column produced by a block appears on `y` six cycles after row 7
of that block was accepted (three cycles in each 1-D engine, none in the
buffer). Output columns are therefore at least eight cycles apart; an
assertion in `dct2d_top` checks this. The parameter `L` (default 8) is the
input word length; the design has been simulated at L = 4, 8, 12 and 16.
For 8-bit pixels, subtract 128 first (the JPEG level shift) so that they fit
the signed input.

Numeric range: every stage widens its operands by one bit before adding,
and the sum or difference of two W-bit numbers (or the negation of one)
always fits W+1 bits, so three stages per engine make the result exact:
L+3 bits between the engines, L+6 bits at the output, no truncation or
wrap-around anywhere. The largest magnitudes, about 2^(L+5), occur for
constant or checkerboard blocks of extreme values; the testbenches apply
such blocks.

## Departures and choices

Taken from the published description: the matrix T* and its factorization
and permutation; a register bank after each factor stage (as the source
draws its transform circuits); two identical 1-D
engines around a transposition buffer; the buffer's seven-register delay
line, eight multiplexers, counter and register chain on the select; the row
and column index rule j = i mod 8, k = floor(i/8) mod 8; the word lengths
4, 8, 12 and 16.

Chosen here, where the description is silent or unclear:

* Two's-complement inputs and full-precision growth (+3 bits per 1-D pass).
  The original work speaks of a single "system word length"; how its
  internal signals were sized or rounded is not stated.
* `in_valid`/`out_valid`, `col_valid`/`col_k`/`out_k`, the clock enable on
  the buffer, and synchronous active-low reset of counters and valid bits.
* The assignment of multiplexers to output lanes (lane i from tap 7-i). The
  drawing of the buffer does not make this legible; this is the only
  assignment under which a lane carries one row of the block.
* The drawing of the 2-D chain labels its last output with index 1; it is
  read as index 7. Its caption swaps the letters used for row and column
  indices relative to the drawings; the drawings' lettering is used here,
  since only that one works with a delay line clocked every cycle.
* The default word length is 8, matching 8-bit greyscale images.

Not included: the output scaling D* (belongs to the quantizer), the
quantizer, zigzag scan and inverse transform of a codec, and the FPGA
co-simulation harness used to measure the original circuit. The
source also gives fast-algorithm circuits for five other published DCT
approximations as points of comparison; they are not part of this design.

## Verification

Every testbench is self-checking, compares against matrix products with T*
written out row by row (`tb/dct_ref_pkg.sv`, no use of the factorization),
and prints `TB_RESULT checks=N failures=M`.

| testbench                 | what it runs                                                                 |
|---------------------------|-------------------------------------------------------------------------------|
| `tb_approx_dct8_1d`       | 10,000 random vectors plus the extreme vectors at W = 4, 8, 12, 16; every sample and the 3-cycle latency checked |
| `tb_transposition_buffer` | random rows with idle cycles and a reset mid-block; `col_valid` checked every cycle, `col_k` and all samples checked per column, all eight column indices seen |
| `tb_dct2d_top`            | default parameters; blocks presented eight times and assembled into full 8x8 results (including all-minimum, all-maximum and checkerboard extremes), then 64 distinct blocks; latency, column index, counter wrap and idle cycles counted |
| `tb_wordlength_sweep`     | the 2-D design at L = 4, 8, 12, 16, 10,000 random rows each |
| `tb_image_512`            | all 4,096 blocks of a generated 512x512 8-bit picture, each fully transformed and compared |

To run one with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_dct2d_top \
  rtl/dct_pkg.sv tb/dct_ref_pkg.sv rtl/approx_dct8_1d.sv \
  rtl/transposition_buffer.sv rtl/dct2d_top.sv tb/tb_dct2d_top.sv
./obj_dir/Vtb_dct2d_top
```

`tb_approx_dct8_1d` also needs `tb/dct1d_vector_test.sv`, and
`tb_wordlength_sweep` needs `tb/dct2d_stream_test.sv`. All of them finish
within seconds. To change the word length, set `L` on `dct2d_top` (or `W` on
`approx_dct8_1d`); the output widths follow.

How far to trust it: the arithmetic of the 1-D engine and the 2-D result are
checked against the matrix definition on a large amount of random and
extreme data at four word lengths. What cannot be checked against the original is
the cycle-level behaviour of its buffer, because the source gives no timing
diagram; the behaviour here is the one that its drawing and index rule
imply, and the one-column-per-block throughput follows from it.

## Files

* `rtl/dct_pkg.sv` shared constants (N = 8, default L, bit growth)
* `rtl/approx_dct8_1d.sv` 1-D 14-addition transform, 3-stage pipeline
* `rtl/transposition_buffer.sv` delay-line transposition buffer
* `rtl/dct2d_top.sv` 2-D transform, top level
* `tb/` the testbenches above and their reference package
