# A multiplierless 16-point approximate DCT: pipelined 1-D and 2-D RTL

This transform replaces the 16-point discrete cosine transform (DCT-II)
with a 16x16 matrix **T** whose entries are only 0, +1 and -1. Its rows are
mutually orthogonal, so scaling each row by the inverse of its norm gives an
orthogonal transform that stays close to the DCT. In a codec, that scaling
can be folded into the quantizer. The hardware therefore computes only
`T * x`, and a fast factorization of T needs **60 additions and nothing
else**: no multipliers and no shifts.

The RTL contains:

* `dct16_1d`: a fully pipelined 1-D transform core. It takes one
  16-sample vector per clock and has a latency of 5 clocks.
* `dct16_2d`: the 2-D 16x16 transform `B = T * A * T^T`. It is built from two
  1-D cores and a row-in/column-out transposition buffer, and it handles
  one 16x16 block every 16 clocks.

Everything is parameterized SystemVerilog-2017 and synthesizable. Each
module has a self-checking testbench that runs under plain Verilator.

## 1. The transform

```
        0  1  2  3  4  5  6  7  8  9 10 11 12 13 14 15      row norm^2
 T = [  1  1  1  1  1  1  1  1  1  1  1  1  1  1  1  1 ]      16
     [  1  1  1  1  1  1  1  1 -1 -1 -1 -1 -1 -1 -1 -1 ]      16
     [  1  1  1  0  0 -1 -1 -1 -1 -1 -1  0  0  1  1  1 ]      12
     [  1  1  0  0  0  0 -1 -1  1  1  0  0  0  0 -1 -1 ]       8
     [  1  0  0 -1 -1  0  0  1  1  0  0 -1 -1  0  0  1 ]       8
     [  1  1 -1 -1 -1 -1  1  1 -1 -1  1  1  1  1 -1 -1 ]      16
     [  1  0 -1 -1  1  1  0 -1 -1  0  1  1 -1 -1  0  1 ]      12
     [  0  0 -1  1  1 -1 -1  1 -1  1  1 -1 -1  1  0  0 ]      12
     [  1 -1 -1  1  1 -1 -1  1  1 -1 -1  1  1 -1 -1  1 ]      16
     [  1 -1 -1  1  0  0  1 -1  1 -1  0  0 -1  1  1 -1 ]      12
     [  1 -1  0  1 -1  0  1 -1 -1  1  0 -1  1  0 -1  1 ]      12
     [  0  0  1  1 -1 -1  0  0  0  0  1  1 -1 -1  0  0 ]       8
     [  0 -1  1  0  0  1 -1  0  0 -1  1  0  0  1 -1  0 ]       8
     [  1 -1  1 -1  1 -1  0  0  0  0  1 -1  1 -1  1 -1 ]      12
     [  0 -1  1 -1  1 -1  1  0  0  1 -1  1 -1  1 -1  0 ]      12
     [  1 -1  0  0 -1  1 -1  1 -1  1 -1  1  0  0  1 -1 ]      12
```

`T * T^T` is diagonal, with the values in the right-hand column. The
orthogonal approximation is `C = S * T` with `S = diag(1/sqrt(norm^2))`,
which has entries 1/4, 1/sqrt(8) and 1/sqrt(12). For a 2-D block, the
coefficient `B[i][k]` must be multiplied by `s_i * s_k`. **No module here
applies S.** The outputs are the raw integer products, so the quantizer
that follows must apply S.

## 2. From matrix to adders: the factorization

The 1-D core implements

```
T = P2 * M4 * M3 * M2 * P1 * M1
```

Each `M` is a sparse matrix of adders, and each `P` is a permutation, which
costs only wiring. In the table below, I_n is the n x n identity and J_n the
counter-identity (ones on the anti-diagonal).

| stage | matrix | what it computes | adders | register rows | width growth |
|---|---|---|---|---|---|
| `m1_stage` | `[[I8, J8], [J8, -I8]]` | `y[i] = x[i] + x[15-i]` (i < 8), `y[i] = x[15-i] - x[i]` (i >= 8) | 16 | 1 | +1 |
| P1 | permutation | wiring, see below | 0 | 0 | 0 |
| `m2_stage` | `diag(B8, B8)`, `B8 = [[I4, J4], [J4, -I4]]` | two 8-point butterflies, on 0..7 and on 8..15 | 16 | 1 | +1 |
| `m3_stage` | `diag(A, B, C, D)` | see below | 24 | 2 | +2 |
| `m4_stage` | `diag(H, I6, H, I6)`, `H = [[1,1],[1,-1]]` | butterflies on (0,1) and (8,9), the rest pass | 4 | 1 | 0 (see section 4) |
| P2 | permutation | wiring, see below | 0 | 0 | 0 |
| total | | | **60** | **5** | +4 |

**M3** is the irregular stage. Its four 4x4 blocks act on positions 0-3 (A),
4-7 (B), 8-11 (C) and 12-15 (D). Below, a0..a3 are the four inputs of each
block:

```
A: y0 = a0+a3      y1 = a1+a2      y2 = a2-a1      y3 = a0-a3
B: y4 = a1+a2+a3   y5 = a3-a0-a1   y6 = a1-a0-a2   y7 = a0-a2+a3
C: y8 = a0+a3      y9 = a1+a2      y10 = a2-a1     y11 = a3-a0
D: y12 = a1+a2+a3  y13 = a0+a1-a3  y14 = a0-a1+a2  y15 = a0-a2+a3
```

A and C are butterflies. Every row of B and D adds three inputs, so those
rows need two adders in series. The stage therefore has two register rows:

* The first adder level adds two of the three operands of each row.
* The third operand is held for one clock in a delay register.
* The second adder level finishes the sum.
* Results of A and C are computed in the first level and then pass through
  the second register row.

The operand pairing is chosen so that each of B and D needs only two
delayed operands:

| output | first level (registered) | second level |
|---|---|---|
| y4 | a1+a2 | + a3 (delayed) |
| y5 | a0+a1 | a3 (delayed) - it |
| y6 | a1-a2 | - a0 (delayed) |
| y7 | a3-a2 | + a0 (delayed) |
| y12 | a1+a2 | + a3 (delayed) |
| y13 | a0+a1 | - a3 (delayed) |
| y14 | a0-a1 | + a2 (delayed) |
| y15 | a0-a2 | + a3 (delayed) |

In block B, a0 and a3 are the delayed operands. In block D, a2 and a3 are.

**P1** sits between M1 and M2. It is the identity on positions 0..8. On the
remaining positions, M2 input `i` takes M1 output `src(i)`:

| M2 input | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|---|---|---|---|---|---|---|---|
| M1 output | 11 | 12 | 15 | 14 | 13 | 10 | 9 |

**P2** turns the M4 outputs into coefficient order. Coefficient `X[k]`
takes M4 output `w(k)`:

| X[k] | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| M4 output | 0 | 8 | 4 | 11 | 3 | 9 | 5 | 12 | 1 | 13 | 7 | 10 | 2 | 14 | 6 | 15 |

In cycle notation this permutation is (1 8)(2 4 3 11 10 7 12)(5 9 13 14 6),
read as "X[a] = w(b)" for each step a -> b. Both permutations live in
`dct16_pkg` as the functions `p1_src` and `p2_src`. The product of all six
factors was checked to equal T exactly, and the testbenches compare the
core against T itself, not against the factors.

## 3. Pipeline timing

```
clock     0        1        2         3         4        5
x ----> [M1+reg] [M2+reg] [M3a+reg] [M3b+reg] [M4+reg] ----> X = T*x
```

* The 1-D core accepts a vector on every clock and delivers it
  `LAT_1D = 5` clocks later. It never stalls.
* A `valid` bit travels in a 5-stage shift register beside the data. Only
  that shift register is reset. The data registers are not reset, because
  nothing downstream looks at them while `valid` is low.

For the 2-D transform (`dct16_2d`):

* The rows of a block enter in order, one per clock.
* Column k of the result comes out **12 + k clocks after the last row went
  in**. The 12 clocks are 5 for the row transform, 2 for the buffer (one to
  write the last row, one to read column 0) and 5 for the column transform.
* Blocks may follow each other with no idle clock, giving one block per 16
  clocks.
* Idle clocks are allowed anywhere in the input stream. The buffer counts
  valid rows, so rows of one block may be spread out.

## 4. Word widths

The source design gives no word widths, so these are this design's own
choice. Each stage grows by just enough bits that nothing can overflow:

| point | width (default IN_W = 9) |
|---|---|
| input | IN_W = 9 |
| after M1 / M2 | 10 / 11 |
| after M3, M4, 1-D output | IN_W + 4 = 13 |
| after the column transform (2-D output) | IN_W + 8 = 17 |

* **M4 keeps the width of M3.** Every M4 output is an output of T, which
  is a signed sum of at most 16 input samples. Such a sum always fits in
  IN_W + 4 bits: the worst case is -16 * 2^(IN_W-1) = -2^(IN_W+3), which is
  the most negative value of that width. Any carry lost inside the M4
  butterfly is only modulo arithmetic on a result that fits.
* **The 2-D output reaches the edge of its range.** An all-minimum input
  block gives `B[0][0] = -256 * 256 = -65536`, the most negative 17-bit
  value. The end-to-end testbench drives that block.
* **IN_W = 9 covers both source types.** Unsigned 8-bit pixels (zero-extended)
  and signed prediction residuals of 8-bit video (-255..255) both fit. To
  use level-shifted 8-bit samples, set IN_W = 8.

## 5. The transposition buffer

The row transform produces the rows of `A * T^T`. The column transform
needs its columns. `transpose_buffer` makes that change in real time:

* It holds two 16x16 banks of IN_W + 4 bit words.
* Rows are written into one bank. After the 16th row of a block, the banks
  swap roles.
* The full bank is read out one column per clock for 16 clocks, while the
  next block fills the other bank.
* Filling a bank takes at least 16 clocks and draining it takes exactly 16.
  So the read of one bank always ends by the time the other bank is full,
  and no back-pressure is needed.
* The assertion `a_no_overrun` checks this.
* `out_idx` gives the column number, and `dct16_2d` delays it to match the
  column transform.

Blocks are framed only by counting valid rows from reset. There is no
start-of-block signal, so a source that drops a row misaligns every later
block until the next reset.

## 6. Interfaces

Every port is synchronous to the rising edge of `clk`. Reset `rst_n` is
active-low and synchronous.

`dct16_2d #(IN_W = 9, OUT_W = IN_W + 8)`:

| port | dir | type | meaning |
|---|---|---|---|
| `in_valid` | in | 1 | `in_row` holds a row |
| `in_row[16]` | in | signed IN_W | row j of the block: `in_row[i] = A[j][i]` |
| `out_valid` | out | 1 | `out_col` holds a column |
| `out_col[16]` | out | signed OUT_W | column k of `T*A*T^T`: `out_col[i] = B[i][k]` |
| `out_idx` | out | 4 | k |

`dct16_1d #(IN_W = 9, OUT_W = IN_W + 4)` has the ports `in_valid`, `x[16]`,
`out_valid` and `X[16]`, with `X = T * x` 5 clocks later. The stage modules
`m1_stage` .. `m4_stage` have only `clk`, `x[16]` and `y[16]`.

## 7. Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. The reference results are plain integer matrix products using T
(or the stage matrices) from `tb/dct16_ref_pkg.sv`.

| testbench | what it does |
|---|---|
| `m1_stage_tb` .. `m4_stage_tb` | 3000 random vectors per stage, with extreme values mixed in; checks every output at exactly the stage latency (1, 1, 2, 1 clocks) |
| `dct16_1d_tb` | 10,000 random vectors with random idle clocks, plus 16 worst-case vectors (the sign pattern of each row of T at full scale); checks `out_valid` on every clock and `X = T*x` after exactly 5 clocks |
| `transpose_buffer_tb` | 64 blocks, half back-to-back and half with idle clocks; checks every column, `out_idx` and the exact output clock |
| `dct16_2d_tb` | 200 blocks through the top at default parameters; checks every coefficient against `T*A*T^T` and the 12 + k clock timing. Counts back-to-back blocks, idle clocks inside blocks and full-scale blocks, and fails if any of them never happened or if the 17-bit output extreme was not reached |
| `dct16_image_tb` | a synthetic 512x512 8-bit picture (1024 blocks) and a synthetic 416x240 frame of signed 9-bit residuals (390 blocks), streamed back-to-back through `dct16_2d`; checks every coefficient and the total clock count (16 per block + 26 from the first row in to the last column out) |

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dct16_pkg.sv tb/dct16_ref_pkg.sv rtl/m1_stage.sv rtl/m2_stage.sv \
  rtl/m3_stage.sv rtl/m4_stage.sv rtl/dct16_1d.sv rtl/transpose_buffer.sv \
  rtl/dct16_2d.sv tb/dct16_2d_tb.sv --top-module dct16_2d_tb -o sim
./obj_dir/sim
```

For another testbench, change the last file and `--top-module`. Each run
takes well under a second. Lint with
`verilator --lint-only -Wall -Irtl rtl/dct16_pkg.sv rtl/<module>.sv --top-module <module>`.
The only remaining lint warnings are package constants that a given module
does not use.

## 8. What follows the source design and what does not

**Taken from the source design:**

* the matrix T;
* the factorization into M1..M4, P1 and P2;
* the count of 60 adders;
* the placement of the register rows: one after M1, M2 and M4 and two inside
  M3, five in all;
* the two-level structure of M3;
* the 2-D organization (row transform, transposition buffer, column
  transform) and its signal naming;
* leaving the scale matrix S to the quantizer.

**This design's own choices:**

* **Word widths.** The source names none (section 4). Its FPGA and ASIC
  results were measured on implementations with unstated widths, so the
  flip-flop counts cannot be compared directly with this RTL. Here the 2-D
  top holds about 2,400 pipeline flip-flops plus 6,656 bits of buffer
  storage.
* **Operand pairing in the 3-term rows of M3.** The reference drawing shows
  the two adder levels and two extra delay registers per block, but not
  which operands each first-level adder takes. The pairing in section 2
  matches that count.
* **The transposition buffer's insides.** The source only says it must be
  a real-time, row-parallel buffer. Ping-pong banks are the simplest way to
  meet that.
* **The valid/index handshake, reset and block framing.** The source
  describes a free-running pipeline.
* **Reading of the P2 cycle notation.** The source writes it with the
  first element of two cycles repeated at their end, as
  `(2 4 3 11 10 7 12 2)`. Those repeats are read as closing the cycle. The
  resulting order agrees with the output labels of the reference drawing
  and with T.

**Not included:**

* the quantizer, which carries the scale factors S;
* the inverse transform;
* the zig-zag coefficient selection used in the still-image experiments;
* the rest of a video encoder.

None of these is described as hardware in the source.
