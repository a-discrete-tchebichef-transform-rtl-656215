# A multiplication-free 8-point Tchebichef transform: RTL

The discrete Tchebichef transform (DTT) is an orthogonal block transform
built from discrete orthogonal polynomials. Like the DCT it decorrelates
8-sample blocks of an image and can replace the DCT in JPEG- or
H.264-style coding, but its exact 8-point version is costly: the best
known fast algorithm needs 44 additions and 29 shifts. The approximation
implemented here, from Oliveira, Cintra, Bayer, Kulasekera and Madanayake,
"A Discrete Tchebichef Transform Approximation for Image and Video Coding",
replaces the DTT matrix by a matrix whose entries are all -1, 0 or +1.
The forward transform then takes 20 additions and nothing else. The
inverse has entries in {0, ±1, ±2, ±3} and takes only additions and fixed
shifts. The factors that would make the approximation orthogonal form a
diagonal matrix. They are a per-coefficient scale, and a codec folds them
into its quantisation table, so the transform hardware never computes them.

This repository holds synthesizable SystemVerilog for both 1-D transforms,
a top level that puts them side by side, and self-checking test benches.

## The two matrices

Forward, `X = T* x` (rows k = output index, columns n = input index):

```
      [ 1  1  1  1  1  1  1  1]
      [-1 -1  0  0  0  0  1  1]
      [ 1  0  0 -1 -1  0  0  1]
T* =  [-1  1  1  0  0 -1 -1  1]
      [ 0 -1  0  1  1  0 -1  0]
      [ 0  1 -1 -1  1  1 -1  0]
      [ 0 -1  1  0  0  1 -1  0]
      [ 0  0 -1  1 -1  1  0  0]
```

The exact inverse is `(T*)^-1 = T1 · D1`, with
`D1 = diag(1/8, 1/10, 1/8, 1/10, 1/4, 1/10, 1/8, 1/10)` and

```
      [1 -3  3 -2  1 -1 -1 -1]
      [1 -2 -1  2 -1  1 -1  1]
      [1 -1 -1  1 -1 -2  3 -2]
T1 =  [1 -1 -1  1  1 -2 -1  3]
      [1  1 -1 -1  1  2 -1 -3]
      [1  1 -1 -1 -1  2  3  2]
      [1  2 -1 -2 -1 -1 -1 -1]
      [1  3  3  2  1  1 -1  1]
```

An equivalent statement, used throughout the tests, is
`T* · T1 = diag(8, 10, 8, 10, 4, 10, 8, 10)`.

The orthogonal approximation is `T^ = D* · T*` with
`D* = sqrt(diag(T* T*^T))`, and its inverse is `T1 · D1 · (D*)^-1`. Neither
`D*` nor `D1 (D*)^-1` is built: the cores compute `T* x` and `T1 X`. A
quantiser placed after the forward core multiplies by `d_k*` as part of its
step size. A dequantiser placed before the inverse core multiplies by
`1/(d_k* · D1[k])`.

## Forward core (`adtt_fwd`): 20 adders

The adder network follows the published signal flow graph. Its first stage
is a butterfly on mirrored samples:

```
a_n = x_n + x_(7-n)      b_n = x_n - x_(7-n)      n = 0..3       (8 adders)
```

The rows of `T*` with even k are mirror-symmetric, so the even outputs use
only the a's. The rows with odd k are antisymmetric, so the odd outputs use
only the b's:

```
X0 = (a0 + a3) + (a1 + a2)     X1 = -b0 - b1
X2 = a0 - a3                   X3 = (b1 - b0) + b2
X4 = a3 - a1                   X5 = b1 - (b2 + b3)
X6 = a2 - a1                   X7 = b3 - b2                     (12 adders)
```

Each output is the sum of at most eight ±1-weighted samples, so the outputs
are 3 bits wider than the inputs, and nothing is ever rounded. The
published graph draws its outputs in the order X0, X6, X4, X2, X7, X5, X3,
X1. The RTL presents them in natural order, `X[0]` to `X[7]`.

The pipeline has three register stages, one after each adder level:

| stage | registered values |
|---|---|
| 1 | a0..a3, b0..b3 (W+1 bits) |
| 2 | a0+a3, a1+a2, X2, X4, X6, X1, X7, b1-b0, b2+b3, plus b1 and b2 carried along (W+2 bits) |
| 3 | X0..X7 (W+3 bits) |

Each stage has at most one adder between registers. That matches the
published FPGA result of one transform per clock at the maximum frequency
(438.68 million 8-point transforms per second at 438.68 MHz).

## Inverse core (`adtt_inv`): shifts and adds

The published work gives `T1` and its cost (29 additions, 8 shifts), but
not its flow graph. The factorisation used here is this design's own. It
takes 25 adders and 6 constant shifts, which are just wiring. It uses the
symmetry of `T1`'s columns. The even columns (0, 2, 4, 6) are
mirror-symmetric and the odd columns are antisymmetric, so the last stage
is a butterfly:

```
y_n = E_n + O_n      y_(7-n) = E_n - O_n      n = 0..3
```

The E terms come from X0, X2, X4, X6 and the O terms from X1, X3, X5, X7:

```
stage 1:  P = (X0 - X6) + X4      M = (X0 - X6) - X4
          u = X3 - X1   v = X5 + X7   w = X1 + X3   f = 4·X7 + X7
stage 2:  E0 = P + 2·X2 + X2      E3 = P - X2
          E1 = M - X2             E2 = E1 + 4·X6
          O0 = -(X1 + 2·w + v)    O1 = 2·u + v
          O2 = u - 2·v            O3 = O2 + f
stage 3:  the butterfly above
```

The largest sum of |entries| in a row of `T1` is 13, so 4 bits of growth
are enough. The core carries every internal value at the output width,
`W_IN + 4`. Stages 1 and 2 have two adders in series (for example
O3 = (u - 2·v) + f), so the inverse core's stages are about twice as deep
as the forward core's. If the inverse must run at the forward core's clock
rate, those two stages are the ones to split.

## Interfaces and timing

Both cores have the same streaming interface:

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `rst_n` | in | 1 | synchronous, active-low; clears the valid pipeline only |
| `in_valid` | in | 1 | the input vector is valid this cycle |
| `x` / `X` | in | 8 × W_IN | input vector, two's complement, natural order |
| `out_valid` | out | 1 | the output vector is valid |
| `X` / `y` | out | 8 × (W_IN+3) / 8 × (W_IN+4) | result |

A vector is accepted in every cycle where `in_valid` is high. There is no
back-pressure and no stall: the cores are plain pipelines. The result
appears exactly 3 clock cycles later (`FWD_LATENCY`, `INV_LATENCY` in
`adtt_pkg`), with `out_valid` high. Vectors given on consecutive cycles come
out on consecutive cycles. The data registers are not reset. Their contents
have meaning only while `out_valid` is high.

`adtt_top` instantiates one of each core. Its parameter is `W_PIX = 8`, the
sample width. It has the following streams:

* `fwd_in_valid`, `fwd_x[8]` (8 bits) → `fwd_out_valid`, `fwd_X[8]` (11 bits)
* `inv_in_valid`, `inv_X[8]` (11 bits) → `inv_out_valid`, `inv_y[8]` (15 bits)

The two streams are independent and may be active in the same cycle. The
inverse input is as wide as the forward output, so unquantised forward
coefficients fit it directly.

## Word lengths

The published work does not state word lengths for its hardware. The
defaults here were chosen by this design:

* Samples are 8-bit two's complement, −128..127. That fits 8-bit pixels
  after the usual level shift by 128. For unsigned 0..255 pixels, or for
  the 9-bit residuals of a video coder, set `W_PIX` (or the core's `W_IN`)
  to 9.
* The forward core is full precision: at 8-bit input, X0 ranges over
  −1024..1016.
* The inverse core is full precision as well.

## What is and is not here

What comes from the published design:

* the two matrices
* the 20-adder forward structure: the butterfly and the adder count
* the fact that the diagonal scalings go into the quantiser
* the one-transform-per-clock throughput

What this design chose:

* the grouping of the forward core's last 12 adders, taken from the matrix
  (the published graph does not fix it legibly)
* the inverse factorisation
* pipeline depth, word lengths, the valid-only handshake and reset
* putting both directions in one top level

The published hardware is the forward 1-D core alone. Its published FPGA
figures (144 CLBs, 396 flip-flops, 2.29 ns critical path) depend on word
lengths and a pipeline that the source does not give. After synthesis, the
forward core here has about 194 flip-flop bits at 8-bit input. The two
numbers cannot be compared directly.

Not included:

* the diagonal scalings
* a 2-D (row–column) transform with its 8×8 transposition store
* zigzag ordering and coefficient truncation
* the JTAG hardware-in-the-loop harness used to test the FPGA

The source describes the 2-D transform, the zigzag ordering and the
truncation only as software experiments. A 2-D transform would need:

* a forward core for rows, at 8 bits
* a 64-word buffer
* a second core for columns with `W_IN = 11`, giving 14-bit coefficients

## Verification

Every test bench prints `TB_RESULT checks=N failures=M` and stops on a
watchdog if the design hangs. The expected values come from the matrices
written out as tables in `tb/adtt_ref_pkg.sv`, multiplied directly, row by
column. They share nothing with the adder networks.

* `tb/adtt_fwd_tb.sv` sends 4000 vectors, with random gaps, to the forward
  core. About 70% of the vectors are random. The rest are all-minimum,
  all-maximum, or the sign pattern of a row of `T*`, which drives that
  coefficient to its extreme. It checks every coefficient, the 3-cycle
  latency of each vector, and `out_valid` during and after reset.
* `tb/adtt_inv_tb.sv` does the same for the inverse core, over the full
  11-bit input range.
* `tb/adtt_top_tb.sv` is the end-to-end test at the default sizes. It
  alternates between two loops and drains both pipelines when it switches:
  * In the first loop, 10,240 sample vectors go through the forward core.
    Each result goes straight into the inverse core, and both results are
    checked.
  * In the second loop, 3,072 small coefficient vectors go through the
    inverse core and back through the forward core. The result must equal
    `diag(8,10,8,10,4,10,8,10)` times the input. This checks both cores
    against a relation that needs neither reference table.

  Over 13,000 vectors pass through the forward core. The bench counts
  vectors on consecutive cycles, gaps, both cores producing in the same
  cycle, corner vectors and loop switches, and it fails if any of them
  never happened.

* `tb/adtt_image_rows_tb.sv` is the row pass of a 2-D transform over one
  512 × 512 8-bit image, the image size of the published JPEG-like
  experiment. The image is synthetic, made of gradients, block edges and
  noise. Its 32,768 row vectors go back to back into `adtt_top`. The bench
  checks every coefficient and checks that the whole image takes
  32,768 + 2 cycles from the first input to the last output.

All four pass. Each was also run against a copy of its module with one
deliberate error (a wrong sign in one adder, or a miswired valid), and each
reported failures.

## Simulating

With Verilator 5 (run from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/adtt_pkg.sv tb/adtt_ref_pkg.sv rtl/adtt_fwd.sv rtl/adtt_inv.sv \
  rtl/adtt_top.sv tb/adtt_top_tb.sv --top-module adtt_top_tb -o sim
./obj_dir/sim
```

For a single core, give only the two packages, the core and its bench,
for example `rtl/adtt_pkg.sv tb/adtt_ref_pkg.sv rtl/adtt_fwd.sv
tb/adtt_fwd_tb.sv --top-module adtt_fwd_tb`. For the image bench, use the
first command with `tb/adtt_image_rows_tb.sv` as the last file. Building
takes a few seconds. Each simulation then runs in about a second or less.

## Files

* `rtl/adtt_pkg.sv`: transform length, word growth and latencies
* `rtl/adtt_fwd.sv`: forward core, `X = T* x`
* `rtl/adtt_inv.sv`: inverse core, `y = T1 X`
* `rtl/adtt_top.sv`: both cores side by side
* `tb/adtt_ref_pkg.sv`: reference matrices and products
* `tb/adtt_fwd_tb.sv`, `tb/adtt_inv_tb.sv`, `tb/adtt_top_tb.sv`,
  `tb/adtt_image_rows_tb.sv`: test benches
