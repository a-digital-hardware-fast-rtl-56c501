# A multiplication-free 16-point approximate DCT core

Image and video coders spend much of their arithmetic on the discrete cosine
transform (DCT). A 16-point DCT compacts energy better than the usual
8-point one, but its exact form needs multiplications by `cos(k*pi/32)`. This
core computes instead a 16x16 transform `T` whose entries are only
`0`, `+1` and `-1`. It is close enough to the DCT to be used in its place in
a JPEG-style coder. It needs no multiplier and no shift: a fast algorithm
computes `X = T x` with 72 additions. The RTL is a fully parallel
pipeline. It takes one 16-sample vector on every clock and returns the 16
unscaled coefficients three clocks later.

## The transform

Row `m` of `T` keeps, for most entries, the sign of the DCT basis function
`cos((2n+1) m pi / 32)`; a few entries are set to `0` instead. Those zeros
were chosen so that the rows stay mutually orthogonal, keep the even/odd
symmetries of the DCT and stay close to it in energy compaction:
`T T^T = diag(16, 14, 12, 14, ...)`, with the pattern `16, 14, 12, 14`
repeating four times. The orthonormal
approximation of the DCT is therefore `C_hat = D T` with

    D = diag(1/4, 1/sqrt(14), 1/(2 sqrt(3)), 1/sqrt(14), ...)   (period 4)

The core does **not** apply `D`. In a coder the scale factors fold into the
quantiser step sizes, so the transform itself stays multiplication-free.
Its output `X` is `T x`, and a coder divides coefficient `k` by
`q_k / D_kk` instead of by `q_k`.

The full matrix is written out in `tb/dct16_ref_pkg.sv` (`T_MAT`). The
testbenches use it as their reference model.

## Fast algorithm and flow graph

`T` factorises into butterflies and two small adder networks:

    T = P * diag(B_2, B-bar_2, E, O) * diag(B_4, I_12) * diag(B_8, I_8) * B_16

`B_n = [I Ibar; Ibar -I]` is the usual decimation-in-frequency butterfly.
`Ibar` is the anti-diagonal identity. `B-bar_2 = B_2 Ibar_2 = [1 1; -1 1]`.
`P` only reorders wires.

| stage | module | adders | inputs | produces |
|-------|--------|-------:|--------|----------|
| `B_16` | `butterfly` | 16 | `x0..x15` | sums (0..7), differences (8..15) |
| `B_8` | `butterfly` | 8 | `B_16` outputs 0..7 | |
| `B_4` | `butterfly` | 4 | `B_8` outputs 0..3 | |
| `B_2` | `butterfly` | 2 | `B_4` outputs 0,1 | `X0`, `X8` |
| `B-bar_2` | `butterfly` (reversed inputs) | 2 | `B_4` outputs 2,3 | `X4`, `X12` |
| Block A (`E`) | `block_a` | 8 | `B_8` outputs 4..7 | `X2, X6, X10, X14` |
| Block B (`O`) | `block_b` + `block_c` | 32 | `B_16` outputs 8..15 | `X1, X3, ..., X15` |
| total | | **72** | | |

Block A is the 4x4 matrix

    E = [ 0  1  1  1 ; -1 -1  0  1 ;  1  0 -1  1 ; -1  1 -1  0 ]

It has three nonzero entries per row, so each output costs two adders.

### Block B: the odd part, and why it is split in two

The odd rows of `T` reduce, after `B_16`, to an 8x8 matrix `O` of
`0`/`+1`/`-1`. Its zeros are placed so that no butterfly stage fits it
directly. Computed as it stands, it would cost 48 additions. The trick is to
subtract a matrix `S` that has exactly one `+1` or `-1` per row:

    O = O' + S,      O' = M * (I_4 kron B_2)

`O'` has the symmetry that `O` lacks. It factorises into four 2-point
butterflies on the input pairs `(0,1) (2,3) (4,5) (6,7)`, followed by a
sparse matrix `M` with three nonzero entries per row. This is Block C
(`block_c`): 8 + 16 = 24 adders.

`S` is put back by eight bypass adders in `block_b`, each fed directly
from one Block B input:

| output | `X1` | `X3` | `X5` | `X7` | `X9` | `X11` | `X13` | `X15` |
|---|---|---|---|---|---|---|---|---|
| Block C row | `c0` | `c1` | `c2` | `c3` | `c4` | `c5` | `c6` | `c7` |
| bypass term | `+x3` | `+x5` | `+x1` | `+x7` | `+x0` | `-x6` | `+x2` | `-x4` |

Here `x` is Block B's input, that is, the `B_16` difference outputs
`8..15`. Block B is the deepest path in the core: one `B_16` level, the
Block C butterflies, two levels for `M`, and the bypass adder. That is five
adder levels, against four for every other coefficient.

## Word lengths

Inputs are signed two's complement, `W` bits wide (parameter `W`, default 8).
Every adder level widens the word by one bit, so nothing is ever rounded or
saturated. Each row of `T` has at most 16 nonzero entries, so every output
fits in `W+4` bits. This is the tightest signed width: 16 samples of `-2^(W-1)`
give exactly `-2^(W+3)`. Block A and Block B reach the same `W+4` bits with
fewer levels, because three-term sums need two extra bits and Block B's bypass
term fits in the remaining headroom. The outputs are therefore exact integers.
`T x` in the RTL is bit-identical to the matrix product.

For a separable 2-D transform `T K T^T` of a 16x16 block of 8-bit pixels,
the row pass produces 12-bit values. The column pass therefore needs a core
with `W = 12`, whose 16-bit outputs are again exact.

## Interface and timing (`dct16_approx`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous, active low; clears the valid pipeline only |
| `in_valid` | in | 1 | `x` carries a vector this cycle |
| `x[16]` | in | `W` signed | samples `x0..x15` |
| `out_valid` | out | 1 | `X` carries a result |
| `X[16]` | out | `W+4` signed | coefficients `X0..X15` in natural order |

There are three register ranks:

1. the input register;
2. a register after `B_16`;
3. the output register.

A vector that is presented with `in_valid` at a rising edge appears on `X`,
with `out_valid` high, after the third rising edge that follows. The core
takes a new vector on every clock and cannot stall: there is no ready
signal. Idle cycles (`in_valid` low) leave gaps in `out_valid`. A reset
cancels any vector still in flight. The data registers are not reset;
they load only when their rank holds a valid vector. An assertion in the
module checks that every accepted vector leaves `LATENCY` cycles later.

The constants `DCT_N`, `W_DEFAULT`, `GROWTH`, `LATENCY` and the output
order of the flow graph (`OUT_INDEX`) are in `rtl/dct16_pkg.sv`.

## What follows the published design and what does not

The matrices follow the published algorithm: `T`, `E`, `M`, `S`, the
butterflies and the output permutation. The RTL was checked against the full
matrix `T` for every coefficient. The printed factorisation was also checked
numerically, and it reproduces `T` exactly. Where this design departs from
the published description, or fills a gap in it:

* **`S` has eight rows, not nine.** As published, the correction matrix is
  printed with nine rows. Its second row repeats the first. The eight-row
  matrix without that duplicate is the one for which `O' + S = O`, and it is
  the one used here.
* **Block C costs 24 adders, not 20.** The published text gives 20 additions
  for `O'`, but its own factorisation needs 8 + 16 = 24. The published total
  of 72 additions only adds up with 24. The RTL follows the factorisation.
* **Pipeline.** The published FPGA prototype runs at about 342 MHz on a
  Virtex-6 and reports register counts, but does not say where the registers
  sit. The three-rank pipeline here is this design's choice. It uses 464
  flip-flops at `W = 8`, against the 956 registers of the published
  prototype. Retiming to a deeper pipeline means only adding register ranks
  between the combinational blocks; it changes the latency, not the results.
* **Number format.** The published design does not state signedness or
  internal widths. Signed inputs and lossless growth are this design's choices.
* **Scaling `D`** is left to the quantiser, as the published algorithm
  intends. No quantiser, zig-zag scan or inverse transform is part of the
  core.
* The published pixel rate, `5.488*10^9` pixels/s, is 16 times 343 MHz. At
  the stated 342 MHz the rate is `5.472*10^9`.
* The FPGA device and the published test set-up around the core are not
  described in enough detail to model.

The published area, speed and power figures were measured on the FPGA for
`W` of 4, 8, 12 and 16. They cannot be reproduced in simulation. Any of
these widths is obtained by setting `W`.

## Files

| file | contents |
|------|----------|
| `rtl/dct16_pkg.sv` | shared constants and output order |
| `rtl/butterfly.sv` | `B_n`, optionally with reversed inputs (`B-bar_2`) |
| `rtl/block_a.sv` | Block A, matrix `E` |
| `rtl/block_c.sv` | Block C, `O' = M (I_4 kron B_2)` |
| `rtl/block_b.sv` | Block B, `O = O' + S` (instantiates Block C) |
| `rtl/dct16_approx.sv` | the pipelined core (top) |
| `tb/dct16_ref_pkg.sv` | reference matrices `T`, `E`, `O`, `M` and products |
| `tb/tb_butterfly.sv`, `tb/tb_block_a.sv`, `tb/tb_block_c.sv`, `tb/tb_block_b.sv` | one self-checking test per block |
| `tb/tb_dct16_approx.sv` | end-to-end test of the core at `W = 8` |
| `tb/tb_dct16_2d.sv` | 2-D transform of every 16x16 block of a 512x512 image |
| `tb/tb_dct16_widths.sv`, `tb/dct16_width_checker.sv` | the core at `W` = 4, 8, 12 and 16 |

## Verification

Every testbench is self-checking. Each compares against matrix products
taken from the written-out tables, not against the factorisation. Each ends
with `TB_RESULT checks=N failures=M`, and each has a watchdog.

* The block tests drive random values, all sign corners of full scale and the
  extremes.
* `tb_dct16_approx` streams 40,000 cycles of vectors through the core and
  checks all 16 coefficients of each one. It runs bursts of back-to-back
  vectors, random idle gaps with garbage on `x`, resets with vectors in
  flight, and vectors chosen to drive coefficients to full scale. It checks
  that each result arrives exactly three cycles after its input. It fails if
  any of those situations never occurred.
* `tb_dct16_2d` computes `T K T^T` for all 1024 blocks of a generated
  512x512 image. It uses an 8-bit row core and a 12-bit column core, with the
  transpose done in the testbench.
* `tb_dct16_widths` runs four cores side by side, at `W` = 4, 8, 12 and 16.
  These are the word lengths of the published FPGA measurements. Each core
  streams 3,000 vectors, which are checked value by value and for latency.

To run one test with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal \
      rtl/dct16_pkg.sv rtl/butterfly.sv rtl/block_a.sv rtl/block_c.sv \
      rtl/block_b.sv rtl/dct16_approx.sv tb/dct16_ref_pkg.sv \
      tb/tb_dct16_approx.sv --top-module tb_dct16_approx -Mdir obj
    ./obj/Vtb_dct16_approx

To run another test, replace the testbench file and the top module. Each
test finishes in well under a second.
