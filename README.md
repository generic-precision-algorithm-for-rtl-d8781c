# A shift-and-add 8x8 DCT with selectable rotation precision

The 8x8 discrete cosine transform at the heart of JPEG-style image coding is a
set of plane rotations by a handful of fixed angles (pi/4, 3pi/8, pi/16, 3pi/16,
7pi/16). A CORDIC rotator performs such a rotation with shifts and additions
only: it turns the vector by a sequence of "micro-rotations" of atan(2^-i), each
costing two shifts and two adders. The quality of the transform then depends on
how well the chosen sequence of micro-rotations approximates each angle.
Earlier CORDIC DCTs cut that sequence short to save energy and lose image
quality. This design uses longer sequences chosen for a stated angle
precision P (1e-3 by default, 1e-4 selectable). The result is a DCT within
about half an output LSB of the exact one. The cost is a few extra adder
stages.

The RTL is a streaming 2-D DCT processor. It accepts one row of eight 8-bit
samples per clock and delivers one column of eight coefficients per clock.

```
 in_row ──► dct1d (rows) ──► transpose_buffer ──► dct1d (columns) ──► out_col
             │
             ├─ dct_butterfly        sums/differences x(k) ± x(7-k), even butterfly
             ├─ 6 × fixed_angle_cordic   chains of cordic_microrot stages
             ├─ scale_comp           constant 1/(2G) per rotator output
             └─ odd output adders, rounding
```

## The micro-rotation lists

A micro-rotation with index i and direction sigma = ±1 maps

    x' = x - sigma * (y >>> i)
    y' = y + sigma * (x >>> i)

This turns (x, y) by sigma·atan(2^-i) and stretches it by sqrt(1 + 2^-2i).
A fixed angle theta is approximated by a list of such steps with
theta ≈ Σ sigma_k · atan(2^-i_k). The lists used here (`dct_cordic_pkg`) are:

| angle   | P = 1e-3: i (sigma)              | P = 1e-4: i (sigma)                                 | growth G (1e-3) |
|---------|----------------------------------|-----------------------------------------------------|-----------------|
| pi/4    | 0 (+)                            | 0 (+)                                               | 1.41421         |
| 3pi/8   | 0 (+), 1 (+), 4 (−), 7 (−)       | 0 (+), 1 (+), 4 (−), 7 (−), 10 (−), 12 (+)          | 1.58427         |
| pi/16   | 2 (+), 4 (−), 6 (+), 9 (−)       | 2 (+), 4 (−), 6 (+), 9 (−), 13 (+)                  | 1.03292         |
| 3pi/16  | 1 (+), 3 (+), 10 (+)             | same                                                | 1.12674         |
| 7pi/16  | quarter turn, then the pi/16 list reversed | same                                      | as pi/16        |

Angle errors of the lists: pi/16 1.2e-4 rad (P=1e-3) and 3.0e-6 rad (P=1e-4).
3pi/16 6.9e-5 rad. 3pi/8 7.2e-4 rad (P=1e-3) and 1.5e-5 rad (P=1e-4).
pi/4 is exact.

Because each list extends the shorter one, one table per angle serves both
precisions; `num_steps(angle, prec)` says how many entries are used. Every list
entry becomes one combinational `cordic_microrot` stage inside
`fixed_angle_cordic`, followed by one register. For example, the pi/16 rotator
at P = 1e-4 has five stages with shifts 2, 4, 6, 9, 13. The product of its five
micro-rotation matrices is
`[1.013068 -0.201515; 0.201515 1.013068]`, which equals G·R(pi/16). The rotator
testbench checks the hardware against this matrix.

The list values come from the published decomposition tables, with three
readings of this design's own:

* **3pi/8 at P = 1e-3.** The signs printed for this entry are − + − −. They
  would give −0.392 rad. The signs used are + + − −, those printed for the same
  four shifts at P = 1e-4. They give 1.1788 rad, within 7.2e-4 of 3pi/8.
* **pi/4.** The entry is one i = 0 step, printed with sigma = −. Here it runs in
  the rotator's own direction.
* **7pi/16.** No list is published for this angle, although the flow graph
  needs a 7pi/16 rotator. It is built as an exact quarter turn,
  (x, y) → (−y, x), followed by the pi/16 list in the opposite direction. It
  therefore has the pi/16 growth.

The published procedure that generates such lists (choose i from
floor(−log2 tan|theta|) + 1, step, repeat until the residue is below P) is an
offline design step. Run literally, it does not reproduce the published lists:
for pi/4 it yields i = 1, 2, 4, 7, ... instead of the single i = 0. The RTL
therefore uses the lists above. Other precisions need new lists in
`dct_cordic_pkg`; nothing else changes.

## One 8-point transform (`dct1d`)

The target is X(k) = ½ C(k) Σ x(n) cos((2n+1)kπ/16), with C(0) = 1/√2 and
C(k) = 1 otherwise. Name the butterfly outputs:

* s(k) = x(k) + x(7−k) and d(k) = x(k) − x(7−k), for k = 0..3.
* t0 = s0+s3, t1 = s1+s2, t2 = s1−s2, t3 = s0−s3.

Six rotators follow. R_ccw(θ)(u, v) = (u cos θ − v sin θ, u sin θ + v cos θ);
"cw" means θ is negated.

| rotator            | input    | x output → | y output → |
|--------------------|----------|------------|------------|
| 4pi/16 ccw         | (t0, t1) | X4         | X0         |
| 6pi/16 ccw         | (t3, t2) | X6         | X2         |
| 7pi/16 ccw         | (d0, d3) | p7         | q7         |
| 3pi/16 **cw**      | (d1, d2) | p3b        | q3b        |
| 3pi/16 ccw         | (d0, d3) | p3a        | q3a        |
| pi/16 ccw          | (d1, d2) | p1         | q1         |

The odd outputs are X1 = q7 + p3b, X7 = p7 + q3b, X3 = p3a − q1 and
X5 = q3a − p1. Multiplying out the rotations gives exactly the even/odd DCT
matrices. X1 and X7 come from adders, X3 and X5 from subtractors. Each odd
output combines one rotator working on (0−7, 3−4) with one working on
(1−6, 2−5). Which difference pair feeds which rotator, and each rotator's
direction, were derived from the DCT matrix, not read off a drawing.

**Gain compensation.** The rotators do not correct their growth G. The
`scale_comp` stage multiplies each of the 12 rotator outputs by
round(2^16 / (2G)) and rounds back to the working width. The factor includes the
½ of the DCT definition. This happens *before* the odd adders: the two rotators
summed into X1 (and X7, X3, X5) have different growths (1.0329 against 1.1267).
A single compensation stage after the adders, as in the usual drawing of this
flow graph, could not correct both. This is a deliberate departure.
`comp_coef()` computes the coefficients at elaboration time from the lists, so
they follow any change of list.

**Number format.** Inputs are IN_W-bit signed integers. Inside, a value has
FRAC_W = 12 fraction bits and 4 bits of integer headroom:
W = IN_W + 4 + FRAC_W. The headroom covers the factor 4 of the butterflies and
the largest rotator growth, √2·G ≤ 2.25. Shifts truncate toward −∞.
Compensation and the final step round to nearest. Outputs are integers of
OUT_W = IN_W + 3 bits, enough because |X(k)| ≤ 4·max|x|.

**Timing.** There is one register after the butterflies, one after the
rotators, one after compensation and one after the output adders. A vector
presented in cycle c appears in cycle c + 4. One vector is accepted per clock,
with no stalls.

Measured accuracy against the exact real-valued DCT, over 4,000 random and
extreme 8-bit vectors: largest error 0.63 LSB at P = 1e-3 and 0.51 LSB at
P = 1e-4.

## The 2-D processor (`dct2d`) and the transpose buffer

The 2-D DCT of an 8x8 block is separable: transform every row, then every column
of the result.

**Input.** A block is eight `in_valid` beats. Beat y carries row y, with
`in_row[x] = f(y, x)`. Beats may be back to back, and blocks may follow each
other without a gap. Idle clocks between beats are allowed.

**Row pass.** The row `dct1d` (8-bit in, 11-bit out) rounds its results to
integers. These go into `transpose_buffer`.

**Transpose buffer.** It has two 8x8 register banks, 11 bits per entry, used
alternately. A bank becomes full when its eighth row is written. It is then
read out one column per clock and released after the eighth column. Reading a
bank takes 8 clocks, and filling the other bank takes at least 8 clocks. So the
buffer never has to refuse a row, and the design has no back-pressure signal. An
assertion checks that no row ever lands in a full bank.

**Column pass.** The column `dct1d` (11-bit in, 14-bit out) produces beat v of
the output, with `out_col[u] = F(u, v)`:

    F(u,v) = ¼ C(u) C(v) Σ_y Σ_x f(y,x) cos((2x+1)vπ/16) cos((2y+1)uπ/16)

**Latency.** If the last row of a block is presented in cycle c, output column v
appears in cycle c + 10 + v: 4 cycles for the row DCT, 1 for the bank write,
1 for the column read and 4 for the column DCT. A 512x512 image (4096 blocks)
takes about 32,800 clocks.

Measured accuracy of the full 2-D transform at the default parameters: largest
coefficient error 1.34 LSB over 40 blocks. This is dominated by the integer
rounding between the passes.

## What the precision buys in an image-coding loop

`tb_dct2d_image` measures the effect of the precision on decoded images. It
runs a 64x64 synthetic test image through two processors, one at P = 1e-3 and
one at P = 1e-4. The image has smooth shading, a sharp-edged checker area and
noise. The testbench then codes the coefficients JPEG-style: the standard
luminance quantisation table, scaled for quality factors 95 to 75, followed by
an exact inverse DCT. The same loop is also fed with an exact DCT rounded to
integers. Measured PSNR of the decoded image:

| quality | P = 1e-3 | P = 1e-4 | exact DCT, integer coefficients |
|---|---|---|---|
| 95 | 44.82 dB | 44.79 dB | 44.97 dB |
| 90 | 39.49 dB | 39.48 dB | 39.54 dB |
| 85 | 36.42 dB | 36.42 dB | 36.41 dB |
| 80 | 34.33 dB | 34.33 dB | 34.33 dB |
| 75 | 32.98 dB | 32.98 dB | 32.99 dB |

At P = 1e-3 the processor stays within 0.15 dB of an exact integer DCT.
Going to P = 1e-4 gains nothing measurable at these widths. The remaining
difference comes from the integer rounding between the passes, not from the
angles. This is why P = 1e-3 is the default.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `dct2d` | `IN_W`, `ROW_W`, `OUT_W` | 8, 11, 14 | input, intermediate and output widths |
| `dct2d`, `dct1d` | `FRAC_W` | 12 | fraction bits inside a 1-D pass |
| `dct2d`, `dct1d`, `fixed_angle_cordic` | `PREC` | `PREC_1E3` | micro-rotation lists (`PREC_1E4` for P = 1e-4) |
| `fixed_angle_cordic` | `ANGLE`, `CLOCKWISE`, `W` | pi/16, ccw, 24 | which rotator |
| `scale_comp` | `N`, `W`, `CF`, `COEF` | 12, 24, 16, ½ | lanes and constants |
| `transpose_buffer` | `N`, `W` | 8, 11 | block size, word width |

If you change `IN_W`, keep `ROW_W ≥ IN_W + 3` and `OUT_W ≥ ROW_W + 3`.

## Where the design goes beyond the source description

The source describes the angle lists, the rotator structure, the flow graph and
the three-part organisation: butterflies, rotators, scaling. The following are
this design's own choices:

* All word widths, the fixed-point format, and truncation versus rounding.
* The pipeline registers and the streaming interface with `in_valid`/`out_valid`
  only.
* Integer rounding of the row results.
* The ping-pong transpose buffer and the column order of the output.
* Compensation before the odd adders, the 7pi/16 construction and the two sign
  readings described above.
* The micro-rotation index and direction are elaboration-time parameters, not
  run-time inputs, because each rotator has a fixed angle.

Nothing here was checked against a measured chip or FPGA build. The reported
accuracy comes from simulation against the mathematical definition.

## Files and simulation

`rtl/` holds one module or package per file:

* `dct_cordic_pkg` — types, lists, gain and coefficient functions.
* `cordic_microrot`
* `fixed_angle_cordic`
* `dct_butterfly`
* `scale_comp`
* `dct1d`
* `transpose_buffer`
* `dct2d` — the top.

`tb/` holds one self-checking testbench per module: `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M`. `tb_dct2d` runs the top at its default
parameters. It streams 40 blocks (back to back, then with gaps), checks every
coefficient and the latency, and counts use of both transpose banks.
`tb_dct1d` runs both precisions side by side. `tb_dct2d_image` is the
image-coding workload described above.

Run a testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/dct_cordic_pkg.sv tb/tb_dct2d.sv --top-module tb_dct2d -o sim
    ./obj_dir/sim

Lint a module the same way with `--lint-only -Wall` in place of
`--binary ... -o sim`.
