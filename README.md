# A 16-point approximate DCT in 44 additions

This is synthesizable SystemVerilog for a 16-point transform that stands in
for the discrete cosine transform (DCT-II) in image and video coders. It
computes `X = T x`, where `T` is a 16x16 matrix whose entries are only 0, +1
and -1. So the hardware has no multipliers and no shifters, only adders. A
fast factorization of `T` needs 44 additions per 16-point vector. The design
follows the transform and fast algorithm published in *"Multiplierless 16-point
DCT Approximation for Low-complexity Image and Video Coding"* (Silveira,
Oliveira, Bayer, Cintra, Madanayake). The word widths, the pipeline and the
interface are this implementation's own choices, because the publication does
not give them.

The core takes one 16-sample vector per clock cycle. It returns the 16
unscaled coefficients five cycles later, in natural frequency order
`X0 ... X15`.

## 1. The transform

`T` is built from two copies of an 8-point approximate DCT, the *modified
rounded DCT*, which needs 14 additions. One copy works on the sums
`x_i + x_(15-i)` and produces the even coefficients. The other works on the
differences `x_(7-j) - x_(8+j)` and produces the odd coefficients. This is the
usual even/odd split of DCT fast algorithms. The rows of `T` are mutually
orthogonal but do not all have the same length:

    T * T^T = diag(16, 16, 4, 8, 8, 16, 4, 4, 16, 4, 4, 8, 8, 4, 4, 4)

The truly orthogonal approximation is `C = S T` with
`S = (1/4) diag(1, 1, 2, √2, √2, 1, 2, 2, 1, 2, 2, √2, √2, 2, 2, 2)`.
`S` is not computed here. In a codec it goes into the quantizer's step sizes,
which have to be scaled anyway. The outputs of this core are exactly the
integers `T x` that such a quantizer expects. For the same reason
reconstruction is exact: `16 x_i = Σ_k T[k][i] · (16/d_k) · X_k`, where `d_k`
is the k-th diagonal entry above. The testbenches check this identity.

## 2. The fast algorithm, stage by stage

    T = P2 · M4 · M3 · M2 · P1 · M1

Every `M` stage is built from one kind of butterfly. Take `I` as the identity
and `J` as the counter-identity, both of size n/2. Then `B_n = [ I  J ; J  -I ]`,
which means

    y[i]       = x[i] + x[n-1-i]          i < n/2
    y[n/2 + j] = x[n/2-1-j] - x[n/2+j]

| stage | what it is                                                  | adds |
|-------|-------------------------------------------------------------|------|
| M1    | `B_16`                                                      | 16   |
| P1    | reorders lanes 8..15 (wiring)                               | 0    |
| M2    | `B_8` on each half                                          | 16   |
| M3    | `B_4` on lanes 0..3 of each half; lanes 4..7 times -1       | 8    |
| M4    | `B_2` on lanes 0..1 of each half, plus sign changes          | 4    |
| P2    | permutation to frequency order (wiring)                     | 0    |

M2, M3 and M4 applied to one half form the 8-point block `T8` (file
`t8_mrdct.sv`). Its output order is the DCT rows 0, 4, 6, 2, 7, 3, 5, 1. For
the upper (even) half that means `X0, X8, X12, X4, X14, X6, X10, X2`. For the
lower (odd) half it means `X1, X5, X11, X3, X13, X9, X15, X7`.

### Permutations

The two permutations are published in cyclic notation:
`P1 = (10 12 16)(11 13 15)` and `P2 = (2 9)(3 8 16 15 5 4 12 11 7 6 10 14 13)`,
both 1-based. Cyclic notation can be turned into a matrix in two ways. Only
one of them makes the product of the factors equal `T`: "output element i
takes input element P[i]". That reading is checked entry by entry against the
16x16 matrix. `dct16_pkg.sv` stores the permutations 0-based in that form:

    P1_SRC = 0 1 2 3 4 5 6 7 | 8 11 12 15 14 13 10 9
    P2_SRC = 0 8 7 11 3 9 5 15 1 13 6 10 2 12 4 14      (X[k] = stacked[P2_SRC[k]])

### Where the minus signs go

This is the subtle part of the design. M3 and M4 contain single -1 entries,
and a literal implementation would spend a negator on each. None is needed:
each of those lanes is the result of a subtraction, and `-(a - b)` is `b - a`.
The `butterfly` module therefore takes a `NEG` mask. A set bit swaps the
operands of that difference output, which costs nothing. Sum outputs cannot be
negated this way, and setting `NEG` on one is an elaboration error.

Inside `T8` the signs combine as follows:

* M3 negates lanes 4..7. M4 negates lane 2 and lane 7 again. Net effect:
  lanes 4, 5, 6 of `B_8` and lane 2 of `B_4` are negated, and lane 7 is not.
* The lower half of M3·M4 has a different sign pattern from the upper half.
  Taken as a whole, it is the upper `T8` with outputs 3, 4, 5 negated. That is
  why a drawing of the algorithm shows both boxes as the same `T8`, with
  `-X3, -X13, -X9` coming out of the lower one. Here the lower instance gets
  `NEG_OUT = 8'b0011_1000`. Those three negations fold into its last
  subtractions, and the core outputs `+X3, +X13, +X9`.

The adder count therefore stays at 44: 16 in M1, then 14 in each `T8`.

## 3. Word widths

Each butterfly stage adds one bit. `|X_k| ≤ 16 · max|x_i|` holds, and DC
reaches it. So the `IN_W`-bit signed input gives exact `IN_W+4`-bit outputs,
and nothing is ever rounded or saturated. The default `IN_W = 9` holds 8-bit
pixels (0..255) and the prediction residuals of 8-bit video (-255..255). For
the second pass of a 2-D transform, use an instance whose `IN_W` equals the
first pass's output width (13), or your own narrower choice after scaling.

| point            | width (default) |
|------------------|-----------------|
| input `x`        | IN_W = 9        |
| after M1         | 10              |
| after M2 / M3 / M4 | 11 / 12 / 13  |
| output `X`       | IN_W+4 = 13     |

## 4. Pipeline and interface (`approx_dct16`)

    clk, rst_n                 clock; asynchronous active-low reset
    in_valid, x[16]            one 16-point vector per cycle, no back-pressure
    out_valid, X[16]           its coefficients, 5 cycles later

There are five registered stages: the input register, M1, and one register
after each of the three adder stages of `T8`. If `in_valid` is high in cycle
n, `out_valid` is high in cycle n+5 and carries that vector's result. The core
accepts a new vector every cycle. Reset clears only the valid pipeline, so
vectors in flight at reset never come out. Data registers are not reset.

The longest combinational path is one adder of at most 13 bits. Synthesized
generically, the core has 44 adder cells and 857 flip-flops at the default
width (852 data, 5 valid). For comparison, the FPGA realization reported with
the published transform used 936 flip-flops and 303 CLBs and reached
344.83 MHz. Its pipeline was not described, so this register placement is an
informed guess, not a copy.

## 5. Files

| file | contents |
|------|----------|
| `rtl/dct16_pkg.sv`   | default width, word growth, permutation tables `P1_SRC` / `P2_SRC`, lower-`T8` sign mask |
| `rtl/butterfly.sv`   | combinational `B_N` butterfly with free output negation (`NEG`) |
| `rtl/t8_mrdct.sv`    | 8-point approximate DCT: `B_8`, `B_4`, `B_2`, three registered stages, 14 adds |
| `rtl/approx_dct16.sv`| top: input register, M1, P1, two `T8`, P2 |
| `tb/tb_butterfly.sv` | all four butterfly sizes and sign masks the design uses, random and full-scale inputs |
| `tb/tb_t8_mrdct.sv`  | both `T8` sign variants against the 8x8 matrix; 3-cycle latency; bursts and gaps |
| `tb/tb_approx_dct16.sv` | end to end at default parameters (see below) |
| `tb/tb_dct16_2d_block.sv` | 2-D 16x16 block transform `T A T^T` with a row core and a column core |

## 6. Verification

Each testbench computes its expected values independently. It uses plain
integer dot products with the matrix written out in the testbench, not the
factorization. Each one prints `TB_RESULT checks=N failures=M` at the end.

* `tb_approx_dct16` runs the core at its default parameters. It sends 10,000
  random vectors, the same count as the hardware test of the published design,
  plus 32 directed vectors that drive every row to its positive and negative
  extremes. It checks each result against `T x`, checks the 5-cycle latency,
  and checks that the input is rebuilt exactly from the outputs. It also counts
  full-rate bursts, idle gaps, full-scale outputs and a reset with vectors in
  flight, and fails if any of these never happened.
* `tb_dct16_2d_block` builds the still-image use case. A 9-bit core transforms
  the 16 rows of each block. The testbench transposes the result, and a 13-bit
  core transforms the columns. It runs 24 blocks (gradients, noise, all-white,
  checkerboard). Each `B = T A T^T` is compared with the reference, and `A` is
  rebuilt exactly from `B`.

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -y rtl rtl/dct16_pkg.sv \
        tb/tb_approx_dct16.sv --top-module tb_approx_dct16 -Mdir obj
    ./obj/Vtb_approx_dct16

Use the same command for the other testbenches, with their own file and top
name (`-y rtl` finds the modules they use). Each one runs in well under a
second.

## 7. What is published and what is chosen here

These parts follow the publication: the matrix `T`, the factorization into
M1..M4, P1 and P2, the 8-point block and its 14-addition structure, the total
of 44 additions, the output labelling of the two 8-point blocks, and the
decision to leave `S` to the quantizer.

These parts are this implementation's own choices:

* the input width 9 and the full-precision output width;
* the placement of the five pipeline registers, and hence latency 5;
* the valid-only streaming interface, with no back-pressure and no clock enable;
* reset of the valid bits only;
* folding every -1 into operand order instead of drawing it as a negator;
* reading the cyclic permutations as "element i takes element P[i]", the only
  reading consistent with `T`.

The design has no transpose memory, no quantizer and no 2-D controller. The
publication's hardware is a 1-D core, and so is this one. A complete 2-D
transform, as used for images or in an HEVC encoder, needs a transpose buffer
between two passes. The second pass also needs a wider core: 13 bits after an
8-bit-pixel row pass, or the 16-bit intermediate values of HEVC.

## 8. Changing it

* **Width:** set `IN_W`. Everything else follows, and outputs stay exact.
* **Fewer pipeline stages:** remove registers in `t8_mrdct.sv` or
  `approx_dct16.sv`, and shorten the valid chain with them. The testbenches'
  `LAT` constants must then follow.
* **Different output order or signs:** change `P2_SRC` or the lower block's
  `NEG_OUT` in `dct16_pkg.sv`. Any output of a `T8` except output 0 can be
  negated for free.
