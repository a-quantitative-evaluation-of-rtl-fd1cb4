# Approximate softmax accelerator

Softmax turns a vector of scores into probabilities,

    p_i = e^(v_i) / sum_j e^(v_j),

and sits after the last fully-connected layer of most classifiers. On a small
FPGA its cost is in the exponential and in the division. This RTL implements
the accelerator evaluated in *A Quantitative Evaluation of Approximate Softmax
Functions for Deep Neural Networks* (Leiva-Valverde et al.), in which the
exponential is replaced by a cheap approximation: either a low-order Taylor
polynomial, or a piecewise-linear or piecewise-quadratic fit whose
coefficients are stored in small look-up tables. Which approximation, its
order or number of segments, and the fixed-point format are all build-time
parameters. The study behind it compares these options for error, area and
speed; the RTL here makes each of them available in one parameterised design.

The paper describes its accelerator at the level of the arithmetic (the
series, the table indexing, the fixed-point formats of its evaluations) and
was built with high-level synthesis; it gives no micro-architecture. The
schedule, the interface, the divider and the buffering below are this
design's own, chosen to be the simplest structure that computes what the
paper describes. Where that matters it is said so.

## The key idea: a bounded domain

An exact exponential has an unbounded range, which is why hardware softmax
normally subtracts the vector maximum first. The approach here instead bounds
the *input*: the preceding layer's outputs are scaled so that they stay in
S = (-1, 1) (in a real network by a right shift of the scores, `IN_SHIFT`
bits). On that interval e^x lies between 0.37 and 2.72, a third-order
polynomial is within about 5e-2 of it, and a table of 64 straight segments
within about 3e-4. No maximum search and no range reduction are needed, so
the exponential becomes a few multiply-adds.

Inputs outside S still work, just less accurately: the Taylor polynomial is
simply evaluated there, and the interpolators extend their first or last
segment. Results are clipped to the representable range (below zero to zero,
above the largest code to the largest code), and `exp_sat` reports each
element whose exponential hit the top.

## Number format

All data are two's-complement fixed point, `DATA_W` bits of which `FRAC_W`
are fractional (the `ap_fixed<DATA_W, DATA_W-FRAC_W>` convention). The
default is 16 bits with 12 fractional bits, range [-8, 8), one LSB = 2^-12.
Inputs, exponentials and output probabilities all use this format. The
paper's model evaluations use 12 bits with a 6-bit integer part (LeNet 5) and
20 bits with a 10-bit integer part (MobileNet v2); those are obtained by
setting `DATA_W`/`FRAC_W` to 12/6 and 20/10.

A probability of a long vector is small: with 1000 elements each is about
1e-3, i.e. four LSBs of the default format. The output resolution, not the
exponential, then limits accuracy (see *Accuracy* below); raise `FRAC_W` if
that matters.

## The exponential units

### Taylor polynomial (`exp_taylor`)

    e^x ~= 1 + x + x^2/2 + x^3/6     (ORDER = 1, 2 or 3)

Terms are formed by the recurrence t_0 = 1, t_n = t_(n-1) * x / n. Each
product is brought back to `FRAC_W` fractional bits by an arithmetic shift
and divided by the constant n, then all terms are summed in a wide register.
The hardware cost is one multiplier and one constant divider per order. A
term's truncation error is multiplied by x in the following terms, so the
datapath error grows roughly as |x|^2 LSB away from zero; inside S it is at
most a few LSB. Odd orders go negative for x < -1 (order 1) or x < -1.6
(order 3); such results are clamped to zero.

### Look-up-table interpolation (`exp_lut_interp`)

S = [-1, 1) is divided into `SAMPLES` equal segments, `SAMPLES` a power of
two. Because it is a power of two the segment number is a shift, not a
division:

    u = x + 1                         (now in [0, 2))
    p = u >> (FRAC_W + 1 - log2(SAMPLES))

With the defaults (12 fractional bits, 64 segments) p is bits 12..7 of `u`.
Indices below 0 or above `SAMPLES-1` are clamped, so the edge segments
extrapolate.

Per segment the tables hold the coefficients of a polynomial in x itself
(not in the offset inside the segment), so that evaluation is a single
multiply-add in the linear case:

* linear (`QUADRATIC = 0`): `y = M[p]*x + B[p]`, with `M`, `B` the slope and
  intercept of the chord through e^x at the two segment ends;
* quadratic (`QUADRATIC = 1`): `y = A[p]*x^2 + M[p]*x + B[p]`, the parabola
  through e^x at the start, middle and end of the segment.

The coefficients are fixed when the design is elaborated: a constant
function evaluates e^x in real arithmetic (range reduction by 2^8, a 24-term
series, eight squarings), forms the chord or parabola and rounds each
coefficient to `FRAC_W + GUARD_W` fractional bits (`GUARD_W` = 8). No table
file is involved; changing `SAMPLES` regenerates the tables. The result is
rounded to nearest and clipped. The largest approximation error inside S,
before rounding, is h^2/8 * e for the linear fit and h^3/(9*sqrt(3)) * e for
the quadratic one, with h = 2/SAMPLES (about 3.3e-4 and 2.6e-6 for 64
segments).

`exp_approx` selects one of the two units from `EXP_METHOD`
(`EXP_TAYLOR`, `EXP_LUT_LINEAR`, `EXP_LUT_QUAD`, declared in `softmax_pkg`);
only the chosen one is built.

## Normalisation: one division per vector

Dividing every exponential by the sum would need a divider working at the
element rate. Instead the sum's reciprocal is computed once, and every
exponential is multiplied by it:

    r   = floor(2^(FRAC_W + ACC_W) / S)        S = sum of exponentials (raw code)
    p_i = (e_i * r) >> ACC_W                   = e_i / S with FRAC_W fraction bits

`ACC_W = DATA_W + log2(VEC_LEN)` (26 by default) is the accumulator width,
large enough that the sum of `VEC_LEN` exponentials never overflows. Because
every e_i is below 2^ACC_W, the truncation of r moves any p_i by less than
one LSB. r has `NUM_W = FRAC_W + ACC_W + 1` bits (39) and is produced by
`recip_divider`, a restoring divider that makes one quotient bit per clock.
An all-zero sum (possible only when every exponential clamps to zero) gives
an all-ones r and saturated outputs.

## Schedule and interface (`softmax_top`)

Each vector goes through three phases:

| phase | what happens | cycles |
|-------|--------------|--------|
| LOAD  | each input: `x >>> IN_SHIFT`, exponential, write to `exp_buffer`, add to the sum | `len`, one element per cycle |
| DIV   | reciprocal of the sum | `NUM_W + 2` |
| OUT   | read the buffer back in order, multiply by r, stream out | `len`, one per cycle unless stalled |

Ports:

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `start`, `len` | in | begin a vector of `len` elements (taken while `busy` is low; 0 or more than `VEC_LEN` means `VEC_LEN`) |
| `busy`, `done` | out | vector in progress; one-cycle pulse after the last output is taken |
| `in_valid`, `in_ready`, `in_data` | | input stream; `in_ready` is high throughout LOAD |
| `out_valid`, `out_ready`, `out_data`, `out_last` | | output stream; data hold while `out_ready` is low |
| `exp_sat` | out | the exponential of the element taken this cycle saturated |

Timing: `in_ready` rises at the clock edge that takes `start`. `out_valid`
rises `NUM_W + 4` edges after the edge that takes the last input, and with no
back-pressure `done` is seen `2*len + NUM_W + 5` edges after the edge that
takes `start` (2 * 1024 + 44 = 2092 for a full default vector).

The output side is a two-stage pipeline (buffer read register, output
register) that advances as a whole whenever the output register is empty or
being taken; the buffer's read port holds its data while it is not enabled,
so a stall loses nothing and costs no extra cycle. Concurrent assertions in
`softmax_top` state the output rule (`out_valid` and the data hold until
taken).

The exponential unit sits combinationally between `in_data` and the sum and
buffer registers (up to three multiplies and a constant divide in series for
third-order Taylor), so it sets the clock period. A register stage there
would cost one cycle of latency and nothing in throughput.

`exp_buffer` is a plain dual-port array of `VEC_LEN x DATA_W` bits (16 Kbit by
default), written in LOAD and read in OUT, suitable for block RAM.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `DATA_W` | 16 | data width (the paper: 16 in its standalone study; 8 to 32 in its sweep) |
| `FRAC_W` | 12 | fractional bits (no split is given for 16 bits; 6 for LeNet 5's 12 bits, 10 for MobileNet v2's 20 bits) |
| `VEC_LEN` | 1024 | longest vector, depth of `exp_buffer` (the paper: 1024) |
| `IN_SHIFT` | 0 | right shift of each input before the exponential (the paper: 3 for LeNet 5, 1 for MobileNet v2) |
| `EXP_METHOD` | `EXP_TAYLOR` | approximation of e^x |
| `TAYLOR_ORDER` | 3 | 1, 2 or 3 |
| `LUT_SAMPLES` | 64 | number of interpolation segments, a power of two, at most 2^(FRAC_W+1) |

## Accuracy

Measured with the workload testbenches: softmax of random 1000-element
vectors in (-1, 1) at 16/12 bits, RMSE of the probabilities against exact
floating-point softmax:

| exponential | RMSE |
|-------------|------|
| Taylor, order 1 | 1.9e-4 |
| Taylor, order 2 | 1.5e-4 |
| Taylor, order 3 | 1.4e-4 |
| linear, 64 segments | 1.4e-4 |
| quadratic, 64 segments | 1.4e-4 |

At this size the floor of about 1.4e-4 is the truncation of the output to
2^-12 (a truncation error spread evenly over one LSB has an RMSE of about
0.6 LSB); only the first- and second-order polynomials stand out above it.
The paper reports RMSEs down to 2.3e-7 for the same test, which no output
with 12 fractional bits can reach; its comparison must have been made at a
higher precision that it does not state. The ranking (order 3 better than
orders 1 and 2, the interpolators at least as good) is the same.

The data-length sweep (third-order Taylor and 64-segment linear, 1024
elements in (-1, 1), four integer bits) shows where the output format bites:

| data width (fractional bits) | Taylor 3 RMSE | linear 64 RMSE |
|------------------------------|---------------|----------------|
| 8 (5)   | 1.1e-3 | 1.1e-3 |
| 12 (8)  | 1.1e-3 | 1.1e-3 |
| 24 (20) | 8.8e-6 | 5.5e-7 |
| 32 (28) | 9.1e-6 | 4.1e-8 |

At 8 and 12 bits every probability of a 1024-element vector (about 1e-3) is
below one output LSB, so every output is zero and the RMSE is just the size
of the probabilities; such widths only suit short vectors, such as the
10-class layer below. From 24 bits on, the exponential dominates: the
Taylor polynomial's own error (up to 5e-2 at the ends of S) sets a
floor near 9e-6, while the 64-segment table keeps improving with width.

For 10-element vectors at the LeNet 5 setting (12 bits, 6 fractional, shift
3, random scores in (-16, 16)), the arg-max of the hardware output agreed
with exact softmax in 173 of 200 vectors (Taylor order 1) to 192 of 200
(Taylor order 3); the coarse 2^-6 output creates ties, and the first of
tied maxima is counted. These are random vectors, not network outputs, so
they say nothing about a trained model's accuracy.

## Where this departs from the paper

* **Micro-architecture.** The paper's accelerator is high-level synthesis
  code and its structure is not published. The three-phase schedule, the
  reciprocal-and-multiply normalisation, the restoring divider, the buffer
  and the valid/ready interface are choices made here.
* **Speed.** The paper reports 1.1 to 1.24 us for a 1024-element vector.
  This design takes about 2100 cycles for it, so it would need a clock near
  1.7 GHz to match; the paper's design must process several elements per
  cycle, but it does not say how many. No parallel lanes are built here.
* **Table index.** The paper writes the index as `p = x' >> P` with P "the
  number of points"; a shift by the number of points would not produce a
  table index, so the shift here is by the number of bits that select a
  position inside a segment, after offsetting x into [0, 2).
* **Quadratic fit points.** The paper says only that a quadratic needs three
  points; the segment start, middle and end are used here.
* **Clipping.** Negative exponentials are clamped to zero and overflowing
  ones saturated; the paper does not say what its design does.
* **Exact baseline.** The paper compares against an exact exponential from
  its synthesis tool's library; that baseline is not part of this design.
* **Output precision.** Probabilities are returned in the input format, so
  the RMSE figures above are far from the paper's (see *Accuracy*).

## Files

`rtl/`

* `softmax_pkg.sv` - `exp_method_e` and the elaboration-time `real_exp`.
* `softmax_top.sv` - the accelerator: sequencing, sum, normalisation.
* `exp_approx.sv` - build-time choice of exponential unit.
* `exp_taylor.sv`, `exp_lut_interp.sv` - the two exponential units.
* `recip_divider.sv` - restoring divider.
* `exp_buffer.sv` - vector memory.

`tb/` - every testbench prints `TB_RESULT checks=N failures=M` and stops
itself; each has a watchdog.

* `tb_exp_taylor.sv`, `tb_exp_lut_interp.sv`, `tb_recip_divider.sv`,
  `tb_exp_buffer.sv` - unit tests against independent real-number or
  integer models (Taylor orders 1-3; linear 64 and 8 and quadratic 64
  segments; quotient and latency; read, hold and read-during-write).
* `tb_softmax_top.sv` - the accelerator at its default parameters: full and
  short vectors, random input gaps and output stalls, saturating and clamped
  exponentials, `len = 0`, a one-element vector. It checks every
  probability, `out_last`, `done`, the one-per-cycle rate and the latency,
  and that each of these situations actually occurred.
* `softmax_workload.sv` - harness that runs several builds side by side on
  the same random vectors and checks each against its own approximation
  model; `softmax_ref_pkg.sv` holds those real-number models.
* `tb_softmax_accuracy.sv`, `tb_softmax_lenet.sv`, `tb_softmax_mobilenet.sv`
  - the paper's three evaluation settings (standalone 16-bit, LeNet 5 layer,
  MobileNet v2 layer) with all the exponential variants each compares.
* `tb_softmax_widths.sv` - the data-length sweep at 8, 12, 24 and 32 bits.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/softmax_pkg.sv tb/softmax_ref_pkg.sv tb/tb_softmax_top.sv \
        --top-module tb_softmax_top
    ./obj_dir/Vtb_softmax_top

Replace `tb_softmax_top` by any other testbench name. Each runs in well
under a second. To try another configuration, override the parameters of
`softmax_top` (for example `.EXP_METHOD(softmax_pkg::EXP_LUT_QUAD)`,
`.LUT_SAMPLES(32)`, or `.DATA_W(20), .FRAC_W(10), .IN_SHIFT(1)`), or add a
configuration to one of the workload testbenches.
