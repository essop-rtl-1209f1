# ESSOP: a stochastic outer-product array for weight updates

Training a neural network layer ends with a weight update: the outer product

    dW = Delta * X^T

of the layer's error gradient `Delta` (length `C_out`) and its input
activations `X` (length `C_in`, or `9*C_in` for a 3x3 convolution after
im2col). For an `N x N` layer that is `N^2` multiplications, which are often
the most costly part of training once the matrix-vector products have been
made cheap.

ESSOP computes these products with stochastic computing. Each operand becomes
a short stream of `M` random bits whose density of ones is proportional to its
magnitude. The AND of two such streams has a density proportional to the
product, so one AND gate and a small counter replace a floating-point
multiplier. A 64-wide row of such multipliers produces 64 FP16 weight updates
every `M` clocks. With `M = 16` that is 4 products per clock. The published
design reaches 2.54 GHz in 14 nm, which is 10.2 GOp/s.

This repository holds synthesizable SystemVerilog of that array for FP16
operands and sequences of up to 16 bits (the "ESSOP16(16)" configuration). It
also holds self-checking testbenches. The architecture follows the ESSOP paper
(Joshi et al., ISCAS 2020). The paper describes the blocks and the arithmetic
but not every bit width, encoding or handshake. Where this RTL had to choose,
the choice is stated below and in the head of each file.

## 1. From numbers to bit streams

Stochastic computing needs operands in [0, 1]. Network values are unbounded,
so the design adds three ideas, all of them in hardware form.

**No normalisation.** Classic stochastic computing would divide every element
by the vector's maximum before comparing it with a uniform random number. ESSOP
instead scales the random number: a Bernoulli bit is

    bit = |x| >= y_max * u,        u uniform in [0, 1)

If `y_max` is a power of two, `y_max * u` needs no multiplier. The power's
exponent becomes the exponent of the threshold and the random bits its
mantissa. The host supplies `E_X` (and `E_Delta`), the FP16 exponent field of
the vector's largest magnitude. This RTL takes

    y_max = 2^(E - 14)

which is the power of two just above every number whose exponent field is
`E`. So `P(bit = 1) = |x| / y_max`, which lies in [0, 1) for every element of
the vector.

**Bit assembly of the threshold** (`essop_rand_fp16`). The generator gives
`P = 10` random bits `r`, read as the fraction `u = r / 2^10`. To write
`u * 2^(E-14)` as a normal FP16 number, the leading-zero count `lz` of `r` is
used:

    threshold = 1.f * 2^(E - lz - 15)
    exponent field = E - lz
    mantissa f     = the bits of r below its leading one, left-aligned

When the top random bit is 1, the exponent is exactly `E` and the mantissa is
the random bits. That is the literal "exponent from the maximum, mantissa from
the RNG" picture. The normalisation for the other cases is this design's
addition: plain concatenation under FP16's hidden one would only produce
thresholds in `[2^(E-15), 2^(E-14))`. Thresholds below the smallest normal
number, and `r = 0`, give `+0`.

Example: `E = 17` (so `y_max = 8`), `r = 0b0011010000` (`u = 0.203125`). Then
`lz = 2`, the exponent field is 15 and the mantissa is `0b1010000000`. The
threshold is `1.625 * 2^0 = 1.625 = 0.203125 * 8`.

**Comparison** (`essop_comparator`). For non-negative IEEE numbers, magnitude
order is the unsigned order of the 15 exponent-and-mantissa bits. The
comparator is therefore a 15-bit `>=`, and it works for subnormal operands too.
Each element's sign bit bypasses the comparison and goes straight to the unit
cell.

**Sharing the random numbers.** There are only two generators: `R_X` for all of
`X` and `R_Delta` for all of `Delta`. They produce one number each per clock.
Each number is broadcast to every comparator of its vector, so one threshold
assembly per vector is enough. All rows of one outer product use the same `M`
numbers. Only a new outer product moves on to fresh ones. The two generators
have different seeds, so the `X` and `Delta` streams are independent, and the
AND of two bits has probability `p_x * p_d`.

## 2. The unit cell and the output scale

Each unit cell `U_i` (`essop_unit_cell`) works as follows, every clock of a
row:

    hit  = bern_x[i] & bern_delta        // stochastic multiply
    cnt += hit                           // ones counter, 0..M
    sign = sign_x[i] ^ sign_delta        // product sign

After `M` clocks, `cnt / M` estimates `|x_i * delta| / (y_x * y_d)`. The scale
that turns the count back into a weight update is

    F_scale  = y_x * y_d / M
    F~scale  = 2^(floor(log2 F_scale)) * 2^-lr_shift
             = 2^(E_X + E_Delta - 28 - ceil(log2 M) - lr_shift)

`essop_fscale` computes this once, at the periphery, as a signed FP16 biased
exponent `fexp = E_X + E_Delta - 13 - ceil(log2 M) - lr_shift`. The learning
rate can be folded in as a right shift (`lr_shift`), so an SGD step can come
straight out of the array. Because `y_x` and `y_d` are powers of two,
`F~scale` equals `F_scale` whenever `M` is a power of two (2, 4, 8, 16). The
estimate is then unbiased, apart from the 10-bit resolution of the threshold.

**Shift logic** (`essop_shift_logic`). It packs `cnt * F~scale` into FP16:
the sign comes from the XOR, `F~scale` goes into the exponent and the count
into the mantissa. With `L = floor(log2 cnt)`, the exponent field is
`fexp + L` and the mantissa holds the count bits below its leading one. The
packed value is exactly `cnt * 2^(fexp-15)`. Results that do not fit saturate
to `+-0x7BFF` (65504). Results below the normal range become a signed zero, and
`cnt = 0` also gives a signed zero.

The result is stored in a 16-bit register per cell (`dw[i]`). That register
is written in the last clock of a row, so it holds the row's result until the
next row finishes. The counter is loaded, not cleared, in a row's first clock,
so a new row can begin immediately.

## 3. Organisation of the array

```
         X^1 ... X^N (FP16)     E_X                          config G
           |        |            |                           (M, lr_shift)
R_X --u--> essop_rand_fp16 -----> threshold_x (shared)            |
           |        |                                              v
          C_X1 ... C_XN   (|x_i| >= thr, sign passes by)     essop_sequencer
           |        |                                       first/last/done,
Delta^j -> C_Delta <- essop_rand_fp16 <- R_Delta, E_Delta    RNG control
           |  (bern_d, sign_d broadcast)                          |
           v        v                                             v
          U_1  ...  U_N  <---- fexp <---- essop_fscale(E_X, E_Delta, M, lr)
           |        |
        dW^{j,1} .. dW^{j,N}  (FP16, registered)
```

| module | role | paper's part |
| --- | --- | --- |
| `essop_top` | the array: N = 64 cells, comparators, RNGs, control | Fig. 3 |
| `essop_rng` | 16-bit LFSR, 10 bits per clock, snapshot for reuse | R_X, R_Delta |
| `essop_rand_fp16` | bit assembly of the FP16 threshold | R^i, R^D |
| `essop_comparator` | `abs(value) >= threshold`, sign forwarded | C_Xi, C_Delta |
| `essop_unit_cell` | AND, XOR, counter, shift logic, output register | U_i |
| `essop_shift_logic` | count times F~scale, packed as FP16 | shift logic |
| `essop_fscale` | power-of-two scale with learning rate | F~scale |
| `essop_config` | sequence length and learning-rate shift | G |
| `essop_sequencer` | row timing and RNG control | (control) |
| `essop_pkg` | FP16 types, configuration struct, constants | |

## 4. Using the array: timing and host protocol

One **row** is one gradient element `Delta^j` against the whole of `X`. It
yields `dW^{j,1..N}`. A full outer product is `C_out` rows. Longer `X` vectors
are cut by the host into tiles of `N`.

Ports of `essop_top`:

| port | dir | width | meaning |
| --- | --- | --- | --- |
| `x[N]` | in | 16 each | activation vector (FP16) |
| `e_x` | in | 5 | exponent field of max abs(X) |
| `delta` | in | 16 | current gradient element |
| `e_d` | in | 5 | exponent field of max abs(Delta) |
| `cfg_we`, `cfg_seq_len`, `cfg_lr_shift` | in | 1, 5, 4 | configuration write |
| `start`, `new_op` | in | 1, 1 | start a row; first row of a new outer product |
| `busy`, `done` | out | 1, 1 | row running; results valid (one-clock pulse) |
| `dw[N]` | out | 16 each | weight updates of the last finished row |

The host must follow these rules:

* Write the configuration while idle. A write while `busy` is ignored. A
  length of 0 is stored as 1, and a length above 16 is stored as 16.
* Raise `start` for one clock when idle, or in the last clock of the running
  row to chain the next row with no gap. Set `new_op` with the first row of
  each outer product. An assertion flags a `start` at any other time.
* Hold `x`, `e_x`, `delta` and `e_d` stable for all `M` clocks of the row.
  When chaining, change them on the edge that accepts the next `start`.
* `done` is high in the clock after the row's `M`-th clock, and `dw` is valid
  from then on.

Clock by clock, for `M = 3` and two chained rows:

| clock | start | inputs | busy | first | last | done | dw |
| --- | --- | --- | --- | --- | --- | --- | --- |
| 0 | 1 (`new_op` 1) | d0 | 0 | 0 | 0 | 0 | old |
| 1 | 0 | d0 | 1 | 1 | 0 | 0 | old |
| 2 | 0 | d0 | 1 | 0 | 0 | 0 | old |
| 3 | 1 (chain) | d0 | 1 | 0 | 1 | 0 | old |
| 4 | 0 | d1 | 1 | 1 | 0 | 1 | row 0 |
| 5 | 0 | d1 | 1 | 0 | 0 | 0 | row 0 |
| 6 | 0 | d1 | 1 | 0 | 1 | 0 | row 0 |
| 7 | 0 | - | 0 | 0 | 0 | 1 | row 1 |

A row therefore costs exactly `M` clocks when rows are chained, and `M + 1`
from `start` to `done`. The design is sequential and not pipelined.

## 5. Configuration register G

`essop_config` holds the sequence length `M` (1..16, reset 16) and
`lr_shift` (0..15, reset 0) as the packed struct `essop_cfg_t`. The paper
evaluates `M = 16`, 8 and 2. Any value in between works, but when `M` is not a
power of two, `F~scale` rounds down and the estimate shrinks by `M / 2^ceil(log2 M)`.

## 6. Accuracy to expect

The end-to-end testbenches measure the RMS error of the estimated `dW`,
relative to the scale `y_x * y_d`, over random layers:

| layer shape (C_out x 9C_in) | M = 16 | M = 8 | M = 2 |
| --- | --- | --- | --- |
| 64 x 576 (ResNet-32 stage 3) | 0.023 | 0.034 | 0.086 |
| 64 x 64 (signed X) | 0.028 | | |

The training results of the paper (ResNet-32 on CIFAR-10, within about 1% of
FP16 baseline accuracy for `M = 16` and 2.6% for `M = 2`) cannot be
reproduced by this RTL alone. They need a training loop around the array.

## 7. Departures from the paper and choices made here

Items that follow the paper:

* N = 64 unit cells in a row.
* FP16 operands and Bernoulli sequences of up to 16 bits.
* One comparator per input, with `|x| >= threshold`.
* Exactly two RNGs, whose `M` numbers are reused across the vector and the
  outer product.
* Thresholds built from the maximum's exponent and the RNG mantissa, without
  multiplication.
* Unit cells with XOR, AND, counter and shift logic.
* `F~scale` as a power of two with the learning rate folded in.
* A configuration register for the sequence length.
* `M` clocks per product.

Choices made here, where the paper is silent or only sketches:

* **Threshold scale.** The threshold scale is `y_max = 2^(E-14)`, the power of
  two above the maximum. The threshold is normalised by a leading-zero count
  (section 1). `F~scale` uses the same `y_max`, so the estimate stays unbiased.
  The paper writes `F_scale = x_max * delta_max / M` with the exact maxima.
* **Shift logic normalisation.** The shift logic normalises the count. The
  paper describes copying the count into the mantissa, which would not give
  `cnt * F~scale` with FP16's hidden one.
* **Edge cases.** Results saturate on overflow and flush to zero on underflow.
  Thresholds flush to zero below the normal range. Inf and NaN inputs are not
  handled specially.
* **Output storage.** The output is an edge-triggered register rather than a
  latch.
* **RNG details.** The RNG is a 16-bit Fibonacci LFSR
  (`x^16 + x^14 + x^13 + x^11 + 1`). It advances 10 bit-steps per clock, with
  seeds `16'hACE1` for `R_X` and `16'h1D2B` for `R_Delta`. A snapshot register
  implements "the same `M` numbers for the whole outer product".
* **Control.** The `start`/`new_op`/`busy`/`done` handshake, chained rows,
  the clamping of the configuration, and synchronous active-low reset are all
  this design's own.
* **Exponent inputs.** `E_X` and `E_Delta` are inputs. Finding the maximum of
  a vector is left to the host, as in the paper's block diagram.

Not built:

* The reference FP16 multiplier array that the paper compares against.
* Accumulation of outer products over a mini-batch or over the spatial
  positions of a convolution.
* The 14 nm physical implementation. For reference, the paper reports
  2676 um^2, 11 kGE, 2.54 GHz and 19.1 mW for 64 cells.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and stops with a watchdog if it hangs. The
reference models live in `tb/tb_essop_ref_pkg.sv`. They are written
independently of the RTL: FP16 numbers are decoded and encoded with real
arithmetic, and the LFSR is stepped bit by bit from its polynomial.

| testbench | what it checks |
| --- | --- |
| `tb_essop_rand_fp16` | all 32 x 1024 exponent/random pairs against `u * 2^(E-14)` |
| `tb_essop_comparator` | 20 000 random and corner-case FP16 pairs |
| `tb_essop_shift_logic` | every count, sign and exponent from -40 to 60 |
| `tb_essop_fscale` | exponents, lengths 1..16, learning-rate shifts |
| `tb_essop_rng` | LFSR sequence, replay on restart, capture, priorities |
| `tb_essop_config` | reset values, writes, clamping |
| `tb_essop_sequencer` | row lengths 1..16, done timing, chaining, RNG control |
| `tb_essop_unit_cell` | random rows, exact FP16 results and their timing |
| `tb_essop_top` | full-size array; see below |
| `tb_essop_workload_resnet` | ResNet-32 layer shapes, tiled onto 64 cells, at M = 16, 8, 2 |

`tb_essop_top` runs the array at its default size (N = 64, M up to 16). It
runs a full 64 x 64 outer product at M = 16 and checks all 4096 results
exactly. It then covers M = 8 with a learning-rate shift, M = 2 with idle gaps
and a configuration write during a row (which must be ignored), an overflowing
product and an underflowing one. It checks that every mechanism occurred at
least once.

`tb_essop_workload_resnet` checks 144 000 outputs exactly. It also checks that
a layer of `R` rows takes exactly `R * M` clocks.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/essop_pkg.sv tb/tb_essop_ref_pkg.sv tb/tb_essop_top.sv \
    --top-module tb_essop_top -o sim
./obj_dir/sim
```

Every file in `rtl/` passes `verilator --lint-only -Wall`; the only remaining
warnings are about unused package constants and bits. Every file in `rtl/` also
elaborates in Yosys with the slang front end. Synthesised at the default size,
the array has about 1430 flip-flop bits: 21 per cell (a 5-bit counter and a
16-bit result) and 32 for the two generators.

## 9. Changing the design

* `essop_top #(.N(...))` sets the number of unit cells. The testbenches
  assume 64.
* `M_MAX` sets the longest sequence. The counter width follows it as
  `$clog2(M_MAX+1)`. `SEQ_W` in `essop_pkg` (5 bits) must hold `M_MAX`, and
  `essop_fscale` handles lengths up to 16.
* `P` sets the number of random bits per threshold, 10 by default (the FP16
  mantissa). It may not exceed the 16-bit LFSR.
* Another floating-point format needs new constants in `essop_pkg` and a new
  `FP16_MAX_MAG`. The comparator and the bit assembly depend only on the
  exponent and mantissa widths.
