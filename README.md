# MX dot-product engine: shared microexponents in RTL

Block floating point shares one exponent across a block of numbers, so each
element only stores a sign and a short mantissa. That is cheap in hardware.
The drawback is that every element in the block is scaled to fit the largest
one. Small elements next to an outlier lose most of their bits.

The MX formats add a second, much finer level of scaling:

* 16 elements share an 8-bit exponent. This is the first level (k1 = 16, d1 = 8).
* Each pair of elements inside that block also shares a 1-bit *microexponent*
  (k2 = 2, d2 = 1). When both elements of a pair are at least a factor of two
  below the block maximum, the pair is shifted up by one bit and keeps one more
  bit of precision.

In hardware, the microexponent costs only a conditional one-bit shift in the
adder tree. "A little shifting goes a long way."

This repository has synthesizable SystemVerilog for a complete MX dot-product
engine. It takes two FP32 vectors, quantizes them to MX in hardware, forms the
64-element dot product in the MX pipeline, and accumulates the results in FP32.
The format is selected per operation: MX9, MX6 or MX4. The design follows
the dot-product pipeline and the format definitions published by Rouhani et al.
in "With Shared Microexponents, A Little Shifting Goes a Long Way". That
description gives the stages and their bit widths, but not every rounding rule
or control detail. Those are filled in here, and each one is listed below under
"Choices made in this implementation".

## 1. The number format

One MX block holds K1 = 16 elements:

| field | bits | count per block |
|---|---|---|
| shared exponent E (biased like FP32, bias 127) | d1 = 8 | 1 |
| sub-block shift ss (the microexponent) | d2 = 1 | K1/K2 = 8 |
| sign | 1 | 16 |
| magnitude | m | 16 |

An element's value is

    x = (-1)^sign * (mag / 2^(m-1)) * 2^(E-127) * 2^(-ss)

The magnitude has one integer bit and no hidden bit, so it lies in [0, 2).

The three formats differ only in m:

| format | m | bits per element: (m+1) + d1/k1 + d2/k2 |
|---|---|---|
| MX9 | 7 | 8 + 0.5 + 0.5 = 9 |
| MX6 | 4 | 5 + 0.5 + 0.5 = 6 |
| MX4 | 2 | 3 + 0.5 + 0.5 = 4 |

The hardware is built for the widest magnitude, M = 7. An MX6 or MX4 magnitude
is stored left-aligned in that 7-bit field (`mag << (7-m)`). The value formula
above then holds with m = 7 for every format, so one datapath serves all three.
`mx_pkg` holds these constants and the format codes MX9 = 0, MX6 = 1, MX4 = 2.

## 2. Quantization (`mx_quantizer`)

One quantizer converts 16 FP32 values into one MX block. It is combinational.

1. **Shared exponent.** E is the largest FP32 exponent field in the block.
2. **Microexponents.** For each pair, e_pair is the larger of its two exponents.
   Then `ss = min(2^d2 - 1, E - e_pair)`. With d2 = 1, ss is 1 exactly when
   both elements of the pair are at least one binade below E.
3. **Magnitudes.** Each element is divided by `2^(E-127-ss)` and scaled by
   `2^(m-1)`, then rounded to an m-bit integer. In hardware this is a right
   shift of the 24-bit significand by `24 - m + E - ss - e`, plus the bit just
   below the cut. Ties therefore round away from zero.
4. **Clamping.** The largest element can round up to 2.0, which needs m+1
   bits. It is clamped to `2^m - 1`. Clamped elements are counted on `n_sat`.

FP32 zeros and subnormals become magnitude 0. Infinity and NaN get no special
treatment: exponent 255 is used as an ordinary exponent.

## 3. The dot-product pipeline (`mx_dot_product`)

This is the core of the design. It computes the dot product of two R = 64
element MX vectors, which is NB = R/K1 = 4 block pairs. The stages and widths
follow the published pipeline figure. Widths below are for the default
parameters. "Fraction bits" means bits below the LSB of an integer mantissa
product.

| stage | module | width per item (defaults) | what happens |
|---|---|---|---|
| multiply, XOR, two's complement | `mx_mul_tc` | 64 × (2M+1) = 15 | `mag_a*mag_b`, negated if the signs differ |
| sub-block sum and shift | `mx_subblock_reduce` | 32 × (2M + 2^d2 + log2 k2) = 17 | add the pair; shift right by `ss_a + ss_b` |
| block sum | `mx_block_reduce` | 4 × (2M + 2^d2 + log2 k1) = 20 | add the 8 shifted pair sums of a block |
| exponent add, max, subtract | `mx_exp_align` | 4 × (d1+1) = 9 | `E_a+E_b` per block, the maximum, the distance below it |
| leading-zero count, subtract, shift | `mx_lzc`, `mx_block_align` | 4 × f = 25 | align every block sum to the largest block |
| fixed-point sum | in `mx_dot_product` | f + log2(r/k1) = 27 | add the 4 aligned values |
| FP32 convert | `mx_fp32_convert` | 32 | normalise, round to nearest even, pack |
| FP32 accumulate | `mx_fp32_acc` | 32 | FP32 add into the accumulator register |

### The microexponent shift

The two operands' sub-block shifts are added, giving a d2+1 = 2-bit shift of
0, 1 or 2 for each pair of products. The pair sum (2M+2 = 16 bits) gets
2^d2 - 1 = 1 fraction bit appended and is then arithmetically shifted right:

    pair = floor( (p0 + p1) * 2^1 / 2^(ss_a + ss_b) )

This is the whole cost of the second scaling level: an adder, a 2-bit shifter
and one extra bit on the adder tree. A combined shift of 2 drops one LSB, by
truncation towards minus infinity. The reason is explained under
"Choices made in this implementation".

### Aligning the blocks

Each block pair has its own exponent, `E_a + E_b`, which still carries twice the
FP32 bias. `mx_exp_align` finds the largest of these, `max_exp`. It gives each
block its distance below the maximum, `diff`.

`mx_block_align` then moves each 20-bit block sum into a 25-bit frame whose
scale is set by `max_exp`. It works in three steps:

1. `mx_lzc` counts the redundant sign bits `lz` of the block sum. The sum is
   shifted left by `lz`, which normalises it.
2. The block's exponent is now `block_exp - lz`. The alignment shift is
   therefore `max_exp - (block_exp - lz) = diff + lz`.
3. The normalised sum is placed at the top of the 25-bit word and shifted
   right arithmetically by that amount. Bits that fall off the bottom are
   truncated.

The net result is `floor(sum * 2^(f-20) / 2^diff)`. The frame has f - 20 = 5
guard bits below the LSB of the largest block. A non-zero block can end up with
an aligned value in [-1, 1): all its significant bits were lost. Such a block is
reported as *flushed* on the `flush_blocks` output.

### Back to FP32

The four aligned values are added in 27-bit fixed point. The result `S`
represents

    S * 2^(max_exp - 254 - LSB_OFS),   LSB_OFS = 2(M-1) + (2^d2 - 1) + (f - BW) = 18

`mx_fp32_convert` normalises |S| with a leading-one search and rounds it to
24 bits with round-to-nearest-even. Results below 2^-126 become +0, and results
of 2^128 or more become infinity. `mx_fp32_acc` adds each result into an FP32
register. Its adder also rounds to nearest even, reads subnormal inputs as zero
and flushes subnormal results to +0.

### Timing

As in the area study this design is based on, `mx_dot_product` registers only
its inputs and its output. Everything in between is one combinational stage.
A dot product presented with `in_valid` appears on `result`, with `out_valid`,
two clocks later. A new one can start every clock.

## 4. The top level (`mx_dot_top`)

    inputs : clk, rst_n (synchronous, active low), in_valid, fmt (mx_fmt_e),
             acc_clear, a[64] and b[64] (FP32)
    outputs: dot_valid, dot (FP32), sat_count, flush_blocks,
             acc_valid, acc (FP32)

Inside, 4 + 4 quantizers (one per 16-element block of each operand) feed the
dot-product pipeline, and its output feeds the accumulator.

| clock | event |
|---|---|
| 0 | operands, `fmt`, `acc_clear` presented with `in_valid`; quantized combinationally into the input register |
| 2 | `dot_valid`, `dot`, `sat_count` (elements clamped in both operands), `flush_blocks` |
| 3 | `acc_valid`, `acc` |

`acc_clear` travels with its operation. That operation's dot product becomes
the first term of a new sum, and the next operations add to it. `fmt` may change
on any operation.

## 5. Parameters

Every module takes the parameters it needs. The defaults are the MX values:

| parameter | default | meaning |
|---|---|---|
| `M` | 7 | magnitude field width (MX9's m; MX6/MX4 use its upper bits) |
| `K1` | 16 | elements per block |
| `K2` | 2 | elements per microexponent |
| `D1` | 8 | shared exponent bits |
| `D2` | 1 | microexponent bits |
| `R` | 64 | dot-product length |
| `F` | 25 | fixed-point frame for block alignment (must be at least 2M + 2^D2 + log2 K1) |

The published source defines k1, k2, d1, d2 and the three mantissa widths. It
gives f as "the smaller of 25 or the maximum possible dynamic range". It gives
no length r for the MX unit. The default of 64 matches the 64-element FP8 dot
product that the source uses as its area reference. With `K1 = K2 = 1` the same
pipeline would be a scalar floating-point dot product, and with `D2 = 0` a plain
block floating-point one. These settings are not exercised by the testbenches
here. `D2 = 0` in particular gives zero-width ports.

## 6. Choices made in this implementation

The published description fixes the stages, the widths and the format. The
following are this design's own choices:

* **Sub-block shift range.** The text says the pipeline shifts "up to
  2^d2 - 1 bits". But the adder that combines the two operands' shifts is
  d2 + 1 bits wide, so the combined shift can reach 2·(2^d2 - 1). Here the full
  combined shift is applied, and the printed output width
  (2M + 2^d2 + log2 k2) is kept. For d2 = 1, a combined shift of 2 therefore
  truncates one LSB.
* **Leading-zero counter.** The pipeline figure names a leading-zero counter
  and a subtract in front of the alignment shifter, but the text does not say
  how they work. The normalise-then-shift scheme of section 3 is a
  reconstruction. Its result equals a plain shift by `diff`.
* **Rounding and special values.**
  * The quantizer rounds to nearest with ties away from zero, and saturates.
  * The FP32 converter and the accumulator round to nearest even.
  * Subnormals are flushed to zero.
  * Infinity saturates; NaN is not produced or recognised.
  * Truncation inside the fixed-point pipeline is towards minus infinity.
* **Registers.** The dot product has input and output registers only. The
  quantizers are combinational in front of the input register, and the
  accumulator adds one more register. The source synthesised its units the
  same way, with only inputs and outputs registered. It gives no pipelining for
  a product.
* **Control.** The `in_valid`, `acc_clear`, `sat_count` and `flush_blocks`
  signals, the format codes and the synchronous reset are this design's own.
  The data registers are loaded only when valid data is present and are not
  reset.
* **Quantizing in hardware.** The source states that both inputs of every
  tensor operation are MX-quantized and that all scaling factors are set by
  hardware. It does not say where the quantizer sits. Here it sits at the
  engine's input.

## 7. What is not included

* Only the MX path is built. The source also mentions a separate pipeline for
  integer sub-scaling (VSQ) but does not show it.
* The element-wise vector operations (layer norm, softmax, GELU, in BF16), the
  transposes and the optimizer of the training flow are not included. The
  source names them but describes no hardware for them.
* There is no memory system. The 64-byte memory interface in the source is
  only a cost-model assumption.

## 8. Verification

Each module has a self-checking testbench in `tb/`. The expected values come
from `tb/mx_tb_pkg.sv`, which computes them with double-precision reals and
integers directly from the format definitions, not by copying the RTL:
FP32 rounding is done on the bits of a double, quantization divides by the
block scale, and truncations are written as `floor`.

| testbench | what it checks |
|---|---|
| `tb_mx_pkg` | format widths and bits per element |
| `tb_mx_mul_tc` | all 4 × 128 × 128 sign and magnitude pairs |
| `tb_mx_subblock_reduce` | random products and every shift combination |
| `tb_mx_block_reduce` | random 16-element blocks |
| `tb_mx_exp_align` | random and extreme exponents |
| `tb_mx_lzc` | powers of two, their neighbours, random values |
| `tb_mx_block_align` | random sums and distances; truncation and flushing |
| `tb_mx_fp32_convert` | rounding, binade carry, underflow, overflow |
| `tb_mx_fp32_acc` | random streams with cancellation and clears; 1-clock latency |
| `tb_mx_quantizer` | all three formats; non-zero microexponents and clamping both occur |
| `tb_mx_dot_product` | back-to-back random MX vectors; exact 2-clock latency; flushed blocks |
| `tb_mx_dot_top` | end to end at the default size (see below) |
| `tb_mx_qsnr` | quantization quality of the hardware quantizer (see below) |

`tb_mx_dot_top` streams 1500 operations through the engine at its default size,
with random idle cycles. It checks every `dot`, `acc`, `sat_count` and
`flush_blocks` value at its exact cycle. It also counts how often each
mechanism occurs, and fails if any of them never does:

* format switches, and operations in each of MX9, MX6 and MX4
* non-zero microexponents
* clamped elements
* flushed blocks
* accumulator clears
* back-to-back operations

`tb_mx_qsnr` repeats the format's accuracy experiment on the RTL quantizer.
It draws 10,000 vectors of 16 Gaussian values, each vector with its own
random scale (X ~ N(0, s²), s = |N(0,1)|). It quantizes each vector in all
three formats and dequantizes it again. The measured quantization
signal-to-noise ratios are:

| format | QSNR | worst-case bound 6.02 m + 10 log10(4 / (k1 + 3 k2)) |
|---|---|---|
| MX9 | 46.6 dB | 34.7 dB |
| MX6 | 28.4 dB | 16.7 dB |
| MX4 | 15.8 dB | 4.6 dB |

The testbench checks three things:

* Every single vector meets the bound.
* Each mantissa bit is worth about 6 dB.
* The microexponents add the published ~3.6 dB. The comparison format is the
  same block format without them (16-element blocks, 8-bit exponent, 7-bit
  magnitudes; the MSFP16 layout), which measures 43.0 dB.

Every testbench ends with the line
`TB_RESULT checks=<n> failures=<n>`. A watchdog stops it with a failure if it
hangs. The testbenches read no files.

To run one with Verilator 5 (packages first):

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_mx_dot_top \
        rtl/mx_pkg.sv tb/mx_tb_pkg.sv rtl/*.sv tb/tb_mx_dot_top.sv
    ./obj_dir/Vtb_mx_dot_top

`tb_mx_dot_top` takes about half a minute. The others take seconds.

## 9. Files

    rtl/mx_pkg.sv              format constants, format enum, FP32 struct
    rtl/mx_quantizer.sv        FP32 block -> MX block
    rtl/mx_mul_tc.sv           element multiplier with two's-complement output
    rtl/mx_subblock_reduce.sv  pair sum with microexponent shift
    rtl/mx_block_reduce.sv     16-element block reduction
    rtl/mx_exp_align.sv        block exponents, maximum, distances
    rtl/mx_lzc.sv              redundant-sign-bit counter
    rtl/mx_block_align.sv      normalise and align one block sum
    rtl/mx_fp32_convert.sv     fixed point -> FP32
    rtl/mx_fp32_acc.sv         FP32 accumulator
    rtl/mx_dot_product.sv      the dot-product pipeline
    rtl/mx_dot_top.sv          quantizers + pipeline + accumulator
    tb/mx_tb_pkg.sv            reference arithmetic
    tb/tb_*.sv                 one testbench per module
