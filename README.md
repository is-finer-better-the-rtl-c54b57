# MXFP4 multiply-accumulate with UE5M3 block scales

Microscaling (MX) formats store a tensor as small blocks of low-precision
elements that share one scale. With 4-bit FP4 E2M1 elements, the common
choice for the scale is an unsigned 8-bit float with 4 exponent and 3
mantissa bits (UE4M3), whose smallest non-zero value is 2^-9. Its range is
narrow. When a tensor's values are small, many block scales round to zero,
and every element of such a block is lost. Smaller blocks make this worse,
because each block's maximum is smaller. The usual fix is an extra
per-tensor scale, which needs a global absolute maximum at run time.

The FP8 scale has a sign bit that is never used, because scales are
positive. This design spends that bit on the exponent. The result is an
**unsigned E5M3 (UE5M3)** scale: 5 exponent bits with bias 15 and the same 3
mantissa bits. Its range runs from 2^-17 (smallest subnormal) to
1.875 x 2^15. The precision is unchanged, so the significand multiplier that
dominates the cost stays the same. Only the exponent adder grows, from 4 to 5
bits.

This RTL implements the two places where hardware sees the scale format:

* **Scale processing.** This is the MXFP4 multiply-accumulate of a SIMD lane.
  It combines two FP4 blocks and their two UE5M3 scales into an FP32 partial
  sum.
* **Scale generation.** The FP32 results are requantized into MXFP4 blocks
  for the next layer. This includes a shared FP32-to-FP8 caster, in which
  UE5M3 reuses the exponent path of E5M2 and the mantissa rounding of E4M3.

The top level, `mx_pe`, is one processing engine with 8 SIMD lanes.

## Number formats

| format | bits | value | range used here |
|---|---|---|---|
| FP4 E2M1 element | s, e1 e0, m | levels 0, 0.5, 1, 1.5, 2, 3, 4, 6 | saturates at 6 |
| UE5M3 block scale | e4..e0, m2..m0 | (1.m) x 2^(e-15), subnormal (0.m) x 2^-14 | 2^-17 to 61440; exponent code 31 unused |
| FP8 E4M3 / E5M2 (output casts) | s, e, m | IEEE style, all-ones exponent unused | largest exponent +7 / +15 |
| FP32 partial sum | IEEE single | | subnormals flushed |

Inside the datapath an FP4 magnitude is carried as an integer counting
halves: 0, 1, 2, 3, 4, 6, 8 or 12. So every product of two FP4 values is an
exact integer counting quarters.

## Scale processing: the lane (`mx_mac_lane`)

One beat carries an activation block `a[0..N-1]` with scale `s_a`, and a
weight block `w[0..N-1]` with scale `s_w`. N = 8 by default. The lane
computes

    psum <- base + s_a * s_w * sum_i a_i * w_i

Here `base` is the incoming inter-PE partial sum `psum_in` on a beat marked
`first`. On every other beat it is the lane's own running sum.

The work is split the way a floating-point multiply is split:

1. **n-way FP4 partial product** (`fp4_dot`). The N products are summed
   exactly as a signed integer. For N = 8 it fits in 12 bits (at most
   8 x 144).
2. **Scale product** (`scale_multiplier`). A 5-bit adder sums the two biased
   scale exponents into a 6-bit result. A 4x4-bit multiplier forms the
   product of the two significands, hidden bit included. A subnormal scale
   (exponent code 0) enters the adder as exponent 1 with hidden bit 0. So
   the product of the two scales is `msig * 2^(esum - 30 - 6)`.
3. The partial product times `msig` is still an exact integer, 19 bits wide
   for N = 8. It is registered with its sign and with the exponent of its
   least significant bit, `esum - 38`. This is the end of stage 1.
4. **Exponent adjustment, summation, normalization** (`psum_adder`). The
   product is normalized into FP32 fields without loss. It is then aligned
   against the partial sum, which has an 8-bit exponent, using guard, round
   and sticky bits. The two are added or subtracted, and the result is
   renormalized. The sum is rounded once, to nearest even. This is stage 2.

So each beat costs exactly one rounding, the FP32 rounding of the
accumulation. A narrower scale exponent changes only the adder in step 2 and
the constant in step 3. The parameter `EB = 4` builds the UE4M3 datapath
with the same multiplier, for comparison.

The timing is simple. The lane is a two-stage pipeline that takes one block
per cycle, with no stalls. `psum_out` and `out_valid` appear two cycles after
the beat. Back-to-back accumulation works because only stage 2 closes the
loop through `psum_out`.

## Scale generation

### The caster (`fp8_cast`)

This block converts FP32 to E4M3, E5M2 or UE5M3. It re-biases the exponent
and rounds the 24-bit significand to 2 or 3 bits, to nearest even. Values
below the smallest normal become subnormals, and values below half the
smallest subnormal become zero. Overflow, Inf and NaN saturate to the
largest finite code. In UE5M3 mode the sign is dropped.

### The block requantizer (`mx_block_quantizer`)

For a block of N FP32 values, the scale is `s = UE5M3(x_max / 6)` and each
element is `q_i = FP4(x_i / s)`. Both use round-to-nearest, ties to even.
Two steps need care:

* **`x_max / 6`.** This is computed as (significand x 8) / 3 with the
  exponent lowered by one. The quotient is cut to 24 bits, and any lost
  remainder is ORed into the last bit (round to odd). The caster then does
  the only real rounding. This gives exactly the scale that a single
  rounding of the true `x_max / 6` would give.
* **`x_i / s` is never formed.** FP4 rounding only needs to know where
  `|x_i| / s` falls among the seven decision levels
  0.25, 0.75, 1.25, 1.75, 2.5, 3.5 and 5. Those levels times `s` are exact
  small integers times a power of two: the significand of `s` times
  1, 3, 5, 7, 10, 14 or 20, times `2^(e_s - 5)`. Each one is normalized and
  compared with `|x_i|` as a floating-point number. The magnitude code is the
  number of levels exceeded. At 0.75, 1.75 and 3.5 a tie counts as
  exceeded, so it rounds to the even codes 2, 4 and 6. At the other levels a
  tie stays below. Anything above 6s saturates at 6.

If the scale rounds to zero (`x_max / 6 <= 2^-18`), all elements of the block
become zero. An element that rounds to zero gets sign 0. The result is
registered and appears one cycle after `in_valid`, at one block per cycle.

## The processing engine (`mx_pe`, top level)

Parameters: `LANES = 8`, `N = 8`, `EB = 5`.

* The activation block and its scale go to all lanes. Each lane has its own
  weight block and scale, so one beat advances 8 output channels.
* `psum_in[l]` and `psum_out[l]` are the partial sums that neighbouring
  engines of a systolic array would pass along. `psum_valid` marks
  `psum_out`, two cycles after the beat.
* When the beat marked `last` reaches `psum_out`, the output stage registers
  two results one cycle later, with `out_valid` three cycles after the beat:
  * `fp8_out[l]`: each lane's result cast to the format `out_fmt` (E4M3 or
    E5M2, standard FP8 output). In UE5M3 mode it holds the magnitude cast.
  * `mx_scale` and `mx_elem[0..7]`: the 8 lane results, requantized as one
    MXFP4 block with a UE5M3 scale.
* `out_fmt` must be held from the `last` beat until `out_valid`.

A dot product of length K takes K/8 beats. Example: an operation of 16
blocks, issued back to back, has `out_valid` 18 cycles after its first beat.

## Where this RTL follows the paper and where it chooses

It follows the source paper ("Is Finer Better? The Limits of Microscaling
Formats in Large Language Models") in these points:

* the UE5M3 format and its 2^-17 minimum;
* the scale-processing structure: a 5-bit exponent adder with a 6-bit
  result, a significand multiplier, the n-way FP4 partial product
  multiplied by the scale significand product, then exponent adjustment
  against an 8-bit-exponent partial sum, summation and normalization;
* a caster shared by E4M3, E5M2 and UE5M3, with exponent clamps of +-7 and
  +-15 and mantissa rounding to 3 or 2 bits;
* scales computed as `x_max / 6`;
* 8 SIMD lanes;
* block size 8, the size of the paper's main accuracy results.

The following are this design's own choices, because the paper does not
specify them:

* **Rounding and limits.** Round to nearest even everywhere. Subnormal FP8
  scales are supported. The top exponent is saturated instead of producing
  Inf or NaN. FP32 subnormals are flushed.
* **Formats of the datapath.** The partial sum is FP32; only its 8-bit
  exponent is specified. The FP4 sum is exact, and there is one rounding per
  beat.
* **Structure and control.** The pipeline depth, the `first`/`last`
  controls and the valid-only handshake, with no back-pressure. The
  activation block is broadcast across the lanes. The 8 lane results are
  used as one requantization block. The requantizer compares against
  decision levels instead of dividing.
* **Reset.** Asynchronous, active low. It clears the valid flags and the
  output registers.

The paper also describes these parts, which are not built here:

* **Other precisions.** Each lane also has BF16, FP8 and INT8 MAC engines.
* **Operand staging and local register file.** These are named, but not
  described.
* **The systolic array** built from these engines. Its size and dataflow
  are not given.

The paper's per-tensor-scaling baseline (UE4M3-S) and its alternative scale
formats (UE4M4, FP6 UE5M1 / UE4M2) are comparisons, not part of this design.
The paper reports its area and timing overhead (+0.5 % area, +4 ps) from
synthesis in a 4 nm process, which cannot be reproduced from RTL.

## Files

| file | content |
|---|---|
| `rtl/mx_pkg.sv` | formats, FP8 format enum, FP4 decode |
| `rtl/fp8_cast.sv` | FP32 to FP8 caster (E4M3, E5M2, UE5M3) |
| `rtl/mx_block_quantizer.sv` | FP32 block to MXFP4 with UE5M3 scale |
| `rtl/fp4_dot.sv` | exact n-way FP4 partial product |
| `rtl/scale_multiplier.sv` | scale exponent adder and significand multiplier |
| `rtl/psum_adder.sv` | exponent adjustment, summation, normalization, rounding |
| `rtl/mx_mac_lane.sv` | one lane's MXFP4 MAC, two-stage pipeline |
| `rtl/mx_pe.sv` | top: 8 lanes, inter-PE partial sums, output stage |
| `tb/mx_tb_pkg.sv` | reference arithmetic in double precision, code searches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the ones below |
| `tb/tb_narrow_layer.sv` | 8x128 linear layer, FP32 to MXFP4 to result, weights from sigma 0.1 to 1e-4 |
| `tb/tb_block_size_sweep.sv`, `tb/mx_size_checker.sv` | lane and requantizer at block sizes 2 to 256 |

## Verification

Every testbench compares the RTL bit for bit with a reference written
differently. The reference decodes all operands to double precision, adds
in double, and rounds once to FP32. It rounds FP8 and FP4 values by
searching all codes for the nearest one, with ties going to the even code.
It never reuses the RTL's shifting and comparison logic. All testbenches
check latency as well as values.

* `tb_mx_pe` runs at the default size: 300 operations of 1 to 16 blocks,
  with gaps, chaining through `psum_in`, and all three output formats. It
  counts, and requires, requantized scales that are zero and subnormal, and
  saturated FP8 casts.
* `tb_narrow_layer` shows the point of the format. At weight sigma 1e-3 and
  1e-4, no weight block gets a zero UE5M3 scale, where an E4M3 scale would
  be zero for every block. The relative error of the layer output stays
  near 0.13 to 0.19 across the whole sigma range.
* `tb_mx_mac_lane` runs a UE5M3 lane and an `EB = 4` (UE4M3) lane side by
  side on the same elements, so the comparison datapath is checked too.
* `tb_block_size_sweep` rebuilds the lane and requantizer at
  N = 2, 4, 8, 16, 32, 64, 128 and 256. The exact FP4 path holds up to 256,
  since 36864 x 225 < 2^24.

To simulate one testbench with Verilator 5:

    verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/mx_pkg.sv tb/mx_tb_pkg.sv tb/tb_mx_pe.sv --top-module tb_mx_pe
    ./obj_dir/Vtb_mx_pe

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. Each
has a cycle watchdog. All run in seconds, except the block-size sweep, which
takes about 40 s, most of it compilation.

## Changing the design

* **Block size.** Set `N` on `mx_pe`, or on `mx_mac_lane` and
  `mx_block_quantizer`. The exact FP4 path needs
  `144 * N * 225 < 2^24`, so N up to 256 works.
* **UE4M3 comparison datapath.** Set `EB = 4` on `mx_pe`. Only the scale
  exponent adder and the product exponent offset change. The requantizer
  always produces UE5M3.
* **Number of lanes.** Set `LANES`. The requantized output block then has
  `LANES` elements.
