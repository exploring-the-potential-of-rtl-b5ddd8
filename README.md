# A flexible-format dot-product unit for 8-bit inference

Post-training quantisation to INT8 is cheap in hardware but loses accuracy on
tensors with wide, long-tailed value distributions. Small floating-point
formats handle those better, yet no single FP8 layout suits every layer. The
design here is one multiply-accumulate engine that takes, for each dot
product, any one of eleven input number systems: FP16, BF16, four FP8 layouts
(E5M2, E4M3, E3M4, E2M5), two FP6 layouts (E3M2, E2M3), a 4-bit float, INT8
and UINT8. It writes the result as FP32 or in any of those systems. Its main
idea is to decode every input format into a few wider *shared operand
formats* first, so that one set of multipliers, aligners and adder trees
serves all of them. 8-bit formats get twice the multiply rate of 16-bit
formats.

The architecture follows the data-flow description and figures of the paper
"Exploring the Potential of Flexible 8-bit Format: Design and Algorithm"
(Zhang et al.). That paper fixes the formats, the shared operand formats,
the two multiplier groups and the order of the stages. It gives no lane
count, pipeline, bit-level alignment rule, rounding detail or interface.
Those are choices of this RTL, and they are marked as such below and in the
header comment of each file.

## 1. Number systems

The 8-, 6- and 4-bit floats use IEEE-style fields and bias 2^(E-1)-1, and
they keep subnormals. They have **no Inf and no NaN**. The largest value an
encoder produces has exponent field 2^E-2 and an all-ones fraction. The
decoder reads an all-ones exponent field as an ordinary normal number.

| format | bias | largest value | smallest subnormal |
|--------|------|---------------|--------------------|
| E5M2   | 15   | 57344         | 2^-16              |
| E4M3   | 7    | 240           | 2^-9               |
| E3M4   | 3    | 15.5          | 2^-6               |
| E2M5   | 1    | 3.9375        | 2^-5               |
| E3M2   | 3    | 14            | 2^-4               |
| E2M3   | 1    | 3.75          | 2^-3               |
| E2M1 (the 4-bit float, this design's choice) | 1 | 3 | 0.5 |

FP16 and BF16 are decoded with their IEEE layouts. Their all-ones exponent
codes are also read as normal numbers. When the unit writes FP16 or BF16 it
saturates instead of producing Inf. INT8 is two's complement and UINT8 is
unsigned.

## 2. Data path

```
 x[k], w[k] (16-bit raw)      ifmt
        |                      |
  input_decoder  (x2 per element: FP16->FP19, BF16->FP19, FP8->FP11,
        |         FP6/FP4->E3M3, INT8->INT9, UINT8->INT9, then ifmt MUX)
        +-------------------------------+
        | elements 0..L-1               | elements L..2L-1
  mul_path, MUL_W=11              mul_path, MUL_W=8      (L = LANES = 16)
   L x mul11_lane (11x11)           L x mul8_lane (8x8)
   MUX: FP products -> expmax_shift, INT products around it
   MUX -> add_tree                  MUX -> add_tree
        |  (sum_l, sexp_l)              |  (sum_r, sexp_r)
        +--------------+----------------+
                 path_combine   -> INT32 (integer) or FP32 (float)
                       |
                 psum register
                       |
                 accumulator    (INT32 add or FP32 add over the beats)
                       |
                 bias_scale     y = (acc + bias) * scale, FP32
                       |
                 output_converter (FP32 bypass, FP16, BF16, FP8, FP6/FP4,
                       |           INT8, UINT8; ofmt MUX)
                 out register -> out_data
```

## 3. Shared operand formats

Each decoder widens its input without loss:

| operand | layout | holds | multiplied on |
|---------|--------|-------|---------------|
| FP19 | E8M10, bias 127 | FP16, BF16 | left stream only |
| FP11 | E5M5, bias 15 | E5M2, E4M3, E3M4, E2M5 | both streams |
| E3M3 | bias 3 | E3M2, E2M3, E2M1 | both streams |
| INT9 | sign + 8-bit magnitude | INT8, UINT8 | both streams |

A subnormal input becomes a normal number where the wider format can hold it
that way. For example, E4M3 0.001 x 2^-6 becomes 1.00000 x 2^-9 in E5M5.
Where the wider format cannot, the input stays subnormal: BF16 into FP19,
E5M2 into E5M5, E3M2 into E3M3. INT9 is sign-magnitude. That lets an
unsigned 8x8 multiplier take INT8 (-128 has magnitude 128) and UINT8 (255)
alike.

An operand is a 2-bit class and 19 bits, `operand_t` in `flex8_pkg`. Both
operands of a product must be of the same class. The unit has no INT x FP
product, and neither has the design it follows.

## 4. Two multiplier streams and throughput

Each stream has `LANES` multipliers, 16 by default. The left stream's 11x11
multipliers fit the 11-bit significand of FP19. The right stream's 8x8
multipliers fit FP11, E3M3 and the INT9 magnitude, and its exponent adder is
5 bits wide. One input beat carries `2*LANES` element pairs:

* INT8, UINT8, FP8, FP6 and FP4: pairs 0..15 go left and 16..31 go right,
  so a beat does 32 multiplies.
* FP16 and BF16: only pairs 0..15 are used, on the left stream. The right
  stream is idle and its sum is 0, so a beat does 16 multiplies.

Inside a lane, a float significand is `{hidden bit, fraction}` left aligned
in the multiplier width. The exponent of a subnormal is read as 1. The lane
returns sign, exponent sum and magnitude:

```
float:  product = (-1)^sign * mag * 2^(exp - 2*bias - 2*(MUL_W-1))
INT9:   product = (-1)^sign * mag
```

## 5. Alignment: expMax and shift

This is the one stage that is not exact, so read it before trusting float
results to the last bit. Within one stream, `expmax_shift` finds the largest
exponent among the **nonzero** float products. It gives every product G = 8
guard bits, then shifts it right by its distance from that maximum:

```
term[i] = (-1)^sign[i] * floor( (mag[i] << G) >> (expmax - exp[i]) )
```

The terms now share one binary point, and `add_tree` adds them as integers.
The stream reports `sum` with exponent
`sexp = expmax - 2*bias - 2*(MUL_W-1) - G`, so the stream's value is
`sum * 2^sexp`. Products that are zero are left out of the maximum search.
Without that rule, a zero operand with a large exponent field could push
every other product off the grid.

The truncation costs each term less than one grid unit. That unit is
2^-(2*(MUL_W-1)+G-1) of the largest product in the stream: 2^-27 on the
left stream and 2^-21 on the right at G = 8. Summed over 16 lanes, a beat's
error stays below about 2^-17 of its largest product, well under the FP8
input resolution. To make the alignment tighter, raise G. Integer products
skip this stage: their `sexp` is 0 and the integer dot product is exact.

## 6. Combining, accumulating, bias and scale

`path_combine` joins the two streams. For integer operands it returns the
exact INT32 sum. For floats it aligns the stream with the smaller exponent
to the other, giving the larger 24 extra low bits and truncating below
them. It then rounds to nearest even into FP32.

`accumulator` loads on the first beat of a dot product and adds on each
later one: integer adds for INT32, rounded FP32 adds for floats. An INT32
accumulator wraps modulo 2^32. A beat adds at most 32 x 128 x 128 = 2^19
for INT8 and 32 x 255 x 255 for UINT8. Wrapping is therefore impossible
within 4096 INT8 beats or 1032 UINT8 beats.

`bias_scale` computes `(acc + bias) * scale`. An INT32 sum is converted to
FP32 first. Every step rounds to nearest even and saturates at the largest
finite FP32 value. No Inf or NaN is ever produced anywhere in the unit.

## 7. Output conversion

`output_converter` works from the FP32 value and handles every format with
one routine: `round_pack` in `flex8_pkg`, which takes a sign, an integer
significand, an exponent, E and M.

* Float outputs round to nearest, ties to even, and produce subnormals.
  Beyond range they saturate to the largest finite code.
* INT8 rounds to nearest even and clips symmetrically to [-127, 127].
* UINT8 clips to [0, 255].
* FP32 bypasses the converters.

The result is right aligned in `out_data`. Its upper bits are zero, except
that an FP32 result fills all 32 bits.

## 8. Interface and timing

`flex8_dot_unit #(LANES = 16, G = 8)`

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| in_valid | in | 1 | a beat is present |
| in_first, in_last | in | 1 | first and last beat of a dot product (both set for a one-beat product) |
| ifmt | in | 4 | input format (`ifmt_e`), constant within a dot product |
| x, w | in | 2*LANES x 16 | raw elements, right aligned in each 16-bit slot |
| ofmt | in | 4 | output format (`ofmt_e`), taken with the last beat |
| bias, scale | in | 32 | FP32, taken with the last beat |
| out_valid | out | 1 | one-cycle pulse |
| out_data | out | 32 | result |

The unit accepts one beat per clock and has no back-pressure. Dot products
may follow each other with no gap. `out_valid` rises three clock edges after
the edge that took the beat with `in_last`:

```
edge  n    : last beat -> psum register
edge  n+1  : psum      -> accumulator   (done)
edge  n+2  : bias/scale/convert -> out_data, out_valid = 1
```

An assertion checks that `ifmt` does not change inside a dot product.
Another, in `accumulator`, checks that the number system does not change
within one accumulation.

The whole path from the input elements through `path_combine` is one clock
cycle of combinational logic, chosen here for clarity. A real
implementation would add pipeline registers, for example after the
multipliers and after the add trees. That changes only the latency.

## 9. Where this RTL goes beyond or departs from its source

* **Chosen here, not specified in the source:** the lane count, the beat
  framing and interface, the pipeline, the sign-magnitude INT9, the
  significand alignment inside the multipliers, G = 8 with truncation, the
  zero-product rule in the aligner, the alignment in the stream adder, the
  reset, and the E2M1 layout of the "FP4" format.
* **Placement of bias and scale.** The source shows them in its per-format
  figures but not in its combined data-flow figure. They sit between the
  accumulator and the output converters here, so the FP32 output is the
  scaled value. Use bias 0 and scale 1 for the raw sum.
* **Integer accumulation.** The combined figure marks the stream sum
  "FP32", while the INT8 flow accumulates in INT32. This RTL keeps INT32 for
  integer operands, which keeps them exact, and FP32 for floats.
* **Rounding.** The source's reference conversion code rounds FP32 up while
  its comment says "nearest". This RTL rounds to nearest, ties to even.
* **INT8 range.** [-127, 127], following symmetric quantisation. The
  quantisation formula's c = 2^b - 1 cannot be meant literally for signed
  8-bit.
* **Not built:** the source's offline, software format-selection search
  (MSE or resolution based) and its training and calibration flow. They run
  on a host, not in this unit. The source's claim of under 5 % area growth
  for its FP8 support is not reproduced here.

## 10. Verification

Every block has a self-checking testbench in `tb/`. The expected values are
computed with `real` arithmetic in `tb/tb_ref_pkg.sv`, independently of the
RTL's bit-level functions. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|-----------|---------------------|
| tb_input_decoder | every code of every 8/6/4-bit format, plus random and subnormal FP16/BF16, decodes with its exact value and the right class |
| tb_mul11_lane, tb_mul8_lane | 20000 random products per lane type are exact; FP19 on the 8x8 lane gives 0 |
| tb_expmax_shift | the maximum ignores zero products; terms equal the floor formula |
| tb_add_tree | exact sums at N = 16 and N = 5, including extreme terms |
| tb_mul_path | both streams: exact for INT9, within the truncation bound for floats, idle when disabled or given FP19 |
| tb_path_combine | exact INT32; FP32 within one rounding step |
| tb_accumulator | framed runs of 1 to 8 words, `done` timing, INT32 and FP32 sums |
| tb_bias_scale | (acc + bias) * scale within three roundings, exact where it must be |
| tb_output_converter | nearest code against neighbouring codes with zero tolerance, ties to even, saturation, INT8/UINT8 clipping |
| tb_flex8_dot_unit | the top at default size: 600 random dot products of 1 to 4 beats over every input and output format, with latency, bias, saturation, subnormal inputs, alignment shifts, idle right stream and INT8 clipping each counted and required |
| tb_layer_mixed | a three-layer network, 128 -> 32 -> 32 -> 16, with a different number system per layer (INT8, E3M4, E2M5); each layer's output is written by the unit straight into the next layer's format. Every code is checked, and the final FP32 output is compared with the unquantised network (about 2 % relative L2 error) |

To run one of them with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/flex8_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_flex8_dot_unit.sv \
    --top-module tb_flex8_dot_unit -o sim
./obj_dir/sim
```

Swap the last file and `--top-module` for any other testbench. The top-level
test finishes in well under a second.

## 11. Changing the design

* `LANES` sets the multipliers per stream. A beat then carries `2*LANES`
  element pairs. The top-level testbench has `localparam LANES = 16`; change
  it to match.
* `G` sets the guard bits of the aligner and so the float accuracy (section 5).
* New formats: add an `ifmt_e`/`ofmt_e` code, a `widen_float` call in
  `input_decoder` with its exponent and fraction widths, and a `round_pack`
  call in `output_converter`. Any float with up to 8 exponent bits and 10
  fraction bits fits the existing operand classes.

## Files

`rtl/flex8_pkg.sv` holds the types and arithmetic functions. Then, one
module per file: `input_decoder`, `mul11_lane`, `mul8_lane`, `expmax_shift`,
`add_tree`, `mul_path`, `path_combine`, `accumulator`, `bias_scale`,
`output_converter` and the top `flex8_dot_unit`. `tb/` holds `tb_ref_pkg`
and one `tb_<module>.sv` per module.
