# GSE-INT matrix engine for integer-only LLM fine-tuning

A LoRA-style fine-tuning step of a large language model spends nearly all
of its arithmetic in matrix products: the forward product of every linear
layer and, in the backward pass, the products that give the adapter-weight
gradients and the input gradients. This engine computes those products
without any floating-point multiplier. Operands arrive in BF16. Each group
of 32 consecutive values along the reduction dimension is turned into
**GSE-INT** (group-shared exponent integer): one 5-bit exponent for the
whole group and a small signed integer for each value. The products are
then plain integer multiply-accumulates, and only the final sums are turned
back into BF16.

The RTL follows the quantize / compute / dequantize flow and the number
format of the GSQ-Tuning method (Zhou et al., "GSQ-Tuning: Group-Shared
Exponents Integer in Fully Quantized Training for LLMs On-Device
Fine-tuning"). The method publishes the format, the arithmetic and the
engine's target figures: 1 GHz and 50 TOPS. It does not publish the
engine's organisation. The array shape, pipeline, handshakes, rounding
rules and exponent-bias handling here are this design's own. Each is listed
under "Where this design departs from, or adds to, the method".

## The number format

A GSE-INT group of `GROUP` values is stored as

    e                 EXP_W-bit shared exponent code (5 bits)
    s[i], m[i]        sign bit + MAN_W-bit unsigned mantissa, i = 0..GROUP-1

with value `x[i] = (-1)^s[i] * m[i] * 2^(exp_base + e - 127 - (MAN_W-1))`.
Unlike floating point, a mantissa has no hidden leading one: it is an
ordinary integer. "GSE-INT6" means 1 sign bit plus 5 mantissa bits, and
that is the default (`MAN_W = 5`). With 32 values per group, a group takes
32*6 + 5 = 197 bits, against 32*8 = 256 for FP8.

`exp_base` is a per-tensor input. It gives the BF16 exponent that code 0
stands for. A 5-bit code covers only 32 binades, and the method leaves the
exponent bias open, so the bias is made explicit and is left to software.
It can be picked per tensor from the tensor's largest magnitude, e.g.
`exp_base = max_exponent - 25`.

### BF16 to GSE (`gse_quantizer`)

1. Find the largest BF16 exponent field `emax` in the group.
2. Clamp it to `[exp_base, exp_base + 31]`. The shared code is
   `e = clamp(emax) - exp_base`.
3. Restore each normal element's hidden one, giving an 8-bit significand.
   Shift it right by `clamp(emax) - exp_i + 8 - MAN_W`. The element with the largest
   exponent keeps its leading one in mantissa bit `MAN_W-1`. Smaller
   elements lose low bits in proportion to their distance from it.
4. Round to nearest, ties away from zero on the magnitude. A result that
   no longer fits in `MAN_W` bits saturates to `2^MAN_W - 1`.

The `sat` flag reports saturation. It happens on a rounding carry and when
`emax` lies above the code range. The `uflow` flag reports an `emax` below
the range: the group is then shifted further right and may vanish. A BF16
subnormal has no hidden one and enters as 0.m with exponent 1. No negative
zero is produced.

### Group dot product (`gse_dot_unit`)

All elements of a group share one exponent, so a dot product of two groups
needs no alignment:

    y = 2^(eA + eB) * sum_i (-1)^(sA_i xor sB_i) * mA_i * mB_i

That is 32 small integer multiplies (5 x 5 bits), an adder tree into 16
signed bits, and one 6-bit exponent addition. This is where the area and
power advantage over an FP8 engine comes from. Every FP8 multiply-add needs
its own exponent compare and mantissa shift. Here there is one exponent
add per 32 products.

### Accumulating across groups (`gse_pe`): the hardest part

A reduction of length K visits K/32 groups. Each group's partial sum comes
with its own exponent `eA + eB`. The method states that the engine's
product is an INT32 value. It does not say how partial sums with different
exponents meet in one integer register. This design uses an integer
accumulator that carries its own 6-bit exponent:

* If the new partial sum's exponent is larger, the accumulator is
  arithmetically shifted right by the difference (truncating) and takes
  the new exponent.
* If it is smaller, the partial sum is shifted right instead.
* A zero partial sum leaves the accumulator as it is. A zero accumulator
  simply takes the new partial sum and its exponent. Zeros therefore never
  cost precision.
* The 33-bit sum saturates to the INT32 limits.

The result of a PE is therefore `acc * 2^(exp_code + bias terms)`.
Precision loss only occurs when exponents change along the reduction. It
is bounded by one LSB of the larger-exponent operand per step.

Headroom: a partial sum is at most 32 * 31 * 31 = 30,752, so after K/32
groups `|acc| <= 961 * K`. That is below 2^31 for any K under 2.2 million.
For comparison, the largest reduction in a LLaMA2-70B layer is 28,672.
Saturation therefore only matters for much narrower accumulators. The PE
testbench reaches it with a 16-bit copy.

### Back to BF16 (`gse_dequantizer`)

A leading-one search normalises `|acc|`. The 7 bits after the leading one
become the BF16 mantissa, and the rest rounds to nearest, ties to even. The
BF16 exponent is `lead + exp + 127`. Here `exp` is the PE's exponent code
plus `x_exp_base + w_exp_base - 254 - 2*(MAN_W-1)`. Results beyond the
BF16 range become the largest finite value of the same sign. Results below
the normal range become zero.

## The engine (`gsq_engine`)

```
 x[ROWS][GROUP] BF16 --> ROWS  x gse_quantizer --+
                                                 |  stage Q registers
 w[COLS][GROUP] BF16 --> COLS  x gse_quantizer --+
                                                 v
                      gse_pe_array: ROWS x COLS gse_pe
                        (row r broadcast along row r, column c down column c)
                        stage 1: group dot product   stage 2: accumulate
                                                 |
                   tile results held in the PE result registers
                                                 |  one row per cycle
                                                 v
                  COLS x gse_dequantizer --> out_y[COLS] (BF16)
                                                 |
                  COLS/GROUP x gse_quantizer --> store_* (GSE groups to memory)
```

Default size: `ROWS = 25`, `COLS = 32`, `GROUP = 32`, that is 800 PEs and
25,600 multiply-accumulates per cycle. At 1 GHz that is 51.2 TOPS, the
smallest grid with one output group per row that reaches the method's
50 TOPS.

**Operation.** Each accepted cycle carries one reduction step: 25 row
groups and 32 column groups, plus their tensors' exponent biases.
`in_last` marks the final step of a tile. The next accepted group starts
the next tile, so tiles run back to back. Three clock edges after the last
group, the tile's 25 x 32 results sit in the PEs' result registers. The
engine then drains them, one 32-value row per cycle, on
`out_valid/out_ready`. Each row also appears on `store_*`, re-quantized to
one GSE group against `out_exp_base`. In the method, forward outputs are
kept in GSE form for the backward pass, and this output serves that
purpose.

**Stall.** A tile that is at least `ROWS` groups long (K >= 800) drains
while the next one computes, so the array never waits. Shorter tiles, or
`out_ready` held low, make a finished tile wait for the previous drain. The
whole pipeline then stalls and `in_ready` drops. `q_sat` and `q_uflow`
report quantizer range events for the group accepted one cycle earlier.

**The three products.** The forward product feeds activations as `x` and
frozen or adapter weights as `w`. The weight-gradient product feeds output
gradients against stored activations. The input-gradient product feeds
output gradients against weights. Choosing the operands and transposing
them is the job of the memory system around the engine. That memory
system, the NF4 weight decompression and the optimizer are not part of
this RTL.

## Files

| file | contents |
|---|---|
| `rtl/gse_pkg.sv` | BF16 struct, constants, dot-product width function |
| `rtl/gse_quantizer.sv` | BF16 group -> GSE group (combinational) |
| `rtl/gse_dot_unit.sv` | GSE group dot product (combinational) |
| `rtl/gse_pe.sv` | registered dot product + exponent-aligned INT32 accumulator |
| `rtl/gse_pe_array.sv` | ROWS x COLS PE grid with broadcast operands |
| `rtl/gse_dequantizer.sv` | INT32 x 2^exp -> BF16 |
| `rtl/gsq_engine.sv` | top: quantizers, array, drain, dequantizers, store re-quantizer |
| `tb/tb_gse_ref_pkg.sv` | reference models (real-number quantizer, integer accumulator, exact BF16 rounding) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_gsq_engine.sv` | end-to-end, 3 x 8 array of 4-lane PEs |
| `tb/tb_gsq_engine_full.sv` | end-to-end at the default size |
| `tb/tb_lora_layer_step.sv` | forward and backward step of a LoRA layer, accuracy against exact arithmetic |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a hung run. For example:

```
verilator --binary --timing --assert -Wno-fatal -j 4 --top-module tb_gsq_engine \
    -y rtl -y tb +libext+.sv rtl/gse_pkg.sv tb/tb_gse_ref_pkg.sv tb/tb_gsq_engine.sv
./obj_dir/Vtb_gsq_engine
```

Replace `tb_gsq_engine` by any other testbench name. The end-to-end
testbenches print how often each mechanism occurred: pipeline stall, output
backpressure, quantizer saturation and underflow, accumulator realignment,
inexact BF16 rounding. They also check the full-rate phase: one group
accepted per cycle. The default-size testbench needs a few minutes of
Verilator compile time for the 800-PE array.

To change the format, set `MAN_W` (2..8; 7 gives GSE-INT8), `EXP_W` or
`GROUP` on `gsq_engine`. `COLS` must be a multiple of `GROUP`.

## A fine-tuning step as a workload

`tb/tb_lora_layer_step.sv` runs one LoRA linear layer through a forward
and backward step. The layer has 8 tokens, 64 inputs, 32 outputs and
rank 8. The products are:

    forward   Y0 = X W^T,  H = X A^T,  Y1 = H B^T,  Y = Y0 + Y1
    backward  dB = G^T H,  T = G B,    dA = T^T X,  dX = G W + T A

The testbench acts as the memory system. It tiles every product onto a
4 x 8 engine with 8-lane groups, transposes operands as each product
needs, and stores H through the re-quantizing output port. It reads H back
from that GSE form for dB. Each product is compared with exact arithmetic
on the same BF16 inputs. With Gaussian weights and activations carrying a
few 40-sigma outliers, the relative Frobenius error of every product is
3-4% with GSE-INT6. The testbench requires it to stay under 6%. The error
comes from the 5-bit mantissas: an outlier sets its group's exponent, and
its 7 neighbours keep fewer significant bits.

## How far it is checked

Each module's testbench compares against models written independently in
`tb_gse_ref_pkg`. The quantizer model divides real numbers by the LSB
weight. BF16 results come from the IEEE double bit pattern of the exact
value. The accumulator model is the one place that must copy the RTL's
rule, since the rule defines the result bit for bit. Only functional
behaviour is verified. No timing closure at 1 GHz is claimed, and the
combinational drain path (row mux, dequantizer, re-quantizer) would be the
first place to add a register stage.

## Where this design departs from, or adds to, the method

* **Array shape and dataflow**: chosen here (broadcast, 25 x 32). The
  method gives only 1 GHz and 50 TOPS.
* **Cross-group accumulation**: the shift-and-keep-larger-exponent rule
  above is this design's.
* **Rounding**: round-to-nearest in the quantizer, taken from the method's
  general quantizer definition. Its FP-to-GSE description only says
  "right-shift". The BF16 output uses round-to-nearest-even.
* **"Doubling" of the maximum exponent**: the method's text says the
  largest exponent is doubled. Its format figure and value equation show a
  single shared exponent, and those are followed here. The exponent sum
  appears only in products.
* **Exponent bias**: made an explicit per-tensor input. The method omits
  it.
* **One engine for all products**: the method's dataflow draws one MatMul
  per product. Its hardware figures describe one engine, which is what is
  built.
* **Not built**: the NF4 double-quantization of frozen weights (taken from
  QLoRA), the 8-bit AdamW weight update, the non-linear operators (kept in
  16-bit floating point by the method) and all memories. The method itself
  excludes the memory subsystem from its hardware.
