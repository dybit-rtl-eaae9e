# DyBit mixed-precision GEMM accelerator in SystemVerilog

Quantising a neural network to 4 or 2 bits with a plain integer format loses
accuracy. That is because the integer grid is uniform, while weights and
activations cluster near zero with a few large outliers. DyBit is a tapered
number format for this case. Near zero it spends its bits on fraction; for
large values it spends them on exponent. The exponent is not a fixed field but
a run of leading ones, so the split between exponent and fraction changes from
value to value. Decoding needs only a leading-ones detector and a shifter.

This repository holds a synthesizable accelerator for matrix products
`OF = IF x W` whose inputs are DyBit numbers. Its structure follows the DyBit
paper (Zhou et al., "DyBit: Dynamic Bit-Precision Numbers for Efficient
Quantized Neural Network Inference"):

* an output-stationary systolic array of mixed-precision processing elements (PEs);
* an input-feature (IF) buffer, a weight buffer and an output-feature (OF) buffer;
* one DyBit decoder per array row and per array column at the array edges;
* one DyBit encoder (quantizer) per array column;
* a control unit that executes run-time instructions.

The precision is chosen per operation. Input features and weights can each be
8, 4 or 2 bits, signed or unsigned. Outputs are 8-bit or 4-bit DyBit. An
N x N array working on Pa-bit inputs and Pw-bit weights acts like an
(8/Pa)N x (8/Pw)N array. This is where the speed-up of low precision comes
from.

The paper describes the blocks and draws the decoder and multiplier in
detail. It gives no sizes, widths, instruction format, timing or rounding
rule. Those are this design's choices, and they are marked as such below and
in the opening comment of every file.

## 1. The DyBit number format

An n-bit unsigned DyBit word is read from the MSB:

| pattern                         | value                     |
|---------------------------------|---------------------------|
| all zeros                       | 0                         |
| `0 x...x` (first bit 0)         | 0.x...x, the bits after the leading 0 as a binary fraction |
| `1..1 0 f...f` (i ones, then a 0, then k = n-1-i bits f) | 2^(i-1) * (1 + f/2^k) |
| all ones                        | 2^(n-1), the largest value |

The 4-bit unsigned code table shows the tapering:

| code | value | code | value | code | value | code | value |
|------|-------|------|-------|------|-------|------|-------|
| 0000 | 0     | 0100 | 0.5   | 1000 | 1.0   | 1100 | 2 |
| 0001 | 0.125 | 0101 | 0.625 | 1001 | 1.25  | 1101 | 3 |
| 0010 | 0.25  | 0110 | 0.75  | 1010 | 1.5   | 1110 | 4 |
| 0011 | 0.375 | 0111 | 0.875 | 1011 | 1.75  | 1111 | 8 |

A signed word puts a sign bit in front of an (n-1)-bit unsigned DyBit
magnitude. The 2-bit signed format is therefore ternary: {0, +1, -1}.

The paper's closed formula gives the all-ones code the value 2^n. Its own
4-bit table gives 8 = 2^(n-1). This design follows the table. The table
value is also what the general rule "i ones give 2^(i-1)" yields for i = n.

### Decoded form

Inside the array every number is held as a triple (s, e, m). For a P-bit
sub-word, m is a P-bit mantissa with the binary point after its MSB, and

    value = (-1)^s * m / 2^(P-1) * 2^e,   e = (number of leading ones) - 1, or 0 if the word starts with 0

A word starting with 0 is therefore a "denormal": it has no hidden 1 and the
same exponent as the smallest normal value, as in IEEE floating point. The
all-ones code needs no special case. Example from the paper: the 8-bit word
`11001010` decodes to exponent `001` and mantissa `10101000`.

One 8-bit datapath word carries one 8-bit, two 4-bit or four 2-bit numbers
(sub-words). Sub-word j occupies bits `[P*j+P-1 : P*j]`. The decoded bus
`dybit_pkg::dec_t` has 16 bits, `{s[3:0], e[3:0], m[7:0]}`, and packs the
triples of all sub-words:

| precision | sign of sub-word j | exponent        | mantissa        |
|-----------|--------------------|-----------------|-----------------|
| 8-bit     | s[3]               | e[2:0]          | m[7:0]          |
| 4-bit     | s[2j+1]            | e[2j+1:2j]      | m[4j+3:4j]      |
| 2-bit     | s[j]               | e[j]            | m[2j+1:2j]      |

The sign positions are the raw bits X7, X5, X3 and X1, as the paper's decoder
selects them. The exponent and mantissa packing is this design's choice.

## 2. Decoder (`mp_decoder`)

The decoder serves all three precisions with shared hardware:

* Two 4-bit leading-ones detectors (`lod4`) work on X7..X4 and X3..X0. Their
  counts are the 4-bit sub-word exponents.
* A small combining stage joins the two counts into the 8-bit count: if the
  upper count is 4, add the lower count.
* Each 2-bit sub-word needs only a test that both of its bits are 1.
* The mantissa shifter moves the word left by the leading-ones count. This
  drops the ones and leaves the delimiter 0 in the MSB. That 0 is then
  replaced by the hidden 1. For 8-bit words this is the paper's
  `X << exp + 1`.
* A mode multiplexer selects the result for the current precision.

For signed words, the magnitude bits under each sign are first
left-justified within their sub-word. The same detectors and shifters then
serve signed and unsigned numbers alike. The paper does not say how signed
words are detected; this is this design's choice. The decoder is
combinational.

## 3. The mixed-precision PE (`mp_pe`)

Each PE takes one decoded IF word from the left and one decoded weight word
from above. It multiplies **every** IF sub-word u with **every** weight
sub-word v. This is an outer product: each operand is reused against several
others, and the paper's "reuse 1010 x 01 and 1010 x 10" example shows the
same idea. The product of the pair (u, v) goes to lane `u*(8/Pw) + v`. There
are at most 16 lanes, because the 2x2 mode has 4 x 4 products.

* **Sign**: the two sub-word signs are XORed.
* **Exponent (`exp_adder`)**: one 4-bit sum per lane. The operands of each
  lane adder are selected by the mode. The paper mentions sharing a carry
  chain between low-precision adders; that sharing is not modelled here.
* **Mantissa (`man_mul`)**: a fused multiplier in the style of BitFusion.
  Each operand is split into four 2-bit digits, and a 4 x 4 grid of 2x2
  multiply units forms all 16 digit products. Multiply unit (i, j) belongs
  to lane `(i/da)*(8/Pw) + j/dw`, where da = Pa/2 and dw = Pw/2 are the
  digits per sub-word. Its product is shifted left by
  `2*((i mod da) + (j mod dw))` and added into that lane. With all 16 units
  in one lane this is an 8x8 multiply. With pairs of units it is eight
  4x2 multiplies. The paper prints four modes (4x2, 4x4, 8x4, 8x8). The same
  wiring covers all nine combinations of {8,4,2} x {8,4,2}, which is what
  the paper's precision search selects from, so all nine are supported.
* **Accumulator (`fp_accumulator`)**: the paper calls it a floating-point
  accumulator. A product of a Pa-bit and a Pw-bit mantissa is worth
  `prod * 2^(esum - (Pa+Pw-2))`. Every such value is an integer multiple of
  2^-14 and at most 2^14. So each lane keeps its sum as an exact 44-bit
  fixed-point number with 14 fractional bits, and adds each product after
  one alignment shift. The result equals an infinitely precise
  floating-point sum; there is no rounding inside the array. Holding the
  partial sum in this aligned form, rather than as sign, exponent and
  mantissa registers, is this design's choice. The column encoder turns the
  sum back into sign, exponent and mantissa.

A PE accumulates only when the IF word that arrives with it is marked
valid. It forwards both words to its neighbours through one register each.

## 4. Array, dataflow and data layout (`systolic_array`, `dybit_accel`)

The array is output-stationary: every PE keeps its own block of outputs, and
the blocks leave through the column encoders after the reduction. The paper
does not name the dataflow. It does say that results stay in floating point
inside the array and that encoders are shared per column, and this dataflow
fits both statements.

Row r and column c are delayed by r and c register stages at the array edge.
With those delays, word k of every row and every column meets in PE (r, c)
in the same cycle.

The data layout is this design's choice:

* **IF buffer** (N bytes per address): byte r of address k is the packed IF
  word of array row r at reduction step k. Its sub-word u belongs to output
  row `m = r*(8/Pa) + u`.
* **Weight buffer**: byte c of address k holds the packed weights of
  column c. Its sub-word v belongs to output column `n = c*(8/Pw) + v`.
* **OF buffer**: after an operation, byte c of address `r*L + l` holds
  output (m, n) in DyBit form. Here `L = (8/Pa)(8/Pw)` is the number of
  lanes and `l = u*(8/Pw) + v`. A 4-bit output sits in the low nibble.

So one operation computes an (8/Pa)N x (8/Pw)N output tile with a reduction
length K of up to the buffer depth. With N = 8, that is a tile of up to
32 x 32 outputs in 2x2 mode.

External memory is not part of the design. The three buffer ports take its
place: an IF write port, a weight write port and an OF read port. A host or
DMA drives them while the accelerator is idle. Splitting a layer into tiles
(im2col, loop order) also happens outside the design.

## 5. Encoder (`mp_encoder`)

Each column has one encoder, which works in two steps:

1. **Normalise.** From the 44-bit sum, find the sign, the position of the
   leading one (this gives the exponent e of `1.f * 2^e`) and the fraction f.
2. **Quantise.** Let n be the output width (8 or 4) and m = n - (signed ? 1 : 0).
   * If e >= m-1, the value is at or above the largest value, and the
     output saturates to the all-ones code.
   * If 0 <= e <= m-2, the encoder writes e+1 ones, the delimiter 0, and
     then fills the remaining bits with the top bits of f. This is the
     paper's "insert (exp+1) ones and select the remaining mantissa bits".
   * If e < 0, the output is the denormal code `0x..x` with
     `x = floor(|v| * 2^(m-1))`.

The paper does not specify rounding, saturation or negative unsigned
outputs. This design chooses:

* Rounding is toward zero: the bits that do not fit are dropped.
* Values above the range saturate to the largest code.
* An unsigned output clamps a negative sum to 0.
* A signed output gets its sign bit prepended, except when the magnitude is
  0.

No per-tensor scale factor is applied in hardware. The paper does not
describe one. Such a scale would have to be folded into the weights or
applied outside the design.

## 6. Control unit, instruction and timing (`control_unit`)

A run-time instruction (`dybit_pkg::instr_t`) carries these fields:

* `a_prec`, `w_prec`: input precisions (`PREC8`, `PREC4` or `PREC2`);
* `a_signed`, `w_signed`: input signedness;
* `o_prec`: output precision (`PREC8` or `PREC4`);
* `o_signed`: output signedness;
* `k_len`: the reduction length K, from 1 to the buffer depth.

`start` is accepted only while the unit is idle. The unit then runs these
steps:

| phase | cycles | action |
|-------|--------|--------|
| CLEAR | 1      | clear all accumulators |
| FEED  | K      | read buffer address k = 0..K-1; the decoded words reach the array edge one cycle later |
| FLUSH | 2N-1   | the last words ripple to PE (N-1, N-1) |
| DRAIN | N*L    | select PE row r and lane l on every column port; write the encoded bytes to OF address r*L+l |
| DONE  | 1      | `done` pulse |

From the clock edge that samples `start` to the cycle in which `done` is
high takes exactly **K + 2N + N*L + 1 cycles**. The drain dominates only for
short reductions. The instruction format and this schedule are this design's
choices; the paper says only that run-time instructions select the PE modes.

## 7. Parameters and sizes

| parameter | default | where | note |
|-----------|---------|-------|------|
| `N` (array size) | 8 | `dybit_accel`, `systolic_array` | The paper sizes the array to fill its FPGA and gives no number. |
| `DEPTH` (IF/weight buffer words) | 8192 | `dybit_accel`, `control_unit`, `buffer_ram` | Holds the longest reduction, K = 4608 (3x3x512), of ResNet-18/50. |
| OF buffer words | N*16 | `dybit_accel` | Holds one tile in every mode. |
| `ACC_W` | 44 | `dybit_pkg` | Exact sum of 8192 products of the largest magnitude, 2^14. |
| `FRAC_BITS` | 14 | `dybit_pkg` | Smallest product is 2^-7 x 2^-7. |

Reset is asynchronous and active low. It clears the control state, the skew
registers and the accumulators. Buffer contents are not reset.

Networks the paper evaluates: ResNet-18, ResNet-50, MobileNetV2, RegNet-3.2GF,
ConvNeXt-Tiny and ViT-Base. Their largest reductions are at most 4608, from
the usual layer shapes of these networks. So every GEMM layer of them runs as
a sequence of tiles on the default design. Layers that are not GEMMs
(softmax, normalisation, activation functions, pooling) are not in this
design. Depthwise convolutions, with K = 9 or 49 per channel, run but use the
array poorly, as the paper also observes for MobileNetV2.

## 8. Departures from the paper, and what it leaves open

* **All-ones code:** valued 2^(n-1), following the paper's table rather than
  its formula (section 1).
* **Multiplier output:** the paper's multiplier drawing labels a "24-bit
  multiplication result". The outer product here needs up to 16 separate
  lanes (64 product bits in 2x2 mode), so the output is a 16 x 16-bit lane
  bus.
* **Precision modes:** all nine precision pairs are supported, not only the
  four printed in the multiplier legend.
* **Accumulator:** the "floating-point accumulator" is an exact aligned
  fixed-point accumulator (section 3). Its results are the exact sums, so
  they are at least as accurate as any floating-point accumulator.
* **Exponent adder:** it uses per-lane adders. The shared carry chain the
  paper mentions is not modelled.
* **Normaliser location:** the normaliser sits in the column encoder rather
  than in each PE, so it is instantiated N times, not N^2 x 16 times.
* **Multiply units:** each 2x2 multiply unit is written as a `*` of two 2-bit
  numbers, not as the half-adder netlist of the paper's drawing.
* **Choices where the paper is silent:** array size, buffer sizes and
  layout, instruction format, control schedule, signed decoding, rounding,
  saturation, the unsigned clamp and the reset behaviour are all this
  design's own.
* **Not included:** the external memory and its interface, and the software
  side (the cycle-accurate latency model and the mixed-precision search)
  are outside this RTL.

## 9. Files

`rtl/` (one module or package per file):

| file | content |
|------|---------|
| `dybit_pkg.sv` | precision enum, decoded-word and instruction structs, widths, sub-word helpers |
| `lod4.sv` | 4-bit leading-ones detector |
| `mp_decoder.sv` | DyBit decoder |
| `exp_adder.sv` | per-lane exponent adder |
| `man_mul.sv` | fused 16-MU mantissa multiplier |
| `fp_accumulator.sv` | exact per-lane accumulator |
| `mp_pe.sv` | processing element |
| `systolic_array.sv` | N x N array with edge skew and column read ports |
| `mp_encoder.sv` | normaliser and DyBit quantizer |
| `buffer_ram.sv` | one-write one-read synchronous RAM (IF, weight and OF buffers) |
| `control_unit.sv` | instruction sequencer |
| `dybit_accel.sv` | top level |

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`, and
the reference model `tb_ref_pkg.sv`. The reference model computes DyBit
values straight from the definition in section 1 and quantises by searching
for the largest code not above the value. It shares no code with the RTL.
Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* `tb_mp_decoder` checks every 8-bit word in every mode.
* `tb_dybit_accel` runs the full-size design (N = 8, depth 8192) through
  twelve operations. It covers:
  * all nine precision pairs;
  * signed and unsigned inputs and outputs;
  * 8-bit and 4-bit outputs;
  * K = 1 and K = 8192;
  * saturated, sub-one, zero and negative outputs;
  * a start request ignored while busy.

  It checks every output byte and the exact start-to-done latency.
* `tb_workload_layers` runs one output tile each of four layer shapes from
  the evaluated networks, on the default-size design:
  * ResNet-18 3x3 conv, K = 4608, W4/A4;
  * MobileNetV2 1x1 projection, K = 960, W4/A8;
  * ViT-Base MLP, K = 3072, W8/A8;
  * ResNet-50 1x1 conv, K = 2048, W2/A4.

  Its operand codes are biased toward small magnitudes, and it checks every
  output against the reference. Because the hardware applies no per-tensor
  output scale (section 5), a noticeable share of these outputs saturates.
  In practice the scale belongs in the weights of the next layer.

To run one testbench with Verilator 5, for example the end-to-end test:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/dybit_pkg.sv tb/tb_ref_pkg.sv tb/tb_dybit_accel.sv \
        --top-module tb_dybit_accel
    ./obj_dir/Vtb_dybit_accel

For the other testbenches, replace `tb_dybit_accel` with the testbench name.
Verilator finds the RTL modules in `rtl/` by file name. The end-to-end test
takes a few seconds to simulate.

## 10. How far to trust it

Every module passes lint with Verilator (`-Wall`) and elaboration with the
slang front end of Yosys.

Every testbench passes. Each one also fails when its module is replaced by a
copy with one deliberate bug: a wrong exponent offset, a wrong shift, OR
instead of XOR, a short skew, an off-by-one saturation, a short flush and so
on.

The arithmetic is checked exhaustively at the decoder and by random
comparison against the independent reference everywhere else. The timing
claims in this document (the edge skew, the 2N-1 flush and the total
latency) are checked cycle-exactly.

What is not verified:

* timing closure and the area of a real implementation;
* agreement with the authors' own RTL, which was not available; where the
  paper is silent, this design's behaviour is its own.
