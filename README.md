# A shift-based multiply-accumulate unit for power-of-two weights

A neural network whose weights are quantised to signed powers of two,
w = ±2^-e, never needs a multiplier: multiplying an activation by such a
weight is an arithmetic shift by e followed, for negative weights, by a
negation. This RTL implements that multiply-accumulate (MAC) unit in the
configuration the paper "Power-of-Two Quantization for Low Bitwidth and
Hardware Compliant Neural Networks" (Przewlocka-Rus et al.) synthesises and
reports on: 4-bit weights (one sign bit, three exponent bits), 8-bit
activations, a 12-bit intermediate product and a 16-bit accumulator. In that
paper the unit uses about a sixth of the power and half the cell area of an
8x8 integer MAC, and less than half the power of a 4x8 integer MAC.

The weight is used exactly as it is stored, with no decoding: the exponent
bits drive the shifter and the sign bit drives the sign correction. Scaling
of the layer (the largest weight of the layer and the batch-normalisation gain)
is not done here; it is meant to be folded into the next batch-normalisation
step, outside the unit.

## The weight code

A stored weight is `{sign, e}`, W_W = EXP_W + 1 = 4 bits:

| sign | e (3 bits) | weight value |
|------|------------|--------------|
| 0    | 0          | +1           |
| 0    | 1          | +1/2         |
| 0    | ...        | ...          |
| 0    | 7          | +1/128       |
| 1    | e          | -2^-e        |

The weights of a layer are normalised to [-1, 1] before quantisation, so the
largest magnitude is 1 and the eight codes cover 1 down to 1/128. There is no
code for zero: every one of the 16 codes is a nonzero level. That matches
unpruned power-of-two quantisation, where small weights are pushed up to the
smallest level rather than to zero (see *Pruned weights* below).

The sign sits in the MSB of the weight word. That bit order, and the
mapping "code e means 2^-e", are choices of this RTL; the paper says only that
the weight is stored as an exponent with a sign ("bit shift values with shift
direction"). Because the weights are normalised to at most 1, every shift in
this unit is to the right, and the sign bit selects negation, not a shift
direction.

## Number format of the intermediate and of the accumulator

This is the part that needs the most care, because the paper gives the widths
(12 and 16 bits) but not where the binary point is.

The activation `a` is an 8-bit two's complement integer. The weights are at
most 1 in magnitude, so every product is a right shift of `a`. A right shift
by up to 7 places would throw away the low bits, so the shifter first places
`a` in a 12-bit word with **4 fraction bits** (`a * 16`) and shifts that word
right arithmetically:

    p = floor(a * 16 / 2^e)          12 bits, units of 1/16

For e ≤ 4 the product is exact; for e = 5, 6, 7 the bits below 1/16 are
dropped, rounding towards minus infinity. This truncation is the only
rounding in the unit. `|a * 16| ≤ 2048`, so `p` never overflows 12 bits.

The sign is then applied (`pot_sign_correct`). The one awkward value is
`a = -128, e = 0, sign = 1`: `p = -2048`, whose negation +2048 does not fit
in 12 bits. The correction therefore sign-extends `p` to the 16-bit
accumulator width first and negates there, so this case is exact.

The accumulator keeps the same scaling: `acc` is a 16-bit two's complement
number with 4 fraction bits,

    acc / 16 = Σ (-1)^sign_i · floor(a_i · 16 / 2^e_i) / 16

so it spans ±2048 activation steps with a resolution of 1/16. Sums beyond that
range wrap around modulo 2^16, as a plain adder does; there is no saturation
and no overflow flag. Whether 16 bits suffice depends on the layer: a 3x3x64
window (576 terms) can reach 576 · 128 steps in the worst case, which is far
outside the range, while trained layers with mostly small weights usually stay
well inside it. The paper fixes 16 bits and does not discuss overflow; a
wider accumulator is one parameter away (`ACC_W`).

With other sizes, the number of fraction bits is always
`FRAC_W = PROD_W - ACT_W`.

## Datapath and timing

```
   act[7:0] ──►┌────────┐      ┌─────────┐ prod[11:0] ┌───────────┐ term[15:0] ┌─────────────┐
 weight.e ────►│ input  │─────►│ shifter │───────────►│   sign    │───────────►│ accumulator │──► acc[15:0]
 weight.sign ─►│  regs  │──────┴─────────┴───────────►│ correction│            │  (16 bit)   │
 in_valid ────►│        │──── v_q, first_q ─────────────────────────────────────►│ en, first   │──► acc_valid
 first ───────►└────────┘                                                      └─────────────┘
```

The unit accepts one term (activation, weight) per clock and never stalls.

* Edge 1: `in_valid`, `first`, `act` and `weight` are registered.
* Between edges 1 and 2: shift, sign correction and the 16-bit addition, all
  combinational.
* Edge 2: `acc` takes the new sum and `acc_valid` is high.

So the sum including a term presented before edge *k* is on `acc` after edge
*k + 1*. A dot product is a run of terms whose first term has `first = 1`:
that term is loaded instead of added, so back-to-back dot products need no
clear cycle. While `in_valid` is low, `acc` holds its value and `acc_valid`
falls one edge later. The finished dot product can be read on the cycle after
its last term reaches `acc`, i.e. whenever `acc_valid` is high and the next
accepted term starts a new sum (or no further term follows).

Reset (`rst_n`, asynchronous, active low) clears all registers.

The input register stage is this RTL's choice. The paper reports power and
area for the combinational part only, so it says there are registers but not
where; its FPGA figure of 25 flip-flops for this unit is close to 4 + 8 input
bits plus the 16-bit accumulator, which is what is built here (plus two
control bits and `acc_valid`).

## Pruned weights

The paper also evaluates networks pruned with a *pruning factor*, where
weights below a threshold are set to zero. A 4-bit sign + exponent word has no
room for zero, so the default unit cannot run them. The parameter
`PRUNE_ZERO = 1` redefines the smallest level's code (e = 7) as weight 0; the
shifter then outputs 0. This holds exactly a network pruned with pruning
factor 2, where the smallest level is removed entirely. Milder pruning keeps
the smallest level *and* adds zeros (nine magnitudes plus a sign), which no
4-bit sign + exponent code can hold. `PRUNE_ZERO` is off by default and is not
part of the configuration the paper synthesised.

## Which networks run on it

The unit stores no weights and no activations; a layer runs as a stream of
dot products, one term per clock, with weights fed from outside. Judged by
weight format:

* All-layer 4-bit power-of-two networks (ResNet18/20/50, VGG-11,
  MobileNet V2 in the paper's evaluation) use exactly this code.
* 3-bit power-of-two networks (two exponent bits) use codes 0..3 of it.
* 5-bit power-of-two networks (ResNet50, VGG-16) need four exponent bits:
  set `EXP_W = 4`. The default unit does not take them.
* Mixed networks whose fully connected layer has 8-bit uniform or
  floating-point weights need an ordinary multiplier for that layer, which is
  not part of this design.

## Files

| file | contents |
|------|----------|
| `rtl/pot_pkg.sv` | default sizes and the `{sign, exp}` weight struct |
| `rtl/pot_shifter.sv` | activation × 2^-e as one arithmetic shift, optional zero code |
| `rtl/pot_sign_correct.sv` | sign extension to the accumulator width and conditional negation |
| `rtl/pot_accumulator.sv` | 16-bit accumulator register with `en`/`first` |
| `rtl/pot_mac.sv` | top level: input registers, shifter, sign correction, accumulator |
| `tb/tb_pot_shifter.sv` | all 256 × 8 (activation, exponent) pairs, with and without the zero code |
| `tb/tb_pot_sign_correct.sv` | all 4096 × 2 (product, sign) pairs, including -2048 |
| `tb/tb_pot_accumulator.sv` | 5000 random cycles against a modulo-2^16 model; wrap-around must occur |
| `tb/tb_pot_mac.sv` | 400 random dot products (1 to 600 terms) at the default sizes, checked every clock |
| `tb/tb_pot_conv_layer.sv` | one output channel of a 3x3, 16-channel, 8x8 convolution, unpruned and pruned |

Parameters of `pot_mac` (defaults are the paper's sizes except
`PRUNE_ZERO`): `ACT_W = 8`, `EXP_W = 3`, `PROD_W = 12`, `ACC_W = 16`,
`PRUNE_ZERO = 0`. `PROD_W` must be at least `ACT_W` and `ACC_W` larger than
`PROD_W`; elaboration stops with an error otherwise.

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl \
    rtl/pot_pkg.sv rtl/pot_shifter.sv rtl/pot_sign_correct.sv \
    rtl/pot_accumulator.sv rtl/pot_mac.sv tb/tb_pot_mac.sv \
    --top-module tb_pot_mac -Mdir obj_tb_pot_mac -o sim
./obj_tb_pot_mac/sim
```

Replace the testbench file and top module name for the others; the block
testbenches need only `pot_pkg.sv` and the block's own file. Every run takes
well under a second.

What the testbenches establish: the shifter and the sign correction are
checked exhaustively; the accumulator and the whole unit against
independent models written with real-number and 64-bit integer arithmetic, on
every clock edge, which also pins down the two-edge latency. `tb_pot_mac`
counts that each mechanism occurred at least once (new dot products,
negative weights, all eight exponents, truncated bits, idle cycles, the
-128 · (-1) corner, accumulator wrap-around) and fails otherwise.
`tb_pot_conv_layer` computes a real convolution window by window and
reports the largest difference between `acc/16` and the exact real-valued
result, which is the cost of the 1/16 truncation (a few tenths of an
activation step for 144-term windows).

What they do not establish: any timing or power figure. The paper's
results (250 MHz in a 5 nm library, relative power and area) come from
commercial synthesis flows and are not reproduced.

## Where this RTL follows the paper and where it chooses

Taken from the paper: power-of-two weights stored as sign plus exponent and
used without decoding; 4-bit weights (1 + 3), 8-bit activations, 12-bit
intermediate, 16-bit accumulator; the multiplier replaced by a shift; the sign
applied after the shift; a combinational datapath between registers.

Chosen here, where the paper is silent: two's complement activations; the
meaning of an exponent code (2^-e) and the bit order of the weight word; the
4 fraction bits of the intermediate and truncation as the rounding; sign
correction at the accumulator width; wrap-around on overflow; the input
registers, the `in_valid`/`first`/`acc_valid` interface and asynchronous
reset; the optional zero code for pruned networks.

Not included: the weight and activation memories and any control that walks
through a layer (the paper discusses memory savings only through a
third-party NPU compiler and proposes no memory organisation); the integer
8x8, integer 4x8 and additive-powers-of-two MAC units the paper compares
against; the quantisation-aware training itself.
