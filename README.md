# A mixed Posit/fixed-point multiply-accumulate unit for 4-bit inference

Quantizing a network to 4-bit weights loses accuracy. Most of the loss
comes from a few layers whose weights cluster tightly around zero. A uniform
4-bit fixed-point grid (FixP4) spends most of its levels far from where those
weights are. A 4-bit Posit grid, Posit(4,1), is dense near zero and sparse far
out, so it fits those layers much better. Posit arithmetic is normally
expensive, though. Most of that cost is the encoder and decoder between the
packed format and the "raw" format used for arithmetic.

This design sidesteps that cost. Only the weights of the sensitive layers,
roughly a tenth of all parameters, are Posit(4,1). Every other weight is
FixP4, and every activation is FixP4. A Posit result never has to be formed,
so no Posit encoder is needed. The Posit decoder collapses into a 16-entry
table plus a shifter. This repository holds the RTL of the one hardware
element this needs: a multiply-accumulate (MAC) unit that takes a 4-bit
weight in either number system, multiplies it by a FixP4 activation, and
accumulates into 24 bits.

## Number formats

Every operand is 4 bits wide. How the bits are read depends on the weight's
number system, which is fixed per layer.

| operand | format | value of code `c` | range |
|---|---|---|---|
| activation `A` | unsigned FixP4 | `c` (times a per-layer clip step, outside the MAC) | 0 .. 15 |
| FixP weight | two's complement, 2 integer + 2 fraction bits (Q2.2) | `signed(c)/4` | -2 .. 1.75 |
| Posit weight | Posit(4,1): sign, regime, one exponent bit | see the table below | -16 .. 16 |

The Posit(4,1) codes:

| code | value | code | value |
|---|---|---|---|
| 0000 | 0    | 1000 | NaR (never used) |
| 0001 | 1/16 | 1111 | -1/16 |
| 0010 | 1/4  | 1110 | -1/4 |
| 0011 | 1/2  | 1101 | -1/2 |
| 0100 | 1    | 1100 | -1 |
| 0101 | 2    | 1011 | -2 |
| 0110 | 4    | 1010 | -4 |
| 0111 | 16   | 1001 | -16 |

A negative code is the two's complement of the positive code with the same
magnitude, so bit 3 is the sign. Trained weights rarely reach 16, so a layer
may instead use the grid divided by 4 or by 8 ("Posit4/4", "Posit4/8"). Both
divisors are powers of two, so scaling only moves the binary point. The
hardware is identical for all three grids.

## Why the Posit multiply is a shift

Every non-zero Posit(4,1) magnitude is a power of two, from 2^-4 to 2^4.
Written as a fixed-point number with four fraction bits, the magnitude has
exactly one bit set. This fixed-point number is the raw format. It is 10 bits
wide, of which bits 0 to 8 are used. Multiplying the activation by a one-hot
number is a left shift. So `posit4_decoder` stores a shift amount per code
(0, 2, 3, 4, 5, 6 or 8, plus a zero flag for 0000 and NaR) and shifts the
4-bit activation by it. The result is `|W x A|` as a 14-bit unsigned number in
units of 2^-4. `sign_set` then negates it when W[3] is set. Activations are
never negative, so W[3] alone gives the product's sign. The result is a
15-bit two's complement product.

The FixP path is an ordinary 4 x 4 multiply (`fixp_multiplier`): a signed
Q2.2 weight times an unsigned activation. It gives an 8-bit signed product in
units of 2^-2.

## The combined MAC (`mixed_mac`)

```
                         w_posit                 |W x A|              signed
 in_w --[W REG]--[steer]---------> posit4_decoder --------> sign_set ---------+
                    |  \__ W[3] ______________________________^                |
                    |                                                  [out mux]--> (+) --[ACC REG 24b]--> acc
                    | w_fixp                                                   |     ^          |
                    +----------------> fixp_multiplier ------------------------+     +----------+
 in_a --[A REG]-------------------> (to both the decoder and the multiplier)
```

- **Input registers.** `in_w` and `in_a` are registered together with the
  number-system select `in_ns`, `in_valid` and `in_clear`.
- **Steering mux.** The registered weight goes only to the path its number
  system selects. The other path gets an all-zero weight, so its logic does
  not toggle. In Posit mode W[3] for `sign_set` is taken after this mux.
- **Output mux.** It picks the active path's product and sign-extends it to
  24 bits.
- **Accumulator.** `mac_accumulator` adds the product to the 24-bit register.
  With `clear` set, it loads the product instead, which starts a new dot
  product. Both products enter the adder LSB-aligned, with no shift.

Holding `in_ns` at Posit gives the plain Posit/FixP MAC: decoder, sign set,
adder and accumulator only.

### Reading the accumulator

The two products are not shifted into a common binary point. The LSB of
`acc` therefore depends on the layer's number system:

| layer weights | acc LSB (times the activation step) |
|---|---|
| FixP4 (Q2.2) | 2^-2 |
| Posit4 | 2^-4 |
| Posit4/4 | 2^-6 |
| Posit4/8 | 2^-7 |

A layer never mixes number systems within one dot product, so this is just a
per-layer constant for whatever requantizes the output. `mac_pkg` exports
`RAW_FRAC` (4) and `FXP_FRAC` (2) for this purpose. If one dot product did mix
Posit and FixP terms, the FixP product would have to be shifted left by two
first. The RTL does not do that, because the unit is meant to be used one
layer at a time.

### Headroom

The 24-bit accumulator is the 14-bit product plus 10 guard bits. The largest
Posit product is 16 x 15 = 3840 raw units, so 2184 terms can never wrap. The
largest FixP product magnitude is 120, so 69905 FixP terms can never wrap.
Beyond those lengths the sum wraps silently in two's complement. There is no
saturation or overflow flag.

For the networks this scheme targets, the longest dot products are these:

| network | longest dot product | always safe? |
|---|---|---|
| ResNet-20 (CIFAR) | 576 | yes |
| MobileNetV1 | 1024 | yes |
| MobileNetV2 | 1280 | yes |
| BERT-base, GPT-2 small, ViT-B | 3072 | FixP yes; Posit only if the mean code product stays below 2730 |
| VGG-16, ResNet-18 | 4608 | FixP yes; Posit only if the mean code product stays below 1820 |

The layer sizes are the usual published ones for these networks. With real
weight distributions the Posit sums stay far from the limit: the workload
testbench's 4608-term Posit layers end near 32,000 against a limit of
8,388,607.

## Interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, all registers on the rising edge |
| `rst_n` | in | 1 | asynchronous reset, active low; clears all registers |
| `in_valid` | in | 1 | a term is presented this cycle |
| `in_clear` | in | 1 | this term is the first of a new dot product |
| `in_ns` | in | 1 | `mac_pkg::num_sys_e`: `NS_POSIT` (1) or `NS_FIXP` (0) |
| `in_w` | in | 4 | weight code |
| `in_a` | in | 4 | activation code |
| `acc` | out | 24 | running sum, two's complement |
| `acc_valid` | out | 1 | `acc` has just taken in one more term |

The unit accepts one term per clock and never stalls. Suppose a term is set up
before rising edge *t*. The input registers capture it at *t*. The sum that
includes it is in `acc` after edge *t+1*, and `acc_valid` is high during that
cycle. Cycles with `in_valid` low leave `acc` unchanged. Because of
`in_clear`, consecutive dot products need no idle cycle between them. An
N-term dot product is complete N+1 edges after its first term is presented.

Two assertions guard the inputs. The NaR code 1000 must never be sent on the
Posit path; it would be taken as zero. The decoder's raw magnitude must be
one-hot or zero.

## What is outside the RTL

- **Choosing the number system of each layer.** This is done offline. Each
  layer is scored by how much a Posit grid cuts its quantization error,
  weighted by its mean gradient magnitude. Layers are then moved to Posit in
  order of score until 10% of the parameters are Posit. The layer also
  chooses between the /4 and /8 grid. The result reaches the hardware only as
  `in_ns` and as the output scale.
- **Weight quantization and retraining.** This is a training-time step, and
  the weights arrive already coded. The FixP quantizer produces an offset
  code (level index with the lowest level at 0). The RTL expects two's
  complement instead, which is the same code with its MSB inverted. That
  conversion is assumed to be done when the weights are stored.
- **Activation requantization.** Activations are clipped at a trained level
  and rounded to 16 levels. How and where that happens in hardware is not
  specified. The MAC takes FixP4 activation codes as given.
- **The accelerator around the MAC.** The arrays, buffers and dataflow are
  not specified. `mixed_mac` is the processing element such an accelerator
  would replicate.

## Design choices not fixed by the architecture

These are this implementation's own decisions:

- the raw-format binary point (LSB 2^-4), and the unused bit 9;
- NaR decoded as zero;
- FixP weights in two's complement;
- the LSB-aligned adder inputs, and hence the per-layer output scale;
- the steering mux read as operand isolation;
- the valid/clear handshake, the registered per-term `in_ns`, the
  asynchronous reset, and wrap-around on overflow;
- the inside of Sign Set (conditional negation) and of the multiplier (a
  plain signed-by-unsigned product).

These follow the architecture as published:

- the table-plus-shift decoder;
- the 10/14/24-bit widths;
- the Q2.2 FixP split;
- W[3] as the sign;
- the input registers and the two muxes.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench derives
its expected values independently, from real-valued weight tables, not from
the bit layout.

| testbench | what it checks |
|---|---|
| `tb_posit4_decoder` | all 256 weight/activation pairs, raw magnitude and product |
| `tb_sign_set` | extreme and random magnitudes with both signs |
| `tb_fixp_multiplier` | all 256 pairs against Q2.2 arithmetic |
| `tb_mac_accumulator` | random en/clear/product streams; reset; one-edge latency; 2184 worst-case Posit terms not wrapping and the 2185th wrapping |
| `tb_mixed_mac` | the whole unit at default sizes: 60 random dot products of random length in either number system, with idle cycles and back-to-back starts, plus the 2184-term worst case; every result checked against a real-valued reference, every term's two-edge latency checked; it counts, and fails if it never saw, each of Posit and FixP layers, switches between them, back-to-back starts, idle cycles, negative Posit products, zero weights and the largest Posit magnitude |
| `tb_mac_workloads` | one output of the longest dot product of each target network (576 to 4608 terms) as a FixP4, Posit4, Posit4/4 and Posit4/8 layer, with bell-shaped weights; the result is checked in real units and the cycle count is checked as N+1 |

The design is small: about 40 word-level cells and 36 flip-flops at the top.
It passes `verilator --lint-only -Wall` and elaborates in Yosys with the
slang front end. Energy and timing were not characterized.

## Files and simulation

`rtl/mac_pkg.sv` holds the widths, the number-system enum and the binary
points. The other files, one module each, are `posit4_decoder`, `sign_set`,
`fixp_multiplier`, `mac_accumulator` and the top, `mixed_mac`.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/mac_pkg.sv rtl/*.sv \
          tb/tb_mixed_mac.sv --top-module tb_mixed_mac -Mdir obj_tb
./obj_tb/Vtb_mixed_mac
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`. Each runs
in well under a second.

To move to wider activations or a longer accumulator, change `A_W` or
`GUARD_W` in `mac_pkg`; `PROD_W` and `ACC_W` follow from them. The decoder
table is specific to Posit(4,1). A different Posit size or exponent width
needs a new table, and no longer gives a one-hot raw format once fraction
bits appear.
