# Delta-compressed MAC operator for small FPGAs

On a small FPGA the weights of a neural network often take more flip-flops or
block RAM than the arithmetic does. This design stores each weight vector as one
full-precision **reference value** and a short **delta** per weight: 4 bits
instead of 8. The network is trained knowing that its weights will be stored this
way ("delta-aware training"), so the weights stay close to their reference.
The hardware only has to rebuild the 8-bit weights while it computes.

The RTL here is one multiply-and-accumulate (MAC) operator. It computes a single
dot product `y = sum x[i] * w[i]` over 84 inputs. Its 84 weights are held as an
8-bit reference plus 84 four-bit deltas, and four multipliers work in parallel.
With the default parameters one operation takes 23 clock cycles, or
`ceil(84/4) + 2`. The operator follows the delta-compressed MAC described in
*Towards Delta Aware Training: Efficient DNN Weight Storage for
Resource-Constrained FPGAs* (Federl, Einhaus, Erbslöh, Schiele). That paper
characterises the operator on an AMD Spartan-7 XC7S15. It reports 183.8 MHz and
7.99 M operations/s for the 4-multiplier fixed-reference version.

## Number format

All data and weights are 8-bit signed fixed point **Q2.5**:

| bit | 7 | 6 | 5 | 4 | 3 | 2 | 1 | 0 |
|-----|---|---|---|---|---|---|---|---|
| weight | sign | 2^1 | 2^0 | 2^-1 | 2^-2 | 2^-3 | 2^-4 | 2^-5 |

Values therefore lie in [-4, +3.97] in steps of 1/32. In the network this operator
was made for, the inputs are scaled to [-1, 1].

## The delta code

A delta `d` is the 8-bit difference between a base weight and the weight being
stored. It is kept in `m = 4` bits:

* If `-7 <= d <= 7`, the stored code is the sign bit and the three low bits of
  `d`: bits 7, 2, 1 and 0. For values in this range these four bits are exactly the
  4-bit two's-complement form of `d`.
* If `d > 7`, the code saturates to `0111` (+7).
* If `d < -7`, the code saturates to `1001` (-7).

Note that the range is symmetric: `1000` (-8) is never produced. To decode, the code
is sign-extended back to 8 bits. The encoder is not part of the hardware, because
weights are compressed when they are generated. It is given as the function
`delta_pkg::compress_delta` so that weight generators and testbenches share one
definition.

One step of Q2.5 is 1/32, so a 4-bit delta moves a weight by at most 7/32 ≈ 0.22
from its base.

## Rebuilding the weights

Each vector has a full-width reference `r` and one code per weight. The `MODE`
parameter selects one of two ways to rebuild the weights:

| `MODE` | stored code `c[i]` encodes | rebuilt weight |
|--------|----------------------|----------------|
| `DELTA_FIXED` (default) | `r - w[i]` | `w[i] = r - sext(c[i])` |
| `DELTA_CONSECUTIVE` | `w[i-1] - w[i]` (with `w[-1] = r`) | `w[i] = w[i-1] - sext(c[i])` |

Usually the reference is the vector's own first weight, and then `c[0] = 0`. Because
the reference is a separate register, one reference can also be shared by all the
neurons of a layer, which is how the deltas were computed in training (per layer).

**Fixed reference.** Every weight depends only on the reference. An error in one
delta stays in that weight, and the lanes are independent. In the original
evaluation this scheme trained to the better accuracy (78.7 % against 76.0 %
on FashionMNIST). It also made the smaller circuit, which is why it is the default.

**Consecutive.** Each weight is built from the one before it. The weights can
therefore drift further from the reference, but an error carries on to every later
weight. In hardware the N_MULT lanes of a cycle form a chain of subtractors. A
register carries the last weight of a group into the next cycle. The chain restarts
from `r` at group 0.

Arithmetic wraps at 8 bits. The encoder never stores a delta that would wrap
the weight it was computed from. In consecutive mode, however, a saturated delta
changes every later weight, and the decoder reproduces exactly what the encoder
computed.

The sign convention, base minus weight, comes from the delta diagrams of the
original work. Its prose instead describes the expanded delta as *added* to the
reference. That convention only flips the sign of every stored code. Because the
code range is symmetric, both conventions can represent the same weights. An
encoder written for the other convention must negate its codes before loading them.

## The operator

```
          w_wr_*                     x_wr_*
            |                          |
   +--------v---------+       +--------v-------+
   | delta_weight_store|       |  input_buffer  |    flip-flop register files
   | ref + 84 x 4 bit |       |   84 x 8 bit   |
   +--------+---------+       +--------+-------+
            | group g: 4 codes         | group g: 4 inputs
   +--------v---------+                |
   | weight_reconstruct|  (combinational)
   +--------+---------+                |
            | 4 weights                |
   +--------v--------------------------v-------+
   |        mult_lanes: 4 x (8x8 -> 16), registered
   +--------------------+----------------------+
                        | 4 products
   +--------------------v----------------------+
   |  mac_accumulator: sum of 4 + 23-bit accumulator
   +--------------------+----------------------+
                        |
                 requantize -> y register (Q2.5, saturated)

   mac_controller: group counter, issue / drain / output sequencing
```

Each cycle works on one **group** of `N_MULT` consecutive weights. `mac_controller`
steps the group index. The two register files return that group's codes and
inputs. The weights are rebuilt combinationally, the multipliers register their
products, and the accumulator adds the four products one cycle later.

### Timing

Count the clock edge that samples `start` as edge 0. For the defaults,
`N_GROUPS = 21`:

| edge | what happens |
|------|--------------|
| 0 | start accepted, accumulator cleared, group 0 presented |
| 1 … 21 | products of groups 0 … 20 registered |
| 2 … 22 | products added to the accumulator (last one at edge 22) |
| 23 | `y`, `y_sat` registered, `done` high for one cycle |

The operator therefore takes **`ceil(N_WEIGHTS / N_MULT) + 2` cycles**: 23, 44 or
86 for 4, 2 or 1 multipliers. This is the cycle count reported for the original
operator. While `done` is high the controller is already idle, so a new `start`
can be given in that same cycle. Operations then follow each other every 23
cycles. Operations never overlap. The reported throughput is exactly
`f_max / cycles` (183.82 MHz / 23 = 7.992 M/s), which implies the same.

### Result

* `acc`: full-precision sum in Q.10. It is 23 bits wide
  (`2*DATA_W + clog2(N_WEIGHTS)`), so 84 full products can never overflow it. It is
  valid from `done` until the next `start`.
* `y`: `acc` shifted right by 5, which truncates towards minus infinity. It is then
  clipped to [-128, 127], that is [-4, 3.97].
* `y_sat`: set when `y` was clipped.

Batch normalisation and the hard-tanh activation that follow every layer in the
target network are **not** part of this operator.

## Interface and use

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | rising-edge clock; asynchronous active-low reset (clears all storage) |
| `w_wr_en`, `w_wr_ref`, `w_wr_addr`, `w_wr_data` | in | 1, 1, 7, 8 | with `w_wr_ref`: reference value; otherwise the delta code of `w[addr]` in bits 3:0 |
| `x_wr_en`, `x_wr_addr`, `x_wr_data` | in | 1, 7, 8 | input `x[addr]` |
| `start` | in | 1 | begin an operation; ignored while `busy` |
| `busy` | out | 1 | operation in progress |
| `done` | out | 1 | one-cycle pulse: result valid |
| `y`, `y_sat`, `acc` | out | 8, 1, 23 | result (see above) |

Typical sequence:
1. Write the reference and the 84 codes, one word per cycle. The weight and input
   ports may be written in the same cycle.
2. Write the 84 inputs.
3. Pulse `start`.
4. Wait for `done`.

Weights and inputs are independent. Between operations you may reload either one
while the other stays loaded. An
assertion in `delta_mac` flags any buffer write while `busy`.

On the original board these ports sit behind an SPI link and a small middleware
layer that talks to a microcontroller. Neither of those is included; the
load/start/done ports take their place.

## Storage

| | bits for 84 weights |
|---|---|
| plain 8-bit weights | 672 |
| reference + 84 four-bit deltas (`delta_weight_store`) | 8 + 84 × 4 = **344** |

That is a saving of `1 - 344/672 = 48.8 %`, the figure given for the original
operator. The input buffer adds another 84 × 8 flip-flops.

The original work also points out that 4-bit deltas let a single-port 8-bit block
RAM deliver two weights per read. That would double the weight bandwidth of a
BRAM-based store. This design keeps the weights in flip-flops, as the
characterised operator did. All lanes are therefore read in parallel and the
BRAM variant is not built.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `MODE` | `DELTA_FIXED` | reconstruction scheme |
| `N_WEIGHTS` | 84 | length of the dot product |
| `N_MULT` | 4 | parallel multipliers (weights per cycle) |
| `DATA_W` | 8 | data and weight width |
| `FRAC_W` | 5 | fraction bits of the data format |
| `DELTA_W` | 4 | stored delta width |

`N_WEIGHTS` need not be a multiple of `N_MULT`. In the last group, lanes past the
end are flagged invalid and contribute zero. `delta_pkg::compress_delta` uses the
package constants, so it matches only the default widths.

## What follows the original and what is this design's own

Taken from the original work:
* the delta code: bit selection, saturation to `0111`/`1001`, and sign extension
  on decode;
* the two reconstruction schemes, with fixed reference as the main one;
* Q2.5 data, 4-bit deltas, 84 weights, and 1/2/4 parallel multipliers;
* flip-flop storage of the parameters: one reference plus one delta per weight, as
  the original's compression formula counts them;
* the cycle count `ceil(N/P) + 2`.

Choices made here, where the original gives no detail:
* the load ports and the start/busy/done handshake;
* the split into pipeline stages: combinational reconstruction, a product
  register, and an accumulate stage;
* the accumulator width;
* truncation and saturation back to Q2.5;
* wrap-around in reconstruction;
* the sign convention (taken from the diagrams);
* asynchronous reset.

The uncompressed MAC that served as the original's baseline is not built, and
neither are the SPI interface, batch normalisation, activations or the sequencing
of a whole network.

Timing and resources were not measured here. The original's figures
(183 MHz, about 800 LUTs, 4 DSPs) belong to its own implementation, not to this
RTL.

## Fitting the FashionMNIST network

The network the operator was designed for is 784-150-16-400-120-84-10, with 185,320
weights in total. One operator holds one 84-weight vector. Each of the 10 output
neurons (84 inputs) is one operation. The 400 neurons of the 16-input layer also fit
if the unused inputs are written as zero. The layers with 784, 150, 400 and 120
inputs do not fit: the accumulator is cleared at every `start`, so longer dot
products cannot be split into several operations.

## Files

`rtl/`:
* `delta_pkg.sv`: constants, `delta_mode_e`, `compress_delta`
* `delta_mac.sv`: top level
* `mac_controller.sv`
* `delta_weight_store.sv`
* `input_buffer.sv`
* `weight_reconstruct.sv`
* `mult_lanes.sv`
* `mac_accumulator.sv`
* `requantize.sv`

`tb/`: one self-checking bench per module (`tb_<module>.sv`), plus:
* `tb_delta_mac.sv`: runs seven configurations side by side. These are fixed and
  consecutive modes with 1, 2 and 4 multipliers, and a 10-weight operator with a
  half-empty last group. It checks latency, `acc`, `y` and `y_sat` for every
  operation and counts how often each mechanism occurs: saturated delta codes,
  positive and negative output saturation, a start ignored while busy, a
  back-to-back restart, and a partial last group. A mechanism that never occurs
  counts as a failure.
* `tb_delta_mac_run.sv`: the per-configuration driver that `tb_delta_mac` uses.
* `tb_delta_mac_full.sv`: the unmodified default operator over 16 operations.
* `tb_mlp_fit_layers.sv`: runs the two network layers that fit a single
  operation. These are a 400-neuron layer with 16 inputs and a 10-neuron layer with
  84 inputs, with synthetic weights near a per-layer reference.

Every bench prints `TB_RESULT checks=<n> failures=<n>` and stops itself with a
watchdog. To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/delta_pkg.sv tb/tb_delta_mac.sv \
          --top-module tb_delta_mac -o sim
./obj_dir/sim
```

Lint: `verilator --lint-only -Wall -Irtl rtl/delta_pkg.sv rtl/delta_mac.sv`. The
remaining warnings are unused package constants, the clock, reset and control
inputs that `weight_reconstruct` does not use in fixed mode, and the reset being
used both by the flip-flops and to disable the protocol assertions during reset.
