# Binary and ternary MLP inference in fixed-function FPGA logic

A multilayer perceptron whose weights are only +1 and −1 (binary) or +1, 0
and −1 (ternary) needs no multipliers. A product becomes a sign flip, or with
1-bit activations an XNOR gate. Batch normalisation followed by a step
activation becomes one comparison per node. This RTL builds such a network as a
chain of pipelined blocks that are fully on chip. It targets classifiers that
must answer within a few hundred nanoseconds, such as trigger decisions at a
particle collider. The default build is the binary MNIST digit classifier:

    784 inputs -> 128 -> 128 -> 128 -> 10 scores
    binary weights, binary tanh between layers, input and scores in <16,8>,
    reuse factor (initiation interval) 14 in every layer

The ternary, hybrid (ReLU / clipped ReLU) and jet-tagging variants of the
same network are reached through parameters of `bnn_top`.

The arithmetic and the block structure follow a published study of binary
and ternary networks compiled to FPGA firmware by a high-level-synthesis
flow. That work describes what each layer computes, not the circuits the
flow generated. The folding scheme, the handshakes, the configuration bus and
the encodings here are this implementation's own. They are listed under
"Where this RTL departs from the reference design".

## Structure

```
bnn_top
 ├─ nn_block (layer 0)  dense_layer ─ bn_threshold            │ hidden, binary/ternary tanh
 │                       ├─ weight_mem                         │   or
 │                       └─ xnor_popcount (x N_OUT, binary)    │ dense_layer ─ batchnorm ─ relu_act
 ├─ nn_block (layer 1)                                         │ hidden, ReLU / clipped ReLU
 ├─ nn_block (layer 2)
 └─ nn_block (layer 3)  dense_layer ─ batchnorm                  last block: no activation
```

Each block is dense layer → batch normalisation → activation. The last block
has no activation, and its normalised sums are the class scores. Softmax is
left out: only the largest score matters (arg-max), and the consumer takes it.

## Number formats and encodings

| quantity | encoding |
|---|---|
| network input, ReLU outputs, scores | signed fixed point `<W,I>`: W bits, I integer bits (sign included), W−I fraction bits |
| binary weight / activation | 1 bit: `1` = +1, `0` = −1 |
| ternary weight / activation | 2 bits: `01` = +1, `11` = −1, `00` = 0 (`10` reads as 0) |
| node sum (accumulator) | signed integer, ACC_W bits (see below), carrying the input's fraction bits |
| BN scale | signed `<16,6>` (10 fraction bits) |
| BN shift | the block's output format |

With −1 stored as 0, the product of two ±1 values is `~(a ^ b)`. A sum of
N such products is `2·popcount(xnor) − N`. Products of a fixed-point input
and a ±1/0 weight are an add, a subtract or nothing.

**Accumulator width.** Each layer's sum is held in the narrowest integer
that can hold the largest possible value. With binary or ternary inputs
that value is N_IN, so `ACC_W = clog2(N_IN+1) + 1`. That gives 9 bits for a
128-input layer. With fixed inputs of W bits it is `W + clog2(N_IN+1)`, which
gives 26 bits for the 784-input first layer. `bnn_pkg::acc_width` computes
it.

## The folded dense layer (`dense_layer`)

A 784×128 layer has 100,352 products. Doing them all in one cycle costs too
much logic, so the layer is time-multiplexed by the *reuse factor* R. The
inputs are cut into R chunks of `CH = ceil(N_IN/R)` elements. In cycle r,
chunk r meets row r of the weight store, which holds CH weights for every
node. The N_OUT partial sums are then added into N_OUT accumulators. Lanes of
the last chunk beyond N_IN are masked off. For the default first layer this
gives CH = 56: 56×128 = 7,168 add/subtract lanes working for 14 cycles.

The weight store (`weight_mem`) is R × N_OUT words of `CH × (1 or 2)` bits.
One word is written per cycle. A whole row is read per cycle,
combinationally.

Cycle by cycle:

* cycle t: `in_valid && in_ready`. The vector is registered. Chunk 0 is
  taken straight from the input port and summed at the closing edge.
* cycles t+1 … t+R−1: chunks 1 … R−1 are added.
* cycle t+R: `out_valid` is high and the sums sit on `acc`. They hold until
  `out_ready`.

`in_ready` is high when the layer is idle, or when its result is being taken
in this cycle. Back-to-back samples are therefore accepted every R cycles
(II = R), and a stalled consumer holds the layer. An assertion checks that
`out_valid` never drops before it is taken.

## Merging batch normalisation into thresholds (`bn_threshold`)

Batch normalisation computes `y = (x − μ)/sqrt(σ² + ε)·γ + β`. A binary tanh
keeps only the sign of y, so for γ > 0 the pair reduces to

    +1  if  x >= thr0,   thr0 = ceil( μ − β·sqrt(σ²+ε)/γ )    (in accumulator units)

The ternary tanh has steps at y = −1 and y = +1. It becomes

    +1 if x > thr1,  −1 if x < thr0,  else 0
    thr1 = floor( μ + (1 − β)·sqrt(σ²+ε)/γ ),  thr0 = ceil( μ + (−1 − β)·sqrt(σ²+ε)/γ )

For γ < 0 the comparison turns around. Negate that node's weights (and so x)
before computing the thresholds, and the hardware stays one-directional.
"Accumulator units" means the integer sum. For the first layer that sum has
the input's fraction bits, so scale the threshold by 2^F. Thresholds cost one
or two comparators per node and no multiplier.

## Explicit batch normalisation and ReLU (`batchnorm`, `relu_act`)

Before a ReLU, and in the last block, the normalised value itself is needed.
`batchnorm` computes `y = x·s + b` with one multiplier per node, where

    s = γ / sqrt(σ²+ε)   as <16,6>,      b = β − μ·s   in the output format.

The product is shifted right by `ACC_F + 10 − OUT_F`, which truncates toward
−∞. The sum wraps on overflow: a value out of range comes out wrong, not
clamped. This matches the default fixed-point behaviour of the flow the
reference results came from, and it is why a too-small integer part (for
example `<16,6>` in the hybrid MNIST model) costs accuracy there. `relu_act`
then applies `max(0,y)` or the clipped form `min(max(0,y), 1.0)`.

## Whole-network timing

The blocks work on different samples at once. The BN and activation stages
are combinational between a layer's accumulators and the next layer's input
register. A sample accepted in cycle t has its scores valid in cycle
`t + REUSE1 + REUSE2 + REUSE3 + REUSE4`, and a new sample is taken every
`max(REUSEk)` cycles. At the defaults that is 56 cycles of latency (280 ns at
200 MHz) and an interval of 14 cycles (70 ns). Back-pressure on `out_ready`
propagates up the chain without losing data.

## Loading a trained model: the configuration bus

`cfg` (type `bnn_pkg::cfg_wr_t`) carries one write per cycle:

| field | meaning |
|---|---|
| `en` | write strobe |
| `layer` | block 0 … 3 |
| `sel` | `CFG_WEIGHT`, `CFG_THR0`, `CFG_THR1`, `CFG_BN_SCALE`, `CFG_BN_SHIFT` |
| `addr` | weights: `r·N_OUT + node`; everything else: `node` |
| `data` | weights: bit (or 2-bit field) k = weight of input `r·CH + k`; thresholds: ACC_W-bit two's complement; BN: 16-bit |

A hidden block with a tanh takes thresholds: THR0, plus THR1 if it is
ternary. A block with explicit BN takes a scale and a shift. The default
model needs 5,920 writes: 5,516 weight words, 384 thresholds and 20 BN
values. Load the model before streaming inputs. Thresholds and BN values
reset to 0 and to (1.0, 0); weights do not reset.

## Parameters of `bnn_top`

| parameter | default | meaning |
|---|---|---|
| `N_INPUT, N_H1, N_H2, N_H3, N_OUTPUT` | 784, 128, 128, 128, 10 | layer sizes |
| `W_TERNARY` | 0 | ternary instead of binary weights |
| `HIDDEN_ACT` | `ACT_BINARY_TANH` | `ACT_TERNARY_TANH`, `ACT_RELU`, `ACT_CLIPPED_RELU` |
| `FIX_W, FIX_I` | 16, 8 | `<W,I>` of input, ReLU activations and scores |
| `REUSE1..4` | 14 | reuse factor of each dense layer |

Configurations evaluated in the reference study:

| model | sizes | `W_TERNARY` | `HIDDEN_ACT` | `<W,I>` | reuse |
|---|---|---|---|---|---|
| MNIST BNN (default) | 784-128-128-128-10 | 0 | binary tanh | <16,8> | 14 |
| MNIST TNN | same | 1 | ternary tanh | <16,6> | 14 |
| MNIST hybrid BNN/TNN | same | 0/1 | ReLU / clipped ReLU | <16,10> | 14 |
| MNIST large BNN | 784-256-256-256-10 | 0 | binary tanh | <16,6> | 28 |
| jet BNN / TNN / hybrids | 16-64-32-32-5 | 0/1 | any | <16,6> | 1 |
| jet best BNN | 16-448-224-224-5 | 0 | binary tanh | <16,6> | 16 |

The jet "best TNN" (16-128-64-64-64-5) has four hidden layers and does not fit
this three-hidden-layer top.

## Where this RTL departs from the reference design

* **Latency.** The reference binary MNIST model reaches 200 ns (40 cycles)
  at II 14. Here each layer needs its full input before it starts, so
  latency is the sum of the reuse factors: 56 cycles.
* **Weights are loaded, not compiled in.** The reference flow bakes weights
  and thresholds into the firmware as constants. Here they sit in writable
  stores, so one netlist runs any trained model of its size. The cost is
  storage and write logic.
* **Folding scheme.** How the reference flow splits large dense layers over
  the reuse factor is not published. The chunk-by-chunk scheme above is this
  design's own.
* **No separate dense-layer bias.** Every dense layer is followed by batch
  normalisation, so a per-node bias is folded into the BN shift or into the
  thresholds when they are computed.
* **Fixed depth.** The top has three hidden blocks. The block itself is
  generic.
* **No softmax or arg-max**, as in the binary/ternary models of the study.
* The BN scale format `<16,6>`, the inclusive side of each threshold, the
  ternary code, the bus and the reset values are choices made here.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
an integer reference model (`tb_ref_pkg::layer_model`) written from the
arithmetic above, not from the RTL.

| testbench | what it covers |
|---|---|
| `tb_xnor_popcount` | XNOR truth table, random vectors with masks |
| `tb_weight_mem` | every word written and read back by row |
| `tb_dense_layer` | binary×binary (XNOR), fixed×ternary and ternary×binary layers; sums, latency R, interval R, stalls |
| `tb_bn_threshold` | binary/ternary thresholds, including x equal to each threshold |
| `tb_batchnorm` | scale/shift, truncation, wrap on overflow, reset values |
| `tb_relu_act` | ReLU and clipped ReLU edge values |
| `tb_nn_block` | the five block shapes, writes to other layers ignored |
| `tb_bnn_top` | BNN, TNN, hybrid ReLU, hybrid clipped-ReLU networks at reduced sizes. Checks every score, latency and interval. Requires stalls, back-pressure, overlapping samples, ternary zeros, BN wraps, ReLU zeros and clips each to happen |
| `tb_workloads` | the jet-tagging networks at their full sizes: BNN, TNN and hybrid clipped-ReLU TNN at 16-64-32-32-5, II 1, and the 16-448-224-224-5 BNN at II 16 |
| `tb_bnn_top_full` | the default network unchanged: loads 5,920 parameter words and streams 8 images. Checks all scores and the arg-max class, latency 56 and interval 14 |

Each ends by printing `TB_RESULT checks=N failures=M`. Build and run one with
Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/bnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_bnn_top_full.sv \
    --top-module tb_bnn_top_full -o sim && ./obj_dir/sim
```

Name another testbench in place of `tb_bnn_top_full` (twice) to run it; `-y` lets Verilator find the modules it uses. The full-size
network builds in seconds and simulates in under a second.

What is not verified: no trained network from the study was run, since its
weights are not available here, so classification accuracy is not
reproduced. Only the arithmetic is, with random parameters. FPGA resource
use and timing closure at 200 MHz have not been measured.

## Files

`rtl/bnn_pkg.sv` holds the shared types, the configuration bus and the width
functions. Each other `rtl/*.sv` file holds one module named after it. In
`tb/`, the `tb_*_run.sv` modules are parameterised drivers that the
testbenches instantiate once per configuration.
