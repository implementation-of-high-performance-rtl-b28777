# Sub-microsecond neural-network inference as a layer pipeline

A hardware trigger has to decide on every collision event with a fixed,
short latency. At a 40 MHz event rate, with the arithmetic clocked at
640 MHz, each network layer gets only C = 16 clock cycles per event. It has
to take one event's input, compute it and hand the result on within those
16 cycles. Meanwhile the next event is already entering the layer before it.

This RTL builds such a network as a single pipeline. Each layer is one
pipeline stage with exactly enough multiply-accumulate (MAC) units to finish
a data set within C cycles. Layers do not handshake. Each one is started by
a delayed copy of the input strobe, at the earliest cycle at which all of its
inputs are guaranteed to have arrived. Every delay in the design is a
constant fixed at elaboration, so the latency is fixed and known in advance.

The default configuration is a small MNIST-style network. It has these
layers:

| Step | Layer | Output size |
|---|---|---|
| 1 | Input | 7×7×1 |
| 2 | 2×2 convolution, one kernel | 6×6×1 |
| 3 | 2×2 max pooling | 3×3×1 |
| 4 | Flatten | 9 values |
| 5 | Dense, 10 neurons, relu | 10 values |
| 6 | Dense, 10 neurons, linear | 10 values |

The design uses C = 16, 334 MACs and 43 multiplier slices. It accepts one
image every 16 cycles. The first output appears 44 cycles after the image
is written.

## Number format and the multiplier slice

All values are signed fixed point:

- Layer inputs and outputs are 14 bits, 6 integer and 8 fraction bits (6.8).
- Weights are 10 bits (2.8).
- Sums use 32 bits.

Whenever a sum leaves a layer, `nn_pkg::rescale` shifts it right by 8 bits
(rounding toward minus infinity) and clips it to the 14-bit range. Relu then
sets negative values to 0. All of this lives in `nn_pkg`.

The basic element is `dsp_mac`, a model of an FPGA DSP slice used as
`p = w*i + pcin`. It has an input register, a product register and an
accumulation register. `pcin` is the partial sum arriving from the previous
slice on the cascade.

Chaining N such slices gives a pipeline that computes N products. Its
timing is:

- The first slice has a latency of 3 cycles.
- Each further slice adds 1 cycle.
- Input n therefore has to reach its slice n cycles after input 0.

Every layer is built around this skew. A layer does not need all of its
inputs at once; it needs input n at cycle n.

`adder_tree` and `max_tree` are binary trees with a register after every
level, so a tree over N values takes ceil(log2 N) cycles.

`act_unit` does the rescale and the activation. With `FF_IMPL = 1` the result
sits in a register, and the relu sign bit drives that register's synchronous
reset. This costs one extra cycle, which all latency formulas include.

## Fully-connected layer (`dense_layer`)

For N_I inputs, N_N neurons and C cycles:

- **Neuron units.** There are N_NU = ceil(N_N / C) neuron units. Each one
  computes up to C neurons, one per cycle, in "slots".
- **Pipelines.** A neuron unit has P parallel DSP chains of S = ceil(N_I / P)
  slices. Input i feeds slice i / P of chain i mod P. An adder tree adds the
  P chain outputs.
- **Short chains.** When N_I is not a multiple of P, some chains are one
  slice short. Each of these gets a one-cycle register at its end, so all
  chains line up at the tree.
- **Inputs.** The input memory is a register per input with its own write
  enable. No extra storage is needed because of the skew: stage s reads its
  inputs only in cycles s to s + C − 1, and the next data set rewrites them
  at cycle C + s.
- **Weights.** Each stage of each neuron unit has its own weight memory
  (`dense_weight_memory`). It has one word per slot, holding the P weights
  of that stage. `dense_controller` reads it with the slot number, delayed by
  the stage index, so each stage sees the weights for the neuron whose
  partial sum is passing through it.
- **Neuron assignment.** Neuron n is computed by unit n mod N_NU in slot
  n / N_NU. In every result cycle the N_NU units therefore deliver N_NU
  consecutive neurons.
- **Result multicast.** `result_multicast` wires each unit's activated result
  to every output position that the unit produces in some cycle. It decodes
  one write enable per output neuron from the controller's result-valid flag
  and slot index.

Timing, counted from the start pulse:

- Stage s must be written in cycle s.
- Slot m is output in cycle `dense_latency = S + 3 + ceil(log2 P) + 1`, plus m.

The neuron assignment lets a following dense layer with P equal to this
layer's N_NU consume each result in the cycle it appears. The top uses this
for the second dense layer.

There is no bias term.

## Convolution (`conv2d_layer`)

A convolution has N_K kernels of size H_K × W_K × D_I. It uses stride 1 and
"valid" borders, so the output is H_O × W_O × N_K with
H_O = H_I − H_K + 1 and W_O = W_I − W_K + 1.

**Work split.** The work is cut into output rows, where one row is one output
slice o and one channel c across the full width W_O. There are H_O·N_K rows.
A row unit (`conv_row_unit`) computes one row per cycle:

- It has W_O subunits.
- Each subunit has H_K·W_K DSP chains, one per kernel position.
- Each chain runs over the D_I input channels.
- A tree adds the kernel positions.

**Row units and allocation.** There are N_RU = ceil(H_O·N_K / C) row units.
In cycle k, row unit r computes channel k mod N_K of output slice
r + N_RU·(k / N_K). All channels of a slice range are finished before the
range moves on by N_RU slices. When H_O is not a multiple of N_RU, the first
N_LONG units run one range more than the rest. These are the "long" units;
the rest are "short".

**Working memories.** The input sits in a buffer memory that is written row
by row, one row per (h, d). At the start of each range, the slices that range
needs are copied into working memories. Row unit r reads working slots
r .. r + H_K − 1.

- The long working memory holds N_LONG + H_K − 1 slices.
- The short working memory holds the slices after those.
- Channel d is loaded d cycles after channel 0, matching the channel skew of
  the DSP chains.

**Weights.** All long units always compute the same output channel, and so
do all short units. Each group therefore shares one set of weight memories
(`conv_weight_memory`), addressed by the channel currently being computed.

**Outputs.** Results leave through the same multicast block as in the dense
layer: one write enable per output row. Row (o, c) is written in cycle
`conv_latency + conv_k(o, c)` after the start, where
`conv_latency = D_I + 3 + ceil(log2(H_K·W_K)) + 1`.

All of the above is the regular case: every slice range fits in C cycles,
ceil(H_O / N_RU) · N_K ≤ C.

## Irregular convolution (`conv2d_irregular`)

When slices are left over, `conv2d_layer` instantiates `conv2d_irregular`
instead. This happens when H_O is greater than floor(C / N_K) · N_RU. The
module has the same ports and output format.

Each unit first runs floor(C / N_K) complete slices as in the regular
pattern. That leaves every unit rem = C mod N_K spare cycles. The leftover
slices are shared out over these spare cycles by `nn_pkg::conv_alloc`. The
unit types are:

| Type | What it computes in the spare cycles |
|---|---|
| Single-slice | Unit i carries on with leftover slice i. |
| Complete bi-slice | Extra units for each leftover slice: as many as can do a full rem rows. They alternate channels with the single-slice unit. |
| Incomplete bi-slice | The rows still left in one slice. One per slice, for as many leftover slices as the remaining units allow. |
| Multi-slice | Everything else: rem rows each, running on from one slice to the next. |
| Free | Units with nothing left to do. They idle. |

For C = 15, 11 output channels and 19 slices (14 units), this reproduces
the published example exactly. Units 0–4 are single-slice and units 5 and
7–10 are complete bi-slice. Unit 6 is incomplete bi-slice, and units 11–13
are multi-slice.

The allocation is a constant table per unit, indexed by the cycle counter.
The memories are simpler than in the original:

- **Working memory.** Each unit has its own. For every row it computes, it
  reads the H_K slices of all input channels in the row's own cycle.
  Channel d then passes through d delay registers to meet its DSP stage. So
  every buffer read falls inside the data set's C cycles.
- **Weights.** Each unit has its own weight memory.

The original shares working and weight memories between unit groups and
multiplexes inputs. This version gives the same results with more registers.
`conv_alloc_k(n)` gives output row n's cycle, and the top uses it for the
pooling start.

## Max pooling (`maxpool2d_layer`)

Pooling windows do not overlap, so no input is reused. Output rows
n = slice·D + channel are dealt out in interleaved order: in cycle k, row
unit r computes row k·N_RU + r.

Each row unit has these parts:

- **Working memory** (`pool_working_memory`). It loads the H_P input rows
  of its window band directly from the buffer memory.
- **Row unit** (`pool_row_unit`). It has W_O max trees, one per output
  position.

Each output row is written 1 + ceil(log2(H_P·W_P)) cycles after its load
cycle.

There are three padding modes:

| Mode | Behaviour |
|---|---|
| `PAD_VALID` | Incomplete windows at the high edges are dropped. |
| `PAD_SAME` | Keras-style. The input is extended on both sides; when the pad is odd, the extra element goes to the high side. |
| `PAD_UNCHANGED` | The input is extended at the high edges only. |

Padded positions hold the most negative value, so they never win a maximum.

## Flattening and the regularizer (`flatten_regularizer`)

A dense layer has no buffer, so it needs flat input i in exactly cycle i / P
of its schedule. A 2D layer delivers whole rows in its own order, which does
not match.

The regularizer sits in between:

- It stores the rows.
- It flattens them in C order: element (o, y, c) becomes input
  o·W·D + y·D + c.
- It re-emits group s in cycle s + 1 after its start.

This costs one extra cycle. The dense layer is started one cycle after the
regularizer.

## Putting layers together (`nn_top`)

The top chains conv → pool → regularizer → dense → dense. It computes the
start offset of each layer with constant functions at elaboration. For every
input position of a layer it compares two cycles:

- **Available:** the cycle in which the previous layer writes the position,
  plus one.
- **Needed:** the cycle, relative to the layer's own start, in which the
  layer first reads it.

The start delay is the largest "available minus needed" difference. The
`nn_pkg` functions `conv_k`, `conv_need_first` and `conv_need_last` give
these schedules for the convolution. The pooling and dense schedules are the
simple linear ones described above.

A shift register carries `i_in_valid`. Each layer's start pulse is a tap on
it.

For the default network the offsets, counted from the image write, are:

| Event | Cycle |
|---|---|
| Convolution start | 1 |
| Convolution rows | 8 .. 13 |
| Pooling start | 12 |
| Pooling rows | 15 .. 17 |
| Regularizer start | 16 |
| Dense 1 start | 17 |
| Dense 1 results | 30 .. 39 |
| Dense 2 start | 30 |
| Output neuron n | 44 + n |

With a new image every C cycles, a layer input could be rewritten before its
last read. The convolution, which reads buffer rows several times, is the
layer at risk. An initial assertion checks every input of every layer for
this. The original design fixes such cases with an individual extra delay
per affected input, which is not built here. The second dense layer always
uses P = N_NU of the first.

### Ports

`nn_top` has these ports:

- **Image input.** `i_in_valid` writes `i_image` (IN_H·IN_D rows of IN_W
  values; row index h·IN_D + d) in one cycle.
- **Weight ports.** Three write ports load weights at run time, one weight
  per cycle per port:
  - Convolution: `i_cw_k` (kernel), `i_cw_d` (input channel), `i_cw_pos`
    (kernel position kh·K_W + kw).
  - Dense: `i_d1_neuron` / `i_d1_input` for the first layer, and the
    `i_d2_*` equivalents for the second.
- **Output.** `o_out[n]` is valid while `o_out_we[n]` is high.

Reset clears the sequencer and the controllers. The weights are not reset.

### Other networks

Networks with the same layer sequence are set with parameters: IN_H, IN_W,
IN_D, K_H, K_W, N_K, P_H, P_W, PAD, N1, N2, C, and P1 (the first dense
layer's parallelism).

Two examples:

- **14×14 input, 7-neuron hidden layer, C = 14.** Settings:
  `IN_H=14 IN_W=14 N1=7 C=14 P1=7`.
- **Three kernels, 16 hidden neurons.** Settings: `N_K=3 N1=16 C=14 P1=3`.
  The hidden layer then has two neuron units, so the output layer runs with
  P = 2.

Three 14×14-input networks need the irregular convolution:

| Kernels | Hidden neurons | C | P1 |
|---|---|---|---|
| Two 2×2 | 17 | 13 | 14 |
| Four 2×2 | 25 | 13 | 28 |
| Four 3×3 | 50 | 11 | 24 |

All five networks are simulated end to end (see Verification). The table
compares their latencies with those reported for the original
implementation:

| Network | Latency here (cycles) | Original (cycles) |
|---|---|---|
| 14×14 input, 7 hidden neurons | 45 | 60 |
| Three kernels, 16 hidden neurons | 44 | 57 |
| Two 2×2 kernels, 17 hidden neurons | 49 | 63 |
| Four 2×2 kernels, 25 hidden neurons | 56 | 68 |
| Four 3×3 kernels, 50 hidden neurons | 54 | 68 |

The layers themselves are independent modules. A network with another
sequence, such as two convolutions, needs its own top built the same way.

## Departures and limits

- **Irregular convolution memories simplified.** The irregular convolution
  follows the original allocation. Its memories are per unit instead of
  shared with multiplexers.
- **No per-input extra delays.** Configurations that need them are rejected
  by an assertion.
- **Controller data as counters.** The controllers use counters and delay
  lines instead of controller data memories.
- **Latencies differ from the original.** The default network's latency is
  44 cycles here, against 56 reported for the original implementation. All
  the other networks are 12 to 15 cycles shorter as well. The difference probably comes from I/O registering and
  control offsets that the original design had but did not describe.
- **Fixed precision.** Precision is the same for every layer (6.8 / 2.8).
  The rounding rule (floor, then clip) is this design's choice.
- **Limited features.** There is no bias. The only activations are relu and
  linear; there are no table-based activations. Convolution supports only
  stride 1 and "valid" borders.
- **Weight memories are arrays.** All weight memories are plain arrays with
  a registered read, so synthesis may map them to block RAM or to
  registers.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares the module against an independent integer model from
`tb/tb_ref_pkg.sv` (exact sums, floor division by 256, clipping). It checks
values and also the exact cycle of every write enable.

The layer testbenches use sizes that exercise the less common paths:

| Testbench | What it exercises |
|---|---|
| `tb_dense_layer` | Several neuron units and P = 2 with one short chain |
| `tb_conv2d_layer` | Five row units, both long and short, and two kernels over two input channels |
| `tb_maxpool2d_layer` | All three padding modes on a 7×7×3 input with 3×2 windows |

`tb_nn_top` runs the default network with no parameter overrides:

- Weights are loaded through the ports.
- Six images are written back to back, one every 16 cycles.
- Every output neuron must appear exactly once, in cycle 44 + n after its
  image, with the reference value.
- It counts relu clipping in the convolution and in the hidden layer,
  saturation, images overlapping in the pipeline, and full-rate
  back-to-back images. Each of these must occur.

`tb_nn_workloads` runs the five networks from "Other networks" through the
helper `tb/nn_top_checker.sv`, using the same reference-model approach.

`tb_conv2d_irregular` covers the irregular convolution. It checks the
allocation cell by cell against the published example. It then runs two
irregular layers through `tb/conv_irr_checker.sv`: that example with two
input channels, and the two-kernel 14×14 convolution.

To run a test with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
  rtl/nn_pkg.sv tb/tb_ref_pkg.sv tb/tb_nn_top.sv --top-module tb_nn_top
./obj_dir/Vtb_nn_top
```

Each test ends by printing `TB_RESULT checks=<n> failures=<m>`. The
testbenches rely on `--timescale 1ns/1ps` because they sample half a cycle
after the clock edge.
