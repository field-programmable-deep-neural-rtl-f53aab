# A field-programmable fabric for training and running deep networks

The idea behind this design is to lay a neural network out in silicon the way it
is drawn on paper. Every layer gets its own patch of small arithmetic "workers".
Consecutive layers sit next to each other, so one layer's outputs flow straight
into the next one. Nothing goes out to external memory between layers. Because
each layer works on a different input at the same time, the whole network runs
as a pipeline. Data moves as *tagged frames*: `data | information | control`.
The information field names the source and the destination worker, so a worker
can tell what a value is from the value alone, whatever order values arrive in.
The control field carries the pipeline state (forward, backward or update) and
a "pruned" flag.

This repository holds synthesizable SystemVerilog for one slice of such a
fabric. The slice has three parts:

* **Two convolution tiles.** Each tile is a *tensor array field* of
  multiply-accumulate elements above a *pixel array field* that stores
  activations. An *enhancement matrix unit* sits at the end of every pixel row.
  The two tiles can be joined into one larger worker in both directions. Tile 1
  can feed its enhancement coefficients back into tile 0.
* **A 400-25-10 fully connected network.** It is trained on a *systolic*
  layer-to-layer transport: forward (F), backward (B) and update (U) passes move
  as two frames per clock. The number of clocks each pass takes reproduces the
  counts 231 / 18 / 213.
* **Self-checking testbenches** for every block, plus an end-to-end test of the
  whole slice at full default size.

All arithmetic is 32-bit signed fixed point, Q16.16 (`fpdnn_pkg`).

## 1. Tagged frames and the three pipeline states

`fpdnn_pkg` defines the following:

* `frame_t`: `{data, info{src,dst}, ctrl{valid,state,pruned}}`.
* `fx_mul`: a Q16.16 multiply that widens to 64 bits and shifts right by 16.
* `act_apply` and `act_grad`: the programmable non-linearity (ReLU or linear)
  and its derivative. The derivative is 0 for ReLU when z <= 0, and 1 otherwise.

A worker never assumes an arrival order. It uses the source tag to choose the
weight that a value must be multiplied by. This is what lets the transport below
deliver values out of order, two at a time.

## 2. The systolic fully connected transport (hardest part)

Modules: `systolic_emitter`, `systolic_dest_chain`, `fc_node`, `fc_layer` and
`fc_network`.

Take a source layer of Ns nodes feeding a destination layer of Nd nodes. The
naive way is to broadcast every source value to every destination, which needs
Ns*Nd wires. Here the nodes are chained instead.

**Emitter side.** At `start`, the source layer's values are loaded into a shift
chain split at its middle H = ceil(Ns/2). The upper half shifts down and the
lower half shifts up, so every clock two frames leave the middle: lane a and
lane b. The chain empties in ceil(Ns/2) clocks. A pruned source node sends
nothing; its frame is marked invalid.

**Destination side.** The two frames enter the destination chain at its two
middle positions, MU = ceil(Nd/2)-1 and MD = MU+1. From there every frame
travels both up and down, one node per clock. Every destination node therefore
sees every source frame exactly once. The farthest node sees the last frame
ceil(Nd/2)-1 clocks after it entered.

**Timing.** A complete transfer therefore takes ceil(Ns/2) + ceil(Nd/2) clocks.
For the 400-25-10 network this gives:

| pass | transfers | clocks |
|------|-----------|--------|
| F | 400 inputs to 25 hidden, then 25 hidden to 10 outputs | (200+13) + (13+5) = **231** |
| B | 10 output deltas to 25 hidden | 5 + 13 = **18** |
| U | the 400 inputs pass the hidden layer again | 200 + 13 = **213** |

The output layer's update needs only local values, so it costs no transfer
clocks. `fc_network` counts the clocks of each pass (`pulses_f/b/u_o`), and
`tb_fc_network` checks all three numbers.

**One node (`fc_node`).**

* **F:** z starts at the bias. Each frame that passes adds `w[src] * data`.
  `fin_f` then latches a = g(z).
* **B:** an output node forms delta = a - label. This is the derivative of the
  squared error for a linear output, and of cross-entropy for softmax. A hidden
  node receives the next layer's deltas as tagged frames and accumulates
  `wt[src] * delta`. Here `wt` is a local *transposed copy* of the weights the
  next layer holds for this node. `fin_b` multiplies the sum by g'(z).
* **U:** the activations pass again, and each node performs
  `w[src] -= lr * delta * a_src`. A local step updates the bias and the
  transposed copy, using the same operand order as the weight's owner. The two
  copies therefore stay bit-identical, and the testbench checks this.

**Sequencer (`fc_network`).** It runs inference (F only) or training (F, B, U)
in that fixed order. The network's weights are loaded and read through a simple
configuration port. Writing an output-layer weight also writes the matching
transposed copy. A hidden node can be pruned (`hid_pruned`): it then emits
nothing.

**Departure from the paper.** The concept describes two schemes for backward
propagation. One accumulates partial sums along the chain. The other sends the
deltas to every hidden node. This design uses the second scheme, because it is
the one the pass clock counts (18 for B) correspond to. The bias is modelled as
an extra always-one input node, "node 0".

## 3. Convolution tiles

### Tensor elements and the tensor array field

`tensor_element` multiplies a 5x5 window of one channel by a 5x5 filter and
returns the sum one clock later. Smaller filters are handled as follows:

* 3x3 and 1x1 filters are zero-padded to 5x5.
* In max mode (`TOP_MAX`), the element returns the largest window value whose
  weight is non-zero. Max-pool is therefore a convolution whose weights are a
  mask.

The element also registers the window and passes it on.

`tensor_array_field` arranges NC x NMAP elements (3 x 64 by default):

* **Rows** are input channels. A window enters at column 0 and moves one
  column per clock, so column m works on a window m clocks after column 0.
* **Columns** are output maps. Each column adds its NC channel results; this is
  the filter over all channels. It emits the sum as a frame whose destination is
  the pixel and whose source is map m.
* **Timing:** for a window presented in clock t, map m's result is valid in
  clock t+m+2. A new window can enter every clock.
* **Cascade:** `col_partial_o` is exposed so that a second field can add it
  (`casc_en`). This is how a filter with more than NC channels is built from
  two fields.

### Pixel elements and the pixel array field

`pixel_element` stores z, a = g(z) and delta = acc * g'(z).

It also implements *pruning* during validation, while `cnt_en` is high:

* Each write whose |a| is at most `prune_thr` increments a counter.
* Once the counter reaches `prune_limit`, the element is pruned on the next
  clock. From its next write on it stores a zero activation, and it
  back-propagates zero.
* `prune_clr` resets the counter and the pruned state.

`pixel_array_field` holds NPIX x NMAP pixel elements (90 x 64 by default). Row
p is one pixel across all maps, and column m receives tensor column m.

* **Routing:** an element takes a result only when the frame's destination tag,
  minus the field's `pix_base`, equals its row. One field can therefore serve a
  worker smaller than NPIX pixels.
* **Source select:** `src_sel` makes the field listen to the *other* tile's
  tensor array. Two fields together can then hold a worker larger than NPIX
  pixels.
* **Other ports:** back-propagated sums are written through `bp_*`, and any
  element can be read through `rd_*`.

### The enhancement matrix unit (EMU)

Each pixel row is a shift register closed in a loop through the EMU. Pixels are
assigned to *mask groups* (`grp_i`); for example, the pixels under one 3x3
mask. The unit runs one of two passes.

**Enhancement pass (`op_feedback = 0`).** It takes 2*NMAP + NPIX + 6 clocks:

1. **Sum (NMAP clocks).** The rows circulate once, and the unit adds |a| (or
   a, selected by `mag_sel`) along every row.
2. **Group (NPIX clocks).** The row sums are added per mask group.
3. **Softmax (a few clocks).** The unit finds the largest group sum and
   computes exp(s - max) for every group as 2^x, with a linear interpolation of
   the fraction. It adds these terms, takes *one* reciprocal (a 64/32 divide),
   and multiplies. The resulting coefficients lie in [0, 1] and add up to 1,
   up to rounding.
4. **Apply (NMAP clocks).** The rows circulate again, and every activation is
   multiplied by its group's coefficient.
   * With `drop_en`, a per-row 16-bit LFSR decides for each activation whether
     to drop it. An activation is dropped with probability `drop_thr`/65536.
   * Kept activations are multiplied by coefficient * `keep_scale`, usually
     1/(1-p). Dropout therefore costs no extra pass.

**Feedback pass (`op_feedback = 1`).** It takes NMAP + 3 clocks. The
coefficients fed back from a deeper layer (`fb_coef_i`) multiply this unit's
coefficients and every activation of the matching group. In the top level,
tile 1's coefficients are fed back into tile 0.

While the EMU is busy, no results may be written to its field.

## 4. The slice (`fprog_dnn_top`)

The top level contains two tiles and the fully connected network, wired as
follows:

* **Cascade:** tile 1 can add tile 0's column sums (`t1_casc_en`).
* **Pixel merge:** each pixel field can take the other tile's tensor results
  (`p_src_sel`).
* **Feedback:** tile 0's EMU receives tile 1's coefficients. Tile 1's own
  feedback input is a port.

In a full fabric, a control processor would configure the design and routing
channels would bring it windows. Here that is all done through plain ports.
Port arrays indexed `[2]` belong to one tile each.

The default sizes match one worker of a VGG-16-like first layer. That layer
has 224x224 pixels and 64 maps from 3x3x3 filters, and spreading it over 560
workers gives about 90 pixels per worker. One tile is such a worker: 3 channel
rows by 64 maps of tensor elements, over 90 pixels by 64 maps. A whole layer,
or the 4096-wide fully connected layers of such a network, needs hundreds of
tiles. This slice has two.

## 5. Where this design departs from the concept

| Concept | Here | Why |
|---------|------|-----|
| FP64 workers | Q16.16 fixed point | A double-precision unit per worker would dominate the RTL. Fixed point keeps every block checkable bit-exactly. |
| A die of about 100 thousand workers, allocated per layer | A slice of 2 tiles (384 tensor and 11,520 pixel elements) plus one 35-node FC network | The control processor, the reconfigurable interconnect, the analytics unit and multi-die links are described only by name. They have no interface that could be built. |
| exp in the softmax | 2^x with a linear fraction, max subtracted first, one divider | Cheap, and within about 6 % of exp. The testbench checks this. |
| Backward pass accumulated along the chain | Deltas sent to every hidden node, which keeps a transposed weight copy | This matches the B-pass clock count of the worked example. |
| Bias | An always-one "node 0" | Not specified. |
| Output-layer loss | delta = a - label | Not specified. |
| Max-pool rule | Max over window entries with non-zero weight | Only "a special case of convolution" is stated. |
| Pruning rule | Count near-zero activations during validation, then prune at a limit | Only the idea is given. |

The following are not built:

* the control processor;
* the reconfigurable interconnect that assembles windows and moves data
  between tiles beyond the fixed links above;
* worker analytics and diagnostics;
* multi-die links;
* the die-level allocation of workers to the layers of a network such as VGG-16.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each one drives random data
from `$urandom`, compares against a reference model in the same fixed-point
arithmetic, and prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_tensor_element` | MAC, 3x3 zero-padded filters, max-pool, and the 1-clock latency |
| `tb_tensor_array_field` | Full 3x64 field: map m exactly at t+m+2, sums, tags, cascade, partial channels |
| `tb_pixel_element` | ReLU and linear modes, delta, shift, the prune counter, prune and clear |
| `tb_enhancement_matrix_unit` | Full 90x64: softmax coefficients (exact, sum to 1, within 7 % of exp), apply, feedback, dropout rate and scale, and the clock counts 2*NMAP+NPIX+6 and NMAP+3 |
| `tb_pixel_array_field` | Full 90x64: tag and window routing, `src_sel`, back-propagation writes, an EMU pass, pruning |
| `tb_systolic_transfer` | 400->25 and 25->10: every (source, destination) pair seen exactly once, and 213 and 18 clocks |
| `tb_fc_node` | F, B and U of one node with shuffled, invalid and out-of-range frames |
| `tb_fc_network` | Full 400-25-10: inference, a training step checked weight by weight, 231/18/213 clocks, transposed copies, a pruned node, falling error |
| `tb_fprog_dnn_top` | The whole slice at default size: every mechanism (conv, cascade, max-pool, `src_sel`, back-propagation, pruning, enhancement, feedback, dropout, FC F/B/U, a pruned FC node) is counted and must occur |

To simulate with plain Verilator, run from the repository root. The package must
come first.

```sh
verilator --binary --timing --assert -Irtl rtl/fpdnn_pkg.sv \
    $(ls rtl/*.sv | grep -v fpdnn_pkg) tb/tb_fc_network.sv \
    --top-module tb_fc_network -Mdir obj_tb
./obj_tb/Vtb_fc_network +verilator+rand+reset+2
```

Run times:

* The full-size `tb_fprog_dnn_top` builds in about 3 minutes and runs in about
  1.5 minutes.
* All the other testbenches finish in seconds.

**Synthesis.** Coarse synthesis of the full-size top, and of the largest fields,
takes longer than ten minutes. The slice holds 11,520 pixel elements, 384 5x5
multiply-accumulate elements and 10,285 network weights as flip-flops. No
memory macros are used; the weights are plain registers so that every
node can read them in parallel.

**Lint.** The remaining Verilator lint warnings are width notes: indexing
arrays with 16-bit tags, and comparing counters with parameters. There are
also a few outputs that are unused at the top level.
