# An edge-parallel training accelerator for pre-defined sparse MLPs

A multilayer perceptron in which every junction (the set of edges between two
adjacent layers) is sparse *by construction*: before training starts, each
neuron on the left of junction *i* is given exactly `d_out_i` edges and each
neuron on the right exactly `d_in_i` edges, and the edges never change. Only the
weights of the edges that exist are stored and computed. Because the pattern
is fixed in advance, it can be chosen so that hardware can walk it with very
simple addressing and no memory conflicts. This RTL implements an accelerator
that does both inference and training (feedforward, backpropagation and
weight update) for such a network. It is built around three ideas:

* **Edge parallelism.** Junction *i* processes `z_i` edges per clock cycle, no
  matter how many neurons its layers have. An operation on one input in
  junction *i* takes `C_i = |W_i| / z_i` cycles. `z_i` is chosen so that every
  junction has the same `C`, called the *junction cycle*.
* **Clash-free memory organisation.** Each kind of parameter sits in a bank of
  `z` memories. The connection pattern is chosen so that in every cycle each
  memory is accessed at most once. Then `z` edges can be served without
  duplicating a memory.
* **Junction pipelining with operational parallelism.** In one junction cycle,
  every junction runs FF on one input, BP on an older input and UP on an
  older one still. All three share a single read of the weights. One input is
  accepted per junction cycle.

The default configuration is the 800-100-10 MNIST network with out-degrees
(20, 10). That gives 17,000 weights, 21 % of the fully connected count.

| quantity | junction 1 | junction 2 |
|---|---|---|
| left / right neurons `N_{i-1}`, `N_i` | 800 / 100 | 100 / 10 |
| out-degree `d_out` / in-degree `d_in` | 20 / 160 | 10 / 100 (fully connected) |
| edges `|W_i|` | 16,000 | 1,000 |
| parallelism `z_i` (edges per cycle) | 160 | 10 |
| edge cycles `C` | 100 | 100 |
| left memory depth `D_i = N_{i-1}/z_i` | 5 | 10 |
| right neurons finished per edge cycle | 1 | 1 every 10 cycles |

The junction cycle is `C + FLUSH = 102` clock cycles. One training input
enters every 102 cycles. Its outputs appear two junction cycles after it
enters, and its last weight update ends four junction cycles after it enters.

## Numbering edges and placing them in memories

Edges of a junction are numbered in order of their right neuron. Right neuron
`j` owns edges `j*d_in ... j*d_in + d_in - 1`. In edge cycle `c` the junction
handles edges `c*z ... c*z + z - 1`, one per *lane* `k = 0..z-1`.

* **Weights** (natural order). Edge `e` lives in weight memory `e mod z` at
  address `e / z`. Cycle `c` reads row `c` of all `z` memories.
* **Right-layer parameters** (natural order). Neuron `j` of a layer lives in
  memory `j mod z'` at address `j / z'`. Here `z'` is the parallelism of the
  junction that *reads* the layer as its left layer. Consecutive neurons fall
  into different memories, so the `ceil(z/d_in)` neurons finished in one
  cycle never clash, as long as `z' >= ceil(z/d_in)`.
* **Left-layer parameters** (interleaved order). Lane `k` always reads left
  memory `k`. Its address in cycle `c` is `(phi[k] + c) mod D`, where `phi`
  is the junction's *seed vector*. Lane `k` in cycle `c` therefore reaches
  left neuron

      left(c, k) = ((phi[k] + c) mod D) * z + k

  and edge `c*z + k` joins that left neuron to right neuron `(c*z + k) / d_in`.

Every `D` consecutive cycles (a *sweep*) visit each left neuron exactly once,
one per memory per cycle. A junction cycle is `d_out` sweeps. The seed is the
whole description of the connection pattern: `z` numbers in `0..D-1`. Any
seed gives a legal pattern, and the hardware that turns it into addresses is
`z` modulo-`D` counters (`cf_addr_gen`).

Worked example: 12 left neurons, 8 right neurons, `z = 4`, `D = 3`, seed
`(1,0,2,2)`. Cycle 0 reads addresses (1,0,2,2), that is left neurons
(4,1,10,11). Cycle 1 reads (2,1,0,0), that is neurons (8,5,2,3). Cycle 2
reads neurons (0,9,6,7). Cycles 3-5 repeat these addresses. With 12 right
neurons (`d_out = 2`, `d_in = 2`), right neuron 1 owns edges 2 and 3, so it
connects to left neurons 10 and 11; right neuron 4 owns edges 8 and 9
(cycle 2, lanes 0 and 1), so it connects to left neurons 0 and 9.

The datapath handles two shapes. Either `z` is a multiple of `d_in`, and
`z/d_in` right neurons finish every cycle. Or `d_in` is a multiple of `z`,
and a right neuron takes `d_in/z` cycles while its partial sum is held in an
accumulator. Elaboration-time assertions reject other shapes. They also
reject sizes where `N_{i-1}` is not a multiple of `z`, where the right bank
has fewer than `ceil(z/d_in)` memories, or where the two junctions' `C`
differ.

## What one junction does in an edge cycle

A junction (`junction.sv`) has one weight bank, one address generator, biases
in registers, and the three edge units. Every edge cycle `c` (0..C-1) has two
stages.

**Issue (cycle c).** Weight row `c` is read once. Using the interleaved
addresses, the junction reads two different banks of the left activation
queue: the FF input's `a_{i-1}` and the UP input's `a_{i-1}`. If it has a BP
unit it also reads the partial left deltas and, in the last sweep, the left
activation derivatives. The right deltas of the neurons in this cycle are
read in natural order from the read bank of the right delta pair.

**Compute and write (cycle c+1).** All memories return their data. Then:

* **FF** (`ff_unit`) multiplies `W*a` in `z` lanes and sums each right
  neuron's segment of lanes, carrying partial sums across cycles if needed.
  When a neuron finishes, the FF unit adds the bias and saturates. A hidden
  layer then applies ReLU and writes `a_i` plus the one-bit derivative
  `a'_i`. The output layer is linear and also writes the cost derivative
  `delta_L = a_L - y`.
* **BP** (`bp_unit`) multiplies `W*delta_i` in `z` lanes and accumulates per
  left neuron. Each left neuron receives exactly one edge per sweep, so the
  running sums live in the write bank of the left delta pair:
  - in sweep 0 the product is written;
  - in later sweeps it is added read-modify-write;
  - in the last sweep the sum is zeroed where `a'_{i-1} = 0`.

  This gives `delta_{i-1} = a'_{i-1} * sum(W * delta_i)` with no extra
  storage. Junction 1 has no BP because the input layer has no deltas.
* **UP** (`up_unit`) computes `W - eta * a_{i-1} * delta_i` for the `z`
  weights and writes the row back through the weight bank's second port.
  When a right neuron finishes, it also updates the bias:
  `b - eta * delta_i`.

FF and BP use the weight read in cycle `c`, before the UP of the same cycle
rewrites that row. Each row is read only once per junction cycle, so the
write-back never races a later read. The last writes land in cycle `C`, so
the junction cycle is `C + FLUSH` cycles with `FLUSH >= 1`. The default of 2
matches the two flush cycles of the architecture's original FPGA prototype.

## The pipeline schedule and why the layer memories are queues

Call the junction cycle in which input `m` is loaded `T = m`. For `L`
junctions:

| operation | junction cycle |
|---|---|
| load `a_0` | `m` |
| FF of junction `i` (junction L also forms `delta_L`) | `m + i` |
| BP and UP of junction `i` | `m + 2L + 1 - i` |

For `L = 2` this gives: FF1 at `m+1`, FF2 at `m+2`, BP2 and UP2 at `m+3`,
UP1 at `m+4`. In a full pipeline, every junction runs all of its operations
in every junction cycle, each on a different input. `pipeline_ctrl.sv`
remembers which recent junction cycles loaded an input and enables each
stage only when it holds a real input. Gaps in the input stream (bubbles)
therefore fill and drain correctly. The input `train = 0` switches BP and UP
off for inference.

Layer `i` is written in `m + i` and read for the last time by UP/BP of
junction `i+1` in `m + 2L - i`. Its activations must therefore survive
`2(L-i) + 1` junction cycles. `layer_queue.sv` holds that many banks of
single-port memories and rotates a pointer at each junction-cycle boundary.
In any junction cycle:

* bank `wp` is written;
* bank `wp-1` is read by the next junction's FF;
* bank `wp+1`, the oldest, is read by the next junction's UP (and BP, for
  `a'`).

No memory is touched twice in a cycle. Deltas live for one junction cycle
only. `delta_pair.sv` is a written bank and a read bank of dual-port
memories, swapped at each boundary. Dual ports are needed because BP
accumulates read-modify-write.

Storage at the default size matches the architecture's storage formula:

| parameter | words |
|---|---|
| `a` | 4300 |
| `a'` | 300 (one bit each here) |
| `delta` | 220 |
| `b` | 110 |
| `W` | 17,000 |

The top also keeps a 3-entry queue of label vectors. The labels of input `m`
wait there until junction 2 needs them in `m + 2`.

A consequence of the schedule: the FF and BP of one input see different
weights, because updates from younger inputs land in between. This is
inherent in the architecture. The updates amount to stochastic gradient
descent with batch size one, done in a pipelined order. The reference model
in the testbenches follows the same order.

## Number format

Every stored value is 16-bit signed fixed point with 8 fractional bits
(`spnn_pkg`).

* **Products.** A product is formed at full width and shifted right by 8.
* **Sums.** Sums are built in 40 bits and saturated to 16 bits whenever they
  are stored. This covers BP partial sums between sweeps.
* **Learning rate.** The learning rate is `2^-ETA_SHIFT` (default `2^-4`),
  so the update needs a shift, not a multiplier.

These are this implementation's choices. The architecture does not fix a
number format, learning rate, activation function or cost function. Change
`DW`, `FRAC`, `ACCW` and `ETA_SHIFT` in the package to change the format.

## Using `spnn_top`

Parameters (the defaults are the configuration above): `N0`, `N1`, `N2`,
`DOUT1`, `DOUT2`, `Z1`, `Z2`, `ZO` and `FLUSH`. `ZO` is the number of
memories for the output deltas.

* **Configuration (while `busy = 0`).**
  - `cfg_w_we` writes `cfg_wdata` to weight `cfg_addr` (row) of lane
    `cfg_lane` in junction `cfg_junc` (0 or 1).
  - `cfg_w_re` reads the same location; the word appears on `cfg_rdata` one
    cycle later.
  - `cfg_b_we` writes bias `cfg_bidx`; `cfg_bdata` shows the bias selected by
    `cfg_bidx`/`cfg_junc` combinationally.
  - `phi1` and `phi2` are the seed vectors (entries `< D1`, `< D2`). Hold
    them steady while inputs are in flight.
* **Inputs.** `jc_first` is high in the first cycle of each junction cycle.
  To load an input in that junction cycle:
  1. Raise `x_valid` in that first cycle, with the labels on `y_label` and
     features `0..7` on `x_data`.
  2. Keep `x_valid` high for the following cycles, presenting 8 new features
     per cycle in neuron order, until all 800 are in (100 cycles).

  A junction cycle whose first cycle has `x_valid` low is a bubble.
* **Outputs.** `out_we` pulses when an output neuron is finished, with its
  index `out_idx` and value `out_a`. For an input loaded in junction cycle
  `T`, output `j` appears `10*(j+1)` cycles after the start of junction cycle
  `T+2`. (The 10 is `d_in/z` of junction 2.)
* **`train`.** 1 runs FF, BP and UP. 0 runs FF only. It takes effect per
  clock, so change it only at junction-cycle boundaries.

Reset (`rst_n`, asynchronous, active low) clears the control state and the
biases. Memories are not reset: load the weights before use. Every activation
and delta is written before it is read.

## Files

| file | contents |
|---|---|
| `rtl/spnn_pkg.sv` | number format, arithmetic helpers |
| `rtl/sp_ram.sv`, `rtl/dp_ram.sv` | single-port and simple dual-port RAM |
| `rtl/cf_addr_gen.sv` | seed-driven clash-free left address generator |
| `rtl/weight_bank.sv` | `z` weight memories, natural order |
| `rtl/layer_queue.sv` | rotating queue of activation (or derivative) banks |
| `rtl/delta_pair.sv` | write/read pair of delta banks |
| `rtl/ff_unit.sv`, `rtl/bp_unit.sv`, `rtl/up_unit.sv` | the three edge units |
| `rtl/junction.sv` | one junction (any position; `HAS_BP`, `LAST`) |
| `rtl/pipeline_ctrl.sv` | junction-cycle timer and stage enables (any `L`) |
| `rtl/spnn_top.sv` | the two-junction accelerator |
| `tb/tb_*.sv` | self-checking testbenches, one per module |
| `tb/spnn_tb_pkg.sv` | reference model of the whole pipelined network |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. The end-to-end tests work like this:

* They load random weights, biases, seeds, inputs and labels.
* They run inputs back to back and with bubbles, first training and then
  inference only.
* They compare every output value against `spnn_tb_pkg`, a reference model
  that rebuilds the connections from the seeds on its own, and check the
  clock cycle each output appears in.
* After the run, they read every weight and bias back and compare those too.
* They count a failure if any of the following never happened:
  - all operations of both junctions running in one cycle;
  - a bubble;
  - an inference-only junction cycle;
  - a BP delta zeroed by the ReLU derivative.

`tb_spnn_top` runs a 12-8-2 network. In it, junction 1 finishes two neurons
per cycle and junction 2 needs two cycles per neuron. `tb_spnn_full` runs the
default 800-100-10 design unchanged, with 12 inputs over 16 junction cycles.
It takes about three minutes with Verilator, including the build.

To run one test with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/spnn_pkg.sv \
        tb/spnn_tb_pkg.sv tb/tb_spnn_top.sv --top-module tb_spnn_top
    ./obj_dir/Vtb_spnn_top

The block tests cover the following:

* `tb_cf_addr_gen`: the worked example above, then random seeds, checking
  that each sweep visits every neuron exactly once.
* `tb_weight_bank`: per-lane writes and read-during-write.
* `tb_layer_queue`: the three bank roles over several rotations.
* `tb_delta_pair`: read-modify-write accumulation and the swap.
* `tb_ff_unit`: both datapath shapes, against integer arithmetic.
* `tb_bp_unit`: all combinations of first and last sweep.
* `tb_up_unit`: random operands, against integer arithmetic.
* `tb_junction`: a stand-alone last junction with BP. Its memories are
  modelled in the testbench. It runs three junction cycles, checking
  outputs, cost derivatives, left deltas and updated weights.
* `tb_pipeline_ctrl`: the stage enables for `L = 3` under random input
  patterns.

## Choices that are not the architecture's, and limits

* **Two junctions.** The top wires two junctions. `junction` and
  `pipeline_ctrl` are written for any position and any `L`, but only the
  two-junction arrangement is assembled and tested. An intermediate junction
  (BP present, not last) is elaborated by the code but has no test of its
  own.
* **Parallelism.** `z = (160, 10)` is this design's choice. The architecture
  only requires equal `C` in every junction. 160 makes junction 1 finish one
  hidden neuron per cycle.
* **Activations and cost.** Hidden layers use ReLU. The output layer is
  linear with a squared-error cost derivative. Softmax is not implemented.
* **Shapes.** Only the "integral" shapes (`z` a multiple of `d_in`, or the
  reverse) are supported. Other shapes would need partial-neuron handling
  that the architecture leaves open.
* **Addressing.** Addresses use only the simplest clash-free scheme, one
  seed per junction. Variants with a seed per sweep, a full stored address
  table, or per-sweep permutation of the memories are not built.
* **Updates.** Weights are updated after every input. Mini-batch
  accumulation is not built.
* **Interfaces.** The input loader (8 features per cycle), the label queue,
  the host configuration port and the `train` switch are interface choices
  of this implementation.
* **BP depth limit.** BP's read-modify-write requires left memories at least
  2 deep (`D >= 2`).
