# BiKA accelerator: a comparator-and-counter neural network engine

A Kolmogorov-Arnold Network (KAN) puts a learnable nonlinear function on every
edge of the network: the output of a neuron is the sum, over its inputs, of a
function applied to each input, with no weights and no activation function.
Such functions are expensive to build in hardware. BiKA takes the cheapest
possible learnable function: a single threshold per edge. Input `k` of neuron
`n` contributes `+1` if the activation is above that edge's threshold and `-1`
otherwise, and the neuron output is the sum:

    out[n] = sum over k of ( A[k] > T[k][n] ? +1 : -1 )

A neuron therefore needs one comparator per input and one counter. There are
no multipliers, no XNOR/popcount and no separate activation or quantisation
stage after the sum; the sum itself, an 8-bit signed number, is the input of
the next layer. A threshold in BiKA is learned as `-b/w` of a sign unit
`Sign(w*x + b)` and is stored as an integer, so training produces exactly one
8-bit constant per connection. Where a conventional layer has a weight matrix,
a BiKA layer has a threshold matrix of the same shape.

This RTL implements the BiKA accelerator as an 8x8 output-stationary systolic
array of comparison-accumulator processing elements, with on-chip buffers, a
layer controller and a simple host port. It is written in synthesizable
SystemVerilog, with self-checking testbenches.

## The processing element

`rtl/bika_pe.sv`. Each PE holds one accumulator and does, every cycle in which
its input is valid:

    acc <= clamp(acc + (act_in > thr_in ? +1 : -1), -128, +127)

and forwards `act_in` (with its valid bit) to the right and `thr_in` upwards
through one register each.

Three details matter when using it:

* **Strict comparison.** An activation equal to the threshold gives `-1`. The
  BiKA derivation can also be read as `>=`; with integer data this is the same
  as storing `threshold - 1`, so it only changes how a trained model is
  exported.
* **Sum limitation.** With 8-bit outputs a neuron can in principle exceed the
  range after 128 inputs. The accumulator clamps at every step: a `+1` at
  `+127` or a `-1` at `-128` is dropped (and the PE's `sat` pulses). Because
  clamping happens per step, the result depends on the order of the inputs
  once a limit is hit: 200 `+1`s followed by 100 `-1`s gives `27`, not `100`.
  The reference models in the testbenches clamp the same way, in the order
  `k = 0, 1, 2, ...` in which the array receives the inputs.
* **Signed data.** Activations and thresholds are two's-complement 8-bit
  values, so one layer's outputs can be fed straight into the next. First-layer
  inputs such as 0..255 pixels must be shifted into -128..127 by the host
  (and the thresholds with them).

## The systolic array

`rtl/bika_systolic_array.sv` is a `ROWS x COLS` grid of PEs (8x8 by
default). Activations enter at the left edge, one stream per row, and move
right one PE per cycle; thresholds enter at the bottom edge (row 0), one stream
per column, and move up one PE per cycle. PE `(r, c)` accumulates neuron `c`
for input vector `r`, so a pass over `K` inputs computes a complete 8x8 tile
of a layer: 8 input vectors against 8 neurons.

For activation `k` of row `r` and threshold `k` of column `c` to meet in PE
`(r, c)`, row `r` must be delayed by `r` cycles and column `c` by `c` cycles.
The top level does this with two diagonal delay lines (`rtl/bika_skew.sv`).
With the skew, PE `(r, c)` sees step `k` at cycle `k + r + c` after the first
word leaves the buffers, and the far corner PE `(7, 7)` finishes
`7 + 7 = 14` cycles after PE `(0, 0)`.

Only the activation stream carries a valid bit; a threshold is used only when
the activation next to it is valid. This keeps bubbles and the ramp-up and
ramp-down of the skewed streams out of the sums, without clearing the
threshold pipeline.

All 64 accumulators are visible at once (`acc[r][c]`). The controller reads
them out one column per cycle after a tile is complete.

## Running a layer

`rtl/bika_accel_top.sv` wraps the array with three buffers
(`rtl/bika_buffer.sv`, synchronous RAM with one-cycle reads) and the
controller (`rtl/bika_controller.sv`). A layer is described by

| field | meaning |
|---|---|
| `k_len` | inputs per neuron, `K` (1..2047, limited further by the buffers) |
| `m_groups` | number of groups of 8 input vectors, `M = 8*m_groups` |
| `n_groups` | number of groups of 8 neurons, `N = 8*n_groups` |

Each buffer word holds one 8-bit value per array lane, lane `i` in bits
`[8*i +: 8]`:

| buffer | words (default) | word address | lane `i` holds |
|---|---|---|---|
| activation | 1024 | `mg*K + k` | `A[8*mg + i][k]` |
| threshold | 8192 | `ng*K + k` | `T[k][8*ng + i]` |
| output | 1024 | `mg*N + n` | `out[8*mg + i][n]` |

The output layout is the activation layout of the next layer with `K = N`.
Copying the output buffer into the activation buffer word for word is all it
takes to chain layers.

The controller walks the tiles with the row group outer and the neuron group
inner. For each tile it:

1. **CLEAR** (1 cycle): zeroes all accumulators.
2. **FEED** (`K` cycles): reads activation word `mg*K + k` and threshold
   word `ng*K + k` for `k = 0 .. K-1`. The data reaches the skew lines one
   cycle later, together with the valid flag.
3. **DRAIN** (`ROWS + COLS - 1` = 15 cycles): lets the last step reach the far
   corner of the array.
4. **WRITE** (`COLS` = 8 cycles): writes column `c`, the 8 results of neuron
   `8*ng + c`, to output word `mg*N + 8*ng + c`.

One tile takes `K + ROWS + 2*COLS = K + 24` cycles. A layer takes
`m_groups * n_groups * (K + 24) + 1` cycles from the clock edge that samples
`start` to the cycle in which `done` is high. Array utilisation is
`K / (K + 24)`: 97% at `K = 784`, 73% at `K = 64`. Tiles are not overlapped.
Overlapping the write-back of one tile with the feed of the next would need a
second set of accumulators or a shadow register per PE.

Base addresses are kept as running sums, so the controller needs no
multiplier. It asserts that `start` does not arrive while it is busy and that
a layer is not empty. The top asserts that the layer fits the three buffers
and that the host does not write while a layer runs.

## Host interface and protocol

| port | dir | width | function |
|---|---|---|---|
| `host_we`, `host_wsel`, `host_waddr`, `host_wdata` | in | 1, 2, 13, 64 | write a word to the activation (`SEL_ACT`) or threshold (`SEL_THR`) buffer |
| `host_re`, `host_raddr` | in | 1, 10 | read an output word |
| `host_rdata` | out | 64 | the word read, valid the cycle after `host_re`, held until the next read |
| `start`, `cfg` | in | 1, `layer_cfg_t` | start a layer; `cfg` is sampled with `start` |
| `busy`, `done` | out | 1, 1 | layer running; one-cycle pulse at the end |
| `sat_count` | out | 32 | cycles in which some accumulator was clipped (since reset) |

A layer runs in these steps:

1. Load activations and thresholds, with `busy` low.
2. Pulse `start` with `cfg`.
3. Wait for `done`.
4. Read the results.

For several layers, copy the results back as activations, load the next
thresholds and start again.

Layers larger than the buffers are split by the host along `N`. The testbench
for the evaluated networks does this: it keeps the activations loaded and runs
the threshold matrix in chunks of `floor(8192 / K)` neuron groups. Splitting
along `K` is not possible, because the datapath has no partial-sum input and
clears its accumulators at the start of each tile.

The same array also runs the multi-threshold form of the network, in which
each input passes through `m > 1` thresholds. The host writes each activation
`m` times in a row and gives each copy its own threshold, so that `K` becomes
`m * K`. Note that the 8-bit sum limitation then clips sooner.

## Sizes, and the evaluated networks

The default parameters are the 8x8 array and 8-bit data of the design being
reproduced. The buffer depths are this design's own. Together they are 80 KiB,
about 18 of the FPGA's 36-kbit block RAMs, close to the 19.5 block RAMs
reported for the original accelerator.

| network | layers | fits the buffers whole? | array cycles, 8 inputs | at 300 MHz | reported latency |
|---|---|---|---|---|---|
| TFC | 784-64-32-10 | yes (6,272 of 8,192 threshold words) | 6,931 | 23.1 us | 11.2 us |
| SFC | 784-256-256-256-10 | no, layer 1 runs in 4 chunks | 44,343 | 147.8 us | 71.4 us |
| LFC | 784-1024x3-10 | no, hidden layers run in 16 chunks | 373,854 | 1,246 us | 611.9 us |

The 784 inputs are the 28x28 MNIST image. The cycle counts are for the array
only. Host transfers at one word per cycle roughly double them (see the
workload testbench output). The reported latencies do not say how many
inputs they cover or how data reached the array. This design is about 2x
slower on all three networks, and it is not tuned to match. The CIFAR-10 CNN
(CNV) is not run: the design has no convolution or max-pool support, and its
C256 layers would need `K = 2304`, which is more than the activation buffer
holds.

## What follows the source design, and what is this design's own

Taken from the original description:

* the PE as comparator plus accumulator, with no further activation;
* the output-stationary 8x8 array, with activations flowing right and
  thresholds flowing up;
* thresholds in place of weights;
* 8-bit data;
* an 8-bit accumulator with a limited sum;
* the absence of any post-accumulation threshold phase.

Chosen here, because the description is silent:

* the strict `>` comparison, following the hardware drawing rather than the
  `>=` of the derivation;
* per-step clamping as the form of the sum limitation;
* signed data;
* the valid bit;
* synchronous active-low reset;
* buffer organisation and depths;
* the output layout;
* the controller's states and tile order;
* the host port, which stands in for the board processor and its bus and DMA
  logic (not described, and not part of this RTL);
* `sat_count`.

## Files

| file | contents |
|---|---|
| `rtl/bika_pkg.sv` | widths, `layer_cfg_t`, `host_sel_e` |
| `rtl/bika_pe.sv` | comparison-accumulator PE |
| `rtl/bika_systolic_array.sv` | PE grid |
| `rtl/bika_skew.sv` | diagonal delay line for the array edges |
| `rtl/bika_buffer.sv` | 1-write/1-read synchronous RAM |
| `rtl/bika_controller.sv` | layer state machine |
| `rtl/bika_accel_top.sv` | top level |
| `tb/tb_bika_pe.sv` | PE against a reference model, including both limits and equal operands |
| `tb/tb_bika_systolic_array.sv` | array with testbench-generated skew, random junk in invalid slots, saturating tiles |
| `tb/tb_bika_buffer.sv` | RAM latency, hold and read-during-write |
| `tb/tb_bika_controller.sv` | cycle-exact address, enable and `done` sequence for several layer shapes |
| `tb/tb_bika_accel_top.sv` | whole accelerator at default size: multi-tile layers, layer chaining, a four-thresholds-per-input layer, both limits, latency |
| `tb/tb_bika_mlp_workloads.sv` | TFC, SFC and LFC on 8 pseudo-random inputs, host-side chunking, every layer checked |

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
The thresholds and inputs are pseudo-random, not a trained model, so the tests
check arithmetic and sequencing, not classification accuracy.

## Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/bika_pkg.sv tb/tb_bika_accel_top.sv --top-module tb_bika_accel_top
    ./obj_dir/Vtb_bika_accel_top

Replace the testbench name to run another test. All of them finish in seconds.
The workload test is the longest, at about 750,000 cycles.

## Changing it

* `ROWS` and `COLS` on `bika_accel_top` resize the array. The host data word
  is `max(ROWS, COLS) * 8` bits, and the tile time becomes
  `K + ROWS + 2*COLS`.
* `ACT_DEPTH`, `THR_DEPTH` and `OUT_DEPTH` set the buffers. `k_len` is 11 bits
  wide, and `m_groups` and `n_groups` are 8 bits each (`bika_pkg`).
* `DATA_W` and `ACC_W` in `bika_pkg` set the data and accumulator widths. The
  PE and the array take them as parameters. The top level assumes
  `ACC_W == DATA_W`, so that output words can be reused as activation words.
