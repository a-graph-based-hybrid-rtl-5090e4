# GNN inference accelerator for cell-free ISAC hybrid beamforming

In a cell-free network, several base stations (BSs) serve the same users at
the same time and also sense targets. Each BS has `NT` antennas but only
`NRF` RF chains, so its transmit beamformer is split in two parts:

- an analog precoder `F` (`NT x NRF`) with constant-modulus entries;
- a digital beamformer `w` (`NRF` complex values) for each user and each
  target.

Choosing these two parts by optimisation is slow. Instead, a graph neural
network (GNN) learns a map from channel estimates to beamformers. Each BS
runs its own copy of the network on its own channels, so one accelerator per
BS is enough, and no BS has to wait for another.

This repository is the RTL of that per-BS accelerator. It reads the channel
features of `I` users and `J` targets from off-chip memory. It streams the
trained weights in through a ping-pong buffer. It computes every layer on
chip, with an output-stationary systolic array and a few small vector units.
It then writes `w` for every user and target, and `F`, back to off-chip
memory.

All sizes are parameters. The defaults are the reference configuration:
`I = J = 2`, `NT = 16`, `NU = 2` user antennas, `NR = 4` sensing receive
antennas, `NRF = 6`, hidden widths 512 and 256, a 4 x 4 array, 8-bit data and
a 64-bit memory bus.

## The network as a layer program

The GNN's graph has `K = I + J + 1` nodes, one row of the feature matrix per
node:

- rows `0 .. I-1` are users;
- rows `I .. I+J-1` are targets;
- the last row is an extra node that holds the mean of the others.

Every operation works on whole rows. The control unit runs this fixed
program, held in `layer_rom`. Banks A, B and C are the three banks of the
on-chip feature buffer.

| step | op   | rows       | from -> to | size                   | ReLU |
|------|------|------------|------------|------------------------|------|
| 0    | FC   | users      | A -> B     | `2*NT*NU` -> 512       | yes  |
| 1    | FC   | users      | B -> C     | 512 -> 256             | yes  |
| 2    | FC   | targets    | A -> B     | `2*NT*NR` -> 512       | yes  |
| 3    | FC   | targets    | B -> C     | 512 -> 256             | yes  |
| 4    | MEAN | all but last | C -> C row `I+J` | 256              |      |
| 5-6  | FC   | all        | C -> A -> B | neighbour MLP, 256 -> 256 -> 256 | yes |
| 7    | AGG  | all        | B (+C) -> A | max over other nodes, plus own input | |
| 8-9  | FC   | all        | A -> B -> A | combination MLP, 256 -> 256 -> 256 | yes |
| 10-14| same as 5-9 for the second graph layer | | A ... -> B | | |
| 15   | FC   | rows `0..I+J-1` | B -> A | 256 -> `2*NRF` (`w`, real and imaginary) | no |
| 16   | FC   | row `I+J`  | B -> C     | 256 -> `NT*NRF` (`F`)  | no   |

Notes on the program:

- Steps 0-3 are two small MLPs, one for users and one for targets. They map
  the real and imaginary parts of each channel to a common 256-wide feature.
- A graph-convolution layer works in four steps:
  1. It passes every node through a shared two-layer "neighbour" MLP.
  2. For each node, it takes the element-wise maximum over the *other*
     nodes' MLP outputs.
  3. It adds the node's own input feature to that maximum.
  4. It passes the sum through a two-layer "combination" MLP.
- The neighbour MLP runs once per node, not once per pair of nodes. This is
  the reordering that keeps the MLP work linear in `K`.
- Because each step reads the previous step's output straight from the
  feature buffer, consecutive layers are fused. No intermediate result goes
  back to off-chip memory.

## Datapath

```
             +----------------+   64-bit read    +----------------+
 off-chip -->| weight loader  |----------------->| weight double  |--- W, bias -->+
 memory   -->| control unit   |  (input load)    | buffer (2 bank)|               |
             +----------------+                  +----------------+               v
                    |      ^                         feature row data     +---------------+
                    v      |                      +---------------------->| 4x4 systolic  |
             +---------------------+              |                       | array (MAC)   |
             | intermediate result |--------------+                       +---------------+
             | buffer: banks A,B,C |<-- ReLU <-- ADD (bias, requantise) <-- one column/cycle
             | rows 0..K-1         |<-- aggregation + combination (one feature/cycle)
             +---------------------+<-- mean (one feature/cycle)
                    |
                    +--> 64-bit write --> off-chip memory (w, F)
```

- **Control unit** (`control_unit`): an FSM that sequences the input load,
  the layer program and the write-back. It also owns all buffer addresses.
- **Weight loader** (`weight_loader`): walks the same layer program. For
  every FC layer it streams weight tiles from off-chip memory into whichever
  bank of the weight double buffer is free. It uses the read port whenever
  the control unit is not loading inputs.
- **Weight double buffer** (`weight_dbuf`): two banks. Each bank holds one
  tile, which is the biases and all weights of `SA_C` output neurons. The
  loader fills one bank while the array reads the other.
- **Systolic array** (`systolic_array`, `pe`): `SA_R x SA_C` multiply-accumulate
  elements. Graph rows are on the array rows and output neurons on the array
  columns. It computes one `SA_R x SA_C` tile of an FC layer's output.
- **ADD** and **ReLU** (`add_unit`, `relu_unit`): per array column, they add
  the bias, requantise to 8 bits with saturation, and optionally clip at zero.
- **Aggregation** and **combination** (`aggregation_unit`,
  `combination_unit`): per feature index, for all `K` nodes at once, they
  compute the masked max over the other nodes, then a saturating add.
- **Mean** (`mean_unit`): the average of the user and target rows, one
  feature index per cycle.
- **Intermediate result buffer** (`feature_buffer`): three banks of `DEPTH`
  words. A word is one feature index of all `K` rows. There are two
  combinational read ports, so a combination step can read the aggregated and
  own features together. There is one write port with a row mask.

## How an FC layer is computed (loop tiling)

An FC layer maps `din` inputs to `dout` outputs for a range of graph rows.
The control unit splits the work into tiles:

- The `dout` outputs are split into tiles of `SA_C` columns. The weight
  loader delivers one such tile per double-buffer bank.
- The rows are split into tiles of `SA_R`. With `K = 5` and a 4-row array,
  every full-graph layer takes two row tiles. The second reuses the weight
  tile already in the buffer. The bank is released only after the last row
  tile.

For each (row tile, column tile), the control unit does three things:

1. **FEED**, `din` cycles. In cycle `k`, it reads feature `k` of all rows from
   the source bank and weight row `k` from the double buffer. It sends them
   into the left and top edges of the array, with `first` on `k = 0` and
   `last` on `k = din-1`. Inside the array, row `r` is delayed `r` cycles and
   column `c` is delayed `c` cycles. The PE at `(r, c)` therefore sees
   matching operands. The flags travel with the activations, so the PE clears
   its accumulator on `first`.
2. **DRAIN**. It waits for the bottom-right PE's `done`. That comes
   `SA_R + SA_C - 2` cycles after the last edge input, plus one cycle of PE
   latency.
3. **STORE**, `SA_C` cycles. Each cycle it passes one column of accumulators
   through ADD and ReLU and writes it to the destination bank. The row mask
   covers only the rows the layer owns. Outputs past `dout` are skipped.

A tile therefore costs about `din + SA_R + SA_C + SA_C` cycles. The weight
tile for the next step takes `1 + din*SA_C/8` bus beats to load. With two row
tiles per weight tile, the array is the bottleneck and the loader mostly
waits for a free bank.

## Number format

- Activations, weights and biases are signed 8-bit fixed point with 4
  fraction bits (Q3.4).
- Products accumulate in 32 bits, which is exact for every layer here.
- A result is `sat8((acc + (bias << 4)) >>> 4)`. The shift is arithmetic
  (rounding toward minus infinity) and saturates to [-128, 127].
- The mean divides the 16-bit sum by the row count and truncates toward zero.
- The aggregation gives 0 to a node with no active neighbour.
- The combination add saturates.

The network must be trained, or quantised after training, for this format.
The testbenches use random weights.

## Memory interface and data layout

All addresses count 64-bit beats. The read port is request/grant:

- A request is accepted in a cycle where `mem_rd_req && mem_rd_gnt`.
- Data come back in request order, one `mem_rd_rvalid` beat per request, any
  number of cycles later.
- The accelerator never refuses read data.

The write port is request/grant too.

**Input**, from `in_base`: the `I` user rows, then the `J` target rows.

- A user row holds `2*NT*NU` bytes: the real parts, then the imaginary parts,
  of that user's channel matrix.
- A target row holds `2*NT*NR` bytes.
- Each row starts on a new beat. Byte `b` of a beat is bits `8b+7 .. 8b`.

**Weights**, from `w_base`: one continuous stream.

- The order is FC steps 0,1,2,3,5,6,8,9,10,11,13,14,15,16 of the program.
- Within a layer, there is one tile per group of `SA_C` outputs.
- A tile is one bias beat (byte `c` = bias of output `c` of the tile), then
  `ceil(din*SA_C/8)` weight beats. Weight beat byte `j` is
  `W[k][c]` with `k*SA_C + c = 8*(beat-1) + j`. That is, input-major: the
  `SA_C` weights of input `k` sit side by side.
- Outputs past `dout` in the last tile are zero padding.

At the defaults the stream is 114,971 beats (about 0.92 MB).

**Output**, from `out_base`:

- First come the `I + J` rows of `w`. Each row has `2*NRF` bytes (real parts
  first) and is padded to a whole beat.
- Then comes one row of `NT*NRF` bytes for `F`.

## Timing and performance

A run starts with a one-cycle `start` pulse, with the base addresses stable.
It ends with a one-cycle `done` pulse after the last output beat is granted.

- `perf_cycles` counts the cycles of the last run.
- `perf_wstall` counts the cycles the array waited for a weight tile.

At the default configuration, with a memory that grants every request and
answers after 4 cycles, an inference takes **377,811 cycles**. That is
3.78 ms at a 100 MHz clock. Only 345 of those cycles are spent waiting for
weights.

With random grant stalls on the memory, the same run takes 377,913 cycles
and gives identical results. The time is set by the array work:

- about 3.4 M multiply-accumulates;
- on 16 PEs, which is at least 212k cycles;
- with the second row tile of each full-graph layer using only one of its
  four rows.

A larger array, or a graph that fills the rows, would shorten it.

## Where this design departs from, or adds to, the reference description

- **Combination.** The reference combines a node's feature with its
  aggregate by concatenation followed by an MLP. That would make the first
  combination layer 512 inputs wide, while its layer table gives 256 x 256.
  Here the two halves of that first weight matrix are tied together. The
  concatenation-plus-FC then becomes an element-wise add followed by a
  256 x 256 FC.
- **Normalization.** The reference normalises the outputs to meet the
  constant-modulus constraint on `F` and the power budget. That step is not
  specified in enough detail to build and is not part of this accelerator.
  The outputs are the raw FC results. A host, or a later stage, must
  normalise them.
- **Mean node.** The extra node is the mean of the 256-wide user and target
  features after the input MLPs. It is not the raw channel mean, whose width
  would not match the other rows.
- **Antenna count.** `NT` defaults to 16. One place in the reference setup
  text says 8 antennas per BS. `NT` is a parameter, and 8 works after
  re-elaboration.
- **Arithmetic.** The fraction width, the accumulator width, truncation,
  saturation and the empty-neighbourhood value are this design's choices.
  Only "8-bit fixed point" is given.
- **Array.** One 4 x 4 array is built. The size comes from the reference
  block diagram; the text speaks of "systolic arrays" without a count. The
  output-stationary dataflow and the edge skew are this design's choices.
- **Input and result path.** Only the weights pass through the ping-pong
  buffer. The channel features are loaded straight into the intermediate
  result buffer, and the results are written back from it, beat by beat. The
  reference block diagram routes the results through the double buffer as
  well. Input load and write-back are short (a few dozen beats against about
  115,000 weight beats), so nothing is lost by not overlapping them.
- **Buffers and interfaces.** The three-bank feature buffer, the tile format,
  the stream layout and the memory handshake are this design's choices.
- **Latency.** The reference implementation is reported at 432,638 to
  658,873 cycles per inference, and elsewhere quoted as 3.863 to 5.883 ms.
  This RTL takes 377,811 cycles at the default configuration. The reference
  design's internals are unknown, so the numbers are not directly
  comparable.
- **Network size is fixed at elaboration.** `I`, `J`, `NU`, `NR`, `NT` and
  `NRF` set the layer program and the buffer sizes. Other user or target
  counts, or another antenna count, need a new elaboration (see the workload
  testbench below). Several BSs mean several instances.

## Files

| file | contents |
|------|----------|
| `rtl/gnn_pkg.sv` | widths, `layer_t` program entry, `sat8`, `cdiv` |
| `rtl/layer_rom.sv` | the layer program above, computed from the parameters |
| `rtl/gnn_accel_top.sv` | top level: wiring of everything below |
| `rtl/control_unit.sv` | FSM: input load, layer program, write-back |
| `rtl/weight_loader.sv`, `rtl/weight_dbuf.sv` | weight streaming and ping-pong buffer |
| `rtl/systolic_array.sv`, `rtl/pe.sv` | MAC array |
| `rtl/add_unit.sv`, `rtl/relu_unit.sv` | bias and requantisation, activation |
| `rtl/aggregation_unit.sv`, `rtl/combination_unit.sv`, `rtl/mean_unit.sv` | graph operations |
| `rtl/feature_buffer.sv` | intermediate result buffer |
| `tb/offchip_mem_model.sv` | behavioural memory with latency and random grant stalls |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/gnn_workload_run.sv`, `tb/tb_gnn_workloads.sv` | end-to-end runs at the swept network sizes |

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops itself. A watchdog ends a run
that hangs. Run from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/gnn_pkg.sv \
    tb/tb_gnn_accel_top.sv --top-module tb_gnn_accel_top -j 8
./obj_dir/Vtb_gnn_accel_top
```

Replace the testbench name to run any other.

`tb_gnn_accel_top` runs the full default configuration twice: once with an
always-granting memory and once with random grant stalls. The steps are:

1. It generates random inputs and weights.
2. It writes them to the memory model in the layout above.
3. It computes the expected outputs with an independent fixed-point model of
   the network.
4. It compares every output byte.

It also checks the cycle count. The count must be at least the number of
weight beats. It must be at most 658,873, the slowest latency reported for
the reference FPGA implementation. It counts that each mechanism occurred:

- both double-buffer banks used;
- the loader waiting on a full buffer;
- the array waiting on weights;
- second row tiles;
- mean, aggregation and ReLU clipping;
- memory stalls.

The run takes about one second after a short build.

`tb_gnn_workloads` runs the same end-to-end check on accelerators
elaborated for the other sizes of the evaluation sweeps. The check itself is
made into a parameterised module, `tb/gnn_workload_run.sv`. All seven sizes
together simulate in under two seconds:

| size (others at default) | cycles per inference |
|--------------------------|----------------------|
| I = 1 user               | 240,985 |
| J = 1 target             | 240,881 |
| I = 2, J = 2 (default)   | 377,811 |
| I = 3 users (6 graph rows) | 378,841 |
| J = 3 targets (6 graph rows) | 378,931 |
| NU = 1 user antenna      | 373,627 |
| NU = 4 user antennas     | 386,317 |
| NT = 8 BS antennas       | 362,021 |

Going from four graph rows (`I = 1` or `J = 1`) to five adds a second row
tile to every full-graph layer. That costs about 57% more time. A sixth row
rides in the same second tile almost for free. The array height is therefore
what sets the scaling with the number of users and targets.

The block testbenches use small parameters where that keeps them fast. For
example, `tb_control_unit` and `tb_weight_loader` use a tiny network and
check the counts of every kind of step against closed-form numbers.

To change the network, set the top's parameters. The layer program, the
buffer depths and the weight stream follow them.
