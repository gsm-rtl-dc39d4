# GNN beamforming accelerator for distributed satellite MIMO

Several low-Earth-orbit satellites can serve the same ground terminals
together, as one distributed antenna array ("Space-MIMO"). Each satellite
must then choose its own beamforming vectors, one per user stream, while
knowing only the channels from its own antennas. The approach implemented
here learns that choice offline with a graph neural network (GNN). The
graph's nodes are the M user terminals. A copy of the trained network runs
on every satellite and turns that satellite's local channel vectors into its
M beamforming vectors. Training happens on the ground. On board, the
satellite only runs inference, and it must finish within a few milliseconds.

This repository holds synthesizable SystemVerilog for that on-board
inference engine. Its structure follows a published FPGA accelerator for
this GNN: a systolic-array compute engine, ping-pong buffers, and a
control unit driven by a finite state machine. The network is small in
arithmetic but large in parameters: about 3.16 million 8-bit weights, read
once per inference over a 64-bit memory port. So the whole design is built
around streaming weights at one bus word per clock. Activations never leave
the chip.

## 1. The network being run

Every node (user terminal) m carries a feature vector. At the input, that
vector is the node's channel from the satellite's N antennas, written as
real numbers: 2N values, `[Re h(0..N-1), Im h(0..N-1)]`. All M nodes go
through the same layers in parallel. With N = 4, M = 4, H1 = 1024 and
H = 512:

| # | layer | in -> out | input taken from | output goes to | ReLU |
|---|-------|-----------|------------------|----------------|------|
| 0 | input MLP, FC 1 | 2N -> H1 | channel input | bank A | yes |
| 1 | input MLP, FC 2 | H1 -> H | A | B | yes |
| 2 | graph conv 1, MLP1 FC 1 | H -> H | B | C | yes |
| 3 | graph conv 1, MLP1 FC 2 + aggregation | H -> H | C | D | yes |
| 4 | graph conv 1, combination + MLP2 FC 1 | 2H -> H | [B, D] | C | yes |
| 5 | graph conv 1, MLP2 FC 2 | H -> H | C | A | yes |
| 6-9 | graph conv 2, same as 2-5 | | A, then [A, D] | ..., B | yes |
| 10 | output FC | H -> 2N | B | post-processor | no |

The published network description gives the layer widths and the ReLU
placement. The bank columns are this implementation's choice; the layer
list lives in `gsm_pkg::layer_cfg`.

A **graph convolution** updates each node from its neighbours, and here
every other node is a neighbour. MLP1 is applied to every node. Node i then
takes the element-wise **maximum** of the MLP1 outputs of all the other
nodes. This is the aggregation: it is invariant to node order, so the
network works for any ordering of the users. The node's own graph-conv input
is then **concatenated** with that maximum, giving 2H = 1024 features. This
is the combination step, and it feeds MLP2.

After the output FC, a post-processing step turns the 2N numbers of each
node into a complex beamforming vector. It then scales all M vectors
together so that the satellite's total transmit power equals its budget P.

## 2. How a layer is computed: tiles and the systolic arrays

A layer multiplies an M x in_dim activation matrix (one row per node) by an
in_dim x out_dim weight matrix. The output neurons are processed in
**tiles** of NCOL = 8. One tile has this layout in off-chip memory and in
the weight buffer:

```
word 0          : bias of the 8 outputs (byte j = bias of output j)
word 1 + k      : W[k][8t .. 8t+7]   (byte j = weight from input k to output 8t+j)
                  for k = 0 .. in_dim-1
```

One 64-bit word therefore holds exactly what the arrays consume in one
cycle: one weight for each of the 8 output columns. The compute engine
holds two 4 x 4 systolic arrays (`NUM_SA = 2`, `SA_COLS = 4`), which
together have 8 columns.

* **Rows are the graph nodes.** Row r receives feature k of node r in the
  cycle that word k of the tile arrives. The activation buffer returns one
  feature of all M nodes per read, so no reordering is needed.
* **Columns are output neurons.** Weights move down the columns and
  activations move right along the rows. Row r is delayed by r cycles and
  column c by c cycles (the skew registers), so PE(r, c) meets
  `x_r[k]` and `W[k][c]` in the same cycle.
* **Each PE keeps its own sum** (output-stationary). Tags travel with the
  weights. The *first* tag restarts the accumulator, and the *last* tag
  copies the finished dot product into the PE's result register.

When the bottom-right PE holds its result, the **drain** walks the 8 output
columns, one per cycle. For each column it adds the bias, rescales the
result to 8 bits, applies ReLU if the layer has it, applies the aggregation
if the layer has it, and writes one word (that neuron for all M nodes) into
the destination bank.

The graph convolution needs no extra passes:

* **Aggregation runs during write-back.** Layers 3 and 7 write
  `max over j != i of value_j` for each node i, instead of the values
  themselves (`gsm_aggregation`). The MLP1 outputs are never stored.
* **Combination is done by address mapping.** Layers 4 and 8 read features
  0..H-1 from the graph-conv input bank and features H..2H-1 from bank D,
  where the aggregated features are (`gsm_combination`). Nothing is copied.

This is the "refactored" order of the graph convolution: MLP1 runs once for
all nodes, then aggregation, then combination and MLP2. The naive loop
would re-run MLP1 for every (node, neighbour) pair.

## 3. Buffers

* **Weight ping-pong buffer** (`gsm_weight_buffer`): two banks of
  H1 + 1 = 1025 words of 64 bits, which is the largest tile. The fetch side
  fills one bank while the compute side reads the other. A bank is handed
  over with *commit* (full) and *release* (empty). Assertions check that a
  full bank is never written and an empty bank is never read.
* **Activation banks** (`gsm_act_buffer`): four banks (A, B, C, D) of
  1024 words of M bytes. One layer's output is the next layer's input, so
  data stays on chip between layers (layer fusion). Two banks would be
  enough for a plain chain of layers. The graph-conv input and the
  aggregated features must survive until the combination step reads them,
  and that is why there are four. A fifth, register-based bank holds the
  M x 2N channel input. It is written one node row at a time and read
  transposed, one feature of all nodes per address.

## 4. Control and timing

`gsm_ctrl` is a state machine with the states IDLE, LOAD_IN, RUN, POST and
DONE. In RUN, two independent counter sets walk the same layer/tile
sequence:

* the **fetch side** requests the words of the next tile whenever the weight
  buffer has a free bank, and commits the bank when the last response has
  arrived;
* the **issue side** streams a full bank into the engine one word per cycle,
  tags the bias, first and last words, and releases the bank after the last
  word.

The results are read directly from the PEs. So only one tile can be
between its last word and the end of its drain. The issue side holds back:

* the last word of a tile, until the previous tile has drained;
* the first word of a new layer, until the previous layer has drained.

For tiles with 512 or 1024 inputs this costs nothing, because the drain is
far shorter than the tile. Only layer 0, with 9-word tiles, pays a few
cycles per tile.

**Latency.** The design is memory-bound by construction. One inference
reads `gsm_pkg::total_weight_words()` words: 395,457 for the default network
(3,158,016 weights and 5,640 biases). The engine consumes one word per
cycle. The per-tile overhead is the memory latency plus a few cycles. The
full-size simulation, with a memory latency of 3 cycles and no stalls,
takes **400,942 cycles** (4.0 ms at 100 MHz). The FPGA implementation this
design follows reports 386,284 to 588,280 cycles for 8-bit data.

Engine pipeline: a word issued in cycle t reaches the arrays in t+1. The
bottom-right PE finishes the tile's last word M + SA_COLS - 2 cycles after
that. The drain takes NCOL cycles. `tile_done` is high
M + SA_COLS + NCOL = 16 cycles after the last word was issued.

## 5. Power normalisation (`gsm_postproc`)

The output FC produces z = `[Re w(0..N-1), Im w(0..N-1)]` for each stream.
The post-processor:

1. sums E = the sum of z^2 over all M x 2N values (2N cycles);
2. finds, bit by bit, the largest 16-bit scale s (8 fraction bits) with
   `s^2 * E <= P * 2^16`, which makes s the square root of P/E (16 cycles,
   no divider and no square-root unit);
3. writes one 64-bit word per stream, holding N complex values as
   (Re, Im) byte pairs, each `round(z * s / 256)` saturated to 8 bits.

This meets the per-satellite constraint `sum_m ||w_m||^2 <= P` with near
equality. P (`p_budget`) is given in units of the squared output LSB.

## 6. Interface and memory map

Top module: `gsm_accel`. All addresses are 64-bit word addresses.

| port | meaning |
|------|---------|
| `start` / `busy` / `done` | pulse start; done pulses once the outputs are written |
| `in_base` | M words: node m's channel, byte f = feature f (Re then Im) |
| `w_base` | weights and biases, layer by layer, tile by tile (section 2) |
| `out_base` | M words written: stream m, bytes (2n, 2n+1) = (Re, Im) of antenna n |
| `p_budget` | power budget in squared output LSBs |
| `mem_rd_req_*` | read request: valid/ready, address |
| `mem_rd_rsp_*` | read response: valid, data; in order, always accepted |
| `mem_wr_*` | write: valid/ready, address, data |

Number formats: activations and biases are signed 8-bit. Weights are
signed 8-bit with `W_FRAC` = 6 fraction bits relative to the activations.
Each PE accumulates in 32 bits. Requantisation shifts right by `W_FRAC` with
round-half-up and saturates to 8 bits.

## 7. Where this design departs from or fills in the published description

The published description gives the blocks and what each one does, the
layer widths, the 8-bit format, the 64-bit memory port, ReLU placement,
max aggregation, and the tile-at-a-time, double-buffered, layer-fused
organisation. It does not give any block's internals. These were chosen
here:

* Output-stationary dataflow, rows = nodes, columns = output neurons, and
  2 arrays x 4 columns, sized so that one bus word feeds all columns. The
  published FPGA build reports 128 DSP blocks. This design uses 32 8-bit
  multipliers, which is all a 64-bit stream of 8-bit weights can keep busy.
* The combination step as concatenation. This is implied by the 1024-input
  FC that follows it.
* The output FC has 2N outputs per node. One passage describes it as having
  "2 x 2N" output neurons. The layer table gives 512 x 2N, which is what the
  output packing needs, and that is what is built.
* The fixed-point split, rounding, saturation and bias format.
* Scaling the whole output to meet the power budget with equality. Also the
  bitwise square-root search and the output packing.
* The channel input is loaded straight into registers. It does not pass
  through the weight ping-pong buffer.
* Memory interface, memory map and handshakes.
* Only the 8-bit configuration is built. The 16-bit variant (about twice the
  cycles) would need `DATA_W = 16` and 4 columns per bus word.

The published FPGA build keeps far more on chip (1472 BRAM18 blocks). This
design holds about 263 kbit: the 2 x 1025 x 64-bit weight buffer and the
4 x 1024 x 32-bit activation banks.

## 8. Files

| file | content |
|------|---------|
| `rtl/gsm_pkg.sv` | types, layer table, word-count function |
| `rtl/gsm_accel.sv` | top |
| `rtl/gsm_ctrl.sv` | control unit |
| `rtl/gsm_weight_buffer.sv` | ping-pong weight buffer |
| `rtl/gsm_compute_engine.sv` | skew, arrays, drain, write-back |
| `rtl/gsm_systolic_array.sv`, `rtl/gsm_pe.sv` | systolic array and PE |
| `rtl/gsm_act_buffer.sv` | activation banks and transposed input |
| `rtl/gsm_combination.sv` | concatenation address mapping |
| `rtl/gsm_aggregation.sv` | leave-one-out max |
| `rtl/gsm_relu.sv` | bias, requantisation, ReLU |
| `rtl/gsm_postproc.sv` | power normalisation and output packing |
| `tb/gsm_tb_pkg.sv` | generated weights, algorithm-level reference model |
| `tb/gsm_offchip_mem.sv` | behavioural external memory (latency, random stalls) |
| `tb/tb_*.sv` | one self-checking testbench per module |

The memory model does not store weights. Every weight and bias byte is a
hash of its address and byte lane (`gsm_tb_pkg::wword`), mapped to
[-11, 11], so any network size can be simulated without data files.
`gsm_tb_pkg::gnn_ref` recomputes the whole inference at the algorithm level,
from the same memory layout. It does not model the banks or the timing.

Testbenches:

* `tb_gsm_accel` runs four inferences on a reduced network (H1 = 32, H = 16,
  `W_FRAC` = 4) against a memory that stalls 20% of the time. It checks every
  output word, the power scale and the cycle count. It also counts each
  mechanism: both ping-pong banks used, waits for weights, waits for a
  drain, memory and output back-pressure, aggregation write-backs,
  concatenated reads and saturation. A mechanism that never occurred fails
  the test.
* `tb_gsm_accel_full` runs one inference at the default parameters, the
  full 1024/512 network. It checks the outputs and that the cycle count lies
  in the reported 8-bit range. It runs in well under a second.

Simulating with Verilator, for example the full-size test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/gsm_pkg.sv tb/gsm_tb_pkg.sv tb/tb_gsm_accel_full.sv \
  --top-module tb_gsm_accel_full -o sim
./obj_dir/sim
```

Every testbench ends with `TB_RESULT checks=N failures=F`. The same command
works for any `tb/tb_gsm_*.sv`.

**Changing the design.**
* `M`, `N`, `H1` and `H` are parameters of `gsm_accel`. `H1`, `H` and 2N
  must be multiples of NCOL = `NUM_SA * SA_COLS`.
* `NUM_SA * SA_COLS * 8` must equal the 64-bit bus width. An assertion in
  the engine checks this.
* 2N bytes must fit in one 64-bit input word, so N <= 4.
* The systolic arrays have M rows, one per node, and each activation bank is
  M bytes wide. The RTL takes any M >= 1; the testbench reference model
  holds at most 4 nodes.
