# EvGNN: an event-driven graph neural network accelerator in SystemVerilog

A dynamic vision sensor (DVS) does not send frames. Each pixel reports on its
own when its brightness changes, as an event `(x, y, t, p)`: position,
timestamp in microseconds and polarity. This RTL classifies such a stream
with a graph neural network (GNN). It updates its prediction after every
single event, in a few thousand clock cycles, and never reprocesses the
whole graph.

Three ideas make that possible:

1. **Causal, directed event graph.** Every event becomes a node. Edges run
   only from older events to the new one. A node's features therefore never
   change once computed, and edges never need to be stored. The new event's
   neighbours are found by searching stored events.
2. **Prism neighbour search over per-pixel queues.** A past event `j` is a
   neighbour of the new event `i` when `|dx| + |dy| <= r_s` and
   `0 <= t_i - t_j <= r_t`. Events are kept in one small FIFO per pixel. The
   spatial test therefore picks queues, and the temporal test looks inside
   them. At most 16 neighbours are kept; the search stops early once 16 are
   found.
3. **Layer-parallel execution.** Past events' features are frozen. The stored
   layer-`l` output of each neighbour is exactly the input layer `l+1` needs.
   So all four layers of the new event can be computed at the same time, not
   one after another. The per-event compute time is set by the widest layer,
   not by the depth of the network.

## The network

Four simplified PointNet convolutions, then a grid readout and a linear
classifier (car / background):

```
x_i^{l+1} = BAQ( max over neighbours j of  Theta_l^T (x_j^l, |dx_ij|, |dy_ij|) )
```

| layer | input per neighbour         | outputs | weights |
|-------|-----------------------------|---------|---------|
| L0    | polarity p_j, abs(dx), abs(dy) | 16   | 3 x 16  |
| L1    | 16 L0 features, abs(dx), abs(dy) | 32 | 18 x 32 |
| L2    | 32 L1 features, abs(dx), abs(dy) | 32 | 34 x 32 |
| L3    | 32 L2 features, abs(dx), abs(dy) | 32 | 34 x 32 |

- **BAQ** stands for bias, activation, quantization. It adds a 32-bit bias,
  applies ReLU, shifts arithmetically right by a per-layer amount, and
  saturates to 127. All features are INT8 values in 0..127. Weights are
  INT8.
- **Grid readout.** The 120 x 100 sensor is cut into an 8 x 7 grid of
  16 x 16-pixel cells; the right column and bottom row are partial. Each
  cell keeps the per-channel maximum of the L3 features of every event that
  fell in it. This gives a 56 x 32 = 1792-element vector.
- **FC head.** 1792 -> 2 logits; the prediction is the larger logit, with
  ties going to class 0.

An event without neighbours aggregates to 0 before the bias. Its features
are then `sat(ReLU(bias) >> shift)`.

## Block structure

```
 host (AXI4-Lite) ──► ctrl_config ── event FIFO ──► evgnn_top FSM
                          │ weights, biases, r_s, r_t, shifts
                          ▼
     graph_build ──neighbours──► graph_conv ──L3──► graph_readout ──► fc_head
   (evq_buffer,                (neighbour FIFO,      (8x7x32 max)      (1792->2)
    spatial_search,             4 x conv_layer)
    temporal_select)                 │ word requests
                                     ▼
                               axi_mm_master ──AXI4──► host DRAM (features)
```

| file | role |
|------|------|
| `evgnn_pkg.sv` | sizes, field widths, record types, FSM stage encoding |
| `evgnn_top.sv` | top level and per-event sequencing FSM |
| `ctrl_config.sv` | AXI4-Lite register file, new-event FIFO, weight/bias load strobes |
| `graph_build.sv` | neighbour search and event storage |
| `evq_buffer.sv` | 120 x 100 pixel queues of 16 entries |
| `spatial_search.sv` | walks the L1 ball of queues, reads their entries |
| `temporal_select.sv` | dt test and early stop at 16 neighbours |
| `graph_conv.sv` | neighbour fetch from DRAM, four layers in parallel, write-back |
| `conv_layer.sv` | one layer: weight RAM + MatVec + max aggregation + BAQ |
| `weight_ram.sv`, `matvec.sv`, `aggregator.sv`, `baq.sv` | the parts of a layer |
| `graph_readout.sv` | 8 x 7 x 32 running-max grid |
| `fc_head.sv` | 1792 -> 2 classifier; borrows two MAC engines of layer 3's MatVec |
| `axi_mm_master.sv` | single-beat AXI4 master for the DRAM traffic |
| `sync_fifo.sv` | FWFT FIFO, used for the candidate, neighbour and event buffers |

Everything runs on one clock `clk` with an active-low asynchronous reset
`rst_n`.

## Graph building in detail

### Event queues (`evq_buffer`)

There is one queue per pixel: 12,000 queues of 16 entries. Each entry is 32
bits:

| bits  | field | meaning |
|-------|-------|---------|
| 31:15 | t     | timestamp, 17 bits of microseconds |
| 14    | p     | polarity |
| 13:0  | n     | event index since the last clear |

The pixel position is the queue index, so x and y are not stored. Each queue
also has a state word `{count, head}`:

- `head` is the slot the next push writes.
- The newest entry sits at `head-1`.
- `count` saturates at 16.
- A push into a full queue overwrites the oldest entry.

Both storage arrays have synchronous read ports, so they map onto block RAM.
A push takes two cycles: read the state, then write the entry and the state.
Clearing only zeroes the 12,000 state words, one per cycle.
The state words are memory without a reset, so the top level runs this
clear by itself after every reset (12,000 cycles) before it takes events.

### Spatial search (`spatial_search`)

The search visits the L1 ball around `(x_i, y_i)` row by row:

- `dy` runs from `-r_s` to `+r_s`.
- Within a row, `dx` runs from `-(r_s - |dy|)` to `+(r_s - |dy|)`.
- Positions outside the sensor are skipped without a memory access.

For each queue the search spends:

- one cycle to address the state word;
- one cycle to see `{count, head}`;
- one cycle per stored entry, newest first.

Each entry is pushed into the 4-deep candidate FIFO, tagged with `|dx|` and
`|dy|`. Entry reads pause while the FIFO is almost full. `r_s` is set at run
time, up to `RS_MAX = 7`.

### Temporal selection (`temporal_select`)

This stage pops one candidate per cycle. It computes
`dt = (t_i - t_j) mod 2^17`, which survives one timestamp wrap, and keeps
the candidate if `dt <= r_t`.

A kept candidate is written into the neighbour FIFO as `{n, p, |dx|, |dy|}`.
The FIFO lives in `graph_conv`.

On the 16th neighbour, `full` stops both the popping and the spatial walk
(early stop).

### Storing the new event

The new event is stored only after its search has finished. An event is
therefore never its own neighbour, and all edges point forward in time. The
event gets index `n`, a counter of events since the last clear; it wraps
after 16,384 events.

## Graph convolution in detail

### Feature storage in DRAM

The features of every past event live in host DRAM, in a 128-byte record at
`FEAT_BASE + 128*n`:

| bytes   | content |
|---------|---------|
| 0..15   | L0 output (16 x INT8) |
| 16..47  | L1 output (32) |
| 48..79  | L2 output (32) |
| 80..111 | L3 output (32) |
| 112..127 | unused |

Byte `b` of a 32-bit word is at bits `8b+7 .. 8b`.

- For each neighbour, bytes 0..79 (20 words) are read. These are the inputs
  of L1..L3. L0's input is the polarity, which the neighbour entry already
  carries.
- After the computation, the new event's 112 bytes are written back (28
  words).
- The host must reserve `128 * 16384` bytes = 2 MB from `FEAT_BASE`.

### Layer-parallel schedule (`graph_conv`, `conv_layer`)

Per event:

1. **FETCH.** Pop every neighbour and read its 20 words into the
   neighbours' feature buffer (16 x 80 bytes).
2. **COMPUTE.** For each neighbour in turn, a common step counter runs
   `s = 0 .. 33`. Layer `l` takes its input element `s` and ignores steps
   from `C_in^l + 2` on:
   - L0 uses steps 0..2.
   - L1 uses steps 0..17.
   - L2 and L3 use steps 0..33.
   A neighbour therefore costs exactly 34 cycles, whatever the number of
   layers.
3. **DRAIN and WRITE.** Three cycles of pipeline drain, then the 28-word
   write-back. The L3 output goes to the readout.

Inside a layer, timing runs as follows:

- The weight RAM word for step `s` holds column `s` of `Theta`: the C_out
  weights that multiply input element `s`. It is read in the step's cycle.
- One cycle later, all C_out MAC engines add `x_s * w[m]` to their partial
  sums.
- Two cycles after a neighbour's last step, the aggregator folds the
  finished messages into its running maximum.

## Readout and prediction

- `graph_readout` folds the new event's 32 L3 features into cell
  `(y/16)*8 + x/16` in one cycle.
- This is exact incremental max pooling, because old features never change.
- `fc_head` then streams the 1792 grid values, ordered as `cell*32 + channel`,
  through two MAC engines.
- Those engines are not extra hardware. Between events the graph convolution
  is idle, so `fc_head` raises `mv_sel` and drives the first two engines of
  layer 3's MatVec unit. It reads their sums back through `graph_conv`.
- The FC weights live in their own 1792-word RAM inside `fc_head`.
- It takes 1792 + 3 cycles. The logits include a 32-bit bias per class.

## Per-event sequence and latency

`evgnn_top` handles one event at a time:
`IDLE -> BUILD -> CONV -> READOUT -> FC -> IDLE`. Events arriving meanwhile
wait in the 8-deep event FIFO. Processing is strictly serial because the next
event may have the current one as a neighbour.

Approximate cycle counts, with `Q` the in-bound queues of the ball (25 for
`r_s = 3`), `E` the stored entries read, `N` the neighbours and `L` the
DRAM word latency:

| phase | cycles |
|-------|--------|
| BUILD | about `2Q + E + 4` |
| CONV  | `N*(20*L + 34) + 28*L + ~6` |
| READOUT | 1 |
| FC    | 1795 |

The FC head dominates for small neighbourhoods.

## Host interface

AXI4-Lite, 32-bit data, 20-bit byte addresses, one transfer at a time:

| address | access | content |
|---------|--------|---------|
| 0x00 CTRL | W | bit 0: clear (queues, readout grid, event counter) |
| 0x04 STATUS | R | bit0 busy, bit1 event FIFO full, bit2 FIFO empty, bit3 DRAM error, bits 7:4 FSM stage, bits 31:16 events processed |
| 0x08 EV_XY | RW | x in bits 6:0, y in bits 14:8 |
| 0x0C EV_T | RW | timestamp in µs (17 bits used) |
| 0x10 EV_P | W | polarity in bit 0; the write pushes `{x, y, t, p}` into the event FIFO |
| 0x14 RS | RW | r_s (reset 3) |
| 0x18 RT | RW | r_t in µs (reset 10000) |
| 0x1C SHIFT | RW | requantization shift of layer l in bits 8l+4..8l (reset 8 each) |
| 0x20 FEAT_BASE | RW | DRAM byte address of the feature records |
| 0x24 PRED | R | bit 0 class, bit 31 a prediction exists |
| 0x28, 0x2C | R | logit 0, logit 1 |
| 0x1xxxx | W | conv weight: addr[15:14] layer, addr[13:2] = k*C_out + m (input k, output m) |
| 0x2xxxx | W | FC weight: addr[14:2] = k*2 + class |
| 0x30000 + 4i | W | conv bias i = layer*32 + channel |
| 0x30200, 0x30204 | W | FC bias of class 0, 1 |

FSM stage codes: 0 idle, 1 clearing, 2 building, 3 convolving, 4 readout,
5 FC.

The host flow for one sample is:

1. Write CTRL.clear.
2. Write each event as EV_XY, EV_T, EV_P, keeping STATUS.bit1 (FIFO full)
   low.
3. Read PRED after the last event.

The DRAM side is a single-beat AXI4 master: `AxLEN = 0`, 4-byte beats,
`INCR`. A non-OKAY response sets the sticky DRAM-error bit.

## Where this RTL departs from the published design, and what it adds

- **Serial stages.** Feature fetch, compute and write-back run one after the
  other. The published design says they can be pipelined. Correctness does
  not depend on this; latency does.
- **Event FIFO.** The new-event FIFO is single-clock. The published block
  diagram calls it asynchronous; this design has one clock domain.
- **Requantization** is a power-of-two right shift per layer. The published
  design only says "quantization to INT8". A trained network needs its
  scales rounded to powers of two, or a multiplier added in `baq`.
- **Choices the source leaves open, made here:**
  - queue entry field widths;
  - DRAM record layout and register map;
  - single-beat AXI transfers;
  - the walk order of the spatial search;
  - the value 0 for an empty neighbourhood;
  - timestamp wrap handling.
- **Search test.** The equation of the search region uses `<=` for both
  radii; a block diagram draws `<`. The RTL follows the equation.

What is not in the RTL: the host CPU and its DRAM. The testbenches model
both: `tb/axi_dram_model.sv` is the DRAM, and the top testbench plays the
host.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:

- compares the block with an independent model written in the testbench;
- has a watchdog;
- ends with a `TB_RESULT checks=.. failures=..` line.

`tb_ncars_sample` runs one dataset-sized sample at the default size and the
reset values of `r_s` and `r_t`:

- It has 100 ms of events from a bar sweeping across the sensor, plus
  background noise: 2,000 events.
- The timestamps wrap around the 17-bit counter inside the sample.
- It uses the same per-event reference checks as the top-level test.

`tb_evgnn_top` runs the whole accelerator at its default size: 120 x 100
pixels, 16-entry queues, 16 neighbours, all four layers and the FC head.

- Random INT8 weights and biases are loaded over AXI4-Lite.
- The DRAM model stalls its ready signals at random.
- A reference model in the testbench repeats the whole algorithm. Every
  event's prediction, logits and 112 written feature bytes are compared with
  it.
- It counts each mechanism and fails if one never occurs: early stop at 16
  neighbours, empty neighbourhood, border skipping, queue overflow, temporal
  rejection, event FIFO backlog, clear, and a change of `r_s`.

Several testbenches also check cycle counts:

- `tb_graph_conv` checks that the compute phase takes exactly 34 cycles per
  neighbour, which is the layer-parallel claim.
- `tb_fc_head` checks 1795 cycles per prediction.

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/evgnn_pkg.sv \
          tb/tb_evgnn_top.sv --top-module tb_evgnn_top -o sim
./obj_dir/sim
```

Replace `tb_evgnn_top` with any other `tb_*` name. The top-level build takes
a few minutes because of the 12,000-queue arrays; the run takes seconds.
The other testbenches use smaller sensors through parameters.

## Changing the design

- The sensor size, queue depth, neighbour limit and `RS_MAX` are parameters
  of `evgnn_top`.
- Field widths (`TW`, `NW`, `XW`, `YW`) and the layer shapes are in
  `evgnn_pkg`.
- To change the layer shapes, also update:
  - `FETCH_BYTES` and `STORE_BYTES`;
  - the offsets in `graph_conv`;
  - the bias index split, which assumes at most 32 channels per layer.
- A larger sensor grows `evq_buffer` by `16 x 4` bytes per pixel.
- More than 16,384 events between clears need a wider `NW` (and a wider
  queue entry) or the index wraps.
