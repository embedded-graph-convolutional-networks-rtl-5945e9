# EFGCN: a graph convolutional network for event cameras on an FPGA

An event camera reports brightness changes as a stream of events. Each event is
`(x, y, t, polarity)`, at rates of up to millions per second. This design
classifies objects in such a stream. Each event is turned into a vertex of a
spatio-temporal graph. A stack of five graph convolutions (PointNetConv with
max aggregation) and three max-pooling stages reduces the graph to a small 4x4
feature map. A linear classifier in software then reads that map.

The main idea is a split in how the work is scheduled:

* **Asynchronous part.** This part runs once per event: graph building, the
  first convolution and the first pooling. Every event takes a fixed 15 clocks,
  so the hardware sustains 13.3 M events/s at 200 MHz.
* **Synchronous part.** After the first pooling, events no longer exist one by
  one. The graph becomes a sequence of *temporal channels*: 2-D maps of
  everything that happened in one time slice. Each later convolution processes
  one whole channel with a fixed schedule. It uses only the current and the
  previous channel, so its memory is three small banks instead of a whole
  graph.

The RTL is the Base configuration:

* Graph size β = 128.
* Time window 100 ms.
* Feature widths 16-32-32-64-64.
* One vector multiplier per synchronous layer.
* 200 MHz clock.
* Sensor 120x100 pixels (the N-Cars dataset).

All of these are parameters of `efgcn_top`.

## Data path

```
raw events ─► normalise ─► event FIFO ─► edges_gen (+ neighbourhood matrix)       generate_graph
          ─► async_conv  (conv1, 4 → 16, one event per 15 clocks)
          ─► maxpool_async 4x4x4 ─► feature_mem1  (32x32 cells, channel = 3.125 ms)
          ─► sync_conv  conv2 16→32 ─► feature_mem2
          ─► sync_conv  conv3 32→32 ─► maxpool_sync 2x2x2 ─► feature_mem3 (16x16, 6.25 ms)
          ─► sync_conv  conv4 32→64 ─► feature_mem4
          ─► sync_conv  conv5 64→64 ─► maxpool_sync 4x4x4 ─► feature_mem5 (4x4, 25 ms)
          ─► out_serialise ─► 32-bit word stream (one 4x4x64 map every 25 ms)
```

All stages run at the same time. Between stages there are valid/ready
handshakes, and between layers of the synchronous part there are bank swaps.

## 1. Building the graph

**Normalisation** (`normalise`) scales each coordinate to the graph size. The
rules are `x* = ⌊β·x/X⌋` and `y* = ⌊β·y/Y⌋`. Time is scaled the same way,
`t* = ⌊β·t/T⌋`, where T is the time window. One unit of `t*` is therefore
T/β = 0.78 ms. `t*` keeps 32 bits, so channel numbers keep increasing on an
endless stream. Raw timestamps are microseconds.

The **event FIFO** (`event_fifo`, 1024 entries) absorbs bursts above the
graph builder's rate. When it is full, incoming events are dropped and counted.

**Neighbourhood matrix (NM).** `nm_ram` has one word per graph pixel
(β² = 16384 words). Each word records the last event at that pixel:
`{valid, polarity, t* mod β}`, which is 9 bits for β = 128.

**Edge generation** (`edges_gen`) handles one event at a time.

* It looks at the 29 pixels with dx² + dy² ≤ 9 around the event, which is a
  disk of radius 3 including the pixel itself. The table of 29 offsets is in
  `efgcn_pkg` (`R3_DX`, `R3_DY`).
* A neighbour becomes a directed edge (older → newer) if its cell is valid and
  dx² + dy² + dt² ≤ 9. Here dt is the difference of the time stamps, modulo β.
* The NM is a true two-port RAM, which gives a fixed 15-clock schedule:
  - Clocks 0–14: port A reads offsets 0–14.
  - Clocks 0–13: port B reads offsets 15–28.
  - Clock 14: port B writes the event into its own cell.
  - The next event can start one clock later. Its reads therefore see the
    previous event, so results are the same as with strictly sequential
    processing.
* Comparisons lag one clock behind the reads.
* The result is the event plus a 29-entry edge list `eg_t`. Each entry holds a
  valid bit, the neighbour's polarity and dt.

Because only older events are linked to newer ones, no existing vertex ever
changes. That is what lets the following layers work event by event.

## 2. First convolution, event by event

`async_conv` computes

```
h = ReLU( max over {self} ∪ edges of  W · [pol_j, Δx_j·s, Δy_j·s, −Δt_j·s] + b )
```

* The self-loop uses position 0. Polarity is ±1, and `s` is a loadable
  position step.
* There are 30 vectors per event. Two lanes, each a full 16x4 matrix-vector
  unit, handle two vectors per clock, so an event takes 15 clocks. This matches
  the graph builder.
* Each output is requantised to int8: `sat8(((acc·M) >>> S) + Z)`.
* The result is folded into a running element-wise max over the valid vectors.
  At the end it is clamped below at the zero point Z. This clamp is ReLU in the
  quantised domain.

## 3. From events to temporal channels (the hardest part)

`maxpool_async` applies a 4x4x4 max pool to the event stream.

**Where an event goes.** Event (x, y, t) belongs to output cell (x/4, y/4) of
temporal channel t*/4. Its features are merged into that cell with a
read-modify-write on the write bank of `feature_mem1` (two clocks per event):

* features: element-wise max;
* edge list: OR;
* the cell's valid bit is set.

**Rescaling edges.** The merged vertex keeps its edges, rescaled to the pooled
grid. An edge to pixel (x+dx, y+dy, t−dt) becomes an offset between pooled
cells, each component in {−1, 0, +1}. In time the offset is 0 or −1, because
edges only point backwards. That leaves 17 possible neighbours:

* 8 in the same channel;
* 9 in the previous channel, same x/y included.

A pooled edge list is therefore 17 bits. Index 0 is the vertex itself:

* Bits 0–7 are the same-channel offsets in raster order.
* Bits 8–16 are the previous-channel offsets in raster order.

Edges that fall inside the vertex's own cell are dropped. Edges from different
events that map to the same pooled edge are merged by the OR.

**When a channel is finished.** The stream has no explicit end marker, so this
block closes channel c (bank swap in the feature memory) in two cases:

* An event of a later channel arrives. Time stamps increase, so nothing more
  will come for c.
* The elapsed time shows that channel c is over. The top level keeps a
  microsecond counter, with CLK_PER_US = 200 clocks per µs. Its normalised
  value `time_done` is updated only while the asynchronous part holds no event.
  Without that rule, an event still waiting in the FIFO could be overtaken by
  the clock. Without the time rule at all, a quiet scene would never close its
  last channel.

An event whose channel is already closed is dropped and counted (`late_cnt`).
With in-order time stamps this happens only when an event waits in the FIFO
past the end of its channel.

A swap is only accepted while the feature memory is ready. Pooling simply
waits, and back-pressure reaches the FIFO.

## 4. Three-bank feature memories

Each `feature_mem` has three banks. At any time:

* **bank n** belongs to the writer (a pooling layer or a convolution);
* **banks n−1 and n−2** belong to the reader, the next convolution. It needs the
  current channel and the previous one.

The memory moves through its states like this:

1. **Swap.** The writer swaps when a channel is complete. The roles rotate, and
   `r_start` tells the reader to begin.
2. **Done.** The reader raises `r_done` when it has finished. The oldest bank is
   then cleared at one cell per clock; it will be the next write bank.
3. **Writer blocked.** `w_ready` is low from a swap until that clear has
   finished, so the writer never writes into a bank that is still being read or
   is not yet empty.

**Cell word.** A cell holds `{valid, edges[16:0], features[DIM·8−1:0]}`, which
is 146 bits at conv1 width. Each bank is an `nm_ram` instance with one read port
and one write port. All three banks are swept to zero after reset.

## 5. Synchronous convolutions

`sync_conv` processes one channel after `r_start`. It visits every cell of the
SIZE×SIZE map in raster order, whether or not the cell holds a vertex, so its
run time is fixed.

**One cell takes 9 steps.** In step s:

* lane A reads bank n−1 at the cell itself (s = 0) or at its s-th same-channel
  neighbour;
* lane B reads bank n−2 at the s-th of the 9 cells around the same (x, y).

**When a vector counts.** A lane's vector counts only if all of these hold:

* the cell holds a vertex;
* the vertex's stored edge list contains that neighbour;
* the neighbour cell is valid.

**The vector.** Each vector is the neighbour's features followed by three
position values (Δx, Δy, Δt) ∈ {−1, 0, 1}·s. With M multipliers per lane, each
step takes k = DIM/M clocks, and output rows j·M … j·M+M−1 are computed in
clock j.

**Output.** Biases, requantisation and the running max work as in conv1. After
step 8 the vertex is emitted with its own edge list. After the last cell an
end-of-channel beat is sent and `r_done` is raised.

**Timing.** The clocks per channel are SIZE²·9·DIM/M. Each layer must finish
before its channel's time is up:

| layer | map | N_IN→DIM | M | clocks per channel | time at 200 MHz | channel length |
|---|---|---|---|---|---|---|
| conv2 | 32x32 | 16→32 | 1 | 294 912 | 1.47 ms | 3.125 ms |
| conv3 | 32x32 | 32→32 | 1 | 294 912 | 1.47 ms | 3.125 ms |
| conv4 | 16x16 | 32→64 | 1 | 147 456 | 0.74 ms | 6.25 ms |
| conv5 | 16x16 | 64→64 | 1 | 147 456 | 0.74 ms | 6.25 ms |

For shorter time windows, raise M2…M5. DIM must be a multiple of M; an
assertion checks this.

**Where results go.**

* conv2 and conv4 write their vertices straight into the next feature memory,
  and their end-of-channel beat is the swap.
* conv3 and conv5 feed `maxpool_sync`. That block pools KS×KS cells spatially
  and KT input channels in time. Merging and edge rescaling work as in the first
  pooling. An edge that points to the previous input channel becomes
  "previous output channel" only when the vertex is in the first input channel
  of its group.
  - After conv3: 2x2x2 pooling.
  - After conv5: KS = KT = (β/8)/4 = 4, which gives a 4x4 map per quarter time
    window (25 ms).

## 6. Output stream

When feature memory 5 holds a finished map, `out_serialise` reads its 16 cells
and sends each as DIM5·8/32 words of 32 bits.

* Feature 0 is in the low byte of the first word.
* `m_cell_valid` tells whether the cell held any vertex. Empty cells are sent as
  zeros.
* `m_last` marks the last word of a map.

The classifier (a linear layer over 4x4xDIM5 values) is meant to run in
software on the attached processor and is not included.

## 7. Parameters and quantisation

Weights and constants are loaded through the `wl_*` port: one 32-bit write per
value, with `wl_layer` = 1…5 selecting the convolution. The layout is defined in
`efgcn_pkg`. NINP is the input count N_IN+3, rounded up to a power of two.

| address | content |
|---|---|
| o·NINP + i, for i < N_IN+3 | weight (int8) from input i to output o; the last three inputs are the Δx, Δy, Δt position terms |
| DIM·NINP + o | bias of output o (int32) |
| DIM·NINP + DIM + 0 | requantisation multiplier M (int32) |
| DIM·NINP + DIM + 1 | right shift S |
| DIM·NINP + DIM + 2 | zero point Z (int8) |
| DIM·NINP + DIM + 3 | position step s (int8) |

* conv1 keeps its 16x4 weights in registers, which reset to zero.
* conv2…conv5 keep weights and biases in small RAMs, one per weight column,
  read one row per clock. These RAMs have no reset and must be loaded before
  use.
* The multiplier, shift, zero point and position step reset to 1, 0, 0 and 1.

## Where this design departs from, or adds to, the published description

* **NM word width.** The published text describes the NM word as β+2 bits wide.
  The memory counts it reports fit log2(β)+2 bits, which is what is built.
* **Edge test.** It is `≤ R²`, not `< R`. Only `≤` gives the stated maximum of
  29 neighbours.
* **FIFO.** Its depth (1024) is an estimate from the memory budget. Dropping
  events when the FIFO is full is this design's own choice.
* **Channel closing.** The time base, the channel-closing rule and late-event
  dropping are this design's own choices. The description does not say how a
  channel is known to be complete.
* **Last pooling.** It is built as 4x4 in space and 4 channels in time, which
  gives one map per quarter window. The description calls it both a spatial-only
  pooling and a stage that produces a map every quarter window; the second
  reading is used.
* **Handshakes and formats.** Handshakes, the stream formats between layers,
  the load bus, the output word format and the position look-up contents
  (−1/0/+1 times a step) are all this design's own.
* **Rounding.** Requantisation truncates; no rounding is applied. There is no
  input zero point; it is assumed folded into the bias.
* **Coverage of one output map.** The description says each prediction
  reflects the most recent full time window, with a new prediction every
  quarter window. Here each map covers one quarter window. Combining the four
  most recent maps is left to the software head.
* **Back-pressure.** When an output is not taken, the layer's pipeline freezes.
  With the default rates this should not happen, because every convolution
  needs less than half its channel time.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_normalise` | scaling and clamping against integer arithmetic |
| `tb_event_fifo` | order, full/empty, overflow count, random push/pop |
| `tb_nm_ram` | both ports against an array model, data held while idle |
| `tb_edges_gen` | edge lists against an NM model, 15 clocks per event, initial clear, stalls |
| `tb_generate_graph` | whole stage with an 8-entry FIFO: output is an in-order subsequence, outputs + drops = inputs, edge lists |
| `tb_async_conv` | random weights and events against a model, 15-clock rate, stalls |
| `tb_maxpool_async` | pooled bank contents at every swap, late/merge/edge counters |
| `tb_feature_mem` | bank rotation, n−1/n−2 contents, clear length, handshakes |
| `tb_sync_conv` | 4x4 map, M = 2, random data against a model, exact SIZE²·9·DIM/M clocks per channel |
| `tb_maxpool_sync` | pooled bank contents at every swap, merge counter |
| `tb_out_serialise` | word values, flags, words per map |
| `tb_efgcn_top` | whole design at reduced size (see below) |
| `tb_efgcn_full` | whole design at the default parameters |
| `tb_efgcn_dvs128` | default design with a 128x128 sensor |

**The end-to-end tests.** All three load all weights as zero and every bias
with a known value. Every vertex of every layer must then carry exactly that
layer's biases, and the output words must equal conv5's biases.

The stimulus is a blob of events moving over the left half of the sensor, plus
bursts that overflow the FIFO and a few events with old time stamps. Only
left-half output cells may be non-empty.

Each test counts these mechanisms and fails if any of them never happens:

* FIFO overflow;
* generated edges;
* late drops;
* merges in each pooling;
* dropped and rescaled edges;
* swaps of all five memories;
* empty and non-empty output cells.

The sizes of the three tests:

* `tb_efgcn_top` uses β = 64, a 64 ms window, 5 clocks/µs and widths 4-4-4-8-8,
  with M = 2 in conv4. It produces 9 maps.
* `tb_efgcn_full` runs the default design for 55 ms of input: 11 M clocks and
  two output maps. It takes about 40 s in Verilator.
* `tb_efgcn_dvs128` is the same run with `SENSOR_X = SENSOR_Y = 128`, the
  resolution of the CIFAR10-DVS and MNIST-DVS recordings.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/efgcn_pkg.sv $(ls rtl/*.sv | grep -v efgcn_pkg) tb/tb_efgcn_top.sv \
    --top-module tb_efgcn_top -Mdir obj_tb_efgcn_top
obj_tb_efgcn_top/Vtb_efgcn_top
```

For a single block, list only the package and the modules that block uses.

## Size and limits

At the defaults, synthesis infers about 2.25 Mbit of RAM. This includes the NM,
the FIFO and the five three-bank memories; feature memory 2 alone is
3 × 1024 × 274 bits.

Logic is about 10 k cells before technology mapping, with 7.9 k flip-flop bits.

What is not covered:

* **Larger sensors and graphs.** β = 256 with a 240x180 sensor (as used for
  larger sensors) needs different parameter values and has not been
  simulated. 128x128 sensors only need `SENSOR_X`/`SENSOR_Y` changed; that
  case is simulated.
* **Accuracy.** No trained weights are included, so classification accuracy is
  not reproduced. The tests check the arithmetic and the data movement, not a
  trained network.
