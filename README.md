# Event-graph neural network accelerator for cochlea events

This is the programmable-logic half of a low-latency classifier for
event-based audio. An artificial cochlea (or a dataset that imitates one,
such as the Spiking Heidelberg Digits) produces sparse events. Each event
is a pair (channel, time), with 700 frequency channels. Instead of
collecting events into frames, the classifier treats every event as a node
of a growing graph. It works on each event the moment it arrives:

1. Link the event to recent events on nearby channels.
2. Push it through four graph-convolution layers.
3. Fold the result into a running average.

When a recording ends, the averaged 64-element vector is handed to the
processor. The processor runs a small fully connected head in software and
picks the class.

The hardware only ever holds the *last* event of each channel. Neighbours
are looked up by channel index in block RAM, so memory and work per event
are fixed, whatever the length of the recording. At 200 MHz, one event
passes the whole pipeline in about 7.6 µs. The pipeline accepts a new event
every 368 cycles (about 543 thousand events per second). Speech in the
dataset averages about 20 thousand events per second.

## Data path

```
 processor ──AXI4-Lite──► axil_regs ──► sync_fifo ──► graph_generator
                               ▲                           │ event, edge list,
                               │                           ▼ 2 features (16 bit)
                          result RAM,   avg_pool ◄── graph_conv ×4 (64 outputs each,
                          interrupt  ◄─ (64 means)        16-bit first layer, 8-bit others)
```

Each stage holds one event. Stages are joined by valid/ready handshakes, so
the four convolution layers work on four different events at the same time.
Every stage passes the event (channel, timestamp, last-of-recording flag)
and its edge list downstream with its output. The next layer needs both the
edge list and the event's position to find its own neighbours.

| file | role |
|---|---|
| `egnn_pkg.sv` | shared constants: 700 channels, r_ch = 100, skip step 10, r_t = 20 ms, widths |
| `egnn_accel.sv` | top level: bus slave, FIFO, generator, four layers, pool |
| `axil_regs.sv` | AXI4-Lite slave: event input, weights, requantisation, results, interrupt |
| `sync_fifo.sv` | event queue ahead of the generator |
| `graph_generator.sv` | skip-step neighbour search, temporal test, neighbour-mean features |
| `graph_conv.sv` | one PointNetConv layer with its feature and weight memories |
| `pos_norm.sv` | normalised edge offsets (channel by look-up table, time by multiply-shift) |
| `vector_mul.sv` | one weight row times one edge vector, plus bias |
| `weight_ram.sv` | one layer's weights, two rows per read |
| `tdp_ram.sv` | two-port block RAM (context memory, feature memories) |
| `seq_divider.sv` | restoring divider, one quotient bit per cycle (32 bits for the neighbour means, 24 bits for the pool means) |
| `avg_pool.sv` | per-recording global average pool, result RAM, interrupt |

## Building the graph: skip-step search

The graph is directed and causal: an event can only connect to events that
came before it. The generator keeps a *context memory*: one 24-bit timestamp
per channel, in a two-port RAM addressed by channel. Only the newest event
of a channel survives.

Event `i` on channel `ch` does not scan all channels within r_ch. It looks
at every SKIP-th one:

    candidate k = 0 .. 2·r_ch/s,   channel ch + (k − r_ch/s)·s

With r_ch = 100 and s = 10 this gives 21 candidates: ch−100, ch−90, …,
ch+100. The event's own channel is one of them, so an event links to the
previous event on its own channel.

A candidate becomes an edge when all of these hold:
- its channel exists;
- its channel has held an event since the start of the recording;
- its timestamp `t_j` satisfies `t_j ≤ t` and `t − t_j ≤ r_t` (20 ms).

Candidates are read two per cycle, one per RAM port, so the search takes
11 cycles. The new timestamp is then written in one more cycle.

The edge list travels with the event to every layer. For each of the 21
slots it holds the time difference `t − t_j` and a valid bit.

The event's own input features are not a surface normal, as in earlier
event-graph work. They are simply the **mean channel and mean timestamp of
its neighbours**:
- The generator sums both over the valid candidates.
- One sequential divider produces the two means, one after the other.
- Each mean is scaled to a 16-bit feature: mean channel × 93, and mean time
  in 32 µs steps.
- With no neighbour, the event's own (ch, t) is used.

A generator pass takes 1 + 11 + 1 + 32 + 1 = 46 cycles. That is well below
the convolution time, so the generator never limits throughput.

**Starting a recording.** A per-channel valid bit records whether a channel
has held an event. It can be cleared two ways:
- at once, by the CTRL register;
- in order with the stream, by an event flagged *first*.

With the second method, a new recording can follow the previous one without
draining the pipeline. The layers' feature memories are never cleared: a
channel that is not valid in the context can never be read as a neighbour.

## Inside one graph convolution

Each layer computes a PointNetConv with max aggregation:

    out_o = requant( ReLU( max over j in {self} ∪ N(i) of
                           ( b_o + Σ_m (W_om − Z_w) · [x_j ‖ pn_ch ‖ pn_t]_m ) ) )

Batch normalisation from training is assumed folded into `W` and `b`.

**Memories.**
- A two-port *feature memory* holds, per channel, the input vector of the
  last event seen there: 700 × 64 × 8 bit (700 × 2 × 16 bit in layer 1).
- A *weight memory* holds 64 rows of IN_DIM + 2 unsigned weights and a
  32-bit signed bias per row. Its two read ports each deliver one whole row.

**Schedule.** The 22 edges (21 candidates plus the self-loop) are handled as
11 pairs.
1. **Fetch, 11 cycles.** Neighbour vectors are read two per cycle. Edge
   slot 21, the self-loop, takes the event's own vector, which is then
   written to the feature memory at its channel.
2. **Multiply, 11 × 32 = 352 cycles.** Four `vector_mul` units run, one per
   combination of 2 edges × 2 output rows. Each is a full 66-element dot
   product. Every cycle updates the running maximum of two output elements.
   Invalid edges are left out of the maximum; their cycles are not saved.
3. **Output.** ReLU and requantisation follow.

A layer accepts its next event 368 cycles after the previous one:
- 352 cycles of multiplication;
- 11 cycles of fetch;
- the handshakes around them.

The published formula, (MAX_EDGE + 1)/2 · OUT_DIM/2, counts only the 352
multiply cycles. That is the source of the small gap between 543 and 555
thousand events per second.

**Positional normalisation.** The relative position of neighbour `j` is
appended to its feature vector. Both terms are rescaled into (0, 1), so
they are not lost when quantised:
- **Channel term.** `pn_ch = (offset + r_ch) / (2·r_ch)`. The offset can
  only take 21 values, so this is a look-up table computed at elaboration.
- **Time term.** `pn_t = (t_i − t_j) / r_t`. This is a multiply by
  ⌊2^Q·2^24 / r_t⌋ followed by a 24-bit shift, saturated.
- **Self-loop.** It gets offset 0, so `pn_ch = ½` and `pn_t = 0`.

Both terms enter at the layer's input precision: 16 bits in layer 1 and
8 bits in the others.

**Number formats.** Features and weights are stored as unsigned integers:
- Features follow a ReLU, so their zero point is 0.
- Weights have zero point 2^(w−1), i.e. 32768 in layer 1 and 128 elsewhere.

The accumulator is 40 bits wide. Requantisation is
`min(2^8 − 1, (y · m) >> s)`, with a 16-bit `m` and a 6-bit `s` per layer,
set by the processor. The first layer is 16 bits wide, to keep the timing
resolution of the input; the others are 8 bits.

## Pooling and hand-over

`avg_pool` adds every output vector of layer 4 into 64 accumulators of
24 bits and counts the events with a 16-bit saturating counter. Then, on
the event flagged *last*:
1. One shared 24-cycle divider computes the 64 means; they are rounded
   down.
2. The means are written to a 64 × 8-bit result RAM.
3. The interrupt is raised and stays high until the processor clears it.
4. The accumulators and counter are cleared.

The division takes about 1,700 cycles (64 × 26). During that time the pool holds off
input, and the back-pressure reaches the FIFO.

## Driving it from the processor

All access is 32-bit AXI4-Lite: one beat, one transaction at a time, every
response OKAY.

| address | access | meaning |
|---|---|---|
| `0x000000` EVT_T | W | timestamp of the next event, µs |
| `0x000004` EVT_CH | W | [9:0] channel, [30] first event of a recording, [31] last event; the write pushes the event and is held while the FIFO is full |
| `0x000008` STATUS | R | [0] interrupt, [1] FIFO full, [31:16] event count of the last pooled recording |
| `0x000008` STATUS | W | bit 0 = 1 clears the interrupt |
| `0x00000C` CTRL | W | bit 0 = 1 clears the graph context |
| `0x000010 + 4·L` | RW | requantisation of layer L: [15:0] multiplier, [21:16] shift (reset 1, 0) |
| `0x001000 + 4·i` | R | pooled element i |
| `0x800000 \| L<<21 \| B<<20 \| row<<11 \| elem<<2` | W | weight (B = 0, element `elem` of output row `row`) or bias (B = 1) of layer L |

Element numbering within a row:
- elements 0 … IN_DIM−1 are the input features;
- element IN_DIM is the channel term;
- element IN_DIM+1 is the time term.

Weights may only be written while no event is in flight.

A typical run:
1. Load the weights and requantisation settings once.
2. For each recording, write the events in time order, the first with bit
   30 set and the last with bit 31 set.
3. Wait for the interrupt.
4. Read the 64 results and the count.
5. Clear the interrupt.

## Timing summary (200 MHz, default build)

| quantity | cycles | time |
|---|---|---|
| generator, per event | 46 | 0.23 µs |
| one convolution layer, per event | 366 to output, 368 between events | 1.8 µs |
| isolated event, FIFO to pool | 1515 | 7.6 µs |
| sustained rate | 368 per event | 543 kEPS |
| pool division at end of recording | ≈ 1,700 | 8.5 µs |

## Parameters and other configurations

Defaults are the published base model. The channel count, r_ch, skip step
and r_t are set in `egnn_pkg` and can be overridden on the top (`R_CH`,
`SKIP`, `R_T`). The four layer widths are `C1`…`C4`.

r_ch and the skip step are build-time choices, because they fix the number
of edge slots `2·⌊r_ch/s⌋ + 1` and with it the schedule:
- 201 slots at skip step 1;
- 61 slots at r_ch 300.

All settings of the published r_ch / skip-step study build and match the
reference in simulation:
- skip step 1, 5, 15 and 20;
- r_ch 30, 50, 200, 250 and 300.

So do all published layer widths:
- 8/16/32/64 (tiny);
- 16/32/64/64;
- 128 × 4;
- 256 × 4.

Any model whose layers are at most 64 wide also runs on the default build
without rebuilding. Set the unused rows' weights to the zero point and their
biases to 0: those outputs stay 0 and add nothing in the next layer.
This follows from the arithmetic; it is not simulated in that form. The
simulations build each width as its own hardware.

Measured sizes:
- Tiny model, built at its own widths: 3.8 µs per isolated event.
- 128 × 4: 720 cycles per event.
- 256 × 4: 1424 cycles per event.

## Where this design departs from the published one

- **Bus.** The published system uses AXI4. Here the bus is AXI4-Lite with a
  register map of this design's own, and weights are written one element per
  transfer.
- **Channel normalisation.** The description adds r_ch and multiplies by
  2/r_ch. Taken literally that maps to (0, 2), while the text says the
  result lies in (0, 1). This design divides by 2·r_ch.
- **Time normalisation.** The description multiplies the (negative) time
  difference by −1/r_t. Here the non-negative age `t_i − t_j` is divided by
  r_t, which gives the same value.
- **Choices made where the description is silent:**
  - feature scaling of the neighbour means (× 93, ÷ 32 µs);
  - 24-bit µs timestamps;
  - the per-channel valid bits and the *first* flag;
  - one requantisation multiplier and shift per layer;
  - a neighbour exactly r_t old still counts (`t − t_j ≤ r_t`, as the
    published block diagram prints it);
  - a floor-rounded mean in the pool;
  - a 16-event FIFO.
- **Throughput.** The fetch is not overlapped with the previous event's
  multiplication. This costs 16 cycles per event (368 instead of 352).
- **Tiny-model rate.** The published rate for the tiny model (277 kEPS) is
  not reproduced. Here the 64-wide last layer still sets the rate at
  543 kEPS.
- **Not built.**
  - the resource-saving variant with two multipliers per layer instead of
    four;
  - the processor side: reading recordings from storage, replaying the
    inter-event delays, the floating-point fully connected head and the
    final arg-max;
  - the sensor itself.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the
module with an independent model: a queue, a memory array, integer
division, or the behavioural reference of the search and the layer in
`tb/egnn_ref_pkg.sv`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>`.

**Unit testbenches.**
- `tb_graph_generator` streams 600 random events and checks per event:
  edges, time differences, features and the 46-cycle latency. It also
  exercises the clear input, the *first* flag and back-pressure. It takes
  `R_CH` / `SKIP` overrides.
- `tb_graph_conv` runs a 16-bit 2-input layer and an 8-bit 64-input layer
  against the reference. It checks the output latency and counts ReLU
  clipping, saturation and skipped edges.

**End-to-end testbenches.**
- `tb_egnn_accel` puts the accelerator, with every parameter at its
  default, next to the stimulus and checker `egnn_bench`. The bench drives
  the whole design through the bus:
  - loads random weights;
  - sends four recordings (one after a register clear, two back to back
    opened by *first* flags);
  - compares every pooled element and event count with the reference.

  It also checks the 8 µs per-event budget and the steady-state event
  interval. It counts that each of these mechanisms happened at least once:
  - a full FIFO holding the bus;
  - a layer waiting for the next;
  - the pool holding off input;
  - events without neighbours;
  - candidates rejected as too old or out of range;
  - context clears;
  - interrupts.
- `tb_workload_model_size` builds the four other published layer widths and
  runs each through the same end-to-end test at once. Each is an
  `egnn_variant`: the accelerator with other parameters, plus its own
  `egnn_bench`.
- `tb_workload_graph_search` does the same for the nine other r_ch /
  skip-step settings.

To run one testbench with Verilator 5 from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/egnn_pkg.sv tb/egnn_ref_pkg.sv tb/tb_egnn_accel.sv \
    --top-module tb_egnn_accel -o sim
./obj_dir/sim
```

Replace `tb_egnn_accel` with any other testbench. To run one other
configuration of the end-to-end test, instantiate `egnn_variant` with its
parameters in a small top, as the workload testbenches do.

Run times:
- the full-size end-to-end test builds in about 15 s and runs in about 1 s;
- the two workload testbenches take about a minute each.

## Notes for changing the design

- Immediate assertions in `always_ff` blocks check the FIFO count and RAM
  write collisions. Concurrent assertions are avoided so that every
  synthesis front end accepts the code.
- Lint reports some signals as unused: the upper weight-address bits of
  layers narrower than 512, and the busy and remainder outputs of the
  dividers. The affected modules explain these in their opening comments.
- Changing the number of multipliers per layer means changing the pair
  schedule in `graph_conv`. The rest of the pipeline only relies on its
  valid/ready handshakes.
