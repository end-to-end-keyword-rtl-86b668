# Event-driven keyword spotting with a graph neural network

This design recognises spoken keywords from the spike output of a neuromorphic
auditory sensor, without ever building a spectrogram. The sensor is a bank of
spike-domain band-pass filters, one per frequency channel. Whenever a channel
fires it sends an address event `{channel, polarity}`. The hardware stamps each
event with a microsecond timestamp and thins the stream with a per-channel
leaky integrate-and-fire filter. Each surviving event becomes a vertex of a
growing graph, linked to recent events on nearby channels. Four graph
convolution layers compute a 72-feature vector for every new vertex. The
vectors are max-pooled over 10 ms windows, and a small recurrent head (two
linear layers, a GRU, then two linear outputs) gives a keyword class and a
confidence once per window.

The computation is event-driven. Work is done only when the sensor produces
an event. Each event is processed once, as soon as it arrives, and the work
for one event depends only on how many neighbours it has. The window result
is ready a few microseconds after the window ends.

```
 sensor AER ─► timestamp_gen ─► lif_filter ─► burst FIFO ─► graph_gen
                   │                                           │
                   │                                      [buffer]◄─READY
                   │                                           ▼
                   │                                      graph_conv 1 (3 → 72)
                   │                                      [buffer]◄─READY
                   │                                      graph_conv 2 (72 → 72)
                   │                                      [buffer]◄─READY
                   │                                      graph_conv 3
                   │                                      [buffer]◄─READY
                   │  last timestamp of each window       graph_conv 4
                   └────────────────────────────────────► maxpool_window
                                                               ▼
                               kws_head: linear ─► linear ─► GRU ─┬─► linear ─► class scores, argmax
                                                                  └─► linear ─► confidence
```

All blocks run on one clock, 200 MHz by default. The top is `kws_top`.

## Time, windows and how a window knows it is finished

This is the least obvious part of the design.

`timestamp_gen` counts microseconds (`CLK_PER_US` = 200 clocks each) and stamps
every event with the current count. It also cuts time into windows of
`WINDOW_US` = 10 000 µs. In the cycle where a window ends it sends a *window
notice* directly to the pooling stage. The notice carries the window number,
whether the window had any event, the timestamp of the window's last event,
and how many events were stamped in that microsecond. An event stamped in the very cycle of the window wrap still belongs to
the old window.

Events travel through the pipeline in timestamp order, but each takes a
different time: between 38 and 758 clocks per convolution layer, plus any
queueing. The pooling stage therefore cannot close a window when the clock
says it is over. `maxpool_window` folds every arriving vertex into a running
element-wise maximum. It closes the window, passes the pooled vector to the
head and clears the maximum, when a notice is pending and one of three things
holds:

| cause | condition | when it happens |
|---|---|---|
| LAST (0) | the vertex carrying the notice's last timestamp has been merged | the normal case |
| LATER (1) | the next vertex waiting at the input is younger than that timestamp, or the window had no events | the window's last event was removed by the filter or lost to overflow while newer events are already on the way |
| DRAIN (2) | nothing stamped is left anywhere upstream (`pipe_empty`) | the last event was filtered and the pipeline is idle, or the window was empty |

Only LAST comes from the original scheme. LATER and DRAIN are added here. With
LAST alone, a window whose last event was dropped by the filter (about half of
all events are dropped) would never close. Because events arrive in timestamp
order, the three rules put every vertex into the window its timestamp belongs
to.

Several events can share the window's last microsecond: the AER handshake
takes about six clocks, and a microsecond is 200. The notice therefore also
carries `n_last`, the number of events stamped in that microsecond. The
pooling stage keeps the timestamp of the latest vertex it merged and a count
of merged vertices with that timestamp. LAST fires only when this pair equals
the notice's `(last_ts, n_last)`. That happens immediately if the vertices
were merged before the notice arrived. If one of those events was filtered
out, the count is never reached, and LATER or DRAIN closes the window instead.

An empty window still produces a prediction, from an all-zero vector. The GRU
therefore sees one step per 10 ms, whether or not anything was said.

## Event filter

`lif_filter` keeps a potential `v[c]` and a last-event time `t_last[c]` for
every channel. For an event at time `t` on channel `c`:

```
v[c] = max(0, v[c] - ((t - t_last[c]) >> DIV_FACTOR)) + W
t_last[c] = t
pass the event if v[c] >= theta[c], then v[c] = 0; otherwise drop it
```

The defaults are `DIV_FACTOR` = 8 (the potential leaks one unit per 256 µs)
and `W` = 32. The thresholds fall exponentially from 64 at channel 0 (highest
frequency, filtered hardest) to 32 at the last channel:
`theta_c = round(64 * 2^(-c/(C-1)))`. This is computed at elaboration in
integer arithmetic from a table of 16 constants `round(2^16 * 2^(-2^-(i+1)))`.
On the last channel the threshold equals the weight, so every event there
passes. The thresholds can be rewritten at run time. The filter takes one
event per clock and never stalls.

## Graph generation

`graph_gen` keeps the last timestamp of each channel. A new event on channel
`c` gets an edge from channel `c+d` for every `d` in `-R_C..R_C` with step
`SKIP` (`d ≠ 0`), provided that channel has had an event whose age is between
`RT_LOW` and `RT_HIGH` µs. The defaults are R_C = 10, SKIP = 1 and
0..5000 µs, which gives at most 20 neighbours, plus the vertex itself. Only the
newest event per channel can be a neighbour. The neighbour list is packed, in
increasing channel offset, into one job word with the channel and age of each
edge.

## Graph convolution (PointNetConv)

Each `graph_conv` computes, for the new vertex `i`:

```
x'_i[o] = max over j in {i} ∪ N(i) of ReLU( q( b[o] + Σ_k W[o][k] · v_j[k] ) )
v_j     = ( x_j , c_j − c_i , −min(128, (t_i − t_j) >> 6) )   (position part 0 for j = i)
```

Here `q()` is an arithmetic shift right by `SHIFT` = 7, saturated to int8. All
features are 8-bit two's complement. The first layer sees three input
features per vertex: channel number, timestamp bits 13..7, and polarity as ±64.
The other layers take the 72 features of the layer before.

**Feature memory.** A neighbour's features are the ones its event had when it
was processed by the same layer. Each layer therefore keeps, for each channel,
the input features of that channel's most recent vertex. They are stored as
72-bit words of nine features, 8 words per channel and 128 channel slots:
1024 × 72 bits. The size is independent of the channel count actually used.
A vertex writes its own slot while it reads only its neighbours' slots, which
are always on other channels, so the two never collide.

**Schedule.** Two output features are computed per clock, each a 74-wide dot
product. A vertex (self or neighbour) therefore takes 36 clocks. While one
vertex is computed, the next neighbour's 8 words are prefetched. An event with
`ne` neighbours takes `36·(ne+1)` clocks, plus one to hand over the result.
The layer can accept the next event `36·(ne+1)+2` clocks after the previous
one: 38 clocks (0.19 µs) with no neighbours, 758 clocks (3.79 µs) with 20.
This gives 5.3 MEv/s down to 264 kEv/s per layer.

## Back-pressure, buffers and overflow

A layer raises its READY (`in_ready`) only when it is idle. Each layer has a
two-entry buffer in front of it. A stage hands a vertex on only when the next
buffer has room, so a slow event stalls the stages above it, up to the graph
generator. Above the graph generator sits the burst FIFO (`FIFO_DEPTH` = 256
events). The sensor cannot be stalled: the timestamping handshake always
completes. If an event arrives at a full FIFO it is dropped, and `st_overflow`
counts it. Drops are rare at the sensor's measured rates, but they are
possible. The window rules above make sure a dropped event cannot hold up a
window.

## Network head

`kws_head` chains `mlp_layer` (72→72, ReLU), `mlp_layer` (72→72, ReLU),
`gru_cell` (72 hidden), and two `mlp_layer` outputs fed from the GRU state at
the same time: `NUM_CLASSES` = 7 scores, and one confidence value. The class
is the index of the largest score. Linear layers compute one output per clock.
The GRU computes one gate of one hidden unit per clock, with its input and
recurrent dot products side by side: 216 clocks for a step.

The GRU uses fixed point:

- The state `h` and candidate `n` are Q1.6 (64 = 1.0). The gates `r` and `z` are 0..64.
- The sigmoid is approximated by `clamp(v/4 + 0.5, 0, 1)`.
- The tanh is approximated by `clamp(v, −1, 1)`.
- The update is `h = ((64−z)·n + z·h) >> 6`.
- The state starts at 0 after reset.

From window close to `pred_valid` takes 374 clocks (1.87 µs). The head accepts
the next window while its later layers are still busy.

## Configuration

Weights, biases and thresholds are written over one bus, `cfg` (`kws_pkg::cfg_t`).
It has the fields `we`, `layer`, `kind`, `row`, `col` and a 32-bit `data` word:

| layer | id | K_WEIGHT (kind 0) | K_BIAS (kind 1) | K_THRESH (kind 2) |
|---|---|---|---|---|
| L_CONV1..4 | 0..3 | row = output, col = input element (features, then channel offset, then time offset), data[7:0] | row = output, data = 32-bit bias | – |
| L_MLP1, L_MLP2 | 4, 5 | row = output, col = input | row = output | – |
| L_GRU | 6 | row = gate·72 + unit (gate 0 r, 1 z, 2 n); col < 128: input weight, col ≥ 128: recurrent weight (col−128) | col 0: input bias, col 1: recurrent bias | – |
| L_CLS, L_CONF | 7, 8 | row = output, col = input | row = output | – |
| L_LIF | 9 | – | – | row = channel, data[15:0] = threshold |

The weight memories do not depend on reset. They can be loaded while `rst_n`
is low, so the first window already uses a complete model. Weights are not
changed during operation. Batch normalisation is folded into the convolution
weights and biases.

## Interface of `kws_top`

| port | dir | meaning |
|---|---|---|
| `aer_req`, `aer_addr[7:0]`, `aer_ack` | in/in/out | four-phase AER handshake from the sensor. `aer_addr = {channel[6:0], polarity}`. `aer_req` is synchronised by two flops. |
| `cfg` | in | configuration bus (above) |
| `pred_valid`, `pred_win`, `pred_class`, `pred_scores`, `pred_conf` | out | one pulse per window: window number, class, the 7 int8 scores, int8 confidence |
| `now_us` | out | microsecond counter |
| `st_events`, `st_passed`, `st_overflow`, `st_vertices` | out | counters: events stamped, events passed by the filter, events lost to overflow, vertices through the last layer |
| `pipe_empty` | out | no stamped event is still on its way to pooling |

The parameters are:

- Sensor and timing: `C` (channels, 64), `CLK_PER_US` (200), `WINDOW_US` (10000).
- Graph: `R_C` (10), `SKIP` (1), `RT_LOW`/`RT_HIGH` (0/5000).
- Filter: `DIV_FACTOR` (8), `LIF_W` (32), `TH_FIRST`/`TH_LAST` (64/32).
- Buffering and head: `FIFO_DEPTH` (256), `BUF_DEPTH` (2), `NUM_CLASSES` (7), `SHIFT` (7).

The defaults are the 64-channel parallel sensor setting.

## Capacity against the sensor configurations

The sensor can be built with 32, 64 or 128 channels, in cascade or parallel
form. The rates after filtering and the average edge counts below are the
published measurements for each setting. The capacity is 200 MHz divided by
this design's per-layer accept interval of `36·(E+1)+2` clocks.

| sensor | R_C / skip | max / avg rate after filter (kEv/s) | avg edges E | capacity at E (kEv/s) | capacity at 20 edges (kEv/s) |
|---|---|---|---|---|---|
| 32-cascade | 5 / 1 | 76.3 / 7.9 | 10.5 | 480 | 264 |
| 32-parallel | 5 / 1 | 92.9 / 18.7 | 9.1 | 550 | 264 |
| 64-cascade | 10 / 1 | 99.5 / 14.3 | 18.8 | 280 | 264 |
| 64-parallel | 10 / 1 | 147.7 / 36.3 | 17.6 | 298 | 264 |
| 128-cascade | 20 / 2 | 119.6 / 27.6 | 19.6 | 269 | 264 |
| 128-parallel | 20 / 2 | 258.8 / 43.7 | 18.1 | 291 | 264 |

Every setting stays below the worst-case capacity. The 64-channel settings
run at the default parameters. The others need `C`, `R_C` and `SKIP` set at
build time. The feature memories already hold 128 channels, and the
128-channel build is simulated end to end.

For comparison, the published hardware reaches 245 kEv/s (64-parallel) and
440 kEv/s (32-parallel), with a post-window latency of 25 µs on average and
35–42 µs at worst. This design has a shorter fixed overhead per event (see
below), so its figures at the same edge counts are somewhat better. Without
a backlog, the prediction follows the window end within a few microseconds.

## Departures from the published design, and own choices

- **Window closing:** the LATER and DRAIN rules, and the `n_last` count for a shared last microsecond, are additions (see above).
- **Thresholds:** the thresholds are exponential, 64 → 32, as in the table of selected configurations. The ablation text also names linear 48 → 16 as best. They can be rewritten at run time.
- **Convolution layers:** the number of layers (4), the width (72), the one-linear-layer φ, int8 features, shift-by-7 requantisation, the first-layer features and the time-offset scaling are own choices. They are consistent with a model of 59.84k parameters with 7 classes and a 72-unit GRU.
- **First-layer input:** the published first layer takes two position features (channel and time) plus polarity. Here they are the vertex's own channel, its timestamp bits 13..7, and polarity as ±64. The published wording ("mean neighbour position") leaves the exact encoding open, so this encoding is an own choice.
- **Convolution timing:** the per-vertex cost is 36 clocks, as published (two 72-feature products in parallel). The fixed overhead per event is about 2 clocks here. The published accept interval of 0.47–4.07 µs implies about 58 clocks of extra overhead, so this design's accept interval is shorter: 0.19–3.79 µs.
- **Head:** the GRU fixed-point format and activation approximations, the class count (7), and ReLU after the two hidden linear layers are own choices.
- **Buffers and interfaces:** the FIFO and buffer depths, overflow by dropping, the AER handshake and address layout, the 32-bit timestamp and the configuration bus are own choices.
- **Outside the RTL:** the auditory sensor and the audio codec that feeds it are not included. The design starts at the sensor's AER output.

## Verification

Each module has a self-checking testbench in `tb/`. It compares the design
against an independent integer model, `tb/kws_ref_pkg.sv`, which uses plain
loops and no RTL functions. Each testbench prints
`TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | ordering, full/empty, overflow pulse, random push/pop |
| `tb_timestamp_gen` | handshake, stamps against a cycle-exact model, window notices (last timestamp and its event count) incl. empty windows and the wrap cycle |
| `tb_lif_filter` | every decision against the algorithm, reset thresholds, threshold writes |
| `tb_graph_gen` | neighbour lists for two radius/skip/time settings, full 20-neighbour sets, back-pressure |
| `tb_graph_conv` | outputs of a 72-feature layer and of a first (3-feature) layer against the model; latency `36(ne+1)+1` |
| `tb_maxpool_window` | pooled vectors and all three close causes in directed scenarios, incl. several events in the last microsecond |
| `tb_mlp_layer`, `tb_gru_cell`, `tb_kws_head` | outputs against the model; head latency ≤ 2.11 µs (422 clocks) |
| `tb_kws_top` | whole pipeline with 200 µs windows and a 16-entry FIFO; see below |
| `tb_kws_top_c128` | the same for the largest sensor setting: 128 channels, radius 20, skip 2 |
| `tb_kws_top_full` | the same with every parameter at its default: four 10 ms windows, about 8.5 M clocks |

The two end-to-end tests first load random weights over `cfg`. A sensor model
then sends four kinds of window in turn:

- bursts of about one event per microsecond, faster than the layers can take;
- moderate traffic;
- silence;
- moderate traffic again.

The reference model follows the design:

- it checks every filter decision;
- it runs every event that enters the FIFO through the reference graph, the four layers and the pooling;
- it checks every prediction (class, scores, confidence, window number) against the reference head.

The tests also count these mechanisms and fail if any of them never occurs:

- events removed by the filter;
- FIFO back-pressure;
- buffer back-pressure (READY low);
- FIFO overflow;
- windows closed by each of the three causes;
- empty windows.

An empty window must be answered within 2.11 µs. The last window of each
run ends with an event 1 µs before its end and has no backlog. It must be
predicted within 35 µs of the window end. Measured values are 2.4–5.3 µs:
the tail event's pass through the four layers plus the 1.87 µs of the head.

To run one, for example:

```
verilator --binary --timing --top-module tb_kws_top -y rtl -y tb +libext+.sv \
  rtl/kws_pkg.sv tb/kws_ref_pkg.sv tb/tb_kws_top.sv
./obj_dir/Vtb_kws_top
```

The packages are listed explicitly and the modules are found by name in
`rtl/` and `tb/`. The full-size test takes about 40 s of wall-clock time.

## Limits

- The weights in the tests are random. No trained model is included, so accuracy is not measured here.
- The class count and hidden sizes are parameters only where noted. The graph layers are fixed at 72 features.
- The channel count is a build-time parameter, not a run-time setting.
