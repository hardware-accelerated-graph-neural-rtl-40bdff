# Event-graph neural network accelerator for cochlea audio

An artificial cochlea turns sound into a sparse stream of events. Each event is
a pulse on one of 700 frequency channels at a given moment. This design
classifies such streams, and spots keywords in them, without first collecting
the events into frames. Every event becomes a vertex of a graph the moment it
arrives: it is linked to recent events on nearby channels, and four graph
convolutions compute its embedding. Two pooling stages then summarise those
embeddings:

* **Classification.** A global average over a whole recording feeds a small MLP.
* **Keyword spotting.** An element-wise maximum over every 10 ms window feeds a
  GRU (gated recurrent unit), which gives a class and a confidence once per
  window.

The arithmetic is integer-only: 8-bit activations, 8-bit weights and 32-bit
accumulators. All memories are on-chip arrays that map onto dual-port block RAM.

The architecture follows a published SoC-FPGA design for event-based audio
classification and keyword spotting, evaluated on the Spiking Heidelberg
Digits (SHD) and Spiking Speech Commands (SSC) datasets. That work gives the
structure, the graph parameters and the cycle budgets. The widths, number
formats, handshakes and memory layouts are choices made for this RTL. They
are listed in [Departures and open choices](#departures-and-open-choices).

```
 ev_* ──► event_fifo ──► feature_extractor ─────────────┬──► global_avg_pool ──► mlp_head ──► cls_*
                         graph_generator                │      (per sample)                  (avg_* also out)
                         graph_conv ×4 (2→64→64→64→64)  └──► graph_max_pool ──► gru_head ──► kws_*
 wload ─────────────── (weights of every layer) ─────────      (per 10 ms)
```

## 1. The event graph (`graph_generator`)

**Context memory.** This holds one timestamp per channel: the time of the most
recent event on that channel. Each new event `(ch, t)` becomes one vertex.

**Skip-step search.** The new event is compared with 21 fixed candidates:
the channels `ch + k·10` for `k = −10 … 10`. That is a channel radius of 100
with a step of 10. The step keeps the search short and still reaches far
across the spectrum.

**Temporal search.** A candidate becomes an edge when three things hold:
* its channel exists;
* the channel has seen an event since the graph was last cleared;
* `t − t_candidate ≤ 20 ms`.

**Timing.** The two read ports of the memory serve two candidates per clock,
so the search takes 11 cycles.

**Vertex feature.** The vertex's input feature is the mean channel and mean
timestamp of its neighbours. Two 32-cycle sequential dividers compute it.
The mean is then coded as two bytes:
* `q_ch = ch_avg·255/699`
* `q_t = t_avg >> 12`, where timestamps are 20-bit microseconds.

If an event has no neighbours, its own position is used instead.

**Write-back and throughput.** The generator then writes the new timestamp.
It handles one event every 48 cycles, which is well below the convolution
bottleneck.

**Clearing the graph.** An event flagged `last` closes a recording. It clears
all the channel valid bits in one cycle and is not stored, so the next
recording starts on an empty graph.

**Output.** Each event leaves the generator with:
* its 21-entry edge list (valid bit and time difference per candidate);
* its 2-byte feature.

## 2. Graph convolution (`graph_conv`, `vec_mul`)

Each layer is a PointNet-style convolution. Batch normalisation is folded
into the weights and biases:

```
X'_i = max over v in {i} ∪ N(i) of  clamp( ((W·[X_v, q_dch(v), q_dt(v)] + b) · M) >> S , 0, 255 )
```

**Inputs to each dot product.**
* `X_v` is the neighbour's feature at the previous layer. It is read from a
  per-channel feature memory: one word of `IN_F` bytes per channel, holding
  the most recent vertex on that channel.
* `q_dch` and `q_dt` are the positional offsets, rescaled to 0…255 before
  quantisation:
  * channel offset: `(dch + 100)·255/200`. This is a constant per candidate
    position.
  * time offset: `t_diff·255/20 ms`, saturating at 255.
* The self-loop `v = i` uses the zero offset. Its codes are 127 and 0.

**Why the maximum can be taken after requantisation.** The requantiser is
monotonic, and clamping at 0 is exactly the ReLU. So the running maximum is
kept on requantised bytes, and no 32-bit maxima need to be stored.

**The datapath — the part that sets the speed of the whole design.**
* The feature memory and the weight memory both have two read ports.
* Each clock reads two vertices (a *pair*) and two weight rows.
* Four `vec_mul` units form the 2×2 dot products. Each unit is a single-cycle
  signed dot product over `IN_F+2` terms.
* The self-loop plus 21 candidates gives 22 vectors, or 11 pairs.
* Every pair is swept over the `OUT_F/2` row pairs.

One event therefore costs `11·OUT_F/2` issue cycles: 352 for 64 outputs.
Four more cycles drain the pipeline:

```
issue (p, o) ─► memory read ─► 4 × vec_mul ─► +bias, requantise, ReLU, running max
```

Invalid candidates are still swept but masked, so every event costs the
same. At 200 MHz that is 568 k events/s per layer. The layer then:
* stores the event's *input* feature at its channel, for later events;
* hands the result to an output register, and starts the next event while
  the result waits.

The four layers of `feature_extractor` are chained by valid/ready handshakes.
Each works on a different event at the same time.

| Quantity (base model, 200 MHz)            | this RTL (measured)       | published   |
|--------------------------------------------|---------------------------|-------------|
| cycles per event, one 64-output layer      | 352 + 4                   | 352         |
| stream rate                                | 356 cycles → 562 k ev/s   | 555 k ev/s  |
| one event through generator + 4 layers     | 1442 cycles = 7.21 µs     | 8.07 µs     |
| tiny model (8-16-32-64), one event         | 694 cycles = 3.47 µs      | 4.01 µs     |
| KWS model (72-72-72-72), one event         | 1618 cycles = 8.09 µs     | 8.48 µs     |
| KWS model, stream rate                     | 400 cycles → 500 k ev/s   | not given   |
| last event → class, MLP head in logic      | 1559 cycles = 7.79 µs     | 8.45 µs     |
| KWS window close → KWS output              | 245 cycles = 1.23 µs      | 2.05 µs     |

## 3. Number formats

| Signal                          | Format                                                        |
|---------------------------------|---------------------------------------------------------------|
| Activations, features, pools    | unsigned 8-bit                                                |
| Weights                         | 8-bit code `w`, value `w − 128`                               |
| Biases, dot products            | signed 32-bit                                                 |
| Requantisation                  | `(acc · M) >>> S`, then clamp                                 |
| GRU gate pre-activations        | signed 16-bit Q7.8 (saturating adds)                          |
| Sigmoid output                  | Q0.8 (0…255 ≙ 0…~1)                                           |
| tanh output, GRU hidden state   | signed Q0.7                                                   |
| Activation table index          | Q3.4, range −8…+8                                             |

The layer width is `IN_F+2`. The multiply `M` and shift `S` are parameters
of each unit (`REQ_*`).

**Activation tables.** `sigmoid_lut` and `tanh_lut` each have 256 entries.
They are computed at elaboration by a constant function. The index is the
two's-complement code `c`, with `x = c/16`:
* sigmoid: `min(255, round(256/(1+e^−x)))`
* tanh: `clamp(round(128·tanh x), −127, 127)`

## 4. Classification path (`global_avg_pool`, `mlp_head`)

**Pooling.** `global_avg_pool` adds every embedding of a recording into 64
accumulators and counts the events. After the `last` event it divides once:
a 32-cycle divider computes `2^24/count`, and one multiply per feature forms
the mean. The result is rounded and within one code of the exact quotient.
The pooled vector waits on `avg_feat` for `mlp_head`.

**The MLP head.**
* Layers: 64 → 64 with ReLU, then → 20 class scores (SHD: ten digits, two
  languages).
* Engine: `mv_engine` — one weight memory with two `vec_mul` units, two rows
  per clock.
* Output: the argmax of the raw scores. Softmax is left out because it does
  not change the argmax.
* Timing: the head answers `ceil(H/2)+ceil(C/2)+8` cycles after taking the
  vector.

The `avg_*` outputs are there for a classifier running in software instead.

## 5. Keyword-spotting path (`graph_max_pool`, `gru_head`)

**Max pooling.** `graph_max_pool` keeps an element-wise maximum of all
embeddings in the current window. Windows are `WINDOW_CYCLES` clocks long:
2,000,000 = 10 ms at 200 MHz. On the window's last cycle the unit:
* hands the vector to the head;
* clears to zero (embeddings are post-ReLU);
* stalls its input for that one cycle.

An empty window yields a zero vector, so the recurrent state still advances.

**The GRU head.** `gru_head` runs its layers one after another on one shared
`mv_engine`, under a state machine:

| state | work                                                         | rows  |
|-------|--------------------------------------------------------------|-------|
| 1     | STEM layer 1: `x1 = ReLU(W1 f + b1)`                         | H     |
| 2     | STEM layer 2: `x2 = ReLU(W2 x1 + b2)`                        | H     |
| 3     | GRU input part: `gx = W_{r,z,n} x2 + b`                      | 3H    |
| gates | `r, z = σ(gx + gh)`, `n = tanh(gx_n + r ⊙ gh_n)`, `h = z ⊙ n + (1−z) ⊙ h` | two units/clock |
| 4     | class scores `W_cls h + b`                                   | C     |
| 5     | confidence `σ(w_conf·h + b)`                                 | 1     |
| 0     | hidden part for the next window: `gh = U_{r,z,n} h + b_h`    | 3H    |

**State 0.** This state runs once after reset, and again after `h_clear`,
so the first window sees `gh` for `h = 0`.

**Output.** Class, confidence and scores are pulsed at the end of state 5.
State 0 then runs before the head accepts the next window.

**The reset gate.** Because `U h + b_h` is computed in advance, the reset gate
can only scale the whole hidden part of the candidate:
`r ⊙ (U_n h + b_hn)`. This is the common GRU formulation, not
`U_n (r ⊙ h)`. A model must be trained that way.

## 6. Loading weights (`wload`)

All memories share one load port, `wload = {valid, sel[3:0], row[9:0], col[7:0], data[31:0]}`.
In a row of length `L`:
* `col < L` writes the weight byte `data[7:0]`;
* `col == L` writes the 32-bit bias.

| sel | memory                      | rows                                     | L                   |
|-----|-----------------------------|------------------------------------------|---------------------|
| 0–3 | convolution layer 1–4       | `OUT_F`                                  | `IN_F + 2`          |
| 4   | classification MLP          | 0…H−1 layer 1, H…H+C−1 layer 2           | `max(F, H)`         |
| 5   | KWS head                    | W1 0, W2 H, W_rzn 2H, U_rzn 5H, W_cls 8H, w_conf 8H+C | `max(F, H)` |

In the convolution rows, the last two weights belong to `q_dch` and `q_dt`.
In the KWS rows, the gate order inside W_rzn and U_rzn is r, z, n.

## 7. Interfaces

* **Events.** `ev_valid/ev_ready/ev_data` carry `{last, ch[9:0], t[19:0]}`,
  with `t` in µs.
* **Event FIFO.** It is 64 entries deep and absorbs bursts. `ev_ready` drops
  when it is full.
* **Classification.** `cls_valid` pulses with `cls_class` and `cls_scores`.
* **Keyword spotting.** `kws_valid` pulses once per window with `kws_class`,
  `kws_conf` and `kws_scores`. `kws_h_clear` starts a new stream.
* **Timestamps.** These wrap after 2^20 µs. Only differences of at most
  20 ms matter for the edges; `q_t` wraps with them.
* **Reset.** It is asynchronous and active low. Memories are not cleared: the
  channel valid bits and the masks make stale contents unreachable.

## 8. Sizes

The top-level defaults are:
* the base classification model (four 64-feature layers, 64-unit MLP,
  20 classes);
* a KWS head with a 72-unit STEM and GRU and 20 classes.

| Configuration | Setting |
|---------------|---------|
| Published KWS model | `C1..C4 = 72`, making every layer 72 wide |
| Tiny and small models (8-16-32-64, 16-32-64-64) | set `C1..C4`, or load them zero-padded into the default |
| Larger models (128 or 256 wide) | raise `C1..C4`; per-event cost grows as `11·C/2` |
| SSC-35 (35 classes) | `NCLS` / `KWS_NCLS = 35` |

## Departures and open choices

* **One extractor feeds both pools.** The published work evaluates
  classification (64 features) and keyword spotting (72 features) as two
  separately trained models. Here one extractor drives both heads. A vector
  leaves only when both pools can take it.
* **Positional normalisation.** The description says to map channel offsets
  into (0, 1) by "adding the radius and multiplying by 2/radius". That would
  span (0, 4). This RTL maps them onto the stated (0, 1) range, coded 0…255.
* **GRU candidate state.** The RTL uses `r ⊙ (U_n h + b_hn)`, as required by
  computing the hidden part in state 0. The published equation instead writes
  `U_n (r ⊙ h)`. The update `h = z ⊙ n + (1 − z) ⊙ h` follows the published
  form.
* **Class outputs are raw scores plus argmax.** No softmax is applied, and
  the confidence sigmoid comes from a table. The published KWS head
  requantises after every product. Here the class-score products stay 32-bit
  accumulators, which gives the same argmax. All other products in the head
  are requantised.
* **Unpublished details chosen here.** None of the following are published:
  * all bit widths and number formats;
  * requantisation constants (parameters, one per unit);
  * the vertex feature codes, and using the event's own position when it has
    no neighbours;
  * the `last`-flag clearing;
  * FIFO depth;
  * the load-port memory map;
  * timing windows by clock cycles rather than by event timestamps.
* **Not built.** The following are not part of this RTL:
  * the cochlea itself (events come in on `ev_*`);
  * the host software that replays events and loads weights;
  * the floating-point classifier on the host CPU. The pooled vector is
    exported on `avg_*` for it.

## Verification

Each testbench in `tb/` checks its unit against an independent integer model
written in the testbench, and prints `TB_RESULT checks=N failures=M`:

| testbench                 | what it checks |
|---------------------------|----------------|
| `tb_event_fifo`           | order, fill and back-pressure against a queue model |
| `tb_vec_mul`              | 500 random signed/unsigned dot products, hold when disabled |
| `tb_graph_generator`      | edge lists, mean-position codes, `last` clearing, ≤ 48 cycles per event |
| `tb_graph_conv`           | full layer model with random edges, 11·OUT/2 + ≤5 cycles per event |
| `tb_feature_extractor`    | generator + 4 layers, streaming with back-pressure, single-event latency |
| `tb_global_avg_pool`      | mean within one code, counts, divider latency |
| `tb_graph_max_pool`       | window maxima, exact window length, empty windows, held timer |
| `tb_mlp_head`             | scores, argmax and latency against a model |
| `tb_gru_head`             | 60 windows of the full recurrence, using tables recomputed with `$exp`/`$tanh`, `h_clear` |
| `tb_event_gnn_top`        | reduced-size end-to-end run counting FIFO back-pressure, edges, extraction, pooling, classification, KWS windows and `h_clear` |
| `tb_event_gnn_top_full`   | default parameters: latency, stream rate, class and KWS outputs against the published figures |
| `tb_event_gnn_top_tiny`   | tiny model configuration: latency against the published 4.01 µs |
| `tb_event_gnn_top_kws`    | keyword-spotting model configuration (72-wide convolutions): latency against the published 8.48 µs and 2.05 µs |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/gnn_pkg.sv tb/tb_gru_head.sv \
          --top-module tb_gru_head -o sim && ./obj_dir/sim
```

The full-size test simulates about 2.1 million cycles, one whole 10 ms
window, in roughly ten seconds.

**Limits of the testing.**
* The weights are random, not trained, so the tests show that the arithmetic
  matches the integer model. They do not show accuracy on real recordings.
* The requantisation constants must come from the quantisation of a trained
  model.
