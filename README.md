# DendroNN sequence-detection accelerator in SystemVerilog

A DendroNN hidden unit works like a dendritic branch that detects one ordered
spike sequence. The unit has N_S "spines". Each spine listens to exactly one
input channel through a binary connection, and consecutive spines are separated
by a fixed interval. The unit fires when spine 0 sees a spike, spine 1 sees one
exactly Δt0 time bins later, and spine 2 sees one exactly Δt1 bins after that.
Anything out of order or mistimed is ignored. Several partial matches of one
unit can be in progress at the same time. A linear output layer with int8
weights turns the sparse hidden spikes into a class decision.

This RTL implements the three-spine, exact-timing version (N_S = 3, acceptance
window ΔT = 0), which is the configuration evaluated on the SHD keyword data.
A parameter also builds the two-spine version. The hidden layer needs no multiply-accumulate and no per-time-step sweep over
unit states. Work happens only when an input event arrives: a few bit reads and
bit writes in a unit-state memory. The one exception is a memory-clearing pass
once every D time bins.

## How a unit remembers what it expects: the time wheel

Without a wheel, a unit would have to count down "spine 1 is due in k bins" at
every time step. Instead, the design keeps a global wheel pointer `p` that
advances once per time bin, `p <- (p + 1) mod D`, with D = 256. Expectations
are written at absolute wheel positions:

* **Schedule.** An expectation Δt bins in the future sets slot
  `q = (p + Δt) mod D`.
* **Due test.** An expectation is due when slot `p` is set.

When a sample is longer than D bins, one slot index stands for several absolute
times. To tell them apart, every slot holds **two bits, one per wheel
generation**. A phase bit `g` says which of the two bit-planes is the current
turn of the wheel:

* **Due test.** An expectation is due if bit `S[u][p]` in plane `g` is set.
* **Schedule.** If `p + Δt < D`, the schedule goes into plane `g`. Otherwise
  the addition overflowed, and it goes into plane `~g` (the next turn).
* **Wrap.** When `p` wraps from D-1 to 0, `g` toggles. The plane that was
  current until then now holds only expired expectations. It is cleared, and it
  then collects the schedules for the turn after next.

Each unit has two stages of this state. Stage 1 means "expect spine 1" and
stage 2 means "expect spine 2". Each stage is D slots × 2 planes = 512 bits.

### Unit-state memory row layout

Each stage of a unit is stored in one memory row of `DT_W + 2·D` = 520 bits.
Both the interval and the slot bits are read with one access:

| bits | content |
|------|---------|
| `[DT_W-1:0]` | interval of the *next* hop: Δt0 in the stage-1 row, Δt1 in the stage-2 row |
| `DT_W + 2·x + b` | slot x, plane b |

The rows of unit `u` are `2·(u / N_UE)` (stage 1) and `2·(u / N_UE) + 1`
(stage 2), in the memory bank `u mod N_UE`. The memory has one read port and
one write port with a per-bit write mask. A schedule or a consume changes one
bit. The clear pass writes zeros into one plane of a whole row in one cycle.

### The three micro-operations

For each target ⟨u, s⟩ it receives, an update engine does one of three things:

| spine s | action | cycles |
|---|---|---|
| 0 | read the stage-1 row, then set slot `(p + Δt0) mod D` in plane g or ~g | 2 |
| 1 | read the stage-1 row. If slot p of plane g is set: clear it, read the stage-2 row, and schedule Δt1 the same way | 3 on a match, 2 otherwise |
| 2 | read the stage-2 row. If due: clear it and emit a hidden spike for unit u | 2, plus the wait for the merge |

Because the overflow test is used, Δt = 0 is allowed. A spine-0 and a spine-1
event in the same bin then chain, in the order in which they are processed.

With `refr_en` set, each unit spikes at most once per sample (a refractory
period longer than the sample). Each engine keeps one "fired" bit per unit. A
later detection is still consumed and counted, but it sends no spike.

### The two-spine variant

Setting `N_S = 2` on the top builds the smaller, two-spine configuration. Each
unit then has one stage and one interval (Δt0), and one memory row. Spine 1
becomes the final spine: it checks stage 1 and emits the spike. Everything
else is unchanged. The default is `N_S = 3`.

### Clearing and sample start

The plane clear is a sweep over all 1500 rows of every bank, one masked write
per row per cycle, with the four banks in parallel. The sweep runs right after
the wrap, before the first event of the new bin is processed. It costs 1500
cycles once every 256 bins. `sample_start` runs the same sweep with both planes
masked. It also resets `p`, `g`, the fired bits and all statistics, so that
samples are independent.

## Data path

```
events (ts, addr) ──► aer_binner ──(t,c)──► cr_router ──4 lanes ⟨u,s⟩──► update_engine ×4 ◄─► usm_bank ×4
                          │ tick_req/ack                                         │ spikes
                          ▼                                                      ▼
                      time_wheel ── p, g, clear sweep ──► all engines       spike_merge
                                                                                 │ hidden unit u
                                                                                 ▼
                         output_classifier: out_weight_sram → output_neuron_logic → spike_counter
                                              → argmax (counts) / argmax (potentials) → decision
```

**`aer_binner`.** Timestamps are in µs from the sample start. A bin is
`BIN_LEN` = 8000 µs (8 ms). When an event lies beyond the current bin, the
binner first asks the wheel for one tick for each bin boundary crossed, and only
then passes the event on as (t, c). An address of `N_IN` or more is dropped and
counted.

**`time_wheel`.** Grants a tick only when the router and all engines are idle.
This way every event of a bin sees the same `p`. The wheel also orders the
clear sweeps.

**`cr_router`.** The connectivity is stored as adjacency lists:

* `chan_ptr[c]` to `chan_ptr[c+1]-1` are the `conn_list` words of channel c.
* Each word carries four targets `{valid, unit[11:0], spine[1:0]}`, one per lane.
* Lane i holds only units of bank i. This way the four engines never touch the
  same unit, and a word needs no arbitration.
* An event costs 2 cycles for the two pointers, then 2 cycles per word, plus any
  stall while an engine is busy. A lane that is done waits for the others before
  the next word is read.

**`update_engine` / `usm_bank`.** One pair per lane, as described above.

**`spike_merge`.** Merges the four engines' spikes with a round-robin arbiter.

**`output_classifier`.** A hidden spike reads its unit's weight row, 20 int8
values. One cycle later the row is added to the 20 output neurons. The neurons
have 8-bit saturating state and run in one of two modes:

* **`mode = 1`, spike-count decision.** A neuron that reaches `thr` spikes and
  has `thr` subtracted. `spike_counter` counts these spikes per class, and the
  decision is the class with the most spikes.
* **`mode = 0`, potential decision.** The neurons are plain integrators, and the
  decision is the class with the largest potential.

Both argmax units take the lowest index on a tie. Potentials and counts are
also output ports, for use as regression outputs.

## Using the top level (`dendronn_top`)

**1. Configure, while no sample runs.** Write through the configuration port,
selected with `cfg_sel`:

| `cfg_sel` | `cfg_addr` | `cfg_wdata` |
|---|---|---|
| `CFG_CHAN_PTR` | channel c, 0..N_IN | word index of the list start. Entry N_IN is the end of the last list |
| `CFG_CONN` | word index | four targets, lane i in bits `[15i+14:15i]` |
| `CFG_USM_DT` | `{unit, stage}`: stage 0 = Δt0, stage 1 = Δt1 | the interval in bits `[7:0]` |
| `CFG_OUT_W` | unit | 20 int8 weights, class j in bits `[8j+7:8j]` |

**2. Run a sample.**

1. Pulse `sample_start`.
2. Stream the events, with timestamps in non-decreasing order, over
   `ev_valid`/`ev_ready`. Flag the last event with `ev_last`. Events may be
   offered at once; they are held until the start-of-sample clear is done.
3. When everything has drained, `decision_valid` rises, `decision`, `u[]` and
   `cnt[]` hold the result, and `busy` falls.

The `hs_valid`/`hs_unit` outputs show the hidden spikes. The `stats` port
counts, per sample:

* ticks and wraps;
* clear cycles;
* router words and lane stalls;
* spine-0 schedules, including those that went into the next generation;
* spine-1 and spine-2 matches and refractory suppressions;
* merge conflicts;
* hidden spikes and output spikes;
* dropped events.

Default sizes:

| parameter | value | meaning |
|---|---|---|
| `N_UNITS` | 3000 | hidden units (the SHD network) |
| `N_UE` | 4 | engines and banks |
| `D` | 256 | wheel slots |
| `DT_W` | 8 | interval width |
| `N_IN` | 1024 | input channels |
| `CR_DEPTH` | 4096 | list words |
| `N_CLASSES` | 20 | classes |
| `ACC_W` | 8 | output-neuron state width |
| `N_S` | 3 | spines per unit (2 or 3) |
| `CNT_W` | 16 | spike-counter width |

Storage:

* unit-state memory: 4 × 1500 rows × 520 bits ≈ 3.1 Mbit;
* adjacency list: 4096 × 60 bits;
* weights: 3000 × 160 bits.

## What follows the paper's design and what is this implementation's own

**Taken from the published description:**

* the block structure: AER binning, the connectivity router with per-channel
  lists and four targets per word, four update engines, the unit-state memory
  and the output layer with both decision modes;
* the two-generation packed time wheel: pointer update, due test, overflow-based
  choice of generation, phase toggle and clearing of the reused plane;
* the three micro-operations and the refractory option;
* D = 256 with 8-bit intervals;
* 3000 units, 8-bit output weights and 8-bit output-neuron state;
* 8 ms bins.

**This implementation's own choices:**

* **Timing.** The original chip is clockless, built from asynchronous pipeline
  stages. Here everything runs on one clock with valid/ready handshakes, so no
  latency or energy figure of the original applies.
* **Clearing.** The plane clear is done as a stalling sweep right after each
  wrap, plus a full clear at sample start.
* **Memory organisation.** The lane-per-bank packing of list words, the word
  and row layouts, and the configuration port are this design's.
* **Sizes.**
  * `N_IN` = 1024 is assumed. The network uses 100 downsampled channels times an
    unstated number of slices.
  * 20 classes is assumed, from SHD.
  * `CR_DEPTH` = 4096 leaves room for 9000 targets when the lanes are reasonably
    balanced.
* **Output weights.** Weights are stored dense. The trained network prunes
  70 % of them, which saves memory in the original but not here.
* **Bin length.** The hardware evaluation also quotes 1 ms per time step for
  SHD. `BIN_LEN` is a parameter, so both readings can be built.
* **Two-spine build.** The original evaluates a two-spine configuration but
  describes only the three-spine datapath. The `N_S = 2` engine is this
  design's reduction of it to one stage.
* **Adjacency range.** One figure prints the list range as `(ptr[c], ptr[c+1]]`
  while the text uses `[ptr[c], ptr[c+1])`. The text's half-open range is used.

**Not built:**

* the event sensor itself;
* the asynchronous handshake cells;
* units with more than three spines, mixed spine counts, or a non-zero
  acceptance window.

The NeuroMorse network mixes 2 to 5 spines and uses ΔT = 2 and 32-bit weights.
The sequential-MNIST networks use 5 spines. Neither maps onto this datapath.
The SHD network does.

## Verification

Every block has a self-checking testbench in `tb/` that compares against a
model written independently of the RTL:

* `tb_aer_binner`: boundary cases of binning, multi-bin gaps, drops,
  back-pressure.
* `tb_time_wheel`: pointer, phase and clear orders over several wraps.
* `tb_cr_router`: random lists, including empty channels, with lane
  back-pressure.
* `tb_usm_bank`: masked writes.
* `tb_update_engine`: random targets against a model that keeps absolute due
  times instead of wheel slots, D = 16, several wraps.
* `tb_spike_merge`: ordering and fairness.
* `tb_out_weight_sram`, `tb_output_neuron_logic` (saturation,
  threshold-and-subtract), `tb_spike_counter` (saturation), `tb_argmax`
  (ties, signed and unsigned), `tb_output_classifier` (both modes, decision
  latency).

The two end-to-end tests share one body. They build a random network, program
it through the configuration port and run samples of random events. An
event-level reference model keeps absolute due times instead of wheel slots. The
tests compare:

* every hidden unit's spike count;
* all statistics counters;
* the final potentials, counts and decision.

The two tests differ in size:

* **`tb_dendronn_top`** runs at reduced size: 32 units, D = 16, 16 channels,
  4 classes, 8 samples of 60 bins. It requires each mechanism to occur: ticks,
  multi-bin gaps, wraps, clear sweeps, next-generation schedules, both match
  kinds, refractory suppression, lane stalls, merge conflicts, drops, empty
  channels, output spikes, saturation and both decision modes.
* **`tb_dendronn_full`** instantiates the top with its default parameters and
  runs two 300-bin samples, about 14 000 events each. It has the size of the
  SHD network (3000 three-spine units, 20 classes, 8 ms bins) but uses random
  events and a random network, not recorded speech or a trained model.

`tb_dendronn_ns2` is the reduced end-to-end test built with `N_S = 2`.

`tb_dendronn_patterns` plays hand-written event patterns through the whole chip
at small size. Each case checks whether the unit fires:

| case | fires? |
|---|---|
| correct sequence | yes |
| middle spike one bin early | no |
| last spike one bin late | no |
| right channels in the wrong order | no |
| correct sequence among distractors | yes |
| two overlapping sequences | yes, both, or only one with the refractory bit |
| sequence crossing the wheel wrap | yes |
| expectation met one full wheel turn late | no |
| zero-interval unit, three events in order within one bin | yes |
| zero-interval unit, three events in reverse order within one bin | no |

The end-to-end model assumes intervals of at least one bin. With Δt = 0, the
outcome within one bin depends on the processing order, which the block-level
engine test covers.

Concurrent assertions in the RTL guard the rules the blocks rely on:

* a tick is granted only on request;
* a router lane carries only units of its own bank;
* router targets and engine spikes stay offered until they are taken;
* every event reaches the router with a bin index equal to the wheel pointer.

They are active in every simulation run with `--assert`.

To run any test with plain Verilator (two-state, so all state is reset or
initialised):

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/dendronn_pkg.sv tb/tb_dendronn_top.sv --top-module tb_dendronn_top
./obj_dir/Vtb_dendronn_top
```

Each test ends with `TB_RESULT checks=<n> failures=<m>`.
