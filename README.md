# Stall-free dataflow accelerator for graph-based point cloud networks

A particle detector's trigger has to decide, within a few microseconds and for millions
of events per second, which events to keep. One way to decide is to run a small graph
neural network over the detector hits, which takes the hits as a point cloud, and then
cluster them. This RTL implements such a network as one deep pipeline. The pipeline
never stalls, so its timing is fixed: a new event enters every `ceil(NMAX/PAR)` cycles,
and each event leaves after the same number of cycles, whatever it contains.

The network and its hardware mapping follow the paper *"Real-Time Graph-based Point
Cloud Networks on FPGAs via Stall-Free Deep Pipelining"* (Neu et al.). The network has
dense layers, two GraVNetConv layers and a condensation-point clustering step at the
end. This RTL is an independent SystemVerilog implementation written from that
description; it is not the authors' code. Where the paper gives only a block's name or
its purpose, the details here are this design's own choices. They are listed in
[Departures and assumptions](#departures-and-assumptions).

The default configuration is the paper's version A: 8-bit data, at most
`NMAX = 32` points per event and `PAR = 2` points per cycle. That gives one event every
16 cycles, which is 18 M events/s at the 290 MHz the paper reports for this version; the
paper's requirement is 8 M events/s. In simulation an event takes 126 cycles from its
first input beat to its first output beat (0.43 µs at 290 MHz; the paper requires at
most 10 µs).

## 1. Events as fixed-size streams

A detector snapshot holds a variable number of hits. Dynamic sparse operators have
worst-case times that are hard to bound, so the design uses fixed-size events instead.
An event is compressed to exactly `NMAX` rows: the first `N` rows are real hits and the
rest are padding (zeros). Three things go with it:

* `X`: `NMAX x D_I` input features per point (`in_x`);
* `Y`: the original sensor number of each row (`in_y`). It is not used by the network.
  It waits in a FIFO and leaves next to the same row;
* `N`: the number of real points (`in_ctrl.nodes`).

If a snapshot has more than `NMAX` hits, the extra hits are dropped before the
accelerator. That upstream step is not part of this RTL.

Every stream in the design moves one **beat** per cycle. A beat holds `PAR` points side
by side, and an event is `BEATS = ceil(NMAX/PAR)` consecutive beats. Next to the data
travels a small control record, `pcn_pkg::ctrl_t`, with three fields:

| field   | meaning                                      |
|---------|----------------------------------------------|
| `valid` | the beat carries data                        |
| `last`  | the final beat of an event                   |
| `nodes` | `N` of the event, repeated on every beat     |

There is no `ready` signal. Every actor accepts a beat in every cycle, which is the
central rule of the architecture. Events may follow each other back to back or with gaps
of any length. Within an event the beats must be consecutive.

**Numbers.** Activations are signed `DATA_W`-bit values with `DATA_W/2` fractional bits
(Q4.4 at 8 bits). Weights are signed `DATA_W`-bit values with `DATA_W-2` fractional bits.
Squared distances are kept at full width (`2*DATA_W + clog2(D) + 1` bits).

## 2. The network

Widths are in points' features. Dense means a linear layer followed by ReLU; linear
means no activation.

| stage | operator | in -> out | input taken from |
|---|---|---|---|
| d0 | dense | 5 -> 5 | X (skip connection to c4) |
| d1 | dense | 5 -> 16 | X |
| s1, f1 | linear, linear | 16 -> 6 (S), 16 -> 8 (F) | d1 |
| g1 | GraVNetConv, K = 8 | S 6, F 8 -> 24 | s1, f1 |
| c1 | combine | 24 + 16 -> 40 | g1, d1 |
| d2, d3 | dense, dense | 40 -> 32 -> 16 | c1; d3 is a skip to c3 |
| d4 | dense | 16 -> 16 | d3 |
| s2, f2 | linear, linear | 16 -> 6, 16 -> 8 | d4 |
| g2 | GraVNetConv, K = 8 | -> 24 | s2, f2 |
| c2 | combine | 24 + 16 -> 40 | g2, d4 |
| d5, d6 | dense, dense | 40 -> 32 -> 16 | c2 |
| c3, c4 | combine, combine | 16 + 16, then + 5 -> 37 | d6, d3, d0 |
| d7 | dense | 37 -> 16 | c4 |
| ol | linear (output layer) | 16 -> 9 | d7 |
| cps | condensation point selection | 9 -> 9 + cluster | ol |

The paper publishes no trained weights. The dense layers therefore use a fixed
pseudo-random weight set: `pcn_pkg::wgt_fn(seed, o, i, DATA_W)` is a 32-bit integer hash
of (layer seed, output, input). About 40 % of the weights are zero, which matches the
paper's weight sparsity. The rest are uniform in [-0.5, 0.5). The biases are small and
uniform. The weights are elaboration-time constants, so a zero weight costs no hardware.
To load trained weights, replace `WEIGHTS` and `BIASES` in `pcn_dense.sv`; each is a
flat array indexed `o*D_IN + i`.

## 3. Why nothing stalls

Each operator does a fixed amount of work per beat, and each beat gets exactly one
cycle:

* **Dense / linear** (`pcn_dense`): each lane has a fully unrolled matrix-vector unit,
  so there are `PAR` of them. Latency is 2 cycles.
* **GraVNetConv** (`pcn_gravnet`): finds the nearest neighbours of `PAR` query points
  per cycle, each against all `NMAX` points. That is `PAR*NMAX` distances per cycle, so
  an `NMAX x NMAX` distance matrix takes exactly `BEATS` cycles.
* **Condensation** (`pcn_condensation`): each of its four internal stages takes exactly
  `BEATS` cycles per event.

A graph operator needs the whole event before it can start. Each graph element therefore
has a receive bank and at least one processing bank. When the last beat of an event
arrives, the whole event moves from the receive bank to the processing bank in a single
cycle (the hand-over). The receive bank then starts filling with the next event. Because
processing takes exactly as long as receiving, a bank is always free when it is needed.

Where two paths of the network meet (skip connections), they have different but fixed
latencies. The join (`pcn_combine`) keeps a FIFO on each input and emits the
concatenation as soon as both FIFOs hold a beat. The earlier stream simply waits, so
neither producer is ever held up. The FIFO depths (`4*BEATS+64` beats) cover the largest
latency difference in the network. A sticky `overflow` output and an assertion report a
FIFO that is too small; this is a design-time error and never happens in the shipped
configuration.

Forks (the paper's *multicast*) are plain fan-out of the stream wires. With no
back-pressure, a fork needs no logic.

## 4. GraVNetConv element (`pcn_gravnet`)

GraVNetConv builds a new k-nearest-neighbour graph for every event, in a learned space
`S` (6-D here). It then averages (here: max and sum) the features `F` of each point's
`K = 8` nearest neighbours, weighted by `exp(-d)` of their squared distance. The output
row of a point is `{P, max, sum}`, with `3*D_F = 24` features. `P` is the point's own
feature vector, taken from the third input stream; the top feeds `F` into it.

**Timeline of one query lane.** Take cycle `t` as the cycle in which query rows
`b*PAR .. b*PAR+PAR-1` are issued, and `L = clog2(ceil(NMAX/K))` (2 by default).

| cycle | step | module |
|---|---|---|
| t | read the query coordinates from the processing bank | - |
| t+1 | squared distances to all `NMAX` points (registered) | `pcn_ann` |
| t+2 .. t+2+L | hierarchical Top-K; the mask removes rows `>= N` | `pcn_topk` |
| t+3+L | `exp(-d)` weights, and gather of the `K` neighbour feature rows plus the query's own `P` row | `pcn_exp_weight` |
| t+4+L | messages `w*f` | `pcn_aggregate` |
| t+5+L | max reduce and saturating sum reduce | `pcn_aggregate` |
| t+6+L | output register `{P, max, sum}` | - |

**Hierarchical Top-K.** The distance row is cut into groups of `K`, and each group is
rank-sorted. A rank sort gives each element the slot equal to the number of elements
with a smaller key; the key is `{absent, distance, index}`. Then two sorted lists of
`K` are merged by the same rank sort over their `2K` elements, keeping the best `K`.
This repeats until one list is left. Every level is a register stage, so a new row
enters every cycle. Ties go to the lower index, and a point is its own nearest
neighbour. If fewer than `K` points exist, the extra slots are marked absent and take
no part in the max and the sum.

**The tricky part: two copies of the feature bank.** The gather step reads the
neighbours' features `2+L` cycles after the distance step has used the coordinates.
Meanwhile the next event may already have been handed over into the processing bank.
The feature banks (`F`, `P`) are therefore copied a second time, `2+L` cycles after the
hand-over. The gather step reads that delayed copy, so it always sees the same event as
the query it serves. This requires `BEATS > 2+L`, which holds for every configuration
in the paper. The paper describes these banks as BRAM ping-pong buffers. Here they are
registers, because each lane gathers `K` arbitrary rows per cycle, which needs more read
ports than a BRAM has.

**exp(-d).** The squared distance is quantised to steps of 1/8 and looked up in a
256-entry table. Entry `i` holds `round(255*exp(-i/8))`, and 255 stands for 1.0. The
table is computed at elaboration time (`pcn_pkg::exp_lut_fn`), and distances of 32 or
more give the last entry, 0. A message is `(w*f) >>> 8`.

**Timing.** The first output beat of an event appears `7+L` cycles (9 by default) after
its last input beat. The beats of an event leave on consecutive cycles.

## 5. Condensation point selection element (`pcn_condensation`)

Object condensation trains each point to predict a condensation strength `beta` and a
position in a clustering space. At inference time the greedy rule is:

1. Take the point with the highest `beta` that is above `t_beta` and not yet claimed.
   It becomes a condensation point, the seed of a cluster.
2. The seed claims every unclaimed point closer than `t_d`.
3. Repeat until no candidate is left. Unclaimed points are noise.

Here output feature 0 is `beta` and features 1..`CC_DIM` (`CC_DIM = 2`) are the
clustering coordinates. The thresholds are run-time inputs: `cfg_t_beta` (activation
format) and `cfg_t_d2` (the squared radius, with `DATA_W` fractional bits). Hold them
constant while events are in flight.

The greedy rule is sequential, and the element spreads it over four stages of exactly
`BEATS` cycles each, so up to four events are in flight at once:

* **Receive.** Writes `beta` and the coordinates into a bank; all features go into a
  FIFO (`pcn_stream_fifo`) that carries them to the emit stage.
* **Analyse.** Starts at the hand-over and does three things at the same time:
  * ANN + Isolation Selection: `pcn_ann` makes `PAR` rows of the distance matrix per
    cycle, and each row becomes a row of the isolation matrix,
    `adj[i][j] = (i, j < N) && d2 < cfg_t_d2`.
  * Candidate Selection: `beta > cfg_t_beta` for existing points.
  * Sort (`pcn_rank_sort`): orders the points as candidates first, then by decreasing
    `beta`, then by index. It computes `PAR` ranks per cycle, each against all `NMAX`
    keys.
* **Select** (`pcn_cluster_select`). Visits `PAR` sorted points per cycle, chained
  combinationally within the cycle. An uncovered candidate becomes a seed, and its
  isolation row is ORed into the covered set. Points it newly covers get its index as
  `cid`.
* **Emit.** Each point leaves with its 9 features unchanged, plus `is_cp`, `assigned`
  and `cid` (the row of its seed within the event).

Stage hand-overs happen in the same cycle as the previous stage's final write. Results
are taken from the next-state values, so nothing has to wait a cycle; this is what lets
four events share the element without extra copies. The first output beat appears
`2*BEATS + 3` cycles (35 by default) after the last input beat.

## 6. Timing summary (defaults)

| element | latency |
|---|---|
| dense / linear | 2 cycles |
| combine | 2 cycles after the later input |
| GraVNetConv | 9 cycles after the last input beat of the event |
| condensation | 35 cycles after the last input beat of the event |
| whole accelerator | 126 cycles, first input beat to first output beat |
| initiation interval | 16 cycles per event, every element |

The paper measures 203 cycles for its version A on hardware; its HLS pipelines are
deeper than the register cuts chosen here. The timing does not depend on `N` or on the
data. The end-to-end testbench checks that the latency is the same for every event.

## 7. Parameters and configurations

`pcn_top` parameters, with defaults from version A and the network figure: `NMAX=32`,
`PAR=2`, `DATA_W=8`, `D_I=5`, `D_1=16`, `D_2=32`, `D_S=6`, `D_F=8`, `D_O=9`, `K=8`,
`Y_W=16`.

The paper evaluates six versions:

| version | precision | N | PAR | parameters here |
|---|---|---|---|---|
| A | 8 bit | 32 | 2 | defaults |
| B | 16 bit | 32 | 2 | `DATA_W=16` |
| C | 8 bit | 64 | 2 | `NMAX=64` |
| D | 16 bit | 64 | 2 | `NMAX=64, DATA_W=16` |
| E | 8 bit | 128 | 1 | `NMAX=128, PAR=1` |
| F | 16 bit | 128 | 1 | `NMAX=128, PAR=1, DATA_W=16` |

Versions A (the defaults), D (`NMAX=64, DATA_W=16`) and E (`NMAX=128, PAR=1`) are
simulated end to end:

| version | event interval | latency, first beat in to first beat out | paper's compute latency on hardware |
|---|---|---|---|
| A | 16 cycles | 126 cycles | 203 cycles |
| D | 32 cycles | 208 cycles | 354 cycles |
| E | 128 cycles | 690 cycles | 940 cycles |

Versions B and C each change only one of the two sizes that version D changes, and
version F combines the sizes of D and E. The paper lists version F but reports no
implementation of it. At the paper's clock for version E (127 MHz), one event per 128
cycles is about 1 M events/s, which is below the 8 M events/s target; the paper finds
the same, because the distance work grows as `NMAX^2`.

`NMAX/K` should be a power of two for the Top-K tree, although other values are padded
correctly.

## Departures and assumptions

Followed from the paper:

* the network: layer order, sizes, `K` and the skip connections of its figure;
* the actor classes (point and graph processing elements, topology elements);
* the stall-free single-rate rule and the initiation interval `ceil(N/PAR)`;
* the operator chains inside the two graph elements: ANN, Top-K, -exp, mult, multicast,
  max/sum reduce and combine; ANN, isolation selection, candidate selection, sort and
  cluster selection;
* the three inputs `X`, `Y`, `N`.

This design's own choices, where the paper is silent:

* fixed-point formats, rounding (floor) and saturation;
* ReLU as the dense activation, and a linear output layer;
* pseudo-random weights in place of trained ones;
* concatenation as the combine operation, and the order of the skip inputs;
* the third GraVNetConv input carries `F`;
* the GraVNetConv output leaves through a single register, not an output FIFO: with no
  back-pressure, a FIFO there would only add delay;
* a point counts as its own neighbour, and ties go to the lower index;
* exp of the *squared* distance, with an 8-bit weight;
* the hierarchy of the Top-K;
* which output features are `beta` and the coordinates, and the greedy rule's details;
* one input stream into the condensation element: the network diagram draws a single
  stream into it, while the element's mapping diagram draws two;
* run-time thresholds;
* registers instead of BRAM for the banks;
* the FIFO depths;
* an asynchronous active-low reset of the control state (data banks are not reset).

Not included:

* the host side: AXI-4/DDR transfers and the runtime;
* the compaction of the raw detector matrix into `X`, `Y`;
* a parallelism-changing topology element, which the paper mentions but does not use
  in its configurations;
* the template-mapping flow that generates the HLS code.

## Files

`rtl/` (synthesizable):

| file | contents |
|---|---|
| `pcn_pkg.sv` | `ctrl_t`, weight and exp-table functions |
| `pcn_top.sv` | the network |
| `pcn_dense.sv` | dense / linear layer |
| `pcn_combine.sv`, `pcn_stream_fifo.sv` | join, FIFO |
| `pcn_gravnet.sv`, `pcn_ann.sv`, `pcn_topk.sv`, `pcn_exp_weight.sv`, `pcn_aggregate.sv` | GraVNetConv element |
| `pcn_condensation.sv`, `pcn_rank_sort.sv`, `pcn_cluster_select.sv` | condensation element |

`tb/`: `pcn_ref_pkg.sv` is a sequential reference model of the whole network: plain
loops over integer matrices, with no pipelining. Every module has a testbench,
`tb_<module>.sv`, that compares its outputs with that model (or with its own loop) and
checks the documented latencies. `tb_pcn_top.sv` runs 12 events through the full-size
accelerator. The events are back to back and with gaps, and include padded events,
events with fewer than `K` points and full events. It compares every output row,
checks the constant latency and the 16-cycle event rate, and counts each mechanism
(buffering in a combine, seeds, noise points); a mechanism that never occurs counts as a
failure. `tb_pcn_top_versions.sv` runs the same test at the sizes of versions D and E, through
`pcn_top_e2e_run.sv`, a parameterised copy of the default-size test. Each testbench
prints `TB_RESULT checks=<n> failures=<m>`.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```sh
verilator --binary --timing --assert --top-module tb_pcn_top \
  -y rtl -y tb +libext+.sv rtl/pcn_pkg.sv tb/pcn_ref_pkg.sv tb/tb_pcn_top.sv
./obj_dir/Vtb_pcn_top
```

Replace `tb_pcn_top` with any other `tb_pcn_*` testbench. The default-size end-to-end
run takes about 15 s to build and well under a second to simulate; the versions test
takes about two minutes to build. For lint, run
`verilator --lint-only -Wall -y rtl rtl/pcn_pkg.sv rtl/<module>.sv`. The remaining
warnings are about unused bits of index variables and of control fields that some
instances ignore, and about `rst_n` being used both as an asynchronous reset and in
assertion `disable iff` clauses.
