# Proactive decision-tree source throttling for deflection-routed NoCs

Industrial meshes of the ring/mesh family are often *bufferless*: packets are
stored only at the endpoints, and a packet already in the network always
beats a packet waiting to be injected. When a destination's ingress queue is
full, an arriving packet is not stalled. It *bounces* (is deflected) and keeps
circulating until it tries again. Deflected packets take link bandwidth,
load the row and the turning points, and congestion spreads back towards the
cores. The classic remedy is reactive. A "distress" signal is raised once a
queue crosses a threshold and dropped below another, so it acts only after
the damage is done, and it starves long-latency traffic such as LLC misses.

This RTL implements a *proactive* scheme instead:

1. Every sink ingress keeps a set of cheap traffic statistics (rates,
   burstiness, occupancy, gradients). It updates them whenever a packet tries
   to sink, whether the packet is written or bounces.
2. A small binary **decision tree** of depth 4, trained offline, maps the
   smoothed statistics to one bit: *this queue is about to block*.
3. The bit travels to all sources over a dedicated time-multiplexed
   **distress channel**, with a deterministic delay of at most 10 cycles.
4. Each source's NoC interface holds new requests to a flagged sink and keeps
   sending requests to other sinks. The highest-priority sources, at the mesh
   boundary, also apply a **Little's-law** check, `N + λ·t_avg > N_T`.

The default configuration is a 6×6 mesh with one source and one sink ingress
per node, 32-entry ingress queues, α = 1/16 smoothing and depth-4 trees.

## Block map

```
             cores                                      receiving agents
               |  req_*                                    ^  srv_*
   +-----------v-----------+                  +------------+-----------+
   | source_controller x36 |                  |   sink_monitor x36     |
   |  age-ordered buffer   |   inj_*   NoC    |  ingress_queue (32)    |
   |  local_condition x8   |--------> (ext) --|  feature_unit          |
   |  t_avg EWMA           |  arr_*/bounce    |  decision_tree (d=4)   |
   +-----------^-----------+                  +------------+-----------+
               |   status table [36]                       | status [36]
               +-------------- distress_channel <----------+
                          (6 lanes x 6 slots, 4-stage pipe)
```

| file | role |
|---|---|
| `rtl/cc_pkg.sv` | packet, feature, tree-node and status types; Q7.8 format |
| `rtl/ingress_queue.sv` | sink FIFO: accept, or bounce when full |
| `rtl/feature_unit.sv` | the 14 smoothed features of one sink |
| `rtl/ewma.sv`, `rtl/event_age.sv`, `rtl/cov_tracker.sv`, `rtl/five_point_grad.sv` | helpers of the feature unit |
| `rtl/decision_tree.sv` | programmable depth-4 tree, registered output |
| `rtl/sink_monitor.sv` | queue + features + tree, publishes the status word |
| `rtl/distress_channel.sv` | TDM broadcast of the 36 status words |
| `rtl/local_condition.sv` | `N + λ·t_avg > N_T` for high-priority sources |
| `rtl/source_controller.sv` | request buffer and throttling decision |
| `rtl/cc_noc_top.sv` | 36 nodes wired together |

The mesh routers are **not** part of this RTL. `cc_noc_top` exposes the
network's injection side (`inj_*`, one per source) and delivery side
(`arr_*`, one per sink, with `arr_bounce`), so the logic attaches to an
existing deflection network. A bounced packet must be carried on by the
network and presented again later.

## The features and how they are measured

The features are computed in signed Q7.8 fixed point, 16 bits with 8
fraction bits. A sample is taken on every arrival at the sink queue. Let `dt`
be the number of cycles since the previous arrival, saturating at 127.

| index | feature | per-sample value |
|---|---|---|
| 0 `F_INJ_SINK` | injection rate into the queue | `1/dt` if the packet sank, else 0 |
| 1 `F_INJ_TOTAL` | total arrival rate | `1/dt` |
| 2 `F_COV_TOTAL` | CoV² of inter-arrival time, all arrivals | from EWMA of `dt` and `dt²` |
| 3 `F_COV_SINK` | CoV² of inter-arrival time, sunk packets | as above, sunk only |
| 4 `F_DEFL_RATE` | rate of deflected packets | `1/dt` if it bounced, else 0 |
| 5 `F_SVC_MEAN` | mean service time | cycles the head waited, sampled per departure |
| 6 `F_COV_DEFL` | CoV² of deflected inter-arrival time | bounced only |
| 7 `F_COV_DEP` | CoV² of inter-departure time | per departure |
| 8 `F_OCC` | occupancy | occupancy seen by the arrival |
| 9 `F_P_FULL` | probability the queue is full | 1 if it bounced, else 0 |
| 10–13 | gradients of 0, 8, 1, 9 | five-point derivative |

Every value is smoothed as `avg ← avg + (x − avg)·2^-ALPHA_SHIFT`. With the
default `ALPHA_SHIFT = 4`, α = 1/16. The accumulator keeps four guard bits.

The rate features use weighted sampling. Giving a rate sample of 0 to an
arrival of the other kind means the per-packet average of `1/dt` times the
sunk (or bounced) share estimates the sunk (or deflected) rate. No divider
per packet type is needed.

The coefficients of variation are given squared, `var/mean²`. Squaring keeps
the order, so a tree threshold on CoV² is as good as one on CoV, and no
square root is needed.

Gradients use the five-point central difference
`(s4 − 8·s3 + 8·s1 − s0)/12` over the last five smoothed values. Here `s0` is
the newest value, and one step is one sample, not one cycle.

**Idle samples.** This mechanism is this design's own addition. If no packet
arrives for `IDLE_CYCLES` (64) cycles, the unit takes a sample with all rates
0 and the present occupancy. Without it a sink whose sources are all
throttled would never see another arrival. Its features would freeze, and
the congestion bit could stay set forever, deadlocking that sink.

## The decision tree

The tree has 15 internal nodes in heap order (children of `i` are `2i+1` and
`2i+2`) and 16 leaf bits. Each node holds a feature index and a threshold and
goes right when `feat[idx] > thr`. The four path bits, root first, select the
leaf. The walk is combinational and `cong` is registered, so the bit appears
one cycle after the features.

The tree is trained offline, so nodes and leaves are registers written
through `cfg_*`. In `cc_noc_top`, `cfg_sink` selects which sink's tree is
written. The published description gives no trained thresholds, only the
tree's typical rule: congestion when the occupancy is high *and* the
injection-rate gradient is positive. The reset contents encode that rule:

- the root tests `F_OCC > 16.0`;
- both depth-1 nodes test `F_GRAD_INJ > 0`;
- the lower nodes repeat the occupancy test;
- the leaves are `16'hF000`.

Load your own trained tree before drawing conclusions about performance.

### Training outside the chip

Training is offline and not part of the RTL. The labels come from *time
reversal*. Every feature sample records the time it was taken, and every
deflected packet records the time it was generated. A sample taken within ±Δ
cycles of the generation time of any deflected packet is labelled 1 ("the
source should have been throttled then"). All other samples are labelled 0.
The reported training used Δ = 5. Depth 4 gave the best accuracy on label-1
samples, which are the costly mispredictions, so the hardware tree has depth 4.

## Distress channel timing

In slot `k`, sinks `6k … 6k+5` drive six lanes. A frame of six slots visits
all 36 sinks. The slot word then crosses four register stages before it is
written into the status table.

The delay is fixed for each sink. The worst case is FRAME + PIPE = 10 cycles
from a status change until the table shows it. The status word is 24 bits:

- the tree bit;
- the present occupancy N (7 bits);
- the smoothed injection rate λ (Q7.8).

N and λ travel with the tree bit so that boundary sources can evaluate their
local condition. How sources learn N and λ is this design's choice. A single
table stands for the identical copies each source would hold.

## Source controller and the local condition

New requests enter an 8-entry age-ordered buffer. Every cycle each waiting
request is checked against its sink's entry in the status table:

1. **Local condition.** This check applies only at highest-priority sources.
   In `cc_noc_top` these are the column-0 nodes, `n % MESH_X == 0`. Boundary
   nodes win every arbitration in a deflection mesh and can flood a sink.
   The check throttles when `N + λ·t_avg > N_T`, with `N_T = 24`. Here λ·t_avg
   is the number of packets expected to arrive before this source decides
   again. `t_avg` is the EWMA of the cycles between this source's successive
   sends.
2. **Tree bit.** If the local condition did not fire, the sink's `cong` bit
   decides.

The oldest request not held back is offered on `inj_*`. The NoC takes it when
`inj_ready`, meaning an injection slot is free; traffic already in the
network has priority. Held-back requests keep their order and wait, so a
flagged sink does not block requests to other sinks (`bypass` pulses when
that happens). An assertion checks that no request to a held-back sink is
ever sent.

## Where this departs from or adds to the published scheme

- **Own choices.** These were not specified and were chosen here: the
  fixed-point format, the rate and CoV arithmetic, the service-time
  definition, the buffer depth (8), `N_T` (24), the channel lanes and
  pipeline, `t_avg` as the send-to-send interval, the reset tree, and which
  nodes count as highest priority.
- **Added.** The idle sample, for liveness, and occupancy and λ on the
  channel.
- **All 14 features are built.** A deployment would keep only those its
  trained tree uses; the tree's node muxes show which ones.
- **Not built.** The mesh routers, cores, caches and memory controllers. The
  offline labelling and training.
- **Trees untrained.** The performance results reported for the scheme
  (bandwidth, LLC-miss fairness, latency) depend on trained trees and on the
  real network. This RTL has not been used to reproduce them.

## Simulation

Every testbench is self-checking, prints
`TB_RESULT checks=N failures=M` and has a watchdog. With plain Verilator:

```
verilator --binary --timing --assert -Irtl rtl/cc_pkg.sv tb/tb_cc_noc_top.sv \
          --top-module tb_cc_noc_top -Mdir obj && obj/Vtb_cc_noc_top
```

Replace the testbench name for the others: `tb_ingress_queue`,
`tb_feature_unit`, `tb_decision_tree`, `tb_sink_monitor`,
`tb_distress_channel`, `tb_local_condition`, `tb_source_controller`.
Verilator finds the other files via `-Irtl`.

`tb_cc_noc_top` runs the full 6×6 top at its default parameters. It uses a
behavioural deflection network:

- distance-based latency;
- one sink attempt per sink per cycle;
- a bounced packet retries `2·MESH_X` cycles later;
- 90 % free injection slots.

The cores send 10 % load, 22 % of it to two slow "memory controller" nodes.
The test runs twice, first with all trees forced to 0 and then with the
reset trees. It checks that:

- every packet is delivered exactly once, in order per sink;
- nothing is injected towards a flagged sink;
- status reaches the sources within 10 cycles;
- the trees reduce bounces;
- every mechanism occurred at least once: bounces, tree hold-backs,
  local-condition hold-backs, bypasses, channel updates.

It takes about a second.

`tb_workloads` uses the same network model and sweeps LLC hit rates of
20 %, 50 % and 70 % at three injection rates. It adds one mixed workload
whose injection rate changes over four phases. Each point is run with the
trees disabled and enabled. For each run it prints:

- the memory read bandwidth (memory-controller deliveries per 1000 cycles);
- the share of completed requests that were misses;
- the number of bounces.

It checks delivery and throttling correctness in every run and takes about
8 s. Read its numbers for what they are:

- **The reset tree is untrained.** With the local condition active in both
  settings, switching the trees on changes bounces and bandwidth by only a
  few percent, in either direction.
- **The network model has no link contention.** Deflected packets cost
  nothing in it, so it cannot show the bandwidth loss that motivates the
  scheme. Showing that needs a cycle-accurate router model and a tree
  trained on its traces.

The block testbenches compare against independent reference models:

- a model queue;
- an integer model of the feature definitions, plus hand-computed CoV²
  cases (periodic gives 0, gaps alternating 2 and 6 give 0.25);
- a reference tree walk;
- real-number evaluation of the Little's-law test;
- slot-accurate history for the channel;
- a reference request buffer.

## Changing it

- Mesh size: `MESH_X`/`MESH_Y` on `cc_noc_top`. Up to 64 nodes fit
  `NODE_W = 6`. The channel delay grows as `ceil(nodes/LANES) + PIPE`.
- Tree depth: `DT_DEPTH`. The configuration port widths follow it.
- Smoothing: `ALPHA_SHIFT`. The idle interval: `IDLE_CYCLES` on
  `feature_unit`.
- Queue depth: `QDEPTH`. It must stay below 128 for the 7-bit occupancy
  field.
