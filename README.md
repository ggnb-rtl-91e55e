# GGNB: a graph-based Gaussian naive Bayes intrusion detector for CAN, in RTL

On a CAN bus the order in which frames appear is remarkably regular: every
ECU sends its identifiers on a fixed schedule, so within a short time window
the sequence of arbitration IDs traces out almost the same small directed
graph again and again. Most attacks distort that graph. A flooding (DoS)
attack turns one ID into a hub with a large in- and out-degree and a large
share of PageRank; fuzzing adds many new vertices; injected or replayed frames
add edges that the normal schedule never produces.

The GGNB method (graph-based Gaussian naive Bayes, Islam, Devnath, Samad and
Al Kadry) exploits this. It cuts the ID stream into windows of about 23 ms,
builds one graph per window, reduces the graph to nine numbers, and asks a
Gaussian naive Bayes model whether those nine numbers look attacked or
normal. This repository is a synthesizable SystemVerilog implementation of
the detection side of that method: CAN IDs go in, one verdict per window
comes out. Training stays offline. The trained model is written into the
chip through a small register port.

## The per-window pipeline

```
 CAN IDs ──► graph_builder ──(closed bank)──┬──► degree_features ─────────────┐
 (valid/     two banks, window timer        │                                 ├─► gnb_classifier ─► verdict,
  ready)                                    └──► pagerank_engine ─► pr_stats ─┘    features, scores
                                                      ▲
                                       model port ────┘ (to the classifier)
```

`ggnb_ids` is the top level. While window *k* is analysed from one bank, the
IDs of window *k+1* are written into the other. The controller in the top
starts the degree scan and PageRank together when a bank closes. It starts
the PageRank statistics when PageRank finishes. It starts the classifier
when both feature sets are ready. At the end it sends out one
`result_valid` pulse carrying the verdict, all nine features, both class
scores and the PageRank iteration count.

| feature (index) | meaning | produced by |
|---|---|---|
| 0 nodes | distinct IDs in the window | graph_builder count |
| 1 edges | distinct consecutive ID pairs | graph_builder count |
| 2 max in-degree, 3 max out-degree | largest fan-in / fan-out of one ID | degree_features |
| 4 min in-degree, 5 min out-degree | smallest fan-in / fan-out | degree_features |
| 6 median PR, 7 max PR, 8 min PR | statistics of the PageRank vector | pagerank_engine + pr_stats |

## Building the graph (`graph_builder`)

Each distinct ID in a window becomes a vertex. Vertices are numbered in the
order they first appear. If ID *v* directly follows ID *u*, the graph gets an
edge *u → v*. The graph is simple: a pair seen twice is still one edge. An ID
followed by itself gives a self-loop, which counts once in the in-degree and
once in the out-degree. The first frame of a window has no predecessor, so no
edge crosses a window boundary.

Per frame, the builder first searches its vertex table linearly for the ID,
appending a new vertex on a miss. It then searches the edge list for the pair
(previous vertex, this vertex), appending a new edge on a miss and updating
both degrees. A frame therefore costs at most `n_nodes + n_edges + 3`
cycles. At 100 MHz and 1 Mbit/s that is under 10 µs for a full window. The
shortest CAN frame takes 47 µs, so the builder never holds the bus back. The
input is a valid/ready stream. `id_ready` drops while a frame is being
placed and during the cycle of a bank swap.

A cycle counter closes the window every `WINDOW_CYCLES` cycles. The default
is 2,300,000, which is 23 ms at 100 MHz. The swap happens between frames, and
only when the analysis of the previous window has finished. If the analysis is
still running, the window is stretched until it finishes and `overrun` counts
the event. With the default sizes this cannot happen: the worst-case analysis
is far shorter than a window (see *Timing*).

The tables hold `MAX_NODES = 512` vertices and `MAX_EDGES = 512` edges. A
saturated 1 Mbit/s bus carries at most 460 frames in 23 ms: 23,000 bit times
divided by 50 bits for the shortest frame plus the interframe space. That
gives at most 461 vertices and 460 edges. If the tables do fill up, as they
can with longer windows, the behaviour is as follows:

* A frame with a new ID that finds the vertex table full is dropped and counted
  in `dropped`. The next frame then starts without a predecessor.
* A new edge that finds the edge list full is not stored and is counted in
  `edges_lost`.

## PageRank in fixed point (`pagerank_engine`)

This is the least obvious block, so here is what it computes and why.

The method defines PageRank by the basic sum over in-neighbours,
PR(v) = Σ PR(u)/outdeg(u), iterated from PR = 1/n until nothing changes. Taken
literally, that equation loses rank at every vertex without out-edges.
Those "dangling" vertices occur in almost every window, for example the
last ID of the window. The equation also does not reproduce the example
values the method quotes for its illustration graphs:

* 0.45, 0.13, 0.24 and 0.17 for a four-vertex DoS example in which ID 0000
  receives edges from the three other IDs;
* 0.25 for every vertex of a four-vertex ring.

Both sets of numbers come out exactly of the standard damped PageRank:

    PR(v) = (1-d)/n + d · ( Σ_{u→v} PR(u)/outdeg(u)  +  Σ_{u dangling} PR(u)/n ),   d = 0.85

This is the form computed here. The testbench checks both example graphs
against the quoted two-digit values.

**Arithmetic.** Ranks are unsigned Q1.24 (25 bits; 1.0 = 2²⁴). Once per
window, a 32-cycle restoring divider (`seq_divider`) forms 1/n and the
reciprocal of every out-degree. A reciprocal of 0 marks a dangling vertex.
Every iteration is then division-free and has three sequential passes over
on-chip arrays:

| pass | cycles | work |
|---|---|---|
| P1 | n | `contrib[u] = PR[u] · recip[u]`; add up the rank of the dangling vertices; clear `acc` |
| P2 | e | for each edge u→v: `acc[v] += contrib[u]` |
| P3 | 1 | `base = (1-d)/n + d · dangling · (1/n)` |
| P4 | n | `PR[v] = base + d · acc[v]`; note whether any value moved |

One iteration takes `2n + e + 1` cycles. Setup takes about 34 cycles per
vertex that has out-edges; a vertex without out-edges skips the divider.
d = 0.85 is held as 55706/65536.

**Stopping.** The method stops when no value changes any more. With truncating
fixed-point arithmetic the iteration can end in a limit cycle a few LSBs wide
instead of reaching a fixed point. An iteration therefore counts as "no
change" when no vertex moved by more than `TOL_LSB = 16` LSBs (about 10⁻⁶).
`MAX_ITER = 100` caps a run. `converged` and `iterations` report which of
the two ended it. In the tests, runs on random graphs stop after 13 to 58
iterations. The values agree with a double-precision reference to within 4·10⁻⁶.

## Minimum, median and maximum PageRank (`pr_stats`)

Minimum and maximum come from a single pass. The median is found without
sorting, by rank selection. For each candidate value, a pass over all values
counts how many are smaller and how many are equal. That gives the range of
ranks the candidate occupies. As soon as the two middle ranks, ⌊(n-1)/2⌋ and
⌊n/2⌋, are covered, the median is their mean, truncated. For odd n this is
the middle value. Worst case `n + n(n+2) + 3` cycles, about 0.26 M for 512
vertices. This quadratic block sets the analysis time of large windows. The
definition of the median for even n is this implementation's choice, but it
is the usual one.

## The naive Bayes decision (`gnb_classifier`)

The method compares P(attack)·Π L(xᵢ|attack) with P(free)·Π L(xᵢ|free).
It suggests logarithms against underflow. In the log domain, with Gaussian
likelihoods and the shared ½ ln 2π terms dropped, each class c gets

    score_c = K_c − Σ_{i ∈ mask} (x_i − μ_ci)² · w_ci
    K_c     = ln P(c) − Σ_{i ∈ mask} ln σ_ci,        w_ci = 1 / (2 σ_ci²)

The window is reported attacked when `score_att > score_free`. One feature
is processed per cycle for both classes at once. `done` follows `start`
after 11 cycles. The square is kept exact up to the final shift. This
matters because a PageRank feature with σ ≈ 0.002 has a weight near 10⁵.

**Model words** (written through `mw_en/mw_sel/mw_class/mw_feat/mw_data`):

| `mw_sel` | word | format |
|---|---|---|
| `MW_MEAN` | μ_ci, in the feature's own units | unsigned Q16.24 (counts · 2²⁴; PageRank as a fraction · 2²⁴) |
| `MW_WEIGHT` | 1/(2σ_ci²) | unsigned Q24.16 (40 bits) |
| `MW_CONST` (feature index ignored) | K_c for the mask in use | signed Q47.16 |

Class 0 is attack free and class 1 is attacked. `feature_mask` chooses the
features. `MASK_ALL` uses all nine, which is the method's main model.
`MASK_REDUCED` uses the reduced four-feature model: maximum in-degree,
maximum out-degree, median PageRank and maximum PageRank. Bit i of the mask
enables feature i, so any subset works. For example, `9'h00C` gives the
two-feature model that uses only the maximum in- and out-degree, which the
method also reports. K_c depends on the mask, so rewrite the two constants
whenever the mask changes. Do this between windows, for example right after `result_valid`. Scores saturate
instead of wrapping. A zero variance must be floored by the trainer: the
testbenches use 10⁻⁹ of the largest variance, but at least 10⁻⁷.

The features enter untransformed. The method's quantile transformation was an
analysis tool. The method itself notes that the raw features already
separate the classes.

## Timing at the default sizes (100 MHz)

| step | cycles |
|---|---|
| per received frame | ≤ n + e + 3 (≤ 10 µs) |
| degree scan | n + 2 (in parallel with PageRank) |
| PageRank | ≈ 34 n + iterations · (2n + e + 1) |
| PageRank statistics | ≤ n + n(n+2) + 3 |
| classifier | 11 |

The full-size test includes a fuzzing window at full bus rate: 263 vertices
and 409 edges. Its whole analysis took 80 k cycles (0.8 ms) against a
2.3 M-cycle window. The limit case, 512 vertices with 100 iterations, stays
under 0.45 M cycles, so the detector keeps up with a saturated 1 Mbit/s bus.

Generic synthesis of `ggnb_ids` at the default sizes gives about 33,700
cells and 3,480 flip-flop bits. It also gives 114,176 bits of memory, most
of it the two banks of vertex IDs, degrees and edges (62,464 bits) and the
PageRank working arrays (51,712 bits). These belong in block RAM on an FPGA.

## What follows the method and what is this design's own

Follows the method:

* IDs as vertices and consecutive IDs as edges.
* One graph per window of about 23 ms.
* The nine features and their order.
* Initial PageRank of 1/n, iterated until no change.
* Minimum, median and maximum PageRank.
* Gaussian naive Bayes with the larger posterior winning, computed in logs.
* The four-feature reduced model.

Chosen here where the method is silent:

* 11-bit identifiers.
* 100 MHz clock.
* Simple graph with self-loops.
* Table sizes.
* Double banking and the stretch-on-busy rule.
* All number formats.
* The convergence tolerance and iteration cap.
* The median of an even count.
* The model-port layout.
* The resets: asynchronous and active low. Only counters and control are reset.

Chosen against the literal equation: damping 0.85 with uniform redistribution
of dangling rank (see the PageRank section).

The method's authors put only the naive Bayes prediction step on an FPGA.
They report its resources only as ratios against other classifiers, so
there is no absolute figure to compare with. This design also builds the
graph and computes the features in hardware.

Outside the RTL:

* The CAN controller and transceiver that deliver IDs.
* The processor that loads the model and reads results.
* Training. It needs only the class priors and per-class means and variances
  of the nine features over labelled windows.

## Verification

Every block has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M`. The expected values are computed
independently in the testbench:

| testbench | what it checks |
|---|---|
| `tb_graph_builder` | 14 windows of random traffic against a software graph model; vertex-full, edge-full, self-loop and overrun paths; per-frame cycle bound |
| `tb_degree_features` | random degree tables, empty and one-vertex graphs; n+2 cycle latency |
| `tb_pagerank_engine` | the two example graphs against their quoted values, random graphs against double-precision PageRank, convergence, cycle budget |
| `tb_pr_stats` | odd/even counts, ties, empty input against a sort; cycle bound |
| `tb_gnb_classifier` | scores against a double-precision model, verdicts, 11-cycle latency, nine-, four- and two-feature masks, priors alone |
| `tb_ggnb_ids` | end to end at 64 vertices / 128 edges / 12,000-cycle windows |
| `tb_ggnb_ids_full` | end to end at the default sizes with bus-rate traffic |
| `tb_ggnb_ids_window` | two detectors on one stream: 11.5 ms windows with the default tables, and 230 ms windows with 2048/4608 tables |

**End-to-end tests.** All three use `tb/ggnb_ref_pkg.sv`. This package holds a
double-precision reference of the whole method, a naive Bayes trainer that
plays the offline host, and a synthetic traffic generator. The generator
produces a cyclic schedule of 24 legitimate IDs, to which it can add DoS
flooding with ID 0x000, random-ID fuzzing, or out-of-schedule legitimate IDs.

Each end-to-end test does the following:

1. Trains a model on generated windows.
2. Loads the model and streams traffic.
3. Compares every window's features, scores and verdict with the reference.
4. In `tb_ggnb_ids` and `tb_ggnb_ids_full`, switches to the four-feature
   model part way through.

The reduced test must see every mechanism at least once: vertex-table and
edge-list overflow, a stretched window, self-loops, dangling vertices,
odd/even medians and both verdicts. The full-size and window-length tests
require that nothing is lost at bus rate.

The pass criterion is that the hardware agrees with the reference model.
The model itself is not expected to be always right. In the recorded runs,
the labels were correct as follows:

* Reduced test: 23 of 24 windows. The miss is a window with a few
  out-of-schedule legitimate IDs, which barely changes the graph.
* Full-size test: 6 of 6.
* Window-length test: 60 of 60 at 11.5 ms and 3 of 3 at 230 ms.

The synthetic traffic is far cleaner than real CAN logs. These numbers say
nothing about the method's detection rates on real data sets, which these
tests do not reproduce.

Running a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ggnb_pkg.sv tb/ggnb_ref_pkg.sv tb/tb_ggnb_ids.sv --top-module tb_ggnb_ids
./obj_dir/Vtb_ggnb_ids +verilator+rand+reset+2
```

For a block testbench, list `rtl/ggnb_pkg.sv` and the testbench file. The
`-y` paths find the rest. The reduced end-to-end test runs in under a
second. The full-size test runs in about 20 s. The window-length test runs
in about 2.5 minutes. All testbenches build without warnings at Verilator's
default warning level.

## Other window lengths

The method was also evaluated with windows from 11.5 ms to 230 ms, and its
accuracy barely changed across that range. Only `WINDOW_CYCLES` sets the
window length, but the tables must hold the longest window:

* **11.5 ms** (1.15 M cycles): at most 230 frames per window. The default
  tables are more than enough.
* **230 ms** (23 M cycles): a saturated 1 Mbit/s bus carries up to 4,600
  frames. That is up to 4,600 edges, and up to 2,048 vertices, since
  there are only 2,048 11-bit IDs. The default 512/512 tables are too small.
  Set `MAX_NODES = 2048` and `MAX_EDGES = 4608`.

Even with the larger tables there is a second limit: the linear searches.
In the worst case a frame costs `n + e + 3` ≈ 6,700 cycles, which is longer
than the 4,700-cycle minimum frame time. A flooded or fuzzed bus at full
rate would then hold `id_ready` low. A receive FIFO in front of the
detector would fill, since nothing inside drops frames for lack of time.
At ordinary bus load this does not arise. The 230 ms fuzzing window in
`tb_ggnb_ids_window` has 663 vertices and 1,163 edges, so each frame costs
under 1,900 cycles, and the whole analysis takes about 98 k cycles.
Each window length needs its own trained model, because the count
features grow with the window.

## Changing it

* **Bus speed, clock or window length:** set `WINDOW_CYCLES` (window length ×
  clock frequency).
* **Longer windows or faster buses:** raise `MAX_NODES` and `MAX_EDGES` to
  the maximum number of frames per window. Watch the quadratic median time:
  it must stay below one window.
* **Extended 29-bit identifiers:** set `ID_W = 29`. The design lints
  cleanly at that width, but only 11-bit IDs are simulated. A bus with
  extended IDs can have more distinct IDs per window, so size the tables
  by frames per window.
* **Damping, tolerance and iteration cap:** these are parameters of
  `pagerank_engine`. `ggnb_ids` passes only `MAX_ITER` down.
