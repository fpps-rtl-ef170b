# An exact nearest-neighbour kernel for ICP point cloud registration

Iterative closest point (ICP) aligns a *source* point cloud P with a *target*
cloud Q. Each iteration pairs every source point with its nearest target point,
solves for the rigid motion (R, t) that best aligns the pairs, and moves the
source cloud by it. The pairing step costs almost all of the time: it needs
|P| x |Q| distance evaluations. This RTL does that step, and the move of the
cloud, in hardware, and it does them exactly. It uses no k-d tree and no
approximate search. Instead, a two-dimensional array of processing elements
compares a batch of source points with the whole target cloud, streamed past
them at several points per cycle.

The architecture follows the FPGA point cloud processing system FPPS described
by Zhou, Du, Fan and Zhang (HKUST). That description gives the block
structure: two on-chip buffers, a point cloud transformer, an NN searcher built
from a PE array with per-column comparison trees, and a result accumulator.
It also gives the four-stage streaming organisation and the sizes of the
evaluated workload. It gives no number formats, array dimensions, interfaces
or timing. Those are this design's own, and each is marked below.

## How an ICP iteration is divided

| step | where | what |
|---|---|---|
| correspondence estimation | kernel, `OP_SEARCH` | for every source point, the nearest target point; statistics of the accepted pairs |
| transformation estimation | host | centroids and covariance from the statistics, SVD, convergence test |
| point cloud update | kernel, `OP_TRANSFORM` | P <- R P + t, in place in the source buffer |

The host loads both clouds once per frame. After that, each iteration moves
only the 12 matrix entries to the kernel and one result package back.

## Number formats

The original design works in floating point on the host side. It does not say
what the hardware uses. This RTL uses fixed point throughout (`fpps_pkg`):

* **Coordinates**: signed 32-bit Q16.16 metres, giving a range of ±32 km and a
  resolution of 15 µm.
* **Rotation entries**: signed Q2.30. Translation entries use the coordinate
  format.
* **Distances**: squared Euclidean distances, kept at full width (68 bits).
  The NN search therefore makes no rounding error, and all ties are broken
  deterministically. The square root is never needed. The maximum
  correspondence distance is given in Q16.16 and squared once in the kernel.
* **Transformer output**: each coordinate is `round(Σ R_ij p_j / 2^30) + t_i`,
  rounded to nearest (half up) and saturated to 32 bits.

## The nearest-neighbour searcher (`nn_searcher`)

This is the core of the design, and its timing is where the design's own
choices matter most.

### Array organisation

```
                 source point regs (COLS points, one per column)
                   |        |        |             |
 target  beat b ─► PE(0,0)  PE(0,1)  PE(0,2) ...  PE(0,COLS-1)   row 0 gets Q[b*ROWS+0]
 buffer  ───────► PE(1,0)  PE(1,1)   ...                          row 1 gets Q[b*ROWS+1]
 (ROWS   ───────►  ...                                            ...
 banks)  ───────► PE(ROWS-1,0) ...                                row ROWS-1
                   |        |                       |
                 cmp_tree cmp_tree     ...        cmp_tree        one per column
                   └────────┴──── serialiser ─────┘
                                     |
                                 stream_fifo ──► result_accumulator
```

* **Target buffer.** The target cloud sits in `target_buffer`, split into ROWS
  banks. Point i lives in bank `i mod ROWS` at address `i / ROWS`. One read
  ("beat") returns ROWS consecutive points. Target point r of the beat is
  broadcast along PE row r.
* **Source registers.** Each PE column holds one source point for a whole
  batch. The points come from `src_point_regs`, which has two register sets:
  a *fill* set and an *active* set. The next batch is read from the source
  buffer into the fill set while the current batch runs from the active set.
* **PEs.** Each PE (`nn_pe`) has three parts. A two-stage Distance unit
  (`nn_distance`) computes the squared distance. A comparator checks it
  against the PE's MIN registers. The MIN registers hold the smallest distance
  seen so far and the candidate that produced it, both its index and its
  coordinates. A candidate replaces the stored one only if it is *strictly*
  nearer. Within a PE, the earlier (lower-index) point therefore wins a tie.
* **Comparison trees.** When a batch has seen every target point, each
  column's ROWS candidates go through a `cmp_tree`. This is a pipelined binary
  tree with one register per level. The winner is the nearest candidate, and
  the lower index among equal distances. Taken together, a source point is
  paired with the *lowest-index* target point among those at the minimum
  distance.
* **Output.** A serialiser pushes the COLS winners of a batch, in column (and
  so source) order, into the output FIFO. Each entry is paired with its source
  point.

### Batch timing

A batch takes

```
1 (swap in the source registers) + nbeats + 3 (last beat reaches MIN) + 1 (capture)
    where nbeats = max(1, ceil(n_tgt / ROWS)),
```

so the period is `nbeats + 5` cycles when nothing stalls. A whole search takes
`ceil(n_src / COLS) * (nbeats + 5)` cycles, plus about COLS cycles to fill the
first batch and a few cycles to drain the last. At the default size (16 x 16
PEs, 4096 x 131072 points) this is 256 x 8197 = 2,098,432 cycles. The
full-size simulation measures 2,098,474.

The MIN registers need no clear cycle. The first beat of a batch carries a
`first` flag, and a PE that sees it loads that beat's candidate instead of
comparing. If that row is out of range on the first beat, the PE loads an
empty candidate.

Four stages work at once:

1. reading batch k+1 into the fill registers;
2. streaming the target cloud past batch k;
3. reducing batch k-1 in the comparison trees;
4. accumulating the pairs of batch k-1.

Two stalls are possible. Both are counted and reported
(`stat_read_stall`, `stat_result_stall`):

* **Read stall.** The array waits for the fill set. This always happens on the
  first batch, for about COLS + 1 cycles. Later it happens only if a batch is
  shorter than COLS reads.
* **Result stall.** The capture of batch k waits because the previous batch
  is still in the trees or the serialiser. This happens only when the target
  cloud is tiny (nbeats <= 1 with the default sizes). With real clouds the
  stream is hundreds of times longer than the serialisation.

Partial batches (n_src not a multiple of COLS) carry a column mask.
Partial beats (n_tgt not a multiple of ROWS) carry a row mask. An empty target
cloud yields pairs marked "not found", which the accumulator rejects.

## Result package (`result_accumulator`)

Each pair (p, q, d²) is accepted if a candidate was found and `d² <= dmax²`.
Otherwise it is only counted as rejected. This is the outlier filter of the
maximum-correspondence-distance setting. For the accepted pairs, the
accumulator keeps the following sums:

| field | contents | format |
|---|---|---|
| `count`, `rejected` | number of accepted and rejected pairs | 32-bit |
| `sum_p[3]`, `sum_q[3]` | Σp, Σq | Q16.16 in 96 bits |
| `sum_pq[9]` | Σ p_i q_j, entry 3i+j | Q32.32 in 96 bits |
| `sum_d` | Σ d² | Q32.32 in 96 bits |

The host forms the centroids p̄ = Σp / n and q̄ = Σq / n, and the
cross-covariance H = Σ p qᵀ − n p̄ q̄ᵀ. It then takes the SVD H = U S Vᵀ and
sets R = V Uᵀ and t = q̄ − R p̄. Σd² / n is the mean squared error used for
convergence tests. The accumulator takes one pair per cycle in a two-stage
pipeline, so it never back-pressures the searcher.

## Point cloud transformer (`pc_transformer`)

The transformer walks the source buffer from address 0 to n_src − 1, one point
per cycle. Each transformed point is written back to its own address three
stages later:

1. read;
2. nine registered products;
3. row sums, rounding, translation and saturation.

Reads stay ahead of writes, so no point is read after it has been overwritten.
`done` comes n_src + 2 cycles after the start is accepted, and the kernel adds
one cycle. The matrix comes from `tmat_regs`, which resets to the identity.

## Kernel interface (`fpps_top`)

| port | use |
|---|---|
| `tgt_we, tgt_waddr, tgt_wdata` | write target point `tgt_waddr` |
| `src_we, src_waddr, src_wdata` | write source point `src_waddr` |
| `cfg_we, cfg_addr, cfg_data` | configuration registers, see below |
| `cmd_valid, cmd_op, cmd_ready` | `OP_TRANSFORM` or `OP_SEARCH`, accepted when both valid and ready are high |
| `done` | one-cycle pulse when the command has finished |
| `result` | result package of the last search, stable until the next search starts |
| `stat_read_stall, stat_result_stall` | stall cycles of the last search |

The configuration addresses are:

| address | register |
|---|---|
| 0 … 11 | matrix entry (row = a / 4, column = a mod 4) |
| 12 | number of source points |
| 13 | number of target points |
| 14 | maximum correspondence distance, Q16.16 (unsigned) |

Loads and configuration writes are taken only while `cmd_ready` is high. The
load ports stand in for the host memory path. In the original system, the
clouds arrive through the accelerator card's high-bandwidth memory. That path,
the host, its API and the SVD are not part of this RTL.

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| `TGT_DEPTH` | 131072 | "around 130k NN candidates for each cloud point" in the original description |
| `SRC_DEPTH` | 4096 | 4096 source points sampled per frame in the original evaluation |
| `ROWS` | 16 | own choice (not given); must be a power of two ≥ 2 |
| `COLS` | 16 | own choice (not given); must be a power of two ≥ 2 |
| FIFO depth | 16 | own choice |

At the defaults, synthesis to generic cells gives these sizes:

* about 101k flip-flop bits, most of them in the 256 PEs' MIN and pipeline
  registers;
* 13.1 Mbit of memory: 12.6 Mbit for the target cloud and 0.4 Mbit for the
  source cloud;
* 768 squaring multipliers (three per PE).

The original implementation reports 613 BRAM36 blocks, which is 22.6 Mbit. That
is enough for this target buffer, but not for a second buffer of the same size.
This is why the source side holds the sampled 4096 points and not a full scan.

A KITTI Velodyne scan has about 120k points, so a frame fits in the target
buffer. One search of such a frame takes about 1.92 M cycles at the defaults.

## Where this RTL departs from or adds to the original description

The following follow the original description:

* the block structure;
* the banked target storage broadcast to the array;
* one source point per PE column, held in registers;
* PEs made of Distance, compare and MIN, with update on a smaller distance;
* a comparison tree per column;
* streaming stages joined by FIFOs;
* the transformer working on the on-chip source buffer;
* the accumulator computing covariance data for an SVD on the host.

The following are this design's own choices:

* fixed-point formats, squared distances and saturation;
* array dimensions;
* double-buffered source registers, the first-beat restart of the MIN
  registers, and the deterministic tie rule;
* the comparison tree being binary with one register per level;
* raw sums in the result package, with centring left to the host;
* maximum-distance rejection in hardware;
* the command and register interface, and plain load ports in place of the
  memory interface.

The original description calls the NN search "based on a systolic array
structure", but its array drawing shows points *broadcast* along rows and
columns, with no PE-to-PE links. This RTL broadcasts.

The original description also mentions "pipelined transformation estimation"
among the accelerated work. It places the SVD on the host, though, and this RTL
does the same.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/fpps_pkg.sv rtl/*.sv \
          tb/tb_nn_searcher.sv --top-module tb_nn_searcher -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

| testbench | what it shows |
|---|---|
| `tb_stream_fifo` | order, full/empty flags and count under random traffic |
| `tb_source_buffer`, `tb_target_buffer` | read latency, bank interleaving, read-before-write |
| `tb_tmat_regs` | identity at reset, entry writes, ignored addresses |
| `tb_pc_transformer` | exact and real-number check of R p + t, saturation, n + 2 latency |
| `tb_nn_pe` | MIN behaviour per cycle, ties, first-beat restart |
| `tb_cmp_tree` | tree result against a linear scan, padding of a 6-input tree |
| `tb_src_point_regs` | batches, partial last batch, column mask |
| `tb_result_accumulator` | every sum against 128-bit arithmetic, rejection, clear |
| `tb_nn_searcher` | every pair against brute force (4 x 4 array, partial and empty clouds, backpressure), batch timing, stall counters |
| `tb_fpps_top` | three host-driven ICP steps end to end at 4 x 4 PEs; counts each mechanism (transform, search, outlier rejection, partial batch, partial beat, read stall, result stall, saturation) |
| `tb_fpps_full` | one transform and one search at the default size (4096 x 131072), with grid data whose nearest neighbours are known; the whole result package and the cycle count are checked |
| `tb_fpps_icp` | two complete ICP registrations at 4 x 4 PEs (1024 target, 64 source points) with the evaluation's settings: at most 50 iterations, 1.0 m maximum correspondence distance, 1e-5 epsilon. The host's solve is modelled in the testbench (Horn's quaternion method, equivalent to the SVD). The known motion is recovered to within 2e-6 in rotation and 3e-5 m in translation, after 7 and 3 iterations |

`tb_fpps_full` is the slowest. It needs about two minutes to build and run.
All testbenches assume a two-state simulator: every register that is read
is either reset or written first.
