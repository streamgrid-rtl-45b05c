# StreamGrid-style streaming point cloud pipeline in SystemVerilog

Point cloud kernels such as k-nearest-neighbour (kNN) search, range search and
sorting have *global* data dependencies: one output may need any input point.
That normally forces the whole cloud into a large on-chip buffer, or forces
intermediate results out to DRAM. Image pipelines avoid this with line
buffers, which only work for local dependencies with fixed delays. This RTL
gives point cloud kernels the same shape. It uses two ideas.

* **Compulsory splitting.** The cloud is cut into equal chunks before it
  reaches the chip. A global kernel only looks at a small window of adjacent
  chunks, here two. The window slides along the chunk sequence the way a
  stencil slides over image rows. Only `WIN + 1` chunks are on chip at a time:
  two are searched and one is being written. A point near a chunk border still
  finds neighbours in the adjacent chunk.
* **Deterministic termination.** An input-dependent search runs for a fixed
  number of traversal steps. If it finds the answer early, it idles for the
  rest of its steps. If it runs out of steps, it returns what it has. So every
  query group takes the same number of cycles. The buffer after the search can
  therefore be sized when the design is built, and it never stalls.

A third, smaller rule handles bank conflicts. Two search units that hit the
same memory bank in the same cycle do not wait for each other. The loser
drops that node and its whole subtree. This is *bank conflict elision*.

## Data path

```
 chunk stream ─► chunk_line_buffer (LB1) ──── 3 chunk slots x 2 banks
 (kd-trees)          │ window of 2 chunks, banked reads
 query stream ─► knn_engine ── 2 x kd_search_pe + bank_arbiter
                     │ 2 x 4 neighbours per query group, one burst
                 point_line_buffer (LB2) ─► neighbour stream
                     │ one neighbour per cycle
                 stencil_2x3 ─► stencil stream (distance of consecutive neighbours)
                 reduce_max  ─► per-query stream (farthest of the 4 neighbours)

 sort stream  ─► chunk_sorter (64-point chunks, ping-pong) ─► sorted stream
```

`streamgrid_top` wires these blocks together. The kNN path follows the
example pipeline: a global kNN stage (4 neighbours x 3 coordinates per query)
followed by a local 2x3 stencil. A max reduction on the same neighbour
stream adds the other local operation the source names. The sorting path is separate. It shows the
same splitting idea applied to sorting.

| file | role |
|---|---|
| `rtl/sg_pkg.sv` | point, distance and neighbour types; squared distance |
| `rtl/chunk_line_buffer.sv` | LB1: chunk slots, sliding window, banked storage |
| `rtl/bank_arbiter.sv` | one grant per bank per cycle; the others are elided |
| `rtl/kd_search_pe.sv` | kd-tree kNN or range search with a step deadline |
| `rtl/knn_engine.sv` | groups queries, runs the PEs in lock step, slides the window |
| `rtl/point_line_buffer.sv` | LB2: ring buffer, burst write, one read per cycle |
| `rtl/stencil_2x3.sv` | 2-stage 2x3 stencil, one output per cycle |
| `rtl/reduce_max.sv` | maximum over each group of 4 stream entries, one output per group |
| `rtl/chunk_sorter.sv` | sorts each chunk along x, y or z at one point per cycle |
| `rtl/streamgrid_top.sv` | the top level |

## How a chunk is stored and searched

### Chunk format

Each chunk arrives as a complete kd-tree of `2^LEVELS - 1` points in heap
order, one point per cycle:

* the root is at index 0;
* the children of node `i` are at `2i+1` and `2i+2`;
* a node at depth `d` splits on coordinate `d mod 3`.

The design does not build the tree. Whatever feeds the chip builds it, in the
same offline step that cuts the cloud into chunks.

With the default `LEVELS = 15`, a chunk holds 32767 points. Four chunks cover
a LiDAR scan of about 120k points.

### LB1 organisation

LB1 has `NSLOT = 3` slots. Each slot is spread over `NBANK = 2` banks by the
low bit of the heap index:

* a node lives in bank `idx % 2`;
* its bank-local address is `{slot, idx / 2}`;
* reads are synchronous, so data arrives one cycle after the address.

The slot field has a power-of-two width. This leaves one slot's worth of
address space unused in each bank. It keeps the address arithmetic to plain
concatenation.

### Window control

`win_valid` rises once two complete chunks are present. The engine then
serves that window's queries and ends it with one of two releases:

* **oldest chunk only.** The window slides by one chunk, and the freed slot
  takes the next chunk (`ev_overwrite`).
* **both chunks.** The newest chunk of the window is the last of its frame
  (`pt_last`), so the frame ends.

Loading overlaps searching. The third slot fills while the other two are
being searched.

### The search, step by step

One PE holds its query, a sorted list of the `K = 4` best neighbours and an
explicit stack. The roots of both window trees start on the stack, with the
older tree on top. One step takes two cycles:

1. **ISSUE.** Pop the top entry and send its address to the bank arbiter. If
   the request is elided, the node and its subtree are gone, but the step
   still counts.
2. **DATA.** Use the returned point:
   * insert it into the sorted list (among equal distances, the earlier
     point stays ahead);
   * push the far child, but only if the list is not yet full, or if the
     splitting plane is closer than the current K-th best;
   * push the near child last, so it is visited next.

The PE always runs exactly `DEADLINE` steps:

* Default: `DEADLINE = WIN * (2^LEVELS - 1) / 4` = 16383 steps. That is a
  quarter of a traversal that visits every node of the window.
* Latency: a search takes `2*DEADLINE + 1` cycles from `start` to `done`,
  whatever the data.
* Events: `ev_cut` reports that the deadline arrived with work still on the
  stack. `ev_early` reports that the stack ran empty before the deadline.

**Range mode** (`cfg_range = 1`) changes two things. A point enters the list
only if its squared distance is at most `cfg_radius2`. A far subtree is also
skipped when its splitting plane lies outside that radius. The result is the
nearest (up to) K points inside the ball. Entries with `valid = 0` mean there
were fewer. Timing is the same as kNN.

### Bank conflicts

The arbiter is combinational with fixed priority: the lowest-numbered PE
wins. A second PE that asks the same bank for the *same* address shares the
read. A request for a different address in that bank is elided. No PE ever
waits, so the lock-step timing above holds with any number of conflicts.

### Query groups and LB2

The engine loads `NPE = 2` queries, starts both PEs in the same cycle and
takes both results in the same cycle, because the deadline is shared. It
writes all 2 x 4 neighbours into LB2 in one burst. LB2 hands out one entry per
cycle.

Within a window, groups follow each other every `NPE + 2*DEADLINE + 4`
cycles. The testbenches check this. A window consumes `cfg_qpw` queries,
which must be a multiple of `NPE`, in window order.

LB2 is sized with the line-buffer rule for a producer that writes a burst of
`W` entries and a consumer that drains one per cycle. The peak occupancy is
`W = NPE*K = 8`, so LB2 holds 8 entries and the engine never waits for it.
`ev_hold` would report such a wait. `lb2_overflow` is a sticky flag that
catches a buffer made too small by hand.

### The stencil

The stencil keeps the previous neighbour in a register. Each incoming point
is used twice, so the window is 2 points x 3 coordinates. The output is the
squared distance between the two points:

* stage 1 takes the differences;
* stage 2 squares and sums them;
* a result appears two cycles after the point that completes its window.

The kernel itself is only an example. Any 2x3 computation fits the same slot.

### The reduction

`reduce_max` is a reduction: many inputs give one output. It reads the
neighbour stream one entry per cycle and counts the entries in groups of
`K = 4`, which are the neighbours of one query.

* It keeps a running maximum of the squared distances of the valid entries.
  Invalid entries (range mode, nothing found) count towards the group but
  not towards the maximum.
* One cycle after the group's fourth entry it outputs the maximum. This is
  the squared radius of the query's neighbourhood. `rm_any` is low if the
  group had no valid entry.
* `st_clear` restarts the group count, together with the stencil.

What is reduced, and where, is this design's choice. The source names the
operation (the maximum over a chain of points) but gives no pipeline that
uses it.

## Sorting by chunks

The upstream partition puts each chunk in its own key interval, so sorting
inside each chunk orders the whole stream. `chunk_sorter` holds two banks of
`N = 64` registers.

* **Filling bank.** This is an insertion array. Every cell compares its key
  with the incoming point. The cells above the insertion point shift up by
  one, so the bank is always sorted, and equal keys keep their arrival order.
* **Draining bank.** This bank shifts its sorted chunk out from cell 0.
* **Swap.** The banks trade roles at the edge where the filling bank becomes
  full and the draining bank becomes empty.

With a continuous input, points therefore leave at one per cycle. The first
point of a chunk leaves one cycle after the chunk's last point entered.

## Interface of `streamgrid_top`

| port | dir | meaning |
|---|---|---|
| `cfg_qpw[15:0]` | in | queries per window (multiple of 2), constant within a frame |
| `cfg_range`, `cfg_radius2` | in | 0 = kNN, 1 = range search with squared radius; change only between windows |
| `pt_valid/pt_ready/pt_point/pt_last` | in/out/in/in | chunk points in heap order; `pt_last` on the frame's last chunk |
| `q_valid/q_ready/q_point` | in/out/in | query points |
| `nbr_valid/nbr` | out | neighbour entries, 4 per query, nearest first, PE 0's query first (no back-pressure) |
| `st_clear`, `st_valid/st_value` | in, out | stencil and reduction restart; stencil results |
| `rm_valid/rm_any/rm_value` | out | per query: largest squared distance among its valid neighbours; `rm_any` low if none |
| `so_key_dim`, `so_valid/so_ready/so_point` | in | sorting path input and key coordinate |
| `sorted_valid/sorted_ready/sorted_point/sorted_last` | out/in/out/out | sorted chunks |
| `ev_overwrite, ev_slide, ev_frame_end, ev_cut[1:0], ev_elide[1:0], ev_early[1:0], ev_hold` | out | one-cycle event pulses for statistics |
| `lb2_overflow` | out | sticky: LB2 was written while full |

A point is three signed 16-bit coordinates, so it is 48 bits wide. A squared
distance is 34 bits. A neighbour entry is `{valid, d2, point}`, 83 bits.
Reset is synchronous and active low.

Main parameters (defaults): `LEVELS = 15`, `WIN = 2`, `NSLOT = 3`,
`NBANK = 2`, `NPE = 2`, `K = 4`, `DEADLINE = 16383`, `LB2_DEPTH = 8`,
`SORT_N = 64`. The coordinate width `COORD_W = 16` is in `sg_pkg`.

At the defaults, LB1 is 2 banks x 2^15 words x 48 bits, 786 KB of memory.
The logic adds roughly 1.6k flip-flops. The sorter's 128 x 48-bit registers
come on top.

## What comes from where

The following are taken directly from the source description:

* the chunk window of two, the three LB1 slots and two banks;
* two search units sharing the banked buffer;
* bank conflict elision that drops the subtree under the conflicting node;
* a deadline counted in traversal steps, set to about 25% of a full
  traversal;
* K = 4 outputs of 3 coordinates per query;
* the 2x3 stencil with reuse 2 and two pipeline stages;
* a max reduction as a local operation;
* kNN and range search and sorting as the global kernels;
* sorting within spatially ordered chunks.

Everything else is this design's own choice:

* the heap layout of a chunk and low-bit bank interleaving;
* 16-bit coordinates;
* the two-cycle search step and pruning at push time;
* the meaning of range mode (nearest K inside the radius);
* the valid/ready handshakes and release protocol;
* fixed-priority arbitration with shared same-address reads;
* `LEVELS = 15`, the 64-point sort chunk and the stencil kernel;
* what the reduction reduces and its place after the neighbour stream.

### Where it departs from the source description

* In the reference dataflow example, the kNN stage has 8 pipeline stages and
  emits its 4x3 result every 8 cycles. Here a query group takes
  `2*DEADLINE + 6` cycles. The example describes an interface, not this
  search unit, so its figures are not met.
* Start times between stages are not fixed by an offline schedule with
  inserted bubbles. They come from handshakes: the engine waits for a full
  window, and LB1 refuses points while all slots are in use. Because the
  search time is fixed, the resulting schedule is still periodic. The LB2
  size is derived by hand from the same sizing rule, not by a solver.
* The evaluated networks also need an elementwise scaling stage, MLP layers
  (on a 256-PE array) and, for neural rendering, a depth transform and
  rasteriser. None of these is built. The source does not describe them in
  enough detail to build without inventing them.
* Kd-tree construction, DRAM and SRAM macros are outside the RTL. LB1 and the
  sorter banks are plain arrays and registers.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/sg_tb_pkg.sv` holds the shared reference code:

* `gen_tree` makes random but valid kd-trees by shrinking a bounding box
  down the tree;
* `ref_search` and `ref_group` re-implement the bounded search step by step,
  including the lock-step arbitration of several PEs;
* `brute_knn` and `brute_range` give exact answers;
* `build_kdtree` turns any point set into a median-split kd-tree in heap
  order;
* `lidar_scan` and `object_cloud` make synthetic workloads: a 64-beam
  spinning-LiDAR scan (ground plane and walls, centimetres) and a scene of
  spheres and boxes (millimetres).

| testbench | what it checks |
|---|---|
| `tb_bank_arbiter` | random requests against a priority model, including shared reads |
| `tb_chunk_line_buffer` | slot filling, window, slide and frame release, bank contents, back-pressure |
| `tb_kd_search_pe` | full deadline: exact kNN and range results against brute force; short deadline with random elisions: step-exact match; latency `2*DEADLINE+1` |
| `tb_knn_engine` | engine plus real LB1 over 3 frames; bit-exact against the lock-step model; group period |
| `tb_point_line_buffer` | ring order, space check, deliberate overflow |
| `tb_stencil_2x3` | values and the 2-cycle latency |
| `tb_reduce_max` | group maxima with random keep flags, empty groups, extreme values and clears; 1-cycle latency |
| `tb_chunk_sorter` | stable order, `out_last`, global order; one point per cycle with no gap between chunks; random stalls; key changes |
| `tb_streamgrid_top` | whole design, small trees and deadline 20, bit-exact neighbours, stencil and reduction values over three frames with the third in range mode, plus the sorting path; counts every mechanism (overwrite, slide, frame end, cut, early finish, elision, short range result, sorted chunks) and fails if one never happens; no hold, no overflow |
| `tb_streamgrid_full` | whole design at default parameters: one frame of four 32767-point chunks, 24 queries, group period 32772 cycles, bit-exact neighbours, stencil and reduction values, 3 sorted chunks |
| `tb_workload_lidar` | default parameters, kNN on a 131068-point LiDAR scan in 4 chunks, 48 queries near scan points; bit-exact against the lock-step model; PE 0 exact against brute force |
| `tb_workload_objects` | default parameters, ball queries (range mode, radius 20) on a 98301-point object scene in 3 chunks, 32 queries, some with empty balls; bit-exact against the lock-step model; PE 0 exact against brute force |

At full size, a 16383-step deadline is far more than a 4-neighbour search
needs, so no search is cut there. The reduced-size test forces cuts with a
tight deadline.

What the workload tests show about accuracy:

* On the LiDAR scan no search reaches the 16383-step deadline. PE 0 wins
  every bank conflict, so its search is complete and all its answers are
  exact.
* PE 1 loses every conflict with a different address in the same bank. The
  two PEs start together at the same roots and then diverge, so PE 1 drops
  subtrees near the top of the tree. In one LiDAR run PE 1 was exact on none
  of its 24 queries. In the object run, where many balls are empty, it was
  exact on 6 of 16 (the counts vary a little with the random seed).
* The deadline alone costs accuracy too. The single-PE model, with no
  elision, was exact on 10, 20, 30 and 42 of 48 LiDAR queries at deadlines of
  64, 256, 1024 and 4096 steps.
* So with fixed priority, conflict elision is much more costly than the
  deadline for the losing PE. A fairer arbiter (for example rotating
  priority) would spread the loss over both PEs. That is not built here.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert --top-module tb_streamgrid_top \
  -Irtl -Itb -y rtl -y tb rtl/sg_pkg.sv tb/sg_tb_pkg.sv tb/tb_streamgrid_top.sv \
  --Mdir obj_top -o sim
./obj_top/sim
```

Replace the module and file name for the others. `tb_chunk_sorter` and the
small block tests do not need `sg_tb_pkg.sv`, but including it is harmless.
The full-size run takes about a second of wall time (460k cycles).

### Known limits

* Queries must arrive in window order, `cfg_qpw` per window. The design does
  not check which chunk a query belongs to.
* `cfg_range` and `cfg_radius2` are sampled at every group start. Change them
  only while the engine is idle between windows if a whole window must use
  one mode.
* `pt_last` must be set on the last chunk of each frame. A frame needs at
  least `WIN` chunks.
* The neighbour and stencil outputs have no back-pressure. The consumer must
  take one entry per cycle while `nbr_valid` is high.
