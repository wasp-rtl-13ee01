# WaSP warp scheduling in SystemVerilog

In a tile-based mobile GPU, the fragment cores render one screen tile at a
time, and every tile starts with empty caches. The rasterizer emits the
tile's quads (2x2 pixels, one warp each) in scanline order. Neighbouring
quads read neighbouring texels, so the first access to each texture block
(a primary miss) is followed by a long run of hits and secondary misses to
the same block. The primary misses are therefore spread evenly over the
tile. Each one goes to main memory alone, and the core has too few warps to
hide that latency, particularly while a tile is filling or draining.

WaSP (Warp Scheduling to mimic Prefetching) changes only the order in which
a core launches the warps it has already been given. A small, evenly spread
subset of the tile's quads, the *priority warps*, is launched early. These
warps touch most of the tile's texture blocks, so their misses overlap and
the blocks are in the cache by the time the remaining *regular* warps,
still in scanline order, need them. Launching priority warps too eagerly
would fill the data cache's MSHRs (miss status holding registers). A full
MSHR file stalls the cache, and hits wait too. A small predictor therefore
estimates how many MSHRs will still be free when a new warp reaches the
load/store unit. It lets priority warps through only while that estimate
exceeds a threshold.

This repository holds RTL for that scheduling layer, one copy per fragment
core. The quad stream comes in from the rasterizer and core assignment, and
warps go out to the core. The rest of the GPU is the ordinary baseline
design, outside this RTL: rasterizer, shader cores, caches, L2 and DRAM. A
behavioural core model in `tb/` stands in for it in simulation.

## Block structure

```
                 per fragment core (wasp_core_scheduler), x4 in wasp_top
 quads  ┌────────────────────────────┐
 ──────►│ wasp_input_queue           │ pq head ┌──────────────────┐ warps
 in_    │  priority_classifier ──┬──►│────────►│ wasp_launch_ctrl │──────► launch_
 valid/ │  (Mesh4 test)          │   │ rq head │  priority/regular│        valid/
 ready  │  warp_fifo  (priority) │   │────────►│  choice, warp    │        ready
        │  warp_fifo  (regular)  │   │         │  slots, tile     │
        └────────────────────────────┘         │  barrier         │◄─ retire_cnt
                                               └────────▲─────────┘
                                 priority_over_regular  │
        ┌──────────────────────┐   nonblocked   ┌───────┴────────────┐
        │ nonblocked_pw_counter│───────────────►│ blocking_predictor │◄─ free_mshrs
        │ (7-bit up/down)      │                │ 5-bit reg, x2.5,   │   (L0 MSHR file)
        └──────────▲───────────┘                │ compare            │
   launch of a priority warp, pri_block_cnt,    └────────────────────┘
   pri_unblock_cnt, pri_retire_cnt (from the core)
```

| File | Module | Role |
|---|---|---|
| `rtl/wasp_pkg.sv` | package | quad, queue-entry and launch types; coordinate widths |
| `rtl/priority_classifier.sv` | `priority_classifier` | Mesh4 rule: is this quad a priority warp? |
| `rtl/warp_fifo.sv` | `warp_fifo` | generic FIFO, used as priority and regular queue |
| `rtl/wasp_input_queue.sv` | `wasp_input_queue` | the core's input queue, split in two, with tile numbers |
| `rtl/nonblocked_pw_counter.sv` | `nonblocked_pw_counter` | non-blocked priority warps in the core |
| `rtl/blocking_predictor.sv` | `blocking_predictor` | Real_freeMSHRs and Priority_over_regular |
| `rtl/wasp_launch_ctrl.sv` | `wasp_launch_ctrl` | picks the next warp, warp-slot limit, tile barrier |
| `rtl/wasp_core_scheduler.sv` | `wasp_core_scheduler` | one core's scheduler |
| `rtl/wasp_top.sv` | `wasp_top` | `NUM_CORES` schedulers, ports as arrays per core |

## Choosing priority warps: Mesh4

The tile is cut into 4x4-quad subtiles. The quad whose x and y quad
coordinates are both multiples of 4 becomes a priority warp. That is one
warp in sixteen, spaced evenly in both directions, so the subset touches far
more distinct texture blocks than its size suggests. The test needs only the
two low bits of each coordinate. `MESH` is a parameter (a power of two), so
the denser Mesh2 or sparser Mesh8/Mesh16 subsets can also be built. Mesh4
is the default. Coordinates are screen quad coordinates, 10 bits for x and
9 bits for y, enough for a 1960x768-pixel screen. The tile size is a
multiple of 4 quads, so screen and tile-local coordinates give the same
answer.

## The split input queue and tile order

The baseline core has a single input FIFO. Here it is divided into a
priority FIFO and a regular FIFO with the same total number of entries. The
classifier steers each quad into one of them as it arrives. The default
split is 64 + 960 entries: one 64x64-pixel tile is 1024 quads, 64 of them
priority quads. A whole tile fits, with its priority warps stored
separately, so priority warps can run ahead of the entire tile. With a
much smaller queue the scheduler could only look a few quad rows ahead.
Priority warps would then barely lead their regular neighbours, and the
heuristics below would behave almost alike. The stream is in order: when a
quad's own FIFO is full, `in_ready` drops and the quad waits, even if the
other FIFO has room.

Splitting the queue creates an ordering hazard that a single FIFO does not
have. The core must finish every warp of a tile before it starts the next
tile. With two FIFOs, the head of the priority FIFO can already belong to
the next tile while regular quads of the current tile are still queued. The
input queue therefore numbers the tiles. A `first_of_tile` flag on the
incoming quad advances a 2-bit sequence number, which is stored with every
entry. The launch controller keeps its own current-tile number and treats
only heads of that tile as eligible. Quads enter in order, so once neither
head belongs to the current tile and one belongs to the next, every quad of
the current tile has been launched. The controller then waits until the
core reports no warps left (launches minus retirements) and moves to the
next tile (`tile_switch`). Two bits are enough because the queues cannot
hold quads of more than three tiles at once. This holds whenever a tile has
at least as many quads as the two queues hold together.

## Blocking prediction

Before each launch the scheduler evaluates

```
Real_freeMSHRs        = freeMSHRs - nonblocked_priority_warps * CF
Priority_over_regular = Real_freeMSHRs > THRESHOLD
```

* `freeMSHRs` is the number of free MSHRs in the core's first-level data
  cache. That is the 0.5 KB L0 for a 4-wide pipeline, or the L1 for a
  2-wide one. It is copied every cycle into a 5-bit register.
* `nonblocked_priority_warps` counts priority warps in the core that are not
  waiting on a long-latency miss. Each of them is likely to raise about CF
  new misses before a warp launched now reaches the load/store unit. Warps
  that are already blocked have their misses in the MSHRs, so
  `freeMSHRs` already accounts for them.
* CF = 2.5 is the average number of distinct memory blocks one warp
  touches. It is given as `CF_NUM/CF_DEN = 5/2`, and the comparison is done
  multiplied by `CF_DEN`:
  `2*free - 5*nonblocked > 2*THRESHOLD`. This needs only a constant
  multiply, a subtract and a signed compare. `real_free_scaled` brings the
  left-hand side out for observation.
* `THRESHOLD` defaults to 2. A new priority warp will itself need about 2.5
  MSHRs, so at least that many should remain. The value is this design's
  choice: the tuned value is not published.

The choice rule: if `Priority_over_regular` is set, launch the
current tile's next priority warp; if there is none, launch a regular warp.
If it is clear, launch a regular warp; if there is none, launch the priority
warp anyway, so the core never idles while work is queued. The second
fall-back is this design's addition. Without it, a tile could end with
priority warps stuck in their queue.

The same hardware implements the two simpler heuristics one might compare
against, by changing parameters only:

| heuristic | `CF_NUM` | `THRESHOLD` | behaviour |
|---|---|---|---|
| WaSP (default) | 5 | 2 | priority while free - 2.5 x non-blocked priority warps > 2 |
| Fullpriority | 0 | -1 | always prefer priority warps |
| Freemshr10 | 0 | 9 | prefer priority warps while at least 10 MSHRs are free |

## Interface to the core and its timing

Per core (`wasp_core_scheduler`, or index `[c]` of the arrays on `wasp_top`):

| port | dir | width | meaning |
|---|---|---|---|
| `in_valid`, `in_ready`, `in_quad` | in, out, in | 1, 1, 36 | quad stream, valid/ready; `quad_t = {qx, qy, first_of_tile, payload[16]}` |
| `launch_valid`, `launch_ready`, `launch_data` | out, in, out | 1, 1, 37 | one warp per cycle at most; `launch_t = {quad, is_priority}` |
| `free_mshrs` | in | 5 | free MSHRs of the L0/L1 data cache, sampled every cycle |
| `pri_block_cnt` | in | 7 | priority warps that took a long-latency miss this cycle |
| `pri_unblock_cnt` | in | 7 | priority warps whose miss was served this cycle |
| `pri_retire_cnt` | in | 7 | priority warps that finished this cycle |
| `retire_cnt` | in | 7 | warps of either kind that finished this cycle |
| `priority_over_regular`, `nonblocked_pw`, `warps_in_core`, `tile_switch`, `throttled`, `cur_tile`, `pq_count`, `rq_count`, `real_free_scaled` | out | | status |

The core must keep the `is_priority` bit with each warp it holds, so that it
can report the priority-warp events. The event inputs are counts, because
one memory fill can wake many warps in the same cycle. A warp is assumed to
finish only while non-blocked. Timing:

* A quad accepted in cycle *t* can be launched in cycle *t+1* at the earliest.
* A launch, or an event reported in cycle *t*, changes `nonblocked_pw` and
  `warps_in_core` from cycle *t+1*.
* `free_mshrs` from cycle *t* is used in the decision of cycle *t+1*.
* `Priority_over_regular` is combinational from those registers.
* `launch_valid` stays high until the warp is accepted. `launch_data` may
  change while it waits, if the preferred kind changes.
* Reset is synchronous and active low. It empties the queues and clears the
  counters.

Assertions check the handshake, FIFO overflow and underflow, and counter
underflow and overflow.

## Parameters

| parameter | default | from the paper? |
|---|---|---|
| `NUM_CORES` | 4 | yes: four texture caches and four fragment instruction caches |
| `MAX_WARPS` | 64 | yes: main configuration, 4-wide pipeline, 64 warps |
| `MESH` | 4 | yes: Mesh4 |
| `MSHR_W` | 5 | yes: 5-bit free-MSHR register |
| counter width | 7 | yes: 7-bit non-blocked priority-warp register (derived from `MAX_WARPS`) |
| `CF_NUM/CF_DEN` | 5/2 | yes: CF = 2.5 |
| `THRESHOLD` | 2 | no, own choice |
| `PQ_DEPTH`, `RQ_DEPTH` | 64, 960 | no, own choice (one tile's quads; the baseline queue size is not published) |
| payload width | 16 | no, own choice |
| tile number width | 2 | no, own choice |

Larger cores fit too: `MAX_WARPS = 128` widens the counters to 8 bits
automatically.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

* `tb_priority_classifier`: every quad of a tile, plus random screen
  positions, against `x%4==0 && y%4==0`. Also checks that a tile holds
  exactly 64 priority quads.
* `tb_wasp_input_queue`: three tiles with random gaps and pops, against
  reference queues. Checks routing, order, tile numbers, `in_ready` and the
  counts. Both queues are driven full.
* `tb_nonblocked_pw_counter`: random event streams against a reference
  count. The counter is driven up to its 64-warp limit.
* `tb_blocking_predictor`: all 32x128 inputs against the formula in real
  arithmetic, plus the one-cycle register delay.
* `tb_wasp_launch_ctrl`: random predictor bit, back-pressure and retire
  times. The expected choice, pops, warp count and tile switches are
  computed each cycle. Also checks that warps of two tiles never share the
  core.
* `tb_wasp_core_scheduler` and `tb_wasp_top`: closed loop with
  `tb/gpu_core_model.sv`. The model has 64 warp slots, 8 MSHRs, a 60-cycle
  memory, two texture accesses per warp, and blocks that stay cached. The
  checker `tb/wasp_core_checker.sv` re-derives the counter, the predictor
  output and each launch decision independently. `tb_wasp_top` runs all
  parameters at their defaults: four cores with three 64x64-pixel tiles
  each, 12288 warps. It fails if any mechanism never happens: predictor-
  chosen priority launch, regular launch while a priority warp waits,
  priority fall-back, tile switch, warp-slot limit or input back-pressure.
* `tb_wasp_heuristics`: WaSP, Fullpriority, Freemshr10 and plain scanline
  order run on the same two tiles, with the same core model and 16 MSHRs.
  Scanline order is the same scheduler with `MESH = 512`, so that no quad of
  those tiles qualifies as a priority warp. Checks that Fullpriority stalls
  the cache, that WaSP stalls it less, and that WaSP finishes first.

In that last testbench the model gives these results:

| order | cycles | cache-stall cycles | avg. launch-to-finish, priority / regular warps |
|---|---|---|---|
| WaSP | 4183 | 0 | 208 / 114 |
| Fullpriority | 4432 | 264 | 253 / 120 |
| Freemshr10 | 4362 | 176 | 207 / 119 |
| Scanline | 4427 | 0 | - / 111 |

The pattern matches the idea behind the design. Unthrottled priority
warps fill the MSHRs and block the cache, which can make them slower than
no reordering at all. Throttled priority warps instead finish the tiles
sooner, even though each of them waits longer. The core model is a toy,
with one texture-block pattern and a fixed memory latency. These cycle
counts therefore say nothing about the speed-up on real games.

`tb_wasp_sensitivity` sweeps the number of warps per core: 28, 32, 48, 64
and 128. Each size runs once with WaSP and once in scanline order, with the
same model and 16 MSHRs. It checks that WaSP is never slower:

| warps per core | scanline cycles | WaSP cycles |
|---|---|---|
| 28 | 5585 | 4328 |
| 32 | 5450 | 4311 |
| 48 | 4936 | 4247 |
| 64 | 4423 | 4185 |
| 128 | 4162 | 4161 |

WaSP's gain is largest when the core has few warps to hide latency with,
and it vanishes once there are enough warps. With WaSP, 32 warps do better
here than 48 or 64 warps in scanline order. That is the register-file
saving this kind of scheduling aims at. The absolute gains come from the
toy model and are much larger than a real GPU would show.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/wasp_pkg.sv tb/tb_wasp_top.sv --top-module tb_wasp_top -o sim
./obj_dir/sim
```

Swap in any `tb_*.sv` and its module name. Every testbench finishes in
seconds; `tb_wasp_top` is the full-size run.

## Departures and gaps

* **Corner of the subtile.** The published descriptions of Mesh4 name the
  top-left and the top-right corner in different places. Both specify "both
  coordinates are multiples of four", and that rule is what is built.
* **Which warps are counted.** One description of the hardware counts all
  non-blocked warps; the formula counts only non-blocked priority warps. The
  formula is followed.
* **Own choices.** The threshold value, queue sizes, handshakes, tile
  numbering and the fall-back to priority warps are this design's choices.
* **Event interface.** How the core reports blocked and woken warps is
  defined here, not taken from a published design.
* **Not included.** The L0/L1 caches and their MSHRs, the shader core, the
  rasterizer and the assignment of quads to cores are not built: the
  baseline GPU provides them. They appear only as ports, and as the
  behavioural model in the testbenches.
