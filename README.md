# Correlative scan matching in hardware: a two-core accelerator for 2D LiDAR SLAM

Most 2D LiDAR SLAM methods (particle-filter SLAM, graph-based SLAM, Hector
SLAM) spend most of their time in one step: **scan matching**, which finds the
robot pose at which a new LiDAR scan best overlaps an occupancy grid map. This
RTL implements that step as a stand-alone IP core, so that a small FPGA SoC can
serve any of these SLAM methods without changing the logic. The host gives a
grid map, a scan and an initial pose guess; the core searches a discrete
window of poses around the guess and returns the best one with its score.

The search method is **correlative scan matching (CSM)** with a two-level
(coarse-to-fine) branch-and-bound. It finds the best pose in the whole
window (with one edge case, described under the departures below), unlike iterative methods that can stop in a local optimum. Two cores
sit side by side. Each has its own 64-bit AXI4-Stream input and output and its
own AXI4-Lite register port, so that a host can run frontend scan matching
on one core while the other does backend loop-closure detection.

## The problem a core solves

A map `M` is a grid of `W x H` cells (at most 320 x 320), each holding an
occupancy value. The core keeps the upper 6 bits of each 8-bit input value. A
scan is `N <= 512` points `(r_k, theta_k)` in polar form. For a pose
`xi = (x, y, phi)` a point lands in cell

    i_k = floor((r_k cos(theta_k + phi) + x) / r)
    j_k = floor((r_k sin(theta_k + phi) + y) / r)

and the score of the pose is `s = sum_k M(i_k, j_k)`. Points outside the map
add nothing. Candidate poses are
`xi^0 + (r n_x, r n_y, dtheta n_theta)` with integer offsets in the window
`[-w_x, w_x) x [-w_y, w_y) x [-w_theta, w_theta)`. The core returns
`(n_x*, n_y*, n_theta*)` and `s*`, and the host turns them into a pose.

Trying every candidate costs `8 w_x w_y w_theta N` map reads. The coarse-to-fine
search avoids most of them:

1. A **coarse map** `M'(x, y) = max over 0 <= dx, dy < w of M(x+dx, y+dy)`
   (here `w = 8`). The coarse score `s'` of an offset `(n_x', n_y')`, computed
   on `M'`, bounds from above the fine score of every offset in the `w x w`
   block that starts there.
2. For each `n_theta`, the scan is projected once with offset (0, 0); every
   candidate then only adds `(n_x, n_y)` to the stored indices.
3. Coarse candidates are taken every `w` cells. A candidate whose `s'` is not
   larger than the best fine score `s*` found so far is **pruned**: its whole
   block cannot contain a better pose. Otherwise the block is **refined**: all
   `w^2` fine scores are evaluated, and a fine score replaces the best only if
   it is strictly larger.

`s*` starts at minus infinity, so the first coarse candidate is always
refined. The hardware visits candidates in the same order as the sequential
algorithm and compares in the same way, so it returns exactly the pose the
sequential algorithm returns, including which of several equal scores wins.
All testbenches check against that rule.

## Data flow through a core

```
 AXI4-Stream in ──► main controller ──► sliding-window max ──► fine map (16 banks)
                          │                     └────────────► coarse map (8 banks)
                          └───────────► float-to-fixed ──────► scan buffer (512 x 64 b)
 AXI4-Lite ──► control registers                                    │
                          optimizer ──► discretisation (CORDIC) ──► indices buffer (512 x 32 b)
                             │  ▲                                   │
                             │  ├── coarse matching (8 scores/clk) ◄┤ + coarse map
                             │  └── fine matching (16 scores/clk)  ◄┘ + fine map
                             ▼
                     AXI4-Stream out (2 beats)
```

| Unit | File | What it does |
|---|---|---|
| main controller | `csm_main_ctrl.sv` | reads flag, map and scan packets and routes them; starts the optimizer |
| control registers | `csm_ctrl_regs.sv` | AXI4-Lite registers: map size, window, initial pose, steps, point count, start/done |
| sliding-window maximum | `csm_swmax.sv` | quantises the map to 6 bits, writes the fine map, builds the coarse map on the fly |
| float-to-fixed | `csm_f2fix.sv` | turns single-precision (range, angle) pairs into Q16.16 and fills the scan buffer |
| optimizer | `csm_optimizer.sv` | runs the coarse-to-fine search and sends the result |
| discretisation | `csm_discretize.sv` | projects the scan into cell indices for one `n_theta` |
| coarse matching | `csm_coarse_match.sv` | eight coarse scores at once |
| fine matching | `csm_fine_match.sv` | one `w x w` block, sixteen fine scores at once, running best |
| map buffers | `csm_fine_map.sv`, `csm_coarse_map.sv` | banked BRAM buffers that return a whole group of cells per clock |
| RAM | `csm_sdp_ram.sv` | simple dual-port RAM, one clock read latency (scan buffer, indices buffer, map banks) |
| core / top | `csm_core.sv`, `csm_system.sv` | one core; two cores with per-core ports |

Shared types, sizes and the register map are in `csm_pkg.sv`.

## Packets and registers

Every stream beat is 64 bits. A query on the input stream is:

1. a **map flag packet**, with the flag in bit 0. F = 1 means the map follows;
   F = 0 means the core reuses the maps already in its buffers;
2. if F = 1, the map: `ceil(W*H/8)` packets with eight 8-bit cells each, in
   row-major order. Cell 1 is in bits [63:56] and cell 8 in bits [7:0]. Cells
   past `W*H` in the last packet are ignored;
3. a **scan flag packet**, with the same meaning of bit 0;
4. if F = 1, N scan packets, each `{range[63:32], angle[31:0]}` as IEEE-754
   single-precision values in metres and radians.

Flag packets let a host match many scans against one map, or one scan against
many maps (for example, the particles of a particle filter), without sending
the same data again. The result is two beats on the output stream:

    beat 0: {s* (32 bits, zero-extended), n_x* (32-bit signed)}
    beat 1: {n_y* (32-bit signed), n_theta* (32-bit signed)}   TLAST = 1

Registers (32-bit, byte addresses):

| Addr | Name | Format |
|---|---|---|
| 0x00 | CTRL | write bit 0 = 1 to start; read: bit 0 start pending, bit 1 done (cleared by the read), bit 2 idle |
| 0x10 | NUM_POINTS | N, 1..512 |
| 0x14 / 0x18 | MAP_W / MAP_H | cells, 1..320 |
| 0x1C / 0x20 / 0x24 | WIN_X / WIN_Y / WIN_T | `w_x`, `w_y` in cells, `w_theta` in angle steps |
| 0x28 / 0x2C / 0x30 | POSE_X / POSE_Y / POSE_T | initial pose, Q16.16 metres / radians, map origin at cell (0, 0) |
| 0x34 | STEP_T | `dtheta`, Q16.16 radians |
| 0x38 | INV_RES | `1/r`, Q16.16 cells per metre |

Write the registers, then CTRL, then send the stream. The start is held until
the core is idle.

## The coarse map: sliding-window maximum in one pass

The coarse map is built while the map streams in. No second pass over the
fine map is needed. The maximum is split into two steps:

* **Column maxima.** A cache of 320 columns x `w` rows keeps the last `w`
  values of every column, with row `y` in slot `y mod w`. When a cell arrives,
  the maximum of its column over the last `w` rows is taken from the cache,
  with the new value in place of the oldest.
* **Row maxima.** A shift register keeps the last `w - 1` column maxima of the
  current row. With the new column maximum, it gives the maximum of a
  `w x w` window.

The window reaches `w - 1` cells right of and below the cell it belongs to.
So the unit walks an extended grid of `(W + 7) x (H + 7)` positions, in which
positions past the map read as 0. The coarse value of cell `(x, y)` is
written when position `(x + 7, y + 7)` is visited. The unit handles one
position per clock. A 320 x 320 map takes about 107,000 cycles, and the
input stream is throttled to one packet per eight cycles.

## Parallel matching and how the map buffers are banked

Both matching units read several map cells per clock. They need the map split
into banks so that every cell of one read sits in a different bank.

**Fine matching** evaluates a `w x w` block of offsets. Each pass covers two
rows of the block (`n_y`, `n_y + 1`) and all `w` columns. For one scan point
`(i, j)`, the 16 scores of a pass need the `8 x 2` cells `M(i + n_x' + a, j + n_y + b)`,
`a < 8`, `b < 2`. The fine map is split by `x mod 8` and `y mod 2` into 16
banks. Any `8 x 2` window then touches each bank exactly once, whatever its
origin. A crossbar routes the bank outputs back to the 16 lanes. One scan
point per clock gives `w/2 = 4` passes of `N` cycles each. With the pipeline,
the unit takes `4 (N + 3)` cycles per block: **1452 cycles (14.5 us at
100 MHz) for N = 360**. The published design takes 15 us for the same
case, and the testbench checks against that bound.

**Coarse matching** evaluates eight coarse candidates that are `w` cells
apart: `M'(i + n_x' + 8c, j + n_y')` for `c < 8`. These cells have the same
`x mod 8`, so plain banking by `x mod 8` would put all of them in one bank.
So the columns are stored in a **rearranged order**: column `x` goes to
position `(x mod 8) * 40 + (x div 8)`. Columns `x, x+8, ..., x+56` then sit at
eight consecutive positions, and banking the positions by `mod 8` spreads
them over all eight banks. Each lane works out its own position, so groups
that start left of the map (negative `x`) still read correctly.

In both buffers, any lane whose cell is outside the map extent (negative, or
not less than MAP_W / MAP_H) reads 0. This is what makes points outside the
map count for nothing.

## The optimizer's loop nest

For each `n_theta`, the optimizer first has the discretisation unit fill the
indices buffer. That takes `N + 24` cycles, because the CORDIC pipeline is 20
stages deep. It then walks the coarse rows. In each row it takes groups of
eight coarse columns: one coarse-matching run (`N + 2` cycles) gives eight
bounds. The eight lanes are then examined one by one. A lane beyond
`w^_x = 2 w_x / 8` is skipped. A lane whose bound is not above `s*` is
pruned. Otherwise a fine-matching run refines the lane's block and may update
`s*`. Each lane sees the `s*` left by the lanes before it, exactly as in the
sequential loop.

Run time is therefore roughly
`2 w_theta [ (N + 24) + ceil(w^_x / 8) w^_y (N + 2) + (refined blocks) 4 (N + 3) ]`
cycles. The number of refined blocks depends on the data. In the two-core
test, a 320 x 320 map with 360 points and a window of (16, 16, 2) took
about 160,000 cycles including the map transfer, and 40,000 cycles with the
map reused. The largest loop-detection window (200 x 200 cells, 42 angle
steps, 180 points) is far more costly. On a sparse test map it took 9.7
million cycles (97 ms at 100 MHz), and about half the coarse candidates were
refined. A particle-filter query with a 4-cell window took about 63,000
cycles with the scan reused.

## Numbers inside the core

* Ranges, angles and the pose are Q16.16. The float-to-fixed unit truncates
  toward zero and saturates values that do not fit; NaN and infinity saturate.
* Discretisation adds `n_theta * dtheta` to the pose angle once per
  `n_theta`. It reduces each point's angle to `[-pi/2, pi/2]` with a sign
  flag and runs a 20-stage CORDIC with 24 fraction bits. The result is
  multiplied by `1/r` and floored, and the index is saturated to 16 bits.
  A point whose exact index lies very close to a cell edge may land in the
  neighbouring cell. The discretisation test bounds this error, and the
  end-to-end tests use scans without such points.
* Scores are 16-bit unsigned: `63 x 512 < 2^15`, so they cannot overflow.

## Where this design departs from or adds to the published one

* The published text does not give the register map, the bit positions of
  the packet fields, the meaning of the flag values, the order of the flag
  packets, the fixed-point format or the sin/cos method. All of them are
  choices made here, as listed above.
* The initial pose is passed in registers and the cell size as its
  reciprocal. The published core lists map size, window, steps and point
  count as registers but does not say how the pose reaches the core.
* A done bit in CTRL and four observation strobes per core (map reuse, scan
  reuse, prune, refine) were added for testing and monitoring.
* `w^_x = 2 w_x / w` uses integer division. For a window whose `2 w_x` is not
  a multiple of 8 (for example the 0.25 m windows used with 5 cm cells,
  `w_x = 5`), the host should round `w_x` to a multiple of 4. Otherwise the
  last partial coarse column is not searched.
* The coarse-search loop in the published parallel form steps `n_x'` by
  eight coarse columns and assumes `w^_x` is a multiple of eight. Here the
  last group may be partial: lanes beyond `w^_x` are skipped, so any
  `w^_x <= 40` works.
* The coarse map is defined only over the map itself (`x, y >= 0`), as in
  the published definition, and coarse cells outside the map read 0. A scan
  point that falls just left of or above the map (up to `w - 1` cells out)
  therefore adds 0 to the coarse score. The fine cells of its block may lie
  inside the map, though. For such points the coarse score is not a strict
  upper bound, and a block could in rare cases be pruned although it holds
  the best pose. Points beyond the right or bottom edge are not affected.
  The bundled reference model has the same definition, so the tests check
  this behaviour and do not flag it. Trimming the map with a margin of `w`
  cells around every point the window can reach avoids the case.
* The DMA controllers, AXI interconnect, processor, DRAM and host software of
  the board design are not part of this RTL. Each core's stream and register
  ports are ports of `csm_system`, as arrays indexed by core.

## Sizes and resources

Defaults follow the published design: maps up to 320 x 320 cells, `w = 8`,
8 coarse and 16 fine lanes, 6-bit cells, up to 512 points, two cores. Each
core holds about 1.26 Mbit of RAM: two map buffers of 614,400 bits each, plus
the scan buffer (512 x 64) and the indices buffer (512 x 32). Coarse
synthesis of the two-core top gives about 3,000 flip-flops outside the
memories. The largest logic is the CORDIC pipeline and the column cache of
the sliding-window unit.

## Verification

Each unit has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. `csm_ref_pkg.sv` is a reference model of
the whole search. It uses real-valued trigonometry, a brute-force coarse map
and the sequential algorithm, and it draws scans whose points are not
within 0.02 cell of a cell edge, so that its answer is exact.

| Testbench | Checks |
|---|---|
| `tb_csm_sdp_ram` | random reads and writes; a read of the address being written returns the old data |
| `tb_csm_fine_map`, `tb_csm_coarse_map` | random block reads, including reads past the map edges; one-cycle latency |
| `tb_csm_swmax` | fine and coarse maps of two sizes, sent back to back with stream gaps, against brute force; one position per clock |
| `tb_csm_f2fix` | random and special floats (zero, tiny, huge, infinite) against the simulator's own float-to-real conversion |
| `tb_csm_discretize` | indices against real-valued projection, with angles wrapping past pi; done within `N + 26` cycles (the unit takes `N + 24`) |
| `tb_csm_coarse_match` | eight scores against a model; latency `N + 2` |
| `tb_csm_fine_match` | best-of-block with ties and incoming best; 1452 cycles for N = 360, at most 1500 |
| `tb_csm_optimizer` | search order, pruning and refine counts against Algorithm 1, with modelled units and output backpressure |
| `tb_csm_ctrl_regs` | AXI4-Lite writes and reads with random delays; start and done behaviour |
| `tb_csm_main_ctrl` | all four flag combinations; routing and counts of packets |
| `tb_csm_core` | five end-to-end queries through AXI, including all reuse cases and a sparse map where pruning happens |
| `tb_csm_system` | both cores at full size concurrently: a 320 x 320 map with 360 points, and a 200 x 150 map with a loop-detection-sized window; counts map reuse, scan reuse, pruning, refinement, points outside the map, output backpressure, input stalls and overlap of the two cores, each of which must happen |
| `tb_csm_slam_workloads` | the published SLAM settings on both cores at once: particle-filter matching (one 180-point scan against four particle maps, window 4 x 4 cells x 14 one-degree steps, scan reused), and loop detection on a 320 x 320 submap with a 200 x 200 cell, 42-step window, followed by the smaller 96 x 96 cell, 28-step window with the map reused |

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/csm_pkg.sv tb/csm_ref_pkg.sv \
        rtl/*.sv tb/tb_csm_system.sv --top-module tb_csm_system -o sim
    ./obj_dir/sim

The full-size system test runs in under a minute.
