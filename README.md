# Scan matcher core for grid-based particle-filter SLAM

Grid-based Rao-Blackwellized particle filter SLAM (GMapping) spends most of
its time on *scan matching*. Every particle carries its own occupancy grid
map and a guess of the robot pose. For each particle, the pose is nudged
until the latest LiDAR scan lines up with that particle's map. The particles
are independent of each other, so their scan matching can run side by side.

This core does that work in programmable logic next to a CPU. The host sends
three things:

- the scan;
- for each of `N_PAR` particles, its pose guess;
- for each particle, a small binary cut-out of its map around the guess.

`N_PAR` hill-climbing engines then refine all of these poses at the same
time. The core returns each refined pose with its matching score, and the
host uses the score for the particle weights. For `M` particles the host
calls the core `M / N_PAR` times.

Four ideas keep the engines small and fast:

1. **Local, binary maps.** The search only looks at a 2W x 2W cell window of
   the map (W = 128, so 256 x 256 cells, 12.8 m at 0.05 m per cell). The
   search also only asks whether a cell is occupied, so the host thresholds
   the occupancy probabilities to one bit per cell before sending them. One
   local map is then 64 Kibit and fits in on-chip RAM.
2. **A tripled map layout.** Each memory row holds, for every column, the
   three vertically adjacent cells. So the 3 x 3 neighbourhood of any cell
   comes out of one row read in one cycle.
3. **A score table.** The per-beam score is exp(-d^2 / 2 sigma^2). The
   distance d can only be one of a few values given by the offset inside the
   3 x 3 window, so the exponential becomes a nine-entry register table.
4. **A fixed iteration count.** Every engine runs the same number of
   hill-climbing iterations (25 by default). So all engines take the same
   number of cycles whatever the data, and they finish together.

## Block structure

```
              AXI4-Lite                         AXI4-Stream in
                  |                                   |
             axil_regs ---- params, table ----+  stream_loader
                  |  start / done             |   |        |  scan, poses, map rows
             control FSM (scan_matcher_core)  |   v        v
                  |                           |  per engine k = 0..N_PAR-1:
                  |                           |   scan_buffer   local_map_bram
                  |                           |        \           /
                  +--- start ---------------->+-> greedy_matcher (search control)
                                                     |
                                                scan_score_unit
                                                  scan_point_unit (CORDIC transform)
                                                  window_matcher  (window test + table)
                  result_streamer <--- refined poses and scores
                         |
                  AXI4-Stream out
```

| File | Role |
|---|---|
| `rtl/smc_pkg.sv` | Q16.16 type, pose/scan/parameter structs, CORDIC constants, default score table |
| `rtl/scan_matcher_core.sv` | Top level: control FSM and `N_PAR` engines |
| `rtl/axil_regs.sv` | AXI4-Lite register file |
| `rtl/stream_loader.sv` | Parses the input stream into the engines' memories |
| `rtl/scan_buffer.sv` | Per-engine copy of the scan |
| `rtl/local_map_bram.sv` | Per-engine binary local map in tripled layout, two window ports |
| `rtl/greedy_matcher.sv` | Hill-climbing controller of one engine |
| `rtl/scan_score_unit.sv` | Scores one candidate pose, one beam per cycle |
| `rtl/scan_point_unit.sv` | Beam endpoint and missed point to cell indices |
| `rtl/cordic_sincos.sv` | Pipelined CORDIC sine/cosine |
| `rtl/window_matcher.sv` | Hit/miss window test and table look-up |
| `rtl/result_streamer.sv` | Sends results on the output AXI4-Stream |

## How one beam is scored

A pose is x = [px, py, pth] and a beam is z_i = [r_i, t_i] (range and angle
in the sensor frame). `scan_point_unit` computes two points:

- the endpoint `p = (px + r cos(pth+t), py + r sin(pth+t))`;
- the *missed* point `p^`, which lies `delta` closer to the sensor on the same
  ray.

Both become cell indices with `floor((p - o) / Delta)`, where `o` is the
world position of cell (0, 0) of the host's map. The unit multiplies by the
register value `1/Delta` instead of dividing. It then subtracts the local
map's corner cell to get local indices C^H (hit) and C^M (missed).

`local_map_bram` returns the 3 x 3 window around C^H and the one around C^M
in the same cycle. `window_matcher` then checks the nine offsets
(kx, ky) in -1..1:

- An offset is a candidate when the hit-window cell is occupied and the
  missed-window cell at the same offset is free.
- The free-cell test rejects false matches: a wall seen from its far side,
  or a beam that passes through a cell marked occupied.
- Among the candidates, the one closest to the centre wins, at distance
  sqrt(kx^2 + ky^2) * Delta. Its score is read from the table; table entry
  `k = (ky+1)*3 + (kx+1)` belongs to offset (kx, ky).
- If there is no candidate, or the endpoint lies outside the local map, the
  beam scores 0.

The score of a pose is the sum over all beams. `scan_score_unit` streams the
beams through this chain at one per cycle. Its `done` comes
`n + CORDIC_ITER + 8` cycles after `start` for n beams, whatever the map
contents.

## The tripled local map

A 3 x 3 window spans three rows. Stored one cell per bit in plain row order,
a window would need three reads or a fully partitioned memory. Here, row `y`
of the memory holds, for every column `x`, the triple
`(m(x, y-1), m(x, y), m(x, y+1))`. The memory is built as three banks `lo`,
`mid` and `hi` of `MAP_SIZE` x `MAP_SIZE` bits that share one row address.

- A window around (cx, cy) is bits cx-1..cx+1 of row cy in all three banks.
  That is one read.
- The memory is three times the size of the map. For two engines at the
  default size that is 2 x 196,608 bits.
- The host still sends the plain binary map, one bit per cell. When row r
  arrives, the loader writes it to `mid[r]`, `lo[r+1]` and `hi[r-1]`.
- Rows and columns beyond the edge read as free.
- A window whose centre lies outside the map is all zeros.

## The search

`greedy_matcher` holds the current pose, its score and two step sizes, a
linear one and an angular one (0.05 m and 0.05 rad after reset; both are
registers). It first scores the initial guess. Each iteration then scores
the six neighbouring poses one after another, in the order x+, x-, y-, y+,
th+, th-.

- If the best neighbour is strictly better than the current pose, the pose
  moves there. A tie goes to the direction scored first.
- Otherwise both steps are halved.

After `NUM_ITERS` iterations the current pose and its score are the result.
There is no convergence test, which is what makes the latency fixed:

```
cycles(start..done) = (n + CORDIC_ITER + 13) + NUM_ITERS * (6 * (n + CORDIC_ITER + 11) + 1)
```

For n = 180 beams and 25 iterations this is 31,888 cycles, or 0.32 ms at
100 MHz. For 361 beams it is 59,219 cycles. All engines share one start and
finish in the same cycle.

The local map is centred on the cell of the initial guess, so the engine
derives the local map's corner cell itself:
`cx0 = floor((x'.x - o_x) / Delta) - W`, and likewise for y. The host must
cut the map the same way: local cell (i, j) is map cell (cx0 + i, cy0 + j).

## Host interface

### Registers (AXI4-Lite, 32-bit, byte addresses)

| Addr | Name | Meaning | Reset |
|---|---|---|---|
| 0x00 | CTRL | W: bit0 start (ignored while busy), bit3 load_scan. R: bit0 busy, bit1 done, bit2 idle, bit3 load_scan | 0 |
| 0x04 | NUM_ITERS | hill-climbing iterations | 25 |
| 0x08 | NUM_SCANS | beams in the scan (1..MAX_SCANS) | 0 |
| 0x0C / 0x10 | ORIGIN_X / ORIGIN_Y | world position of map cell (0, 0), Q16.16 | 0 |
| 0x14 | INV_RES | 1/Delta, Q16.16 | 20.0 |
| 0x18 / 0x1C | LIN_STEP / ANG_STEP | initial steps, Q16.16 | 0.05 |
| 0x20 | FREE_DELTA | delta, distance from endpoint to missed point | 0.0707 |
| 0x24..0x44 | LUT0..LUT8 | score table, entry k = (ky+1)*3+(kx+1) | exp(-(kx^2+ky^2)/2) |

The table reset values assume sigma = Delta. For another sigma, write
`exp(-(kx^2+ky^2) * Delta^2 / (2 sigma^2))` in Q16.16.

### Input stream (32-bit words, no TLAST needed)

1. Only if `load_scan` was written with start: `NUM_SCANS` pairs
   (range, angle), both Q16.16.
2. For each engine k = 0..N_PAR-1:
   - the initial pose x, y, theta;
   - the local map as 256 rows, row 0 first. Each row is 8 words, and bit b
     of word j is cell x = 32 j + b (1 = occupied).

The scan is stored in every engine at once and kept between runs. Within
one scan-matching phase, only the first call needs `load_scan`.

### Output stream

For each engine k, four words are sent: x, y, theta and score, all Q16.16.
TLAST is set on the last word. CTRL.done is then set.

### Map thresholding

The core expects the host to turn occupancy probabilities into bits. The
test is "occupied" for p > T and "free" for p < T. A drawing of the
procedure that this design follows maps 0.5 to 1 at T = 0.5. The two
readings differ only for cells exactly at T. Either way, a cell is taken as
free exactly when its bit is clear, so the core's behaviour does not depend
on which reading is used.

## Number format and trigonometry

All real values use Q16.16 (32-bit signed, 16 fractional bits):

- coordinates in metres, angles in radians;
- scores, so the sum of up to 512 table values cannot overflow;
- steps.

Sine and cosine come from a 20-stage CORDIC. It works in Q2.30, starts from
(1/K, 0) so no gain correction is needed, and first folds the angle into
±pi/2. Its error is below one Q16.16 step. The coordinate transform adds
two pipeline stages, for the products and for the cell scaling. All
products are floored (arithmetic shift), so the hardware and the reference
model in the testbenches agree bit for bit.

## Departures from the original design and own choices

- The original core was produced by high-level synthesis; this RTL is hand
  written. The block split, pipelining and all latencies are this design's
  own.
- These points are not specified in the source and were chosen here:
  - the CORDIC;
  - the six search directions and their order;
  - the strict-improvement rule, and halving both steps together;
  - the register map and the stream layout;
  - the default step sizes, delta and sigma;
  - `MAX_SCANS` = 512;
  - the second map read port (hit and missed windows in one cycle).
- The original builds the local map around "the cell of the current pose".
  Here that is the cell of the initial guess. The corner is derived from it,
  not sent.
- Rows of the tripled map are expanded on the write side, so the host sends
  one bit per cell.
- Memory use at the defaults is about 459 Kibit (13 BRAM36). The original
  reports 61 BRAM36, which includes the partitioning that its synthesis tool
  chose.

## Verification

Every block has a self-checking testbench in `tb/`. The testbenches compare
against `tb/smc_ref_pkg.sv`, an independent behavioural model. The model
uses the same fixed-point rules, but works on a plain 2D map array, with
its own CORDIC loop and search.

| Testbench | What it covers |
|---|---|
| `tb_window_matcher` | directed cases (centre, corner, veto, outside) and 2000 random window pairs |
| `tb_local_map_bram` | random maps at 64 x 64; every window, on both ports, against the plain map, including edges and out-of-range centres |
| `tb_scan_point_unit` | bit-exact against the model; the hit cell also equal to the one from real-valued trigonometry (away from cell borders); latency and throughput |
| `tb_scan_buffer` | write and read-back of all addresses |
| `tb_scan_score_unit` | scores of a ray-marched room scan at the true and at offset poses; `done` latency |
| `tb_greedy_matcher` | full searches bit-exact against the model; convergence to the true pose; latency formula |
| `tb_axil_regs` | reset values, byte strobes, start/done/busy behaviour, both write orders |
| `tb_stream_loader` | both stream layouts (with and without scan), random stalls |
| `tb_result_streamer` | packet order, TLAST, random back-pressure |
| `tb_scan_matcher_core` | end to end at the default size |

`tb_scan_matcher_core` runs the top at its default parameters: two engines,
256 x 256 maps and a 180-beam scan of a ray-marched 16 m x 6 m room. It
makes two calls, the second reusing the scan. It checks:

- every pose and score bit-exact against the model, and within two cells of
  the true pose;
- the compute latency, 31,888 + 3 cycles, the same in both calls;
- that each mechanism happens at least once: pose moves, step halvings,
  endpoints outside the local map, matches vetoed by the missed cell, scan
  reuse, input stalls and output back-pressure.

It runs in about 25 s. `tb_workload_fine_scan` repeats the same procedure
with the largest scan the design is meant for: 361 beams at 0.5 degree, in
a 24 m corridor where many endpoints leave the local map. Its compute
latency is 59,219 + 3 cycles.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/smc_pkg.sv tb/smc_ref_pkg.sv tb/tb_scan_matcher_core.sv --top-module tb_scan_matcher_core
./obj_dir/Vtb_scan_matcher_core
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>`.

## Limits

- `MAP_SIZE` (= 2W) must be a multiple of 32 and at least 64.
- At most `MAX_SCANS` beams.
- `NUM_ITERS` >= 0 and `NUM_SCANS` >= 1.
- The start of a run must not come while the core is busy; it is ignored
  then.
- Endpoints outside the local map are not scored. W must be large enough
  for the environment. 12.8 m suits indoor scans.
- The search is greedy. As in the original, it can stop one cell from the
  best pose.
