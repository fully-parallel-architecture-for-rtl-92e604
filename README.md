# Disparity-parallel semi-global stereo matching with a unified rank cost

This is synthesizable SystemVerilog for a streaming stereo-matching engine. It
takes a rectified left/right camera pair, one pixel pair at a time in raster
order, and produces a dense disparity map: for every pixel of the left image,
how far the same scene point has moved in the right image. The design follows
the architecture of Y. Yao and Y. Cheng, "Fully Parallel Architecture for
Semi-global Stereo Matching with Refined Rank Method". It has three ideas:

* **A rank-based matching cost with local structure.** Each pixel is described by
  which of its 9x9 neighbours are darker than it. Two windows are compared by
  the difference of those counts (the classic rank transform) plus the number
  of neighbours whose darker/not-darker bit disagrees ("rank SAD"). The cost
  does not depend on absolute brightness, and the second term restores some of
  the window's spatial structure that a plain rank count throws away.
* **Semi-global matching (SGM) on four causal paths.** Costs are smoothed
  along the 0°, 45°, 90° and 135° directions. Each of these paths only looks at
  pixels that have already arrived, so one pass over the stream is enough.
* **Full parallelism over disparity.** All 64 candidate disparities are
  processed side by side, in 64 cost PEs and 64 lanes of every path engine. The
  9x9 window is handled one line per clock, so the core clock runs at nine
  times the pixel rate and nothing ever stalls.

The defaults are those of the target application: 450 x 375 images,
disparities 0..63 and 9x9 windows. At 60 frames/s that gives a 91 MHz core
clock (9 x 450 x 375 x 60).

## Data flow

```
 pix_l ─► line_buffer ─► disp_scan (9 cols)  ──────────────┬─► p2r_calc ──────────┐ P2 per direction
 pix_r ─► line_buffer ─► disp_scan (72 cols) ─► 64 x cost_pe (C(p,d), 12 bit) ──┐  │
                                                                                 ▼  ▼
                          lr_calc 0° ─┐   lr_calc 45° ─┐   lr_calc 90° ─┐   lr_calc 135° ─┐
                          (register)  │   (RAM, x-1)   │   (RAM, x)     │   (RAM, x+1)    │
                                      └───────────────┴────────┬───────┴────────────────┘
                                                               ▼  16 bit x 4 x 64
                               disp_est: S(p,d) = Σ Lr, argmin ─► db, S(db-1), S(db), S(db+1)
                                                               ▼
                               validation_check: left/right consistency (D-1 pixel delay)
                                                               ▼
                               post_proc: parabola sub-pixel, scale to 0..255 ─► raw_* ports
                                                               ▼
                               median_filter 5x5 ─► out_v / disp
```

`coord_gen` counts the raster position, `min_tree` is the comparator tree
used for each path engine's minimum and for the winner-take-all search, and
`lr_calc_sub` is one disparity lane of a path engine. `sgm_pkg` holds the
widths and the direction type.

## The matching cost (`cost_pe`)

For a left pixel p and disparity d, with T[·] = 1 when its argument holds:

```
tl(q) = T[L(q) < L(p)]          over the 9x9 window around p
tr(q) = T[R(q-d) < R(p-d)]      over the 9x9 window around p-d
C(p,d) = | Σ tl - Σ tr |  +  Σ | tl - tr |
         (rank filter/AD)     (rank SAD)
```

Its maximum is 160 for a 9x9 window, and it is carried on a 12-bit bus. A PE
works on one window line per clock. A 4-bit tap counter selects line t of
both windows. Three small counters give that line's left rank count, right
rank count and mismatch count, each at most 9. Three accumulators add them up
over the nine clocks. In the ninth clock the PE forms |l - r| + s and
registers it. Sixty-four PEs run in lock step, one per disparity.

The windows come out of two column shift registers (`disp_scan`). The left
one holds 9 columns. The right one holds 64 + 8 = 72 columns, so the window
for disparity d is simply columns d..d+8 and no multiplexing is needed. Both
registers shift only once per pixel, and that shift happens on the same clock
edge that starts the PEs. The windows therefore stay still for exactly the
nine clocks in which they are read.

## The path recursion (`lr_calc`, `lr_calc_sub`)

Along each direction r:

```
Lr(p,d) = C(p,d) + min( Lr(p-r,d),
                        Lr(p-r,d-1) + P1,
                        Lr(p-r,d+1) + P1,
                        min_k Lr(p-r,k) + P2r ) - min_k Lr(p-r,k)
```

P1 is a constant (8 here). P2r depends on the left-image brightness step
along the path: P2r = max(P1, P2' / |I(p) - I(p-r)|), or P2' when the step is
zero. P2' is 1000 here. `p2r_calc` reads P2r for all four directions from a
256-entry table, indexed by the absolute step and computed at elaboration
time. Subtracting the predecessor's minimum keeps every Lr below C + P2 <
2^13, so 16-bit path costs and 16-bit sums never overflow.

All four directions use the same engine. It has 64 lanes and a comparator
tree for the new minimum. The engines differ only in where the predecessor
comes from:

| direction | predecessor | storage                     | read address | used     |
|-----------|-------------|-----------------------------|--------------|----------|
| 0°        | (x-1, y)    | one register of 64 costs    | —            | directly |
| 45°       | (x-1, y-1)  | W-word RAM + minimum buffer | x            | one pixel later |
| 90°       | (x, y-1)    | W-word RAM + minimum buffer | x            | directly |
| 135°      | (x+1, y-1)  | W-word RAM + minimum buffer | x+1          | directly |

Each RAM word holds one position's 64 costs from the previous line. The word
is read when the pixel's costs arrive. It is written with the new costs two
clocks later. Because the 135° engine reads x+1 and the 45° engine keeps the
word it read for x-1, no word is overwritten before it is used. A predecessor
outside the image counts as all zeros, which makes Lr = C where a path starts.

Timing of one engine: `cpd_v` latches the costs, the penalty and the position,
and issues the RAM read. The lanes compute in the next clock. In the clock
after that, `lr` and `lr_v` appear and the costs and their minimum are written
back. The engine needs at least 3 clocks per pixel and gets 9.

## Winner and left/right check (`disp_est`, `validation_check`)

`disp_est` adds the four path costs into S(p,d). It then finds the best
disparity db with a comparator tree; on a tie the lowest d wins. It also
picks S(db-1), S(db) and S(db+1) for the sub-pixel step.

The consistency check compares db with the disparity found when the *right*
image is the base: D_m(q) = argmin_d S(q+d, d). It is the part of the design
that is hardest to see through, because D_m(q) is not complete until the left
pixel q+63 has been processed. The module streams it as follows:

* A shift register holds one candidate (best cost so far and its d) per right
  pixel. Entry k belongs to right pixel x-k, where x is the current left
  pixel. Each pixel step shifts the register by one. Entry d (1 <= d <= x)
  then takes S(x,d) if that is lower than what it holds; entry 0 starts from
  S(x,0). After 63 more steps a candidate can no longer change. Entries 63 to
  126 therefore keep only the final 6-bit D_m.
* The left result db waits 63 steps in a delay line. It is then compared with
  D_m(x-db), which sits at entry 63+db. The pixel passes when x-db lies in
  the image and |db - D_m| <= 1.
* Updates are limited to entries that belong to the current line. The
  register can therefore run across line and frame ends unchanged: the last
  63 results of a line come out during the next line. The last 63 results of
  a frame come out during the next frame. Alternatively, pulse `flush` 63
  times, at least 9 clocks apart, to push them out.

## Refinement (`post_proc`, `median_filter`)

A parabola through a = S(db-1), c = S(db) and b = S(db+1) has its vertex at
db + (a - b) / (2(a + b - 2c)). The output value is 4·db plus that offset
times 4, rounded, for D = 64 (in general the factor is 256/D). This maps
disparities 0..63 onto 0..255. Since c is the minimum, the offset is at most
±2 (half a disparity). A flat neighbourhood gets no offset, and a pixel that failed the
consistency check outputs 0. The map is then median-filtered over 5x5. The
filter reuses `line_buffer` and `disp_scan` for its window. It finds the
median by ranking: the value with fewer than 13 values below it and at least
13 at or below it is the median.

## Interface and timing of `sgm_top`

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | core clock (9x the pixel rate), asynchronous active-low reset |
| `in_v`, `pix_l`, `pix_r` | in | one rectified pixel pair per strobe, raster order, **at most one strobe every M = 9 clocks** (an assertion checks this) |
| `flush` | in | one consistency-check step without a pixel; never in the same clock as `in_v` |
| `raw_v`, `raw_disp`, `raw_ok`, `raw_x`, `raw_y` | out | refined 8-bit map value, check flag and map position, before the median filter |
| `out_v`, `disp`, `out_x`, `out_y` | out | median-filtered map value and its position |

Coordinates refer to the window centre. A centre lags the newest input pixel
by 4 columns and 4 lines. The map therefore has positions x = 0..W-5 and
y = 0..H-5; the last four columns and lines of a frame are never centres.
Pixels outside the image read as 0 inside the cost windows. The median
filter produces only positions whose whole 5x5 window lies in the map. After
reset the first pixel is taken to be (0,0) of a frame.

Per pixel, the pipeline (in clocks after the column enters the scan
registers) is: cost PEs 10, path engines +2, sum and winner +2,
consistency-check entry. The result leaves 63 pixel steps later, plus 3
clocks. In steady state one result appears every 9 clocks, with a gap of
4 pixel periods at each line change.

## Memory

| store | size at the defaults |
|-------|----------------------|
| two line buffers (8 lines x 450 x 8 bit) | 57,600 bits |
| three path-cost RAMs (450 words x 64 x 16 bit) + minimum buffers (450 x 16 bit) | 1,404,000 bits |
| 0° predecessor register | 1,040 bits |
| median line buffer (4 x 450 x 8 bit) | 14,400 bits |
| scan registers (81 x 8 + 648 x 8 bit) | 5,832 bits |

The published architecture budgets (D+5)(3W+1) x 16 = 1,491,504 bits (about
183 KB) for the path costs. This design stores 65 rather than 69 words per
position, so its path-cost storage is 1,405,040 bits. All memories are plain
arrays, written for a synthesis tool to map to RAM. No process-specific SRAM
macros are used.

## Parameters

`sgm_top` takes `W` (image width, 450), `H` (lines, 375), `D` (disparities,
64, a power of two up to 256), `M` (window size, 9), `P1` (8), `P2_PRIME`
(1000) and `MED_K` (median size, 5). The image geometry is fixed when the
design is built. A 640x480 stream needs W = 640, H = 480; the 91 MHz figure
for 450x375 at 60 frames/s becomes 83 MHz and 166 MHz for 640x480 at 30 and 60 frames/s, and
249 MHz for 1280x720 at 30 frames/s.

## Where this RTL fills gaps in the description

Everything below is a choice of this implementation, not something the
source architecture specifies:

* The values P1 = 8 and P2' = 1000, and P2' itself where the brightness step
  is zero.
* Zero padding at the image borders, the map geometry (centres only) and the
  rule Lr = C where a path starts.
* How the window is time-multiplexed. The source describes both "nine
  parallel line operations" and time-division multiplexing with a clock at
  nine times the pixel rate. This RTL does the time division: one line per
  clock in each PE. The per-PE "tap buffer" is the line selector over the
  shared scan registers, not a second copy of the window.
* The RAM addressing of the path engines, and storing 64 costs plus the
  minimum per position where the source budgets D+5 words.
* Every detail of the consistency check: the tolerance of 1, the streaming
  structure, the D-1 step latency and the flush input. The source only names
  a validation check fed by left and right disparity selection.
* The sub-pixel formula's rounding, the output value 0 for invalid pixels,
  and the median filter's border rule and circuit.
* The handshake: valid pulses, and stages that latch on their own valid
  pulse and hold for M clocks.
* Image rectification happens before this engine. It is not part of the RTL.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with an
independent software model, with a watchdog.

* `tb_sgm_top` runs the whole engine on a synthetic 100x16 stereo pair. The
  pair is random texture with a foreground square at a larger disparity, so
  occlusions occur. The test checks every refined and every median-filtered
  output against a full reference model written in the testbench: cost,
  penalties, four path recursions, sums, winner, right disparity, check,
  parabola and median. It also checks the output rate. It fails if any of
  these never happened: a check pass, a check fail, a sub-pixel correction, a
  path start, an adapted P2, a flushed result, a value changed by the median.
* `tb_sgm_full` is the same test at the default size: one full 450x375 frame,
  about 1.5 M clocks, which takes about 20 s in Verilator.
* `tb_sgm_vga` and `tb_sgm_720p` run the same test on one 640x480 frame and
  one 1280x720 frame. These are the two larger image sizes for which the
  clock rates above were worked out. They take about 1 and 2 minutes, and the
  720p test uses about 1.2 GB of memory.

To run a test with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_sgm_top \
    rtl/sgm_pkg.sv tb/tb_sgm_top.sv
./obj_dir/Vtb_sgm_top
```

Each test prints `TB_RESULT checks=N failures=F`. The simulator has two
states, so everything the design reads is reset or written before use.

The synthetic images are not the Middlebury pairs used to evaluate the
algorithm. The RTL reproduces its own reference model bit for bit, but the
published error rates have not been measured with it.
