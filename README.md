# Streaming detector for isolated UV markers

Drones in a swarm can locate each other visually. Each drone carries blinking
ultraviolet LEDs, and every other drone watches them through a UV band-pass
camera. In such an image a LED is a small, very bright spot on a darker
background. The sun and its reflections are large saturated areas. Detection
has to find, in every frame, the pixels that are

* **markers**: much brighter than every pixel on a small circle around them;
* **sun points**: bright, and *not* much brighter than any pixel on that
  circle, so they lie inside a large bright area. Markers near sun points
  can later be rejected as glare.

This RTL performs that test on the camera's pixel stream itself. It sits on the
sensor's parallel bus and evaluates one complete circle test per pixel clock.
Only the last `2*RHO+1` image rows are buffered. The results of a frame are
therefore final a few clocks after the sensor's last pixel. No frame buffer is
needed, and no frame has to be transferred to a processor first.

The RTL implements a published streaming FPGA architecture for this test.
Structure, array sizes, indexing and per-pixel rate follow that description.
Where the description was silent or inconsistent, the choice made here is
listed in [Departures and own choices](#departures-and-own-choices).

## The segment test

Take a centre pixel with value `P` and a circle of radius `RHO` around it,
drawn with Bresenham's midpoint algorithm. Let `B_max` and `B_min` be the
largest and smallest pixel values on that circle. With the thresholds `T_m`,
`T_s` and `T_d` (8-bit, run-time inputs):

```
if P > T_m:
    if P - B_max >= T_d                      -> marker
    elif P > T_s and P - B_min < T_d         -> sun point
```

"Every boundary pixel is at least `T_d` darker" is the same statement as
"the brightest boundary pixel is at least `T_d` darker". So the whole boundary
reduces to two numbers, its maximum and its minimum. That reduction is what
makes the test streamable: it does not matter in which order boundary pixels
arrive, only that they are all seen once.

Only centres whose full window lies inside the image are tested:
`RHO <= row <= H-1-RHO` and `RHO <= col <= W-1-RHO`. Every pixel that passes is
reported. There is no peak search and no suppression of neighbours, so one LED
normally yields a small cluster of marker pixels. The clustering, and the
distance filter against sun points, run on the host that reads the results.

## The circle and its generator (`bresenham_fsm`, `circle_mask`)

For `RHO = 3` the boundary has 16 pixels (`C` is the centre):

```
 . . # # # . .
 . # . . . # .
 # . . . . . #
 # . . C . . #
 # . . . . . #
 . # . . . # .
 . . # # # . .
```

`bresenham_fsm` produces these points one per clock. It keeps the octant
point `(x, y)`, starting at `(0, RHO)`, and the decision variable `P = 3 - 2*RHO`.
It runs through ten states:

| state | action |
|---|---|
| 0 | update: `x += 1`; if `P < 0` then `P += 4x + 6`, else `y -= 1`, `P += 4(x-y) + 10`; go to 1 if `x <= y`, else to 9 |
| 1..8 | emit one of the eight mirror images `(±x, ±y)`, `(±y, ±x)` of the octant point |
| 9 | finished |

States 2, 4 and 6 skip the copies that would repeat a point when `x = 0` or
`x = y`, so no point is emitted twice. State 0 resolves in the same clock as
the state it leads to, so every clock before termination yields a point. A
radius `RHO` circle has `4*floor(sqrt(2)*RHO)` points: 16 for radius 3, 20 for
radius 4.

The radius is fixed while the detector runs. So `circle_mask` starts the FSM
once after reset and writes every point into a `(2*RHO+1) x (2*RHO+1)` bit
table, `mask[x+RHO][y+RHO]`. After about `4*floor(sqrt(2)*RHO) + 3` clocks (19
for radius 3) it raises `ready`. The evaluator then uses the table, column by
column.

## Evaluating one circle per pixel (`row_buffer`, `segment_eval`)

This is the part that needs the most care.

**Columns, not windows.** Pixels arrive in row-major order. When pixel
`(r, c)` arrives, `row_buffer` supplies the image column `c` of rows
`r-2*RHO .. r`: `2*RHO` values from the buffered rows and the new pixel itself.
This column is the last one needed by the window centred at
`(r-RHO, c-RHO)`. It is also the `x`-th column of every window centred at
`(r-RHO, c-x)` for `x = -RHO .. RHO`. So each arriving column contributes to
`2*RHO+1` overlapping windows on the same centre row, each through a different
column offset `x`.

**Per-window state.** `segment_eval` keeps three small arrays of `2*RHO+1`
bytes: `P` (centre value), `B_max` and `B_min`. The window centred at column
`cc` uses entry `(cc + RHO) mod (2*RHO+1)`. Let `s_c = c mod (2*RHO+1)`. In
every pixel clock:

1. For every offset `x`, reduce the column pixels that the circle table marks
   for column `x` to a minimum and a maximum. Merge them into entry
   `(s_c + RHO - x) mod (2*RHO+1)`, which belongs to the window centred at
   `c - x`. The `2*RHO+1` offsets land on `2*RHO+1` different entries, so all
   entries update in parallel.
2. Store the column's middle pixel, row `r-RHO`, as `P` in entry
   `(s_c + RHO) mod (2*RHO+1)`. That entry is for the window centred on this
   column.
3. Entry `s_c` belongs to the window centred at `c - RHO`. This column, its
   rightmost one (`x = +RHO`), has just completed it. Apply the segment test
   to it, with the merged extrema including this column, and report the result
   for centre `(r-RHO, c-RHO)`.

An entry is *loaded* rather than merged when its window's leftmost column
(`x = -RHO`) arrives. That is the clock right after the same entry was
evaluated for the window `2*RHO+1` columns to the left. The entry therefore
restarts cleanly at every row start as well.

**When results appear.** A decision is made only when `r >= 2*RHO` and
`c >= 2*RHO`. The first decision of a frame therefore comes with pixel number
`2*RHO*(W+1)`, counting from 0. After that there is exactly one decision per
pixel in that range, `(H - 2*RHO) * (W - 2*RHO)` per frame. Each decision
leaves the evaluator one clock after its column. The rows above
`r = 2*RHO` still contain the previous frame's data, but no decision reads
them.

**Row storage.** `row_buffer` holds `2*RHO+1` banks of `W` bytes. Row `r` is
written into bank `r mod (2*RHO+1)`, and all banks are read at column `c` in
parallel, read before write. The bank being overwritten holds row
`r - 2*RHO - 1`, which is no longer needed. Its place in the output column is
taken by the incoming pixel. At the default size this is 7 x 752 = 5264 bytes.

## Camera interface (`dcmi_rx`)

The design's clock is the sensor's pixel clock. A pixel is valid on a rising
edge where VSYNC (frame valid) and HSYNC (line valid) are both high. `dcmi_rx`
registers the bus and counts the pixels:

* the column restarts when HSYNC falls;
* the row advances when HSYNC falls;
* both restart when VSYNC rises.

The 10-bit sample is reduced to its upper 8 bits. `frame_start` pulses when
VSYNC rises and `frame_end` when it falls. Pixels are presented two edges
after the edge that sampled them.

## Result lists (`detection_store`)

Detections are streamed on `det_valid/det_kind/det_row/det_col`. They are also
appended to one of two per-frame lists:

* markers: `L_M` entries, default 256;
* sun points: `L_S` entries, default 1024.

Each entry is `{row, column}`. Counts clear at the start of each frame. As soon
as either list is full, nothing more is stored for that frame, of either kind,
and a dropped detection sets `overflow`. This bounds the work on frames that
are very noisy or dominated by the sun. A host reads the lists through
`rd_kind/rd_addr`; `rd_data` follows one clock later.

## Top level (`fimd_top`)

```
 cam_vsync/hsync/data ──► dcmi_rx ──► row_buffer ──► segment_eval ──► det_* stream
                                                        ▲    │
                           circle_mask (FSM → table) ───┘    ▼
                                                      detection_store ◄── rd_kind/rd_addr
                                                             │
                                                             └──► rd_data, count_m/s, overflow
```

| port | dir | width | meaning |
|---|---|---|---|
| `pclk`, `rst_n` | in | 1 | pixel clock; asynchronous active-low reset |
| `cam_vsync`, `cam_hsync` | in | 1 | frame valid and line valid, active high |
| `cam_data` | in | `PIX_IN_W` | pixel bus |
| `cfg` | in | 24 | `{t_m, t_s, t_d}`, type `fimd_pkg::thr_cfg_t` |
| `ready` | out | 1 | circle table built |
| `eval_valid` | out | 1 | one window was tested this clock |
| `det_valid`, `det_kind` | out | 1 | detection; `DET_MARKER` or `DET_SUN` |
| `det_row`, `det_col` | out | `clog2(H)`, `clog2(W)` | centre of the detection |
| `frame_done` | out | 1 | lists of this frame complete (two clocks after VSYNC falls) |
| `rd_kind`, `rd_addr` | in | 1, `clog2(max(L_M,L_S))` | list read address |
| `rd_data` | out | `clog2(H)+clog2(W)` | `{row, column}` of the entry |
| `count_m`, `count_s` | out | | entries in each list |
| `overflow` | out | 1 | detections were dropped this frame |

Latency: a pixel sampled on edge `k` completes a window whose decision is on
`det_*` after edge `k+3`. A frame that starts before `ready` is ignored as a
whole.

| parameter | default | meaning |
|---|---|---|
| `RHO` | 3 | circle radius; window is `2*RHO+1` square (up to 7) |
| `W`, `H` | 752, 480 | frame size of the sensor |
| `PIX_IN_W` | 10 | camera bus width |
| `L_M`, `L_S` | 256, 1024 | list sizes |

After coarse synthesis, the default configuration is about 900 word-level
cells, 405 flip-flops and 72.5 kbit of memory. Of that memory, 48.2 kbit is
row buffer and 24.3 kbit is result lists. Almost all the logic is in
`segment_eval`, which has `2*RHO+1` masked min/max trees and the slot rotation.

## Departures and own choices

* **Centre row index.** In the published pseudocode the centre value is read
  from row `(s_r + RHO) mod (2*RHO+1)`, which is row `r-RHO-1`. Yet results
  are reported at row `r-RHO`, and the stated start-up delay is `2*RHO*(W+1)`
  pixels. Both of those fit a window of rows `r-2*RHO .. r`. This RTL uses
  that window.
* **Loading instead of resetting.** The published description resets an
  entry to `0xFF/0x00` after it is evaluated. Here the entry is loaded by its
  window's first column instead. The result is the same inside a row, and
  columns from the end of one row cannot leak into the first windows of the
  next.
* **Strict thresholds.** `P > T_m` and `P > T_s` are strict, as in the
  published streaming version. The published shader version uses `>=`.
* **Circle table.** The circle table is built once by the FSM. The published
  description calls the point generator inside every pixel step. The point set
  is the same.
* **Camera bus details.** The 10-to-8-bit reduction (upper bits), the sync
  polarity, and ignoring frames that start before the table is ready are this
  design's choices.
* **Result lists.** The list sizes, the rule that stops both lists when either
  is full, the entry format and the read port are this design's choices. The
  stopping rule mirrors the sequential and shader versions of the detector.
* **Not included.** Not included are the host-side clustering of detected
  pixels, the marker-to-sun distance filter, and replicas of the evaluator for
  several radii at once. To use another single radius, set `RHO`.

## Verification

Each block has a self-checking testbench in `tb/`. The common reference,
`tb/fimd_ref_pkg.sv`, draws the circle with its own textbook midpoint loop and
applies the segment test to whole frames held in memory. Test frames have a
noisy background, 3x3 LED-like blobs, a saturated sun disk and a bright band
on the right border.

| testbench | what it shows |
|---|---|
| `tb_bresenham_fsm` | point sets for radii 1-4 equal the reference circle, no repeats, one point per clock, 16 and 20 points for radii 3 and 4 |
| `tb_circle_mask` | tables for radii 3 and 4, and time to `ready` |
| `tb_dcmi_rx` | coordinates, data bits, two-edge latency and frame pulses over two frames with blanking |
| `tb_row_buffer` | every output column equals the right image rows, over three frames with idle cycles |
| `tb_segment_eval` | detection stream equals the reference, in order; one evaluation per pixel; markers at the left border after a bright row end |
| `tb_detection_store` | counts, read-back, stop on either full list, overflow flag, per-frame clear |
| `tb_fimd_top` | 40x30 frames through the camera bus: ignored early frame, exact detection stream, evaluation count, three-edge latency, stored lists, marker-list and sun-list overflow |
| `tb_fimd_rho4` | the same checks with the detector built for radius 4 (9-row window, 20-point circle) on 48x36 frames |
| `tb_fimd_full` | the same checks at the default 752x480 size, with a sun large enough to overflow the 1024-entry sun list |

Each prints `TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Itb -Irtl -y rtl \
    rtl/fimd_pkg.sv tb/fimd_ref_pkg.sv tb/tb_fimd_full.sv --top-module tb_fimd_full
./obj_dir/Vtb_fimd_full
```

For a block testbench, list the block's file after the packages. For example,
`tb_segment_eval` needs `rtl/fimd_pkg.sv tb/fimd_ref_pkg.sv rtl/segment_eval.sv
tb/tb_segment_eval.sv`. The full-size run takes well under a second.

What has not been checked: behaviour on recorded camera frames, timing closure
at the 26.67 MHz pixel clock on a real FPGA, and reset in the middle of a
frame.
