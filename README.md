# Landing-pad vision pipeline for a multirotor

A drone that must land on a marked pad needs to know, every frame, where the
pad is in its camera image and how it is turned. The marker is a thick black
ring that contains a black square, a black rectangle and a small ring. This
design is the programmable-logic half of a Zynq-class system that finds the
marker in a 1280 x 720, 60 frames/s camera stream, one pixel per clock and
without a frame buffer. The logic turns each frame into a list of dark
objects, each with its area, bounding box and centroid. The processor half
then decides which objects are the ring, the square and the rectangle, and
from them works out the pad's position and heading. The logic also runs a
laser range finder, so the processor knows the altitude.

```
 camera RGB + sync
      |
  rgb2gray -> gauss5x5 -> adaptive_threshold -> erosion3x3 -> median5x5 -> dilation3x3 -> ccl
   (grey)     (5x5 blur)   (binary: 1 = dark)    (3x3)        (5x5)         (3x3)         |
                                                                                  object list
 range finder <-> lidar_pwm_ctrl ----------------------------> axi_result_regs <------'
                                                                 |  AXI4-Lite + interrupt
                                                              processor (software)
```

Everything in `rtl/` is synthesizable SystemVerilog. `landing_vision_top` is the
top. Its parameters default to the full-size system: a 1280 x 720 picture in a
1650 x 750 raster, 128 x 128 threshold windows, 256 labels and a 74.25 MHz clock.

## The pixel stream and the neighbourhood stages

Pixels travel as a data word plus a `sync_t` struct (`lv_pkg`). The struct holds
data enable, horizontal sync and vertical sync, all active high. The stream has
no coordinates. A stage that needs them counts them with `coord_counter`: x
follows data enable, and y advances when data enable falls and clears at the
start of vertical sync.

The 5 x 5 and 3 x 3 stages (blur, erosion, median, dilation) share one
window generator, `win_gen`. It chains K-1 line delays (`line_delay`), each
exactly one raster line long *including blanking*, and feeds every line into
a shift register K words long. Because the delays run on every clock, tap
`[r][c]` is always the pixel r lines and c pixels before the newest one. The
sync bits travel with every tap. This gives two results:

* A neighbour that lies outside the picture is a blanking pixel, so its data
  enable is 0. Each filter applies its own edge rule to such taps: the blur
  uses the centre value, erosion ignores them, and the median and dilation
  count them as 0.
* The centre tap's sync bits are the output's sync bits. No separate sync
  delay line has to be matched to the latency.

This needs at least K/2 blanking pixels per line and K/2 blanking lines.
Latencies, in clocks, with H the raster line length:

| stage | latency |
|---|---|
| rgb2gray | 1 |
| gauss5x5, median5x5 | 2H + 4 |
| adaptive_threshold | 3 |
| erosion3x3, dilation3x3 | H + 3 |
| whole chain up to ccl | 6H + 18 (9,918 at H = 1650) |

Grey conversion uses Y = (77R + 150G + 29B + 128) >> 8. The blur kernel is the
binomial [1 4 6 4 1] outer product divided by 256. The binary median is 1 when
at least 13 of its 25 pixels are 1.

## Adaptive thresholding

A single global threshold fails under uneven light. A threshold computed
separately for each pixel from its own neighbourhood is expensive and noisy. This
stage does something in between, in two steps. Both steps work on the stream
as it passes.

**Window statistics (frame N-1).** The picture is cut into 128 x 128 windows:
10 x 6 of them at 1280 x 720, where the bottom row is only 80 lines tall. For
each window column there is one min/max register pair. The first pixel of a
window in the window's first line loads it, and each later pixel of that window
updates it. The pair is reused for the next window row. At the window's last
pixel the threshold

    th = min + (max - min) / 4          (integer, rounded down)

is written into a 10 x 6 table. At the start of vertical sync the whole table
is copied into the table in use. So **frame N is binarised with thresholds
measured on frame N-1**. Nothing has to be buffered, and the lag of one frame
at 60 frames/s does no harm. The first frame after reset uses 128 everywhere.

**Interpolation (frame N).** Each window's threshold belongs to the window's
centre, at 64 + 128k. A pixel takes the four centres around it and mixes them
bilinearly, using 7-bit fractions fx and fy of its distance past the
upper-left centre:

    th(x,y) = [ (128-fx)(128-fy) T00 + fx(128-fy) T10
              + (128-fx) fy T01      + fx fy T11 ] >> 14

Left of the first centre column, or right of the last, fx is 0 and both
columns are the same one. The same holds for rows. An edge pixel therefore
mixes two windows and a corner pixel takes one. The bottom window row's
centre stays on the regular grid, at line 704, and not at the middle of its
80 lines. A pixel is foreground (1) when its blurred grey value is
**≤** its threshold. The marker is black, so dark objects are the ones to
label.

The stage has three register steps: table lookup, weighted sum (four small
products), and compare. `out_th` brings the per-pixel threshold out for
observation.

## Connected component labelling

`ccl` labels the binary image in raster order with 8-connectivity and
handles one pixel per clock. Each label has a feature record: area, bounding
box, and the sums of x and of y. The record is updated on every pixel.

*Neighbours.* The left neighbour's label is the one assigned on the previous
clock. The three labels above come from a label line buffer one raster line
long: upper-right is read directly, and upper and upper-left are that value
delayed by one and two clocks. In 8-connectivity the left, upper-left and
upper neighbours always already share one object. So at most two different
objects meet at a pixel: that one and the upper-right one. At most one merge
can happen per clock.

*Always-flat equivalence table.* `parent[label]` always gives the final label
directly. When objects A and B meet, the larger label is absorbed. In the same
clock, every table entry equal to it is rewritten to the smaller label, using
one comparator per entry. The absorbed feature record is added to the
survivor's record in that clock too. Labels held in the line buffer may be out
of date, but they are translated through the table when read. So a pixel
never needs more than one table lookup, however many merges a line produced.
The cost is register storage for the table: about 40k flip-flops at 256 labels.
A block-RAM implementation with a merge stack would use far fewer.

*Readout.* At the start of vertical sync the state machine walks through the
labels used in the frame. For each label that is still its own root, it
computes the centroid (sum / area, rounded down) with two serial dividers and
sends out an `obj_t` record. Each object costs about 35 clocks. Then it clears
the label counter. Objects come out in the order of their first pixel in raster
order. All 255 labels take 8,925 clocks, well inside the 49,500 clocks of
720p vertical blanking. An assertion fires if a pixel arrives while the readout
is still running.

*Limits.* There are 255 labels per frame. A label absorbed in a merge is not
reused within the frame. If the labels run out, later objects are left
unlabelled and `ovf` is set with that frame's list. The table size is this
design's choice; the source gives no object count. A cluttered scene with a
few hundred specks after filtering can reach it.

## Range finder

`lidar_pwm_ctrl` drives a LIDAR-Lite v3 class sensor in its PWM mode. It
pulls the trigger low, waits for the sensor's pulse, and measures the pulse
width with a 10 µs prescaler (742 clocks at 74.25 MHz) that advances a
centimetre counter. It stores the result, releases the trigger for 1 µs, and
starts again. A reply that is missing (after 20 ms) or too long (over 40 m) sets
`timeout_seen` and restarts the cycle. The input passes through a two-flop
synchroniser. `CYCLES_PER_CM` must be at least 2.

## Processor interface

`axi_result_regs` is an AXI4-Lite slave with 32-bit words. A read answers one
clock after the address is accepted. A write completes one clock after its
address and data are both present.

| address | register |
|---|---|
| 0x000 | STATUS: bit 0 frame ready (write 1 to clear), bit 1 labels overflowed in that frame, bit 2 range finder timeout seen |
| 0x004 | number of objects in the list |
| 0x008 | frames completed |
| 0x00C | bits 15:0 last distance in cm, bit 31 a reading exists |
| 0x010 | CTRL: bit 0 interrupt enable |
| 0x014 | range readings so far |
| 0x1000 + 16 i | object i: +0 area, +4 {xmax, xmin}, +8 {ymax, ymin}, +12 {cy, cx} |

`irq` is high while the frame-ready flag is set and interrupts are enabled. The
list is written during vertical blanking. It is not double-buffered: after the
interrupt the processor has one frame period (about 16 ms) to read it.

## What the processor does, and what is not here

The following steps are processor software and have no RTL here: deciding
which objects are circles, squares and rectangles, checking that the square,
rectangle and small ring lie inside the big ring's box, and computing
position and orientation. The position is the mean of the square and
rectangle centroids, or the small ring's centroid at low altitude. The heading
is the arctangent of the square-to-rectangle vector. The same applies to
MAVLink messages to the autopilot and to the telemetry radio. The camera's
HDMI receiver is not included either: the top takes a parallel RGB stream with
sync. A monitor output of the filtered binary image is available on
`mon_sync`/`mon_bin`.

## Where this RTL departs from, or adds to, its source description

The source gives the order of stages, the 5 x 5 blur, the 128 x 128 windows,
the threshold formula, the interpolation among 4, 2 or 1 windows, the use of
frame N-1 thresholds on frame N, the 3 x 3 erosion and dilation, the 5 x 5
median, the CCL outputs (area, bounding box, centroid), a state machine that
runs the range finder continuously, and an AXI link to the processor. This
design chose the following:

* the 1650 x 750 raster and 74.25 MHz clock (standard 720p60), and a single
  clock domain;
* the grey weights, the blur kernel and rounding, and every edge rule;
* the fixed-point interpolation grid, a reset threshold of 128, and
  "dark = foreground" (taken from the example images, where the black marker
  parts are labelled);
* the whole CCL method, 8-connectivity, the 256-entry tables and the readout
  in vertical blanking. The source reuses an earlier CCL core whose internals
  it does not describe;
* the range finder's 10 µs/cm scale (from the device's documentation), the
  timeouts and the re-arm gap;
* the AXI4-Lite register map and the frame-ready interrupt.

Resources differ from the published figures, mainly because the CCL tables
are held in registers.

## Simulating

Every testbench in `tb/` checks itself. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. Build one
with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lv_pkg.sv \
    tb/lidar_model.sv tb/tb_landing_vision_top.sv --top-module tb_landing_vision_top
./obj_dir/Vtb_landing_vision_top
```

The other `rtl/` files are found through `-Irtl`. Only the testbenches of
the range finder and the top need `tb/lidar_model.sv`, a behavioural model of
the sensor.

| testbench | what it checks |
|---|---|
| tb_coord_counter | x, y, start/end of frame over three frames |
| tb_rgb2gray | conversion against the formula, including pure colours |
| tb_gauss5x5, tb_erosion3x3, tb_median5x5, tb_dilation3x3 | every output pixel of two random frames against a reference worked out in the testbench, plus latency and output count |
| tb_adaptive_threshold | 8 x 8 windows on a 28 x 20 picture (partial last windows): per-pixel threshold and binary output over three frames against a reference that uses the previous frame, plus latency |
| tb_ccl | five frames against a flood-fill reference (area, box, centroid, order, count); U and comb shapes force merges; a frame of 128 dots forces overflow |
| tb_lidar_pwm_ctrl | distances 1-150 cm exact, continuous re-triggering, timeout and recovery (with `lidar_model`) |
| tb_axi_result_regs | every object word and status register over AXI, interrupt enable and clear, a read held under back-pressure |
| tb_landing_vision_top | the whole chain at quarter resolution (320 x 180, 32 x 32 windows): a drawn marker under a brightness gradient with 3 x 3 specks. After the interrupt, the ring, square and rectangle must be in the list read over AXI, each box within 3 pixels; the specks must be gone; the range must read 120 cm. It also counts threshold table updates, label merges, interrupts and range readings. |
| tb_landing_vision_full | the same test with the top at its default, full-size parameters (1280 x 720); about 2.5 million clocks, a few seconds |

In both end-to-end runs the small ring is found only at full size. At quarter
scale it is only 3 pixels thick and does not survive erosion and the median.
The source reports the same loss at high altitude.

To change the picture size, set `H_ACTIVE`, `V_ACTIVE` and `H_TOTAL` on the
top and feed it a raster to match. `WLOG2` sets the window edge as a power of
two. `MAX_LABELS` sets the label table. Keep the readout
((MAX_LABELS-1) x 35 clocks) shorter than the vertical blanking.
