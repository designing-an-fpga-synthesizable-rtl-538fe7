# Potato greening measurement in a pixel stream

Potato tubers exposed to light turn green where chlorophyll forms. The same
light exposure raises the level of toxic glycoalkaloids just under the skin,
so a green tuber should be rejected. The US grading rule counts a potato as
damaged when green covers more than 25 % of its surface.

This RTL measures that fraction from one photograph of a potato taken on a
white background. It streams the 640 x 480 RGB image through the hardware
one pixel per clock. Each pixel gets two threshold decisions:

* **Is it potato?** The white background is bright in blue and potato skin is
  not. So a pixel belongs to the *region of interest* (ROI) when its blue
  sample is below a threshold.
* **Is it green?** On healthy skin red is clearly above green. On a greened
  patch the two are close, or green is higher. So an ROI pixel is *green*
  when R - G (signed) is below a second threshold.

Two counters collect the green pixels and the ROI pixels over the frame. At
the end of the frame a divider computes the percentage
`100 * green / ROI` and a comparator grades the potato. Along the way the
hardware also produces two images for a display:

* the *green-part image*: green pixels in their own colour, everything else white;
* the *ROI image*: the potato in colour on black.

No multiplier or colour-space conversion is needed per pixel. The per-pixel
work is one 8-bit compare, one 9-bit signed subtract-and-compare and two
counter increments.

## Block diagram

```
 host load port                                                    ROI display stream
  (addr, rgb) ─┬─> serializer R ─┐                 ┌─> roi_counter ──> roi_valid / roi_pix
               ├─> serializer G ─┼─ rgb_t stream ──┤        │ roi_count
               └─> serializer B ─┘ (1 pixel/clock) │        v
   start ──────────────^                           └─> green_detect ─┐  greens   percent_unit ─> grade_compare
                                                          │          └─────────>  100*g/roi  ──>  <= 25 % ?
                                                          │ green-part image stream
                                                          v
                                       deserializer R, G, B ──> disp_addr / disp_pix
```

| Module | Role |
|---|---|
| `potato_pkg` | Pixel type `rgb_t`, frame size, default thresholds, fixed-point scale, the two colour rules |
| `serializer` | Holds one colour plane loaded by the host; streams it out in raster order, one sample per clock, with start/end-of-frame marks |
| `green_detect` | Applies both rules; outputs the green-part image stream and the running green count `greens` |
| `roi_counter` | Applies the blue rule; outputs the ROI display stream and the ROI pixel count |
| `deserializer` | Writes one colour of the green-part stream back into a plane memory with a read port |
| `percent_unit` | `floor(green * 100 * 1000 / roi)`: the percentage in thousandths, computed by a serial restoring divider |
| `grade_compare` | `grade_ok = 1` (not damaged) when the percentage is at most 25 %, else 0 |
| `potato_grading_top` | Wires the blocks together and adds the start/busy control |

There are three serializers and three deserializers, one per colour plane.
The original floating-point model of the method was organised the same way.

## The two colour rules and their thresholds

| Parameter | Default | Rule |
|---|---|---|
| `ROI_B_MAX` (`green_detect`, `roi_counter`) | 160 | pixel is potato when `B < ROI_B_MAX` |
| `GREEN_RG_MAX` (`green_detect`) | 20 | potato pixel is green when `R - G < GREEN_RG_MAX`, signed |

The method fixes which channels are thresholded and in which direction. It
does not publish the threshold values. The defaults above are this design's
own, chosen for a well-lit potato on white paper. Calibrate them for a real
camera and lighting. Both rules live in `potato_pkg` (`in_roi`, `rg_green`).
Both modules take the thresholds as parameters, and the top relies on their
defaults. If you change `ROI_B_MAX`, change it in both modules, because the
top asserts that every green pixel is also an ROI pixel.

The rules depend on the photograph, which must be set up accordingly:

* The background must be white. Any darker background falls into the ROI.
* There must be no shadow of the potato. A shadow is dark in blue, so it is
  counted as potato and lowers the percentage.
* The camera flash should be off.

The image shows only one side of the tuber. The grade therefore describes the
visible side only, not the whole surface that the grading rule speaks of.

## Frame flow and timing

Everything runs on one clock `clk`, with an active-low synchronous reset
`rst_n`. The stream between blocks is a pixel `rgb_t {r, g, b}` plus three
flags: `valid`, `sof` (first pixel of the frame) and `eof` (last pixel).
There is no back-pressure: every block accepts a pixel on every clock.

Counting clock edges from the edge that samples `start`:

| Edge | Event |
|---|---|
| 0 | serializers latch `start`, read address 0 |
| 1 | first pixel on the serial stream (`sof`) |
| N = 640*480 | last pixel on the serial stream (`eof`) |
| N + 1 | `green_detect` and `roi_counter` output the last pixel; counts final, `done` |
| N + 2 | last sample written into the deserializers; `disp_ready` rises; `percent_unit` latches the counts |
| N + 38 | `percent_unit` `done` (36 division steps) |
| N + 39 | `result_valid`, with `grade_ok`, `percent_milli`, `green_count`, `roi_count`, `div_zero` |

A frame therefore takes 307 239 clock edges at 640 x 480. If the frame holds
no potato pixel at all, the division is skipped and `result_valid` comes on
edge N + 3.

For comparison, the FPGA build of the method reached a 10.169 ns minimum
period (98.3 MHz) on a Spartan-3E, also one pixel per clock. At that rate a
frame takes 3.12 ms. The clock rate of this RTL has not been measured on any
FPGA.

`busy` is high from the `start` edge until `result_valid`. A `start` pulse
while `busy` is ignored. The host must not write the input planes while a
frame is streaming (assertion in `serializer`). The results, `disp_ready` and
the green-part image hold until the next frame.

## The percentage unit

The ratio is formed in integers, with no loss before the final truncation:

```
numerator     = green_count * 100 000           (36 bits for 19-bit counts)
percent_milli = floor(numerator / roi_count)    (17 bits, 0 ... 100 000)
```

`percent_milli` is the percentage in thousandths. For example, 6735 green
pixels out of 75 783 potato pixels give 8887, which reads as 8.887 %. The
scale is the parameter `PCT_SCALE` (default 1000).

The divider is a plain restoring divider. Each clock it does three things:

1. Shifts the next numerator bit into the partial remainder.
2. Subtracts the divisor if it fits.
3. Shifts the resulting quotient bit in.

The remainder stays below the divisor, so it needs only `CNT_W + 1` bits.
Thirty-six steps produce the quotient.

A zero ROI count gives 0 with `div_zero` set. Because green pixels are a
subset of the ROI, the quotient never exceeds 100 000. An assertion checks
this, and the output saturates if it is ever violated.

The grade compares `percent_milli` with `LIMIT_PCT * PCT_SCALE` (25 000):

* at most 25 % grades `grade_ok = 1`, not damaged;
* above 25 % grades `grade_ok = 0`, damaged.

A frame without potato grades 1. Check `div_zero` before trusting the grade.
The stronger "seriously damaged" level of the grading rule (more than 50 %)
is not graded.

## Top-level interface (`potato_grading_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `load_en`, `load_addr`, `load_pix` | in | 1, 19, 24 | write one input pixel at raster address `y*640 + x` |
| `start` / `busy` | in / out | 1 | begin a measurement / measurement in progress |
| `roi_valid`, `roi_pix` | out | 1, 24 | ROI display stream, one pixel per clock in raster order |
| `disp_addr` / `disp_pix` | in / out | 19 / 24 | read the green-part image; data one clock after address |
| `disp_ready` | out | 1 | the green-part image holds a complete frame |
| `green_count`, `roi_count` | out | 19 | green and potato pixel counts of the last frame |
| `percent_milli` | out | 17 | percentage of green in thousandths |
| `div_zero` | out | 1 | the frame held no potato pixel |
| `result_valid` | out | 1 | one-clock pulse when the results above are updated |
| `grade_ok` | out | 1 | 1 not damaged, 0 damaged |

The frame size is set by the top's parameters `IMG_W` and `IMG_H` (640 and
480). All widths follow from them.

## Memory, and fitting a small FPGA

The six plane memories hold 6 x 307 200 x 8 bits, 14.7 Mbit in all. This
makes the design self-contained: load a photograph, get an image and a grade
back. It is far more block RAM than the small Spartan-3E (XC3S250E) that the
method was synthesized on.

That FPGA build kept no frame on chip. The pixels were streamed to it one at
a time. To do the same, drop the serializers and deserializers and drive
`green_detect` and `roi_counter` straight from a camera or host stream. The
arithmetic blocks then need only a few hundred flip-flops.

The original build also had a small dual-port RAM inside its green detector.
Its purpose is not documented, and nothing like it is included here.

## How closely this follows the method

**Follows the method:**

* serialising the R, G and B planes and deserialising the result;
* the ROI taken from a blue threshold;
* green pixels taken from an R - G threshold, counted only inside the ROI;
* the green-part image on white and the ROI image;
* the ratio of green to ROI pixels, multiplied by 100;
* the 25 % pass/fail grade;
* the 640 x 480 frame, processed one pixel per clock.

**This design's own choices:**

* the threshold values;
* 8-bit samples;
* raster order;
* the frame memories and the host load port;
* the start/busy control and all latencies;
* the fixed-point percentage and its serial divider;
* the handling of a frame with no potato.

**Left out:** the data-type conversion of the planes before serialisation,
the on-screen viewers and numeric displays, and the image-file source. These
are the host's job: the top exposes their signals as ports.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares against
values computed independently in the testbench and prints one line
`TB_RESULT checks=N failures=M`. Each also has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_serializer` | raster order, sof/eof, no gaps, first sample 2 clocks after start, start ignored while busy (8 x 4 plane) |
| `tb_deserializer` | write-back with and without gaps in `valid`, full read-back, `frame_ready` set/clear (8 x 4 plane) |
| `tb_green_detect` | both sides of both thresholds, negative R - G, random frames with gaps, output pixel, flag, running count, `done`, 1-clock latency |
| `tb_roi_counter` | both sides of the blue threshold, random frames, display pixel, count, `done` |
| `tb_percent_unit` | 6735 / 75783 = 8.887 %, 0 %, 100 %, 25 % corner, zero total, 200 random pairs, exact latency |
| `tb_grade_compare` | 25.000 % vs 25.001 %, random percentages, 1-clock latency |
| `tb_potato_grading_top` | full 640 x 480 frames, end to end (below) |

The end-to-end test runs the top at its default size on four synthetic
photographs. Each is generated from a hash of the pixel address:

1. an elliptical potato with a small green patch, 7.077 %, grade 1;
2. the same potato with a large patch, 40.887 %, grade 0;
3. a scattered frame with exactly 6735 green of 75 783 potato pixels, 8.887 %;
4. an empty white frame, `div_zero`.

For each frame it checks:

* the counts, the percentage and the grade;
* every pixel of the ROI stream and of the read-back green-part image;
* the exact result latency;
* that a `start` pulse during a frame is ignored.

It counts each mechanism (green, non-green potato and background pixels, both
grades, zero total, ignored start, completed image) and fails if any never
occurred.

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
          --top-module tb_potato_grading_top rtl/potato_pkg.sv tb/tb_potato_grading_top.sv
./obj_dir/Vtb_potato_grading_top
```

Replace the module name to run another testbench. The full-size run takes
about ten seconds. Every RTL file passes `verilator --lint-only -Wall`
without errors; the only warnings are for package constants that a given
module does not use and one unused quotient bit.
