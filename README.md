# Streaming Sobel + Hough lane-detection accelerator

Lane markings in a road image are straight lines. This design finds them in two steps, both in hardware,
and passes the result to software:

1. **Edge detection.** The Sobel operator gives every pixel a gradient magnitude |G| = |Gx| + |Gy|.
   A threshold then turns the result into a binary edge image. Every pixel is 0 or 255.
2. **Hough transform.** Every edge pixel (x, y) votes for all lines that pass through it. A line is written
   as rho = x·cos(theta) + y·sin(theta), with theta = 0, 1, ..., 179 degrees. The votes fill the
   *Hough matrix*, which has 180 angle columns and a few more than a thousand rho rows. A cell
   with many votes is a line that lies on many edge pixels.

Finding the largest cells (the "Hough peaks") and drawing the lines is left to software. The
accelerator stops when the Hough matrix of a frame is complete.

The main idea is spatial parallelism. The image streams through at **one pixel per clock**. Each edge
pixel votes for **all 180 angles in the same cycle**: 180 small memories, one per angle, each get a
read-modify-write. A 512 × 512 frame therefore takes 512·512 + 512 + 8 = 262,664 cycles. That is
2.63 ms at 100 MHz, whatever the number of edge pixels.

The structure follows the FPGA lane-detection pipeline of Alshemi, Saif and Taher, *Hardware
Acceleration of Lane Detection Algorithm: A GPU Versus FPGA Comparison*. The published description
gives the block structure, the adder tree, the comparator, the processing element and the counts
(180 multipliers, 180 block memories, a 512 × 512 image, 2.62 ms at 100 MHz). Everything else
below is this implementation's choice, and the section "Where this differs from the published
design" lists those choices.

## Pipeline

```
 in_pixel ──► sobel_window ──► sobel_magnitude ──► binarizer ──► hough_engine ──► ro_data
 (8-bit gray,  3x3 windows,     |Gx|+|Gy|,          |G|>thr ?      90 PE pairs,     Hough matrix
  raster)      zero padding     11 bits             255 : 0        180 accumulators  readout
                                                        │
                                                        └──► bin_pixel (binary image out)
```

| module | role | latency |
|---|---|---|
| `lane_pkg` | shared constants, trig constants, rho-range function | – |
| `sobel_window` | line buffers + 3×3 register window, zero padding by masking | 1 cycle after the completing step |
| `sobel_magnitude` | adder/shift tree, no multipliers | 1 |
| `binarizer` | unsigned comparator + 255/0 multiplexer | 1 |
| `hough_pe_pair` | two constant multipliers giving rho for two angles | 2 |
| `hough_accum` | one angle's vote memory with read-modify-write and bypass | vote written 1 cycle after the read |
| `hough_engine` | 90 `hough_pe_pair` + 180 `hough_accum`, readout mux | frame_done 5 cycles after the last pixel |
| `lane_detect_top` | the whole pipeline | see "Frame timing" |

## The 3×3 window and zero padding (`sobel_window`)

The output image must be the same size as the input. The image is therefore treated as if it had a
border of zeros. No padded copy is stored. Instead:

* Two line buffers, each one image row long, hold the two previous rows. At input position (x, y) the
  column {row y−2, row y−1, row y} at x is shifted into a 3-column register window. The window centre
  is one row and one column behind the input, at (x−1, y−1).
* The window rows and columns that fall outside the image are forced to zero before they leave.
  The mask depends on the centre coordinates: left column when x = 0, right column when x = W−1,
  top row when y = 0, bottom row when y = H−1. Data left over from the previous row or frame is
  therefore never seen.
* The right-edge pixel of a row needs a column that does not exist. It is emitted by the first step
  of the *next* row, with its right column masked.
* After the last pixel of a frame, the block takes W + 1 internal steps with zero input. This is
  the missing row below the image. `in_ready` is low during these steps.

The window is row major: P0 P1 P2 is the top row, P4 is the centre and P6 P7 P8 is the bottom row.
Frames are not marked. After reset, every W·H accepted pixels make one frame.

## Sobel magnitude and binarization

The Sobel weights are only 0, ±1 and ±2, so the magnitude needs only adders. A weight of 2 is a
left shift by one:

```
gx_p = P0 + 2·P3 + P6    gx_n = P2 + 2·P5 + P8    |Gx| = |gx_p − gx_n|
gy_p = P0 + 2·P1 + P2    gy_n = P6 + 2·P7 + P8    |Gy| = |gy_p − gy_n|
|G| = |Gx| + |Gy|        (0 … 2040, 11 bits)
```

The binarizer outputs 255 when |G| > `threshold` and 0 otherwise. The threshold is an input port.
No value is built in.

## The Hough engine

### Shared multipliers (`hough_pe_pair`)

A processing element computes rho = x·cos(theta) + y·sin(theta), with two multipliers and an adder.
If each of the 180 angles had its own element, the design would need 360 multipliers. Instead, it
uses sin(180°−theta) = sin(theta) and cos(180°−theta) = −cos(theta). From the two products x·cos(theta) and y·sin(theta):

```
rho(theta)       = y·sin(theta) + x·cos(theta)
rho(180 − theta) = y·sin(theta) − x·cos(theta)
```

The pair with THETA = k serves k and 180 − k, for k = 1 … 89. Those 89 pairs cover 178 angles.
The leftover angles 0 and 90 have no partner inside 0…179, so the pair THETA = 0 serves both:
rho = x·cos 0 and rho = y·sin 90. The 90 pairs together use exactly 180 multipliers.

Arithmetic: cos and sin are elaboration-time constants in 16-bit signed fixed point with 14
fractional bits (cos 0 = 16384). The products and their sum are exact. rho is rounded to the nearest
integer: add 2^13, then shift arithmetically right by 14. In the worst case this is within 0.5 + (x + y)·2^−15
of the real value, which is below 1 everywhere in a 512 × 512 image.

### Rho range and memory addressing

The origin is the top-left pixel, x is the column and y is the row. For theta in [0°, 180°), sin ≥ 0,
so rho ranges from −(W−1) (at theta near 180°) to ceil(√((W−1)² + (H−1)²)) (near 45°). The cell for
rho is stored at address rho + W − 1. For 512 × 512 that gives rho ∈ [−511, 723], 1235 cells per
angle (`lane_pkg::rho_bins`).

### Read-modify-write with bypass (`hough_accum`)

Each angle has a memory of 1235 × 16-bit counts, with one read port and one write port. The read is
registered. A vote is applied in two cycles:

```
cycle t   : read mem[rho]                          (issued with the vote)
cycle t+1 : count = bypass hit ? last write : q;   mem[rho] <= count + 1
```

Neighbouring edge pixels often vote for the same cell. For theta = 90°, rho is y, so a run of edge
pixels in one row always hits the same cell. When vote n+1 reads in the same cycle as vote n
writes, the read returns the old count. A one-entry bypass register holds the address and data of
the last write. When the address matches, the bypass supplies the count in place of the memory
output. Older writes are already in the memory by the time a later read happens, so one entry is
enough. This keeps the rate at one vote per cycle and per angle.

A cell cannot overflow: in a 512 × 512 image it can collect at most about 1024 votes, and the
counter holds 65,535.

### Clearing and readout

* After reset, each memory writes zeros to all its cells. This takes 1235 cycles, and `in_ready`
  stays low meanwhile.
* `ro_en`, `ro_theta` and `ro_rho_addr` read one cell. `ro_data` and `ro_valid` follow two cycles
  later. A new request may be issued every cycle.
* **Reading a cell also clears it.** The software that reads the whole matrix (180 × 1235 requests)
  therefore also prepares the memories for the next frame. Only the cells that are read get cleared.
* Readout is allowed only between frames: after `frame_done` and before the next frame's first
  pixel. Assertions check this, and also that the angle is below 180.

## Frame timing

With a continuous input stream, the clock edge that accepts the first pixel of a frame and the
edge at which `frame_done` is high are **W·H + W + 8** cycles apart. The terms are:

* W·H cycles for the pixels;
* W + 1 flush steps for the bottom padding row;
* 7 register stages after the last flush step: magnitude 1, binarizer 1, PE 2, accumulator read 1
  and write 1, `frame_done` 1.

For 512 × 512 this is 262,664 cycles, or 2.627 ms at 100 MHz. The published FPGA build reports
2.62 ms at 100 MHz, which is the same one-pixel-per-clock rate. The next frame may start as soon as
`in_ready` returns. If the matrix is read out in between, that adds 180 × 1235 cycles.

## Top-level interface (`lane_detect_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `in_valid`, `in_ready`, `in_pixel` | in/out/in | 1/1/8 | gray pixels in raster order; accepted when both valid and ready |
| `threshold` | in | 11 | binarization threshold on \|G\| |
| `bin_valid`, `bin_pixel`, `bin_x`, `bin_y` | out | 1/8/9/10 | binary edge image with its coordinates |
| `frame_done` | out | 1 | the Hough matrix of the frame is complete |
| `ro_en`, `ro_theta`, `ro_rho_addr` | in | 1/8/11 | read and clear cell (theta, rho + 511) |
| `ro_valid`, `ro_data` | out | 1/16 | the cell's vote count, 2 cycles after the request |

Parameters: `IMG_W` and `IMG_H` (default 512 × 512). The module computes the coordinate widths,
the rho depth and the address width from these two values. The widths in the table are for the
defaults.

## Size

At the default parameters, the design needs the following storage and arithmetic:

* 180 vote memories of 1235 × 16 bits (3.56 Mbit). Each memory fits in one 36 Kb FPGA block RAM.
* Two line buffers of 512 × 8 bits.
* 180 constant multipliers: 10-bit unsigned × 16-bit signed.
* Roughly 18,000 flip-flops, mostly the per-angle pipeline, address and bypass registers.

The published FPGA build reports 180 block RAMs and 180 DSP slices, which matches the first and
third items.

## Where this differs from the published design

* **Angles.** The paper states the range as [0, 180] in 1° steps with 180 processing elements.
  Here the angles are 0…179. Angle 180 would repeat angle 0 with rho negated. The pairing of 0 with
  90 in one processing element is this design's choice.
* **Not in the paper, added here:** the fixed-point format, the rounding of rho, the rho offset and
  memory depth, the 16-bit counters, the bypass register, the clear-after-reset sweep, the
  read-and-clear readout port, the valid/ready input and all register stages.
* **Figure-level details.** The published Sobel figure draws plain adders with no signs and no
  absolute values. The subtractions and |·| here come from the Sobel kernels and |G| = |Gx| + |Gy|.
  The published "FIFO" in front of the adder tree is implemented as line buffers plus a register
  window. Its line buffers are read combinationally, so they map to distributed RAM, not block RAM.
* **Memory figure.** The paper reports 2.88 MB of FPGA memory. This does not follow from its own 180
  block RAMs (about 0.83 MB of capacity). This design uses 0.44 MB for the Hough matrix.
* **Not included:** Hough peak detection and line drawing, which the paper does in MATLAB on the
  host. The GPU implementation that the paper compares against is also not included.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench ends with a
`TB_RESULT checks=N failures=M` line:

| testbench | what it checks |
|---|---|
| `tb_sobel_window` | every window and its coordinates against a zero-padded model, on 8 × 6 frames, with and without input bubbles; W + 1 flush cycles and a frame length of W·H + W + 1 |
| `tb_sobel_magnitude` | corner cases (flat, steps, maximum 2040) and 500 random windows against a 3×3 kernel convolution; 1-cycle latency |
| `tb_binarizer` | threshold−1, threshold, threshold+1 and random pairs |
| `tb_hough_pe_pair` | pairs for 0/90, 1/179, 30/150, 45/135, 89/91 against rho computed per angle, and within 1 of the exact value; 2-cycle latency |
| `tb_hough_accum` | 3000 votes concentrated on few cells (about 480 bypass hits); readout; second readout all zero; clear takes DEPTH cycles |
| `tb_hough_engine` | two random 16 × 12 frames; the whole 180-angle matrix; read-and-clear between frames; `frame_done` exactly 5 cycles after the last pixel |
| `tb_lane_detect_top` | end to end on a 128 × 96 synthetic road image, two frames (see below) |
| `tb_lane_detect_full` | the same test at the default 512 × 512 size (about 12 s of simulation) |

The two end-to-end tests share `tb/lane_tb_body.svh`. They synthesise a road image with two
converging markings, compute Sobel, binarization and the Hough matrix independently, and compare
the binary image and every matrix cell. They check the frame time exactly. They count, and require,
the following mechanisms:

* zero-padded border windows;
* both binarizer outputs;
* accumulator bypass hits;
* the W + 1-cycle flush stall;
* input bubbles;
* the clear after reset;
* read-and-clear between frames.

Last, they look for the strongest cell in each matrix read from the hardware. That cell must lie
on one of the two drawn markings: within 5° and a few rho cells of the line through the marking's
centre. At 512 × 512 the peaks fall on the markings' angles to within a degree. For example, the
first frame peaks at theta = 32°, rho = 321, while the marking lies at 32.0° and 325 (the peak is
the marking's inner edge). On small images, the pixel staircase of a steep line can pull the peak
towards 45° or 135°.

The end-to-end tests share the fixed-point convention with the design: constants rounded to 14
bits, round-to-nearest rho. So they check the arithmetic exactly, but they do not check the choice
of that convention.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/lane_pkg.sv tb/tb_lane_detect_full.sv \
          --top-module tb_lane_detect_full -o sim && ./obj_dir/sim
```

To change the image size, set `IMG_W` and `IMG_H` on `lane_detect_top`. The rho depth and all
widths follow from them.
