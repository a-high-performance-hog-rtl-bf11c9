# A streaming HOG feature extractor for 640x480 video

This is synthesizable SystemVerilog for a Histogram-of-Oriented-Gradients (HOG)
extractor that computes pedestrian-detection features straight from a camera's
pixel stream. It never stores a frame. Every pixel moves through a fixed pipeline
the moment it arrives, at up to one pixel per clock. A 640x480 frame therefore
takes 307,200 clocks plus blanking, which is 527 frames/s at a 162 MHz pixel
clock. Only a few line-sized buffers are kept on chip. The output is
one normalised 36-value feature vector per 2x2-cell block, in IEEE-754 single
precision, written to processor memory over Avalon-MM.

The architecture follows the paper "A High-Performance HOG Extractor on FPGA"
(Ngo, Casadevall, Codina, Castells-Rufas, Carrabina, HIP3ES 2018). That paper
gives the structure, the stage names and the port widths. Much of the inside of
each stage is not described there, and this code fills those gaps with its own
choices. The sections below say, stage by stage, which parts are which.

## The pipeline

```
camera raw[11:0] ─► bayer_gray ─► gray[7:0] ─┬─► hog_extractor ─────────────────────────────► hog_dma ─► Avalon-MM (128 bit)
                                              │     deltaxy   Gx,Gy  9-bit signed
                                              │     cordic_vec |G| 9.6, angle 3.13 rad
                                              │     vote       9 votes x 9 bit
                                              │     aggregate  cell hog 9 x 15 bit
                                              │     normalize  36 x float32 per block
                                              └─► pixel_fifo ─► pixel_avalon_master ─► Avalon-MM (8 bit)
```

`hog_system` is the top level. The grayscale stream feeds two paths. The HOG
path ends in block features in memory. The display path ends in the grayscale
frame in memory, where a processor or display controller can read it.

Every stage carries a `valid` strobe and a `sof` (start of frame) flag on the
first element of a frame. Stages count their own x/y positions, and `sof`
resets those counters. Nothing in the design can stall: no stage has a ready
signal, and every stage accepts a new input on each clock. The two bus masters
absorb slave `waitrequest` in FIFOs. If a FIFO overflows, the data is dropped
and counted (`pix_overflow_cnt`, `feat_drop_cnt`).

| signal | format |
|---|---|
| raw pixel | 12-bit unsigned, Bayer mosaic G R / B G (parameter) |
| gray pixel | 8-bit unsigned |
| Gx, Gy | 9-bit two's complement |
| magnitude `gra` | 15-bit unsigned, 6 fractional bits |
| orientation `orien` | 16-bit two's complement radians, 13 fractional bits, (-π, π] |
| vote | 9-bit unsigned integer, one per bin |
| cell hog | 9 bins x 15-bit unsigned (135 bits), bin 0 in the low bits |
| feature | IEEE-754 single, 36 per block |

## Grayscale conversion (`bayer_gray`)

Each raw pixel (x,y) is combined with its left, upper and upper-left
neighbours. In a Bayer mosaic that 2x2 window always holds one red, one blue
and two green samples. The stage averages the greens and forms 12-bit luma
with the BT.601 integer weights (77 R + 150 G + 29 B) / 256. The gray pixel is
the top 8 bits of that luma. On the first row and the first column the window
falls back to the current row or column. The stage needs one line of raw
pixels and also emits each pixel's (x,y) coordinate. Latency is one clock.
The demosaic method, the weights and the mosaic order are this design's
choices. The paper states only that the filter produces RGB and then gray.

## Gradients from two line buffers (`deltaxy`)

Two line buffers of 640 pixels hold the two previous rows. Six registers
complete a 3x3 window. The names follow the source: `P_ij` is row i and
column j, where row 2 and column 2 are the newest. The gradient at the centre
`P_11` is

    Gx = P_10 - P_12        Gy = P_01 - P_21

which is I(x-1) - I(x+1) and I(y-1) - I(y+1). These are the textbook central
differences with the sign flipped. The flip turns the gradient vector by
180°, and the unsigned 0–180° histogram cannot see that. The centre is
IMG_W+1 pixels behind the input.

The published design does not say what happens at the image border or at the
end of a frame. This design makes two choices:

* Border pixels get Gx = Gy = 0, so they add nothing to their cell.
* The last row of a frame is only completed by the row after it, which does
  not exist. So after a frame's last pixel the stage runs by itself for
  IMG_W+1 clocks, shifting in zeros. **The camera must leave at least IMG_W+1
  idle clocks between frames.** An assertion checks this. Real sensors have
  far longer vertical blanking.

## Magnitude and angle (`cordic_vec`)

This stage is a vectoring CORDIC with 16 micro-rotation stages. A first stage
reflects left-half-plane vectors and starts the angle at ±π. Each later stage
rotates by ±atan(2⁻ⁱ) toward the x axis. A last stage multiplies by
0.6072529 to remove the CORDIC gain, then rounds the magnitude to 6
fractional bits and the angle to 13 fractional bits. Both results are within
2 LSB of exact sqrt/atan2. The source used a vendor CORDIC core with these
output formats, so this implementation is a stand-in with the same function.
Latency is 18 clocks.

## Voting (`vote`)

The angle is folded into [0, π) and scaled to bin units, t = θ·9/π, so bin k
covers [20k°, 20k+20°). A magnitude is shared between the two bin centres
nearest its angle, with centres at 10°, 30°, …, 170°:

    u = t - 0.5  (mod 9),  b = floor(u),  f = u - b
    bin b         += (1 - f)·|G|
    bin (b+1) % 9 +=  f·|G|

Bin 8 wraps to bin 0, because 180° equals 0°. The weight f has 10 bits. Each
vote keeps only the integer part of its share, so each vote is 9 bits and the
two votes of a pixel may add up to one less than |G|. The paper asks for
votes split between adjacent bins. The linear rule and the bin-centre
placement are this design's choices. Latency is 2 clocks.

## From pixels to cells (`aggregate`)

Cells are 8x8 pixels, but the pixels of a cell arrive spread over 8 rows of
the image. The stage therefore builds each cell in two steps:

1. A bin-wise adder sums the votes of 8 consecutive pixels. These are one row
   of one cell, and the sum is a *partial cell hog* (9 x 15 bits).
2. A line buffer keeps one partial hog per cell column, 640/8 = 80 entries.
   When a partial hog completes, a second bin-wise adder adds it to its
   column's entry and writes the sum back. On the first pixel row of a cell
   row, the stored entry is ignored, so the buffer needs no clearing pass. On
   the eighth pixel row, the sum is the finished cell and `cell_hog_valid`
   goes high.

Cells therefore come out in raster order of cells. During the last pixel row
of each cell row, one cell leaves every 8 pixels. The source draws the
80-entry buffer as a circular shift register. Here it is an addressed memory
with the same contents, which maps to block RAM. A cell leaves 2 clocks after
the vote of its last pixel.

## Block normalisation (`normalize`)

A block is 2x2 cells. The cells are numbered 0 top-left, 1 top-right,
2 bottom-left and 3 bottom-right. A block has 36 values v, and each becomes

    v_i / sqrt( Σ v_j² + ε² )      (ε = EPS = 1 histogram unit)

Blocks do **not** overlap: they step by two cells. At 640x480 that gives
40x30 blocks of 36 features, which is 80x60x9 values and matches the feature
size the source quotes. The original Dalal–Triggs HOG uses a one-cell stride,
with 79x59 blocks. To change this, change the block assembly at the top of
`normalize.sv`.

Assembly: cells of even cell rows go into a row buffer of 80 cells. In odd
cell rows, the even-column cell is held in a register. The odd-column cell
then completes a block with the two buffered cells above it.

Arithmetic: everything is integer or fixed point until the last step.

| stage | operation | width |
|---|---|---|
| 1 | 36 squares | 30 bit |
| 2 | sum + ε², shifted left 16 | 52 bit |
| 3–28 | digit-by-digit square root, one bit per stage (`isqrt_pipe`) | norm with 8 fractional bits, 26 bit |
| 29–77 | reciprocal R = 2⁴⁸ / norm by restoring division (`recip_pipe`) | 49 bit |
| 78 | v_i · R, keep 24 fractional bits | 25 bit, ≤ 1.0 |
| 79 | fixed point to float32 (truncating) | 32 bit |

One reciprocal and 36 multiplies replace 36 dividers. The pipeline accepts a
block every clock, although at most one arrives every 16 pixel clocks.
Latency is 80 clocks from the cell that completes the block. The paper
specifies the L2 formula, the float32 output, fixed point up to the last step
and a pipelined normaliser. The square root and reciprocal method, ε, the
block stride and the cell order are this design's choices.

## Memory side

**Pixels** (`pixel_fifo`, `pixel_avalon_master`). Every gray pixel enters a
1024-entry FIFO together with its (x,y) coordinate. The Avalon master writes
each pixel as one byte to `PIX_BASE + y*IMG_W + x`. It holds address and data
stable while `waitrequest` is high, and it sustains one byte per clock when
the bus does not stall. If the bus accepts less than one byte per pixel over
a whole frame, the FIFO overflows. Line blanking gives it time to catch up.

**Features** (`hog_dma`). Each block (1152 bits) enters a 16-block FIFO. The
write master sends it as 9 beats of 128 bits, four features per beat, with
the lowest feature in the lowest bits. The address is

    FEAT_BASE + block_index * 144 + beat * 16

where block_index restarts at 0 on the block that carries the frame flag. A
frame's features are thus a `float[1200][36]` array in raster order of
blocks. Blocks arrive in bursts of one per 16 pixel clocks, during the last
pixel row of odd cell rows. A 9-beat write fits in that interval, and the
FIFO absorbs bus stalls.

Base addresses, bus widths and FIFO depths are parameters of `hog_system`.
None of them are given in the source.

## Timing summary

* Throughput: one pixel per clock. No stage stalls.
* Latency from a frame's last pixel to its last block: IMG_W + 104 clocks.
  That is 1 (Bayer) + IMG_W+1 (line lag) + 18 (CORDIC) + 2 (vote) + 2
  (aggregate) + 80 (normalise). At 640 pixels wide this is 744 clocks.
* Required idle time between frames: at least IMG_W+1 clocks.
* Register depth is roughly 105 stages plus the line buffers. The source's
  fastest build used 155 stages to reach 162 MHz on a Cyclone V. This code
  has not been through FPGA timing analysis.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `hog_system`, `hog_extractor`, stages | `IMG_W`, `IMG_H` | 640, 480 | frame size, multiples of 16 |
| `hog_system`, `hog_extractor` | `CORDIC_ITER` | 16 | CORDIC micro-rotations |
| `hog_system`, `normalize` | `EPS` | 1 | ε of the L2 norm |
| `hog_system` | `PIX_FIFO`, `FEAT_FIFO` | 1024, 16 | FIFO depths (entries, blocks) |
| `hog_system` | `PIX_BASE`, `FEAT_BASE` | 0x3000_0000, 0x3800_0000 | byte addresses |
| `bayer_gray` | `PATTERN` | G R / B G | mosaic colour order |

Shared types and constants live in `rtl/hog_pkg.sv`.

## Not included

The camera sensor and its I2C set-up, the ARM processor system with its DDR3
memory, the VGA display and the SVM classifier that runs in software are
outside this RTL. The camera and the processor's memory attach to the ports
of `hog_system`. The sensor configuration and the display have no ports here,
because neither interface is described in enough detail to build.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_bayer_gray` | gray value, coordinates and 1-clock latency against an independent demosaic model |
| `tb_deltaxy` | Gx/Gy of every pixel, zero border, flush of the last row, gaps in `valid` |
| `tb_cordic_vec` | 2000+ vectors against real sqrt/atan2 (±2 LSB), latency 18 |
| `tb_vote` | 3000+ angles, bin-centre and wrap cases against a real-valued split (±1) |
| `tb_aggregate` | every cell bin against exact sums, cell order, latency 2 |
| `tb_normalize` | every feature against real L2 normalisation (±2e-3), zero block, largest block, latency 80 |
| `tb_pixel_fifo`, `tb_pixel_avalon_master`, `tb_hog_dma` | queue model; addresses under random `waitrequest`; overflow and drop counts |
| `tb_hog_extractor` | 32x32 gray frames: cells (±8 per bin) and features (±0.02) against the float model in `hog_ref_pkg` |
| `tb_hog_system` | 64x32 raw frames end to end: exact frame bytes in memory, features within 0.02, a forced pixel-FIFO overflow; counts bus stalls, flushes, vote wraps and blanking, and fails if any never occurs |
| `tb_hog_system_full` | the same checks on one full 640x480 frame with default parameters (about 3 s of simulation) |

Over the test frames, the features differ from the floating-point reference
by 0.0002 on average and by at most 0.002. The paper reports about 0.02
between its hardware and its C model.

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/hog_pkg.sv tb/hog_ref_pkg.sv tb/tb_hog_system.sv --top-module tb_hog_system
./obj_dir/Vtb_hog_system
```

Testbenches for a single module need only `rtl/hog_pkg.sv`, the module itself
and the testbench.
