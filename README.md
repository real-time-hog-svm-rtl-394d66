# HOG + linear SVM pedestrian detector for a 4K/UHD video stream

This is a streaming pedestrian detector. It finds people in greyscale video of 3840 x 2160
pixels at 60 frames per second. Each 64 x 128-pixel window of the frame gets a
Histogram-of-Oriented-Gradients (HOG) descriptor and a linear Support Vector Machine (SVM) score.
The window step is 8 pixels. That makes 473 x 255 = 120,615 windows per frame, and every one is
scored. There is no frame buffer: the pixels pass once through a chain of pipelined units.
Each unit keeps only a few lines of state in block RAM or registers.

A UHD frame at 60 frames/s carries about 500 Mpixel/s, far too fast for one pixel per clock on
an FPGA. So the stream carries **four pixels per clock** (one "vector") at 150 MHz. Every unit
handles a whole vector per cycle. Units that work per pixel are built four times. Units that work
per cell or per block run at a lower rate and need no copies.

The RTL follows the architecture of the published design by Wasala and Kryjak (Zynq UltraScale+
MPSoC). That includes its fixed-point formats, its approximations of square root, arctangent
and inverse square root, and the structure of the SVM array. Where that description stops, the
choices made here are listed in [Departures and open points](#departures-and-open-points).

```
 AXI4-Stream in ──► context_gen ──► gradient_unit ──► cell_histogram ──► block_norm
 (4 px/clk,         3x3 window      |G|, bin ×4       8x8 cells,         L2-Hys, 2 inverse
  tuser=SOF,        per pixel                         9 bins              roots, 36 features
  tlast=EOL)                                                                  │
     │                                                                        ▼
     │                                                 svm_classifier ◄── svm_feeder
     │                                                 15 x 7 svm_ep      4 FIFOs, 1 cell/clk
     │                                                       │ score > 0
     │                                                       ▼
     │                        processor (NMS) ◄──────── bbox_bram  (detection list)
     │                               │ box table
     └─────────────────────────► draw_bbox ──► AXI4-Stream out (video with boxes)
```

The top module is `hog_svm_top`. The non-maximum suppression (NMS) step runs as software on the
SoC's processor. It reads the detection list through the `bb_*` ports and writes the boxes to
draw through the `box_*` ports.

## Number formats

All arithmetic is fixed point. Widths and fraction bits of each quantity are in `hog_pkg`:

| quantity | bits | fraction bits | notes |
|---|---|---|---|
| pixel | 8 | 0 | greyscale |
| gradient magnitude | 11 | 3 | saturates at 255.875 |
| bin number | 4 | 0 | 0..8 |
| histogram bin | 18 | 4 | |
| block sum of squares | 42 | 8 | |
| first inverse root | 24 | 18 | |
| feature after first normalisation | 10 | 9 | clipped at 102/512 ≈ 0.2 |
| sum of squares of 36 features | 26 | 18 | |
| second inverse root | 22 | 16 | |
| final feature | 10 | 9 | |
| SVM coefficient | 11 (signed) | 10 | |
| SVM partial sums, bias, score | 33 (signed) | 19 | |

The 26/18 format of the second sum of squares is this design's choice. Its sum of 36 features
never exceeds 36 × (1023/512)² < 144, so 26 bits hold it without loss. All other formats come
from the published design.

## Pixel context (`context_gen`)

Gradients need each pixel's four neighbours. A vector register chain holds three vectors per
image row. The delay lines between rows bring the rows above to the same column. Together they
give a 3 x 3 neighbourhood for each of the four pixels of the current vector.

There are two rows of delay, each `WIDTH/4 − 4` deep (block RAM, `line_delay`). With the three
registers and the output register, each row spans exactly one line. The output is centred one
line and one vector behind the input.

Pixels outside the frame are replaced by the nearest edge pixel (edge replication). The last
line still has to reach the output after the frame's last pixel has gone in. To do that, the unit
drops `s_ready` for `WIDTH/4 + 1` cycles and shifts in blanks. This is the only back-pressure in
the design. At 4K it costs 961 cycles per frame.

## Gradient, magnitude and orientation (`gradient_unit`)

Per pixel: `Gx = right − left` and `Gy = below − above`. Two approximations replace the
expensive operations:

* **Magnitude.** `|G| ≈ max(0.875·a + 0.5·b, a)`, with `a = max(|Gx|,|Gy|)` and
  `b = min(|Gx|,|Gy|)`. It is computed in eighths as `max(7a + 4b, 8a)`, which is the 11/3
  format directly. It saturates at 2047.
* **Orientation without arctangent.** The bin centres are at 10°, 30°, …, 170°. The angle is
  folded into the first quadrant, and the absolute ratio is placed between the tangents of 10°,
  30°, 50° and 70°. The test `|Gy|·256 > |Gx|·T` uses the constants
  T = round(256·tan θ) = 45, 148, 305, 703. Each is a short shift-and-add sum.
  * The comparison gives a sector s = 0..4.
  * If Gx and Gy have opposite signs, the angle lies in the second quadrant and is mirrored.
  * The unit sends out the lower of the two bins whose centres bracket the angle:
    * bin 8 for s = 0, which wraps across 0°/180°;
    * s − 1 otherwise;
    * 8 − s when mirrored.
  * The upper bin is always (lower + 1) mod 9.

Latency is 2 cycles, at one vector per cycle.

## Cell histograms (`cell_histogram`)

Each pixel adds half its magnitude to each of its two bins. This is a fixed 50/50 vote, not the
textbook linear interpolation. In the 18/4 histogram format, half of an 11/3 magnitude is just the
magnitude's bit pattern, so no shifting is needed.

One vector covers half a cell row. For each bin, a small adder tree sums the four pixels'
contributions. The tree result is then added into a bank of registers holding one histogram per
cell column (480 at 4K).

Two rules control the bank:
* The first vector of a cell (row 0, left half) **overwrites** its bank entry instead of adding.
  So a cell row never has to be cleared.
* The last vector (row 7, right half) sends out the finished histogram with its cell coordinates.

Latency is 2 cycles after a cell's last vector. Finished cells appear in raster order, at most one
every second cycle.

## Block normalisation (`block_norm`, `fast_invsqrt`)

This is the most involved unit. Blocks are 2 x 2 cells and overlap by one cell in each direction.
So every cell with `cx ≥ 1, cy ≥ 1` completes a block: block `(cx−1, cy−1)`. A frame has
479 x 269 blocks.

Steps for each incoming cell:

1. **Cell sum of squares.** An adder tree forms the sum of the squares of the cell's 9 bins. The
   histogram and this sum are written into a one-cell-row delay line (block RAM, read-first). The
   same cell column of the row above comes back at the same time.
2. **Two-cell and block sums.** Adding the two sums gives the sum for the cell column ("two
   cells"). Adding the previous column's two-cell sum gives the block's sum of squares (42/8). The
   four histograms are gathered, in the order top-left, top-right, bottom-left, bottom-right.
   Feature index = 9·cell + bin.
3. **First inverse root and synchronisation.** The block sum enters `fast_invsqrt` (5 cycles).
   Meanwhile the four histograms wait in a FIFO. The inverse roots go into a second FIFO. Whenever
   both FIFOs hold an entry, both are read together. This keeps histograms and roots paired
   whatever the pipeline depths.
4. **Multiply and clip.** 36 multipliers scale the histograms by the root. The result is rounded
   down to 10/9 and clipped at 102/512 (0.2).
5. **Second normalisation.** A second sum of squares over the 36 clipped features feeds a second
   `fast_invsqrt` (26/18 in, 22/16 out). The features wait in a 5-stage delay, then go through 36
   more multipliers. Results saturate at 1023/512.

Output: one 36-feature vector per block, with block coordinates. `clip_seen` marks blocks in which
the 0.2 clip acted.

**The inverse square root** is the well-known floating-point method:
1. Convert the fixed-point input to an IEEE-754 single. This needs a leading-one search and a
   23-bit mantissa.
2. Take `0x5F3759DF − (bits >> 1)` as the first guess y.
3. Do one Newton–Raphson step, `y·(3 − x·y²)/2`.

The step is done on integers: mantissa products with the exponents tracked separately. That avoids
a floating-point unit. The result is shifted into the requested output format and saturates.
An input of 0 gives 0.

Accuracy is about 0.2 % relative. Read together with the 24/18 output format, this limits how
exactly the first normalisation can be done. For small blocks the root is only a few hundred LSBs,
so its rounding dominates. Features can then differ by a few LSBs from an exact floating-point
computation. The testbenches allow exactly this error bound. It is a property of the formats, not
an implementation error.

## Feeding the SVM (`svm_feeder`)

The SVM array takes a block as four cell vectors of 9 features, one per clock, in 4 cycles. The
feeder holds four FIFOs, one per cell position. When a block vector arrives, each FIFO gets its
quarter. A small controller reads them in turn: cell 0, 1, 2, 3.

The normaliser can produce one block every 2 cycles while a cell row is passing. The SVM drains
one block every 4 cycles. The FIFOs (256 blocks) absorb the difference until the next cell row
starts. A full cell row of pixels takes 7,680 cycles at 4K, while the SVM needs 1,916. The peak
backlog at 4K is about 240 blocks. `backlog` reports the current fill level.

## The SVM array (`svm_classifier`, `svm_ep`)

The window score is a 3,780-term dot product plus a bias:
`s = Σ w·f + b`. The window is 7 x 15 blocks of 36 features.

The array has **15 rows x 7 processing elements**. Element (y, x) stores the 36 coefficients of
block position (y, x) of the window. It has 9 multipliers and an adder tree (945 multipliers in
all). Every block is broadcast to all elements.

Within a row, element x adds its 4-cycle accumulated dot product to what element x−1 produced for
the **previous** block. So the last element of row y holds, after block (R, c), the complete
row-y sum of the window whose left block column is c−6.

Between rows, that partial sum must wait until the same window's next block row arrives. That is
one block row minus six blocks later. A `line_delay` of `NBX − 8` steps plus two register stages
gives exactly this. It advances once per block. NBX = 479 at 4K, so the delay is 471.

After row 15, the bias is added. The score belongs to the window whose top-left block is
(R−14, c−6), at pixel (8(c−6), 8(R−14)).

Some partial sums cross a row end. They belong to windows that would stick out of the frame, so
they are computed but not reported. Only the 473 x 255 windows that lie fully inside are sent out
on `score/win_x/win_y`. `det_valid` marks the ones with a score above zero.

Coefficients are fixed at start-up. Each element either reads `<COEF_DIR>/ep_<y>_<x>.hex`
(36 signed 11-bit values) or, if `COEF_DIR` is empty, computes a stand-in pattern
(`hog_pkg::svm_default_coef`, an integer hash of the feature index scaled to ±256/1024). The
published design was trained on INRIA and Oxford Town Centre, but its trained weights are not
available. With the stand-in pattern, scores are meaningful as arithmetic but not as detections.
`BIAS` is a parameter.

## Detection list and box overlay (`bbox_bram`, `draw_bbox`)

`bbox_bram` writes each detection as `{x, y, score}` (57 bits) into a dual-port RAM of 1024
entries. The write pointer restarts with each frame. At the end of the frame it latches the
count (`frame_count`), sets `overflow` if entries were lost, and pulses `done_irq`. The processor
then reads the list through its port, one cycle of read latency.

After NMS, the processor writes up to 16 boxes into `draw_bbox`'s table through the `box_*`
ports. At every start of frame the table is copied into the active set, so a frame never shows a
half-updated set of boxes. Each pixel lying on a box outline is replaced by white (255). The
output stream keeps SOF/EOL and has one cycle of latency.

## Departures and open points

* **Tangent constants.** The published design takes its orientation thresholds from another work
  without listing them. Here they are round(256·tan θ).
* **SVM weights and bias** are stand-ins (see above). Load trained weights through `COEF_DIR`.
* **L2-Hys clip.** The formula in the source reads as `max(0.2, f)`. The prose says values above
  the threshold take the threshold value. The clip (`min`) is built.
* **Magic number.** The published equation is written as `x >> 1 − 0x5F3759DF`. The standard,
  working form `0x5F3759DF − (x >> 1)` is built.
* **No epsilon** in the normalisation. An all-zero block gives zero features.
* **Frame edges.** Gradients at the border use edge replication. This is not specified in the
  original.
* **End-of-frame flush** by dropping `s_ready` for one line. In a real video timing this falls into
  the blanking interval.
* **Sizes of buffers** are this design's choices: feeder FIFOs of 256 blocks, normaliser FIFOs of
  16, 1024 detections, 16 boxes.
* **Frame structure** is fixed by `WIDTH`/`HEIGHT`. `tuser` is checked by an assertion but does
  not resynchronise the pipeline.
* **One scale only**, as in the original.
* **Multiplier count.** The 945 SVM multipliers (11 x 10 bits) and the 72 normalisation
  multipliers are written as plain `*`. How they map to DSP blocks is left to synthesis. The
  original reports 818 DSPs.

## Verification

Every unit has its own self-checking testbench in `tb/`. Each compares against an independent
reference model written in the testbench and prints
`TB_RESULT checks=<n> failures=<n>`. The end-to-end checker `hog_e2e_checker` contains a
complete reference HOG+SVM model:
* gradient, histogram and L2-Hys with real-number inverse roots and the error bound described
  above;
* SVM with the same coefficients;
* detection list and box drawing.

It checks every intermediate stream of the top (gradients, histograms, features, scores), the
detection list read through the processor port, and the output video.

* `tb_hog_svm_top`: 96 x 144 frames, 3 frames, a 2-entry detection list. It counts each
  mechanism and fails if one never occurs:
  * input stall (flush)
  * feeder backlog
  * clip
  * wrapped (suppressed) partial sums
  * magnitude saturation
  * all-zero blocks
  * detections and rejections
  * list overflow
  * drawn pixels
* `tb_hog_svm_full`: the unchanged top (3840 x 2160), two complete frames. That is 241,230 window
  scores and about 33 million checks. It takes roughly a minute in Verilator.

To run a testbench with Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/hog_pkg.sv tb/tb_hog_svm_top.sv \
          --top-module tb_hog_svm_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one. Random initial values
(`+verilator+rand+reset+2`) are supported: the testbenches ignore outputs until reset has been
applied.
