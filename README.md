# Two-pass streaming Multi-Scale Line Detector for retinal vessel segmentation

Blood vessels in a fundus photograph are thin, slightly darker lines on a
smoothly varying background. The Multi-Scale Line Detector (MSLD) finds them
by comparing, at every pixel, the average grey level along short straight
lines through the pixel with the average of the surrounding square window. It
does this for several line lengths ("scales"), standardizes each scale's
response image to zero mean and unit deviation over the retina, and averages
the standardized scales with the (inverted) green value.

The standardization is what makes a hardware implementation awkward: the mean
and deviation of a scale are only known after the whole image has been seen,
but they are needed to process every pixel. A software implementation keeps
the raw-response image and an accumulated combined image, two full frames of
memory. This RTL keeps neither. It computes all scales in parallel, one pixel
per clock, and simply runs the image through the datapath **twice**:

* **Pass 1** computes the raw responses of all scales and folds them into
  running sums (count, sum, sum of squares) over the region of interest (ROI).
  At the end of the image each scale is reduced to one mean and one standard
  deviation.
* **Pass 2** recomputes exactly the same raw responses, standardizes them with
  the stored statistics, combines them and streams the result out.

So the only storage between the passes is 2 values per scale (16 numbers for
the default eight scales), plus a line buffer of (W-1) image rows.

The architecture follows the publication *Memory Efficient Multi-Scale Line
Detector Architecture for Retinal Blood Vessel Segmentation* (H. Bendaoudi,
F. Cheriet, J. M. P. Langlois), which describes an FPGA implementation on a
Zynq device. This RTL is an independent SystemVerilog rendering of it; where
the publication leaves a detail open, the choice made here is stated below and
in the opening comment of each file.

## The algorithm as computed

For a pixel with inverted green value I (I = 255 - green), a W x W window
centred on it (W odd, h = (W-1)/2), and twelve lines through the centre at
0, 15, ..., 165 degrees:

* window mean: `avg = (sum of the W*W pixels) / W^2`
* for each scale s = 1 .. NS, NS = (W+1)/2, line length L = 2s-1:
  `line_mean(o, s)` = mean of the L pixels of line o nearest the centre;
  raw response `R_s = max over o of line_mean(o, s) - avg`
* over the ROI of the frame: `mean_s`, `std_s` of `R_s`
* standardized `R'_s = (R_s - mean_s) / std_s`
* output `Y = (sum over s of R'_s + I) / (NS + 1)`

Defaults are the configuration built for the 565 x 584 DRIVE images: W = 15,
hence eight scales (L = 1, 3, ..., 15).

### Line geometry

Pixel i (i = 0..W-1, k = i - h) of the line at angle 15*o degrees sits at
column `h + round(k cos)` and row `h - round(k sin)` of the window (rows grow
downwards; rounding half away from zero). Cosine and sine come from a 12-entry
table of 16-bit fractions in `msld_pkg` (`line_tap`), so the geometry is fixed
at elaboration and costs nothing in hardware: each line detector is wired to
its W window taps. The publication does not specify how the lines are
rasterised; this rounding is this design's choice.

## Datapath

```
 {mask, green} --> line_buffer --W*W taps--+--> 12 x lrcm  (one per angle) --+
                   (255-g, (W-1)*NCOLS+W)   |     NS line means each          | balancing
                                            +--> window_mean ---------------+ | registers
                                                                           v v
                                               NS x rrcm (max of 12, minus window mean)
                                                     | R_1 .. R_NS
                         pass 1                      |                 pass 2
          NS x mean_std_unit <-----------------------+-----------------> NS x standardization
          (count, sum, sum of squares over ROI;                           (R - mean) * 1/std
           end of image: /, x, -, sqrt)  --- mean, std per scale --->          |
                                                                        combined_response
                                                                        (sum + I)/(NS+1)
                                                                               |
                                                                      zero outside ROI --> out
```

`msld_controller` sequences the passes and produces one enable, `en`, for the
whole streaming pipeline. The ROI bit, a "this is a real pixel" flag and the
centre pixel value travel beside the arithmetic in delay lines of the same
depth.

### Line buffer

`line_buffer` is a plain shift register of `(W-1)*NCOLS + W` pixels: exactly
enough to hold a W x W window of a raster-scanned image. Window pixel (r, c)
is tap `(W-1-r)*NCOLS + (W-1-c)`. Pixels are inverted as they enter. The
window is centred on the pixel pushed `OFFSET = h*NCOLS + h` pushes earlier,
so the result of the last pixels of a frame needs OFFSET more pushes: the
controller supplies them as zero "fill" pixels. The buffer is cleared at the
start of each pass, so taps above the first row or below the last row read
zero; taps beyond the left or right edge wrap onto the neighbouring row. Both
only affect pixels within h of the frame border, which lie outside the
circular retina ROI of fundus images.

### Line response computing module (lrcm) — reuse across scales

This is the part worth reading closely. A naive design would compute NS
separate sums per line. Because the scales are nested (the 2s+1 centre pixels
contain the 2s-1 centre pixels), one adder chain computes them all:

```
 stage 1:  s    = p[h-1] + p[h]          pair_k = p[h-k] + p[h+k]   (k = 2..h)
           p[h+1] registered             p[h]   registered (scale 1)
 stage 2:  S2   = s + p[h+1]                              -> 3 pixels
 stage 3:  S3   = S2 + pair_2 (delayed 1)                 -> 5 pixels
 ...
 stage NS: S_NS = S_{NS-1} + pair_h (delayed h-1)         -> W pixels
```

Every stage is registered, so the chain is fully pipelined: a new line enters
every clock. Each sum is multiplied by a constant `floor(2^18 / L)` to give a
mean with 18 fractional bits. Scale s is ready after s stages (plus its
multiplier register), so earlier scales pass through balancing registers until
all NS means leave together, NS clocks after the line entered: for W = 11 the
centre pixel passes six registers and scale 2 four, and the multiplier of the
largest scale drives the output directly. Twelve copies exist, one per angle.

### Window mean, maximum and raw response

`window_mean` sums the W*W pixels in a binary adder tree with a register per
level (`pipe_add_tree`) and multiplies by `floor(2^18 / W^2)`. `rrcm` takes,
for one scale, the twelve line means, finds the largest with a two-by-two
comparator tree (12 -> 6 -> 3 -> 2 -> 1, registered per level) and subtracts
the window mean, which it delays by the same depth.

### Pipeline latencies (enabled cycles), W = 15

| stage                                   | cycles |
|-----------------------------------------|--------|
| line buffer look-ahead, h*NCOLS + h      | 3962   |
| window register                          | 1      |
| lrcm (8) / window_mean (9), balanced to  | 9      |
| rrcm                                     | 5      |
| standardization                          | 2      |
| combined_response, clog2(9)+1            | 5      |
| pixel in -> its result out               | 3984   |

`msld_pkg` derives these from W (`lrcm_lat`, `wmean_lat`, `rrcm_lat`,
`raw_lat`); every balancing register count follows from them.

### Statistics (mean_std_unit)

One unit per scale. In pass 1 it squares each raw response and, for pixels
inside the ROI, accumulates the response, its square and a pixel count (the ROI
is a circle whose area is not known in advance). After the last pixel:

```
mean = sum / N          (divider 1, magnitude divided, sign restored)
msq  = sum_sq / N       (divider 2, in parallel)
var  = msq - mean^2     (clamped at 0)
std  = floor(sqrt(var))
```

These run once per frame, so they are sequential: restoring dividers
(`seq_div`, one quotient bit per clock) and a digit-by-digit square root
(`seq_isqrt`). For the defaults this takes 111 clocks per frame. Because the
response has 18 fractional bits and its square 36, the square root returns a
deviation with 18 fractional bits directly.

### Standardization and combination

When the statistics are ready, each `standardization` unit stores the mean and
computes `inv = floor(2^36 / std)` once (sequential divider, 38 clocks). Per
pixel it then needs one subtraction and one multiplication:
`R' = ((R - mean) * inv) >>> 18`, saturated to 36 bits. A zero deviation gives
R' = 0. `combined_response` adds the NS standardized values and the inverted
green value (as an integer with 18 fractional bits) in a pipelined adder tree
and multiplies by `floor(2^18/(NS+1))`.

## Number formats

| signal                         | format                                   |
|--------------------------------|------------------------------------------|
| input pixel                    | 8-bit unsigned green value + 1 mask bit  |
| line and window means          | unsigned, 8 integer + 18 fraction bits   |
| raw response R                 | signed 28 bits, 18 fraction bits         |
| accumulators (defaults)        | sum 47 bits signed, sum of squares 75 bits, count 19 bits |
| mean, std per scale            | 28 bits, 18 fraction bits                |
| standardized response R'       | signed 36 bits, 18 fraction bits (saturating) |
| output Y                       | signed 32 bits, 18 fraction bits (saturating), 0 outside the ROI |

All divisions by constants are multiplications by a reciprocal rounded down,
and all shifts round toward minus infinity. The 18 fractional bits are the
figure given for the DRIVE implementation; the integer widths are sized for
the worst case.

## Operation and interfaces

`msld_top` is the programmable-logic side of a processor + FPGA system: an
input FIFO, the core, and an output FIFO (`stream_fifo`, 512 words,
first-word fall-through). The processor and its link core are outside this
RTL; the top exposes their FIFO side:

| port                     | dir | meaning                                          |
|--------------------------|-----|--------------------------------------------------|
| `h_wr_en, h_wr_data, h_wr_full` | in/in/out | write one `{mask, green}` word (9 bits, `pix_in_t`) unless full |
| `h_rd_en, h_rd_data, h_rd_empty` | in/out/out | read one result word (32 bits) when not empty |
| `phase`                  | out | `PH_CLEAR, PH_PASS1, PH_STATS, PH_LOAD, PH_PASS2` |
| `frame_done`             | out | one-clock pulse after the last result of a frame |
| `stat_mean, stat_sdev`   | out | the per-scale statistics held between the passes |

Host sequence per frame: write the NROWS*NCOLS words of the frame (raster
order), then write the same frame again; read NROWS*NCOLS results, which
appear during the second write. The core then expects the next frame. There
is no start command and no frame header: passes are delimited by pixel count.

Stalls: the whole pipeline halts (one enable) when the input FIFO is empty,
and in pass 2 when the output FIFO is full, so the host may write and read at
any pace. With no stalls a frame takes `2 * (NPIX + 3984) + ~150` clocks
(668,038 measured for 565 x 584), i.e. 11.1 ms per frame at 60 MHz.

Reset (`rst_n`, asynchronous, active low) is needed once; the controller
clears the line buffer and valid flags at the start of every pass.

## Parameters and sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `W`       | 15      | window size and longest line (odd, >= 5); NS = (W+1)/2 scales |
| `NCOLS`   | 565     | image width  |
| `NROWS`   | 584     | image height |
| `FIFO_DEPTH` | 512  | words per FIFO (power of two) |
| `FRAC`, `N_ORIENT` | 18, 12 | package constants |

Workloads:

* **565 x 584 images, W = 15, 8 scales** (the DRIVE configuration): the
  defaults. The line buffer holds 7,925 pixels, the statistics 16 values. The
  full-size testbench runs a whole frame at these defaults.
* **3504 x 2336 images, W = 41, 21 scales** (the high-resolution
  configuration of the publication): not the defaults. It needs
  `W = 41, NCOLS = 3504, NROWS = 2336`, for which all widths and latencies
  follow automatically (line buffer 140,201 pixels, 23-bit pixel counter,
  42 stored values). It has not been simulated at that size.

Because the line buffer is written as a flat shift register and the twelve
line detectors are replicated per scale set, the default configuration is a
large flat netlist; FPGA mapping of the buffer onto shift-register LUTs or
block RAM is left to synthesis.

## Where this RTL departs from, or adds to, the publication

* Line rasterisation (rounding of k cos, k sin) is this design's choice.
* Border handling (zero outside the frame, wrap-around at the left and right
  edges) and zero output outside the ROI are this design's choices.
* The host must send each frame twice; the publication's flow loops back to
  image acquisition after storing the statistics, which implies the same.
* Reciprocal constants are rounded down; divisions and square root are
  sequential; the standardization divides by multiplying with a reciprocal
  computed once per frame. The publication only names these operators.
* The mean is truncated toward zero; a negative variance from rounding is
  clamped to zero; responses are saturated.
* The inverted green term of the combination is the raw 0..255 value, as the
  formula is written; it is not standardized.
* Adders are written at the widest width of their tree and left to synthesis
  to trim; the publication sizes every stage individually.
* Binarising the response (for display) is left to the host.
* The FIFOs are generic synchronous FIFOs; their depth and the input word
  format are this design's.

## Files

`rtl/`:

| file | content |
|------|---------|
| `msld_pkg.sv` | constants, stream word type, phase enum, line geometry, latencies |
| `line_buffer.sv` | shift-register line buffer and window |
| `lrcm.sv` | line response computing module (all scales of one line) |
| `window_mean.sv` | window mean |
| `rrcm.sv` | raw response of one scale |
| `raw_response_unit.sv` | 12 lrcm + window mean + NS rrcm, balanced |
| `mean_std_unit.sv` | ROI statistics of one scale |
| `standardization.sv` | standardization of one scale |
| `combined_response.sv` | combination of the scales |
| `msld_controller.sv` | two-pass scheduler |
| `msld_core.sv` | the core |
| `stream_fifo.sv` | FIFO |
| `msld_top.sv` | FIFOs + core |
| `pipe_add_tree.sv`, `pipe_delay.sv`, `seq_div.sv`, `seq_isqrt.sv` | helpers |

`tb/`: one self-checking testbench per block (`tb_<block>.sv`), the end-to-end
test `tb_msld_top.sv` (W = 5, 20 x 14 pixels, two frames, random stalls on both
sides), the full-size test `tb_msld_full.sv` (defaults, one 565 x 584 frame),
and `msld_ref.sv`, a behavioural reference model (real-valued line geometry,
direct sums, 128-bit statistics, binary-search square root) from which all
expected values are computed. Each testbench prints
`TB_RESULT checks=<n> failures=<n>`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/msld_pkg.sv tb/msld_ref.sv tb/tb_msld_top.sv --top-module tb_msld_top
./obj_dir/Vtb_msld_top
```

Replace `tb_msld_top` by any other testbench name. `tb_msld_full` simulates
about 670,000 clocks of the full design and takes a couple of minutes. The
end-to-end tests also count how often each mechanism occurred (input stalls,
output back-pressure, flush cycles, ROI and non-ROI pixels, first and second
passes) and fail if one never did.

## How far it is verified

* Every block is checked against the reference model with random stimuli and
  a randomly gated enable, including exact pipeline latencies.
* `tb_msld_top` and `tb_msld_core` check every output pixel and the stored
  statistics bit-exactly over whole frames, with stalls.
* `tb_msld_full` checks all 329,960 output pixels of a synthetic 565 x 584
  frame at the default parameters, and the frame time.
* Not verified: real fundus images and the segmentation quality figures of the
  publication (which also depend on a binarisation threshold outside the RTL),
  the high-resolution configuration, timing closure and resource use on an
  FPGA.
