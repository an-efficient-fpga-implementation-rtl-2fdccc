# Streaming 3x3 filter chain for MRI edge detection and ROI texture statistics

This is synthesizable SystemVerilog for an image-filtering pipeline for grey-scale MRI slices.
It takes one pixel per clock in raster order and does four things in a single pass:

1. It smooths the image with a 3x3 Gaussian.
2. It computes an edge strength with four programmable 3x3 filters.
3. It turns that strength into a binary edge map with a threshold.
4. It sharpens the edge map with another 3x3 filter.

Alongside the image, a statistics unit measures the mean, variance and standard deviation of a
40 x 40 region of interest (ROI) in every frame. These texture statistics are what set tumour
tissue apart from normal tissue.

The architecture follows a published System Generator design. That design was built from vendor
blocks: four "DAFIR" 9-tap filters, two Expression blocks, an AddSub, an ABS, an MCode threshold
and a sharpening filter, with Gaussian blur in front. This RTL rebuilds that chain by hand. The
published description leaves many details open, and this design fills them in. Everything below
says which parts follow the original and which are choices made here.

## Pipeline

```
            +-------------+    +------------------------------------------+    +-----------+    +-------------+
 in_pix --> | Gaussian    | -> | edge gradient                            | -> | threshold | -> | sharpening  | --+
 (8 bit)    | 3x3 stage   |    |  window -> F0,F1,F2,F3 (9-tap MACs)      |    | mag > thr |    | 3x3 stage   |   |
            | eq.(7) mask |    |  (F0 & F1) + (F2 & F3) -> |.|            |    | -> 0/255  |    | eq.(8) mask |   |
            +-------------+    +------------------------------------------+    +-----------+    +-------------+   |
                  |                         |                                       |                              |
                  +-------------- tap_sel (blur / edge / threshold / sharpen) ------+------------------------------+
                                                   |
                                        out_pix  --+-->  ROI statistics (mean, variance, std_dev)
```

| File | Role |
|---|---|
| `rtl/mri_pkg.sv` | Pixel and coefficient types, widths, the output-tap enum, helper functions |
| `rtl/window3x3.sv` | Line buffers: turns the pixel stream into zero-padded 3x3 neighbourhoods |
| `rtl/mac9.sv` | Nine-tap multiply-accumulate with nine programmable coefficients |
| `rtl/conv3x3_stage.sv` | Window, MAC and conversion back to a clamped pixel: the blur and sharpening stages |
| `rtl/edge_gradient.sv` | Window, four MACs, two AND "Expression" blocks, AddSub and ABS |
| `rtl/threshold_unit.sv` | Magnitude above the threshold gives a white pixel (255), otherwise black (0) |
| `rtl/roi_stats.sv` | ROI selection, sums, then mean, variance and standard deviation |
| `rtl/seq_div.sv`, `rtl/seq_isqrt.sv` | One-bit-per-clock divider and square root used by the statistics |
| `rtl/mri_filter_top.sv` | The chain above, the coefficient write decoder and the output tap |

Default parameters: `IMG_W = IMG_H = 256`, the image size of the original experiments, and
`ROI_W = ROI_H = 40`. There are 8-bit pixels and 12-bit coefficients with 4 fraction bits
(`mri_pkg`).

## From a pixel stream to 3x3 neighbourhoods

In the original block diagram, the 9-tap filters sit directly on the serialised pixel stream.
Read literally, that would make a 1x9 filter along a row. But every mask the design applies is
3x3, so each filter needs the pixels of the row above and the row below. `window3x3` provides
them, and it is the least obvious part of the RTL.

* **Storage.** There are two line buffers of `IMG_W` pixels each: `lb1` holds the previous row
  and `lb2` the row before it. Both are indexed by the column of the incoming pixel. There are
  also three 3-pixel column registers. Each step reads `lb2[c]`, `lb1[c]` and the new pixel as
  one new column, shifts the columns, and moves `lb1[c]` into `lb2[c]`.
* **Position.** After the step for input pixel (r, c), the registers hold the neighbourhood
  centred on (r-1, c-1). So the output runs one row and one pixel behind the input.
* **Borders.** Neighbours outside the image are forced to zero from the centre's row and column
  counters. This is zero padding, as MATLAB's `conv2`/`imfilter` do, so the output image is as
  large as the input. This masking also hides the previous frame's data and the wrap-around at
  row ends, so the line buffers need no reset.
* **End of frame.** The last row can only leave if more data comes in behind it. So after the
  last pixel of a frame, the block runs `IMG_W + 1` steps of its own with zeros as input and
  `in_ready` low. A frame therefore takes `IMG_W*IMG_H + IMG_W + 1` steps. Frames are found by
  counting pixels from reset; there is no start-of-frame signal.

The pipeline has three such windows: blur, gradient and sharpening. Each inserts its own flush,
and the valid/ready handshakes between the stages absorb them. With frames sent back to back,
the later flushes overlap the earlier ones: in simulation the source was held only for the first
stage's `IMG_W + 1` flush clocks per frame.

## The edge-gradient merge: `(F0 & F1) + (F2 & F3)`

The original diagram shows four 9-tap filters:

* F0 (`DAFIR v9_02`) and F1 (`DAFIR v9_0`) feed an Expression block printed `a & b`.
* F2 (`v9_01`) and F3 (`v9_03`) feed a second `a & b` block.
* An AddSub printed `a + b`, with one register, adds the two results.
* An ABS block follows.

This design takes those printed operators literally: the Expression blocks compute a bitwise AND
of the two's-complement filter outputs. The description does not say which mask goes into which
filter, so all four filters are programmable and reset to zero.

The AND has a useful property: `x & x = x`. If the same mask goes into both inputs of an
Expression block, that filter's result passes through unchanged. The usual operators can then be
loaded as follows (masks in units of 1/16):

| Operator (source equation) | F0 = F1 | F2 = F3 | Edge output |
|---|---|---|---|
| Roberts (1), 2x2 masks in the upper-left corner | Gx | Gy | \|Gx + Gy\| |
| Prewitt (3), Sobel (4), Scharr (5) | Gx | Gy | \|Gx + Gy\| |
| Laplacian (6); after the blur stage this is a LoG | L | 0 | \|L\| |

The combination is `|Gx + Gy|`. It is not `sqrt(Gx^2 + Gy^2)` or `|Gx| + |Gy|`, because the
hardware has a single ABS after the sum. Loading four different masks gives the AND of their
bit patterns, exactly as the original blocks would. Roberts' Gy is used here as it was printed
(`[0 1; -1 1]`). The textbook form is `[0 1; -1 0]`. Because the coefficients are programmable,
either can be loaded.

## Numbers and formats

* **Pixels:** 8-bit unsigned.
* **Coefficients:** signed 12 bits, 4 fraction bits (Q7.4). This holds the Gaussian's 1/16 and
  the sharpening mask's 1/8 steps exactly, and also Scharr's weight of 10.
* **MAC result:** full precision, `ACC_W = 25` bits, still with 4 fraction bits.
* **Edge magnitude:** 26 bits unsigned, 4 fraction bits.
* **Back to pixels:** the blur and sharpening stages drop the fraction bits (rounding towards
  minus infinity) and clamp to 0..255. The `edge` output tap shows the integer part of the
  magnitude, clamped to 255.
* **Threshold:** `thr` uses the magnitude's format (value x 16). A pixel becomes 255 when the
  magnitude is strictly greater than `thr`.
* **Sharpening mask:** it resets to the mask as it was published,
  `[-1 -1 -1; 1 16 1; -1 -1 -1]/8`. The +1/8 in the middle row is kept as printed.

## Programming and using the top

| Port | Use |
|---|---|
| `in_valid`, `in_ready`, `in_pix` | Input pixels, raster order, one transfer per clock at most |
| `out_valid`, `out_pix` | Output pixels; this stream cannot be stalled |
| `coef_we`, `coef_filter`, `coef_addr`, `coef_data` | Write one coefficient. `coef_filter`: 0 blur, 1..4 gradient F0..F3, 5 sharpening. `coef_addr`: 3*row + col of the mask. A write takes effect on the next clock |
| `thr` | Threshold |
| `tap_sel` | Stage sent to the output and to the statistics: `TAP_BLUR`, `TAP_EDGE`, `TAP_THRESH`, `TAP_SHARPEN` |
| `roi_row`, `roi_col` | Upper-left corner of the 40 x 40 ROI |
| `stats_valid`, `mean`, `variance`, `std_dev` | Statistics of the last frame |

The original work shows the output of every stage separately: blur alone, threshold alone, each
edge operator. The output tap is how this RTL makes those outputs available.

Change `tap_sel` and the masks only when the pipeline is empty. It is empty
`4*(IMG_W+1) + 20` clocks or so after the last output pixel. Otherwise a stage may still hold
pixels of the previous frame, and the output then starts with them. With the full chain selected
and no stalls, pixel (0,0) reaches `out_pix` `3*IMG_W + 20` clocks after it enters. Pixels then
follow one per clock. At 50 MHz, a 256 x 256 frame takes about 1.33 ms.

## ROI statistics

`roi_stats` watches the selected output stream and never stalls it. For the pixels with
`roi_row <= row < roi_row+40` and `roi_col <= col < roi_col+40`, it accumulates the sum S1 and
the sum of squares S2. After the frame's last pixel it computes, with N = 1600:

```
mean     = S1 / N
variance = (N*S2 - S1^2) / (N*(N-1))      (squared deviations over N-1)
std_dev  = sqrt(variance)
```

One sequential divider is used twice, and a sequential square root follows. The results are
ready about 120 clocks after the frame ends. All three carry 8 fraction bits in grey-level units.
To get the 0..1 intensity scale usually quoted for these statistics, divide the mean and the
standard deviation by 255 and the variance by 255^2.

The published formulas mix up the names: the N-1 sum is written as the standard deviation and
its square as the variance. The published numbers, however, have std = sqrt(variance). This
unit follows the numbers.

The ROI must lie inside the image. In the original work, these statistics were computed by
Simulink blocks on the host. Here they are hardware, fed by the same output tap.

## Verification

Every testbench checks itself and ends with a `TB_RESULT checks=N failures=M` line. All of them
run with plain Verilator, for example:

```
verilator --binary --timing --assert -y rtl -y tb --top-module tb_mri_filter_top \
    rtl/mri_pkg.sv tb/mri_ref_pkg.sv tb/tb_mri_filter_top.sv -o sim
./obj_dir/sim
```

The two packages are named explicitly; the modules are found in `rtl/` and `tb/` by file name.

`tb/mri_ref_pkg.sv` is a behavioural reference model. It implements 3x3 correlation with zero
padding, the AND/sum/ABS merge, the threshold and the pixel conversion on plain integer arrays,
with no clocks or line buffers. Each testbench compares its block's output with this model.

| Testbench | What it shows |
|---|---|
| `tb_window3x3` | Every tap of every neighbourhood, with random gaps and back-pressure. At full rate: a frame span of `IMG_W*IMG_H+IMG_W+1` clocks and `IMG_W+1` flush clocks |
| `tb_mac9` | Sums against the model with random coefficients, coefficient reloads, the largest pixels and the most negative coefficient. Three-register latency |
| `tb_conv3x3_stage` | Gaussian (reset mask), sharpening (loaded) and a scaled Laplacian that drives clamping at both ends. First-pixel latency and frame span |
| `tb_edge_gradient` | Zero, Sobel/Prewitt, random and Scharr/Roberts masks. Both signs ahead of the ABS. Latency |
| `tb_threshold_unit` | Magnitudes equal to, just above and just below the threshold |
| `tb_roi_stats` | Random, constant and 0/255 images, and the ROI moved to the corner, against exact integer formulas |
| `tb_mri_filter_top` | Whole design at 256 x 256 on a synthetic slice with a lesion. Five frames covering all four taps, back-to-back frames, input gaps, a mask reload and a threshold change, plus the ROI statistics of each frame. It counts input stalls, flushes, both threshold outcomes, clamping, negative sums and statistics results, and fails if any never occurred. Also checks the full-chain latency |
| `tb_operators` | Roberts, Prewitt, Sobel, Scharr and LoG loaded in turn at 256 x 256, compared with \|Gx+Gy\| computed without any AND. Then the Sobel threshold and sharpened images |
| `tb_table2_roi` | Twelve 40 x 40 regions with the mean and spread of the published normal and abnormal tissue regions, generated here because the MRI slices are not available. They go through the whole design with the blur set to identity. The hardware statistics must equal exact values computed from the generated pixels, and are printed next to the published ones. For the brightest abnormal region, clipping at 255 lowers the measured mean and spread |

All of them pass. Each testbench was also run against a copy of its module with one deliberate
error, and it reported failures. The whole-design runs at 256 x 256 take seconds to about a
minute in Verilator.

## Where this design departs from, or adds to, the original

* **Filter cores:** the original used vendor distributed-arithmetic FIR cores; here they are
  plain parallel multipliers (`mac9`). The results are the same, but the area is not comparable.
* **Neighbourhood formation:** the line buffers, zero padding, end-of-frame flush and
  valid/ready handshakes were not described and are this design's own (see above).
* **Formats:** the bit widths, number formats, rounding and clamping, the threshold rule and the
  0/255 output levels were not given and were chosen here.
* **Output tap:** the tap selector is added so that each stage's output is visible, as in the
  published results.
* **ROI statistics:** done in hardware here, on the host in the original.
* **Gradient magnitude and direction:** the textbook magnitude `sqrt(Gx^2 + Gy^2)` and the edge
  direction `atan(Gx/Gy)` are not computed. The block diagram being followed has a single
  AddSub and ABS in their place, and no direction output.
* **ROI display:** the rectangle drawn around the ROI on the displayed image is a display
  function of the host and is not built.
* **Edge detection alone:** the shorter model with no blur, threshold or sharpening is this design
  with the identity mask (`16` at address 4, zeros elsewhere) in the blur stage and the output
  tap on `TAP_EDGE`.
* **Host side is not included:** image file reading, colour-to-grey conversion, the
  2-D/1-D reshaping and display, the JTAG co-simulation link and the gateway blocks. The top's
  stream ports stand in for them.
* **Resources:** the published figures (163 flip-flops, 130 LUTs on a Spartan-3E) are far below
  what this RTL needs. Its three pairs of 256-pixel line buffers alone hold 12 kbit, and it has
  six 9-multiplier filters. The published numbers cannot have included neighbourhood storage of
  this kind, so no attempt was made to match them.
* **Clock:** whether the RTL closes timing at 50 MHz on that device was not checked.

## Changing the design

* **Image size:** `IMG_W`, `IMG_H` on `mri_filter_top`. The line buffers grow with `IMG_W`.
* **ROI size:** `ROI_W`, `ROI_H`. The statistics widths follow from N.
* **Formats:** pixel and coefficient widths live in `mri_pkg`. `ACC_W` follows from them. The
  reset masks of the blur and sharpening stages are built with `coef(num, log2_den)` in
  `mri_filter_top`.
* **A new operator** needs no RTL change; load its masks through the coefficient port.
