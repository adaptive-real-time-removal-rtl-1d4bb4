# Impulse-noise removal for medical images: a streaming RTL implementation

Salt-and-pepper noise sets random pixels of an 8-bit image to 0 or 255. The
usual fix, a median filter, blurs everything. A switching filter that restores
only pixels equal to 0 or 255 is better, but it fails on medical images. An MR
slice has a truly black background and saturated white structures, so many
pixels that are 0 or 255 are real image content.

This design separates the two cases by looking at the neighbours. A 0 or 255
pixel counts as an impulse only when it is unlike its surroundings: when more
than `T1` of its eight neighbours fall in a different intensity class. Only
those pixels are replaced. The replacement is the median of the pixels in the
3x3 block around it that are *not* impulses. Every step is a handful of
comparators, multiplexers and small adders. The whole filter runs at one pixel
per clock, with no multipliers and no sorting of variable-length lists.

The RTL implements the method of Z. HosseinKhani et al., *Adaptive Real-Time
Removal of Impulse Noise in Medical Images*. The module structure follows that
method's hardware description. Where the description stops (borders,
buffering, control, the threshold value, rounding), the choices are this
implementation's own. They are listed in "Where the design departs from, or
goes beyond, the method" below.

## Dataflow

```
 frame RAM ──(raster read, borders replicated)──► block_partitioner
 (256x256x8)                                       │ 5x5 window
     ▲                                             ▼
     │                                   25 x pixel_labeler    ─┐
     │                                             │ labels      │ stage 1
     │                                   similarity_module      │
     │                                   (9 x similarity_unit) ─┘
     │                                             │ 9 "keep" flags + 3x3 pixels
     │                                   restoration_module    ─┐
     │                                   (2 x mfig, 2 x median9, │ stage 2
     │                                    averaging)             │
     │                                   pixel_placement       ─┘
     └──────────────(write back in place)──────────┘
```

`denoise_top` holds the frame RAM, the controller and the pipeline above.

## Step 1: labels

`pixel_labeler` puts every pixel in one of three classes:

| pixel value | label | meaning |
|---|---|---|
| 0 | 0 | possibly pepper noise |
| 255 | 1 | possibly salt noise |
| 1..254 | 2 | noise-free; never modified |

Two comparators (all bits clear, all bits set) drive the select of a
four-input multiplexer. A third comparator checks the label against 2 and
produces `noise_free`. There are 25 labelers, one for each pixel of the 5x5
window.

## Step 2: which 0/255 pixels are impulses

To restore the centre pixel P5 of a 3x3 block, the design must know which of
the nine pixels P1..P9 are impulses themselves. Each of them is judged in its
own 3x3 block. The nine blocks overlap and together cover the 5x5 window
around P5. `similarity_module` holds nine `similarity_unit`s, one per Pk.

A unit compares the eight neighbour labels with the centre label and adds the
eight equality bits into `similar_count`. It then outputs

    non_noisy = (label == 2) || (8 - similar_count <= T1)

So a 0/255 pixel is an impulse when more than `T1` neighbours differ from it.

With the default `T1 = 4`, the test is a majority vote. A black pixel with five
or more non-black neighbours is pepper noise. A black pixel on the straight
edge of a black region has three differing neighbours, and one on a convex
corner has five. So straight edges are kept and isolated dots are removed.
`T1` is a parameter of `denoise_top`. On the synthetic test image, `T1 = 4`
gives the best or near-best result from 5 % to 15 % noise. `T1 = 3` is better at
25 %:

| noise density | T1=2 | T1=3 | T1=4 | T1=5 | T1=6 |
|---|---|---|---|---|---|
| 5 % | 29.3 | 34.1 | 38.4 | 38.6 | 34.7 |
| 15 % | 28.9 | 31.5 | 31.8 | 27.8 | 21.6 |
| 25 % | 28.0 | 30.3 | 27.9 | 21.4 | 15.7 |

(The table gives the PSNR in dB of the restored 256x256 phantom used by
`tb_denoise_full`.)

## Step 3: a median over a variable number of pixels, at fixed cost

The replacement value is the median of the non-noisy pixels of the 3x3 block,
and their number n varies from 0 to 9. The design avoids a variable-length
sorter with the following trick.

**Padding with extremes.** Each noisy pixel is replaced by 0 or 255, and an
ordinary nine-input median (`median9`) is applied. A 0 sorts to the bottom of
the list and a 255 to the top. If the k = 9 - n substitutes are split evenly
between 0 and 255, the fifth value of the sorted nine is the middle of the n
real pixels. Ties do not matter: a padding 0 and a real 0 have the same value.

**Alternation.** `mfig` (median filter input generator) hands out the
substitutes alternately, scanning P1 to P9. The first noisy pixel gets 0 when
`trigger = 0`, and 255 when `trigger = 1`. In hardware this is a chain that
starts at the trigger and flips after every noisy pixel. Each position then
has a 0/255 multiplexer followed by a pass/substitute multiplexer, controlled by
the unit's `non_noisy` flag.

**Two generators.** When k is even, the split is exact and both triggers give
the same list. When k is odd, one extreme occurs once more than the other. The
fifth sorted value then shifts by one position among the real pixels: it is the
lower middle with trigger 0 and the upper middle with trigger 1. That is why
`restoration_module` runs two MFIG/median pairs, with trigger 0 and with
trigger 1, and averages the two medians:

    restored = (median_lo + median_hi + 1) >> 1

For an odd number of real pixels, the result is their median. For an even
number, it is the mean of the two middle values, rounded half up. If all nine
pixels are impulses, the medians are 0 and 255 and the output is 128.

Example. Take P1..P9 = 255, 120, 0, 118, 0, 121, 119, 255, 0, with P1, P3, P5
and P8 flagged noisy. P9 (a 0 that resembles its own neighbours) is kept. That
gives k = 4, and both generators substitute 0, 255, 0, 255. Both sorted lists
are 0 0 0 118 **119** 120 121 255 255, so the output is 119, the median of the
kept 0, 118, 119, 120, 121.

Now flag P9 noisy as well (k = 5). Trigger 0 substitutes three 0s and two
255s; the sorted list is 0 0 0 118 **119** 120 121 255 255. Trigger 1
substitutes two 0s and three 255s; the sorted list is 0 0 118 119 **120** 121
255 255 255. The average (119 + 120 + 1) >> 1 = 120 is the median of 118..121,
rounded up.

`median9` is the classic 19-cell compare-exchange network for a median of
nine. It is combinational; two copies sit in stage 2.

## Step 4: placement

`pixel_placement` has two multiplexers. A noise-free (label 2) pixel, or a 0/255
pixel that its unit judged non-noisy, is written back unchanged. Only an
impulse gets the restored value.

## Streaming, borders and in-place operation

The image sits in `frame_ram`: 65536 x 8 bits, one synchronous read port and
one write port. The controller reads it in raster order. Rows and columns are
extended by two pixels on each side, so it reads `(IMG_W+4) x (IMG_H+4)`
addresses. The read coordinates are clamped into the image, which replicates
the edge pixels. As a result, border pixels have a full 5x5 neighbourhood, and
the window needs no edge logic.

`block_partitioner` keeps four line buffers of `IMG_W+4` pixels and a 5x5
shift register. It flags a window valid once it is centred on an image pixel,
and supplies that pixel's coordinates.

Each result goes back to the address it came from, so the de-noised image
replaces the noisy one. This is safe for two reasons. A pixel's result is
written only after the read that brings in the last column of its window, and
that is the pixel's last read. The pipeline itself works from the line
buffers, never from the RAM.

## Interface and timing of `denoise_top`

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, active-low synchronous reset |
| `start` | in | 1 | start processing the image in the RAM (when idle) |
| `busy` | out | 1 | frame in progress |
| `done` | out | 1 | one-cycle pulse after the last write |
| `host_we`, `host_re` | in | 1 | host access to the RAM while idle |
| `host_addr` | in | `$clog2(IMG_W*IMG_H)` (16) | `row*IMG_W + column` |
| `host_wdata` | in | 8 | |
| `host_rdata` | out | 8 | valid the cycle after `host_re` |

Throughput is one pixel per clock. A frame takes `(IMG_W+4)*(IMG_H+4) + 6`
cycles from the edge that takes `start` to `done`: 67606 cycles for 256x256,
0.37 ms at the 181 MHz reported for the FPGA version of the method.

The pipeline registers are: RAM read, window, stage 1 (labels and similarity)
and stage 2 (restoration and placement). Assertions check three things:

- the host does not write while busy;
- each frame writes exactly one value per pixel;
- the trigger-0 median never exceeds the trigger-1 median.

| parameter | default | |
|---|---|---|
| `DATA_W` | 8 | pixel width |
| `IMG_W`, `IMG_H` | 256, 256 | image size |
| `T1` | 4 | impulse threshold (differing neighbours) |

A generic synthesis of `denoise_top` gives about 400 flip-flops. The memory is
the 524288-bit frame RAM plus 8320 bits of line buffers. The published FPGA
implementation reports 1280 slice flip-flops and 480 four-input LUTs. Its
pipelining and buffering are not described, so the two counts are not directly
comparable. Read the counts here as this implementation's, not as a
reproduction.

## Where the design departs from, or goes beyond, the method

- **Threshold.** The method leaves `T1` open. The value 4 comes from its remark
  that the similarity test can be a majority circuit; see the table above.
- **Eight bits, not nine.** The description of the similarity unit speaks of
  adding nine bits, and its block diagram of adding eight. Eight are added
  here. The ninth bit (the centre compared with itself) is always 1.
- **Label-2 pixels in the similarity test.** The method judges only 0/255
  pixels. Here a unit whose centre has label 2 reports it non-noisy, so such
  pixels always take part in restoring their neighbours.
- **Order of labelling and windowing.** The method labels pixels and then
  partitions the labels into blocks. Here the pixel window is built first and
  its 25 pixels are labelled, so labels are not stored. The result is the same.
- **Own choices**, not specified by the method:
  - the rounding of the average (half up);
  - the median network;
  - border replication;
  - the line-buffer window;
  - the RAM port structure, the host port and the start/busy/done control;
  - the pipeline cut.

## Files

`rtl/`
- `denoise_pkg.sv`: label type and window constants.
- `pixel_labeler.sv`
- `similarity_unit.sv`, `similarity_module.sv`
- `mfig.sv`
- `median9.sv`
- `restoration_module.sv`
- `pixel_placement.sv`
- `block_partitioner.sv`
- `frame_ram.sv`
- `denoise_top.sv`

`tb/`
- `denoise_ref_pkg.sv`: an independent behavioural model. It sorts the kept
  pixels explicitly and builds its own border-replicated neighbourhoods. It also
  provides a synthetic phantom generator and a PSNR function.
- `tb_<module>.sv` for every module. Each one checks its module against the
  model or an exhaustive or random reference.
- `tb_denoise_top.sv`: runs `denoise_top` at 18x12 on six frames. Together
  these exercise every mechanism: pass-through, kept 0/255 pixels, restoration
  from odd and even counts, all-noisy blocks (`restored = 128`), border
  restoration, host read-back, and a second pass on an image already in
  memory. It also checks the frame time.
- `tb_denoise_full.sv`: runs the default 256x256 design on a synthetic head
  phantom with 5, 10, 15, 20 and 25 % noise. Every output pixel is compared
  with the model, the frame time is checked, and the PSNR is printed. The
  whole run takes a few seconds.

The phantom is not an MR image: it has a black background, a textured bright
ellipse, a saturated white spot and a black hole. Its PSNR figures (38.4 dB at
5 %, 30.3 dB at 20 %) cannot be compared with figures for real MR slices.
Most of the remaining error sits on the boundary between tissue and the black
background. There, a pepper pixel resembles the background and is kept, so
edge preservation and noise removal pull against each other.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends. With plain
Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_denoise_full \
    -y rtl -y tb +libext+.sv rtl/denoise_pkg.sv tb/denoise_ref_pkg.sv \
    tb/tb_denoise_full.sv
./obj_dir/Vtb_denoise_full
```

Replace `tb_denoise_full` with any other testbench name. To lint a module:
`verilator --lint-only -Wall -y rtl rtl/denoise_pkg.sv rtl/denoise_top.sv`.

To change the image size, set `IMG_W`/`IMG_H` on `denoise_top`. The RAM depth,
the address width and the line buffers follow from them. The host address is
always `row*IMG_W + column`.
