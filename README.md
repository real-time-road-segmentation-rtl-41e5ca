# A reusable convolution array for LiDAR road segmentation

This RTL implements the neural-network part of a road-segmentation system for LiDAR.
The CNN is fully convolutional and finds the drivable road in one LiDAR scan.
The scan arrives already projected onto a spherical grid: 64 rows (one per laser) by
256 columns (0.4 degree azimuth bins). Each cell carries 16 features: x, y, z, polar angle,
azimuth, range and intensity of the lowest and the highest point in the cell, plus the cell's
row and column index. The network turns this 16 x 64 x 256 map into two 64 x 256 score maps
(road / not road). Projecting the points and drawing the road contour afterwards happen in
software and are not part of this RTL.

The network is a plain stack of 11 convolution layers with 5x5 kernels, stride 1 and zero
padding 2. There is no pooling, so every map keeps the 64 x 256 size:

| layer | input maps | output maps | activation |
|-------|-----------:|------------:|------------|
| 1     | 16         | 64          | ReLU       |
| 2..10 | 64         | 64          | ReLU       |
| 11    | 64         | 2 (scores)  | none       |

Because every layer has the same shape, one hardware array computes all of them in turn.
The whole network, weights included, stays in on-chip RAM.

## The array

```
 input stream ─┐                      ┌──────────── weight_mem x64 ──────────┐
 (16 ch/pixel) │                      │ (2 filters x 25 taps per loop)       │
               v                      v                                      │
        pad_write_ctrl ──> zero_pad_ram x64 ──> conv2d_unit x64 ──> psum x64 x 2
               ^             (260 x 68 each)     line buffer +         │
               │                 ^               2x25 multipliers +    v
               │            pad_scanner          2 adder trees    adder_tree (64-in) x2
               │           (column by column)                          │
               │                                                       v
         feature_mem x64 <──────────────────────────────────── requant_relu x2
        (256 x 64 x 16 bit)                                            │
                                                                       └──> score stream
```

One 64 x 64 x 5 x 5 layer is split into 64 independent 2D convolutions, one per input
channel. Each `conv2d_unit` convolves its channel with **two** filters at once, so it has
2 x 25 multipliers. Adding the 64 units' results in two 64-input adder trees gives one pixel
of each of two output maps per clock. A full scan of the padded image therefore makes two
complete output maps. This scan is called a *loop*:

* a 64-map layer takes 32 loops;
* the 2-map score layer takes 1 loop;
* one frame takes 10 x 32 + 1 = 321 loops.

Between loops only the weights change. Each unit's `weight_mem` delivers the 2 x 25 weights
of the next (layer, loop) entry in a single read.

### Zero padding in RAM (`zero_pad_ram`)

The 5x5 window needs two rows and two columns of zeros around the image. Instead of
generating them on the fly, each channel's input is kept in a RAM laid out as the padded
image: 260 slots, one per padded column, of 68 words each. The RAM is swept with zeros once
after reset. After that, writes only go to the interior: pixel (row, col) is stored at
`(col+2)*68 + row+2`. The border stays zero forever, so any image written into the RAM is
padded already, however its pixels arrive.

### Scan and line buffer (`pad_scanner`, `line_buffer`)

The scanner reads all 64 padding RAMs in lock step, one address per clock, padded column
after padded column (17,680 addresses). The pixel stream is therefore column-major. A
*line* of the line buffer is one padded column of 68 pixels.

The line buffer holds four such lines plus five registers, 4 x 68 + 5 = 277 pixels. Window
element `win[d][e]` is the pixel seen `d*68 + e` pixels ago: d columns to the left and
e rows up from the newest pixel. The buffer is built as a 5x5 register window joined by four
63-word circular delay lines. This gives the same taps as a 277-stage shift register.

A window is complete when the newest pixel's padded row and padded column are both at
least 4. The scanner flags those pixels (`win_ok`). There are exactly 64 x 256 of them, and
they come out in column-major order of the output image.

**Kernel orientation.** Weight tap `t = ky*5 + kx` multiplies input pixel
`(r + ky - 2, c + kx - 2)` for output `(r, c)`. This is a cross-correlation, as in common
training frameworks. In the window it meets `win[4-kx][4-ky]`.

### Layer sequencing (`loop_fsm`, `layer_fsm`)

`layer_fsm` walks through the 11 layers. For each layer, `loop_fsm` runs these steps:

1. **Fill.** `pad_write_ctrl` fills the 64 padding RAMs:
   * in layer 1 from the input stream (row by row, 16 channels per beat; the unused
     channels 16..63 get zeros);
   * in later layers by copying all 64 feature memories in parallel, 16,385 cycles.
2. **Weights.** Read the loop's weights, 1 cycle.
3. **Scan.** Scan the padded image. The results are written to maps 2k and 2k+1 of
   `feature_mem` at address `col*64 + row`.

The next layer's outputs can go into the same `feature_mem` because its input was copied
into the padding RAMs first. The same 64 memories therefore serve every layer. After layer
11 the FSM signals `frame_done` and waits for the next input map.

### Number format (`requant_relu`)

Pixels and weights are signed 16-bit Q8.8. A 5x5 product sum is 37 bits wide, and the
64-channel sum is 43 bits. No precision is lost before the final rescale. That rescale does
three things:

* an arithmetic shift right by 8;
* saturation to 16 bits;
* ReLU, except in the score layer.

No bias is added.

## Timing

At the default size one loop takes **17,697 cycles**: 17,680 scan cycles plus 17 cycles of
pipeline drain and control. The pipeline stages are scanner, RAM read, window, product,
5 adder levels, 6 adder levels and requantisation.

A frame takes **5,861,262 cycles**, measured from the first input beat to `frame_done`.
At 350 MHz this is 16.75 ms, comfortably inside the 100 ms of a 10 Hz LiDAR. It consists of:

* 16,384 input beats;
* 10 copies of 16,385 cycles;
* 321 loops.

The engine accepts the next frame as soon as `frame_done` has pulsed. Input loading and
computation do not overlap.

## Interfaces of `road_seg_top`

| signal | direction | meaning |
|--------|-----------|---------|
| `ready` | out | the padding RAMs' zero sweep is finished (17,680 cycles after reset) |
| `in_valid`, `in_ready`, `in_data[16]` | in/out/in | input map, one pixel (16 features) per beat, row by row, left to right; `in_ready` is high only while layer 1 is being filled |
| `w_we`, `w_ch`, `w_entry`, `w_idx`, `w_data` | in | write one weight: unit `w_ch` (input channel), `w_entry = layer*32 + loop`, `w_idx = f*25 + ky*5 + kx`; output map = `2*loop + f` |
| `out_valid`, `out_row`, `out_col`, `out_pair`, `out_score[2]` | out | score-layer results, one pixel of maps `2*out_pair` and `2*out_pair+1` per valid cycle, in column-major order |
| `busy`, `layer`, `frame_done` | out | status |

Weights should be written before a frame starts. The weight store keeps one entry for every
(layer, loop). Only loop 0 of layer 11 is used.

## Where this design departs from, or adds to, the published description

* **Loops per frame.** The published text counts 11 x 32 = 352 2D-convolution loops. It
  also says the last layer has a depth of 2. This design runs a single loop for the score
  layer, 321 loops in all. Its frame time of 16.75 ms at 350 MHz is close to the reported
  16.9 ms; with 352 loops it would be about 18.3 ms.
* **Layer count.** One sentence of the source speaks of twelve cascaded blocks. Everywhere
  else the network has 11 convolution layers, and 11 are built.
* **Own choices.** These are this design's, not the source's:
  * the Q8.8 format, 16-bit weights, the truncating shift and saturation;
  * no bias, and no ReLU on the score layer;
  * the on-chip weight store and its write port;
  * the valid/ready input and the score stream;
  * the column-major feature-memory layout;
  * the reset-time zero sweep;
  * all pipeline depths.
* **Input order.** Row-major input order is inferred from the published figure of the
  padding RAM: horizontally adjacent pixels go to neighbouring column slots.
* **Not included.** Dropout is used only in training and is not in the hardware. The
  pre-processing (point projection) and post-processing (road contour and fill) are
  software.
* **Multiplier count.** The array has 64 x 2 x 25 = 3,200 multipliers. The published
  implementation reports 4,480 DSP slices; how the other DSPs are used is not described.
* **Not checked.** Timing closure at 350 MHz and FPGA resource use cannot be checked from
  RTL simulation.

## Files

`rtl/` holds one module or package per file. `rs_pkg` has the network constants. The other
files are, from the bottom up:

* `adder_tree`, `line_buffer`;
* `conv2d_unit`, `requant_relu`;
* `zero_pad_ram`, `pad_scanner`, `feature_mem`, `weight_mem`;
* `pad_write_ctrl`, `loop_fsm`, `layer_fsm`;
* `road_seg_top`.

Every module's parameters default to the full network. `IMG_W`, `IMG_H`, `NCH`, `IN_CH`,
`OUT_CH` and `NLAYERS` can be reduced together for quick experiments.

`tb/` has a self-checking testbench `tb_<module>` for each module. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. `cnn_ref_pkg` is an
independent reference model of the whole network. Two testbenches compare against it:

* `tb_road_seg_top` runs two back-to-back frames of a 3-layer, 4-channel, 8x6 network. It
  uses input stalls, saturating weights and ReLU clamping. It finishes in well under a
  second.
* `tb_road_seg_full` runs one full-size frame (all defaults) and checks all 32,768 scores
  and the cycle counts above. It takes about 10 minutes.

To simulate with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
          --top-module tb_road_seg_top rtl/rs_pkg.sv tb/tb_road_seg_top.sv
./obj_dir/Vtb_road_seg_top
```

The testbenches use only two-state values and `$urandom`, and they initialise everything
they read.
