# An int8 YOLOv3-Tiny accelerator and its face-detection system

This is synthesizable SystemVerilog for the programmable-logic accelerator of an
embedded face detector. The detector runs YOLOv3-Tiny on a Zynq-7035. The
processor schedules the network layer by layer. The accelerator does the arithmetic
of each layer: a 3x3 convolution with the batch-normalisation already folded into
weights and bias, requantisation to int8, LeakyReLU and max pooling. A separate
upsampling unit is included. Around the accelerator sit three smaller video
blocks: camera capture, scaling to the network input, and drawing the
detection boxes on the displayed picture. `detect_system` is the top level
that holds all of them.

Three ideas make the accelerator small:

* **Everything is int8.** Weights and activations are signed 8-bit integers.
  The floating-point rescale between layers becomes a 16-bit multiply and a shift.
* **One DSP slice does two multiplications.** Two weights are packed into the
  pre-adder of a DSP48E1 and share one activation. This gives 576
  multiply-accumulates per clock from 288 multipliers.
* **The activation is a 256-entry table.** An int8 input has only 256 possible
  values, so LeakyReLU, together with its dequantisation and requantisation, is
  one table read.

## What one pass computes

A *pass* computes **8 output channels** of one convolution layer over the whole
feature map. The host repeats passes for the other output channels. For a pass,
the host streams the input map in this order:

```
for each row y of the padded map          (H+2 rows)
  for each column x                       (W+2 columns)
    for each batch b of 8 input channels  (nb = ceil(C_in/8) batches)
      one 64-bit beat: byte c = channel 8b+c of pixel (y, x)
```

The map arrives already zero-padded by one pixel on each side. The accelerator
therefore computes a "valid" 3x3 convolution of the padded map, which equals a
same-padded convolution of the original. Because all batches of a pixel arrive
back to back, the partial sum over input channels stays in a register. No
partial-sum memory is needed. Each result pixel leaves as one 64-bit beat,
with output channel f in byte f.

For each output pixel and output channel f:

```
acc  = bias[f] + sum over c < 8nb, 3x3 taps k of  x[c][k] * w[f][c][k]     (32-bit)
q    = sat_int8( (acc * M1 + 2^(n+14)) >>> (n+15)  + Z3 )
a    = act_en ? table[q] : q
out  = pooled(a)       (2x2 max, stride 2 or 1, or none)
```

`M1`, `n` and `Z3` come from the quantisation scales: S1*S2/S3 = M1 * 2^-(n+15).
`bias` is the BN-folded bias, already divided by S1*S2. Input and weight zero
points are taken as 0 (symmetric quantisation). The sign-extending packing of
the DSP needs signed operands, so this choice follows from it.

**1x1 layers** use the same datapath. The host loads kernels whose only
non-zero tap is the centre one. This is correct but costs nine times the ideal
number of multiplies. **Upsampling** (13x13 to 26x26) has its own stream pair.
**Route/concat layers** are done by the host, which places the maps next to
each other in memory.

## The system around the accelerator

`detect_system` holds the logic part of the detector. It has three clock
domains, and no signal crosses between them inside the module:

```
 camera pins --> ov5640_data --cap_*--> (full-size frame, towards display buffering)
   (cam_pclk)         |
                      +--> img_resize --net_*--> (416x416 frame, towards the network input buffer)

 AXI4-Lite + AXI4-Stream (clk) <--> yolo_net

 box registers (AXI4-Lite) --> yolo_box
 video in (vid_clk) ---------> yolo_box --hdmi_*--> (towards the HDMI transmitter)
```

* `ov5640_data` pairs the camera's bytes into RGB565 pixels, high byte first,
  framed by VSYNC and HREF. It widens them to RGB888 and marks the first
  pixel of a frame and the last pixel of each line.
* `img_resize` scales the frame down to 416x416, 640x480 by default. One
  accumulator per axis decides which pixels to keep (nearest neighbour).
* `yolo_box` keeps 16 rectangles that the processor writes as pixel
  coordinates. It paints a 2-pixel red outline of each enabled rectangle into
  the video, one clock late.

The frame buffers, DMA engines, video timing, stream/video converters and the
HDMI encoder are vendor blocks, so they are not here. Their connections are
the ports of `detect_system`.

## Block structure of the accelerator

```
              AXI4-Lite                AXI4-Stream in (64 bit)
                 |                             |
             main_ctrl --- mode, config --> stream_rx
                 |                 weights /  bias |  table \  features
                 |          weight_buffer  bias_buffer  |   feature_buffer
                 |               (8x8 RAMs)      |      |       (3x3 windows)
                 |                     \         |      |        /
                 |                      +---- conv_top --------+
                 |                            (4 x conv_8x2 x 8 x conv_1x2 x 9 DSP)
                 |                               |
                 |                          quant_int8 -> leaky_relu -> max_pool
                 |                                                        |
                 +<------------ done ---- stream_tx <---- tx_buffer <-----+
                                             |
                                   AXI4-Stream out (64 bit)

   upsample: separate AXI4-Stream in/out pair
```

| module | role | latency |
|---|---|---|
| `yolo_pkg` | shared constants, `layer_cfg_t`, load modes, pool modes | – |
| `main_ctrl` | AXI4-Lite registers, start pulse, busy/done, busy-cycle counter | 1 clk |
| `stream_rx` | routes input beats by load mode; flow control in feature mode | 0 |
| `weight_buffer` | 8 x 8 RAMs of 256 x 72 bit kernel words | 1 clk read |
| `bias_buffer` | 8 lanes x 128 groups of 32-bit biases | 1 clk read |
| `feature_buffer` | line buffer, one 8-channel 3x3 window per clock | 2 clk |
| `conv_top` | 576 MAC/clk, batch accumulation, bias | 4 clk |
| `conv_8x2`, `conv_1x2`, `dsp_dual_mult` | the DSP array | 3 / 2 / 0 clk |
| `quant_int8` | multiply, round, shift, zero point, saturate | 1 clk |
| `leaky_relu` | 256-entry table, 8 parallel reads | 1 clk |
| `max_pool` | 2x2 max, stride 2 / stride 1 / bypass | 1 clk |
| `tx_buffer` | 512 x 64 first-word-fall-through FIFO | 0 (read) |
| `stream_tx` | AXI4-Stream master, TLAST, done | 0 |
| `upsample` | 2x nearest-neighbour, 13-pixel row buffer | row by row |
| `yolo_net` | accelerator top level | 9 clk, last input beat to FIFO |
| `ov5640_data` | camera byte bus to RGB888 pixels | 2 clk |
| `img_resize` | nearest-neighbour downscale to 416x416 | 1 clk |
| `yolo_box` | red box outlines over video, 16 boxes | 1 clk |
| `detect_system` | system top level | – |

## The DSP array

`dsp_dual_mult` models one DSP48E1 configured as P = (A + D) x B:

```
A (25 bit) = sign(w0) , w0[7:0] , 16 zeros        field widths 9 | 16
D (25 bit) = 17 x sign(w1) , w1[7:0]              field widths 17 | 8
B (18 bit) = 10 x sign(x) , x[7:0]                field widths 10 | 8
P (43 bit) = (w0*2^16 + w1) * x                   field widths 11 | 16 | 16
  w1*x = P[15:0]                  (fits: |w1*x| <= 16384)
  w0*x = P[31:16] + P[15]         (P[15] undoes the borrow of a negative w1*x)
```

`conv_1x2` holds nine of these, one per kernel position (00 to 22). They
multiply one channel's 3x3 window by the same taps of two filters. `conv_8x2`
holds eight `conv_1x2`, one per input channel of a batch. `conv_top` holds four
`conv_8x2` for the filter pairs (0,1), (2,3), (4,5) and (6,7). That makes 288
multipliers doing 576 products per clock. The published resource count for the
whole accelerator is 304 DSPs. The code writes the multiply generically; the
synthesis tool maps it to DSP slices.

## Loading parameters

The host first sets the load mode and start with one write to `CTRL`
(`mode << 4 | 1`). It then streams the data:

* **Kernels** (`mode 1`). Write the first address to `WBASE` before the start.
  Byte f of every beat belongs to filter f. Nine consecutive beats carry taps
  0 to 8 (row-major) of one input channel, and that 72-bit word goes to RAM c
  of every filter group. Channels 0 to 7 follow; the address then advances to
  the next batch. One address therefore holds a whole batch: 8 filters x 8
  channels x 9 taps. The address wraps at 256, so new kernels overwrite the
  oldest. In a pass, batch b is read from `WBASE + b`. With 256 addresses, all
  kernels of the 64-to-128-channel layer fit at once (128 addresses). Deeper
  layers reload the kernels for each pass.
* **Biases** (`mode 2`). Two 32-bit biases per beat, low word first, in
  output-channel order from channel 0. `BGROUP` selects the eight used in a
  pass.
* **Activation table** (`mode 3`). 32 beats, 8 entries each. Entry i is the
  output for the input byte i (two's complement). The table holds whatever
  the host computes: quantise(LeakyReLU(dequantise(q))) for the network's slope
  and scales.
* **Features** (`mode 4`). Set the pass registers, write `CTRL` with mode 4
  and start, then stream the padded map. `STATUS.busy` stays set until the
  beat counted by `OUT_BEATS` has left on the output stream (with TLAST);
  `STATUS.done` is then set.

The upsampler runs on its own stream pair. Set `UP_W` and `UP_H`, pulse start
(any mode), then stream the rows.

### Register map (byte addresses, 32-bit)

| addr | name | bits |
|---|---|---|
| 0x00 | CTRL | [0] start (pulse), [6:4] load mode: 0 idle, 1 kernels, 2 biases, 3 table, 4 features |
| 0x04 | STATUS | [0] busy, [1] done (read only) |
| 0x08 | WIDTH | padded row width W+2 |
| 0x0C | HEIGHT | padded rows H+2 (stored, not used by the datapath) |
| 0x10 | NBATCH | input-channel batches nb (1..256) |
| 0x14 | WBASE | kernel RAM address of batch 0 |
| 0x18 | BGROUP | bias group (output channels 8g..8g+7) |
| 0x1C | M1 | 16-bit multiplier |
| 0x20 | SHIFT | n (shift by n+15) |
| 0x24 | Z3 | output zero point, signed 8-bit |
| 0x28 | ACT_EN | [0] use the activation table |
| 0x2C | POOL | 0 none, 1 2x2 stride 2, 2 2x2 stride 1 |
| 0x30 | OUT_BEATS | result beats in the pass (for TLAST and done) |
| 0x34 | UP_W | upsample input width |
| 0x38 | UP_H | upsample input height |
| 0x3C | CYCLES | clocks spent busy in the last feature pass (read only) |

The output sizes are: no pooling H x W; stride 2 (H/2) x (W/2); stride 1
(H-1) x (W-1). The reference network keeps 13x13 after its stride-1 pool by
padding one pixel to the right and bottom. To get that here, give the layer
one extra, replicated row and column. The hardware does not do it.

## Flow control and timing

In the three load modes, every beat is taken at once. In feature mode the input
never stalls for internal reasons: one beat is taken per clock. If the output
stream is held off, results collect in `tx_buffer`. `stream_rx` lowers TREADY
whenever the FIFO has no more than 16 free places. 16 is more than the results
that beats already in the pipeline can still produce, so the FIFO cannot
overflow. An assertion in `tx_buffer` checks this. A whole pass therefore takes
(H+2)(W+2)nb clocks plus about ten clocks of pipeline, as long as the output
side keeps up.

For the standard YOLOv3-Tiny at 416x416, the 13 convolution layers need
sum(passes x (H+2)^2 x nb) = 8.1 million clocks. At 200 MHz that is 40.5 ms
of pure streaming for 5.56 GOP. Time spent in DMA transfers and in the host is
not included. The published end-to-end latency of the complete system is
0.211 s.

Each pass also loads its kernels first, 72 beats per batch, plus 48 beats of
biases and table. Counting those loads, the estimate becomes 9.7 million clocks,
or 48.6 ms.

## Sizes and limits

| parameter (module) | default | limit it sets |
|---|---|---|
| `WDEPTH` (weight_buffer) | 256 | nb <= 256 per pass; 256 batches of kernels cached |
| `LINE_DEPTH` (feature_buffer) | 2048 | nb x (W+2) <= 2048; YOLOv3-Tiny needs at most 1920 |
| `MAX_NB` (feature_buffer) | 256 | input channels <= 2048 |
| `BDEPTH` (bias_buffer) | 128 | output channels <= 1024 |
| `POOL_MAX_W` (max_pool) | 416 | conv output width <= 416 |
| `TX_DEPTH` (tx_buffer) | 512 | none; more depth absorbs longer output stalls |
| `UP_MAX_W` (upsample) | 13 | upsample input width <= 13 |

Width and height registers are 12 bits wide. The network input of 416x416 and
all its layers fit. Inputs larger than 416 pixels across do not, because the
first layer's pooling row buffer is 416 wide.

## What is from the published design and what is not

Taken from the design as published:

* the module set and how the modules connect;
* the 8-filter x 8-channel batch with the bias added in the last batch;
* the 8 x 8 array of 256 x 72-bit kernel RAMs, loaded one byte per filter from
  a 64-bit stream, nine beats per kernel;
* the DSP packing and its field widths;
* the multiply-and-shift requantisation with a 2^15-scaled multiplier;
* the 256-entry activation table.

This design's own choices, where the publication is silent:

* the order in which the host streams data (pixel-major, batches innermost) and
  the host-side padding;
* the line-buffer organisation of `feature_buffer`;
* the register map and load modes;
* the 32-bit bias and accumulator;
* round-half-up and saturation in requantisation;
* zero input and weight zero points;
* the FIFO and credit flow control;
* the pooling and upsampling circuits;
* the pipeline depths.

The publication gives two figures for the kernel cache that disagree: 64 RAMs
of 256 x 72 bits, and 16,384 parameters in total. The RAM geometry was followed;
it holds 147,456 int8 weights.

For the video blocks, the publication gives only their names and what they do.
The pixel format, the scaling method, the box register layout, the line width
and the box count are this design's choices. The red colour is from the
published results.

Not included:

* the vendor blocks of the complete system: frame buffering (VDMA), DMA
  engines, AXI interconnect, video timing, video/stream converters and HDMI
  encoding;
* the camera's configuration over its serial bus, which the processor runs;
* the processor software that runs the layers and turns the network output
  into boxes.

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb/axil_master.svh` holds AXI4-Lite tasks shared by several of them.
`tb/yolo_host.svh` holds the host model of the accelerator, which both
top-level tests use. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/yolo_pkg.sv tb/tb_yolo_net.sv --top-module tb_yolo_net -Mdir obj -o sim
./obj/sim
```

Replace `yolo_net` with any module name to run its own test. `tb_yolo_net`
runs the top level at its default sizes, in about 20 s. It drives the
registers and streams as a host would and compares every result with a
reference computed in the testbench. It runs four passes:

* two input-channel batches with stride-2 pooling;
* three batches with stride-1 pooling, with the kernel address wrapping past 255;
* no pooling and no activation;
* a 24x24 1x1 layer whose output is held off for 1500 clocks, so that the input
  stalls.

It then runs an upsample. It checks the one-beat-per-clock input rate, TLAST,
and the done status, and it fails if any of these mechanisms never happened.

`tb_detect_system` runs the system top at its default sizes, in about 20 s.
All three clock domains run at the same time:

* one 640x480 camera frame, checking every full-size and every scaled pixel;
* two 13x13 accelerator passes;
* a 96x64 video frame with two boxes, checking every pixel.

`tb_yolo_workload` runs real layer shapes of YOLOv3-Tiny through the
accelerator at its default sizes, in about 30 s. It runs one full pass, one
group of 8 filters, for each of these layers:

* the 416x416 first layer (3 channels, stride-2 pooling);
* the same layer at half scale, 208x208;
* the 26x26 layer with 384 input channels;
* the 13x13 layers with 256 (stride-1 pooling) and 512 input channels;
* the 1x1 layers with 1024 and 512 input channels;
* the 13x13 upsample.

Each pass prints its clock count. The streaming part takes exactly
(H+2) x (W+2) x nb clocks; the rest of the count is the kernel load.

The unit tests compare against independent models:

* exhaustive corner operands and random operands for the packed multiply;
* dot products for the convolution units;
* windows cut from a stored frame for the line buffer;
* a 64-bit reference for requantisation;
* a queue for the FIFO;
* a reference maximum for the pooling modes;
* register read-back for the control block.
