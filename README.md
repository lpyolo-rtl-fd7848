# LPYOLO: a layer-pipelined, low-precision YOLO face detector in RTL

This is SystemVerilog for the programmable-logic part of LPYOLO, a face
detector for small FPGA SoCs such as the Zynq-7020. LPYOLO is TinyYOLOv3 cut
down to fit. The upsample and concatenation branch is removed, every
convolution has one fifth of the original kernels, and the network is
trained with quantization in the loop. Weights are 4-bit signed and
activations 4-bit unsigned, with 8-bit weights in the first and last layer.

Two decisions shape the hardware:

* **Every parameter stays on chip.** About 350 k weights (about 1.5 Mbit)
  fit in block RAM, so nothing is fetched from DRAM during a frame.
* **Every layer has its own hardware.** The ten convolutions and six
  poolings are chained as a stream pipeline. All layers work on the same
  frame at once, each a few rows behind the one before it. How fast a layer
  runs is set by its *folding*: how many input lanes (SIMD) and output
  lanes (PE) it multiplies per clock.

A 416x416x3 UINT8 image goes in and a 13x13x18 UINT8 grid comes out. Each grid
cell holds, for each of 3 anchor boxes, the box centre x and y, width,
height, a class score and a confidence. Decoding the boxes, non-maximum
suppression and everything else around the network run in software on the
SoC's processor. They are not part of this RTL.

## The network

| stage | layer | input (HxWxC) | output | kernel | weights / activations |
|---|---|---|---|---|---|
| conv0 | 3x3 conv + ReLU | 416x416x3 | 416x416x8 | 3x3 | 8-bit / UINT8 in, 4-bit out |
| pool0 | max pool, stride 2 | 416x416x8 | 208x208x8 | 2x2 | |
| conv1 | 3x3 conv + ReLU | 208x208x8 | 208x208x8 | 3x3 | 4 / 4 |
| pool1 | max pool, stride 2 | | 104x104x8 | 2x2 | |
| conv2 | 3x3 conv + ReLU | 104x104x8 | 104x104x16 | 3x3 | 4 / 4 |
| pool2 | max pool, stride 2 | | 52x52x16 | 2x2 | |
| conv3 | 3x3 conv + ReLU | 52x52x16 | 52x52x32 | 3x3 | 4 / 4 |
| pool3 | max pool, stride 2 | | 26x26x32 | 2x2 | |
| conv4 | 3x3 conv + ReLU | 26x26x32 | 26x26x56 | 3x3 | 4 / 4 |
| pool4 | max pool, stride 2 | | 13x13x56 | 2x2 | |
| conv5 | 3x3 conv + ReLU | 13x13x56 | 13x13x104 | 3x3 | 4 / 4 |
| pool5 | max pool, **stride 1** | 13x13x104 | 13x13x104 | 2x2 | |
| conv6 | 3x3 conv + ReLU | 13x13x104 | 13x13x208 | 3x3 | 4 / 4 |
| conv7 | 1x1 conv + ReLU | 13x13x208 | 13x13x56 | 1x1 | 4 / 4 |
| conv8 | 3x3 conv + ReLU | 13x13x56 | 13x13x104 | 3x3 | 4 / 4 |
| conv9 | 3x3 conv + HardTanh | 13x13x104 | 13x13x18 | 3x3 | 8-bit / 4 in, UINT8 out |

All convolutions have stride 1 and zero padding that keeps the size ("same"
padding). The shapes and kernel sizes are in `rtl/lpyolo_pkg.sv` (`L_CIN`,
`L_COUT`, `L_KSZ`). The image size is a parameter of the top (`IN_H`,
`IN_W`, default 416) and must be a multiple of 32.

## Precision

The network was trained and evaluated in six precisions, written mWnA for
m-bit weights and n-bit activations: 2W4A, 3W5A, 4W2A, 4W4A, 6W4A and 8W3A.
4W4A is the one chosen for deployment and is the default here.

The top selects the precision with `W_BITS` (weights of conv1..conv8) and
`A_BITS` (every activation between layers). conv0 and conv9 always have
8-bit weights, the image is always UINT8, and the result is always UINT8
(`layer_wbits`, `layer_ibits`, `layer_obits` in the package). Changing
`A_BITS` changes the number of thresholds per channel (2^A_BITS - 1).
Some models also fit the default 4W4A build unchanged:

* 2-bit weights are valid 4-bit weights.
* A 2-bit activation is a 4-bit one whose upper twelve thresholds can never
  be reached.

The last layer ends in a HardTanh where TinyYOLOv3 has a sigmoid. Since
sigma(x) = (1 + tanh(x/2)) / 2, replacing tanh by its clipped-linear form
gives clamp(x/4 + 1/2, 0, 1). That is a multiply, an add and a clamp, with
no lookup table.

## Streams and data order

Every connection, external or between layers, is a valid/ready stream that
carries **one element per beat**. A beat moves on a clock where `valid` and
`ready` are both high. Once raised, `valid` and the data stay put until the
beat is taken. Assertions in the modules check this.

Feature maps are sent in HWC order: row by row, pixel by pixel, and all
channels of a pixel in channel order. The image therefore arrives as R, G, B
of pixel (0,0), then of pixel (0,1), and so on. Results leave the same way,
18 channels per cell. `m_axis_tlast` marks the last element of each
13x13x18 frame. Frames may follow each other with no gap.

One element per beat is enough because no layer produces elements faster
than the pipeline's slowest stage consumes pixels (see *Rate* below). It
also makes every stage boundary the same 8-bit stream, whatever the bit
width. Narrower elements sit in the low bits.

## Inside a convolution layer

`conv_layer` is a `sliding_window` feeding an `mvau` (matrix-vector-activation
unit).

### Folding

A 3x3 convolution from CIN to COUT channels is, per output pixel, a product
of a COUT x (9*CIN) weight matrix with the 9*CIN-element window. The mvau
computes PE output channels at a time, SIMD window elements per clock:

* SF = 9*CIN / SIMD clocks build one group of PE outputs.
* NF = COUT / PE groups make one pixel.
* A pixel takes SF*NF clocks.

The sliding window replays each window NF times, once per group. So the
mvau needs no window buffer, and its weight address just counts
0 .. SF*NF-1.

| layer | SIMD | PE | clocks / pixel | clocks / 416x416 frame |
|---|---|---|---|---|
| conv0 | 3 | 8 | 9 | 1,557,504 |
| conv1 | 8 | 2 | 36 | 1,557,504 |
| conv2 | 8 | 1 | 144 | 1,557,504 |
| conv3 | 8 | 1 | 576 | 1,557,504 |
| conv4 | 8 | 1 | 2,016 | 1,362,816 |
| conv5 | 8 | 1 | 6,552 | 1,107,288 |
| conv6 | 8 | 4 | 6,084 | 1,028,196 |
| conv7 | 8 | 1 | 1,456 | 246,064 |
| conv8 | 8 | 1 | 6,552 | 1,107,288 |
| conv9 | 8 | 1 | 2,106 | 355,914 |

That makes 128 multipliers in total. The folding is this design's choice
(`L_SIMD`, `L_PE`). The only aim was to keep every layer near or below the
first one. conv0 cannot go faster with this structure, because SIMD must
divide CIN = 3. SIMD must divide CIN and PE must divide COUT. The mvau takes
one beat per clock as long as SF >= PE.

### Sliding window

The window generator writes the incoming elements, packed into words of SIMD
channels, into a buffer of four image rows (two for 1x1 kernels). Output
row y needs input rows y-1 .. y+1. The fourth row slot lets row y+2 be
written while row y is read, so in steady state the reader never waits. The
reader steps through output pixel, fold, ky, kx and channel word. Positions
outside the image read as zero, which for unsigned activations is a real
zero. Between frames the reader finishes before the writer starts again.
This costs a bubble of a few rows per layer per frame.

### Weights and their layout

Weights are held in an array of SF*NF words of PE*SIMD weights. Weight
(oc, k) belongs to output channel oc and window element k = (ky*K + kx)*CIN + c.
It is stored at:

    word = (oc / PE) * SF + k / SIMD
    lane = (oc % PE) * SIMD + k % SIMD

### Activations

The 4-bit ReLU layers use **thresholds**. The output is the number of the
channel's 15 thresholds that the accumulator reaches (acc >= t_i). Any
monotonic quantizer whose scale, bias and batch-norm are folded in can be
written this way. For a trained model with output scale s, bias b and
rounding, t_i is the smallest integer accumulator that maps to level i or
above. Thresholds need not be sorted: the hardware counts, not searches.

The last layer uses the **affine clamp**:

    out = clamp((acc * mul[c] + bias[c]) >>> 16, 0, 255)

with a 16-bit signed `mul` and a 32-bit signed `bias` per channel. The x/4
and +1/2 of the rescaled HardTanh, and the layer's own quantization scale,
are folded into them.

Accumulators are 24-bit signed in all layers. That is enough for the worst
case, conv0's 27 x 255 x 128.

## Pooling

`maxpool` buffers four input rows and, for each output element, reads the
four elements of its 2x2 window in one clock. It emits at most one element
per clock. Stride 2 halves the map.

The sixth pooling layer keeps 13x13. As in TinyYOLOv3, it uses stride 1
with window (y..y+1, x..x+1). Positions past the right or bottom edge are
left out, which for unsigned values is the same as reading zero. The
published layer table lists this layer with stride 2 but gives the same
input and output size. This design follows the sizes.

## Loading parameters

Before the first frame, the processor writes every parameter through the
`cfg` port (a `cfg_wr_t` struct), one per clock:

| field | weights (`kind = CFG_WEIGHT`) | ReLU layers (`kind = CFG_ACT`) | conv9 (`kind = CFG_ACT`) |
|---|---|---|---|
| `layer` | conv index 0..9 | conv index | 9 |
| `addr` | word (formula above) | output channel | output channel |
| `lane` | lane (formula above) | threshold index 0..14 | 0 = mul, 1 = bias |
| `data` | weight, sign-extended | threshold, signed | value, signed |

Loading the whole network takes about 360 k clocks. Parameters must not
change while a frame is in flight. The memories are plain arrays, and the
synthesis tool chooses BRAM or LUT RAM. A flow that fixes weights at build
time can replace the write port with an initialised ROM.

## Rate and latency

At 100 MHz the slowest stages (conv0 to conv3) need 1.56 M clocks per frame.
That is 15.6 ms, or about 64 frames per second for the accelerator alone.
A single frame streamed in with no gaps takes 2.44 M clocks (24.4 ms) from
its first input element to its last output element. The extra is the
pipeline filling and the rows each later layer still has to compute once
the input has ended. The paper measured 52.3 ms for the CNN step of the
4-bit model, and 18 frames per second for the whole system including
software. Those numbers include the DMA, the driver and the processor side,
which this RTL does not model. The full-size testbench streams two frames
back to back. It requires the first frame within 5.23 M clocks, and the
second frame's last output within 5.56 M clocks (1/18 s) of the first's.
The measured interval is 1.56 M clocks, the rate of the slowest stages.

## What is the paper's and what is not

Taken from the paper:

* the layer list and shapes;
* the bit widths of the 4-bit-weight / 4-bit-activation model, with 8-bit
  weights in the first and last layers;
* the UINT8 input and output;
* keeping all parameters on chip;
* folding by PE and SIMD;
* a per-layer hardware pipeline;
* HardTanh in place of the sigmoid.

This design's own choices:

* the folding values;
* the stream format (one element per beat, HWC order);
* the row-buffer window generator and its window replay;
* thresholds as the form of the 4-bit ReLU;
* the fixed-point form of the HardTanh;
* the parameter bus;
* `tlast`;
* synchronous active-low reset of the control state (memories are not
  reset);
* 24-bit accumulators.

All six precisions were simulated, at a 64x64 input. Only the default 4W4A
was simulated at full size.

Not included:

* the DMA engine that feeds and drains the streams;
* the processor software: resizing, conversion to float, box decoding, NMS
  and streaming video over the network.

No trained weights are included. The testbenches use random weights and
derive the thresholds from the accumulator ranges of their own image. This
tests the arithmetic exactly, but says nothing about detection accuracy.

## Verification

Each testbench checks its unit against a model written independently with
plain loops. Each prints `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb/sliding_window_tb.sv` | 3x3 windows with padding, SIMD 2, two folds, three frames. Random gaps and back-pressure. In the stall-free frame, one window beat per clock. |
| `tb/mvau_tb.sv` (with `mvau_chk`) | Threshold and HardTanh instances, random weights and parameters, clipping at both ends. With no back-pressure, one beat per clock. |
| `tb/maxpool_tb.sv` (with `maxpool_chk`) | Stride 2 and stride 1 with the edge rule, three frames each. |
| `tb/conv_layer_tb.sv` | A complete 3x3 layer. Output span equals H*W*SF*NF clocks. |
| `tb/lpyolo_top_tb.sv` | The whole network at 64x64 input, two frames back to back. Random gaps and back-pressure. Checks every output and `tlast`. Counts that every mechanism happened: input gaps, back-pressure at both ends, ReLU saturation at 0 and 15, HardTanh clipping at 0 and 255, stride-1 pooling changing a value, frame rollover. |
| `tb/lpyolo_workloads_tb.sv` (with `lpyolo_prec_chk`) | All six precisions, each as its own pipeline at 64x64 input, one frame each. |
| `tb/lpyolo_full_tb.sv` | Two 416x416 frames, back to back, with every parameter at its default. Checks all 6,084 outputs, a first-frame latency within 5.23 M clocks and a frame interval within 5.56 M clocks. About 25 s of simulation. |

`tb/lpyolo_ref_pkg.sv` is the bit-exact network model that the two network
tests share.

To run one, for example the full-size test:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        --top-module lpyolo_full_tb rtl/lpyolo_pkg.sv tb/lpyolo_ref_pkg.sv tb/lpyolo_full_tb.sv
    ./obj_dir/Vlpyolo_full_tb

The other testbenches build the same way. Pass `rtl/lpyolo_pkg.sv` first
wherever the package is used.

## Files

* `rtl/lpyolo_pkg.sv`: network table, folding, widths, parameter-bus types.
* `rtl/lpyolo_top.sv`: the layer pipeline.
* `rtl/conv_layer.sv`: one convolution layer.
* `rtl/sliding_window.sv`: the window generator.
* `rtl/mvau.sv`: multiply-accumulate, weight memory and activation.
* `rtl/maxpool.sv`: 2x2 max pooling.
* `tb/`: the testbenches listed above.
