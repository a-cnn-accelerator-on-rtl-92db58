# A depthwise-separable CNN accelerator in SystemVerilog

MobileNetV2 spends almost all of its arithmetic in three kinds of layer: a
standard 3x3 convolution of the RGB image, 3x3 *depthwise* convolutions (each
channel filtered on its own), and 1x1 *pointwise* convolutions (every output
channel is a weighted sum of all input channels at the same pixel). This
design runs all three on one array of multipliers. It changes only how the
operands are routed and how the products are summed. The intermediate feature
maps stay on chip, in one large buffer. Weights stream in from outside through
a ping-pong buffer while the previous weight set is in use.

The RTL follows the architecture of Bai, Zhao and Huang, *A CNN Accelerator on
FPGA Using Depthwise Separable Convolution*. That
architecture has four matrix multiplication engines (MMEs) of 32 slices each,
a 36 Kb ping-pong weight buffer, a 24.5 Mb feature map buffer and 16-bit
arithmetic. The paper describes the datapath but gives no control scheme,
number format, memory layout or interfaces. Those parts are this design's own
and are marked as such below and in each file's header comment.

## The engine (`mme`)

An engine takes one pixel per cycle, 32 channels wide. It then runs a fixed
pipeline:

```
line buffer -> 32 x 9 multipliers -> adder tree (+bias / +partial sum)
            -> normalization (x*scale+shift) -> ReLU / ReLU6 / none -> pooling
```

The latency from an accepted pixel to its output is 7 cycles. After the
window fills, the engine produces one output pixel per cycle.

**Line buffer.** Each of the 32 slices is a shift register of `2*M+3` cells
for a map of width `M`: two full rows plus three cells. The nine cells the 3x3
kernel needs are read out as a window. One physical length (`MAXW` = 224)
serves every width. A multiplexer in front of rows 2 and 3 chooses which tap
of the previous row feeds them, one choice per supported width. The default
widths are 224, 112, 56, 28, 14 and 7.

The border is zero-padded by one pixel: a window cell that falls outside the
map is forced to zero. Because the window lags the input by `M+1` pixels, a 3x3
pass pushes `M*M+M+1` pixels; the last `M+1` are flush pixels. With stride 2,
only windows centred on even rows and columns are reported.

In pointwise mode the line buffer is bypassed in effect. Each pushed pixel is
reported at once and copied to all nine window positions.

**Adder tree.** The 288 products of an engine are summed in one of three ways:

| mode | outputs per engine | each output sums | weight use |
|---|---|---|---|
| depthwise | 32 | the 9 products of one slice | slice s, tap k |
| pointwise | 9 | product k of all 32 slices | cell k of every slice is one output channel |
| standard | 10 | 27 products: 3 slices x 9 taps | slices 3j..3j+2 hold R, G, B of kernel j |

The tree is built from 8-input adder trees (`adder_tree8`). Pointwise uses
four of them per output (32 products). Depthwise uses one per slice plus the
ninth product. The tree adds the bias. On a later pointwise pass it adds a
partial sum instead (see below). It then rounds and saturates to 16 bits.

**Normalization, ReLU, pooling.** Batch normalization with frozen statistics
reduces to `y = x*scale + shift` per channel. The ReLU stage offers none,
ReLU, or ReLU6.

Pooling works on runs of `S` consecutive output pixels:
- Average pooling accumulates `x * (1/S)`.
- Max pooling keeps the running maximum.

With `S = M*M` this is the global 7x7 average pool at the end of MobileNetV2.
Two-dimensional pooling windows smaller than the map are not supported, since
consecutive pixels in raster order are not a square.

## Four engines and the 128-channel word (`mme_array`)

The feature map buffer holds 128 channels per word: 4 engines x 32 slices. A
map with more channels is stored as consecutive *groups* of 128 channels. The
array routes each word differently per mode:

- **Depthwise:** engine m takes channels 32m..32m+31 of the word and returns
  the same 32 channels. One pass handles a whole 128-channel group.
- **Pointwise:** all four engines see the same 32-channel slice of the word
  (`in_chunk` picks which). Each produces 9 output channels, so a pass yields
  36 output channels, written at `lane_base`. The write mask covers only
  those lanes.
- **Standard:** the 3 image channels go to every slice (slice s gets channel
  s mod 3). Each engine produces 10 kernels, up to 40 per pass. MobileNetV2
  needs 32.

`out_limit` masks lanes past the end of the layer's channels.

## Layer scheduling (`control_fsm`)

A layer is issued as a `layer_t` descriptor, together with a destination
group stride (`dst_stride`, in words). The descriptor holds:
- mode, width `M`, and stride-2;
- input and output channel counts;
- source and destination base addresses;
- the normalization, ReLU and pooling settings.

The FSM splits the layer into passes. Each pass consumes exactly one weight
set and streams the whole map once, one pixel per cycle:

| mode | passes |
|---|---|
| standard | 1 (pixels from the image stream) |
| depthwise | ceil(C/128), one per channel group |
| pointwise | for each block of <=36 output channels, ceil(Cin/32) passes |

A pointwise layer with more than 32 inputs is done by divide and conquer:
- The first pass over a 32-channel input slice adds the bias and writes its
  result.
- Each later pass reads that result back through the buffer's second read
  port, adds it in place of the bias, and overwrites it.
- Normalization, ReLU and pooling are enabled only on the last pass of a
  block, so intermediate sums are not clipped by the ReLU.
- Output blocks never straddle a 128-lane group. A group of 128 channels
  takes blocks of 36, 36, 36 and 20.

The states are IDLE, WAIT_W, RUN, DRAIN and NEXT:
- **WAIT_W** waits until the load bank of the weight buffer is full, then
  swaps banks and clears the engines.
- **RUN** reads one pixel per cycle. In standard mode it advances only when
  the image stream has a pixel.
- **DRAIN** waits 12 cycles for the pipeline to empty.

Source groups are `M*M` words apart. Destination group g starts at
`dst_base + g*dst_stride`. This lets a stride-2 layer pack its output densely.

For one weight set per pass, the weight update rate in depthwise and pointwise
layers is once every `M*M` cycles, the figure the paper gives. Loading the next
set, 48 beats, overlaps the current pass whenever `M*M > 48`.

## Weight and parameter stream (`weight_buffer`)

One stream (`wt_valid/wt_ready/wt_data`) carries everything, in beats of 32
16-bit words. Each weight set is:

1. 36 beats of weights. Word `288*m + 9*s + k` is engine m, slice s,
   tap/cell k.
2. 12 beats of per-output parameters: `bias[0..127]`, `scale[0..127]`,
   `shift[0..127]`, indexed by `32*m + output`.

Sets must arrive in pass order. Two `weight_buffer` instances hold them:
1152 words for the weights and 384 for the parameters. Each has two banks,
which are swapped together. `wt_ready` drops while the load bank is full, so
the stream waits for the engines.

## Feature map buffer (`feature_map_buffer`)

The buffer is 12544 words x 128 lanes x 16 bits = 24.5 Mb, equal to one
112x112 map of 128 channels. It has:
- one write port with a per-lane mask;
- two read ports with one cycle of latency. Port A feeds the engines; port B
  returns pointwise partial sums.

It is written as one memory array per lane, so the write mask needs no
read-modify-write. A host port reaches the buffer while the accelerator is
idle, to preload maps or read results.

## Number format

All maps, weights and parameters are signed 16-bit Q7.8: 8 fractional bits,
range about +/-128. The paper fixes the 16-bit width but not the binary
point. Arithmetic is handled as follows:
- Products are 32 bits with 16 fractional bits.
- Sums are kept at 40 bits. The bias or partial sum is shifted up by 8 to
  align with them.
- After the tree, and again after normalization, values are shifted right by
  8 (rounding toward minus infinity) and saturated to 16 bits.
- `1/S` for average pooling is an unsigned Q1.15 value supplied in the
  descriptor.

## Top level (`cnn_accel`)

`cnn_accel` wires together:
- the engine array;
- the two ping-pong buffers;
- the feature map buffer;
- the FSM.

A layer runs from a one-cycle `start` (while `busy` is low) to a one-cycle
`done`. The first layer reads `img_data` (3 channels per beat, raster order)
straight into the engines, with a valid/ready handshake.

Event counters report four things:
- cycles spent waiting for weights;
- image-stream stalls;
- passes run;
- pointwise passes that used a partial sum.

The rest of the paper's system is outside the RTL: the DMA engine and its
controller, the DDR4 memory and its interface, the soft processor and the
flash. Their traffic is what drives the `wt_*`, `img_*` and `host_*` ports.

## Departures and limits

- **Residual add.** The stride-1 bottleneck of MobileNetV2 adds its input to
  its output. The paper draws that add but gives it no hardware, and there is
  none here. It has to be done outside, or added as another pass type.
- **Adder tree colours.** In the paper's adder tree figure, the colours for
  depthwise and pointwise seem swapped relative to its text. The text (and
  the arithmetic) says pointwise sums 32 products per output and depthwise 9.
  That is what is built.
- **Pooling** covers only runs of consecutive pixels, as described above.
- **Capacity.** The 112x112 layers of MobileNetV2 do not fit with this
  layout. One 112x112 map of up to 128 channels already fills the whole
  buffer, and those layers need their input and output held at the same
  time. Every layer from 56x56 down fits. A layout in which outputs could
  start at any lane of a group, sharing words with the input, would lift
  this.
- **Standard convolution** is limited to 3 input channels and 40 kernels per
  layer.
- **Clock rate.** The paper reports 133 MHz on an Arria 10, limited by the
  adder tree. Nothing here has been timed. The two-stage tree is the
  obvious place to add registers.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the
block against a model written independently in the testbench (`tb_ref_pkg`
holds the shared post-processing model), and each has a watchdog.

`tb_cnn_accel` runs the top at its default size (224-wide line buffers, the
full 24.5 Mb buffer). It runs six small layers back to back:
1. a standard stride-2 layer from a stalling image stream;
2. depthwise with ReLU6;
3. a 40->150 pointwise layer (two channel groups, partial sums);
4. a stride-2 depthwise layer over two groups;
5. pointwise with global average pooling;
6. depthwise with max pooling.

Every output pixel is checked against a reference convolution computed in the
testbench. Weight and image streams are fed with random gaps. The test fails
if any mechanism never occurred: weight waits, image stalls, partial sums,
stride 2, each pooling mode, multi-group layers, each ReLU type, standard
mode, or stream beats left unconsumed.

To simulate with verilator 5:

```
verilator --binary -j 4 -Wno-fatal -y rtl -y tb \
    rtl/accel_pkg.sv tb/tb_ref_pkg.sv tb/tb_cnn_accel.sv --top-module tb_cnn_accel
./obj_dir/Vtb_cnn_accel
```

Put any other testbench name in place of `tb_cnn_accel`. Each testbench ends
with the line `TB_RESULT checks=N failures=M`. The full-size top is slow to
compile: several minutes, because of the 224-wide line buffers and the
12544 x 128 buffer. The block testbenches take seconds.
