# A convolution engine for WES-coupled layer-wise quantization

Layer-wise 8-bit quantization gives every layer a single scale and a single
zero point. It fails badly on networks whose output channels have very
different weight ranges: MobileNet v1 drops from about 70 % top-1 accuracy to
chance level, because the channels with narrow ranges end up with just a few
quantization levels. Channel-wise quantization fixes that, but it needs a full
scale compound (32-bit mantissa and 6-bit exponent) and a zero point for every
channel.

The weight equalizing shift scaler (WES) method, by Oh, Lee, Park, Walagaurav
and Kwon, takes a cheaper route. Before quantization, the weights and bias of
output channel *z* are multiplied by a power of two, 2^S_z, with S_z in
0..15. This stretches every channel towards the widest one. The layer is then
quantized with one scale and one zero point as usual. At inference the
integer result of channel *z* has to be divided by 2^S_z again. In fixed-point
arithmetic that is only one more right shift, and it folds into the shift the
layer already applies for its scale compound. So the only per-channel cost is
a 4-bit number stored beside the bias.

This repository holds RTL for the inference side of that method: a
fixed-point convolution engine whose output stage includes the channel-wise
inverse shift. The compile-time part of the method is not hardware. It folds
batch norm, chooses S_z by searching for the best "total range", then clips
and quantizes the weights. It runs offline in floating point and appears here
only as the numbers it produces: S_z, the quantized bias q_B, M, s and the
zero points.

## What one layer computes

For output pixel (x, y) and output channel z, with uint8 inputs q_in, uint8
weights q_w and per-layer zero points z_in, z_w, z_out:

```
acc   = sum over taps (j,i) inside the input, and input channels k, of
        (q_in[iy][ix][k] - z_in) * (q_w[j][i][k][z] - z_w)        (32-bit)
a     = acc + q_B[z]
t     = s > 0 ? sat32(a << s) : a >> -s          layer exponent, 6-bit signed
u     = t >> S_z                                 WES inverse shift, 4 bits
r     = round(u * M / 2^32)                      M = mantissa in [0.5, 1) as 32-bit fraction
r     = relu ? max(r, 0) : r
out   = clamp(r + z_out, 0, 255)
```

`M * 2^s` approximates the real scale compound `s_in * s_w / s_out` of the
layer. Layer-wise quantization would use the same formula with S_z = 0. The
only difference WES makes in hardware is the `>> S_z` and the 4-bit table
behind it. All right shifts are arithmetic, so they round towards minus
infinity.

The operation order (layer shift, then the S_z shift, then the mantissa)
follows the operator the WES paper gives. Three details are this design's
own choices, because the paper does not specify them:

* A left shift that overflows int32 saturates.
* The mantissa product rounds half up.
* The bias is added to the finished sum, not used as the accumulator's
  starting value. The result is the same.

ReLU6 needs no separate clamp. The output range of a ReLU6 layer is
calibrated to [0, 6], so the uint8 saturation at 255 is the upper cut-off.

Layouts are those of the paper's operator: input `[y][x][c]`, output
`[y][x][c]` and weights `[j][i][k][z]` (kernel row, kernel column, input
channel, output channel). In depthwise mode each channel has its own filter:
the weights are `[j][i][z]` and output channel z reads input channel z. The
depthwise layout is this design's choice. A fully connected layer runs as a
1x1 convolution on a 1x1xN input.

## Blocks

| module | role |
|---|---|
| `wes_pkg` | widths and the layer configuration struct `wes_cfg_t` |
| `wes_conv_ctrl` | loop nest, padding test, address generation |
| `wes_sram` | input, weight and output buffers (1 write + 1 read port, registered read) |
| `wes_chparam_mem` | per-channel table: 32-bit q_B and 4-bit S_z |
| `wes_zp_mac` | zero-point subtraction, 9x9-bit signed multiply, 32-bit accumulate |
| `wes_requant` | the output formula above, 3-stage pipeline |
| `wes_sparse_decoder` | loads pruned weights from mask + packed format |
| `wes_conv_top` | wires the above into one engine |

### Pipeline and timing

```
cycle  0            1                    2                 3..5
       ctrl issues  buffers read         acc += product    requant stages
       a beat       (ifm, weights;       or, on a finish   -> output buffer
                    chparam on finish)   beat, sum emitted    write
```

The controller issues one beat per cycle and walks the loops in this order:
y, then x, then output channel z; inside that, kernel row j, kernel column i,
then input channel k. Three kinds of beat exist:

* A MAC beat for every in-bounds (j, i, k). In depthwise mode there is one
  per in-bounds tap.
* An idle cycle for every tap that falls into the zero padding. Nothing is
  accumulated for it, as in the paper's operator.
* One finish beat per output. It reads q_B[z] and S_z, closes the
  accumulator and sends the sum with its output address into the
  requantizer.

The cost of one layer is therefore

```
cycles = sum over outputs of ( in-bounds taps * (depthwise ? 1 : c_in)
                               + padded taps + 1 )
done_o = 5 cycles after the controller's last finish beat
```

Measured from the edge that samples `start_i` to the first cycle in which
`done_o` is high, this is `cycles + 6`. The testbenches check that count. The
engine has one multiplier. The paper gives no throughput or parallelism, so
the single MAC lane and the loop order are choices of this design. Nothing
in the datapath stalls. The requantizer accepts one result per cycle, even
though a finish beat can arrive every cycle (for example with 1x1 kernels
and c_in = 1).

### Loading pruned weights

Pruned weights are stored as:

* one mask bit per weight (1 = kept),
* the kept weights packed back to back,
* one integer, taken here as the number of kept weights.

`wes_sparse_decoder` takes the masks and the values on two ready/valid
streams. Each mask beat carries 8 bits, least significant bit first. The
decoder writes the dense weights to addresses 0, 1, 2, … of the weight
buffer. A pruned weight is written as z_w, the zero point, not as 0. The
reason is that a real 0.0 quantizes exactly to the zero point, and the MAC
subtracts z_w. Decoding costs one cycle per weight plus one cycle per mask
byte. `sp_err_o` reports that the number of values consumed differs from the
header integer. While the decoder runs, it owns the weight buffer's write
port.

The split into two streams, the bit order and the handshake are this
design's choices. The paper describes only what the compressed format
contains.

### Host interface

`wes_conv_top` has no bus or DMA. The paper describes none, so the host
writes the three memories through plain write ports and reads the output
buffer with one cycle of latency. `cfg_i` is sampled on `start_i`, and
`busy_o` stays high until `done_o`. An assertion flags weight-buffer writes
while a layer runs. Between layers the host moves data through these ports:
for example, it copies the output of one layer back into the input buffer
for the next.

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| data, zero points | 8 bit | paper (uint8) |
| accumulator, bias | 32 bit | paper |
| M / s / S_z | 32 / 6 / 4 bit | paper |
| `IN_DEPTH`, `OUT_DEPTH` | 2 MiB each | this design |
| `W_DEPTH` | 4 MiB | this design |
| `N_CH` | 2048 channels | this design |
| dimensions | 16 bit; kernel, stride, padding 4 bit | this design |

The buffer sizes are chosen so that every convolution layer of MobileNet
v1/v2, ResNet50, Inception v3 and ResNet56 fits in one pass. The largest
cases are Inception v3 at 147x147x64 = 1.38 MB of activations and ResNet50 at
3x3x512x512 = 2.36 MB of weights. Some layers are larger than the buffers and
would have to be tiled by the host:

* EfficientNet B3 at 300x300: an expanded activation of 150x150x144 = 3.24 MB.
* FSRCNN on whole Set14 images.

The buffers are plain arrays with a registered read, so a synthesis flow can
map them onto SRAM macros.

## Where this departs from or goes beyond the paper

* The paper gives the arithmetic and the loop nest of the operator. It does
  not give an architecture. The single MAC lane, the pipeline, the buffers
  and their sizes, the host ports and the completion timing are all this
  design's choices.
* The printed operator writes `out_32` on its scaling line and indexes the
  input with `iz`. Here these are read as the accumulator and the input
  channel k.
* Saturating the left shift and rounding the mantissa product are
  additions; the paper is silent on both.
* Depthwise mode is described in the paper only by name. Its weight layout
  is this design's choice.
* Only the convolution operator is built. Pooling, residual additions,
  squeeze-excitation, swish, PReLU and deconvolution are outside this
  engine.
* Choosing S_z, clipping weights and calibrating activations happen offline
  and are not hardware.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/wes_pkg.sv tb/wes_ref_pkg.sv tb/tb_wes_conv_top.sv --top-module tb_wes_conv_top
./obj_dir/Vtb_wes_conv_top
```

| testbench | what it checks |
|---|---|
| `tb_wes_requant` | corner cases and 4000 random values against a 64-bit model; latency 3 |
| `tb_wes_zp_mac` | random accumulation runs, 32-bit wrap-around, tag and emit timing |
| `tb_wes_conv_ctrl` | beat-by-beat addresses for 7 layer shapes; cycle formula |
| `tb_wes_sparse_decoder` | dense output, z_w fill, stalling streams, 9 cycles per 8 weights, error flag |
| `tb_wes_sram`, `tb_wes_chparam_mem` | read-back with one cycle latency |
| `tb_wes_conv_top` | five layers end to end at the default sizes (see below) |
| `tb_wes_workload` | two network layers at full size, WES against plain layer-wise (see below) |

`tb_wes_conv_top` runs the engine at its default sizes through five layers:

* 3x3 convolution with padding
* strided convolution with a left-shifting exponent
* depthwise convolution loaded in pruned format
* fully connected layer
* larger 3x3 convolution with ReLU

It compares every output byte with a reference computed in the testbench.
`tb/wes_ref_pkg.sv` holds the reference arithmetic, written in 64-bit
integers. The testbench also counts how often each mechanism fired: padded
taps, depthwise, stride 2, both exponent directions, nonzero S_z, ReLU
clipping, saturation at both ends, pruned and dense loads. It fails if any
count is zero.

### Workload layers

`tb_wes_workload` runs two layers at their real sizes and checks every output
byte:

* the first depthwise layer of MobileNet v1: 112x112x32, 3x3, padding 1,
  ReLU6, 4.0 M cycles;
* a first-stage 3x3 convolution of ResNet56 on CIFAR-10: 32x32x16 -> 16,
  2.3 M cycles.

The float weights are synthetic. Their per-channel ranges spread over a
factor of 64, which is the situation WES is meant for. The testbench
quantizes each layer in two ways:

* The WES way: S_z = floor(log2(r_max / r_z)), where r_z is twice the
  largest weight magnitude of channel z. Weights and bias are then scaled by
  2^S_z, followed by one layer-wise uint8 quantization.
* Plain layer-wise quantization, with every S_z = 0.

The same engine runs both versions, and the testbench requires WES to have
the smaller error against the float layer. On the depthwise layer this
typically halves the mean squared error. On the normal convolution the
rounding of the output dominates and the gain is small. These numbers
exercise the mechanism. They are not a substitute for the paper's
ImageNet-accuracy results, which depend on the real trained weights.
