# FFCNN in SystemVerilog: a streaming CNN inference accelerator

Most of the work in CNN inference is in the convolution and fully connected
layers. This design runs them on a short chain of hardware kernels. Each layer
is reduced to one long dot product per output value. The results go straight
on through pooling and local response normalization (LRN). Only the finished
layer is written back to off-chip memory. All arithmetic is IEEE-754 single
precision (32-bit float).

The architecture follows "FFCNN: Fast FPGA based Acceleration for Convolution
neural network inference" (Keddous, Nguyen, Nakib). That paper describes an
OpenCL design for Intel Arria 10 and Stratix 10 FPGAs. It gives the chain of
kernels, the flattened dot product and the number format. It gives no widths,
interfaces or buffer sizes. This RTL supplies all of those, and the sections
below say which parts are its own.

## The chain of kernels

```
            +--------------------- layer configuration ---------------------+
            | (descriptor table + sequencer: starts every kernel per layer) |
            +-------------------------------+-------------------------------+
                                            | layer_cfg, layer_start
  global    +--------+  beats  +-------------+  pixels  +---------+  pixels  +-----+  pixels  +---------+  global
  memory -->| DataIN |-------->| Convolution |--[chan]->| pooling |--[chan]->| LRN |--[chan]->| DataOut |--> memory
  (read)    +--------+         +-------------+          +---------+          +-----+          +---------+  (write)
```

| Module | Role |
|---|---|
| `ffcnn_layer_config` | Table of up to 64 layer descriptors written by the host. It runs layers 0..n-1 on one `start`. |
| `ffcnn_data_in` | Loads the weights and biases of 16 output features into an on-chip buffer. Then it streams the input windows. |
| `ffcnn_conv` | 16 x 16 floating-point multipliers, 16 adder trees and 16 accumulators, plus bias and optional ReLU. |
| `ffcnn_pool` | Streaming max pooling (2x2 or 3x3, any stride) with two line buffers. It can be bypassed. |
| `ffcnn_lrn` | Cross-channel local response normalization. It can be bypassed. |
| `ffcnn_data_out` | Writes results back in the layout that DataIN reads. It signals the end of the layer. |
| `ffcnn_channel` | The valid/ready FIFO that joins two kernels. |
| `ffcnn_top` | Wires all of the above together. |
| `ffcnn_pkg` | The layer descriptor type and the float arithmetic (`fp_mul`, `fp_add`, `fp_max`, `fp_relu`). |

Every stream uses a valid/ready handshake: a word moves on a clock edge when
both are high. A full downstream kernel therefore stalls everything upstream,
back to the memory read requests. Kernels never drop data.

## How a layer becomes a dot product

A convolution output is

    out(f, y, x) = bias(f) + sum over c, ky, kx of W(f, c, ky, kx) * in(c, y*s+ky-p, x*s+kx-p)

This is one dot product of length C*K*K between a weight vector and the
flattened input window. The hardware therefore needs only two loops: over
output pixels, and over the window in steps of VEC = 16 values. It does not
need the five nested loops of the direct form.

Three design choices make each step of VEC values a single memory read:

* **Feature maps are stored pixel-major with channels innermost.** Each pixel
  takes `in_cv` vectors of 16 floats. Channel counts are padded to a multiple
  of 16 with zeros.
* **The window is flattened in the order (ky, kx, channel vector).** The
  channels are innermost. One step of the dot product is therefore the 16
  consecutive channels of one input pixel.
* **The weights of output feature f** are `K*K*in_cv_n` consecutive vectors
  at `base_w + f*K*K*in_cv_n`, in the same (ky, kx, cv) order. The biases
  are consecutive floats at `base_b`.

All addresses count 16-float vectors (64 bytes).

Output features are handled in **groups of LANE = 16**. For each group,
DataIN does three things:

1. It reads the 16 biases and the 16 x KKCV weight vectors into its weight
   buffer. KKCV = K*K*in_cv_n.
2. It walks the output pixels in raster order. For each pixel it issues KKCV
   reads of input vectors.
3. It sends each input vector to the convolution kernel as one **beat**. The
   beat also holds the 16 weight vectors of the same window position, the 16
   biases and a last-beat flag.

The weights of a group are read from memory once and reused for every pixel.
A pixel takes KKCV beats. The convolution kernel finishes all 16 features of
that pixel at once and sends them on as one 16-float word. Pooling, LRN and
DataOut then work on that word.

Zero padding: a window position outside the input map is still read from
memory, from the first input vector of the layer, and its data is replaced
with zeros. This keeps every response in request order with one tag FIFO. The
cost is some wasted bandwidth at the borders.

Channel groups, as in AlexNet's split layers, and placing a layer's output
into part of a wider map both use the `in_cv_off`/`in_cv_n` and
`out_cv_off`/`out_cv` fields. A grouped layer is written as two descriptors.

A fully connected layer is a convolution whose window covers the whole
input. For example, AlexNet's first FC layer is K = 6 over a 6x6x256 map,
which gives KKCV = 576. FC layers with a 1x1 input use K = 1.

## The layer descriptor

`ffcnn_pkg::layer_cfg_t`, one per layer, written by the host:

| Field | Meaning |
|---|---|
| `in_h`, `in_w` | input map size |
| `in_cv`, `in_cv_off`, `in_cv_n` | vectors per input pixel in memory; first vector and number of vectors used by this layer |
| `k`, `stride`, `pad` | square window (up to 15), stride (up to 7), zero padding (up to 7) |
| `conv_h`, `conv_w` | convolution output size, `(in + 2*pad - k)/stride + 1` |
| `groups` | number of 16-feature groups (output features / 16) |
| `relu_en` | apply ReLU to the convolution output |
| `pool_en`, `pool_size`, `pool_stride`, `pool_h`, `pool_w` | max pooling (size 2 or 3) and its output size `(conv - size)/stride + 1` |
| `lrn_en`, `lrn_n`, `lrn_k`, `lrn_alpha_n`, `lrn_beta` | LRN window (odd, up to 7), k and alpha/n as floats, beta as unsigned fixed point with 14 fraction bits |
| `out_cv`, `out_cv_off` | vectors per output pixel in memory; first vector of this layer's output |
| `base_in`, `base_w`, `base_b`, `base_out` | vector addresses |

The host computes the derived sizes. The hardware does not check them.
Assertions in the RTL flag a window too large for the weight buffer and a
row too wide for the pooling line buffer.

## Kernel details

### DataIN (`ffcnn_data_in`)

The kernel uses separate request and response sides. Each request pushes a
tag into a FIFO. The tag holds the kind of request (bias, weight or data), a
padding flag, the last-beat flag and the window index. Memory answers in
order, so the tag at the head of the FIFO always describes the current
response:

* a weight response is written into the weight buffer;
* a bias response goes into the bias register;
* a data response is combined with the weight-buffer row it indexes and goes
  into the output channel.

A request is only issued while the pending requests plus the filled entries
of the output channel are below `MAX_OUTSTANDING`. This guarantees room for
every response, so the memory side never has to be stalled. To sustain one
beat per cycle, `MAX_OUTSTANDING` must exceed the memory read latency by about
3. The default is 8.

The weight buffer is `LANE x WBUF_DEPTH` vectors: 16 x 576 x 512 bits,
4.7 Mbit. The buffer is not double-buffered. Streaming stops while the next
group's weights load.

### Convolution (`ffcnn_conv`)

The kernel has three pipeline stages:

1. 256 multipliers.
2. 16 adder trees of 16 inputs each. The tree has 4 levels, all in one cycle.
3. 16 accumulators. On the last beat of a pixel, the stage also adds the
   bias and applies ReLU.

The kernel accepts one beat per cycle. A pixel leaves 3 cycles after its last
beat enters. The accumulator carries from one cycle to the next through a
single-cycle floating-point adder. A real FPGA implementation at a few hundred
MHz would need an interleaved or multi-cycle accumulator here. This RTL keeps
the simple form.

### Pooling (`ffcnn_pool`)

For each incoming pixel, the kernel forms the column maximum from the pixel
and the same column in the two previous rows (two line buffers of
`W_MAX = 128` pixels). It then forms the window maximum from that value and
the column maxima of the two previous pixels. The window result is sent when
the window's top-left corner lies on the stride grid. Windows never extend
past the map, so pooling with padding is not supported.

### LRN (`ffcnn_lrn`)

    b_c = a_c * (k + alpha/n * sum over |j - c| <= (n-1)/2 of a_j^2) ^ (-beta)

One word carries only the 16 channels of one group, so **the window does not
cross group boundaries**. For example, channel 15 of a group sums channels
13..15 only. This is a deliberate departure from AlexNet's LRN. It lets the
kernel work on the stream as it arrives.

The power is computed as `2^(-beta * log2 x)`:

* `log2` of the mantissa uses a 33-entry table
  `LOG2TAB[i] = round(log2(1 + i/32) * 2^24)`;
* `2^f` of the fraction uses `EXP2TAB[i] = round(2^(i/32) * 2^24)`;
* both interpolate linearly between entries.

The relative error of the factor stays below about 1e-4. The testbench
allows 5e-4.

### DataOut (`ffcnn_data_out`)

A 16-float word is written as LANE/VEC = 1 vector to

    base_out + (py*W + px)*out_cv + out_cv_off + g*LANE/VEC

`layer_done` pulses after the last write of the layer. The layer sequencer
then loads the next descriptor. The next `layer_start` is high in the second
cycle after `layer_done`.

## Floating point

`fp_mul` and `fp_add` round to nearest even. `fp_add` uses three guard bits
and a sticky bit. Subnormal inputs and results are flushed to zero. Overflow
gives infinity. NaN is not generated or propagated: an infinite operand
passes through. These limits do not matter for trained CNN weights and
activations, but results are not bit-exact to IEEE on subnormals.

Summation order: adder tree within a beat, then beat by beat in the
accumulator, then the bias. Results differ from a sequential float sum in the
last bits. The testbenches compare against double-precision sums with a
tolerance of 1e-5 of the sum of the magnitudes of the terms.

## Interfaces of `ffcnn_top`

| Port group | Protocol |
|---|---|
| `cfg_we`, `cfg_addr[5:0]`, `cfg_wdata` | write one descriptor per cycle |
| `start`, `num_layers[6:0]`, `busy`, `done` | pulse `start` to run layers 0..num_layers-1; `done` pulses when the last layer has been written |
| `mem_rd_req_valid/ready`, `mem_rd_addr` | read requests, one 16-float vector each |
| `mem_rd_rsp_valid`, `mem_rd_rsp_data[511:0]` | responses in request order, any latency, no backpressure |
| `mem_wr_valid/ready`, `mem_wr_addr`, `mem_wr_data[511:0]` | vector writes |

The reset is synchronous and active low (`rst_n`). The global memory, the DDR
controller, the PCIe link and the host are outside the design. The memory
ports are meant to sit behind a memory controller. The host port is meant to
sit behind a register bridge.

## Default sizes and what they hold

| Parameter | Default | Why |
|---|---|---|
| `VEC` | 16 | floats per memory vector and per beat |
| `LANE` | 16 | output features in parallel. VEC x LANE = 256 multiply-accumulates per cycle. The paper's results work out to 350 operations, or 175 multiply-accumulates, per cycle on both FPGAs (58.45 GOPS at 167 MHz and 96.25 GOPS at 275 MHz), which this covers. |
| `WBUF_DEPTH` | 576 | vectors per feature. This is AlexNet FC6: 6x6x256 / 16. |
| `W_MAX` | 128 | pooling row width. ResNet-50's first convolution output is 112 wide. |
| `MAX_LAYERS` | 64 | descriptors |
| `MAX_OUTSTANDING` | 8 | memory reads in flight |
| `CHAN_DEPTH` | 4 | entries per channel |

The paper evaluates **AlexNet**, which fits. C = 3 of the first layer is
padded to 16 channels. The grouped layers 2, 4 and 5 take two descriptors
each, 11 in all. The largest window is FC6, which uses exactly the 576
vectors of the weight buffer. The widest row is 55 pixels. Softmax is left to
the host.

The paper also evaluates **ResNet-50**, which does not fit as a whole. Its
sizes do fit: the largest window is 3x3x512, or 288 vectors, and it has 54
layers. But the design has no element-wise addition for the residual
connections and no average pooling. It also cannot pool with padding, which
ResNet's first max pooling uses. Batch normalization can be folded into the
weights and biases by the host.

## Where this departs from the paper, and how far to trust it

* The paper's text says "four kernels", but its figure shows five (DataIN,
  Convolution, pooling, LRN, DataOut). This RTL follows the figure.
* The following are this design's own; the paper describes none of them:
  * the layer descriptor, the sequencer, the memory layout and the address
    order;
  * the placement of the weight buffer in DataIN;
  * the zero-padding method and the channel-group fields;
  * the VEC/LANE sizes;
  * the power approximation in LRN;
  * the handshakes and channel depths.
* The ReLU is folded into the convolution output. The paper draws no ReLU
  kernel.
* The bias comes from the paper's general convolution formula. Its flattened
  formula has none.
* LRN normalizes within a 16-channel group only (see above).
* Nothing here has been timed or placed on an FPGA. The single-cycle adder
  tree, accumulator and LRN datapath are written for clarity, not clock
  speed. The paper's DSP counts and clock rates do not apply to this RTL.
* Verified in simulation:
  * every kernel on its own, against independently computed results, with
    random stalls;
  * the whole design end to end at the default sizes, on a two-layer network
    that uses padding, two feature groups, ReLU, 3x3/2 pooling, LRN, a
    channel-group input and a layer switch.

  AlexNet's first two layers have also been run at their real sizes, with
  sampled outputs checked. conv1 took 2,207,794 cycles for 2,196,150 beats
  and the two conv2 groups 894,067 cycles for 874,800 beats: one beat per
  cycle plus the weight loads. The fully connected layers and the rest of
  AlexNet have not been simulated.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. The file
`tb/ffcnn_tb_pkg.sv` holds the reference float conversions.
`tb/ffcnn_mem_model.sv` is a behavioural global memory with a fixed read
latency and random stalls.

```
# one kernel, e.g. the convolution
verilator --binary --timing --assert -Wno-fatal --top-module ffcnn_conv_tb \
    rtl/ffcnn_pkg.sv rtl/ffcnn_conv.sv tb/ffcnn_tb_pkg.sv tb/ffcnn_conv_tb.sv
./obj_dir/Vffcnn_conv_tb

# the whole accelerator at its default sizes (about a minute to build)
RTL="rtl/ffcnn_pkg.sv rtl/ffcnn_channel.sv rtl/ffcnn_layer_config.sv rtl/ffcnn_data_in.sv \
     rtl/ffcnn_conv.sv rtl/ffcnn_pool.sv rtl/ffcnn_lrn.sv rtl/ffcnn_data_out.sv rtl/ffcnn_top.sv"
verilator --binary --timing --assert -Wno-fatal --top-module ffcnn_top_tb \
    $RTL tb/ffcnn_tb_pkg.sv tb/ffcnn_mem_model.sv tb/ffcnn_top_tb.sv
./obj_dir/Vffcnn_top_tb

# AlexNet conv1 and conv2 at full size (under a minute to run)
verilator --binary --timing --assert -Wno-fatal --top-module ffcnn_alexnet_tb -Mdir obj_alex \
    $RTL tb/ffcnn_tb_pkg.sv tb/ffcnn_mem_model.sv tb/ffcnn_alexnet_tb.sv
./obj_alex/Vffcnn_alexnet_tb
```

| Testbench | What it checks |
|---|---|
| `ffcnn_channel_tb` | FIFO order, occupancy, full/empty, latency against a queue model |
| `ffcnn_layer_config_tb` | layer order, descriptors, start/done timing, zero-layer run |
| `ffcnn_data_in_tb` | every beat against memory contents (padding, groups, stride, channel offset), weight reloads, one beat per cycle |
| `ffcnn_conv_tb` | dot products, bias and ReLU against double precision, 3-cycle latency, one beat per cycle, backpressure |
| `ffcnn_pool_tb` | 3x3/2, 2x2/2, 3x3/1, 3x3/3 and bypass against a window search |
| `ffcnn_lrn_tb` | AlexNet and stronger settings against the real power function, bypass, latency |
| `ffcnn_data_out_tb` | write addresses and data, group offset, `layer_done` |
| `ffcnn_top_tb` | the two-layer network above, and that each mechanism occurred |
| `ffcnn_alexnet_tb` | AlexNet's first two layers at full size (227x227 input, 96 11x11/4 filters, then two 128-filter 5x5 groups), random weights, sampled outputs against double precision, and one beat per cycle |

## Changing it

* `VEC` and `LANE` are parameters of `ffcnn_top`. LANE must be a multiple of
  VEC.
* The memory width is VEC floats. A narrower memory needs a width adapter
  outside the top.
* To support larger layers, raise `WBUF_DEPTH` (window vectors per feature)
  or `W_MAX` (pooled row width). The descriptor fields bound the sizes too,
  for example 12-bit map sizes and 10-bit vector counts.
* A new kernel goes between two channels in `ffcnn_top`. It needs a bypass
  bit in `layer_cfg_t`.
