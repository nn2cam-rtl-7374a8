# A streaming CNN accelerator inside a high-speed FPGA camera

This RTL puts a small convolutional neural network into the FPGA of a
high-speed camera. The network then runs on every frame before anything leaves the
camera. The camera keeps its normal job: it reads a 1-megapixel sensor, sorts the
pixels and streams them over USB. Next to that path sits an image-analysis path:

```
sorted pixels -> crop/subsample -> image buffer -> accelerator -> result buffer -> output mux -> USB
                                                       ^
                          parameter store/loader ------+  (weights, biases, start)
```

The accelerator has no processor. It is a chain of hardware blocks, one per network
layer, joined by FIFOs. All layers work at the same time on different parts of the same
image: a layer starts as soon as it has seen enough input rows. Each layer has its own
weight memories and its own choice of parallelism. Each layer also has its own number
format: activations and weights can be anywhere from binary up to 16-bit fixed point.
A layer whose activations and weights are both binary uses XNOR and popcount instead of
multipliers.

The design follows the NN2CAM paper on the FastEye camera, an accelerator built in the
style of FINN. The paper describes the architecture, the layer block, the arithmetic and
the camera integration. It does not give the network's layer shapes, the
interface details or the register map. Those are this design's own choices. They are
listed in the section "Where this design departs from or adds to the paper".

## Files

| File | Block |
|---|---|
| `rtl/nn_pkg.sv` | stream/parameter widths, `layer_cfg_t` layer description, the two default networks, parameter-bus struct |
| `rtl/axi_pkg.sv` | AXI4 and AXI4-Lite channel structs |
| `rtl/nn2cam_camera.sv` | top: the camera's image-analysis path |
| `rtl/crop_subsample.sv` | image preparation (crop, subsample, pack 4 pixels per word) |
| `rtl/axi_bram_buffer.sv` | image buffer and result buffer (AXI4 slave + native port) |
| `rtl/param_loader.sv` | parameter store; replays register writes into the accelerator |
| `rtl/usb_output_mux.sv` | raw pixels or results towards USB |
| `rtl/nn_accelerator.sv` | the accelerator: interfaces, FIFOs, one block per layer |
| `rtl/control_interface.sv` | AXI4-Lite registers, parameter commit, run state machine |
| `rtl/axi_data_interface.sv` | AXI4 master: image in, results out |
| `rtl/conv_layer.sv` | convolution / fully-connected layer block |
| `rtl/avgpool_layer.sv` | average pooling layer block |
| `rtl/sliding_window_generator.sv` | row buffer and window replay |
| `rtl/processing_element.sv` | SIMD multiply-accumulate / XNOR-popcount, bias, activation |
| `rtl/param_memory.sv` | per-PE weight or bias memory |
| `rtl/stream_fifo.sv`, `rtl/stream_deserializer.sv`, `rtl/stream_serializer.sv` | stream plumbing |

Each file begins with a description of its interface and timing. `tb/` has one
self-checking testbench per module (`tb_<module>.sv`).

## Streams and number formats

Every link between blocks is a valid/ready stream that carries one activation per beat
in a 16-bit element (`ACT_W`). A producer holds its data until the consumer accepts it.
The FIFOs assert this rule. A feature map is sent channel-first: all channels of pixel
(0,0), then all channels of pixel (1,0), and so on along the row, then row by row. Every
block emits its output in this same order, so no block has to reorder data.

A value with `bits` bits and `frac` fraction bits is a signed two's-complement fixed-point
number. A binary value is a single bit, where 1 means +1 and 0 means -1. Each layer in
`nn_pkg::layer_cfg_t` states the format of its input activations (`a_*`), its weights
(`w_*`) and its outputs (`o_*`). The PE handles three cases:

* **Fixed point** (any mix up to 16 bits): products are summed in an accumulator wide
  enough that it never overflows. The bias is added at the end of the kernel, then ReLU
  if enabled. The result is shifted right by `a_frac + w_frac - o_frac` (truncation)
  and saturated to `o_bits`.
* **Binary weights, fixed-point activations**: each weight bit adds or subtracts the
  activation. No multiplier is used.
* **Binary activations and weights**: `2*popcount(XNOR(a, w)) - SIMD` per word.
* **Binary output**: the output bit is `sum + bias >= 0`, so the bias acts as the
  threshold.

Zero padding inserts a raw 0. In a binary layer that value means -1. The paper does not
say which padding value it uses.

## The layer block

A convolution layer has these stages (see `conv_layer.sv`):

1. The **de-serializer** packs `SIMD` consecutive channels into one word. `SIMD` is
   how many inputs each PE consumes per cycle.
2. The **sliding window generator** writes input words into a ring of `K + STRIDE` rows.
   For each output pixel it reads out the `K*K*ICH/SIMD` words of that pixel's window,
   in the order (ky, kx, channel group). Positions outside the image become padding.
   The extra `STRIDE` rows let the next rows arrive while the current window rows are
   still being read. The generator reads a window only when its lowest row has fully
   arrived. It overwrites a row only when no remaining window needs it.
3. **Output-channel folding.** The block has `PE` processing elements. All of them see
   the same window word in the same cycle. Each multiplies it with its own weights, so
   they compute `PE` output channels at once. With `OCH > PE` the generator replays the
   same window `FOLDS = OCH/PE` times. In fold `f`, PE `p` computes channel `f*PE + p`.
   Its weight memory holds the weights for window word `i` of fold `f` at address
   `f*KW + i`, so weights are simply read in sequence.
4. The PE results of one fold go through a register and the **serializer**, which sends
   them out one per beat. All folds of one output pixel finish before the window moves,
   so the output is channel-first again.

A fully-connected layer is a convolution whose kernel covers the whole input (K = DIM).
**Average pooling** (`avgpool_layer.sv`) uses the same window generator, but each channel
has its own accumulator and no weights. It divides the window sum by K*K, rounding toward
zero.

Throughput: a convolution layer needs `OD*OD * FOLDS * K*K*ICH/SIMD` cycles per image,
where OD is the output size. PE and SIMD therefore trade area for speed layer by layer.
The overall rate is set by the slowest layer. The paper picks PE/SIMD per layer with a
resource-balancing tool. Here they are simply fields of `NET`.

## The accelerator and its control

`nn_accelerator` instantiates one layer block per entry of the `NET` parameter, and
checks at elaboration that each layer's input shape matches the previous layer's output.
It has two AXI ports.

**Data port (AXI4 master, 32-bit).** On start, the data interface reads the image from
`IMG_BASE` with INCR bursts of up to `BURST_LEN` beats. One burst is in flight at a time.
Each word holds four 8-bit pixels, lowest byte first. It writes the last layer's results
to `RES_BASE`, two 16-bit results per word, as single-beat writes. The frame is done when
the last write response arrives.

**Control port (AXI4-Lite)**:

| Offset | Register |
|---|---|
| 0x00 | write bit 0 = 1: start a frame. Read: bit 0 busy, bit 1 done (sticky until the next start), bit 2 idle |
| 0x04 | IMG_BASE, image byte address |
| 0x08 | RES_BASE, result byte address |
| 0x0C | FRAMES, frames completed (read only) |
| 0x10 | PARAM_SEL: writing commits the staged word. [31:28] layer, [27] 1 = bias / 0 = weight memory, [26:20] PE, [19:0] word address |
| 0x20 + 4j | PARAM_DATA chunk j of the 256-bit staging word (j = 0..7) |

A weight word holds the `SIMD` weights of one window word, lane `j` at bits
`[j*w_bits +: w_bits]`. A bias word holds the bias in its low `b_bits`. Parameter writes
and start commands are ignored while a frame runs. `irq` pulses when a frame ends.

## The camera path (`nn2cam_camera`)

* **Image preparation** takes the sorted sensor stream (`pix_valid`, `pix_sof`,
  `pix_eol`, 8-bit pixels). It keeps every `crop_step`-th pixel of every `crop_step`-th
  line, starting at (`crop_x0`, `crop_y0`), until it has the network's 28x28 input. It
  packs the kept pixels four per word into the image buffer and pulses `frame_ready`.
  It never stalls the sensor.
* The **image buffer** (102,400 words, enough for a 640x640 image) and the **result
  buffer** (33,462 words, enough for a 78x78x11 output) are block RAMs. The accelerator
  reaches them through AXI4; the camera logic uses a plain port.
* The **parameter store** is a table of up to 16,384 `{address, data}` pairs.
  `cmd_load` replays them as AXI4-Lite writes: base registers, then every weight and bias
  word. `cmd_start` writes the start bit. The camera's control block, which is not part
  of this RTL, fills the table and issues the commands. For the default network the
  table has 13,400 entries.
* The **output mux** sends raw pixels when `usb_mode = 0`. When `usb_mode = 1`, a
  `res_req` pulse streams `res_words` result words out of the result buffer at one word
  per cycle, with back-pressure.

The sensor, its interface and pixel sorting, the camera control block, the USB
controller and its DRAM are outside this RTL. Their signals are the top's ports.

## The default network

The paper's networks are 5-layer CNNs for digit recognition with 11 output classes, and
it does not list their layers. The default here (`nn_pkg::OCR28_BIN`) is a network of the
same kind for 28x28 inputs:

| # | layer | in -> out | PE | SIMD | format |
|---|---|---|---|---|---|
| 0 | conv 3x3 | 28x28x1 -> 26x26x16 | 16 | 1 | 16-bit pixels x binary weights -> binary |
| 1 | conv 3x3 stride 2 | 26x26x16 -> 12x12x16 | 8 | 4 | XNOR -> binary |
| 2 | conv 3x3 pad 1 | 12x12x16 -> 12x12x32 | 16 | 4 | XNOR -> 16-bit, ReLU |
| 3 | avg pool 2x2 | 12x12x32 -> 6x6x32 | - | 4 | 16-bit |
| 4 | fully connected | 6x6x32 -> 11 | 11 | 4 | 16-bit x 16-bit (8 fraction bits) -> 16-bit |

`nn_pkg::OCR28_16B` has the same shapes with every layer at 16 bits. To use it, pass it
as the accelerator's `NET`. It adds up to about 2.2 M operations per image; the paper gives
1.5 MOP for its 28x28 network.

## Timing

With the default network the layers need 6,084, 10,368, 10,368, 1,152 and 288 cycles
per image. For example, layer 2 has 144 output pixels x 2 folds x 36 window words. Layers
1 and 2 are the slowest and set the rate. One 28x28 frame takes about 14,000 cycles from the
start write to `irq`. The layers' separate cycle counts add up to 28,260, and the
testbenches check that the measured latency lies between the slowest layer and that
sum. At 100 MHz this is 0.14 ms per frame. The paper reports 0.007 ms for its binary
28x28 network, which uses far more parallelism than these defaults. Raising PE and SIMD
in `NET` shortens the frame in proportion, as long as OCH/PE and ICH/SIMD stay whole
numbers.

## Where this design departs from or adds to the paper

* Layer shapes, PE/SIMD and fraction bits of both default networks are invented (see
  above). Only the 5-layer depth, the 28x28 input, the 11 outputs, binary or 16-bit
  hidden layers and the 16-bit output layer come from the paper.
* Only 28x28 networks are provided. The buffers are sized for 640x640 images and
  78x78x11 results. Running the paper's 128/320/640 networks needs a `NET` with their
  (unpublished) shapes. Wider images also make the row buffers large. The 9-layer face
  detector is not provided.
* `SIMD` must divide the input channel count. The paper only says it divides the kernel
  size.
* AXI details (32-bit bus, burst length 16, one outstanding burst), the register map,
  the parameter word layout and the parameter-table format are choices of this design.
* Padding value (raw 0), binary encoding (1 = +1), binary threshold (`>= 0`), ReLU
  before the shift, and truncation toward minus infinity are choices. The paper only says
  "truncation" and "saturation".
* The pool block is a separate accumulator block, not a PE with a constant kernel. It
  gives the same averages.
* The sensor is taken as 1024x1024 with 8-bit monochrome pixels. The pixel stream format
  is a choice.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`, has a watchdog, and runs with
plain Verilator from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/nn_pkg.sv rtl/axi_pkg.sv \
    tb/tb_nn2cam_camera.sv --top-module tb_nn2cam_camera -Mdir obj -o sim && obj/sim
```

Replace the name to run any other testbench. What they cover:

* `tb_nn2cam_camera` runs the full design at its default parameters. It builds a random
  parameter file and loads it through the store. It sends two 64x64 sensor frames,
  cropped at (5,3) with step 2. It compares the 11 results with a loop-level model of
  the network. It checks the raw-pixel mode, the layer overlap, and that back-pressure
  stalls, padding, folds, XNOR layers, pooling, read-out back-pressure and mode switches
  all happened.
* `tb_nn_accelerator` runs the 16-bit network (small FIFOs, 8-beat bursts). It drives
  the AXI4-Lite port and serves an AXI memory model with random wait states.
* The block testbenches use random data, random back-pressure and reference models.
  They also check rates: one element per cycle for the stream blocks, `K*K*ICH/SIMD`
  cycles per window word set for the layer, one pixel per cycle for cropping, and one
  word per cycle for the read-out.

To change the network, edit or add a `layer_cfg_t` array in `nn_pkg.sv` (element 0 is
layer 0). The elaboration check reports shape mismatches. `tb_nn2cam_camera` derives
its model and parameter file from the same array.
