# A fixed-weight CNN feature extractor (FixyNN FFE) in SystemVerilog

Most image-classification networks start with the same few layers. Those layers
learn generic low-level features (edges, textures, colour blobs), and they
transfer from one dataset to another with little loss. FixyNN uses this. The
network is split in two. The shared front end is frozen and built as
*fixed-weight* hardware: every weight is a constant in the logic. The
task-specific back end runs on an ordinary programmable CNN accelerator. To
move to a new dataset you retrain only the back end, plus the batch-norm
parameters of the front end, which stay programmable.

Freezing the weights makes the front end far cheaper than any programmable
datapath:

* a multiplier with a constant operand is just a few shifted additions, and a
  zero weight costs nothing at all;
* every product and sum is exactly as wide as its known weights need;
* no weight is ever fetched, so the front end needs no DRAM traffic;
* layers are fully pipelined, one pixel per cycle, so only a few rows of
  activations per layer are stored (the line buffers).

The architecture is the one proposed by the FixyNN paper (Whatmough et al.,
"FixyNN: Efficient Hardware for Mobile Computer Vision via Transfer
Learning", SysML 2019). This repository holds RTL for its fixed-weight
feature extractor (FFE), in
the configuration taken as the main one: the first **seven layers of
MobileNet-0.25** on **224x224 RGB** images, with 8-bit weights and
activations and 32-bit accumulators. The programmable back-end accelerator
and its DRAM are not included. The FFE's output port is where they would
connect.

```
 RGB pixel/cycle                                       features to the
 224x224x3 ──► L1 ──► L2 ──► L3 ──► L4 ──► L5 ──► L6 ──► L7 ──►┐ programmable
               │      │      │      │      │      │      │     │ accelerator
               └──────┴──────┴──────┴──────┴──────┴──────┴─────┴─► tap mux ──► out_pix
 Each layer:  line buffer (4 x SRAM) ─► 3x3 window shift register ─►
              fixed-weight datapath (conv, or depth-wise then point-wise) ─►
              BN ─► ReLU ─► Q ─► output register
```

| layer | kind | input (W x H x C) | stride | output |
|------:|------|-------------------|-------:|--------|
| 1 | 3x3 conv | 224 x 224 x 3 | 2 | 112 x 112 x 8 |
| 2 | depth-wise separable | 112 x 112 x 8 | 1 | 112 x 112 x 16 |
| 3 | depth-wise separable | 112 x 112 x 16 | 2 | 56 x 56 x 32 |
| 4 | depth-wise separable | 56 x 56 x 32 | 1 | 56 x 56 x 32 |
| 5 | depth-wise separable | 56 x 56 x 32 | 2 | 28 x 28 x 64 |
| 6 | depth-wise separable | 28 x 28 x 64 | 1 | 28 x 28 x 64 |
| 7 | depth-wise separable | 28 x 28 x 64 | 2 | 14 x 14 x 128 |

The layer shapes are those of the standard MobileNet-0.25 network, and they
live in one table in `rtl/fixynn_pkg.sv`.

## Fixed-weight datapath

A datapath stage (`conv_stage`) maps one 3x3xC input window to one 1x1xC'
output pixel per cycle, with all C' output channels in parallel. Each
output channel is one kernel (`fixed_dot`):

* **Fixed scalers** (`fixed_scaler`). A weight w turns into the sum of
  `x << b` over the set bits b of |w|, negated when w < 0. The number of
  adders is the Hamming weight of w less one. The product is
  `8 + bits(|w|) + 1` bits wide, then sign-extended to 32 bits. Synthesis may
  re-encode the constants further (CSD, Booth).
* **Pruning.** Only the non-zero weights get a scaler. The zero-weight inputs
  are not even wired, so sparsity cuts area linearly at no cost.
* **Carry-save tree** (`csa_tree`). The products are reduced by layers of
  3:2 compressors down to a sum and a carry vector. One carry-propagate adder
  then forms the 32-bit accumulator. The levels are a generate loop. Each
  level compresses the operands in groups of three and passes the one or two
  left over to the next level, until two operands remain.
* **BN, ReLU, Q** (`bn_relu_q`). `y = acc*scale + bias`, then `max(y, 0)`,
  then a right shift by `shift` that rounds half up, then saturation to
  0..255. Each stage keeps its `scale`/`bias` per channel and one `shift` in
  dedicated registers (`bn_regs`). These are the only trainable parameters
  left in the front end. Retraining them per dataset ("adaptive BN") is what
  lets a frozen front end serve many tasks.

A depth-wise separable layer puts two stages back to back, with no buffer in
between. The 3x3 depth-wise stage (one 9-tap kernel per channel) feeds the
1x1 point-wise stage (C' kernels of C taps) directly, because the depth-wise
output pixel is exactly the point-wise input pixel. Each of the two stages
has its own BN/ReLU/Q. Layer 1 is a standard 3x3x3 convolution.

Window values are ordered `x[c*9 + ky*3 + kx]`. A kernel's weights come
from `fixed_weight(layer, stage, out_channel, j)`, where `j` is the position
of the input in the kernel.

### The weights are placeholders

The trained MobileNet weights are not part of this design. In their place,
`fixed_weight()` in `fixynn_pkg` is a deterministic hash. It yields signed
8-bit values, about half of them zero: the 50 % sparsity the design was
sized for. Some of the non-zero weights are small. Every kernel is
elaborated from this one function. To build a real network, replace its body
with a lookup into the real quantised weights; nothing else changes. Until
then the RTL has the right structure, sizes and timing, but it does not
compute a useful feature map. The testbenches check the arithmetic against a
reference model that reads the same function.

## Line buffer and window: how the pixels move

This is the part that needs the most care.

Each layer receives its input as a raster-order stream of 1x1xC pixels, at
most one per cycle. A 3x3 kernel needs three rows at once, so the pixels pass
through a **line buffer** (`line_buffer`) of four single-port SRAM banks,
each one row long (W words of C x 8 bits):

* Each input pixel occupies one **slot** (r, c). In that slot the pixel is
  written into bank `r mod 4` at address c. In the same cycle, column c is
  read from the other three banks, which hold rows r-3, r-2 and r-1. No bank
  is read and written in the same cycle, so single-port macros suffice.
* At the end of each row the bank roles rotate by one. The next row
  overwrites the oldest one.
* Read data is registered (one cycle of latency). Rows above or below the
  frame are replaced by zeros, which gives the top and bottom padding.

The **window shift register** (`window_shift`) keeps the last two columns in
flip-flops. With the column just read, they form a 3x3xC window, so no pixel
is read from SRAM more than once per row triple. The timing of centres
follows from the slot order:

* the column of slot (r, c), c >= 1, completes the window centred on
  (r-2, c-1). At c = 1 the left column is forced to zero (left padding);
* the window centred on the last column of a row is completed in slot
  (r+1, 0) of the next row, using the two stored columns and a zero right
  column (right padding).

So windows leave in raster order of their centres, and no extra cycles are
spent at row ends.

**End of frame.** The last two rows of output need rows below the image.
After the last pixel of a frame, the line buffer runs **2W+1 flush slots**
on its own: virtual rows H and H+1, plus slot (H+2, 0). It holds `in_ready`
low while it does. A frame of W x H pixels therefore takes exactly
`W*H + 2W + 1` slots per layer, and the next frame waits for the flush.

**Stride and padding** follow TensorFlow's `SAME` rule. Windows are formed at
every position, but only those at valid output centres are passed on. For
stride 2 on an even size, those are the odd positions, with padding only
after the last row and column. For stride 2 on an odd size, they are the even
positions, with one row and column of padding on each side.

## Flow control

Every layer has valid/ready on its input and its output. Inside a layer, one
signal moves everything: `adv = !out_valid || out_ready`. It moves the SRAM
slot, the read-data register, the shift register and the output register. If
the output cannot be delivered, the whole layer freezes and no SRAM is
touched. `in_ready = adv && !flushing`. The ready signals of the seven layers
form one combinational chain from the FFE output back to its input. Each
layer reports `flushing` and `stall` (held by the layer below).

Latency per layer is two cycles from the slot that completes a window to the
output pixel, plus the line-buffer fill of about two rows. At full size, one
224x224 frame takes **51 429 cycles** from its first input pixel to the last
14x14x128 output pixel. That is 50 176 input cycles plus the flush tails of
the seven layers.

## Output tap and configuration

The output can be taken from the end of any layer 1..7. A dataset that loses
too much accuracy with seven frozen layers can then use, for example, only
the first four; the back end takes over from there. The tap is a register.
Layers past the tap receive no input and stay idle. The tapped layer's
channels are in the low channels of the 128-channel `out_pix`, and the rest
are zero. Change the tap only while the FFE is empty.

All registers are written through one port: `cfg_we`, `cfg_addr` (16 bits)
and `cfg_wdata` (32 bits). The address is the packed struct `cfg_addr_t`:

| bits | field | meaning |
|------|-------|---------|
| 15:12 | layer | 1..7 for a layer's stages; 0 for the top-level control |
| 11 | sub | 0: conv or depth-wise stage; 1: point-wise stage |
| 10:9 | field | 0: BN scale (16-bit signed), 1: BN bias (32-bit signed), 2: Q shift (6 bits) |
| 8:0 | ch | channel |

Writing `layer = 0, ch = 0` sets the tap to `cfg_wdata[2:0]` (values 1..7).
At reset every scale is 1, every bias 0, every shift 0, and the tap is 7.

## Files

`rtl/` (one module or package per file):

* `fixynn_pkg.sv`: widths, stage and config types, the layer table, the
  stand-in weight function.
* `fixed_scaler.sv`, `csa_tree.sv`, `fixed_dot.sv`: the fixed-weight kernel.
* `bn_relu_q.sv`, `bn_regs.sv`: post-processing and its registers.
* `conv_stage.sv`: a fully-parallel datapath stage (conv, depth-wise or
  point-wise).
* `sp_sram.sv`: a single-port SRAM bank, written as an array. Swap in a
  foundry macro with the same ports for a chip.
* `line_buffer.sv`, `window_shift.sv`: buffering between layers.
* `max_pool.sv`: a 3x3 max-pooling stage, for pooling layers.
* `ffe_layer.sv`: one layer.
* `fixynn_ffe.sv`: the top: seven layers, the tap multiplexer and the tap
  register. Parameters `IMG_W` and `IMG_H` (default 224) scale the image;
  every layer size follows from them.

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus:

* `fixynn_ref_pkg.sv`: a reference model of a layer (zero padding, plain
  multiplication, BN/ReLU/Q in 64-bit integers);
* `ffe_layer_harness.sv`: drives one layer with random frames, input gaps and
  back-pressure;
* `tb_fixynn_ffe.sv`: seven layers on a 32x32 image, with random BN
  settings, back-pressure, and a switch of the tap from 7 to 4. It fails
  unless flush stalls, back-pressure, inner stalls, both taps and idle
  layers past the tap all occurred;
* `tb_fixynn_ffe_full.sv`: one 224x224 frame at default parameters, every
  output value checked, and the cycle count bounded.

Each testbench prints `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/fixynn_pkg.sv tb/fixynn_ref_pkg.sv tb/tb_fixynn_ffe.sv \
    --top-module tb_fixynn_ffe -Mdir obj_tb -j 8
./obj_tb/Vtb_fixynn_ffe
```

Replace the testbench name for any other test. The full-size frame builds in
a few minutes, because about 11 000 fixed scalers are elaborated, and then
simulates in seconds.

## How far to trust it, and where it departs

Verified in simulation: every module against an independent model;
whole layers (conv/stride 2/even size, separable/stride 1,
separable/stride 2/odd size) with random stalls; the whole FFE at 32x32
with two taps; and one full 224x224 frame. Each testbench has also been run
against a deliberately broken copy of its module, and it caught the break.
Nothing has been through synthesis timing or an FPGA.

Choices made here where no specification was available, or where this RTL
departs from it:

* **Weights** are stand-ins (see above). The network therefore computes no
  meaningful features until real weights are supplied.
* **Layer shapes** are the standard MobileNet-0.25 ones.
* **BN/Q arithmetic**, register widths, the rounding rule, plain ReLU
  (MobileNet normally uses ReLU6), unsigned 8-bit activations, and treating
  the RGB input as unsigned 8-bit.
* **Handshake, flush slots, TensorFlow SAME padding, config bus and address
  map** are all this design's own.
* The adder tree is one carry-save tree per output channel. The paper draws
  a tree per kernel followed by a tree across kernels. The arithmetic is the
  same.
* **Kernel size is fixed at 3.** The same buffering works for 5x5 and 7x7
  kernels, with five or seven rows plus one bank, but it is not built.
* **Max pooling** (`max_pool`, a per-channel maximum over the 3x3 window,
  chosen with `DWS = 2` in `ffe_layer`) is available, but the default top does
  not use it, because MobileNet's first seven layers contain no pooling.
* **Clock gating** of the idle FFE is left to the implementation flow.
* **Accumulators** are a uniform 32 bits (`ACC_W`). Only the scaler outputs
  are sized per weight. Narrowing each adder tree to the range its weights can
  actually reach is left to synthesis constant propagation.
* **Clock rate.** The design was sized for 810 MHz in a 16 nm process. This
  RTL has one register per layer after a deep combinational datapath
  (scalers, tree, BN multiply, and for separable layers a second stage). It
  has not been timed. Reaching such a clock would need pipeline registers
  inside the datapath, or retiming.
* Only the seven-layer configuration is built. A larger front end (for
  example 11 fixed layers) needs four more 128-channel separable layers in
  the layer table. MobileNet-1.0 needs four times the channels.
