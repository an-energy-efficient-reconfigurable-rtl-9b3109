# A reconfigurable convolutional-autoencoder engine for 28x28 images

This RTL implements a small FPGA accelerator that removes noise from 28x28
grey-scale images (noisy MNIST digits) with a convolutional autoencoder. The
network has 13 layers. The encoder is three rounds of convolution, ReLU and
2x2 max pooling, which compress the image. The decoder is three rounds of
convolution, ReLU and 2x2 up-sampling, then a final convolution, which rebuild
it. Each layer uses a 2x2 window.

The hardware does not give every layer its own circuit. It has one engine that
runs a single convolution layer, together with the pooling or up-sampling step
that follows it, and it sends the result back to its own input for the next
layer. The 13 layers therefore run as **seven passes** through the same
hardware. Before each pass a settings table picks the kernel, padding, pooling
stride and post-operation. That table is what makes the engine
reconfigurable: it can run another layer schedule, or other weights, without
rebuilding the FPGA.

## The loop

```
             +-------------------------------------------------------------+
             |                        feedback (passes 0..5)               |
             v                                                             |
 image --> matrix_unit --> channel_distributor --> 4 x conv_lane --> channel_packager --> output_controller --> image out
 (raster)  ping-pong maps   channel controller      conv 2x2          one slot per lane      pass complete?     (pass 6)
           3x3 windows,     + 4 FIFOs, dealt        ReLU, shift       round-robin arbiter    2x2 replication
           zero padding     in strict rotation      max-pool 2x2                             route: feedback / out
```

* **matrix_unit**: holds the current feature map in one of two banks. For
  every output pixel of the pass it reads out a 3x3 window, one window per
  cycle. A 2x2 max pool over 2x2 convolutions needs exactly 3x3 input pixels,
  so each window carries everything one output pixel needs. Windows are
  independent of each other. That is why the engine can split them across
  channels and put them back together in any order. Pixels outside the map
  read as zero, so padding costs no memory.
* **channel_distributor**: deals window *k* to FIFO *k mod 4*. It stalls
  when the FIFO whose turn it is is full. It never skips a FIFO.
* **conv_lane** (x4): computes the 2x2 convolution with bias. It then applies
  ReLU, shifts right arithmetically and clamps to 0..255. In a pooling pass it
  computes the four convolutions of the window one per cycle and keeps the
  largest. Otherwise it computes a single convolution.
* **channel_packager** with **rr_arbiter**: each lane owns a one-entry slot.
  The arbiter serves full slots in rotation and forwards one result per cycle.
* **output_controller**: writes each result to the other bank of
  matrix_unit (the feedback path), or to the output port in the last pass. In
  an up-sampling pass it writes the result as a 2x2 block, four cycles per
  result. It counts the pixels it writes. When the count reaches the size of
  the pass, it reports the pass as complete.
* **ae_top**: ties the stages together and holds the per-pass settings. It
  runs the passes one after another.

Every window and every result carries its (row, col) coordinate. Results may
come out of the round-robin stage in a different order from the one the
windows went in. Writes still go to the right place. The image on the output
port is tagged the same way, so a consumer must place the pixels by
`out_row`/`out_col` and not assume raster order. In every testbench run the
final image did leave in raster order. Under back-pressure, however, a lane
that was idle can finish its window before a busier neighbour, so raster
order is not guaranteed.

## One pass: geometry

A pass reads an `in_h x in_w` map. `make_geom` in `ae_pkg` works out the rest
of the pass from that size and the pass settings (`layer_cfg_t`):

| setting | choices | effect on a side of length n |
|---|---|---|
| `pad` | `PAD_VALID` | 2x2 conv gives n-1 |
| | `PAD_SAME` (zero row and column at bottom/right) | n |
| | `PAD_FULL` (one-pixel zero ring, as drawn around the input matrix) | n+1 |
| `post` | `OP_POOL`, stride 2 | conv size c gives (c-2)/2+1 |
| | `OP_POOL`, stride 1 | c-1 |
| | `OP_UP` | 2c (nearest neighbour) |
| | `OP_NONE` | c |

The window for output (r, c) starts at input pixel
`(r*stride - t, c*stride - t)`. Here t is 1 for `PAD_FULL` and 0 otherwise,
and stride is 1 when the pass does not pool.

The reset settings (`default_cfg`) give the following passes:

| pass | layers | pad | post | map |
|---|---|---|---|---|
| 0 | conv, max pool | same | pool /2 | 28 -> 14 |
| 1 | conv, max pool | same | pool /2 | 14 -> 7 |
| 2 | conv, max pool | full | pool /2 | 7 -> 8 -> 4 (bottleneck 4x4) |
| 3 | conv, up-sample | same | up x2 | 4 -> 8 |
| 4 | conv, up-sample | valid | up x2 | 8 -> 7 -> 14 |
| 5 | conv, up-sample | same | up x2 | 14 -> 28 |
| 6 | conv | same | none | 28 -> 28 |

The reset kernels are identity kernels: weight 64 in the top-left tap and a
shift of 6. Trained weights are loaded through the configuration port. Every
size in a schedule must stay within `MAX_DIM` (28). An assertion in `ae_top`
checks this.

## Arithmetic

* Pixels are 8-bit unsigned.
* Weights are 8-bit signed. The bias is 16-bit signed. The accumulator is
  20-bit signed.
* `acc = bias + w00*x00 + w01*x01 + w10*x10 + w11*x11`, then
  `max(0, acc) >>> shift`, then saturation to 255.
* The taps are applied in correlation order, as CNN frameworks store them:
  `w00` multiplies the top-left pixel of the window. A kernel written as a
  mathematical (flipped) convolution must be loaded with its taps reversed.
* A weight of 64 with a shift of 6 means 1.0. Because the result is
  unsigned, the ReLU and the lower clamp are the same step.

## Timing

* A window leaves the matrix every cycle unless the channel controller stalls.
* In a pooling pass a lane is busy 6 cycles per window: accept, four
  convolutions, hand-off. Four lanes therefore sustain about 2 windows every
  3 cycles. Without pooling a lane takes 3 cycles per window.
* Up-sampling passes write 4 pixels per result.
* Measured from the last input pixel to `done`:
  * reset schedule: 2268 cycles per image (2142 with eight channels);
  * schedule with stride-1 pooling (28x28 kept at every pass): 6877 cycles
    (5706 with eight channels).
* Peak arithmetic is 16 multiply-accumulates per cycle (4 lanes x 4 taps).

## Ports of `ae_top`

| port | dir | meaning |
|---|---|---|
| `cfg_we`, `cfg_pass[2:0]`, `cfg_data` (`layer_cfg_t`) | in | write the settings of one pass; ignored while `busy` |
| `in_valid`, `in_ready`, `in_pixel[7:0]` | in/out/in | input image in raster order; accepted only while idle; processing starts after pixel 784 |
| `out_valid`, `out_ready`, `out_pixel[7:0]`, `out_row[4:0]`, `out_col[4:0]`, `out_last` | out/in/out | reconstructed image, coordinate-tagged; `out_last` on its last pixel |
| `busy`, `done`, `pass_idx[2:0]` | out | running; one-cycle pulse at the end; current pass |

Parameters: `IMG_DIM = 28`, `MAX_DIM = 28`, `NCH = 4` channels,
`FIFO_DEPTH = 4`. `NPASS = 7` and the bit widths live in `ae_pkg`.

## What follows the published design and what does not

These parts follow the published design:

* the 28x28x1 image;
* the 13-layer order (conv/pool x3, conv/up-sample x3, conv) with 2x2 windows;
* ReLU as max(0, x) and max pooling;
* the chain of stages and its feedback path: matrix with zero border, channel
  controller with FIFOs, conv/activation/pool-or-up-sample stage, channel
  packaging with round-robin arbitration, output controller that decides when
  the stream is complete.

These are this design's own choices:

* **Number of channels.** The block diagram shows four FIFOs and four
  packaging slots. The prose says the data is split into eight channels.
  `NCH` defaults to 4 and works for any value.
* **Pooling stride.** The layer table lists stride 1 for the pooling layers.
  The prose says pooling compresses the image, which needs stride 2. The
  stride is a per-pass setting. The reset schedule uses 2. The end-to-end
  testbench also runs a stride-1 schedule.
* **One filter per layer.** The design keeps one 2x2 filter per layer, so
  every map has a single channel. The published results imply a much larger
  network. They report 21.12 GOP/s over 2.91 ms, which is about 61 million
  operations per image. This design needs about 16.7 thousand operations per
  image. The filter counts are not published, so they are not modelled. This
  engine reaches about 3.2 GOP/s peak at 100 MHz, not 21.12.
* **Everything else.** The fixed-point format, the padding modes, the
  up-sampling method, the sequencer, the configuration port, the FIFO depth,
  the memory organisation and all handshakes are this design's own. The
  feature maps sit in flip-flops so that nine pixels can be read in one
  cycle. A block-RAM version would need a line buffer in front of the window
  generator.
* **Not covered.** No trained weights are included. Training and the GPU
  comparison are outside the RTL. The 100 MHz clock of the published FPGA
  build has not been checked against this RTL. The longest path is likely the
  combinational 3x3 window read from the flip-flop map into a lane FIFO.

## Files

`rtl/` holds one module or package per file: `ae_pkg`, `ae_top`,
`matrix_unit`, `channel_distributor`, `sync_fifo`, `conv_lane`,
`channel_packager`, `rr_arbiter` and `output_controller`.

`tb/` holds one self-checking testbench per module (`tb_<module>`). Each
testbench prints `TB_RESULT checks=N failures=M`. `tb_ae_top` runs the whole
engine at its default size against an integer reference model of the network.
It covers the reset schedule, random kernels, stride-1 pooling and back-to-back
images. It also counts how often each mechanism happened (each pass type and
padding mode, feedback writes, FIFO stalls, round-robin contention, output
back-pressure) and fails if any count is zero.

Simulate with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ae_pkg.sv tb/tb_ae_top.sv --top-module tb_ae_top -o sim
./obj_dir/sim
```

Two more full-size runs:

* `tb_ae_top_8ch` repeats the end-to-end test with `NCH = 8`.
* `tb_ae_noisy_digit` runs the denoising workload on synthetic noisy digits
  ("0" and "1", 28x28, noise with a sigma of about 37 grey levels). It uses
  2x2 box-filter kernels, checks every pixel against the reference and prints
  the error against the clean digit. Box filters are not trained weights,
  and the network has one filter per layer with a 4x4 bottleneck. The printed
  error therefore grows (about 15 grey levels in, 45 to 60 out) instead of
  shrinking. The run checks the data path, not the denoising quality.

Swap `tb_ae_top` for any other `tb_<module>` to test one block. Lint with
`verilator --lint-only -Wall -Irtl -y rtl rtl/ae_pkg.sv rtl/ae_top.sv`.
