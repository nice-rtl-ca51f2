# An integer-only engine for a quantized image-restoration CNN

NICE (Noise Injection and Clamping Estimation; Baskin et al.) is a way of training
networks whose weights and activations are uniformly quantized to a few bits. The
quantizer of each layer has a clamp value: weights are clamped to `[-c_w, c_w]` and
activations to `[0, c_a]`, then rounded onto a uniform grid. Every number in the
network is therefore an integer code times a per-layer scale. If every scale is
also forced into the form `q * 2^p`, with `q` a small integer, the whole forward
pass needs only integer multiply-accumulates, one small integer multiplication per
output value and shifts. No floating point and no look-up tables are needed.

This repository is RTL for such an inference engine. It is sized for the network
the method was demonstrated on in hardware: a joint denoising/demosaicing CNN with
4-bit weights, 8-bit activations, and 16-bit biases and image. The engine computes
the network one layer at a time. Its central part, the **requantization path**, turns
a convolution sum back into an output code in one multiply, one add, a clamp and a
rounding step. The published design ran this network with an OpenCL engine on an
FPGA. The RTL here is a stand-alone reimplementation. The published parts are the
network shape, the bit widths, the datapath order of the residual block and the
scale format. The memory organisation, schedule, parallelism and host interface are
choices made here; they are listed at the end.

## The network

The input is an `M x N` RGB image with 16-bit codes. The network is a chain of
`NU = 20` residual stages followed by an output convolution. All convolutions are
3x3, stride 1, with zero padding, so every feature map stays `M x N`.

* **Stage.** Two convolutions read the same 64-channel input. In the first stage
  the input is only the 3 image channels.
  * One convolution has 61 outputs. It is followed by the clamped ReLU, so its
    outputs are 8-bit codes.
  * The other has 3 outputs and no activation. Its result is added to the 16-bit
    image that the stage received along the skip path.
  * The 61 feature channels and the 3 updated image channels form the next stage's
    64-channel input.
* **Output convolution.** Three outputs, added to the original input image (a
  global skip around the whole network). This gives the restored image.

Convolution inputs are always 8-bit codes. The image channels are carried at 16 bits
along the skip path, and an 8-bit copy of them feeds the next convolution. In the
engine a stage is a single layer of 64 output channels. Channels 0..60 are the ReLU
outputs and 61..63 are the image channels. The network is thus `NL = 21` layers.

## Number formats

| quantity | code | real value |
|---|---|---|
| weight | signed 4 bit, `-7..7` | `code * S_w` (per layer) |
| activation | unsigned 8 bit, `0..255` | `code * S_a` (per layer), with `S_a = c_a / 255` |
| image channel | unsigned 16 bit | `code * S_img` |
| convolution sum | signed 32 bit | `sum * S_a(in) * S_w` |
| scale ratio | `q` (1..256, 9 bits), `shr` (0..32, 6 bits) | `q * 2^-shr` |
| bias operand | signed 16 bit, 8 fraction bits | `Bias / S_a(out)`, in output codes |

Clamping an activation to `[0, c_a]` is the same as clamping its code to
`[0, 255]`, because `S_a = c_a / (2^8 - 1)`. The engine never sees `c_a` itself.

## The requantization path

This is the part worth reading twice. For output channel `o` of layer `l` the real
result is

    a = S_a(l-1) * S_w(l) * sum  +  Bias  +  S_img(l-1) * skip

Dividing by the output scale gives the output code before clamping and rounding:

    code = sum * M  +  Bias / S_a(l)  +  skip * R,
    M = S_a(l-1) * S_w(l) / S_a(l),     R = S_img(l-1) / S_img(l)

`M` and `R` are computed off line and stored as `(q, shr)` pairs. So are the bias
operand and the other per-layer values. The datapath (`requant_path`) then does:

1. **`skip_scale`**: `skip * q_R * 2^(32 - sh_R)`. The 16-bit skip code is
   multiplied by the ratio `R`.
2. **`dsp_scale_add`**: `sum * q_M * 2^(32 - sh_M) + bias * 2^24 + skip term`. One
   multiplier and a three-input adder; the published datapath puts this multiply
   and add into a single DSP block.
3. **`act_clamp`**: the sum, held with 32 fraction bits, is clamped to
   `[0, (2^B - 1) * 2^32]`. `B` is 8 for ReLU channels and 16 for image channels.
4. **`round_unit`**: round to nearest, ties up: `(x + 2^31) >> 32`.

All terms are aligned to 32 fraction bits. That is the finest resolution any
allowed scale (`p >= -32`) can produce, so steps 1 and 2 are exact and the only
rounding in a layer is step 4. The sum is 76 bits wide. Stage 1 (multiply and add)
and stage 2 (clamp and round) are registered, so a result leaves two cycles after
its sum enters, with a throughput of one set of `LANES` results per cycle.

Image channels use the same path with their own scale `M_img` and with the skip
term switched on. Their clamp bound is `2^16 - 1` instead of 255: the published
network gives these convolutions no activation, and this bound only keeps the
result a valid 16-bit image code. The 8-bit copy that feeds the next convolution is
the upper byte of the 16-bit code, rounded half up and saturated at 255. This
assumes `S_a = 256 * S_img` for those channels.

**Computing the constants.** Given real scales, pick `shr` as large as possible
(at most 32) such that `q = round(M * 2^shr)` is at most 256, and use that `(q, shr)`
pair. The bias operand is `round(Bias / S_a(l) * 256)`, a signed 16-bit value. In
the published flow, `q` in `[1,256]` and `p` in `[-32,0]` were found to lose no
accuracy.

## Dataflow and schedule

```
            param_mem (weights, biases, layer records)
                 |  weight word (LANES kernels)
                 v
 fmap_buffer --3x3 window of one channel--> conv_mac --LANES sums--> requant_path
   ^  bank A (read)                          (LANES lanes)               |
   |  bank B (write) <------------- LANES codes of one pixel ------------+
   |  original image --16-bit skip codes--------------------------------^
 layer_seq: layer -> pixel (raster) -> group of LANES output channels -> input channel
```

* **`layer_seq`** issues one step per cycle. A step is the zero-padded 3x3 window
  of one input channel at one pixel, plus one weight word: the 3x3 kernels of
  `LANES` output channels for that input channel. After `cin` steps the group's
  `LANES` sums are finished. The next group starts on the following cycle with no
  bubble, because `conv_mac` reloads its accumulators on the first step of a group.
* **`fmap_buffer`** holds two banks. A layer reads one bank and writes the other,
  and the banks swap after each layer. Each bank holds 64 channels of 8-bit codes
  and 3 channels of 16-bit image codes per pixel. A third store keeps the original
  image for the global skip.
* Between layers the sequencer waits 3 cycles so the last results are written
  before the next layer reads them.

A layer therefore takes exactly `H * W * ceil(cout / LANES) * cin + 3` cycles.
With `LANES = 16`, one pixel of the whole network takes
`4*3 + 19*4*64 + 1*64 = 4940` cycles. A 132 x 220 frame takes 143.5 M cycles,
0.60 s at 240 MHz. The published FPGA engine reported 250 ms per image with a
different engine whose organisation is not published. Raising `LANES` shortens the run in proportion
(`LANES = 64` handles each stage in one group).

Feature-map storage for a 132 x 220 frame is
`2*29040*64*8 + 3*29040*3*16 = 33.9 Mbit`, which needs the on-chip RAM of a
large FPGA. The published implementation reported 35.3 Mbit of on-chip RAM in
use.

## Loading and running

All host ports are synchronous to `clk`; each `*_we` / `ld_en` writes one entry.

| port group | content |
|---|---|
| `ld_en, ld_pix, ld_img` | input pixel `(y, x)` at index `y * MAX_W + x`, three 16-bit codes |
| `wt_we, wt_addr, wt_data` | weight word `w_base(l) + g * cin + c`; lane `i`, tap `k = 3*dy + dx` at `wt_data[i][k]`, for output channel `g*LANES + i` and input channel `cin_base + c` |
| `bias_we, bias_addr, bias_data` | bias operand of layer `l`, channel `o` at `l * 64 + o` |
| `cfg_we, cfg_addr, cfg_data` | `layer_cfg_t` record of layer `l` (see `nice_pkg`) |
| `start, img_h, img_w` | run all layers on an `img_h x img_w` frame (at most `MAX_H x MAX_W`) |
| `busy, done, cycles` | status; `done` stays high until the next `start` |
| `out_pix, out_img` | result image, combinational read after `done` |
| `stat_clip_lo, stat_clip_hi, stat_skip` | counts of results clamped at 0, at the top of the range, and image results with a skip |

Layer records for the network above are as follows.

| layer | `cin_base` | `cin_cnt` | `cout_cnt` | `img_base` | `skip_orig` |
|---|---|---|---|---|---|
| first stage | 61 | 3 | 64 | 61 | 0 |
| other stages | 0 | 64 | 64 | 61 | 0 |
| output conv | 0 | 64 | 3 | 0 | 1 |

Each record also holds `w_base` and the three scale pairs `m_act`, `m_img` and
`s_skip`.

## Files

| file | role |
|---|---|
| `rtl/nice_pkg.sv` | widths, network constants, `scale_t`, `layer_cfg_t` |
| `rtl/conv_mac.sv` | `LANES` x 9 multiply-accumulate lanes |
| `rtl/skip_scale.sv`, `rtl/dsp_scale_add.sv`, `rtl/act_clamp.sv`, `rtl/round_unit.sv` | the four steps of requantization |
| `rtl/requant_path.sv` | the two-stage pipeline built from them, `LANES` wide |
| `rtl/fmap_buffer.sv` | ping-pong feature maps, window read, multi-lane write |
| `rtl/param_mem.sv` | weights, biases, layer records |
| `rtl/layer_seq.sv` | loop nest, bank control, cycle counter |
| `rtl/nice_accel.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_ref_pkg.sv` | reference requantization arithmetic, written from the formula with wide integers |
| `tb/tb_nice_body.svh` | end-to-end test shared by `tb_nice_accel` (reduced size) and `tb_nice_accel_full` (default size) |

## Simulating

From the repository root, with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -I. -y rtl -y tb rtl/nice_pkg.sv tb/tb_ref_pkg.sv \
        tb/tb_nice_accel.sv --top-module tb_nice_accel
    ./obj_dir/Vtb_nice_accel

Every testbench prints `TB_RESULT checks=N failures=F` and stops itself. A watchdog
ends a hung run with a failure. Use the same command with any other `tb_*` file.

* The end-to-end tests build a network with the published shape from random
  4-bit weights, biases and scales, load it through the host ports and run it.
  They compare every output pixel with a layer-by-layer model written in the
  testbench. They also check the exact cycle count and the event counters, and
  require the ReLU clamp, the upper clamp and the skip additions each to occur.
* `tb_nice_accel` runs 4 layers on a 5 x 7 frame, with 8 lanes and an 8 x 8 buffer.
* `tb_nice_accel_full` keeps every parameter at its default: 16 lanes, a
  132 x 220 buffer and all 21 layers. It runs a 16 x 220 frame (17.4 M cycles,
  about two minutes).

The full 132 x 220 frame (143.5 M cycles) has not been simulated. At the speed seen
it would take roughly 10 to 15 minutes.

## Where this departs from, or adds to, the published design

* **Engine structure.** The published hardware reused an existing OpenCL CNN
  engine (data-mover, convolution and pooling kernels) that it does not describe.
  The engine here is a simple layer-at-a-time design of its own. It has no pooling:
  the restoration network needs none.
* **Parallelism** (`LANES = 16`, one 3x3 window per cycle), the accumulator width
  (32 bits) and the 2-cycle requantization pipeline are choices made here.
* **Frame size.** `MAX_H x MAX_W = 132 x 220`, the size of the images in the MSR
  demosaicing set as known from outside the paper. `img_h` and `img_w` can be
  smaller at run time.
* **Two output scales per layer.** The ReLU and image channels of a stage get
  separate `M` values, because their outputs have different scales.
* **Bias operand.** The bias enters as a pre-divided, 8-fraction-bit value.
* **Image channels.** They are clamped to `[0, 65535]`. Their 8-bit convolution
  input is the rounded upper byte.
* **Rounding.** Round half up.
* **Fixed bit widths.** The activation clamp is fixed at 8 bits, so the 5- and
  6-bit activation settings the method was also evaluated with cannot be run
  directly. The ImageNet and CIFAR ResNets need strided layers, pooling and wider
  layers, and are out of scope.
* **Training.** Noise injection, gradual quantization and clamp learning happen in
  training, in software, and are not part of this RTL.
* **Large arrays.** The parameter and feature memories are plain arrays with
  combinational reads. On an FPGA the 9-port window read would be built from line
  buffers or banked RAM. That restructuring is not done here.
