# Two-stream quantised action-recognition accelerator (SystemVerilog)

Human action recognition with a two-stream CNN looks at a video clip twice:
a *spatial* stream sees one RGB frame, a *temporal* stream sees the motion
between consecutive frames, given as a stack of optical-flow fields. On an
FPGA SoC the two streams' convolution stacks are the expensive part. This RTL
puts them, together with the optical-flow computation, in programmable logic.
The processor keeps the small fully connected, fusion and softmax layers.

The design follows the accelerator described in *FPGA-QHAR: Throughput-Optimized
for Quantized Human Action Recognition on The Edge* (Alhussain and Lin). The
paper describes an 8-bit quantised two-stream SimpleNet. Each stream is five
"homogeneous" layers, each a convolution with batch-norm and ReLU fused into it,
plus two max pools. The temporal input is 2L = 20 Lucas-Kanade flow channels.
The paper computes the layers on a PE x SIMD engine with on-chip weights and
an up/down-sizing AXI DMA path. The paper gives the network shapes, the
equations and the block diagram, but not the microarchitecture. Everything
at the level of widths, memory layouts, loop order, handshakes and the
command protocol is this design's own. Each such choice is marked as one
below and in the header comment of the file that makes it.

## The network that is accelerated

Per stream, in execution order (channel counts, kernels and strides from
the paper's network figure; padding and pooling size chosen here):

| # | layer | in ch (spatial / temporal) | out ch | kernel | stride | map (default) |
|---|-------|----------------------------|--------|--------|--------|---------------|
| 0 | Conv1 + BN + ReLU | 3 / 20 | 32 | 3x3, pad 1 | 1 | 32x32 |
| 1 | Conv2 + BN + ReLU | 32 | 64 | 3x3, pad 1 | 1 | 32x32 |
| 2 | Conv3 + BN + ReLU | 64 | 64 | 3x3, pad 1 | 1 | 32x32 |
| 3 | Max pool | 64 | 64 | 2x2 | 2 | 32x32 -> 16x16 |
| 4 | Conv4 + BN + ReLU | 64 | 64 | 1x1 | 1 | 16x16 |
| 5 | Max pool | 64 | 64 | 2x2 | 2 | 16x16 -> 8x8 |
| 6 | Conv5 + BN + ReLU | 64 | 64 | 1x1 | 1 | 8x8 |

The output of a run is an 8 x 8 x 64 map per stream, returned to the
processor. The network's classifier takes 64 inputs. The reduction from
8 x 8 x 64 to 64 is not described by the source, so it is left to software
together with the classifier.

The frame size is not given by the source. The default is 32 x 32
(`qhar_pkg::IMG_H/IMG_W`), which is SimpleNet's native input size.

## Block structure

```
 s_axis (64b) --> axis_upsizer (64->128) --+--> weight_buffer   (PE banks, both streams)
                |                          +--> fmap_buffer A   (RGB pixels)
                +--(raw beats)-------------+--> bn_param_buffer (folded BN records)
                                           +--> lk_flow --------> fmap_buffer A (flow channels)

 qhar_ctrl (commands, routing, layer sequencing, read-out)
     |
 layer_controller --reads--> fmap A|B, weight_buffer, bn_param_buffer
     |                           |
     |                 pe_array (16 x pe_simd + bn_relu_quant)   maxpool_unit
     |                           \__________________ __________/
     +--writes (sequential)--------------------------> fmap B|A

 fmap B --> qhar_ctrl read-out --> axis_downsizer (128->64) --> m_axis (64b)
```

| file | role |
|------|------|
| `qhar_pkg.sv` | sizes, BN record, layer descriptor table of both streams, command encoding |
| `qhar_accel.sv` | top: instantiates everything, muxes the two feature buffers |
| `qhar_ctrl.sv` | command scheduler |
| `layer_controller.sv` | loop nest / address generator of one layer |
| `pe_array.sv`, `pe_simd.sv` | 16 x 16 multiply-accumulate array |
| `bn_relu_quant.sv` | folded batch-norm, ReLU, 8-bit saturation |
| `maxpool_unit.sv` | lane-wise max over a pooling window |
| `lk_flow.sv`, `seq_divider.sv` | Lucas-Kanade optical flow |
| `fmap_buffer.sv`, `weight_buffer.sv`, `bn_param_buffer.sv` | on-chip memories |
| `axis_upsizer.sv`, `axis_downsizer.sv` | DMA width conversion |

## Using it from the processor

The accelerator executes one command at a time (`cmd`, `cmd_valid`,
`cmd_ready`; `done` pulses at the end). The data of a command travels on
the 64-bit input stream.

| command | arg | stream data |
|---------|-----|-------------|
| `OP_LOAD_WEIGHTS` | number of weight rows | one row = 16 weights = 2 beats |
| `OP_LOAD_BN` | number of BN records | one record = 1 beat |
| `OP_LOAD_RGB` | - | 1024 pixels, one 128-bit word (2 beats) each, R,G,B in bytes 0..2 |
| `OP_LOAD_FRAME` | frame index k | 1024 grey pixels, 8 per beat |
| `OP_RUN` | stream (0 spatial, 1 temporal) | - |
| `OP_READ_OFM` | - | output stream: 256 words = 512 beats, tlast on the last |

A typical inference is the following sequence. Weights and BN records are
loaded once, for both streams.

1. `LOAD_RGB`, `RUN 0`, `READ_OFM`.
2. `LOAD_FRAME 0` ... `LOAD_FRAME 10`. Loading frame k > 0 also computes the
   flow between frames k-1 and k into temporal input channels 2(k-1) and
   2(k-1)+1.
3. `RUN 1`, `READ_OFM`.

`run_cycles` gives the length of the last RUN in clock cycles.

### Memory layouts (what software must produce)

* **Feature maps**: pixel-major, one 128-bit word of 16 channels per address:
  `addr = (row*W + col)*CT + ct`, with `CT = ceil(C/16)`. Channel `c` is in
  byte `c mod 16` of tile `c div 16`. Bytes beyond the layer's channel count
  may hold anything, because the engine masks them.
* **Weights**: for each stream (spatial first), conv layer, output tile `ot`,
  tap `ky`, `kx` and input tile `ct`, one word of 16 rows. Row `p` holds the
  16 input-channel weights of output channel `ot*16 + p`. Rows are loaded in
  that order, so load row `n` lands in word `n div 16`, bank `n mod 16`. Both
  streams together are 550 words (8,800 rows).
* **BN records**: 64 bits each, `{bias[31:0], mult[15:0], shift[7:0], wzp[7:0]}`,
  in the order stream, conv layer, output channel (576 records).

## Arithmetic

The weights are 8-bit unsigned with a per-output-channel zero point `wzp`, so
the weight used is `w - wzp`. Activations are 8-bit unsigned with zero point
0. A PE computes, over all taps and input tiles,

    acc = sum act * (w - wzp)                  (32-bit signed)

Batch-norm and the quantisation scale are folded into one record per output
channel:

    y = clamp_0_255( ((acc + bias) * mult + 2^(shift-1)) >>> shift )

The product is 48 bits and the rounding is half-up; with `shift = 0` there
is no rounding term. The clamp at 0 is the ReLU. The source also shows a
leaky variant (0.1x for negative x). It is not built, because unsigned
8-bit activations cannot hold negative values.

## The convolution engine and its loop nest

This is the part to understand before changing anything.

The array holds 16 PEs x 16 SIMD lanes. In one cycle it takes one word of 16
input channels of one pixel (a "one-pixel channel vector"). It multiplies
that word by 16 rows of weights, one per output channel, so each cycle does
256 MACs. `layer_controller` walks

    for oy, ox                 output pixel
      for ot                   tile of 16 output channels
        for ky, kx             kernel tap
          for ct               tile of 16 input channels
            read IFM[(iy*W + ix)*CT + ct], W[wbase + ((ot*K + ky)*K + kx)*CT + ct]

It issues one read per cycle with no stalls. For each read it produces a
side-band, aligned with the data one cycle later:

* `first`/`last` bound a sum.
* `zero` marks a tap outside the map (zero padding).
* `mask` marks the lanes holding real channels.

Spatial Conv1 has only 3 channels, and temporal Conv1 has 20 channels in
2 tiles, so masking matters there. After `last`, each PE's sum passes
through `bn_relu_quant`. The 16 output bytes are exactly one feature-map
word (this is why `PE` must equal `SIMD`). Results come back in loop order,
so the OFM write address is a plain counter.

Pool layers use the same walker with the loop `oy, ox, ct, ky, kx`. Four
reads per output word go into `maxpool_unit`.

Layers alternate between buffers A and B: layer j reads A when j is even,
and the final map ends in B.

Cycle count of a layer: conv `H*W*(Cout/16)*K*K*CT`; pool
`(H/2)*(W/2)*CT*4`; plus 3 to 6 cycles of pipeline per layer. At the
defaults one spatial RUN takes 249,896 cycles and one temporal RUN takes
268,328 cycles.

## Optical flow

`lk_flow` keeps two frame banks. Frame k goes into bank `k mod 2`. For
each pixel it takes a 3 x 3 window (coordinates clamped at the borders) and
accumulates:

    Ix = (P[y][x+1] - P[y][x-1]) >>> 1     Iy = (P[y+1][x] - P[y-1][x]) >>> 1
    It = C[y][x] - P[y][x]                 (P older frame, C newer frame)
    a = sum Ix^2   b = sum IxIy   c = sum Iy^2   e = sum IxIt   f = sum IyIt

It then solves the 2 x 2 least-squares system:

    det = a*c - b^2,  vx = (b*f - c*e)/det,  vy = (b*e - a*f)/det

The solve uses two 48-cycle sequential dividers working in parallel. Each
result is scaled by 16 (4 fractional bits) and rounded toward zero. It is
then offset by 128 and saturated, giving the flow codes `dx`, `dy` (128 means
no motion). Where `det < 1` (a flat window) the flow is set to 128. The
equations come from the source. The stencils, window size, fixed-point
format and the flat-window rule are this design's choices.

The unit takes 61 cycles per pixel. One pair of 32 x 32 frames takes
62,464 cycles, and the ten pairs of one temporal input take about 0.62 M
cycles. Half of the temporal stream's time goes to flow. A faster
variant would pipeline the window sums and use a pipelined divider.

## Throughput

At the default 32 x 32 frame, one two-stream inference costs about 1.15 M
cycles:

* spatial RUN 0.25 M cycles;
* temporal RUN 0.27 M cycles;
* flow 0.62 M cycles;
* input transfers.

That is about 6.1 ms at the 187 MHz clock reported for the board
implementation, or about 160 inferences per second. The source reports about
24 FPS at its (unstated) frame size. The cost grows with the pixel count.

## Departures from the source, and its gaps

* **Frame size**: not given; 32 x 32 chosen.
* **PE and SIMD counts**: not given; 16 x 16 chosen.
* **Padding, pooling window, loop order and memory layouts**: not given;
  chosen here.
* **Both streams share one engine** and run one after the other. The source
  does not say whether they have separate engines.
* **Optical flow is a separate unit.** The source's block diagram draws it
  inside the PE/SIMD block, but it is not done on the MAC array here.
* **Parameter count**: the source states about 1.3 M parameters (5.1 MB).
  The layer shapes it draws give only about 134 k convolution weights. The
  RTL follows the drawn shapes; its weight memory (140,800 bytes) would not
  hold 1.3 M weights.
* **Processor side and vendor IP are not included**: the classifier,
  fusion, softmax, DMA engine, interconnect, DDR4 and camera. The top
  exposes the AXI-Stream ports a DMA would connect to.

## Simulating

Every testbench in `tb/` is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. To build one with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        --top-module tb_qhar_accel rtl/qhar_pkg.sv tb/tb_qhar_accel.sv
    ./obj_dir/Vtb_qhar_accel

`tb_qhar_accel` is the end-to-end test at the default sizes. It runs in
about 40 s. It works as follows:

* It generates a random network and random inputs. The BN records are
  scaled so that outputs hit both 0 and 255.
* It computes the whole two-stream result in the testbench (flow,
  convolutions, BN, pooling).
* It drives the command sequence above. The input stream has random gaps
  and the output sees random back-pressure.
* It compares all 2 x 4096 output bytes and each RUN's cycle count.
* It counts padding taps, masked lanes, ReLU floors, saturations, pooling
  windows, flat-window flow pixels and the switch between streams.

The unit testbenches (`tb_<module>.sv`) check each block against its own
reference model. Several of them use reduced sizes.

The sizes live in `qhar_pkg.sv`: `IMG_H`, `IMG_W`, `SIMD`, `PE`, `FLOW_L`,
`LK_WIN`. The layer table and the memory depths are derived from them.
`PE` must equal `SIMD`. The frame width must be a multiple of 4, so that
two pools divide it, and the pixel count a multiple of 8.

## How far to trust it

Everything listed above is built, and the end-to-end test passes with exact
agreement between the RTL and an independent behavioural model of the
network and the flow. For each block there is a deliberately broken copy,
and the block's testbench fails on it. Not verified:

* timing closure at 187 MHz. The PE adder tree and the flow unit's 64-bit
  products are single-cycle combinational paths, so they may need pipelining
  on a real device.
* accuracy with trained weights. The tests use random weights.
* any frame size other than 32 x 32 end to end.
