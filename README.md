# Condensation-Net accelerator in SystemVerilog

Condensation-Net widens the first convolution layers of a small CNN by a factor
alpha (2 or 4) and then "condenses" every alpha adjacent output channels
into one by a pooling operation across channels (max, average or min). More filter
weights improve accuracy. Because each condensed pixel depends on only alpha
convolution results at the same position, the wide intermediate maps never need to be
stored. These intermediate maps are the *virtual feature maps*. The hardware computes
them one block at a time, pools them, and writes only the condensed block. The feature
map memory therefore stays the size needed for the narrow network (Tiny-YOLOv2). The
only cost is the extra weights and a small pooling unit.

This RTL implements that accelerator as described in "Condensation-Net:
Memory-Efficient Network Architecture with Cross-Channel Pooling Layers and Virtual
Feature Maps" (Chen et al.). The description covers the block diagram, the loop order,
the memory sizes, M = 320 multiply-accumulate cores, 1-bit weights with 2-bit
activations, and filters up to 7 x 7. Everything the description leaves open was
decided here; those decisions are listed under [Design choices](#design-choices-not-taken-from-the-description).

## Architecture

```
            +----------------------------------------------------------------+
            |                                                                |
            v                                                                |
 +---------------------+  block of one      +-----------------------------+  |
 | feature map memory  |  input channel     | CLPU                        |  |
 | 4 Mi x 8 bit,       |------------------->|  tile buffer (22 x 26 px)   |  |
 | 32 banks; input and |  1 tile row/clock  |  320 conv cores, each with  |  |
 | output maps of one  |                    |  4 accumulators             |  |
 | layer               |                    |  activation unit (320 lanes)|  |
 +---------------------+                    |                             |  |
                                            +-------------+---------------+  |
 +---------------------+   1 weight / clock               | alpha virtual    |
 | control unit        |--------------------------------->| blocks, one per  |
 |  weight memory      |                                  v clock            |
 |  layer param memory |  enable / mode       +-------------------------+   |
 |  loop sequencer     |--------------------->| PLPU                    |---+
 +---------------------+                      |  1 block running max/   |  1 (or alpha)
                                              |  min/sum, 2x2 max pool  |  output blocks
                                              +-------------------------+
```

| Module | Role |
|---|---|
| `cnet_top` | Wires everything together. Host ports load the memories while the accelerator is idle. |
| `control_unit` | Runs the layer / output group / block / input channel loops. Generates all addresses. |
| `clpu` | Convolution Layer Processing Unit: holds the tile buffer, 320 `conv_core`s and the `activation_unit`. |
| `conv_core` | One MAC lane. Its buffer holds one entry per virtual channel (up to 4). In max mode, used for pooling layers, it keeps the largest pixel instead of the sum. |
| `activation_unit` | Applies ReLU, then a right shift, then saturation to 2^bits - 1. This is the quantizing activation. |
| `plpu` | Pooling Layer Processing Unit: cross-channel max / average / min, or pass-through. Optional 2 x 2 / 2 spatial max pooling. |
| `fm_memory`, `weight_memory`, `layer_param_memory` | The three memories, written as synthesizable arrays. The feature map memory is split into 32 byte-wide banks so that one read returns 32 consecutive pixels. |
| `cnet_pkg` | Sizes, the layer descriptor struct and the pooling-mode enum. |

## Processing order: where the virtual feature maps live

For each layer the control unit runs this loop nest. It is the published loop
structure (layer, output channel, block, input channel), except that several output
groups can share one pass when alpha is below 4.

```
for j in output groups, 4/alpha at a time   # a group: one stored channel with pooling on,
                                           # alpha channels with it off
  for m in blocks                 # 16 x 20 output pixels, row-major over the image
    for n in input channels
      load block m of channel n, plus a (K-1)-pixel halo, zero outside the image (one row per clock)
      for e in 0..E-1, for each filter tap (ky, kx):     # E = entries in use, up to 4
        fetch one weight bit; each of the 320 cores adds +-pixel into buffer[e]
    for each group g of the pass:
      activate buffer[g*alpha .. g*alpha+alpha-1] of all cores  ->  PLPU
      write the PLPU's block(s) to the output maps
```

At any moment, the only copy of the virtual feature maps is the set of accumulators
inside the cores, which hold one block per virtual channel. The PLPU
reduces the alpha activated blocks as they arrive, one per clock. It keeps one block of
running results. With cross-channel pooling enabled, it emits one output block after
the last of them. With pooling disabled, it emits each block unchanged, so the same
hardware runs plain Tiny-YOLOv2 layers: alpha = 1, or alpha > 1 without condensing.

Every core has four buffer entries, enough for alpha = 4. When alpha is 1 or 2, the spare
entries are used for the next output groups, so one block load serves 4/alpha groups.
Entry e then holds virtual channel j*alpha + e. This is what keeps the Tiny-YOLOv2-style
layers (alpha = 1) from being dominated by block loading.

Output group j covers virtual channels v = j*alpha + a. With pooling on, group j
becomes stored channel j. With pooling off, it becomes channels j*alpha .. j*alpha+alpha-1.

## Layer descriptor

Each entry of `layer_param_memory` is a `cnet_pkg::layer_param_t`:

| Field | Meaning |
|---|---|
| `in_base`, `out_base` | Pixel address of channel 0 of the input and output maps. Channel c starts at base + c*W*H, and rows are W pixels wide. |
| `w_base` | Weight bit address of the layer. The weight for (v, n, ky, kx) is bit `w_base + (v*n_in + n)*K*K + ky*K + kx`. |
| `width`, `height` | Input size. The convolution has stride 1 and zero padding, (K-1)/2 pixels before and K/2 after, so its output is the same size. |
| `n_in`, `n_out` | Input channels. Stored output channels after condensation. |
| `ksize` | Filter side: 1, 3, 5 or 7. For a pooling layer, the window side (up to 7). |
| `alpha_log2` | alpha = 1, 2 or 4. |
| `ccp_en`, `ccp_mode` | Turns cross-channel pooling on or off. Selects max, avg or min. |
| `sp_pool` | Applies 2 x 2, stride 2 spatial max pooling to the output block. The output map is W/2 x H/2. |
| `act_shift`, `act_bits` | Activation: 0 if the sum is <= 0, otherwise min(sum >> shift, 2^bits - 1). |
| `pool_only` | Makes the layer a window max-pooling layer with stride 1: output channel c is the maximum over each ksize x ksize window of input channel c. It needs alpha = 1 and cross-channel pooling off. No weights are used. |
| `last` | Marks the final layer. The run ends after this layer. |

Weights are 1 bit each: 1 means +1 and 0 means -1. They are packed 32 to a word,
and weight bit b sits in bit b%32 of word b/32. Pixels are stored one per byte, so an
8-bit input image and 2-bit activations share the same memory format.

## Interface and timing

* Reset is `rst_n`: asynchronous and active low. It clears the control state only.
* Loading: while `busy` is low, the host writes `host_fm_*` (pixels), `host_wm_*`
  (32-weight words) and `host_lp_*` (descriptors). It reads results back through
  `host_fm_re/raddr`, and `host_fm_rdata` follows one clock later.
* Running: a one-clock `start` pulse runs descriptors 0, 1, 2, ... until the
  descriptor marked `last`. At the end, `done` pulses for one clock.
* Cycle cost of one (pass, block, input channel) step, where a pass is the set of
  groups that share the buffer entries: `20+K` clocks to load the tile (one row per
  clock plus one), then `E*K*K + 1` MAC clocks. E is the number of buffer entries in
  use: alpha, or up to 4 with sharing. Each MAC clock does 320 MACs. After the last
  input channel, each group of the pass costs `alpha + 2 + pixels written` clocks
  with pooling on. With pooling off, each of its alpha channels costs
  `3 + pixels written`. The pass then ends with 1 more clock per block.
* Every memory has a one-clock read latency. The feature map read port returns the
  32 pixels starting at any address; the host port sees the first of them.

## Sizes and workloads

The defaults are the published figures:

* 320 cores, arranged as a 16 x 20 block.
* A 4,096 KB feature map memory: 4,194,304 one-byte pixels.
* A weight memory of 495,483 x 32 bits. That is 1,935.5 KB, the size of the alpha = 2
  network, which the published figures round to 1,935 KB.
* Filters up to 7 x 7 and alpha up to 4.

| Network (512 x 512 input) | Weights needed / built | Worst feature-map layer needed / built | Fits |
|---|---|---|---|
| Tiny-YOLOv2 (quantized) | 15,758,256 / 15,855,456 bits | 1,835,008 / 4,194,304 px (layer 1: 3x512x512 in, 16x256x256 out) | yes |
| Condensation-Net alpha = 2 | 15,855,456 / 15,855,456 bits | same as Tiny-YOLOv2 | yes |
| Condensation-Net alpha = 4 | 16,049,856 / 15,855,456 bits | same | no: the weights do not fit |

The feature map column assumes that spatial pooling is fused into the PLPU.
Without that fusion, layer 1 would need 3x512x512 + 16x512x512 pixels, which exceeds
the memory at one byte per pixel. Pooling layers 1 to 5 (2 x 2, stride 2) are fused.
The sixth pooling layer is 2 x 2 with stride 1. It runs as a separate `pool_only`
pass, on 16 x 16 x 512 maps.

## Design choices not taken from the description

* **Block extraction and memory bandwidth.** How blocks leave the feature map memory
  is not specified. Here the memory is built from 32 interleaved byte banks: pixel p
  sits in bank p % 32, so any 32 consecutive pixels come from 32 different banks and
  one read returns a whole tile row (16 + K - 1 <= 22 pixels) from any start address.
  For 3 x 3 filters a tile takes 23 clocks to load. With four buffer entries in
  use, it is followed by 37 MAC clocks. By the cycle formula above, a 512 x 512
  Tiny-YOLOv2 takes about 36.9 M clocks, or 92 ms at 400 MHz. The alpha = 2 network
  takes about 42.8 M clocks, or 107 ms. The published figures are 95 ms and 124 ms.
  The same formula gives exactly the clock counts simulated by `tb_workload`
  (74,213 and 116,933).
  The alpha = 2 network costs 1.16x here, against 1.31x published. Only its first
  four layers are wider, and the deep layers dominate the total. On the first two
  layers alone (the `tb_workload` test), alpha = 2 costs 1.57x the clocks of Tiny-YOLOv2.
  There both layers are widened: four buffer entries hold two groups instead of
  four, so twice as many tile loads and MAC clocks are needed. Write-back costs the
  same in both networks, which keeps the ratio below 2.
* **Block shape and core mapping.** There is one core per output pixel of a
  16 x 20 block. Each core reads its pixel at (x+kx, y+ky) from the tile buffer.
* **Activation** is ReLU followed by a shift and saturation. The description only
  says that the activation can be a quantization function.
* **Min pooling** is built alongside max and average. Max is the operation used for
  face detection.
* **Spatial pooling** (2 x 2, stride 2, max) is done in the PLPU, after
  cross-channel pooling and before write-back. A stride-1 pooling window needs
  a halo, just as a convolution does. So it is done by the convolution cores in
  max mode, as its own layer (`pool_only`). The window starts at the output pixel
  and reaches right and down, and zeros are padded there. Pixels are never
  negative, so the zeros do not change the maximum.
* **Output groups per pass.** The published loop handles one output channel at a
  time. Here the four buffer entries of each core are filled with as many groups as
  fit, so that each tile load serves all of them. The results are identical. Only
  the order of the work changes.
* **One CLPU.** The description mentions the option of several CLPUs working on
  different channels. It is not built.
* The descriptor layout, memory layout, weight encoding, weight order, start/done
  handshake, reset and host ports are all this design's own choices.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_cnet_top` | Runs at full default size. A five-layer network on a 36 x 24 x 3 image covers cross-channel max / avg / min pooling, pooling off, alpha 2 and 4, filters 1/3/5/7, spatial pooling on and off, a 2 x 2 / stride 1 pooling layer, several output groups sharing a block load, padding and overhanging blocks. All outputs are compared with a loop-nest reference model. The test also checks the MAC clock count, which shows 320 MACs per clock. |
| `tb_workload` | Runs the first two layers of Tiny-YOLOv2 and of Condensation-Net (alpha = 2) on a 64 x 64 image. Checks the results and compares the run times. |
| `tb_control_unit` | Compares the exact ordered streams of tile writes, MAC commands and write-backs, and the total clock count. It runs three layers: one with cross-channel pooling, one without, and a pooling layer. |
| `tb_clpu`, `tb_conv_core`, `tb_activation_unit`, `tb_plpu` | Check the datapath units against arithmetic computed in the testbench. |
| `tb_fm_memory`, `tb_weight_memory`, `tb_layer_param_memory` | Check the memories. |

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv -Irtl \
    rtl/cnet_pkg.sv tb/tb_cnet_top.sv --top-module tb_cnet_top -o sim
./obj_dir/sim
```

The full-size `tb_cnet_top` builds in about 20 s and runs in under a second, because
the test network is small. Simulating a full 512 x 512 network is possible in
principle but would take hours: the network needs about 37 M clocks of a 320-lane datapath.
