# AH-CNN: an adaptive, hierarchical CNN accelerator with a swappable convolution region

Many images can be classified correctly by a small network. Only the hard
ones need a deep one. AH-CNN makes use of this. A quantised ResNet-style
classifier for 32x32 RGB images is cut into three convolution parts of growing
depth. After each part, a shared classifier head produces a label and a
confidence. A decision layer then either accepts the label or sends the image
on to the next part. The FPGA is too small to hold all three parts at once.
They therefore share one reconfigurable region, and the host swaps them by
partial reconfiguration between passes over a batch of images.

This RTL implements everything that runs on the FPGA fabric: the three
convolution parts, the shared pooling and classifier (Part 4), the confidence
computation, the decision layer, and the decoupled reconfigurable region. The
host processor, the DMA engine, the DRAM and the device's configuration port
are not part of it. They appear as ports of the top and are modelled in the
testbenches.

## The network as built

| part | layers | output (side x side x channels) | weights | role |
|------|--------|---------------------------------|---------|------|
| 1 | Conv1, Q-Conv2..5 | 32x32x16 | Conv1 8-bit; others 1-bit | shallow branch, always run |
| 2 | Q-Conv6 (stride 2), Q-Conv7..9 | 16x16x32 | 1-bit | first deep branch |
| 3 | Q-Conv10 (stride 2), Q-Conv11..13 | 8x8x64 | 1-bit | deepest branch |
| 4 | global average pool, fully connected | one logit per class | 1-bit | shared head, static |

All convolutions are 3x3 with zero padding of 1. Activations are 5-bit
unsigned. A binary weight bit of 1 means +1 and 0 means -1. After each layer
the accumulator is shifted right arithmetically by a per-layer amount, clipped
below at 0 (ReLU) and clamped above at 31.

These parts are taken from the original design: the layer names and channel
counts, the 5-bit activations, the 1-bit weights, the three-way split with a
shared head, and the decision rule.

These parts are this design's own choices:
- the 3x3 kernel and where the stride-2 layers sit (inferred from the map sides 32/16/8);
- the shift-and-clamp requantisation, which stands in for batch normalisation;
- the 8-bit first layer;
- every fixed-point format.

Residual shortcuts are not built. The original is "ResNet-based", but its
network diagram shows no shortcuts.

## Inference flow and who does what

For a batch, the host does the following (this is what `tb/ahcnn_top_tb.sv` does):

1. It configures the region with Part 1. It streams every image in and keeps
   each image's Part 1 output map, which the accelerator streams back out. It
   collects each image's result.
2. It configures Part 2. It streams in the kept Part 1 maps of the images whose
   result had `deep = 1`, keeps their Part 2 maps, and collects the results.
3. It configures Part 3 and streams in the kept Part 2 maps of the images still
   marked `deep`. Their Part 3 results are final. Part 3's own map is not
   streamed out, because nothing uses it.

Batching makes the reconfiguration time small per image, because each part is
loaded once per batch rather than once per image.

For one image the accelerator works strictly in order, with no overlap between
images:

```
s_* stream --> reconfig_region (active part) --+--> pool_fc (Part 4) --> confidence_unit --> decision_gate --> res_*
                                                +--> m_* stream (kept map; not for Part 3)
```

## The decision layer

The classifier head gives logits `z` (signed, 3 fractional bits). From them,
`confidence_unit` derives three results:
- the label: the argmax, with ties going to the lowest index;
- the confidence `beta = max softmax(z) = 1 / sum_k exp(z_k - z_max)`, unsigned Q0.16;
- `hp_hit`: whether any class in the high-priority mask S_HP ranks among the top `n`.

`decision_gate` then forms the trigger point:

    Gamma = table[branch][Lambda]  (+ Theta if hp_hit, saturating)
    deep  = (branch is Part 1 or Part 2) and beta <= Gamma

`Lambda` is the desired-accuracy setting, with 4 levels. The host fills the
table from the mean and spread of the confidences it measured on training data
for each branch. A higher Gamma sends more images deeper. `Theta` raises Gamma
for images in which a priority class shows up, so those images are more likely
to get the deeper, more accurate treatment.

The confidence is computed with no exponential hardware. Each term is
evaluated as `2^(-d*log2 e)`:
- `log2 e` is approximated as 369/256;
- the exponent is rounded to 1/32;
- the fractional part `f` indexes a 32-entry table holding `round(65536 * 2^(-f/32))`;
- the integer part becomes a right shift.

The sum is inverted by a 17-step restoring division. Against exact
floating-point softmax the error in `beta` is below 0.01. The unit needs
2n + 19 cycles for n classes.

## Convolution hardware

`conv_engine` computes one layer tap-serially. Each cycle it reads one input
pixel word (all channels), and the weight word for one kernel tap and all
(output, input) channel pairs. It adds IC signed terms into each of OC
accumulators. An output pixel therefore takes 9 cycles, and a layer takes
9·side² + 2 cycles (plus one sequencer cycle).

`conv_part` wraps one engine with three memories:
- an input buffer;
- two ping-pong buffers A and B: layer 0 writes A, layer 1 writes B, and so on;
- the weight memory.

Part 1 has a second, small engine for the 8-bit Conv1. Parts 2 and 3 feed
their half-width input into the binary engine with the unused channels at
zero, which contributes nothing. Measured cycles per image, from the first
input word to the result, at 100 MHz:

| part | cycles | time |
|------|--------|------|
| Part 1 | ≈49,600 | 0.50 ms |
| Part 2 | ≈10,900 | 0.11 ms |
| Part 3 | ≈2,750 | 0.03 ms |

The original reports 2 ms per part. The end-to-end test checks that every
part stays under 200,000 cycles.

Memory word layouts:
- Channel `c` of a pixel word sits at bits `[c*W +: W]`: W = 8 for pixels, 5 for activations.
- The weight of (oc, ic) sits at `[(oc*IC + ic)*WW +: WW]`.
- Binary layer `l` of a part uses weight words `9l .. 9l+8`, one per tap, with (ky, kx) in raster order.

## Reconfiguration

`reconfig_region` instantiates all three parts. `rm_select` names the one that
is "configured". The other two are held in reset and cannot be seen from
outside, which is how a partition is usually modelled in simulation. While
`rm_decouple` is high:
- all handshakes of the region are forced inactive;
- the part is held in reset.

The part's weights and shifts are not reset. They stand for the bitstream
contents and are written over the configuration bus during the decoupled
window. An assertion flags decoupling while an image is still inside the
region.

## Interfaces of `ahcnn_top`

| port | meaning |
|------|---------|
| `cfg_we, cfg_addr[23:0], cfg_wdata[31:0]` | register/memory writes. `cfg_addr[23:20]`: 0..2 = Part 1..3 (`[19:18]`: 0 layer shift, 1 binary weights, 2 Conv1 weights; word `[17:8]`, 32-bit chunk `[7:0]`); 4 = Part 4 (`[19:18]`=0 weights: branch `[17:16]`, class `[15:8]`, half `[0]`; `[19:18]`=1 shift of branch `[1:0]`); 5 = decision layer (0x00-0x07 Gamma[branch][Lambda], 0x08 Theta, 0x09 Lambda, 0x0A top-n, 0x0B classes in use, 0x10-0x13 priority mask) |
| `rm_select[1:0], rm_decouple` | configured part and reconfiguration in progress |
| `s_valid/s_ready/s_data[319:0]` | input map: 1024 RGB pixels (Part 1), 1024 16-channel words (Part 2) or 256 32-channel words (Part 3), raster order |
| `m_valid/m_ready/m_data/m_last` | output map of Parts 1 and 2, to be kept |
| `res_valid/res_ready/res` | `result_t`: branch, label, beta, hp_hit, deep. The next image is accepted after the result has been taken |

Parameter: `NUM_CLASSES` (default 100). Fewer classes (10 for CIFAR-10 or
SVHN) are selected at run time via register 0x0B.

## How far to trust it

Each block has a self-checking testbench in `tb/`. Every testbench compares
against `tb/ahcnn_ref_pkg.sv`, a plain integer/real model of the network that
uses real `exp` for the softmax. The tests cover the following:
- every output word of each part;
- the logits;
- labels, confidences within 0.01, and the priority flag;
- the decision rule, including its equality edge cases;
- isolation of the region while it is decoupled;
- the stated cycle counts.

`ahcnn_top_tb` runs the whole design at default size. Six images go through
all three passes with three reconfigurations. The testbench places the trigger
points so that images stop at each branch, and it forces one decision through
the priority boost.

Weights and images are random. The end-to-end test therefore shows that the
hardware computes the network it was given. It says nothing about
classification accuracy: no trained weights are included.

Known departures from the original design:
- No residual shortcuts.
- No batch normalisation; a per-layer shift stands in for it.
- The original cores were generated by HLS, and their internal structure is
  unknown. The engine here is a new design and is faster per part than the
  reported figures.
- The confidence and decision logic is in hardware. The original may have run
  it in software.
- Configuration time and the bitstream loader are not modelled beyond a
  decoupled window.

## Simulating

Each testbench is standalone. For example, for the whole design:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/ahcnn_pkg.sv tb/ahcnn_ref_pkg.sv rtl/conv_engine.sv rtl/conv_part.sv \
  rtl/reconfig_region.sv rtl/pool_fc.sv rtl/confidence_unit.sv \
  rtl/decision_gate.sv rtl/ahcnn_top.sv tb/ahcnn_top_tb.sv \
  --top-module ahcnn_top_tb -o sim && obj_dir/sim
```

It prints one line per image and pass, then a mechanism summary, and ends with
`TB_RESULT checks=N failures=0`. It takes under a minute to build and a few
seconds to run. For a block, list the package, the reference package, the
block's file and its submodules, and the block's testbench.
