# FracBNN accelerator in SystemVerilog

A binary neural network (BNN) replaces multiply-accumulate with XNOR and
popcount. It does this by holding weights and activations as single bits.
That makes it cheap on an FPGA, but 1-bit activations cost a lot of accuracy.
FracBNN gives activations two bits, yet computes only with binary
convolutions:

* A *base phase* convolves the most significant bit (MSB) plane of the
  activations with the 1-bit weights.
* A *sparse update phase* convolves the least significant bit (LSB) plane with
  the same weights. It runs only for output features whose base result passed
  a learned threshold.

The input image is also made binary, by a thermometer code. So every
convolution in the network, the first layer included, is XNOR plus popcount.

This repository holds synthesizable RTL for the accelerator that runs such a
network one layer at a time. It also holds self-checking testbenches for every
block and an end-to-end test that runs a small network through the top level.
The default sizes are those of the ImageNet build: 32-bit channel words (B) and
32 output channels in parallel (P).

## 1. Fractional convolution, the arithmetic

A 2-bit activation `a = 2*m + l` is stored as two bit planes, `m` (MSB) and
`l` (LSB). For one output feature:

```
O_MSB = popcount(XNOR(W, X_MSB))           over the whole 3x3 x Cin window
O_LSB = popcount(XNOR(W, X_LSB))
out   = (O_MSB << 1) + O_LSB   if O_MSB > thresh[c]     (updated feature)
      =  O_MSB << 1            otherwise                (kept at 1 bit)
```

`thresh[c]` is a per-output-channel constant loaded with the layer. Most
features are not updated, so the update phase is sparse. The controller exploits
this at pixel granularity:

* For each output pixel, the P lanes of the current output tile are checked.
* If none of them passes its threshold, the pixel's LSB convolution is skipped
  entirely.
* If at least one passes, the LSB words are read once. Only the lanes that
  passed accumulate (`lane_en`).

Worked example (4x4 map, one channel, 3x3 kernel, threshold 4). The base
popcounts of the four outputs are 5, 3, 3 and 8:

* Outputs 1 and 4 pass the threshold. Their LSB popcounts are 6 and 4, so they
  become 2·5+6 = 16 and 2·8+4 = 20.
* Outputs 2 and 3 do not pass. They become 2·3 = 6 each.
* The final outputs are therefore 16, 6, 6, 20.

`tb_frac_conv_engine` uses this example as a directed test.

The input layer has a `binary` mode: base phase only, and `out = O_MSB` with no
shift.

Padding: a tap outside the map contributes no matches (its XNOR-popcount is
masked to 0). This is this design's choice. It is the same as padding the ±1
map with a value that agrees with no weight.

## 2. Thermometer-coded input

An 8-bit pixel `p` becomes `L = ceil(255/R) = 32` bits (R = 8):

* the number of ones is `min(L, floor((p + R/2) / R))`, that is, p/R rounded
  half up;
* the ones are placed at the top bits of the vector.

With R = 8, one colour channel fills exactly one 32-bit word. An RGB pixel is
therefore 3 words, or 96 binary channels, and the input layer loops three
times per pixel.

The encoder (`thermo_encoder`) sits on the host load path. The host writes raw
8-bit pixels (`ld_sel = LD_PIX`, pixel in `ld_data[7:0]`, word address
`pixel*3 + colour`). The encoded word is written into the MSB plane through the
same multiplexer that otherwise carries the quantizer output.

The following are this design's choices:

* the rounding, since the exact rounding rule is not stated;
* the bit order;
* placing the encoder at load time.

## 3. Datapath

| Unit | Module | What it does |
|---|---|---|
| XNOR-popcount | `xnor_popcount` | one B-bit word: `popcount(~(a ^ w))`, masked by `en` |
| PE | `frac_pe` | 9 XNOR-popcounts summed: a full 3x3 window of one word in one cycle |
| Convolution engine | `frac_conv_engine` | P PEs sharing the window, P accumulators, the threshold gate and the `(O_MSB<<1)+O_LSB` combine |
| MSB / LSB planes | `fmap_ram` ×4 | two ping-pong banks per plane, one B-bit word per (pixel, input word), 9 combinational read ports for the window |
| Weight buffer | `fmap_ram` | two banks, one output tile each; entry `word*9 + tap` holds the tap of all P lanes (P·B bits) |
| Popcount buffer | `fmap_ram` | O_MSB of every pixel of the current tile, kept between the two phases |
| BatchNorm + BPReLU | `bn_bprelu` | `y = s1*x + b1; d = y - α; z = d≥0 ? d : β·d; z + γ` |
| Shortcut | `shortcut_bn` | adds the streamed shortcut (if `sc_en`), then a second BatchNorm |
| Quantize & split | `quant_split` | 2-bit quantizer; MSB = sign, LSB the finer step |
| Output buffer | `stream_fifo` | 16-entry valid/ready FIFO toward off-chip memory |
| Average pooling | `avgpool_unit` | adder tree over one tile row per cycle; rows accumulated; divide by k² |
| Classifier | `classifier` | one feature × NCLASS weights per cycle, all class scores accumulated in parallel |
| Control | state machine in `fracbnn_top` | layer schedule below |

Shared types and constants live in `fracbnn_pkg`:

* `B`, `P`, and the counter and fixed-point widths;
* `chan_param_t`, the per-channel constants;
* `layer_cfg_t`, the layer descriptor;
* `ld_sel_e`, the load targets.

### Number formats (this design's choice)

* Popcounts use 16-bit unsigned counters.
* Everything after the convolution is signed Q7.8, 16 bits. Each step
  saturates.
* `chan_param_t` packs, per output channel: `thresh`, `bn1_scale`, `bn1_bias`,
  `alpha`, `beta`, `gamma`, `bn2_scale` and `bn2_bias`. That is 8 × 16 = 128
  bits.

A multiplication is `(a*b) >>> 8`, an arithmetic shift that rounds toward minus
infinity.

The quantizer is `q = clamp(floor(x / 2^QSHIFT) + 2, 0, 3)`, with QSHIFT = 8
(a step of 1.0). It is chosen so that the MSB is exactly the sign of `x`,
which is the activation a plain BNN would use. The LSB refines it. The exact
quantizer of the trained network is not specified, and `QSHIFT` is the knob
to match one.

## 4. Layer schedule and timing

The host writes a `layer_cfg_t`, pulses `start`, and waits for `done`. For a
convolution layer (`op = OP_CONV`):

```
for t in 0 .. cout_tiles-1:                       -- P output channels at a time
    S_WWAIT: until tile t's weights are in its bank (wt_req / wt_ack)
    S_BASE : for each output pixel, for each input word      1 cycle each
                 O_MSB += PE(window MSB words, weights)
             store O_MSB[pixel] in the popcount buffer
    for each output pixel:
        S_UCHK : 1 cycle: compare O_MSB with thresholds -> lane mask
        S_UPD  : Cin/B cycles, only if some lane passed     (skipped otherwise)
        S_POST : 1 cycle when sc_* has a beat (if sc_en) and the FIFO has room:
                 BN, BPReLU, + shortcut, BN, push to out_*, quantize,
                 write MSB/LSB word t of the pixel into the other bank
```

Each tile therefore costs:

```
base cycles   = Hout · Wout · Cin/B
update cycles = (pixels with any lane updated) · Cin/B
extra cycles  = about 2 · Hout · Wout (check and output), plus stalls
```

The testbench checks the first two counts exactly.

The output size is `Hout = (H-1)/stride + 1`. Window taps sit at offsets
-1, 0 and +1 around `stride·oy`. A 1x1 layer (`k3 = 0`) enables the centre tap
only. Layers alternate `rd_bank`: a layer reads bank `rd_bank` and writes the
next layer's planes into `!rd_bank`, at word address `pixel·cout_tiles + t`.

### Weight double buffering

* Weights of tile `t` go into weight bank `t mod 2`.
* `wt_tile` always shows the tile being computed (or waited for). Once
  `wt_tile >= t-1`, bank `t mod 2` is free. The host may then write tile `t`
  into it while tile `t-1` computes, and pulse `wt_ack` for one cycle when it
  is complete.
* Each acknowledge counts one more tile as loaded, in order, starting with
  tile 0 after `start`. Weight writes are the only host writes allowed while
  `busy`, and an assertion enforces it.
* If tile `t` has not been acknowledged when it is needed, the controller
  waits in `S_WWAIT` with `wt_req` high.

### Streams

Every stream is valid/ready, and a beat moves on a clock edge where both are
high:

* `sc_*` carries P Q7.8 shortcuts per beat, in output order: tile by
  tile, and within a tile pixel by pixel in raster order.
* `out_*` carries the P post-processed features of every (pixel, tile).
* `cw_*` carries one row of NCLASS 8-bit classifier weights.

Assertions check that `out_data` stays stable while stalled, and that the
configuration is legal.

### Pooling and classifier

* **`OP_POOL`.** The controller reads `k` beats per tile row from `sc_*`,
  `k` rows per tile, with P channels per beat. It produces `pool_n` averaged
  vectors, streams them to `out_*`, and stores them as classifier features:
  vector n becomes features `n·P .. n·P+P-1`.
* **`OP_FC`.** The controller clears the scores, then takes `fc_nfeat` weight
  rows from `cw_*`. Each row costs one cycle and updates all NCLASS
  accumulators. The scores are read through `score_addr` / `score_data`.

The pooling division truncates toward zero. `k` runs from 1 to 8:

* 2 for a downsampling shortcut;
* 7 for the global pool of an ImageNet network;
* 8 for the global pool of a CIFAR-10 ResNet.

## 5. Host interface summary

| `ld_sel` | Target | Address | Data | Allowed |
|---|---|---|---|---|
| `LD_WGT` | weight bank `ld_bank` | `word·9 + tap` | P·B bits, lane p at `[p·B +: B]` | idle, or busy for the requested tile |
| `LD_PRM` | channel constants | output channel | `chan_param_t` in `[127:0]` | idle |
| `LD_PIX` | MSB plane `ld_bank`, encoded | `pixel·3 + colour` | pixel in `[7:0]` | idle |
| `LD_MSB` / `LD_LSB` | raw plane word | `pixel·cinw + word` | `[B-1:0]` | idle |

The `layer_cfg_t` fields are:

| Field | Meaning |
|---|---|
| `op` | layer type: `OP_CONV`, `OP_POOL` or `OP_FC` |
| `binary` | base phase only (the input layer) |
| `k3` | 3x3 window if set, 1x1 if clear |
| `stride2` | stride 2 |
| `sc_en` | add the streamed shortcut |
| `rd_bank` | the ping-pong bank this layer reads |
| `h`, `w` | input height and width, up to 255 |
| `cinw` | input words per pixel, 1 to 32 |
| `cout_tiles` | output tiles, 1 to 32 |
| `pool_k`, `pool_n` | pooling tile size and number of pooled vectors |
| `fc_nfeat` | classifier input features |

## 6. Capacity at the default parameters

| Resource | Size |
|---|---|
| MSB/LSB plane | 8192 × 32-bit words per bank and plane (four instances, 1 Mbit) |
| Output pixels per layer pass | 1024 (popcount buffer) |
| Input channels | up to 1024 (32 words) |
| Output channels | up to 1024 (32 tiles) |
| Classifier | 1024 features × 1000 classes |

A MobileNet-style ImageNet network fits whole from the 28×28 stages down
(28×28×256 channels = 6272 words). The 224×224 input layer and the 112×112
and 56×56 stages do not fit in one pass. The host has to cut them into row
strips with a one-row halo, and discard the strip-edge rows. That strip
control is not part of this RTL. The paper's own ImageNet build also keeps
feature maps in DDR between layers.

A CIFAR-10 ResNet-20 (32×32 input, 16/32/64 channels, 8×8 global pool,
10 classes) fits at these defaults. Layers narrower than 32 channels use one
word, and the unused lanes are held constant by their parameters.

## 7. Where this RTL follows the source design and where it does not

### Taken from the source design

* Binary convolution as XNOR plus popcount on B-bit packed channel words, with
  B = 32, P = 32 and a fully unrolled 3x3 window.
* The two-phase fractional convolution and its per-channel threshold.
* The thermometer input with R = 8: 32 bits per colour and 96 channels, three
  iterations per pixel.
* BatchNorm → biased PReLU → shortcut → BatchNorm, then 2-bit quantization and
  the MSB/LSB split.
* Average pooling with an adder tree along one dimension and rows accumulated
  over cycles.
* A class-parallel integer classifier.
* Double-buffered weights.
* The block structure: MSB, LSB, weight and popcount buffers, the input-fmap
  multiplexer, the shortcut path, and quantize & split into the output buffer.

### This design's own choices

* All widths and number formats.
* The quantizer and the padding convention.
* Rounding in the thermometer code and in pooling.
* The host interfaces, which stand in for AXI/DMA.
* The buffer depths.
* One layer per `start`.
* Pixel-granular skipping of the update phase.

### Not built

* The CPU, the DDR memory and the AXI/DMA fabric. The testbench plays their
  part.
* The separate, fully unrolled CIFAR-10 accelerator with B = 64. The same RTL
  with `B` changed in the package is a different, tiled machine.
* Host-side row-strip tiling for large maps.
* Fusing channel duplication of a downsampling block. This is left to the order
  in which the host streams shortcuts: the same shortcut words are sent for
  both halves.

## 8. Verification

Each block has a self-checking testbench in `tb/`. It compares the block
against a reference computed in the testbench and prints
`TB_RESULT checks=N failures=M`:

| Testbench | Checks |
|---|---|
| `tb_thermo_encoder` | all 256 pixel values for R = 8 and R = 32 |
| `tb_xnor_popcount`, `tb_frac_pe` | random words, masks, edge cases |
| `tb_frac_conv_engine` | the worked example above, plus random multi-word accumulation with lane gating and binary mode |
| `tb_fmap_ram` | random write/read traffic on all ports |
| `tb_bn_bprelu`, `tb_shortcut_bn`, `tb_quant_split` | random values against an integer model, including saturation and the slope sign |
| `tb_stream_fifo` | random push/pop with back-pressure, order and full/empty |
| `tb_avgpool_unit` | every k from 1 to 8, two lanes, latency |
| `tb_classifier` | signed dot products over many classes, clear priority |
| `tb_fracbnn_top` | end to end at the default parameters |

`tb_fracbnn_top` uses no parameter overrides. It runs five layers, and every
output beat is checked against a model written in the testbench:

1. a binary stride-2 input layer on a thermometer-coded 6×6 RGB image;
2. a 3×3 fractional layer with shortcut;
3. a 1×1 fractional layer in which one tile never updates;
4. a 3×3 global pool;
5. a 1000-class classifier.

It also checks the base-phase and update-phase cycle counts. It counts 15
mechanisms and fails if any never happened:

* the binary layer and the thermometer load;
* updates and skipped updates;
* the weight wait and the double-buffered weight load;
* output stalls;
* stride 2 and 1×1;
* the shortcut;
* both ping-pong directions;
* pooling and the classifier.

To run it with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/fracbnn_pkg.sv rtl/*.sv \
          tb/tb_fracbnn_top.sv --top-module tb_fracbnn_top -Mdir obj
obj/Vtb_fracbnn_top +verilator+rand+reset+2
```

Any other testbench runs the same way, with its name in place of
`tb_fracbnn_top`. The random reset value checks that nothing that is read
depends on an uninitialised register.

### Notes for changing the design

* `P` must equal `B`, so that one output tile is one word of the next layer's
  planes.
* The `L = 32` thermometer word must fit in `B`.
* The memories are plain arrays with combinational read. On an FPGA they map
  to distributed RAM or need a read register. For block RAM, a one-cycle read
  latency would have to be added to the window fetch.
