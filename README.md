# NeuroBlend-20 inference engine in SystemVerilog

NeuroBlend makes a binary neural network accurate without giving up its cheap
arithmetic. Each residual block ("blend block") runs its expensive 3x3
convolution in binary: ±1 activations, ±1 weights, XNOR and popcount. Only the
cheap paths stay in 16-bit fixed point: the skip path with its 1x1
convolution, the batch normalizations and PReLU, and the residual sum. This
RTL implements an inference engine for NeuroBlend-20. That network is a
ResNet-20-shaped model for 32x32 CIFAR-10 images: nine blend blocks in three
stages of 16, 32 and 64 channels, then global average pooling and a 10-way
linear layer. Every block has its own hardware, as in a layer-per-engine
streaming accelerator.

All arithmetic is bit-exact integer arithmetic. The testbenches check it
against independent integer models.

## 1. The blend block and what the compiler folds away

As trained, a blend block is:

```
            x (16-bit, already batch-normalized by the previous block)
            |-------------------------------.
          Sign                        [AvgPool 2x2]        (downsample only)
     3x3 binary conv (stride 1|2)     [1x1 fixed-point conv]
           BN                          [BN]
          PReLU                             |
            +-------------------------------'
           BN   (block output, no learned scale/shift)
```

Before inference, three foldings turn this into what the hardware runs:

* **BN then Sign becomes one threshold per channel.** The output BN of
  block k-1 followed by the Sign of block k is replaced by a comparison,
  `bit = (x > T[c])`. No multiplier is left on the binary path's input.
* **BN, 1x1 conv and BN become one 1x1 conv.** On a downsample skip path, the
  previous block's output BN, the 1x1 conv and the skip BN merge into one 1x1
  conv with new weights `w''` and biases `b''`. The averaging commutes with
  the affine BN, so that BN can move past the pooling.
* **The BN after the binary conv becomes an affine map.** It is kept, but as
  `a*x + b` per channel, with `a` and `b` precomputed.

The previous block's output BN can only be folded when the next block has a
skip convolution to absorb it. A block followed by an identity-skip block
therefore applies its output BN itself (`OUT_BN = 1`). Blocks 2 and 5 are
followed by downsample blocks and leave it out (`OUT_BN = 0`). The
thresholds, weights and BN values loaded into the engine are the folded ones.
Computing them (Algorithm-1 statistics, `w'' = γ''·γ'·w / (σ'σ'')`, etc.) is
offline work and is not part of this RTL.

## 2. Number formats

| quantity | format |
|---|---|
| activations, BN scale/shift, PReLU slope, skip-conv weights and biases, linear weights | 16-bit signed, Q8.8 |
| binary activations and weights | 1 bit, `1 = +1`, `0 = -1`, packed along channels into 48-bit words |
| binary conv sums | 16-bit signed integers (range ±576 here), no requantization |
| skip-conv partial sums | 40-bit accumulators in the array |
| logits | 32-bit signed, Q.8 |

Every Q8.8 result is saturated to 16 bits. Right shifts are arithmetic (they
round toward minus infinity).

## 3. Datapath of one block (`blend_block`)

A `start` pulse runs four phases one after another. The state machine is in
`blend_block.sv`.

1. **BIN.** The block reads the input map 16 channels per cycle,
   thresholds it (`th_unit`) and stores the bits in a binary map memory. Each
   pixel is `NW = ceil(CIN/48)` words of 48 bits.
2. **POOL** (downsample blocks only). For each output pixel and each
   16-channel group, four reads feed `avg_pool`. The 2x2 averages go into a
   pooled-vector memory.
3. **SKIP** (downsample blocks only). For each tile of 32 output channels,
   the tile's weights are copied into the 32x32 systolic array
   (`fpnn_conv1x1` → `fp_systolic_array` → `fp_pe`). All pooled vectors then
   stream through it, one per cycle. The outputs, with bias added and
   saturated, fill the skip buffer. A 64-channel block takes two tiles.
4. **MAIN.** `bnn_conv3x3` produces 16 output-channel sums per beat. Each
   beat passes through `bn_prelu` (BN and PReLU), then `residual_add`, which
   takes the identity input or the skip buffer and saturates. With
   `OUT_BN = 1`, a second `bn_prelu` with PReLU switched off then acts as the
   output BN. The result goes to the block's output map.

### Binary convolution (`bnn_conv3x3`, `bmac`)

One BMAC computes `dot = 2·popcount(~(a ^ w) & mask) − popcount(mask)`. That
is 48 XNORs and a popcount, i.e. the ±1 dot product of the bits whose mask is
1. On a Xilinx device the 48-bit XNOR is meant to be one DSP48E2 logic
operation; here it is written as plain logic.

The engine has 16 BMACs, one per output channel of a group. Per cycle it
processes one (tap, word) pair. The loop order is pixel → group → tap →
word. An output group therefore takes `9·NW` cycles, and a 16-channel 32x32
layer takes 9,216 cycles. The mask handles two cases:

* taps outside the image (padding of 1) are masked out entirely;
* channel bits at or above `CIN` in the last word are masked.

Neither case contributes to the sum.

### Systolic array (`fp_systolic_array`)

The array is weight-stationary. Row i carries input channel i and column j
produces output channel j. Activations move right and partial sums move
down, one PE per cycle. Triangular skew registers at the inputs and deskew
registers at the outputs realign the data. A vector entering the array comes
out `ROWS + COLS − 1 = 63` cycles later, and one vector can enter every
cycle.

## 4. Top level (`neuroblend_top`)

| block | in → out map | channels | skip | output BN |
|---|---|---|---|---|
| 0–2 | 32x32 → 32x32 | 16 → 16 | identity | applied (0, 1), folded (2) |
| 3 | 32x32 → 16x16 | 16 → 32 | avgpool + 1x1 conv | applied |
| 4–5 | 16x16 | 32 → 32 | identity | applied (4), folded (5) |
| 6 | 16x16 → 8x8 | 32 → 64 | avgpool + 1x1 conv (2 tiles) | applied |
| 7–8 | 8x8 | 64 → 64 | identity | applied |
| head | 8x8 → 1 | 64 → 10 | global avgpool + linear layer | – |

Each block reads its predecessor's output map through a combinational read
port. Address `pixel·C/16 + group` returns 16 channels.

Interface:

* `cfg` (a `cfg_wr_t` struct from `nb_pkg`) writes every parameter. Its
  fields are `we`, `blk` (block 0–8), `sel` (which table) and `addr`, plus up
  to 48 data bits. The address layout of each table is listed in `nb_pkg.sv`.
* `in_we/in_waddr/in_wdata` load the input map (16 channels per word).
* `start` runs one frame. `done` pulses once the `logit` outputs are valid.
* `sat_evt[i]` flags a saturated residual sum in block i.

Timing at the default size: one frame takes 61,583 cycles from `start` to
`done`, about 180 µs at 342 MHz.

## 5. Departures from the described design

* **No first layer.** The network's first layer is a 16-bit 3x3 convolution
  of the RGB image. It has no engine here: the top takes its 32x32x16 output
  as input.
* **Frames are not overlapped.** Each block has its own hardware, but a block
  starts only when its predecessor has finished one frame. Overlapping frames
  would need double-buffered maps.
* **Memories are read combinationally** (LUT-RAM style). Block RAMs with
  registered reads would add a pipeline stage to every read path.
* **BMAC count.** How many BMACs a binary engine holds is not specified; 16
  is used, to match the 16-lane joint domain.
* **Threshold comparison.** The comparison is signed and strict (`x > T`).
  The description calls it an unsigned comparison, but the activations here
  are signed. A channel whose folded BN scale is negative needs its binary
  weights inverted by the compiler. The hardware has no per-channel
  direction bit.
* **Pooling and stride on the skip path.** The skip path is drawn as average
  pooling followed by a stride-2 1x1 conv. Here it is 2x2 pooling with
  stride 2 followed by a stride-1 1x1 conv, which gives the same result.
* **Binary padding.** Padding taps of the binary convolution are skipped
  rather than fed a ±1 value.
* **BN-PReLU-BN.** `bn_prelu` supports an optional second BN, but no block
  uses it.
* **Not built:** binary max pooling (an OR of the window), which no layer of
  this network uses, and the BlendMixer/MLP-Mixer datapath (transposes and
  binary fully connected layers).

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench and ends with a
`TB_RESULT checks=N failures=M` line:

* Unit tests (`tb_bmac`, `tb_th_unit`, `tb_bn_prelu`, `tb_residual_add`,
  `tb_avg_pool`, `tb_fp_pe`) use random and corner-case values.
* `tb_fp_systolic_array` and `tb_fpnn_conv1x1` also check latency and
  back-to-back streaming. The latter covers two tiles.
* `tb_bnn_conv3x3` checks stride 1 and 2, one and two words per pixel, and
  beat timing.
* `tb_linear_layer` and `tb_classifier_head` check the head.
* `tb_blend_block` tests a downsample block and a normal block, checking
  every output value and the count of saturated groups.
* `tb_neuroblend_top` (8x8 input) and `tb_neuroblend_full` (32x32, all
  defaults) share `nb_top_driver`. The driver loads a random network, runs
  one frame and compares all 10 logits and the per-block saturation counts
  with an integer model of the network. It also fails if any mechanism never
  occurred: downsample and identity skips, two-tile skip conv, folded and
  applied output BN, the PReLU negative branch, saturation, padding, and a
  partly used 48-bit word.

Simulating with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/nb_pkg.sv rtl/*.sv \
          tb/nb_top_driver.sv tb/tb_neuroblend_full.sv --top-module tb_neuroblend_full
./obj_dir/Vtb_neuroblend_full
```

For a unit test, replace the last two files with `tb/<testbench>.sv` and its
name. Every module compiles as a top on its own. The full-size frame
simulates in a few seconds.

The tests establish functional, bit-exact behaviour of this RTL. They do not
show that the network's accuracy figures are reproduced; that depends on
trained, folded parameters, which are not part of this design.
