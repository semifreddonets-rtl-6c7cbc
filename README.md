# SemifreddoNet accelerator in SystemVerilog

A camera-side CNN accelerator gets cheap when its network is fixed. If every
layer, shape and weight is known when the chip is made, each weight is a
constant and each multiplier shrinks to a few adders, or vanishes when the
weight is zero. But a fully fixed network cannot learn a new task.
SemifreddoNets ("half-frozen" networks) split the difference:

* a **frozen core**, a full-depth backbone with hard-wired weights, runs next to
* **two small trainable cores** with the same layer shapes but fewer layers,
  whose weights sit in registers and are loaded per task.

After each stage, every trainable core mixes in the frozen core's features
channel by channel, `y = a*x_frozen + (1-a)*x_trainable`, with a loadable
blend factor `a` per channel. An optional **core shuffle** trades half of the
channels between the two trainable cores, so they act as one wider network.
A small **model head** (a 1x1 convolution with up to 131,072 loadable weights,
optional global average pooling and a piecewise-linear activation) turns the
final feature maps into task outputs without a host processor.

Nothing is time-multiplexed. Every layer is its own hardware, and the image
streams through all of them at one pixel per clock. This RTL implements that
whole pipeline for a 640x480 RGB input.

## The network as built

Each core has the same stage layout (paper Table 1). The frozen core runs
every listed block; a trainable core runs only the first block of each stage.

| stage | input map | first block | frozen-only repeats | output map |
|---|---|---|---|---|
| stem | 640x480x3 | 3x3 conv, stride 2 | – | 320x240x32 |
| module 1 | 320x240x32 | downscaling block | 3 regular | 160x120x64 |
| module 2 | 160x120x64 | downscaling block | 3 regular | 80x60x128 |
| module 3 | 80x60x128 | regular block | 3 regular | 80x60x128 |
| module 4 | 80x60x128 | downscaling block | 3 regular | 40x30x256 |
| head | 40x30x(256+256) | 1x1 conv, pooling, activation | – | up to 512 values |

The blocks are simplified ShuffleNetV2 units:

* **Regular block** (`sf_regular_block`):
  * channels `[0, C/2)` pass unchanged;
  * channels `[C/2, C)` go through a depthwise 3x3 conv + BN, then a 1x1 conv + BN + ReLU;
  * the halves are interleaved: `out[2k] = bypass[k]`, `out[2k+1] = branch[k]`.
* **Downscaling block** (`sf_down_block`):
  * two branches both see all channels, each a stride-2 depthwise 3x3 + BN, then 1x1 + BN + ReLU;
  * the branches are interleaved, which doubles the channel count.

The first 1x1 convolution of the original ShuffleNetV2 unit is dropped, as the
paper does to save area. All values are 8-bit signed, and accumulators are 32 bits.

Batch norm is folded into an integer per-channel scale and bias with a shared
shift: `y = sat8((acc*scale + bias) >>> shift)`. Scale, bias and shift are
loadable in the frozen core too, because the paper keeps the frozen core's BN
parameters trainable.

As built, the frozen core has 137,152 weights (the paper gives 140K) and each
trainable core has 52,576 weights in registers. With BN and blend factors,
that comes to about 55K per trainable core (the paper gives 60K).

### Frozen weights

The trained weights are not published. `sf_pkg::frozen_weight(seed, a, b)`
therefore derives each hard-wired weight from a hash of a per-layer seed and
the weight's indices:
* a quarter of the results are zero;
* the rest lie in [-32, 31].

Every convolution calls this function in constant context when
`FROZEN = 1`, so synthesis sees constants. To put in real weights, replace
the function body with a lookup of trained values; no other file changes.
Seeds: the frozen stem uses 1000. In module `m` (1 to 4), the first block
uses `16m` and the repeat `k` uses `16m+k`. Inside a block, the depthwise and
pointwise layers derive their own seeds (see `sf_regular_block` and
`sf_down_block`).

## Streaming 3x3 windows: the part that sets all timing

Every 3x3 convolution (stem, each depthwise layer) sits behind `sf_window3x3`,
which turns a raster pixel stream into 3x3 neighbourhoods with zero padding.

* It walks a grid of **(H+1) x (W+1)** positions per frame.
  * A real position (row < H, column < W) takes one pixel from a small input FIFO of 8 entries.
  * Column W and row H are **virtual positions**. They take a cycle each, consume nothing and feed zeros. They supply the right and bottom padding and flush the last row, so a frame completes without waiting for the next one.
* Two line buffers hold the previous two rows. After position (R, C), the window centred on (R-1, C-1) is complete.
* With stride 2, only centres at even row and column are emitted. The output is ceil(W/2) x ceil(H/2).

Three consequences:

1. **Blanking rule.** The stream must leave one idle cycle after every line
   and W+1 idle cycles after each frame, because the virtual positions need
   them. At 640x480 a frame therefore takes 481 x 641 = 308,321 cycles, and
   200 frames/s needs a 62 MHz clock (the paper gives no clock frequency).
   Violations set a sticky `overflow` flag.
2. **Latency is one row of the block's own input.** A block's output row r
   needs input row r+1, so each 3x3 layer delays the stream by one of its
   input rows. Deep in the network one row is many image lines:
   * 16 image lines in module 4's repeats;
   * 131 image lines in total along the frozen path, given by the formula 23 + 36*N_REP.
3. **Frame-end drain.** The virtual rows are processed at full clock speed,
   so whatever the pipeline holds when the last pixel enters leaves in a
   short burst (see the head buffer below).

The convolutions (`sf_dw_conv`, `sf_pw_conv`, `sf_stem_conv`) compute the
whole pixel in one cycle: all channels and all taps in parallel. The stage
latencies are:
* depthwise: window plus 1 cycle MAC plus 1 cycle BN;
* pointwise: 2 cycles.

## Semifreddo module: keeping three cores in step

`sf_semifreddo_module` holds one stage for all three cores. It has the most
subtle timing in the design.

* The frozen core's input of module s+1 has passed through module s's three
  repeated blocks. The trainable cores' input has not. So trainable pixels
  arrive earlier, by about three rows of the module's input.
* A **core-sync FIFO** (`sf_fifo`, depth `N_REP*(W+24)+16`) holds both
  trainable cores' pixels. It is popped exactly when a frozen pixel enters
  (through one register, so a same-cycle arrival never underflows).
* From that point the frozen first block and both trainable blocks get the
  same pixel in the same cycle. Their pipelines are identical, so their
  outputs also coincide. An assertion checks this lock step.
* The **alpha blend** (`sf_alpha_blend`) takes the frozen first block's
  output as `x_f`.
  * The paper defines `a = sigmoid(w)`. Here the sigmoid is applied when the value is loaded: the register holds `a` directly as a 9-bit fraction of 256 (0 to 256 inclusive).
  * `y = (a*x_f + (256-a)*x_t + 128) >>> 8`.
  * Reset gives a = 0, a purely trainable path.
* The **core shuffle** (`sf_core_shuffle`) then swaps channels `[C/2, C)`
  between trainable cores 1 and 2 when `shuffle_en` is set.
* The frozen stream continues through the N_REP repeated regular blocks and
  leaves as `f_out`.

The `error` output collects the sticky FIFO overflow and underflow flags of
the blocks and of the sync FIFO, plus any cycle in which the three first
blocks are out of lock step.

## Model head

`sf_model_head` is a 1x1 convolution over the concatenated final maps of both
trainable cores (512 channels).

* **Weights.** The weight memory has 512 rows x 256 lanes = 131,072 weights, the paper's limit. Row o holds output o's weights.
* **Groups.** With `G = 2^g_log2` groups:
  * each group sees `512/G` consecutive input channels, at most 256;
  * it produces `2^opg_log2` consecutive outputs.

  With G = 2, group 0 reads core 1 and group 1 reads core 2. That gives the
  paper's example: 256 outputs from each core, 2 x 256 x 256 weights.
* **Rate.** One output per cycle: `y = sat8((dot + bias[o]) >>> shift)`. A head pixel with n_out outputs takes n_out cycles.
* **Pooling.** Global average pooling is a running sum per output. At the frame's last pixel, each sum is scaled by `round(2^24/(W*H)) >>> 24` and sent out, tagged `pooled`. Pooling is enabled **per group** by `pool_mask`, so one group can classify the whole image while the other gives per-pixel (segmentation) outputs in the same frame.
* **Activation.** `sf_pwl_act` is an 8-segment piecewise-linear function:
  * each segment has a breakpoint, a Q4.4 slope and an intercept;
  * a value uses the last segment whose breakpoint is at most the value;
  * it resets to the identity and can be bypassed.

### Rate budget and the head's input buffer

At 640x480 the head receives 40 pixels per 16 image lines, which is
16 x 641 = 10,256 cycles per head line. With n_out = 256 the head needs
40 x 256 = 10,240 cycles, so it is busy 99.8% of the time. It keeps up only
because its input is buffered:

* Within a frame, a whole head line arrives during one image line.
* At the end of a frame, the drain described above delivers, in a burst, the head lines that the pipeline's 131-line lag still held, about 9 of them.

`sf_top` therefore sizes the head's input FIFO at `(ceil(LAG/16)+1)` head
lines, which is 400 pixels of 512 bytes at the defaults. The head works off
the backlog while the next frame starts. The testbench checks this case
directly (below). If the buffer overflows, the pixel is dropped and
`error[5]` is set.

## Configuration bus

Everything loadable is written through one broadcast bus,
`cfg_t = {we, id[7:0], region[3:0], idx[19:0], data[31:0]}`, one write per
cycle. Each unit decodes its own `id`.

| region | meaning | idx |
|---|---|---|
| 0 `REG_WEIGHT` | conv weights / head weights | dw: `ch*9+tap`; pw: `out*C_IN+in`; stem: `(out*3+in)*9+tap`; head: `row*256+lane` |
| 1 `REG_BN_SCALE` | BN scale (s16) | channel |
| 2 `REG_BN_BIAS` | BN bias (s32), head bias | channel / head row |
| 3 `REG_CTRL` | BN shift (idx 0); head: 0 n_out, 1 g_log2, 2 opg_log2, 3 shift, 4 pool_mask, 5 act_en; `ID_CTRL` idx 0 bit 0 = shuffle enable | |
| 4 `REG_ALPHA` | blend factor (u9, 0..256) | channel |
| 6 `REG_PWL` | activation: `3*seg + {0 breakpoint, 1 slope, 2 intercept}` | |

Taps are numbered `row*3+col` with row 0 on top.

**Unit IDs.** Core c uses 0x00 (frozen), 0x40 or 0x80 (trainable), and its stem is unit `c*64`.

| module s (0..3) | frozen first block | frozen repeat k | trainable c block | trainable c blend |
|---|---|---|---|---|
| ID | `1+10s .. 4+10s` | `5+10s+2(k-1)`, `+1` | `c*64+1+5s .. +4` | `c*64+5+5s` |

Within a block:
* a regular block uses `+0` for its depthwise unit and `+1` for its pointwise unit;
* a downscaling block uses `+0/+1` for branch A and `+2/+3` for branch B.

The head is `0xC0` and the global control register is `0xFF`.

## Top-level interface (`sf_top`)

Parameters: `IMG_W=640`, `IMG_H=480`, `C_STEM=32`, `N_REP=3`, `HEAD_LANES=256`,
`HEAD_ROWS=512`.

* **Input.** `in_valid`/`in_pix` carry RGB as three signed 8-bit values, in raster order, with the blanking rule above.
* **Backbone outputs.** `f_valid`/`f_feat` carry the frozen core's 40x30x256 map. `t_valid`/`t1_feat`/`t2_feat` carry both trainable cores' maps. A host can run larger heads on them, such as an ImageNet classifier.
* **Head outputs.** `head_valid`, `head_ch`, `head_data`, `head_pooled`.
* **Errors.** `error[5:0]` is sticky:
  * bit 0: stem window overflow;
  * bits 1 to 4: modules 1 to 4;
  * bit 5: head buffer overrun.

There is no back-pressure anywhere.

## Verification

Each block has a self-checking testbench in `tb/`. It compares the block
against an independent integer model in `tb/sf_ref_pkg.sv`, which computes
whole feature maps layer by layer from the same weight tables. Every
testbench ends with a `TB_RESULT checks=N failures=M` line and has a watchdog.

The end-to-end test `tb_sf_top` runs the whole network at reduced width: a
32x480 image, 4 stem channels (32 per core at the end), 3 repeats, and a
512-row head with n_out = 256, which loads the head to 97%. The full 480
lines keep the row lags, and hence the frame-end burst, as at full size.
It loads every trainable weight, BN parameter, alpha and head weight with
random values, and then runs three frames:

* **frame 0:** core shuffle off, head per pixel;
* **frames 1 and 2:** sent back to back with minimum blanking:
  * core shuffle on;
  * head group 0 per pixel and group 1 pooled;
  * ReLU through the piecewise-linear activation.

It checks every value of all three cores' final maps and of the head output,
about 110,000 checks. It also checks that each mechanism happened:
* stride-2 decimation;
* blend factors strictly between 0 and 1;
* shuffle both off and on;
* the core-sync FIFO in use;
* the head buffer holding more than one pixel;
* per-pixel outputs, pooled outputs and the activation;
* no error flag.

`tb_sf_top_full` runs the same three-frame test on `sf_top` with every
parameter at its default: 640x480, 32 stem channels, and the full
512 x 256 head at n_out = 256, which is 99.8% of the head's budget.
* It makes about 4.6 million checks, all passing.
* The head input buffer peaked at 207 of its 400 pixels.
* The last head output of a frame came 54,098 cycles after the frame's last input pixel.
* Building takes about 3.5 minutes and running about 5 minutes.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  --top-module tb_sf_top rtl/sf_pkg.sv tb/sf_ref_pkg.sv tb/tb_sf_top.sv
./obj_dir/Vtb_sf_top
```

Replace `tb_sf_top` with any other `tb_*` testbench name. Apart from
`tb_sf_top_full`, each testbench overrides sizes to stay fast. The RTL
defaults are the paper's sizes.

## Where this design departs from, or goes beyond, the paper

The paper describes the architecture, not the microarchitecture. The
following are this design's own choices:

* the streaming scheme, virtual padding positions and blanking rule;
* the core-sync FIFO and the choice of the frozen first block's output as the blend input;
* which half of the channels bypasses and the exact shuffle permutations;
* the 3x3 stem kernel (Table 1 gives stride and sizes only);
* the integer BN and blend formats;
* the configuration bus;
* the head's one-output-per-cycle datapath, input buffer and per-group pooling;
* the activation's segment count and formats.

**Not built.**

* **Repeatable blocks.** The paper's *repeatable blocks* re-run the last
  Semifreddo blocks and the head several times per frame with reloaded
  weights, trading frame rate for depth (200, 100, 67, 50, 40 and 33 fps for
  1 to 6 passes). A pass splits each core's 256 channels into two halves of
  128, runs each half through a repeated Semifreddo module (128 to 256
  channels, as module 4) and merges the two results in a 512-to-256
  pointwise head. That is exactly the 131,072-weight capacity of the head.
  What is not specified is the spatial size and stride of a repeated pass,
  where the maps wait between passes, and how weights are reloaded. This
  design therefore runs one pass per frame.
* **Memories and host.** SRAM macros are written as register arrays. The host
  DSP and the camera are outside the design.
