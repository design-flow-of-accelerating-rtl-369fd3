# A layer-pipelined accelerator for hybrid extremely-low-bit-width CNNs

Quantising a convolutional network to a few bits per weight and activation
makes it cheap enough for small embedded FPGAs. The accuracy does not drop
evenly, though. Weights of the middle layers can be ternary (+1, 0, -1) or
binary (+1, -1) at small cost. The first and last layers, and the
activations, need more bits. A *hybrid* extremely-low-bit-width (ELB) network
therefore uses a different precision in each layer.

A network's precision pattern is written `<net>-A-abcd`:

| Field | Meaning |
|---|---|
| A | activation bits |
| a | first-CONV weight bits |
| b | mid-CONV weight bits |
| c | mid-FC weight bits |
| d | last-FC weight bits |

For example, `4-8218` means 4-bit activations, 8-bit weights in the first
CONV, ternary weights in the middle CONVs, binary weights in the middle FCs
and 8-bit weights in the last FC.

This RTL implements an accelerator that serves such networks with these main
features:

* **One pipeline stage per layer.** Each stage has its own compute array,
  sized and given the weight precision of its layer. The stages work at the
  same time on successive frames.
* **Feature maps stay on chip.** Each stage keeps its whole input feature
  map in a local buffer. Activations pass between stages as streams and
  never go to DRAM.
* **Weights stay off chip.** Each weighted stage streams its weights from
  external memory through a two-bank (ping-pong) buffer. One bank is loaded
  while the other is used.
* **No multipliers for low-precision weights.** For binary and ternary
  weights, a multiplexer picks `x`, `~x` or `0`. Batch normalisation and the
  activation function are fused into the same computation engine.

The default top level, `accelb_top`, is one instance of this architecture
for a small `4-8218` classifier:

```
image 16x16x3 (8 bit)
  -> L1 CONV 3x3 pad 1, 16 ch, 8-bit weights   (P=4,  N=8)
  -> POOL 2x2/2
  -> L2 CONV 3x3 pad 1, 32 ch, ternary weights (P=16, N=8)
  -> POOL 2x2/2
  -> L3 FC 512->64, binary weights             (P=16, N=16)
  -> L4 FC 64->10, 8-bit weights               (P=16, N=10)
  -> 10 class scores (16 bit signed)
```

The layer sizes are in `rtl/accelb_net_pkg.sv`. To map another network,
write another set of these constants and chain stages in the same way.
Nothing else needs to change.

## The computation engine (CE)

The CE (`elb_ce`) is the core of the design. A CE computes one output
channel. In each cycle, or *step*, it takes P activations, one from each of
P input channels at one kernel position, and P weights.

1. **Weight operators** (`elb_op`). Each activation goes through one
   operator, which depends on the weight precision:

   | weight precision | weight | operator output |
   |---|---|---|
   | binary | +1 | `Din` |
   | binary | -1 | `~Din` |
   | ternary | +1 | `Din` |
   | ternary | 0 | `0` |
   | ternary | -1 | `~Din` |
   | 8-bit | w | `Din * w` (a real multiplier) |

   Weight codes: binary `0` means +1 and `1` means -1. Ternary `01` means
   +1, `11` means -1, and `00` or `10` means 0. 8-bit weights are two's
   complement.

2. **Adder tree.** The P operator outputs are summed in one cycle.

3. **Accumulator.** The sum is added into a signed accumulator of
   `ACC_W` = 24 bits. A step marked `in_first` restarts the accumulation.
   A step marked `in_last` ends it.

4. **BN and activation** (`bn_act`). Once the last step is in, the
   accumulator x is transformed:

   ```
   y   = (x * scale + (bias <<< BIAS_LSH)) >>> OUT_RSH
   out = clamp(y, 0, 2^OUT_W - 1)       // ReLU layers
   out = clamp(y, -2^15, 2^15 - 1)      // last layer, 16-bit signed scores
   ```

   `scale` and `bias` are 16-bit signed values, one pair per output
   channel. They hold the batch-norm factors and the weights' scaling
   factor E, so binary and ternary weights need no scale of their own. The
   ReLU output is unsigned: all bits carry magnitude, so no sign bit is
   spent. The two shifts fix the binary point for each layer.

**Watch out for `~Din`.** `~Din` is a one's complement: with the activation
zero-extended, `~Din = -Din - 1`. So every -1 weight adds one extra -1 to the
sum. The same holds when the activation is zero, as in padded positions and
unused lanes. The error is therefore a fixed offset per output channel:
minus the number of -1 weights in its kernel. Add `(scale * that count) >> BIAS_LSH` to
the channel's bias offline. The RTL and the reference models in the
testbenches both compute the literal `~Din`.

Timing: the accumulator updates in the cycle of the step. `out_valid` comes
two cycles after the last step: one cycle for the accumulator and one for
the BN/activation register. Accumulator overflow is not detected. Choose
`ACC_W` for the layer.

A CE array (`ce_array`) is N CEs side by side. They all get the same P
activations, and each uses its own slice of the weight word. CE n, lane p,
reads bits `[(n*P+p)*WB +: WB]`, where WB is the weight width (1, 2 or 8
bits). So one step reads one activation vector and one N*P*WB-bit weight
word, and updates N output channels.

## One pipeline stage (`conv_stage`)

```
            external memory port
                    |
             weight_buffer (2 tiles)
                    | N*P*WB bits/step
stream in -> reshape_buffer -> ce_array -> output FIFO -> serialiser -> stream out
            (2 frames)         P acts/step  (FIFO_D pixels)  1 value/cycle
```

**Reshape buffer** (`reshape_buffer`). This buffer stores the stage's whole
input map, and has room for two frames. The producer fills one frame bank
while the stage reads the other. `in_ready` drops only when both banks are
full.

* *Layout.* Channels are spread over P lanes (`lane = c mod P`). One read
  returns P channels of one pixel at once.
* *Edges.* Reads outside the map return zero, which gives the zero padding.
  Lanes beyond the last channel also read as zero.
* *Write order.* The writer expects the producer's order: groups of NG
  channels, as (group, y, x, channel in group).

**Loop schedule.** For each group of N output channels:

1. Wait until the weight tile for that group is in the weight buffer.
2. For each output pixel, in raster order, issue `STEPS = K*K*ceil(C/P)`
   steps, one per cycle, in the order ky, kx, channel group. Each step reads
   one activation vector and one weight word.
3. Three cycles after the pixel's last step, its N results go into the
   output FIFO.

The stage therefore sends out its map in the order (group, y, x, n). The
next stage's reshape buffer takes this order with `NG = N`.

**Weight buffer** (`weight_buffer`). A *tile* is all the weights of one
output-channel group: STEPS words. The buffer has two tile banks. While the
CE array works through one tile, the loader fetches the next one from
external memory into the other bank. The loader fetches tiles 0 .. M/N-1 in
turn, and again for every frame. On-chip weight storage is thus two tiles,
whatever the size of the network. The weight words in memory are laid out
by tile, then step:

```
addr = WBASE + group * STEPS + (ky*K + kx) * ceil(C/P) + c / P
```

**Flow control.** A pixel starts only if the output FIFO has room for it,
counting pixels already in flight. If the next stage is slow, the CE array
waits (`stall_out`) and nothing is lost. `stall_w` marks cycles spent
waiting for weights.

**Throughput.** The stage produces one output pixel (N channels) every STEPS
cycles, as long as:

* STEPS >= N, so the serialiser keeps up;
* a tile arrives within the time the previous tile is in use.

For example, L1 of the default network takes 16*16 * 2 * 9 = 4608 cycles
per frame. That is the slowest stage, so the pipeline delivers one frame
per 4608 cycles (about 43k frames/s at 200 MHz).

**Fully connected layers.** An FC layer is a convolution whose kernel covers
the whole input map (K = H = W, no padding), with a 1x1 output. No separate
FC datapath is needed.

**Pooling** (`pool_stage`). The pooling stage reuses the reshape buffer.
For each output pixel and channel group, it reads the 2x2 window (4 cycles)
and keeps the lane-wise maximum. It sends out in (y, x, c) order, so the
next stage uses `NG = C`.

## Interfaces of `accelb_top`

| Port group | Meaning |
|---|---|
| `img_valid/ready/data` | 8-bit image values in (y, x, c) order, one per beat, frames back to back |
| `score_valid/ready/data` | 10 signed 16-bit scores per frame |
| `mem_req_valid/ready/addr[i]` | one-word weight read requests of weighted layer i (0..3 = L1..L4) |
| `mem_rsp_valid/data[i]` | read data, in request order, always accepted; words are zero-extended to the widest layer (1280 bits) |
| `cfg_we/layer/addr/scale/bias` | write the BN scale and bias of one output channel |
| `stall_out`, `stall_w`, `pool_stall` | per-stage status |

Load the BN tables before the first frame arrives. All valid/ready pairs
follow the usual rule: a beat transfers on a rising edge where both are
high. Reset is asynchronous and active low. Memories are not reset, and
nothing reads them before they are written.

## Relation to the published architecture

These parts follow the published architecture:

* one pipeline stage per fused CONV+BN+ReLU layer;
* input feature maps in on-chip "reshape" buffers;
* ping-pong weight buffers in front of external memory;
* an array of CEs per stage;
* the CE built from binary/ternary multiplexer operators, an adder tree, a
  16-24-bit accumulator, BN with 16-bit scale and bias, and saturated
  truncation;
* 8-bit first/last-layer weights, 8-bit image input and 16-bit scores.

These parts are choices of this design, made where the architecture
description gives no detail:

* the weight encodings;
* the loop schedule and the buffer organisation, including whole-frame
  double buffering;
* the stream and memory handshakes;
* the BN fixed-point alignment;
* the credit-based output FIFO;
* max pooling as a separate stage;
* the configuration port for BN parameters;
* the 8-bit-weight mode of the operator, a plain multiplier;
* the example network and its parallelism.

The following are not built:

* **Batching.** The published results place several images in the pipeline
  per weight fetch, but the mechanism is not described.
* **Sharing one DRAM port.** Each weighted stage has its own memory port
  here. A real system needs an arbiter in front of one memory controller.
* **Platform parts.** The DMA engines, the memory controller and the host
  processor are outside this RTL.
* **Alexnet and VGG16.** The accelerator was evaluated on Alexnet and VGG16
  variants, with 5 to 16 weighted layers and 224-227 pixel inputs. The
  default instance cannot hold these networks. The stage modules are fully
  parameterised, so an instance for them is a matter of constants, but
  simulating one is far slower.

## Files

| File | Content |
|---|---|
| `rtl/elb_pkg.sv` | weight-precision enum, BN width, ternary codes |
| `rtl/accelb_net_pkg.sv` | layer constants of the default network |
| `rtl/elb_op.sv` | weight operator |
| `rtl/bn_act.sv` | BN + saturated truncation |
| `rtl/elb_ce.sv` | computation engine |
| `rtl/ce_array.sv` | N CEs |
| `rtl/weight_buffer.sv` | ping-pong weight tiles |
| `rtl/reshape_buffer.sv` | double-buffered feature-map store |
| `rtl/conv_stage.sv` | CONV/FC stage |
| `rtl/pool_stage.sv` | max-pooling stage |
| `rtl/accelb_top.sv` | the six-stage example accelerator |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/dram_model.sv` | behavioural weight memory |
| `tb/tb_util_pkg.sv` | shared reference arithmetic |

## Verification

Every module has a self-checking testbench that compares the module with a
reference written from the arithmetic above, not from the RTL. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* **`elb_op_tb`** tries every operator input exhaustively.
* **`bn_act_tb`** checks random values, counts how many saturated, and
  checks the latency.
* **`elb_ce_tb` and `ce_array_tb`** run random-length accumulations and
  check the two-cycle latency.
* **`weight_buffer_tb`** checks tile order and content, and that the loader
  fetches ahead into the second bank.
* **`reshape_buffer_tb`** checks zero padding, empty lanes, and that the
  writer is held off when both banks are full.
* **`conv_stage_tb`** runs a ternary convolution with stride 2 under random
  back-pressure and slow memory.
* **`pool_stage_tb`** runs max pooling under back-pressure.

`accelb_top_tb` runs the whole default accelerator:

* It sends 8 random frames through the pipeline and checks all 80 scores
  against a full reference model of the network.
* Weights come from four `dram_model` instances with stalls and latency.
  Their contents come from a hash function, so no data files are needed.
  Chunk j of word `addr` on port `p` is `hash32(p, addr, j)`.
* It counts how often each mechanism occurred, and fails if one never did:
  output-FIFO stalls, weight waits, weight prefetch, input back-pressure,
  pooling stalls, overlapping frames, saturation and ReLU clamping.
* It checks the rate of the slowest stage. L1 must finish a frame every
  4608 issue cycles plus a few cycles of tile switching. The measured
  interval is 4613 cycles.
* The run takes about 42,000 cycles.

To run a testbench with Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/elb_pkg.sv rtl/accelb_net_pkg.sv tb/tb_util_pkg.sv tb/accelb_top_tb.sv \
    --top-module accelb_top_tb -o sim
./obj_dir/sim
```

For another testbench, replace the last file and the top-module name.
