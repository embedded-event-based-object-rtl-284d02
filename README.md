# SPLEAT: an event-driven spiking CNN accelerator for embedded object detection

An event camera does not send images. It sends a sparse stream of pixel events, each one
saying that the brightness at (x, y) went up or down. This design runs the backbone of an
object detector straight on those events. The backbone is a spiking convolutional network,
built from leaky integrate-and-fire (LIF) neurons. The accelerator does work only when a
spike arrives. Silent parts of the scene cost nothing, and the cost of a frame grows with
its spike count, not with the image size.

The network is laid out in space, not run one layer at a time. Each spiking layer gets its
own processing unit (an NPU). The NPU holds that layer's weights and the membrane potential
of every neuron the layer has. The NPUs form a chain linked by spike FIFOs, and all of them
work at once. Layer 1 can take frame *t+1* while layer 5 is still working on frame *t*.

Spikes from six layers of the chain are also copied out. Together they form the multi-scale
feature maps that an SSD detector needs. The SSD heads and the box post-processing stay on
the host processor.

The default build is the small 32-ST-VGG backbone:

- 11 spiking layers.
- Input: a binary two-polarity event frame of 304 × 240.
- 885,760 weights, 992 biases and 670,464 neurons.
- Q8.8 fixed point.

## The network as built by default

| layer | conv | stride | pad | input C×H×W | output C×H×W | tapped |
|---|---|---|---|---|---|---|
| 0 | 32 × 4×4 | 4 | 0 | 2×240×304 | 32×60×76 | |
| 1 | 32 × 3×3 | 1 | 1 | 32×60×76 | 32×60×76 | |
| 2 | 32 × 3×3 | 1 | 1 | 32×60×76 | 32×60×76 | |
| 3 | 64 × 3×3 | 2 | 1 | 32×60×76 | 64×30×38 | yes (38×30) |
| 4 | 64 × 3×3 | 1 | 1 | 64×30×38 | 64×30×38 | |
| 5 | 128 × 3×3 | 2 | 1 | 64×30×38 | 128×15×19 | yes (19×15) |
| 6 | 128 × 3×3 | 1 | 1 | 128×15×19 | 128×15×19 | |
| 7 | 128 × 3×3 | 2 | 1 | 128×15×19 | 128×8×10 | yes (10×8) |
| 8 | 128 × 3×3 | 2 | 1 | 128×8×10 | 128×4×5 | yes (5×4) |
| 9 | 128 × 3×3 | 2 | 1 | 128×4×5 | 128×2×3 | yes (3×2) |
| 10 | 128 × 3×3 | 2 | 1 | 128×2×3 | 128×1×2 | yes (2×1) |

Each layer is a convolution with batch norm folded into it, followed by LIF neurons. The
fold turns batch norm into a per-channel bias. The table is the constant
`spleat_pkg::SMALL_32_ST_VGG`, and the taps are `SMALL_32_ST_VGG_TAPS`. Each NPU works out
its output size from the table as `(I + 2P − K)/S + 1`.

The padding of the 3×3 layers is not given as such. It is taken as 1 because that is what
yields the tapped map sizes.

## Tokens: the one protocol every block speaks

Every stream in the chip carries the same token, `spike_tok_t` (27 bits):

| field | bits | meaning |
|---|---|---|
| `kind` | 2 | `TOK_SPIKE`, `TOK_EOT` or `TOK_CLEAR` |
| `ch` | 8 | channel (input polarity at layer 0) |
| `y` | 8 | row |
| `x` | 9 | column |

- **SPIKE** `(ch, y, x)`: one binary spike at that position of the layer's input map.
- **EOT** (end of time step): the frame is complete. Each NPU reacts by running its fire
  step (below) and then passes the EOT on. One time step of the spiking network is
  therefore exactly one event frame. The EOT also tells the host when a tapped layer's
  feature map for that step is complete.
- **CLEAR**: the clip is over. Each NPU sets all of its potentials to 0 and passes the
  CLEAR on. Without it, state carries over from one time step to the next, as the LIF
  model needs.

Tokens in a stream keep their order. Every stream uses valid/ready: a token moves on a
clock edge where both are high. A sender must hold valid and data steady until the token is
taken. Assertions in `spike_fifo` and `npu` check this.

## Inside an NPU

`npu` has three parts:

- a weight memory (`sdp_ram`, COUT·CIN·K·K words);
- a potential memory (`sdp_ram`, COUT·OH·OW words);
- a bias register file of COUT words.

It also holds one threshold and one leak factor. The address maps are:

```
weight   (co, ci, ky, kx) -> ((co*CIN + ci)*K + ky)*K + kx
potential (co, oy, ox)    -> (co*OH + oy)*OW + ox
bias      co              -> co
```

### Integration of one spike

An input spike at (ci, y, x) touches every output neuron (co, oy, ox) whose receptive
field covers it. The kernel tap that covers it is (ky, kx):

```
oy = (y + P - ky) / S     valid if (y + P - ky) >= 0, divisible by S, and oy < OH
ox = (x + P - kx) / S     likewise
```

`conv_addr_gen` walks ky, then kx, with co innermost. It skips each (ky, kx) that is not
valid in one cycle, without visiting the channels. For a tap that lands, it sends COUT
updates, one per cycle.

Each update goes through a two-stage pipeline:

1. Read the weight and the potential.
2. Add them with saturation (`lif_unit`) and write the sum back.

A potential written in one cycle could be read in the next cycle by the following update.
That cannot go wrong: within one spike the neurons are all different, and the next spike
only starts once `busy` has dropped. An assertion checks this.

**Cost:** a spike takes 1 cycle, plus COUT cycles for each tap that lands, plus 1 cycle for
each tap that does not. An interior spike in a 3×3, stride-1 layer with 32 outputs takes
1 + 9·32 = 289 cycles.

### The fire step (on EOT)

EOT is accepted only after the last update has been written. The NPU then visits every
neuron in address order, two cycles each (read, then compute and write):

```
H = sat(V + bias[co])
if H >= threshold:  emit SPIKE(co, oy, ox); V = 0        (hard reset)
else:               V = sat(floor(H * decay / 256))     (leak; decay = 256 means IF, no leak)
```

After the last neuron, the EOT is sent on. With no backpressure, the outgoing EOT leaves
2·OH·OW·COUT + 3 cycles after the incoming EOT was accepted. If the next FIFO is full, the
scan pauses on the spike it is trying to send. Spikes leave sorted by channel, then row,
then column.

The bias is added once per time step, at the fire step. Adding it with every event would
make the bias depend on how many events arrived.

### Clear

On CLEAR, and on its own after reset, the NPU writes 0 to every potential, one per cycle.
A CLEAR is then sent on, but the clear after reset sends nothing.

### Numbers

Weights, biases, potentials and the threshold are 16-bit two's-complement Q8.8
(`W_W`, `V_W`, `FRAC`). The leak factor is a 9-bit unsigned fraction of 256. Every sum
saturates at the 16-bit limits instead of wrapping.

## Between the NPUs: FIFOs, fork and tap arbiter

`spleat_top` puts a `spike_fifo` (depth `FIFO_DEPTH`, 16 by default) in front of each NPU.

For a tapped layer, the NPU output **forks** into the next layer's FIFO and a tap FIFO. A
token leaves the NPU only when both can take it in the same cycle. No token is lost or
duplicated, so a slow host can stall the whole chain. There are two ways to prevent that:

- make the tap FIFOs deeper;
- keep the host reading.

`fmap_tap_arbiter` merges the tap FIFOs into one output stream, `fmap_*`:

- It is round-robin: the first valid input at or after the pointer wins, and the pointer
  moves past it after each transfer.
- Each token comes out tagged with the index of the layer that made it (`fmap_layer`).
- Within one layer, tokens keep their order, so each layer's spikes for one step end with
  that layer's EOT.

Output from the last layer goes only to the host. It is always tapped in the default
configuration.

## Host ports and configuration

| port | direction | use |
|---|---|---|
| `in_tok/in_valid/in_ready` | in | event-frame tokens into layer 0 |
| `fmap_tok/fmap_layer/fmap_valid/fmap_ready` | out | spikes of the tapped layers |
| `cfg_we, cfg_layer[3:0], cfg_sel, cfg_addr[19:0], cfg_data[63:0]` | in | parameter writes |
| `busy[NL-1:0]` | out | NPU i or its FIFOs are holding work |

`cfg_sel` selects what a write goes to:

- `CFG_WEIGHT`: address = weight address above.
- `CFG_BIAS`: address = co.
- `CFG_THRESH`.
- `CFG_DECAY`.

Only the low `W_W`/`V_W` bits of `cfg_data` are used. Only write while `busy` is all zero.
After reset, the threshold is 1.0 (256), the decay is 256 (no leak), the biases are 0 and the
potentials are cleared. The weights are not reset, so they must be loaded.

A typical run:

1. Load all weights and biases.
2. For each frame, send its SPIKE tokens and then an EOT.
3. After the last frame of a clip, send a CLEAR.
4. Keep reading `fmap_*` the whole time.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `spleat_top` | `NL` | 11 | number of layers / NPUs (at most 16) |
| | `LAYERS` | `SMALL_32_ST_VGG` | per-layer CIN, COUT, K, S, P, IH, IW |
| | `TAP_MASK` | `11'b111_1010_1000` | layers whose spikes go to the host |
| | `FIFO_DEPTH` | 16 | every FIFO between NPUs and every tap FIFO |
| | `W_W`, `V_W`, `FRAC` | 16, 16, 8 | weight and potential width, fraction bits |
| `npu` | `CIN, COUT, K, S, P, IH, IW` | one layer | geometry |
| `sdp_ram` | `WIDTH, DEPTH` | | simple dual-port RAM with registered read |

Layer geometry is fixed when the design is built, and it sets the size of each NPU's memory.
To run another network, give the top a different `LAYERS` table, as the keyword-spotting
testbench does.

Memory at the defaults:

| what | size |
|---|---|
| weights | 14.17 Mbit |
| potentials | 10.73 Mbit |
| together, with the FIFOs | about 24.9 Mbit |

This fits in the block RAM of a mid-size FPGA (e.g. 740 BRAM36 tiles = 26.6 Mbit). Each
`sdp_ram` is written as a plain array with a registered read, so synthesis maps it to block
RAM.

## Where this design departs from, or fills in, the accelerator description

Followed from the description:

- one NPU per layer, all running in parallel;
- event-driven, sequential per-neuron updates;
- LIF or IF neurons with hard reset;
- batch norm folded into a bias;
- fixed-point parameters and potentials;
- 16-bit quantization;
- the network, the six taps, and the SSD heads and post-processing left in software.

This design's own choices (the description gives none of them):

- the token format with EOT and CLEAR;
- valid/ready handshakes;
- FIFO depth 16;
- adding the bias once per step, at the fire step;
- the fire step as a sequential scan of every neuron;
- memory layouts;
- the configuration port;
- round-robin tap arbitration;
- the per-spike cycle cost given above;
- saturating arithmetic;
- the leak as a multiply by decay/256.

Known differences and limits:

- **Input encoding.** The description also mentions networks whose first layer takes dense,
  non-binary input, such as MFCC features for keyword spotting. This design takes binary
  spikes only. The keyword-spotting testbench uses binary inputs.
- **Layer types.** The NPU computes convolutional layers only. A fully connected layer can
  be expressed as a 1×1 convolution on a 1×1 map. Pooling layers are not built, because the
  backbone does not use them.
- **Per-layer precision.** The description allows a different fixed-point format for each
  layer. Here `W_W`, `V_W` and `FRAC` are the same for the whole chain.
- **Input size.** The input is 304 × 240. A smaller height appears in one place in the
  description, but the network's input count and its tapped map sizes both need 240 rows.
- **Learnable leak.** The leak (PLIF) is learnt per layer in training. Here it is a run-time
  register, one per NPU.
- **Not built.** The host processor, the SSD detection heads, box decoding and
  non-maximum suppression, and the real host link. The `fmap_*` stream is where they
  would connect.
- **Latency.** No latency figure was reproduced cycle for cycle. The full-size testbench
  uses random weights, so its spike counts are not those of a trained network.

## Blocks and files

| file | block |
|---|---|
| `rtl/spleat_pkg.sv` | token and configuration types, layer table, default network |
| `rtl/sdp_ram.sv` | weight / potential memory |
| `rtl/spike_fifo.sv` | token FIFO |
| `rtl/lif_unit.sv` | saturating add, threshold compare, hard reset and leak |
| `rtl/conv_addr_gen.sv` | list of the neurons one spike reaches |
| `rtl/npu.sv` | one layer |
| `rtl/fmap_tap_arbiter.sv` | merges the tapped layers into the host stream |
| `rtl/spleat_top.sv` | the chain |

## Testbenches

Each testbench checks itself, ends by printing `TB_RESULT checks=N failures=M`, and has a
watchdog.

- `tb_sdp_ram`, `tb_spike_fifo`, `tb_lif_unit`: the leaf blocks against reference values
  worked out in the testbench. This includes read-before-write, hold, full and empty,
  saturation, and the leak rounding.
- `tb_conv_addr_gen`: checks every generated (co, oy, ox) and address against a brute-force
  search over all neurons, and checks the cycle count, in two geometries. One of them has
  stride 4 and no padding.
- `tb_npu`: a small layer (3 inputs, 4 outputs, 3×3, stride 2, pad 1) with leak.
  - Compares every output spike and the EOT/CLEAR order against a behavioural model.
  - Checks the integration cost per spike and the 2·N+3 cycle length of the fire step.
- `tb_fmap_tap_arbiter`: fairness, order within each layer, masking and hold under
  backpressure.
- `tb_spleat_top`: the whole 11-layer chain at a reduced input of 2×24×32, over eight
  frames and two clips, with random weights.
  - Checks every token on `fmap_*` against a layer-by-layer model (`spleat_ref_pkg`).
  - Counts that each mechanism happened at least once: integration, firing, leak, clear,
    several NPUs busy at once, a stalled layer, a stalled host and a full tap FIFO.
- `tb_spleat_top_full`: the same checks with the top at its default parameters.
  - Input: the full 2×240×304 input, three frames of 3000 events each.
  - Runs for about 90 million cycles, which is about 3 minutes in verilator.
- `tb_spleat_gsc`: a 4-NPU instance running a 1-D keyword-spotting network
  (48c3–48c3–96c3–35c1 on 10 channels × 24 samples, two time steps per keyword). The 1-D
  layers are mapped as 24×1 maps with padding 1, so only the centre column of each 3×3
  kernel is used.

The reference model in `tb/spleat_ref_pkg.sv` works with whole frames: it integrates, then
fires, layer by layer, in the same fixed-point arithmetic. Spikes within a step do not
interact, so processing order only changes the output order, and the hardware's output
order is fully determined. Tokens are therefore compared exactly, in order, within each
layer.

## Simulating

With verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/spleat_pkg.sv tb/spleat_ref_pkg.sv tb/tb_spleat_top.sv --top-module tb_spleat_top
./obj_dir/Vtb_spleat_top
```

For the leaf testbenches, drop `tb/spleat_ref_pkg.sv` and change the top module name. The
reduced top testbench takes about a minute. The full-size one takes about three.
