# A 5 Parallel Prism array of computational-memory cores

In a computational-memory (CM) accelerator, each layer of a convolutional
network is stored as conductances in a memristive crossbar. A whole
vector-matrix product then takes one computational cycle. With one layer per
core, all layers can run at once as a pipeline: as soon as a core has
produced an output pixel, the next layer's core can use it. The crossbar is no
longer the bottleneck. Moving activations between cores is. If a
layer-to-layer transfer has to cross several cores, every stage of the
pipeline waits for the slowest transfer.

The paper "5 Parallel Prism: A topology for pipelined implementations of
convolutional neural networks using computational memory" (Dazzi et al.)
proposes an interconnect for this: the **5 Parallel Prism (5PP)**. It is a
chain of complete graphs K6 on overlapping 2x3 neighbourhoods of cores. Every
core can reach up to five cores ahead of it directly. The paper shows that the
layer graphs of feedforward, ResNet, DenseNet and Inception networks can be
laid onto 5PP so that every transfer is a single hop.

This repository gives synthesizable SystemVerilog for such an array, with a
behavioural model of the analog crossbar. The default size is the paper's
ResNet-32 / CIFAR-10 case study: 40 cores, 576x576 crossbars, 8-bit
activations, up to 64 channels on 32x32 maps. The topology, the core's
composition (input memory, crossbar, digital processor, output memory), the
separate feedforward and residual channels, and the sizes come from the
paper. The paper gives no micro-architecture. Buffers, handshakes,
arithmetic formats and the configuration interface are this design's own,
and are marked as such below and in each file's header.

## The topology

Algorithm 1 of the paper starts from M disjoint copies of K6, with vertices
a..f. It identifies a, b, c, d of unit graph j+1 with c, d, e, f of unit
graph j. Number the cores in the order a1, b1, a2, b2, a3, ... (core index
s = 2(j-1) for a_j, 2(j-1)+1 for b_j). Unit graph j then covers indices
2j-2 .. 2j+3, and the rule for adjacency follows:

    cores s < t are neighbours  <=>  t - s <= 4,  or  t - s == 5 and s is even

```
  a1 --- a2 --- a3 --- a4 --- a5 ...      top row:    even indices 0,2,4,...
  |  \ / |  \ / |  \ / |                  bottom row: odd indices  1,3,5,...
  |   X  |   X  |   X  |      (plus all diagonals inside each 2x3 window)
  |  / \ |  / \ |  / \ |
  b1 --- b2 --- b3 --- b4 --- b5 ...
```

An interior core therefore has 9 neighbours: offsets +-1..+-4 and one of
+-5. After an odd number of cores has been used, the last used core sees five
free cores ahead. This is property P1 of the paper and the source of the name.
As a check of the derivation: 202 cores give 897 edges, the figure the paper
reports for the 5PP used with DenseNet-201. The 40-core default has 168 edges.

`pp5_pkg::pp5_adjacent()` encodes the rule. `pp5_fabric` instantiates, for
every edge, four `pp5_link` channels: feedforward and residual, in each
direction. The paper states that these two kinds of traffic use separate
physical channels. Each core addresses its neighbours through ten **slots**:
slot k is offset k-5 for k = 0..4 and k-4 for k = 5..9. Slot k of core s is
wired to slot 9-k of core s+offset. Slots without a neighbour are never ready
and never valid. Slot 10 stands for the array's external input.

The paper draws the case study on a 4-by-10 grid. This RTL models
connectivity only, not where cores sit on the die.

## Mapping a network: one layer per core

Each core runs one layer. Placing layers on cores so that all edges of the
layer graph are 5PP edges is the paper's "H-colouring". Here that mapping is
data: each core is programmed with a `layer_cfg_t` (in `pp5_pkg`) that says
* what layer it is: `c_in`, `c_out`, input map `h` x `w`, 3x3 (`k3`) or 1x1
  kernel, stride 2 (`stride2`), global average pooling before the layer
  (`gpool`), `relu_en`, `res_en`, `shift`;
* where its input comes from: `in_sel` (a slot, or 10 for the external
  input);
* where its residual comes from: `res_sel`;
* where its results go: `out_ff_mask` (neighbours' input memories),
  `out_res_mask` (neighbours' output memories), `out_ext` (array output).
  Several bits may be set. The result then goes to all of them in the same
  clock;
* `fwd_mask`: neighbours that receive a copy of every input pixel this
  core accepts, on their residual channel.

**Residual connections.** A ResNet shortcut carries the output of layer l-2
to the adder after layer l. That output is exactly the *input* of layer l-1.
Following the paper, the core running l-1 therefore forwards its incoming
pixels (`fwd_mask`) straight to the output memory of l's core, which is its
neighbour. The shortcut costs no extra hop and no extra edge. At a change of
resolution, a 1x1 stride-2 **resampling layer** gets its own core. For the
last layer P of a stage, the first layer A of the next stage, its partner B
and the resampling layer R, the order is

    P (s) -> R (s+1), A (s+2);   A -> B (s+3);   R -> B's output memory (+2)

so P multicasts to two cores, and every edge spans at most two cores. The
34 layers of ResNet-32 (conv1, 30 block convolutions, 2 resampling layers,
the fully connected layer) occupy cores 0..33 this way. The testbench
package `tb_net_pkg` builds these configurations automatically from a layer
list (`net_c::resnet`, `net_c::cfg`).

## Inside a core (`cm_core`)

```
 slot in_sel / ext --> [input memory] --window--> [crossbar 576x576] --sums-->
     |  (fwd_mask: copy of each input pixel to neighbours' residual channel)
     v
 [digital processor: scale, +bias, >>shift, +residual, ReLU, sat.] --> [output memory]
       ^ residual queue <-- slot res_sel                             |
                                        out_ff_mask / out_res_mask / out_ext
```

**Input memory** (`input_memory`). Pixels arrive in raster order, each
carrying all channels of one position. The memory is a circular line buffer
of 2W+4 pixels: the (K-1)W+K pixels a 3x3 window needs, plus one so that a
new pixel can be written in the same clock in which the window freeing the
oldest slot is read. Output position (r, c) is centred on input
(S*r, S*c). Its window is complete once pixel
(min(S*r+1, H-1), min(S*c+1, W-1)) has arrived. Taps outside the map read
as zero (padding 1). The memory refuses a new pixel when that pixel would
overwrite the oldest pixel the pending window still needs. That refusal is
how back-pressure reaches the upstream core. A 1x1 layer uses the centre
tap only. With `gpool` the memory sums each channel over the map and
produces a single window holding the mean. The mean is a right shift, so
H*W must be a power of two. That is how the fully connected layer of
ResNet gets its input.

**Crossbar** (`cm_crossbar`, behavioural model). Window tap t, input channel
c drives row `t*c_in + c`. The model returns exact integer column sums of
signed 8-bit activations times signed 8-bit weights, one clock after
`start`. It has no device noise and no ADC. Weights must be written in the
same row order.

**Digital processor** (`digital_processor`). Per output channel:
`v = ((acc*scale + bias) >>> shift) + residual`, then ReLU, then saturation
to a signed 8-bit activation. Scale (16 bits) and bias (32 bits) hold a
folded batch normalisation. The paper names scaling, activation and residual
addition but no number formats. ReLU after the addition follows ResNet.

**Output memory** (`output_memory`). There are two queues. Results wait in a
4-entry queue until every destination link is ready, and then leave to all
destinations in the same clock. Residual pixels wait in a queue of
4W+16 = 144 pixels until the result at the same position is computed. A
forwarded residual leaves its source about two line buffers ahead of the
result it belongs to, and the queue covers that distance.

**Issue rule.** A window enters the crossbar when the result queue has room
(counting the product in flight) and, for a residual layer, a residual is
waiting that no product in flight has claimed. Otherwise the core holds the
window, the input memory fills, and the stall propagates upstream link by
link.

## Timing

* One clock stands for the paper's 100 ns computational cycle: one crossbar
  product and one pixel per link channel per clock. At 64 channels x 8 bits
  that is 5.1 Gb/s per channel, the bandwidth the paper estimates.
* Link: one clock from sender to receiver (`pp5_link` is a two-entry skid
  buffer; `in_ready` and `out_valid` come from flops).
* Core: a window is offered one clock after the pixel that completes it.
  The crossbar result comes one clock later and is written into the output
  memory. The result can leave on a link on the following clock.
* Throughput: once the pipeline is full, a 3x3 stride-1 core produces one
  output pixel per clock. In the full ResNet-32 simulation the array took a
  32x32 image at 1024 pixels in 1058 clocks while the previous image was
  still in flight, within 3 % of one pixel per clock. Every layer-to-layer
  transfer is a single hop, which is the property the topology is meant to
  give.

## Interfaces of the top, `pp5_array`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `prg_valid`, `prg` (`prg_t`) | in | one programming write per clock to core `prg.core`: a crossbar device (`PRG_WEIGHT`, row, col, data[7:0]), a channel's scale (`PRG_SCALE`, col, data[15:0]) or bias (`PRG_BIAS`, col, data), or the layer configuration (`PRG_LAYER`, `layer`) |
| `in_valid`, `in_ready`, `in_data` | in/out/in | input image pixels, raster order, all channels of a position per transfer; fed to the core(s) whose `in_sel` is 10 |
| `out_valid`, `out_ready`, `out_data` | out/in/out | results of the one core with `out_ext` set |

Program every core before streaming images. Until then a core has a 0x0 map
and stays idle. Images can follow each other without gaps: every input
memory restarts by itself at the end of a map.

| parameter | default | origin |
|---|---|---|
| `N_CORES` | 40 | 4-by-10 array of the case study |
| `XBAR_ROWS`, `XBAR_COLS` | 576 | crossbar size of the case study |
| `ACT_BITS` | 8 | activation precision of the case study |
| `C_MAX` | 64 | largest channel depth of ResNet-32 |
| `MAX_W`, `MAX_H` | 32 | CIFAR-10 image |
| weight bits | 8 | this design's choice |
| residual queue | 4*MAX_W+16 | this design's choice |

## Which networks fit

With the defaults the array holds ResNet-32 for CIFAR-10: 34 cores of 40,
at most 3x3x64 = 576 crossbar rows, 64 channels, 32x32 maps. That network is
simulated end to end. The paper also evaluates AlexNet, Inception v4 and
DenseNet-201. None of them fits this array. AlexNet needs large kernels,
hundreds of channels and 227x227 maps. Inception v4 (about 150 layers) and
DenseNet-201 (about 200 layers) need more cores, and both need concatenation,
which is not built (below).

## What is not built, and other departures

* **Concatenation.** Each core takes feedforward input from one slot. The
  paper's rule R4 maps concatenation (Inception, DenseNet) onto complete
  bipartite edges, so a core would assemble its input channels from several
  neighbours. That is not implemented, and neither is the distribution of
  DenseNet traffic described in the paper.
* **Max pooling** before a layer (Inception) is not built. Global average
  pooling is.
* **Kernels** are 3x3 (padding 1) and 1x1 only, strides 1 and 2.
* **Physical links.** The serial on-chip transceivers are not modelled.
  `pp5_link` is their digital end and moves one pixel per clock. If a link
  were slower, the paper adds a constant overhead to each computational
  cycle. Here that would show up as back-pressure.
* **Crossbar** is an ideal integer model. Device precision, noise and the
  read-out ADC are not given in the paper.
* **Placement.** Cores are used in 5PP order (a1, b1, a2, ...). The paper's
  case study places its cores on a 4-by-10 grid. No geometry
  is modelled.
* In the paper's core drawing an unlabelled operator sits between the
  convolution and the residual adder. Here scaling comes before the adder
  and ReLU after it.

## Files

| file | what it is |
|---|---|
| `rtl/pp5_pkg.sv` | topology functions, slot numbering, `layer_cfg_t`, `prg_t` |
| `rtl/pp5_link.sv` | one directed link channel (skid buffer) |
| `rtl/pp5_fabric.sv` | 5PP interconnect of `N_CORES` cores |
| `rtl/cm_crossbar.sv` | behavioural crossbar model |
| `rtl/input_memory.sv` | line buffer and window generator, global pooling |
| `rtl/digital_processor.sv` | scale, bias, shift, residual, ReLU, saturation |
| `rtl/sync_fifo.sv`, `rtl/output_memory.sv` | result and residual queues |
| `rtl/cm_core.sv` | one CM core with routing and programming |
| `rtl/pp5_array.sv` | top: cores + fabric |
| `tb/tb_*.sv` | one self-checking testbench per module (below) |
| `tb/tb_net_pkg.sv` | network description, mapping and golden model |

## Verification

Every testbench compares with values computed independently in the
testbench, prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_pp5_link`: order and integrity under random back-pressure; one word
  per clock, one clock latency.
* `tb_pp5_fabric`: rebuilds 5PP from Algorithm 1 (unit graphs and vertex
  identification), sends a tagged word on each of the 800 slot channels of a
  40-core fabric, and checks it arrives only at the mirror slot of a true
  neighbour; 897 edges for 202 cores.
* `tb_cm_crossbar`: all 576x576 devices, full and partial products, 1-clock
  latency.
* `tb_input_memory`: every tap of every window for 3x3/1x1, stride 1/2,
  non-square maps, global pooling, two maps back to back; input stalls occur;
  first-window latency.
* `tb_digital_processor`: 3000 random vectors plus saturation and ReLU
  cases.
* `tb_output_memory`: both queues against a model; full residual queue
  refuses.
* `tb_cm_core`: a 3x3 residual layer with forwarding and three-way multicast
  under random back-pressure; waits for late residuals; one result per clock
  in a map row.
* `tb_pp5_array`: a ResNet-8 on a 10-core, 16-channel, 8x8 array, seven
  images. The output is held off at first until the stall reaches a link. Every pixel of every layer is checked, and each mechanism is counted
  and must occur: input stall, link wait, forwarded shortcut, resampled
  shortcut, stride 2, pooling, multicast.
* `tb_resnet32`: ResNet-32 (random weights) on the array at its default
  parameters, two 32x32 images, every pixel of all 34 layers checked, pipeline
  rate checked. It takes several minutes to build and about six minutes to
  run.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/pp5_pkg.sv tb/tb_net_pkg.sv rtl/*.sv tb/tb_pp5_array.sv \
  --top-module tb_pp5_array -o sim && ./obj_dir/sim
```

(`rtl/pp5_pkg.sv` and, for the array tests, `tb/tb_net_pkg.sv` must come
first; `-Wno-fatal` may be needed for lint warnings.)

The golden model of the array tests uses the same fixed-point recipe as the
hardware, so it checks the dataflow, the windowing, the routing and the
arithmetic against the specification. It does not check the choice of
recipe against a floating-point network.
