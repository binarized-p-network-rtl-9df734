# Binarized P-Network inference accelerator

A robot learns, by reinforcement learning, to keep a moving object in its
camera view. The policy it learns is a convolutional network that maps two
consecutive camera frames to one *action preference* P(s, a) per discrete
action; the action is then drawn from a softmax over those preferences. To run
that network in a few milliseconds on a small FPGA, every weight and every
hidden activation is a single bit (+1 or -1). Most multiply-accumulates then
become an XNOR and a population count. The training method, Conservative Value
Iteration, tolerates the poor function approximation that such a binarized
network gives.

This repository is the inference side of that system in synthesizable
SystemVerilog. A host processor loads the binarized weights after each training
iteration and loads one observation per control step. The accelerator returns
the 17 action preferences. Training, the softmax policy, the camera and the
robot are software or external devices and are not part of the RTL.

## The network being computed

Input: two consecutive 84x84 RGB frames, stacked as 6 channels of unsigned
8-bit pixels.

| layer | kind | shape in | shape out | arithmetic per output |
|---|---|---|---|---|
| 1 | conv 8x8, stride 4, 8 ch | 6x84x84 pixels | 8x20x20 bits | sum of +pixel / -pixel over 384 taps, then threshold |
| 2 | conv 4x4, stride 2, 16 ch | 8x20x20 bits | 16x9x9 bits | XNOR-popcount over 128 bits, then threshold |
| 3 | conv 3x3, stride 1, 16 ch | 16x9x9 bits | 16x7x7 bits | XNOR-popcount over 144 bits, then threshold |
| 4 | fully connected, 100 | 784 bits | 100 bits | XNOR-popcount over 784 bits, then threshold |
| 5 | fully connected, 17 | 100 bits | 17 integers | XNOR-popcount over 100 bits |
| out | scaling | 17 integers | 17 preferences | P = lambda * o |

The layer structure, N = 100 hidden neurons and 17 actions are those of the
real-robot tracking setup. The convolutions are unpadded, which gives the
84 -> 20 -> 9 -> 7 sizes.

## How the arithmetic maps onto logic

**Bits for +-1.** A weight or activation of +1 is stored as 1, and -1 as 0.
The product of two such values is +1 exactly where the bits agree. So the dot
product of two N-element vectors is `2*popcount(XNOR(w, x)) - N`
(`xnor_popcount`). The engines accumulate the popcount and convert once at the
end.

**Thresholds replace batch normalization and Sign().** Training uses batch
normalization in every layer. At inference time, normalization followed by
Sign() is a monotone step, so it reduces to one comparison per neuron:
`x = (o >= tau)` (`threshold_act`). The host loads tau as a signed integer in
the same units as o, which is the +-1 dot product. For binary layers o lies in
[-N, N]. For layer 1 it is a signed pixel sum, up to +-97,920. Every threshold
is stored as an 18-bit signed value.

**Layer 1 sees raw pixels.** Binarizing the camera image would throw away too
much, so only layer 1's weights are binary. Its "multiply" is a choice between
adding and subtracting the 8-bit pixel (`conv1_mac`). This layer needs real
adders. It also dominates the run time.

**The last layer is scaled, not thresholded.** A binary layer can only produce
integers in [-100, 100]. That range is too coarse for a value function, so the
output is multiplied by one learned scale lambda (`scaling_unit`). Lambda is
signed Q8.8, and P is a signed 32-bit number with 8 fraction bits.

## Schedule and timing

The five layers run one after another, each started by `bpn_ctrl` when the
previous one reports done. Each engine does one step per clock:

* Convolution layers do one kernel tap per clock, for all output channels in
  parallel. Layer 1 reads one pixel and an 8-bit weight word (one bit per
  output channel) and updates 8 accumulators. Layers 2 and 3 read one input
  pixel (all channels in one word) and the weights of that tap for every
  output channel, and run one `xnor_popcount` per output channel.
* Fully connected layers do one slice of the input per clock, for one neuron.
  The slice is 16 bits in layer 4 (one pixel of layer 3's output, 49 slices
  per neuron) and all 100 bits in layer 5.

Memories have one cycle of read latency. The engines issue addresses
continuously and accumulate one cycle behind. A finished output is written the
cycle its last operand arrives, so consecutive outputs leave no bubbles.

| stage | steps | cycles incl. 3 of handshake |
|---|---|---|
| layer 1 | 400 pixels x 384 taps = 153,600 | 153,603 |
| layer 2 | 81 x 16 = 1,296 | 1,299 |
| layer 3 | 49 x 9 = 441 | 444 |
| layer 4 | 100 x 49 = 4,900 | 4,903 |
| layer 5 | 17 x 1 = 17 | 20 |
| controller | start register, scaling drain | 4 |
| **total** | | **160,273** |

At an assumed 100 MHz clock this is 1.6 ms per inference. The published
system reports 4 ms per inference, with the whole robot control period at
145 ms. The clock frequency is not known, so the 100 MHz figure is only an
illustration. Layer 1 takes 96% of the time. Processing several taps or
several output pixels at once would speed it up, at the cost of more adders
and a wider image memory.

## Host interface

All loading goes through one write port: `host_we`, a 23-bit `host_addr` and
32-bit `host_wdata`. The address holds a region in bits [22:19], an entry index
in bits [18:3] and a 32-bit lane in bits [2:0]. The lane selects a 32-bit
slice of an entry wider than 32 bits. `bpn_pkg::host_address(region, index,
lane)` builds an address.

| region | contents | index | entry layout |
|---|---|---|---|
| 0 image | 42,336 pixels | pixel / 4 | 4 pixels, lowest index in bits 7:0; pixel index = (c*84 + y)*84 + x |
| 1 W1 | 384 x 8 bits | (ci*8 + ky)*8 + kx | bit c = weight of output channel c |
| 2 W2 | 16 x 128 bits, 4 lanes | ky*4 + kx | bit co*8 + ci |
| 3 W3 | 9 x 256 bits, 8 lanes | ky*3 + kx | bit co*16 + ci |
| 4 W4 | 4,900 x 16 bits | n*49 + k | bit c = weight of input (k*16 + c); input k*16 + c is channel c of layer-3 pixel k = y*7 + x |
| 5 W5 | 17 x 100 bits, 4 lanes | action a | bit n = weight of hidden neuron n |
| 6-9 | tau of layers 1-4 | channel / neuron | signed, low 18 bits |
| 10 | lambda | 0 | signed Q8.8, low 16 bits |

Weight bit 1 means +1. Weights change once per training iteration and the
observation once per control step. Pulse `start` for one cycle, wait for the
`done` pulse, then read `p_out[0..16]`. `busy` is high in between. The host
must not write while `busy` is high; an assertion checks this. A `start`
pulse during an inference is ignored.

## Module hierarchy

```
bpn_top
  param_loader       address decode; tau and lambda registers
  bpn_ctrl           layer sequencer
  image_buffer       observation, 10,584 x 32 bits
  param_ram  x5      weight RAMs, one per layer
  conv1_mac          layer 1 (uses threshold_act)
  bconv_layer x2     layers 2 and 3 (xnor_popcount, threshold_act)
  fmap_ram   x3      feature maps after layers 1, 2 and 3
  bfc_layer  x2      layers 4 and 5 (xnor_popcount)
  threshold_act      layer-4 activation
  scaling_unit       lambda scaling
bpn_pkg              sizes, number formats, address map
```

Each engine is parameterized: channel counts, kernel, stride and input size
for the convolutions; input count, output count and slice width for the FC
layers. The defaults reproduce the network above. To change the network,
change the sizes in `bpn_pkg`.

## What follows the published design and what is this design's own

Taken from the published description:

* the five-layer structure and its kernel, stride and channel numbers;
* the 6x84x84 input, N = 100 and 17 actions;
* raw-pixel input with binary weights in layer 1;
* XNOR-popcount in the later layers;
* threshold activations in place of batch normalization;
* a single learned output scale;
* weights held in on-chip RAM so that they can be reloaded without rebuilding
  the FPGA image.

Chosen here, because the published description does not fix them:

* unpadded convolutions;
* pixel, threshold, lambda and output widths and formats;
* the flattening order into layer 4 and the channel order of the two frames;
* all memory organizations and the host bus with its address map;
* the one-tap-per-cycle schedule, with layers run strictly in sequence and no
  overlap between them.

The published description writes a binary layer's output as a bare popcount
in one place and as a value in [-N, N] in another. This design uses the
[-N, N] form (`2*popcount - N`), and thresholds are given in those units. The
description also gives thresholds as natural numbers. Here they are signed,
because o can be negative.

## Running other configurations

Smaller configurations run without changing the RTL:

* **Fewer actions.** Ignore the unused entries of `p_out`.
* **A single grayscale frame.** Load zero pixels into the unused channels.
  Zero pixels add exactly nothing to the layer-1 sums.
* **Fewer hidden neurons (any N <= 100 with 100 - N even).** Give each unused
  neuron tau = -784, so that its output is always +1. Pair the unused neurons
  and give the two neurons of each pair opposite layer-5 weights, so that
  their contributions cancel.

Larger networks need new sizes in `bpn_pkg`.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against
values computed independently in the testbench, checks cycle counts where a
schedule is defined, and ends with a `TB_RESULT checks=N failures=M` line.

* `tb_bpn_top` runs the complete accelerator at its full default size. It
  loads two different random parameter sets and observations over the host
  bus, and checks all 17 preferences against a behavioural model of the
  network written with +-1 arithmetic. It also checks the 160,273-cycle
  latency and the 4 ms bound at 100 MHz, and that a start pulse during an
  inference is ignored. It counts how often each mechanism happened:
  thresholds of both signs in every layer, scaled outputs of both signs,
  parameter reloads and ignored starts.
* `tb_bpn_workloads` runs the smaller configurations of the simulation
  studies on the default hardware: one grayscale frame with 14 actions at
  N = 30 and N = 10, and two RGB frames with 7 actions at N = 50. It uses the
  padding described above, and checks the preferences against a model of the
  reduced network alone.
* `tb_conv1_mac`, `tb_bconv_layer` and `tb_bfc_layer` run the engines at the
  published shapes or at reduced ones.
* The other testbenches cover the RAMs, the loader, the XNOR-popcount kernel,
  the threshold, the scaling unit and the sequencer.

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/bpn_pkg.sv tb/tb_bpn_top.sv --top-module tb_bpn_top
./obj_dir/Vtb_bpn_top
```

The full-size test finishes in well under a second of simulation time.

Not verified: timing closure or resource use on an actual FPGA, and
bit-exactness against a trained network. No trained weights are available, so
the tests use random ones.
