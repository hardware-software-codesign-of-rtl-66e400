# A multiplier-free dynamic fixed-point DNN accelerator

A neural network layer is mostly multiply-accumulate work. This design
removes the multipliers. Every weight is restricted to a signed power of two
(`±2^e`, with `e` from 0 down to −7), so "activation × weight" becomes an
arithmetic shift. Activations stay 8-bit fixed point. Each layer has its own
radix point, which is what "dynamic" fixed point means here: layer L's
inputs carry `m` fractional bits and its outputs carry `n`. A network trained
in floating point and then rounded this way (weights to powers of two,
signals to 8 bits) loses only about a percent of accuracy. In exchange the
datapath is made of shifters, adders and one re-alignment shifter per
neuron. Two such networks run side by side as an ensemble and beat the
floating-point original, still at a fraction of its energy.

This repository holds synthesizable SystemVerilog for that accelerator:
- the neuron datapath;
- the processing units and the neural processing unit (NPU);
- the input, weight and output buffers with their DMA engines;
- the memory interface;
- the control circuitry that runs one layer per start pulse.

It also holds self-checking testbenches, including one that runs the layer
shapes of the CIFAR-10 benchmark network end to end.

## 1. Numbers and the weight code

| signal | width | format |
|---|---|---|
| activation `x` | 8 bits, signed | value = `x · 2^-m` |
| weight code `w` | 4 bits | `w[3]` = sign (1 = negative), `w[2:0]` = `k` = −e, weight = `±2^-k` |
| synapse product `p` | 16 bits, signed | value = `p · 2^-(m+7)` |
| adder-tree sum | 17 → 20 bits over 4 levels | 16 products, no overflow possible |
| accumulator | 32 bits | sum of all tiles of one neuron, `m+7` fractional bits |
| output `y` | 8 bits, signed | value = `y · 2^-n` |

The weight shifter does not shift right by `k`, because the low bits would
be lost. It shifts left by `7−k` instead: `p = (±x) << (7−k)`. The product
is therefore exact and always has 7 more fractional bits than the input. The
worst case, `−128 << 7`, still fits 16 bits. A weight of zero cannot be
encoded. Zero-padded inputs, whose activation is 0, are how a fan-in that is
not a multiple of 16 is handled.

**Radix re-alignment (the "Accumulator & Routing" stage).** When the last
input tile of a neuron has been added, the accumulator holds the exact dot
product with `m+7` fractional bits. The output must have `n` fractional
bits. The stage therefore shifts arithmetically right by `s = m+7−n`, or
left by `−s` when `s` is negative. The result is then clamped to
[−128, 127], and the non-linearity (ReLU or none) follows. The shift rounds
toward −∞ (plain truncation).

Worked example: take `m = 5`, `n = 3`, activation `x = 40` (1.25), and
weight `−2^-2` (code `4'b1010`).
- The product is `p = −40 << 5 = −1280`. With 12 fractional bits that is
  −0.3125.
- Re-alignment shifts right by `5+7−3 = 9`: `−1280 >>> 9 = −3`.
- With 3 fractional bits, −3 is −0.375. This is −0.3125 rounded toward −∞.
- ReLU then makes it 0.

`m` and `n` are 5-bit signed indices in the layer descriptor. Any value
from −16 to 15 is legal. The shift is done on a 64-bit copy, so no
combination overflows silently. Anything out of the 8-bit range saturates,
and the neuron raises its `sat` flag.

## 2. The neuron pipeline

A neuron has 16 synapses. A layer with fan-in `F` is fed
`K = ceil(F/16)` tiles of 16 inputs, one tile per clock:

```
          clock edge 1              clock edge 2                      after edge 2
x[16],w[16] ─► 16 shifters ─► reg ─► adder tree ─► accumulate ─┬► route(m,n) ─► reg ─► NL ─► y
                                                                └ (first tile restarts, last tile completes)
```

- `first` marks the tile that restarts the accumulator.
- `last` marks the tile that completes it.
- `y_valid` rises on the second clock edge after the last tile, so a
  `K`-tile neuron occupies its datapath for `K` clocks.
- A new neuron computation can start on the clock right after `last`. The
  accumulator restarts on `first`, while the previous result is still in
  the output register.

A **processing unit** is 16 such neurons. All 16 receive the same input
tile, each with its own 16 weights, so one processing unit computes 16
outputs of a layer at once: an *output tile*. The **NPU** holds `NUM_PU`
processing units:
- `NUM_PU = 1` is the main configuration, running one network.
- `NUM_PU = 2` runs an ensemble of two networks. Both units see the same
  input tile, and each has its own weights.

The ensemble's final step, averaging the logit vectors of the networks and
taking the largest, is left to the host.

## 3. Memory subsystem

```
             ┌────────── input DMA ──► input buffer (2 banks x 1024 rows x 16 x 8 bit) ──┐
external ◄──►│ memory                                                                    ├─► NPU ─► output buffer (2 banks x 16 rows) ─► output DMA ──┐
memory       │ interface ── weight DMA ─► weights buffer (1024 rows x NUM_PU x 256 x 4 bit) ┘                                                │
             └◄──────────────────────────────────────────────────────────────────────────────────────────────────────────────────────────┘
```

- **External port.** Words are 64 bits and addresses are 32-bit word
  addresses. A request is `{we, addr, wdata}` with a valid/ready handshake.
  Read data comes back in request order, any number of clocks later, on
  `mem_rsp_valid`/`mem_rsp_data`.
- **Memory interface** (`mem_arbiter`). It shares the port among the three
  DMAs. When the port is free, the lowest index among the requesting DMAs
  wins: input, then weights, then output. The grant is then held for as
  long as that DMA is busy. As a result, every read response goes back to
  the DMA that asked for it, and no response has to be tagged.
- **Load DMA** (`dma_load`, used twice). It copies `len` words from `src`
  into a buffer starting at word `dst`. It sends requests as fast as the
  port takes them and writes each response into the buffer as it arrives.
- **Store DMA** (`dma_store`). It reads the output buffer one word per two
  clocks (read, then write) and writes the words to memory.
- **Buffers** are synchronous SRAM-style arrays. Each is written one 64-bit
  word at a time by its DMA. The NPU reads a whole row in one clock, with a
  one-clock read latency.

**Layout in external memory.** The host must use this layout:

| data | word address | contents |
|---|---|---|
| input vector `p`, tile `t` | `in_addr + (p·T + t)·2` | 16 activations; activation `i` in bits `[8i+7:8i]` of the 128-bit pair, low word first |
| weights of output tile `o`, tile `t` | `w_addr + (o·T + t)·16·NUM_PU` | 1024·NUM_PU bits; weight (unit `u`, neuron `j`, synapse `i`) at bit `((u·16+j)·16+i)·4` |
| output row (`o`, `p`) | `out_addr + (o·P + p)·2·NUM_PU` | 16·NUM_PU outputs, same packing as inputs |

In this table, `T` = `n_in_tiles` and `P` = `n_vec`. Outputs are stored
tile-major. A convolution's output channel block `o` is therefore one
contiguous array over positions, ready to be re-arranged into the next
layer's input vectors.

## 4. Running a layer

The host fills a `layer_cfg_t` descriptor and pulses `start`. The fields are:
- `in_addr`, `w_addr`, `out_addr`;
- `n_vec`: input vectors; 1 for a fully connected layer, the number of
  output positions for a convolution;
- `n_in_tiles`, `n_out_tiles`;
- `m`, `n`, `nl`.

`done` pulses once the last output word has been written. The controller
runs:

```
for each output tile o:
    load the weights of tile o                       (pauses computation)
    for each input vector p:
        wait until vector p is in its input-buffer bank
        stream its n_in_tiles rows through the NPU, one per clock
        write the output row into the current output bank
        if the bank is full, or p is the last vector:
            hand the bank to the output DMA and switch banks
wait for the last store
```

Alongside this loop, an **input prefetcher** loads the input vectors in the
same order. It alternates between the two input banks and starts as soon as
a bank is free. The load of vector `p+1` therefore overlaps the computation
of vector `p`. When `n_vec = 1`, the single vector is loaded once and kept
for every output tile.

The output buffer works the same way in the other direction. The store DMA
empties a full bank while the NPU fills the other one. The sequencer waits
only if a bank fills before the other bank's store has finished.

The controller refuses a descriptor that cannot run: one with a zero count,
or more input tiles than a bank or the weights buffer holds. In that case
`done` and `err` pulse together and nothing is touched.

The host is responsible for:
- arranging convolution windows into input vectors (im2col), with zero
  padding;
- pooling;
- averaging the ensemble's logits and taking the arg-max;
- choosing `m` and `n` per layer;
- biases, if the network has them. The neuron has no bias input. A bias can
  be supplied as one more input of constant value, with a power-of-two
  weight.

## 5. Performance

All figures below are at the 250 MHz clock the design was evaluated at. The
memory model answers in 2 clocks and never stalls.

| CIFAR-10 layer | vectors × input tiles × output tiles | clocks |
|---|---|---|
| conv1 5×5, 3→32 | 1024 × 5 × 2 | 41,011 |
| conv2 5×5, 32→32 | 256 × 50 × 2 | 57,952 |
| conv3 5×5, 32→64 | 64 × 50 × 4 | 31,412 |
| ip1 1024→10 | 1 × 64 × 1 | 1,239 |
| whole network | | 131,614 (526 µs) |

The published inference time for this network is 246.27 µs, about 61.6k
clocks. The pure compute bound of one processing unit is about 48.7k clocks,
at one input tile per clock. The difference is input bandwidth:
- a tile of 16 activations is two 64-bit memory words, so an input load
  needs two clocks per tile of computation;
- an input vector is loaded again for every output tile, because the loop
  keeps one output tile's weights resident and streams all vectors past
  them;
- weight loads, once per output tile, still pause computation.

Convolutions therefore run at about two clocks per tile. A loop order that
keeps the weights of all output tiles resident whenever they fit would load
each vector only once. That would be true of every CIFAR-10 convolution,
whose largest need is 4 × 50 rows. The layer would then be compute-bound,
near 49k clocks. It would need a position-major output layout or a strided
store, and it is the first change to make for throughput.

Fully connected layers are bound by weight bandwidth instead. Each input
tile needs 16 words of weights per processing unit, and a weight is used for
only one vector. AlexNet's fc8 (4096 → 1000) therefore takes 275,641 clocks
for 16,128 clocks of computation. The weight load of an output tile happens
once, so a wider memory word is the only remedy there.

## 6. Where this design departs from, or goes beyond, the published description

Taken from the published design:
- the organisation: three memory paths, each with its own DMA and buffer,
  an NPU of processing units, control circuitry and a memory interface;
- the neuron's stages and widths: 8-bit inputs, 4-bit weights, 16-bit
  shifter outputs, a 17/18/19/20-bit adder tree and an 8-bit output;
- the `m`/`n` radix inputs of the routing stage;
- 16 neurons × 16 synapses per processing unit;
- one processing unit for a single network and two for the ensemble.

Chosen here, because the published description is silent:
- **Weight code layout** `{sign, −e}`, and the fixed 7-bit alignment of the
  products.
- **Accumulator**: 32 bits. Re-alignment truncates toward −∞ and saturates
  to 8 bits.
- **A processing unit is 16 neurons.** The accelerator drawing labels its 16
  boxes "Processing Unit #1 … #16". The text defines a processing unit as 16
  neurons of 16 synapses and evaluates "a single processing unit". This
  design follows the text and reads the 16 boxes as the 16 neurons.
- **Buffer sizes**: 2 × 1024 input rows (32 KiB), 1024 weight rows
  (128 KiB per processing unit) and 2 × 16 output rows.
- **Memory word and handshake**: a 64-bit word, 32-bit address and
  valid/ready handshake. The fixed-priority, hold-while-busy arbiter is also
  a choice.
- **Descriptor, loop order and memory layout**, and the refusal of a
  descriptor that does not fit.
- **How the descriptor arrives.** The published block diagram also runs the
  memory interface bus to the control circuitry, so the control may fetch
  its commands from memory. Here the host presents the descriptor on a port
  instead. A descriptor fetcher would be a small DMA in front of `cfg`.
- **Transfer isolation.** The description says the memory subsystem keeps
  transfers apart from computation for throughput. Here the input and
  output buffers are double-banked, so input loads and output stores
  overlap computation. Weight loads still pause it.
- **The ensemble combiner** (mean of logits, then maximum) and pooling are
  not in hardware. The published description places neither in the
  accelerator.
- **Main memory** is outside the design. The testbenches use a behavioural
  model, `tb/ext_mem_model.sv`, with configurable latency and random
  stalls.

## 7. Files

| file | contents |
|---|---|
| `rtl/mfdfp_pkg.sv` | widths, types, layer descriptor, memory request struct |
| `rtl/weight_shifter.sv` | one synapse: signed shift replacing the multiplier |
| `rtl/adder_tree.sv` | 16-input tree widening one bit per level |
| `rtl/accum_route.sv` | accumulator and radix re-alignment with saturation |
| `rtl/nl_unit.sv` | ReLU / pass-through |
| `rtl/neuron.sv` | the two-stage neuron |
| `rtl/processing_unit.sv` | 16 neurons sharing an input tile |
| `rtl/npu.sv` | `NUM_PU` processing units |
| `rtl/in_buffer.sv`, `weight_buffer.sv`, `out_buffer.sv` | on-chip buffers |
| `rtl/dma_load.sv`, `dma_store.sv` | DMA engines |
| `rtl/mem_arbiter.sv` | memory interface |
| `rtl/controller.sv` | compute sequencer and input prefetcher |
| `rtl/mfdfp_accel.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the workload testbenches `tb_cifar10_net`, `tb_alexnet_layers` and `tb_ensemble_accel` |
| `tb/tb_ref_pkg.sv` | reference arithmetic used by the testbenches |
| `tb/ext_mem_model.sv` | behavioural external memory |

Every file opens with a comment giving its function, timing, and which
parts follow the published design and which are choices made here.

## 8. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mfdfp_pkg.sv tb/tb_ref_pkg.sv tb/tb_mfdfp_accel.sv --top-module tb_mfdfp_accel
obj_dir/Vtb_mfdfp_accel
```

`-Wno-fatal` keeps lint warnings in the testbenches, such as width
mismatches in reference code, from stopping the build. The RTL itself
builds without it. To run another testbench, substitute its name. Block testbenches that do not
import `tb_ref_pkg` can leave it out. Every testbench ends with the line
`TB_RESULT checks=<n> failures=<n>`. Each also has a watchdog that ends the
run with a failure if it hangs.

- **`tb_mfdfp_accel`** runs the top at its default parameters. Its
  workloads are:
  - fully connected layers;
  - a 37-vector convolution-like layer that overflows the output buffer;
  - a layer that saturates;
  - the 64-tile CIFAR-10 classifier layer;
  - a refused descriptor.

  Memory stalls randomly. Every output word is compared with a reference
  model. The testbench counts each mechanism and fails if one never
  happens: multi-tile accumulation, ReLU clamping, saturation, memory
  stalls, input reuse, the full-buffer flush, both non-linearities, and
  descriptor refusal.
- **`tb_cifar10_net`** runs the four layers of the CIFAR-10 network with
  random weights. The testbench does the padding, im2col and 2×2 max pooling
  between layers. Every output is compared with a convolution computed
  directly on the activation tensor. It runs in under a second of
  simulation time on a workstation.
- **`tb_ensemble_accel`** runs the top with `NUM_PU = 2`: two networks on
  the same inputs, fully connected and convolution-like layers, and the
  classifier layer of both networks. It then forms the ensemble decision
  (mean of the two logit vectors, then the largest) as a host would. Every
  output of both units is checked.
- **`tb_alexnet_layers`** runs AlexNet's conv1, one group of conv2, fc6 and
  fc8 with their real fan-ins and output widths, but only a few positions
  for the convolutions. fc6's 9216 inputs are the largest fan-in of the
  networks considered. All outputs are checked.
- **`tb_controller`** checks the controller with its DMAs and NPU replaced
  by models. Checks are:
  - for each kind of event (weight load, input load, NPU pass, store), the
    exact sequence of its addresses and lengths;
  - that input loads alternate banks;
  - that each pass reads the bank its vector was loaded into;
  - that output rows fill the two output banks in turn, and each store
    reads the bank just filled;
  - that loads overlap computation.

## 9. Verification status and limits

- All modules pass Verilator lint and a SystemVerilog front end for
  synthesis, with no latches, loops or multiply-driven nets. All testbenches
  pass.
- The remaining lint warnings are unused signals and parameters, plus
  asynchronous-reset notes on the reset net.
- Only random data is used. No trained power-of-two network was run, so the
  published accuracy figures are not reproduced here.
- AlexNet-sized layers fit the default buffers, with fc6's 576 input tiles
  against 1024 rows. They are simulated layer by layer, with few
  convolution positions, not as a whole network.
- No timing, area or power figures are claimed. The design was not
  synthesized to a standard-cell library.
