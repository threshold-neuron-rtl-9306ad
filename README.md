# Threshold-neuron datapath: a multiplier-free neural network in SystemVerilog

A conventional artificial neuron multiplies each input by a weight, sums the
products, adds a bias and passes the result through an activation function.
The *threshold neuron* drops the multiplier. Each input is compared with a
learned threshold. If the input is above it, the neuron takes the difference;
otherwise it takes nothing. The differences are summed and a bias is added.
Each neuron also has a fixed polarity, like the excitatory and inhibitory
neurons of a brain. A positive neuron adds the sum and a negative neuron
subtracts it.

    T(x, w) = x - w   if x > w
              0       otherwise

    y = (+1 or -1, by polarity) * sum_i T(x_i, w_i) + b

The threshold already makes the neuron non-linear, so the network needs no
activation function. The network it was proposed for also uses no
normalization and no pooling. A whole network is therefore copies of one
small circuit: a comparator, a subtractor and a mux per input, then an adder
tree and a bias adder.

This RTL builds that circuit and composes it into the following:

- convolution kernels of any size. The sizes 1×1, 3×3 and 5×5 are the ones
  that were evaluated.
- fully connected layers.
- the small four-layer network that was used as an FPGA prototype,
  written `N3(5)-N5(3)-N3(1)-N1(1)`. `Nk(m)` means a layer of *m* neurons
  with *k* inputs each.

## Files

| file | what it is |
|---|---|
| `rtl/tn_pkg.sv` | data width (`TN_DATA_W = 8`) and the polarity type `polarity_e` |
| `rtl/threshold_neuron.sv` | one threshold neuron, combinational |
| `rtl/threshold_kernel.sv` | KH×KW kernel: one neuron over a window, plus an output register |
| `rtl/threshold_layer.sv` | N_OUT neurons sharing an N_IN-wide input vector, registered |
| `rtl/threshold_net4.sv` | the four-layer network (top level) |
| `tb/tn_ref_pkg.sv` | integer reference model used by all testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

The hierarchy is `threshold_net4` → 4 × `threshold_layer` → one
`threshold_kernel` (1×N_IN) per neuron → `threshold_neuron`. Every level below
the top reuses the same neuron circuit. That single-prototype property is the
point of the design.

## The neuron (`threshold_neuron`)

Ports: `x[N_IN]`, `w[N_IN]` (thresholds), `bias`, `polarity`, and the outputs
`y`, `fired[N_IN]` and `sat`. The inputs, thresholds and bias are signed
`DATA_W`-bit numbers. `polarity` is `POL_POS` or `POL_NEG`. `fired[i]` shows
which inputs passed their threshold.

Arithmetic, for DATA_W = 8:

- `x - w` lies in −255…255. A term that passes is always positive, so it
  fits in 8 unsigned bits.
- The sum of N passed terms is below N·255. After the sign and the bias,
  the accumulator needs `DATA_W + clog2(N+1) + 2` signed bits. It is also
  kept at least one bit wider than the output.
- The comparison is strict. An input equal to its threshold contributes 0,
  which is also the value `x - w` would give.
- The bias is added after the polarity sign: `y = −S + b` for a negative
  neuron, not `−(S + b)`.
- The result is saturated to `OUT_W` bits (default `DATA_W`), and `sat` is
  raised when clipping happened. Saturation lets every layer use the same
  8-bit format, so one neuron circuit fits every layer. A neuron with a wide
  `OUT_W` gives the full-precision sum.

Why there is no multiplier: per input, the neuron needs one
`(DATA_W+1)`-bit subtractor, whose sign bit also serves as the comparator,
and one mux. For reference, the evaluation reports that a multiplier costs
about 8× the area and 14× the power of an adder in a 28 nm library. For
whole kernels it reports 3.9–4.3× less area and 7.5–8.2× less power than
multiply-accumulate kernels. These figures come from that evaluation; this
RTL has not been taken through a cell library.

## Kernels (`threshold_kernel`)

A kernel applies one neuron to a `KH × KW` window `win` with threshold array
`thr`, a bias and a polarity. The window is flattened row-major. The result is
registered:

- `in_valid` at clock edge *k* gives `out_valid` and `y` at edge *k+1*.
- A new window can enter every cycle.
- There is no back-pressure.
- Reset is synchronous and active-low. It clears `out_valid`, `y` and `sat`.

The default is 5×5. A smaller kernel runs on a larger one without changes:
set the unused thresholds to +127. An 8-bit input can never exceed +127, so
those positions contribute 0. The kernel testbench checks that a 3×3 kernel
embedded this way gives the same result as a real 3×3 instance.

The kernel takes one input channel and a whole window per cycle. A
multi-channel kernel (3×3×C) is a kernel with `KW = 3·C` and the channels
laid side by side. Generating sliding windows from a feature map is outside
this design; it would need line buffers, and none are specified.

## Layers and the four-layer network

`threshold_layer` puts `N_OUT` neurons side by side. Each neuron sees the
whole input vector and has its own threshold row, bias and polarity.
Connectivity is full. The layer has the same one-cycle latency as a kernel.

`threshold_net4` chains four layers without anything in between:

    x[3] → L1: 5 neurons × 3 inputs → L2: 3 × 5 → L3: 1 × 3 → L4: 1 × 1 → y

| | L1 | L2 | L3 | L4 | total |
|---|---|---|---|---|---|
| neurons | 5 | 3 | 1 | 1 | 10 |
| thresholds | 15 | 15 | 3 | 1 | 34 |

Timing and ports:

- **Latency and throughput.** The latency is exactly 4 cycles, one register
  per layer. One sample can enter per cycle. Samples separated by bubbles
  keep their spacing.
- **Weights.** Every threshold, bias and polarity is a top-level input port
  (`thr1..thr4`, `bias1..bias4`, `pol1..pol4`). This makes the weights easy
  to program from a host, and polarities can be randomly assigned at
  initialisation as the training scheme expects. The weight ports are not
  registered. Change them only while the pipeline is empty, or accept that
  samples in flight will see the new weights in their later layers.
- **Saturation flag.** `sat_any` travels down the pipeline with its sample.
  It says whether any neuron on that sample's path clipped its result.

## How far it can be trusted

- Every module has a self-checking testbench. Each one compares the RTL with
  an independent integer model in `tb/tn_ref_pkg.sv`, and each shows that
  it fails on a deliberately broken copy of its module.
- The network test runs at the real sizes. It loads 60 random weight sets
  and streams 200 samples with bubbles through each one.
- It checks every output value, the 4-cycle latency and that no sample is
  lost. It also counts the mechanisms it exercised:
  - inputs that fire and inputs that are blocked;
  - positive and negative neurons;
  - saturation at both ends;
  - bubbles and back-to-back outputs;
  - weight reloads.

  A mechanism that never occurs counts as a failure.
- What has not been checked: timing closure, area and power against any
  library or FPGA, and accuracy with trained weights. No trained weights
  are available.

## Departures from the original description and choices made here

- **Unit of a "neuron".** The kernel-level evaluation counts a 5×5 kernel
  as "25 neurons", as if each compare-and-subtract element were a neuron.
  The network notation counts a neuron as a unit with several inputs and
  one polarity. This design follows the second reading. One polarity bit
  belongs to one multi-input neuron, and a 5×5 kernel is one 25-input neuron.
- **Choices of this design, none of them specified:**
  - signed 8-bit numbers, which match 8-bit symmetric quantization;
  - saturation to 8 bits between layers;
  - adding the bias after the sign;
  - one pipeline register per layer, with valid flags and a synchronous
    reset;
  - full connectivity inside each layer.
- **What was described but is not built here:**
  - The FPGA board and its processor-side interface. How inputs and weights
    reach the network was not given, so the network's ports are left open.
  - The larger networks that were evaluated in software: a ResNet-18 with
    threshold layers, a four-convolution sensing CNN and a diffusion U-Net.
    They were run on a GPU, not in hardware, and would need feature-map
    memories and a scheduler that were never specified.
  - Mixed networks, where some layers stay conventional multiply-accumulate
    layers to recover accuracy. Those layers are meant to run on an ordinary
    processor, so they have no place in this multiplier-free datapath.

## Simulating

Each testbench is self-contained. It prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/tn_pkg.sv tb/tn_ref_pkg.sv rtl/threshold_neuron.sv \
        rtl/threshold_kernel.sv rtl/threshold_layer.sv rtl/threshold_net4.sv \
        tb/tb_threshold_net4.sv --top-module tb_threshold_net4
    ./obj_dir/Vtb_threshold_net4

Replace the last testbench file and top module name with
`tb_threshold_neuron`, `tb_threshold_kernel` or `tb_threshold_layer` to run
the others. Each testbench finishes in well under a second.

To change the design:

- **Data width.** Change `DATA_W`, or `TN_DATA_W` in the package.
- **Kernel size.** Set `KH` and `KW`.
- **Another network shape.** Chain more `threshold_layer` instances. The
  only rule is that each layer's `N_IN` equals the previous layer's
  `N_OUT`.
