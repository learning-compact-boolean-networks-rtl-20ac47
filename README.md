# Compact Boolean-network classifier in SystemVerilog

A Boolean network classifies an image with nothing but two-input logic gates.
Every "neuron" is one of the 16 functions of two bits (AND, XOR, NOR, pass-through,
constants, ...) applied to two wires of the previous layer. There are no weights,
no multipliers and no memories at inference time: the whole classifier is a fixed
combinational circuit, so one image is classified in a few nanoseconds of gate delay.

This RTL builds the inference circuit of the *compact* network family in which
convolutional layers use a **single Boolean operation as the kernel** instead of a
tree of gates, and in which the two inputs of every neuron are *learned* (rather than
fixed at random) during training. Training, resampling of connections and
layer-by-layer discretization all happen offline in floating point; what reaches
hardware is only the final list of (function, input, input) triples, one per neuron.

## Data path

```
pixels ─► thermometer encoder ─► conv1 3x3/s2 ─► conv2 3x3/s1 ─► conv3 3x3/s2 ─► conv4 3x3/s1
        (N bits per pixel)      C0→K            K→K             K→4K            4K→4K
                          ─► flatten ─► logic layer 6 ─► logic layer 7 ─► group sum + arg max ─► class
                                        4K·(H/4)² → 625K    625K → 625K     10 groups
```

Default build (`cbn_top` with no parameters) is the medium MNIST model: 1×28×28 input,
N = 1 threshold, K = 256. Layer sizes: conv1/conv2 256×14×14, conv3/conv4 1024×7×7,
logic layers 50,176 → 160,000 → 160,000, then 10 groups of 16,000 bits.
That is 520,704 neurons. Other published variants (CIFAR-10 T/S/M/L: 3×32×32 input,
N = 3/3/7/31, K = 64/128/256/1024) are the same module with other parameters.

### Thermometer encoder (`thermo_encoder`)
A pixel x ∈ [0,1] (8-bit value / 255) becomes N bits; bit t is 1 when
x ≥ t/(N+1). N = 1 is rounding at 0.5; N = 3 gives thresholds 0.25/0.5/0.75.
The comparison is exact integer arithmetic (x·(N+1) ≥ t·255). Threshold bits of
colour channel c become channels c·N … c·N+N−1.

### Single-operation convolution (`conv_logic_layer`)
Each output channel has exactly one kernel: a function k, one input channel, and two
tap positions p, q inside the 3×3 window. It is applied at every output position
(padding 1, taps outside the image read 0). Stride 2 halves the map. So a layer with
COUT output channels of HO×WO has COUT·HO·WO gates, but only COUT distinct kernels.
This is the key saving over tree kernels, which need 2^d − 1 gates per position.

### Logic layer (`logic_layer`)
Fully connected but sparse: neuron j is B_k(x[p], x[q]) with p, q anywhere in the
input. Wiring is generated so that every input feeds at least ⌊2·DOUT/DIN⌋ gate
inputs (input coverage).

### Group sum (`group_sum`)
The 625K outputs are cut into 10 contiguous groups; the ones in each group are
counted and the largest count wins (lowest class index on a tie). The counts are
also output.

### Gate row (`bool_gate`)
A vector of WIDTH neurons, each a 4-to-1 selection of its 4-bit function code by the
two input bits. Function code of B_i is i−1, and the code's bits (MSB first) are the
outputs for inputs 00, 01, 10, 11: B2 = AND = 0001, B7 = XOR = 0110, B8 = OR = 0111,
B9 = NOR = 1000. In this design all codes are elaboration-time constants, so synthesis
reduces each lane to one gate, wire, inverter or constant.

## Where the wiring comes from — read this before trusting results

The trained triples (function, p, q) of the published models are model data, not
architecture, and are not available here. `cbn_pkg` therefore **generates** the
wiring deterministically from the `SEED` parameter, using the same distributions that
the training procedure uses to draw fresh candidates: functions uniform over the 16,
convolution taps uniform over the 3×3 window of one channel, logic-layer inputs by the
coverage-then-shuffle rule. The resulting circuit has exactly the published
structure and size, but it is an *untrained* network: its classifications are
meaningless and its accuracy is chance level.

To run a trained model, replace the bodies of `cbn_pkg::conv_cfg()` (kernel of output
channel `oc` of layer `layer`) and `cbn_pkg::fc_cfg()` (triple of neuron `j`) by
look-ups of the trained values. Nothing else has to change.

## Timing and interface of `cbn_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset of all registers |
| `in_valid`, `in_pix[c][row][col]` | in | one image per cycle, 8-bit pixels |
| `out_valid`, `out_class`, `out_counts[10]` | out | result, 2 cycles after the sampling edge |

The image is registered, the whole network evaluates combinationally, and the class
and counts are registered on the next edge. There is no back-pressure; a new image can
be accepted every cycle. The register stages are this design's choice: the published
FPGA figures (about 6.5 ns for the MNIST medium model) are the combinational path.

## Departures from, and gaps in, the published description

* Wiring is pseudo-random, not trained (see above).
* The published encoder formula lists thresholds 1/N … (N−1)/N (N−1 bits), while the
  model descriptions use N thresholds per pixel with N = 1 for MNIST and show
  thresholds 0.25/0.50/0.75 for N = 3. This RTL uses N thresholds at t/(N+1).
* Pixel width (8 bit), zero padding, channel order, group order, tie break, register
  stages and reset are not specified by the source and are choices made here.
* Pruning of constant, identity and inverter neurons is not done in RTL; synthesis
  removes them because every gate's function is a constant.
* Training-time machinery (connection resampling, adaptive discretization) is not
  hardware and is not included.
* Only configurations with a fully specified architecture are covered; the fully
  connected-only models and the tabular/ECG models are described by neuron totals only.

## Files

| file | content |
|---|---|
| `rtl/cbn_pkg.sv` | function codes, `bool_eval`, kernel/neuron structs, wiring generator |
| `rtl/bool_gate.sv` | row of two-input Boolean neurons |
| `rtl/thermo_encoder.sv` | thermometer encoder |
| `rtl/conv_logic_layer.sv` | single-operation convolutional layer |
| `rtl/logic_layer.sv` | sparse fully connected layer |
| `rtl/group_sum.sv` | population counts and arg max |
| `rtl/cbn_top.sv` | complete classifier |
| `tb/cbn_ref_pkg.sv` | behavioural reference model (own truth table, padding, counts) |
| `tb/*_tb.sv` | self-checking testbenches, one per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. Example:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl -Itb \
  rtl/cbn_pkg.sv tb/cbn_ref_pkg.sv tb/cbn_top_tb.sv --top-module cbn_top_tb -o sim
./obj_dir/sim
```

`cbn_top_tb` runs the whole classifier at a reduced size (3×8×8 images, N = 3, K = 4,
logic layers 64 → 2500 → 2500): 60 random images with idle gaps and back-to-back runs,
checking class, all counts and the 2-cycle latency against the reference model, plus a
reset with an image in flight. It also fails unless every threshold level, the zero
padding, back-to-back input, idle cycles and at least two different classes occurred.

The default (520,704-neuron) build has been linted and elaborated by Verilator and by
slang (about 4 minutes and 4.5 GB for Verilator), but not simulated: the generated
simulation model is about 180 MB of C++. The largest configuration simulated is the
reduced one above. Elaboration time is dominated by the wiring generator (hash
evaluation per neuron); a trained-wiring look-up would be similar.
