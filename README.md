# A LUT-native 2-bit neural network for pulse-shape triggering

This RTL classifies a frame of 128 ADC samples (12 bits each) from a
silicon-photomultiplier readout as a clean single pulse ("good"), as
overlapping or distorted pulses ("ugly"), or as neither. It does this in one
combinational pass, in the order of ten nanoseconds on FPGA fabric. The
network uses no multiplier, DSP block or block RAM. Every "weight" is a 2-bit
operation code that picks one of four cheap transformations of the input
value. Every neuron adds its transformed inputs in a balanced adder tree and
sorts the sum into one of four bins with three constant thresholds. The
weights are found offline by a genetic algorithm, which needs no gradients.
They enter the hardware as constants, so synthesis folds each synapse into
plain logic.

The default network has 128 inputs, two hidden layers of 32 neurons and
2 output neurons, written 128-32-32-2. That is 5184 synapses, or
10368 weight bits (1.27 kB). The same RTL also builds the 128-64-128-2 and
128-16-64-2 variants by changing two parameters.

## The synapse: four operations instead of a multiply

A synapse takes a neuron value `v` and a 2-bit code `w`:

| code | name  | 2-bit input (`bnn_synapse2`) | integer input (`bnn_synapse_int`) |
|------|-------|------------------------------|-----------------------------------|
| 0    | Block | 0                            | 0                                 |
| 1    | Pass  | v                            | v                                 |
| 2    | Incr  | min(v+1, 3): 0,1,2,3 → 1,2,3,3 | min(2v, MAX), a saturating shift |
| 3    | Neg   | ~v = 3−v                     | ~v = MAX−v                        |

Block removes the synapse. This is how the training prunes the network, and
it is how sparsity arises. Neg is a bit-wise inversion without the +1 of a
two's-complement negation. Because values are unsigned, it reflects the value
about the middle of its range. For 2-bit values the whole synapse is a 4-input
function, one LUT4.

The two columns differ on Incr. For 2-bit values the published lookup table
gives "+1, saturating". For the integer input layer the rule is "shift left,
saturating". Each module follows its own table. The prose description of
Incr also speaks of a shift for the 2-bit case. Here the printed 2-bit table
was followed instead.

## Neurons: adder tree and self-scaling thresholds

`bnn_neuron` instantiates N synapses (N a power of two), a pairwise adder
tree `((x0+x1)+(x2+x3))+...` (`bnn_adder_tree`) and the activation
(`bnn_activation`). The tree's depth is log2(N), not N. Its width is
`IN_W + log2(N)` bits, so it cannot overflow: 7 bits for 32 two-bit inputs,
14 bits for 128 seven-bit inputs.

The activation has no bias. Its three thresholds are fixed when the design is
elaborated, and they depend on how many of the neuron's synapses are not
blocked. A heavily pruned neuron therefore still uses all four output
values. With `k` active synapses of largest output `VMAX` (3, or 127 in the
input layer):

    Smax = k * VMAX
    T1 = floor(Smax/6),  T2 = floor(3*Smax/6),  T3 = floor(5*Smax/6)
    value = 3 if sum > T3, 2 if sum > T2, 1 if sum > T1, else 0

This spacing reproduces the two worked examples known for this network
family: thresholds 6, 18, 30 for Smax = 36, and 4, 13, 22 for Smax = 27.
Those examples took Smax as 3·3 per input. With the synapse table above, one
input can contribute at most 3, so this design uses 3 per input. That choice
agrees with the stated sum width of log2(3N) bits. If your trained
thresholds were computed the other way, change `SMAX` in `bnn_neuron.sv`.
A sum equal to a threshold falls into the lower bin. This is also a choice:
it makes a fully blocked neuron output 0.

## Network and input reduction

`bnn_network` is the whole classifier and contains no clocked element:

1. Each 12-bit sample keeps its 7 most significant bits. This is only wiring
   (a right shift by 5) and involves no normalisation. Samples are unsigned
   offset binary, with the baseline at 0x7ff, or 63 after reduction.
2. Layer 0 has 128 inputs of 7 bits and uses integer synapses, with
   `H1` neurons.
3. Layers 1 and 2 have 2-bit inputs and use lookup synapses, with `H2` and
   then 2 neurons.

Every layer is fully connected. Layer widths must be powers of two, so that
every adder tree is complete.

## Reading the output

`bnn_class_decode` treats output neuron 0 as the "good" score and neuron 1 as
the "ugly" score. Values 2 and 3 mean "on". The two bits give the verdict:

| (good, ugly) | verdict     | meaning                                |
|--------------|-------------|----------------------------------------|
| (1,0)        | `V_GOOD`    | clean single pulse                     |
| (0,1)        | `V_UGLY`    | overlapping / distorted pulses         |
| (1,1)        | `V_EITHER`  | both claimed: abstain                  |
| (0,0)        | `V_UNDECIDED` | neither claimed: abstain             |

The two abstaining outcomes are useful for rejecting inputs unlike anything
seen in training, such as random noise.

## Clocking and the top level

`bnn_top` puts registers around the combinational network:

    samples_i ──► bnn_frame_reg ──► bnn_network ──► bnn_class_decode ──► output regs
     in_valid_i     (128×12 FFs)     (combinational)                       out_valid_o

A frame is presented on `samples_i` with `in_valid_i` high for one clock.
`out_valid_o` and the verdict follow two clock edges later. A new frame can
be accepted on every clock. Reset is synchronous and active low. It clears
the valid flags and the outputs.

The frame register holds the raw 12-bit samples, 1536 flip-flops. That
matches the roughly 1.5k flip-flops reported for all three network sizes,
which is why the register was placed there. The clock period must cover the
network's combinational delay. Otherwise, constrain the path from the frame
register to the output registers as a multicycle path. This is fine when
frames arrive far apart: a 128-sample frame at 800 MS/s lasts 160 ns.

## Weights

The trained weight sets are not published. `bnn_weights_pkg::weight_op(seed,
layer, neuron, synapse)` supplies a deterministic stand-in: a 32-bit integer
hash of the four arguments. It is sparse, as trained sets are:

* 1 synapse in 16 is active in layer 0, and 1 in 4 in the later layers.
* Of the active synapses, 1/8 are Incr and the rest are Pass or Neg in
  equal parts.

This keeps the neuron sums near their middle threshold. As a result, the
default seed (5) produces all four verdicts on pulse and noise frames. The
classifications themselves mean nothing.

To deploy trained weights, replace the body of `weight_op` with a lookup of
the trained codes. Alternatively, pass `WEIGHTS` to individual `bnn_neuron`
instances. The thresholds follow automatically. Synthesis trims the flip-flops
of samples that no active synapse reads, and the five dropped low bits of
every sample. A synthesized size therefore reflects the weight set used.

## Files

| file | content |
|------|---------|
| `rtl/bnn_pkg.sv` | operation and verdict types, default sizes, threshold rule |
| `rtl/bnn_weights_pkg.sv` | weight codes (stand-in generator) |
| `rtl/bnn_synapse2.sv`, `rtl/bnn_synapse_int.sv` | the two synapse kinds |
| `rtl/bnn_adder_tree.sv`, `rtl/bnn_activation.sv` | sum and activation |
| `rtl/bnn_neuron.sv`, `rtl/bnn_layer.sv`, `rtl/bnn_network.sv` | neuron, layer, classifier |
| `rtl/bnn_class_decode.sv`, `rtl/bnn_frame_reg.sv`, `rtl/bnn_top.sv` | verdict, frame register, top |
| `tb/bnn_ref_pkg.sv` | loop-based reference model and waveform generator |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_bnn_workloads` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. It
also has a watchdog. For example, for the full-size end-to-end test:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
      -Irtl -yrtl -ytb +libext+.sv \
      rtl/bnn_pkg.sv rtl/bnn_weights_pkg.sv tb/bnn_ref_pkg.sv tb/tb_bnn_top.sv \
      --top-module tb_bnn_top
    ./obj_dir/Vtb_bnn_top

What the testbenches check:

* Both synapse kinds and the output decoder are checked exhaustively.
* The adder tree is checked with random operands and with all operands at
  their maximum.
* The activation is checked at every bin boundary of the two published
  threshold sets.
* `tb_bnn_neuron` checks the threshold rule against the published numbers.
* Layers and the network are compared, neuron by neuron, with
  `bnn_ref_pkg`. That package is a loop-based model written from the
  operation tables, and it shares nothing with the RTL except the weight
  codes.
* `tb_bnn_top` runs the default design end to end. It sends 600 frames
  (single pulses, double pulses and uniform noise), back to back and with
  gaps. It checks every verdict and the two-edge latency, including a reset
  in the middle of traffic. It also fails if a mechanism never occurred:
  any of the four verdicts, any of the four operations, saturation of the
  integer Incr, any activation bin, back-to-back frames, or outputs holding
  while idle.
* `tb_bnn_workloads` runs the same stream through the 128-64-128-2 and
  128-16-64-2 variants.

## What this RTL does not cover

* The genetic-algorithm training, the generator that writes the network as
  HDL, and the ADC are outside the RTL.
* The nanosecond latency is a property of the FPGA's LUTs and carry chains.
  The testbenches check cycle behaviour only.
* Radio-antenna traces with signed samples would need their sign bit
  flipped to offset binary before `samples_i`. This is not built in.
* The quantized U-Nets that are compared alongside this network have no
  hardware description here.
