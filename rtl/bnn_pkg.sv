// bnn_pkg: shared types, sizes and constant functions of the LUT-native
// 2-bit binary neural network (BNN) trigger classifier.
//
// Every synapse of the network holds a 2-bit operation code instead of a
// multiplicative weight: Block (0), Pass (1), Increase (2) and Negate (3).
// Neuron values between the hidden layers are 2-bit (0..3); the input layer
// works on 7-bit unsigned integers obtained by dropping the five least
// significant bits of 12-bit ADC samples. A neuron adds its weighted inputs
// in a pairwise adder tree and maps the sum back to 2 bits with three
// thresholds. The network is purely combinational.
//
// The default sizes are the 128-32-32-2 network (the "b" variant), which
// has 5184 synapses, i.e. 10368 weight bits = 1.27 kB, matching the
// published parameter budget of that variant.
//
// Threshold rule (act_threshold): the three thresholds of a neuron are
// floor(Smax/6), floor(3*Smax/6) and floor(5*Smax/6), where Smax is the
// largest sum the neuron can reach. This reproduces the published examples
// (6,18,30 for Smax=36 and 4,13,22 for Smax=27). Here Smax is taken as
// (largest synapse output) x (number of non-blocked inputs); the published
// examples use 3*3 per input instead of 3, which conflicts with the stated
// sum width of log2(3N) bits; this design follows the sum width.
package bnn_pkg;

  // Synapse operation codes (2-bit weights).
  typedef enum logic [1:0] {
    OP_BLOCK = 2'd0,  // output 0, prunes the synapse
    OP_PASS  = 2'd1,  // output = input
    OP_INCR  = 2'd2,  // increase with saturation
    OP_NEG   = 2'd3   // bit-wise inversion
  } syn_op_e;

  // Classification verdict, encoded as the {good, ugly} tuple.
  typedef enum logic [1:0] {
    V_UNDECIDED = 2'b00,  // (0,0): neither class claimed
    V_UGLY      = 2'b01,  // (0,1): distorted / piled-up pulse
    V_GOOD      = 2'b10,  // (1,0): clean single pulse
    V_EITHER    = 2'b11   // (1,1): both classes claimed
  } verdict_e;

  // Default network shape: 128 inputs, two hidden layers, 2 outputs.
  localparam int unsigned N_IN_DEF     = 128;
  localparam int unsigned H1_DEF       = 32;
  localparam int unsigned H2_DEF       = 32;
  localparam int unsigned N_OUT_DEF    = 2;
  localparam int unsigned SAMPLE_W_DEF = 12;  // ADC sample width
  localparam int unsigned IN_W_DEF     = 7;   // input-layer integer width
  localparam int unsigned ACT_W        = 2;   // hidden neuron value width
  localparam int unsigned SEED_DEF     = 32'h0000_0005;

  // Threshold number idx (1..3) of a neuron whose largest reachable sum is
  // smax: floor((2*idx-1)*smax/6).
  function automatic int unsigned act_threshold(input int unsigned idx,
                                                input int unsigned smax);
    return ((2 * idx - 1) * smax) / 6;
  endfunction

  // Width of an unsigned sum of n values of at most vmax.
  function automatic int unsigned sum_width(input int unsigned n,
                                            input int unsigned vmax);
    return $clog2(n * vmax + 1);
  endfunction

endpackage
