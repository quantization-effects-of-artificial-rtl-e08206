// bnn_weights_pkg: the synapse operation codes of the network.
//
// In the intended flow the weights are the result of genetic-algorithm
// training and are written into the design as constants, one 2-bit code
// per synapse, so that synthesis can fold every synapse into the adder
// tree. No trained weight set is published, so this package supplies a
// deterministic stand-in derived from a 32-bit integer hash of (seed,
// layer, neuron, synapse). It is sparse, as trained weight sets are: one
// synapse in 16 of the input layer and one in 4 of the later layers is
// active, the rest are Block. Of the active synapses 1/8 are Incr and
// the others are Pass or Neg in equal parts, which keeps the mean sum of a
// neuron near its middle threshold so that all four output values occur. To deploy a trained
// network, replace the body of weight_op with a lookup into the trained
// constants; nothing else in the design changes.
//
// weight_op is a constant function: it is evaluated at elaboration, never
// in hardware.
package bnn_weights_pkg;
  import bnn_pkg::*;

  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7FEB_352D;
    h = h ^ (h >> 15);
    h = h * 32'h846C_A68B;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic syn_op_e weight_op(input int unsigned seed,
                                        input int unsigned layer,
                                        input int unsigned neuron,
                                        input int unsigned synapse);
    logic [31:0] h;
    h = mix32(seed ^ mix32(layer * 32'h9E37_79B9 + neuron * 32'h85EB_CA6B
                           + synapse * 32'hC2B2_AE35 + 32'h1234_5678));
    if (h[15:0] % ((layer == 0) ? 16 : 4) != 0) return OP_BLOCK;
    if (h[31:16] % 16 < 2) return OP_INCR;
    if (h[31:16] % 16 < 9) return OP_PASS;
    return OP_NEG;
  endfunction

endpackage
