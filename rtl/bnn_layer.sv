// bnn_layer: fully connected layer of M neurons over N inputs.
//
// Every neuron sees all N inputs of the previous layer; neuron m uses the
// weight set (SEED, LAYER_ID, m). Layer widths are powers of two so that
// every neuron's adder tree is a complete binary tree. The full
// connection is inferred from the published parameter counts (the 2-bit
// weights of the 128-32-32-2 network total exactly 1.27 kB only if every
// neuron connects to every input of the previous layer). Combinational.
module bnn_layer
  import bnn_pkg::*;
#(
  parameter int unsigned N        = 32,        // inputs
  parameter int unsigned M        = 32,        // neurons
  parameter int unsigned IN_W     = ACT_W,     // input width
  parameter int unsigned SEED     = SEED_DEF,  // weight set
  parameter int unsigned LAYER_ID = 1          // layer index (0 = input)
) (
  input  logic [N-1:0][IN_W-1:0] x_i,   // previous layer's values
  output logic [M-1:0][1:0]      act_o  // this layer's 2-bit values
);

  for (genvar m = 0; m < M; m++) begin : g_neuron
    bnn_neuron #(
      .N        (N),
      .IN_W     (IN_W),
      .SEED     (SEED),
      .LAYER_ID (LAYER_ID),
      .NEURON_ID(m)
    ) u_neuron (
      .x_i  (x_i),
      .act_o(act_o[m])
    );
  end

endmodule
