// bnn_neuron: one neuron of the LUT-native BNN.
//
// N inputs of IN_W bits each pass through a synapse with a constant 2-bit
// operation code, the N weighted values are added in a pairwise adder tree
// and the sum is mapped to a 2-bit neuron value by three thresholds.
// Inputs of 2 bits use the 4x4 lookup synapse (bnn_synapse2); wider inputs
// use the integer synapse (bnn_synapse_int) of the input layer.
//
// The operation codes are the parameter WEIGHTS (entry i belongs to input
// i). By default they come from bnn_weights_pkg::weight_op for the
// neuron's (SEED, LAYER_ID, NEURON_ID). The thresholds are derived at
// elaboration from the number K of non-blocked synapses, so a heavily
// pruned neuron still uses its whole output range:
//   Smax = K * (2^IN_W - 1),  Ti = floor((2i-1) * Smax / 6), i = 1..3.
// The rule and its fit to the published threshold examples are explained
// in bnn_pkg. Entirely combinational: no clock, no pipeline stage.
module bnn_neuron
  import bnn_pkg::*;
#(
  parameter int unsigned N         = 4,         // inputs, a power of two
  parameter int unsigned IN_W      = ACT_W,     // input width
  parameter int unsigned SEED      = SEED_DEF,  // weight set
  parameter int unsigned LAYER_ID  = 1,         // layer index (0 = input)
  parameter int unsigned NEURON_ID = 0,         // neuron index in layer
  parameter logic [N-1:0][1:0] WEIGHTS = default_weights()
) (
  input  logic [N-1:0][IN_W-1:0] x_i,   // input values
  output logic [1:0]             act_o  // 2-bit neuron value
);

  function automatic logic [N-1:0][1:0] default_weights();
    logic [N-1:0][1:0] w;
    for (int unsigned i = 0; i < N; i++) begin
      w[i] = bnn_weights_pkg::weight_op(SEED, LAYER_ID, NEURON_ID, i);
    end
    return w;
  endfunction

  function automatic int unsigned count_active(input logic [N-1:0][1:0] w);
    int unsigned k;
    k = 0;
    for (int unsigned i = 0; i < N; i++) begin
      if (w[i] != OP_BLOCK) k++;
    end
    return k;
  endfunction

  localparam int unsigned VMAX  = (1 << IN_W) - 1;
  localparam int unsigned SUM_W = IN_W + $clog2(N);
  localparam int unsigned K     = count_active(WEIGHTS);
  localparam int unsigned SMAX  = K * VMAX;
  localparam int unsigned T1    = act_threshold(1, SMAX);
  localparam int unsigned T2    = act_threshold(2, SMAX);
  localparam int unsigned T3    = act_threshold(3, SMAX);

  logic [N-1:0][IN_W-1:0] y;
  logic [SUM_W-1:0]       sum;

  for (genvar i = 0; i < N; i++) begin : g_syn
    if (IN_W == ACT_W) begin : g_cam
      bnn_synapse2 u_syn (
        .v_i (x_i[i]),
        .op_i(syn_op_e'(WEIGHTS[i])),
        .y_o (y[i])
      );
    end else begin : g_int
      bnn_synapse_int #(.W(IN_W)) u_syn (
        .v_i (x_i[i]),
        .op_i(syn_op_e'(WEIGHTS[i])),
        .y_o (y[i])
      );
    end
  end

  bnn_adder_tree #(.N(N), .IN_W(IN_W), .OUT_W(SUM_W)) u_tree (
    .x_i  (y),
    .sum_o(sum)
  );

  bnn_activation #(.SUM_W(SUM_W), .T1(T1), .T2(T2), .T3(T3)) u_act (
    .sum_i(sum),
    .act_o(act_o)
  );

endmodule
