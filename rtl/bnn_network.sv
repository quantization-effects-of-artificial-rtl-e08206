// bnn_network: the combinational LUT-native BNN classifier.
//
// Input: a frame of N_IN ADC samples of SAMPLE_W bits (128 x 12 bits by
// default). Each sample is reduced to IN_W (7) bits by keeping its most
// significant bits (a right shift, i.e. only wiring, no normalisation).
// Layer 0 applies integer synapses to these samples; layers 1 and 2 work
// on 2-bit neuron values. The default shape is 128-32-32-2. The two output
// neurons are the "good" and "ugly" class scores, each 2 bits; values 2
// and 3 mean "on".
//
// Every layer is combinational, so a result is available one
// propagation delay after the samples change (about 10 ns on the FPGA
// fabric the design targets). Registers around it are in bnn_top.
module bnn_network
  import bnn_pkg::*;
#(
  parameter int unsigned N_IN     = N_IN_DEF,      // samples per frame
  parameter int unsigned SAMPLE_W = SAMPLE_W_DEF,  // ADC bits per sample
  parameter int unsigned IN_W     = IN_W_DEF,      // input-layer bits
  parameter int unsigned H1       = H1_DEF,        // first hidden layer
  parameter int unsigned H2       = H2_DEF,        // second hidden layer
  parameter int unsigned N_OUT    = N_OUT_DEF,     // output neurons
  parameter int unsigned SEED     = SEED_DEF       // weight set
) (
  input  logic [N_IN-1:0][SAMPLE_W-1:0] samples_i,  // frame, sample 0 first
  output logic [N_OUT-1:0][1:0]         out_o       // output neuron values
);

  if (IN_W > SAMPLE_W) begin : g_bad_w
    $error("bnn_network: IN_W must not exceed SAMPLE_W");
  end

  logic [N_IN-1:0][IN_W-1:0] x0;
  logic [H1-1:0][1:0]        a1;
  logic [H2-1:0][1:0]        a2;

  // 12 -> 7 bit input reduction: keep the top IN_W bits of each sample.
  for (genvar i = 0; i < N_IN; i++) begin : g_reduce
    assign x0[i] = samples_i[i][SAMPLE_W-1 -: IN_W];
  end

  bnn_layer #(.N(N_IN), .M(H1), .IN_W(IN_W), .SEED(SEED), .LAYER_ID(0))
    u_layer0 (.x_i(x0), .act_o(a1));

  bnn_layer #(.N(H1), .M(H2), .IN_W(ACT_W), .SEED(SEED), .LAYER_ID(1))
    u_layer1 (.x_i(a1), .act_o(a2));

  bnn_layer #(.N(H2), .M(N_OUT), .IN_W(ACT_W), .SEED(SEED), .LAYER_ID(2))
    u_layer2 (.x_i(a2), .act_o(out_o));

endmodule
