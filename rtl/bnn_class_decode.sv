// bnn_class_decode: reads the two threshold-encoded output neurons.
//
// Output neuron 0 scores the "good" class (a clean single pulse), neuron 1
// the "ugly" class (overlapping or distorted pulses). A neuron value of 0
// or 1 is "off", 2 or 3 is "on", so each class bit is the neuron value's
// upper bit. The two bits form the (good, ugly) tuple: (1,0) good, (0,1)
// ugly, (1,1) either and (0,0) undecided; the last two let the network
// abstain. The mapping of neuron 0 to "good" is this design's choice.
// Combinational.
module bnn_class_decode
  import bnn_pkg::*;
(
  input  logic [1:0][1:0] out_i,      // output neuron values [good, ugly]
  output logic            good_o,     // "good" claimed
  output logic            ugly_o,     // "ugly" claimed
  output verdict_e        verdict_o   // combined verdict
);

  always_comb begin
    good_o    = (out_i[0] >= 2'd2);
    ugly_o    = (out_i[1] >= 2'd2);
    verdict_o = verdict_e'({good_o, ugly_o});
  end

endmodule
