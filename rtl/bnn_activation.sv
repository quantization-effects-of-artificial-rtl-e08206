// bnn_activation: ReLU-like three-threshold activation.
//
// Maps a neuron's unsigned sum back to a 2-bit neuron value by comparing
// it with three fixed thresholds T1 <= T2 <= T3:
//
//   sum <= T1 -> 0,  T1 < sum <= T2 -> 1,  T2 < sum <= T3 -> 2,  sum > T3 -> 3
//
// The thresholds are constants fixed after training (no bias, no runtime
// normalisation). Whether a sum equal to a threshold falls into the lower
// or the upper bin is not specified in the source; here it falls into the
// lower one, so a neuron whose inputs are all blocked (all thresholds 0)
// outputs 0. Combinational.
module bnn_activation #(
  parameter int unsigned SUM_W = 7,   // sum width
  parameter int unsigned T1    = 2,   // first threshold
  parameter int unsigned T2    = 6,   // second threshold
  parameter int unsigned T3    = 10   // third threshold
) (
  input  logic [SUM_W-1:0] sum_i,  // weighted sum of the neuron
  output logic [1:0]       act_o   // 2-bit neuron value
);

  if (!(T1 <= T2 && T2 <= T3)) begin : g_bad_t
    $error("bnn_activation: thresholds must be ordered");
  end

  // Thresholds widened so that a threshold above the sum range compares
  // correctly.
  localparam int unsigned CW = (SUM_W > 32) ? SUM_W : 32;

  logic [CW-1:0] s;
  assign s = CW'(sum_i);

  always_comb begin
    if (s > CW'(T3))      act_o = 2'd3;
    else if (s > CW'(T2)) act_o = 2'd2;
    else if (s > CW'(T1)) act_o = 2'd1;
    else                  act_o = 2'd0;
  end

endmodule
