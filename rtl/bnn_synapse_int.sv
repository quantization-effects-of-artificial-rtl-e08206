// bnn_synapse_int: one synapse of the integer input layer.
//
// The input layer sees multi-bit sensor samples (7-bit unsigned integers by
// default) rather than 2-bit neuron values. Its four operations are
//
//   w = Block : 0
//   w = Pass  : v
//   w = Incr  : min(v << 1, MAX_INT)   (shift left, saturating)
//   w = Neg   : ~v                     (bit-wise inversion, no +1)
//
// as published for the integer input. MAX_INT is taken as the largest
// unsigned W-bit value and v as unsigned, so ~v = MAX_INT - v (the same
// reading the 2-bit table gives for Neg). Purely combinational.
module bnn_synapse_int
  import bnn_pkg::*;
#(
  parameter int unsigned W = IN_W_DEF  // integer width of the input
) (
  input  logic [W-1:0] v_i,   // unsigned input sample
  input  syn_op_e      op_i,  // synapse operation code
  output logic [W-1:0] y_o    // weighted value
);

  always_comb begin
    unique case (op_i)
      OP_BLOCK: y_o = '0;
      OP_PASS:  y_o = v_i;
      OP_INCR:  y_o = v_i[W-1] ? '1 : {v_i[W-2:0], 1'b0};
      OP_NEG:   y_o = ~v_i;
      default:  y_o = '0;
    endcase
  end

endmodule
