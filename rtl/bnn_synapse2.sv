// bnn_synapse2: one synapse of a hidden or output layer.
//
// Replaces a multiplication by a 4x4 content-addressable lookup: the 2-bit
// neuron value v and the 2-bit operation code w select a 2-bit output.
//
//   w = Block : 0            (0 0 0 0 for v = 0 1 2 3)
//   w = Pass  : v            (0 1 2 3)
//   w = Incr  : min(v+1, 3)  (1 2 3 3)
//   w = Neg   : ~v = 3 - v   (3 2 1 0)
//
// The four rows are the published lookup table. Its four inputs fit one
// LUT4. The table's Incr row is "+1, saturating at 3"; the prose calls Incr
// a saturating shift left, which would give 0 2 3 3. The table's values
// are followed here; the integer input layer (bnn_synapse_int) uses the
// shift. Purely combinational, no clock.
module bnn_synapse2
  import bnn_pkg::*;
(
  input  logic [1:0] v_i,   // 2-bit neuron value
  input  syn_op_e    op_i,  // synapse operation code
  output logic [1:0] y_o    // weighted value
);

  always_comb begin
    unique case (op_i)
      OP_BLOCK: y_o = 2'd0;
      OP_PASS:  y_o = v_i;
      OP_INCR:  y_o = (v_i == 2'd3) ? 2'd3 : v_i + 2'd1;
      OP_NEG:   y_o = ~v_i;
      default:  y_o = 2'd0;
    endcase
  end

endmodule
