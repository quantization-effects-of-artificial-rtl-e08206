// tb_bnn_synapse_int: exhaustive check of the integer input-layer synapse
// at 7 bits (the default) and at 3 bits, against 0, v, min(2v, max) and
// max - v computed in the testbench.
module tb_bnn_synapse_int;
  import bnn_pkg::*;

  int checks = 0, failures = 0;
  int sat = 0;
  logic [6:0] v7, y7;
  logic [2:0] v3, y3;
  syn_op_e    op;
  logic       clk = 1'b0;

  bnn_synapse_int #(.W(7)) dut7 (.v_i(v7), .op_i(op), .y_o(y7));
  bnn_synapse_int #(.W(3)) dut3 (.v_i(v3), .op_i(op), .y_o(y3));

  always #5 clk = ~clk;

  function automatic int expect_of(int v, int o, int w);
    int maxv;
    maxv = (1 << w) - 1;
    case (o)
      0: return 0;
      1: return v;
      2: return (2 * v > maxv) ? maxv : 2 * v;
      default: return maxv - v;
    endcase
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 4; o++) begin
      for (int i = 0; i < 128; i++) begin
        op = syn_op_e'(o);
        v7 = 7'(i);
        v3 = 3'(i);
        @(posedge clk);
        checks++;
        if (int'(y7) != expect_of(i, o, 7)) begin
          failures++;
          $display("FAIL W=7 op=%0d v=%0d y=%0d exp=%0d", o, i, y7,
                   expect_of(i, o, 7));
        end
        if (o == 2 && 2 * i > 127) sat++;
        if (i < 8) begin
          checks++;
          if (int'(y3) != expect_of(i, o, 3)) begin
            failures++;
            $display("FAIL W=3 op=%0d v=%0d y=%0d", o, i, y3);
          end
        end
      end
    end
    checks++;
    if (sat == 0) failures++;  // saturation must have been exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
