// tb_bnn_synapse2: exhaustive check of the 2-bit synapse lookup against
// the published 4x4 table (all 16 input/operation pairs).
module tb_bnn_synapse2;
  import bnn_pkg::*;

  int checks = 0, failures = 0;
  logic [1:0] v, y;
  syn_op_e    op;
  logic       clk = 1'b0;

  // Expected outputs, row = operation, column = input value.
  localparam int EXP[4][4] = '{'{0, 0, 0, 0}, '{0, 1, 2, 3},
                               '{1, 2, 3, 3}, '{3, 2, 1, 0}};

  bnn_synapse2 dut (.v_i(v), .op_i(op), .y_o(y));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 4; o++) begin
      for (int i = 0; i < 4; i++) begin
        op = syn_op_e'(o);
        v  = 2'(i);
        @(posedge clk);
        checks++;
        if (int'(y) != EXP[o][i]) begin
          failures++;
          $display("FAIL op=%0d v=%0d y=%0d exp=%0d", o, i, y, EXP[o][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
