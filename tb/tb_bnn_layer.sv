// tb_bnn_layer: a 32-to-32 layer of 2-bit neurons and a 16-to-4 layer of
// integer (7-bit) neurons with the default weight sets, driven with random
// vectors and compared neuron by neuron with bnn_ref_pkg.
module tb_bnn_layer;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;

  logic [31:0][1:0] xa;
  logic [31:0][1:0] ya;
  logic [15:0][6:0] xb;
  logic [3:0][1:0]  yb;

  bnn_layer #(.N(32), .M(32), .IN_W(2), .LAYER_ID(1)) dut_a (.x_i(xa), .act_o(ya));
  bnn_layer #(.N(16), .M(4),  .IN_W(7), .LAYER_ID(0)) dut_b (.x_i(xb), .act_o(yb));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int x[], y[], u[], z[];
      x = new[32];
      u = new[16];
      for (int i = 0; i < 32; i++) begin
        x[i] = int'($urandom_range(3));
        xa[i] = 2'(x[i]);
      end
      for (int i = 0; i < 16; i++) begin
        u[i] = int'($urandom_range(127));
        xb[i] = 7'(u[i]);
      end
      @(posedge clk);
      ref_layer(x, 2, 32, SEED_DEF, 1, y);
      ref_layer(u, 7, 4, SEED_DEF, 0, z);
      for (int j = 0; j < 32; j++) begin
        checks++;
        if (int'(ya[j]) != y[j]) begin
          failures++;
          $display("FAIL 2-bit layer neuron %0d got=%0d exp=%0d", j, ya[j], y[j]);
        end
      end
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (int'(yb[j]) != z[j]) begin
          failures++;
          $display("FAIL int layer neuron %0d got=%0d exp=%0d", j, yb[j], z[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
