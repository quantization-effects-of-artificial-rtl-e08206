// tb_bnn_class_decode: all 16 pairs of output neuron values, checking the
// class bits (value >= 2 is "on") and the four verdicts.
module tb_bnn_class_decode;
  import bnn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [1:0][1:0] o;
  logic g, u;
  verdict_e vd;

  bnn_class_decode dut (.out_i(o), .good_o(g), .ugly_o(u), .verdict_o(vd));

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 4; a++) begin
      for (int b = 0; b < 4; b++) begin
        verdict_e ev;
        o[0] = 2'(a);
        o[1] = 2'(b);
        @(posedge clk);
        if (a >= 2 && b >= 2)      ev = V_EITHER;
        else if (a >= 2)           ev = V_GOOD;
        else if (b >= 2)           ev = V_UGLY;
        else                       ev = V_UNDECIDED;
        checks += 3;
        if (g != (a >= 2)) failures++;
        if (u != (b >= 2)) failures++;
        if (vd != ev) begin
          failures++;
          $display("FAIL good=%0d ugly=%0d verdict=%s", a, b, vd.name());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
