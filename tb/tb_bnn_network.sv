// tb_bnn_network: the combinational 128-32-32-2 network at its default
// size. Drives single-pulse, double-pulse and uniformly random 12-bit
// frames and compares both output neuron values with bnn_ref_pkg, which
// also applies the 12 -> 7 bit reduction on its own.
module tb_bnn_network;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [127:0][11:0] s;
  logic [1:0][1:0]    o;

  bnn_network dut (.samples_i(s), .out_o(o));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int f[], y[];
      case (t % 3)
        0: make_frame(128, 1, f);
        1: make_frame(128, 2, f);
        default: random_frame(128, 12, f);
      endcase
      foreach (f[i]) s[i] = 12'(f[i]);
      @(posedge clk);
      ref_network(f, 12, 7, 32, 32, 2, SEED_DEF, y);
      for (int j = 0; j < 2; j++) begin
        checks++;
        if (int'(o[j]) != y[j]) begin
          failures++;
          $display("FAIL frame %0d neuron %0d got=%0d exp=%0d", t, j, o[j], y[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
