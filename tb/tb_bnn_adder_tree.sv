// tb_bnn_adder_tree: random and extreme operand sets for three tree
// shapes (8 x 2 bits, 128 x 7 bits, 1 x 3 bits), compared with a sum
// computed by a loop in the testbench. All-maximum operands check that the
// result width holds the largest sum.
module tb_bnn_adder_tree;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  logic [7:0][1:0]   xa;
  logic [4:0]        sa;
  logic [127:0][6:0] xb;
  logic [13:0]       sb;
  logic [0:0][2:0]   xc;
  logic [2:0]        sc;

  bnn_adder_tree #(.N(8),   .IN_W(2)) dut_a (.x_i(xa), .sum_o(sa));
  bnn_adder_tree #(.N(128), .IN_W(7)) dut_b (.x_i(xb), .sum_o(sb));
  bnn_adder_tree #(.N(1),   .IN_W(3)) dut_c (.x_i(xc), .sum_o(sc));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) begin
      int ea, eb;
      ea = 0;
      eb = 0;
      for (int i = 0; i < 8; i++) begin
        xa[i] = (t == 0) ? 2'd3 : 2'($urandom_range(3));
        ea += int'(xa[i]);
      end
      for (int i = 0; i < 128; i++) begin
        xb[i] = (t == 0) ? 7'd127 : 7'($urandom_range(127));
        eb += int'(xb[i]);
      end
      xc[0] = 3'($urandom_range(7));
      @(posedge clk);
      check(int'(sa), ea, "N=8");
      check(int'(sb), eb, "N=128");
      check(int'(sc), int'(xc[0]), "N=1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
