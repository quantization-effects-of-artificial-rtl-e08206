// tb_bnn_neuron: three neurons.
//  - 4 x 2-bit inputs with operations (Block, Pass, Incr, Neg): one input
//    blocked, so the thresholds follow from 3 active inputs; all 256
//    input combinations.
//  - 4 x 2-bit inputs, all Pass: all 256 input combinations.
//  - 8 x 7-bit inputs with the default weight set of layer 0, neuron 3:
//    random inputs.
// Expected values come from bnn_ref_pkg. The threshold rule is also
// checked against the published examples (6,18,30 and 4,13,22).
module tb_bnn_neuron;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;

  logic [3:0][1:0] xa;
  logic [1:0]      ya, yb, yc;
  logic [7:0][6:0] xc;
  int              bin_cnt[4];

  // WEIGHTS[i] is the operation of input i.
  localparam logic [3:0][1:0] WA = {2'd3, 2'd2, 2'd1, 2'd0};
  localparam logic [3:0][1:0] WB = {2'd1, 2'd1, 2'd1, 2'd1};

  bnn_neuron #(.N(4), .IN_W(2), .WEIGHTS(WA)) dut_a (.x_i(xa), .act_o(ya));
  bnn_neuron #(.N(4), .IN_W(2), .WEIGHTS(WB)) dut_b (.x_i(xa), .act_o(yb));
  bnn_neuron #(.N(8), .IN_W(7), .SEED(SEED_DEF), .LAYER_ID(0), .NEURON_ID(3))
    dut_c (.x_i(xc), .act_o(yc));

  always #5 clk = ~clk;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(int'(act_threshold(1, 36)), 6,  "T1(36)");
    check(int'(act_threshold(2, 36)), 18, "T2(36)");
    check(int'(act_threshold(3, 36)), 30, "T3(36)");
    check(int'(act_threshold(1, 27)), 4,  "T1(27)");
    check(int'(act_threshold(2, 27)), 13, "T2(27)");
    check(int'(act_threshold(3, 27)), 22, "T3(27)");

    for (int c = 0; c < 256; c++) begin
      int sa, sb;
      xa = 8'(c);
      @(posedge clk);
      sa = 0;
      sb = 0;
      for (int i = 0; i < 4; i++) begin
        sa += ref_syn2(int'(xa[i]), int'(WA[i]));
        sb += ref_syn2(int'(xa[i]), 1);
      end
      check(int'(ya), ref_act(sa, 3 * 3), "mixed ops");
      check(int'(yb), ref_act(sb, 4 * 3), "all pass");
      bin_cnt[ya]++;
    end
    for (int b = 0; b < 4; b++) check(int'(bin_cnt[b] > 0), 1, "bin reached");

    for (int t = 0; t < 300; t++) begin
      int x[], y[];
      x = new[8];
      for (int i = 0; i < 8; i++) begin
        x[i] = (t < 4) ? 127 * (t & 1) : int'($urandom_range(127));
        xc[i] = 7'(x[i]);
      end
      @(posedge clk);
      ref_layer(x, 7, 4, SEED_DEF, 0, y);
      check(int'(yc), y[3], "int neuron");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
