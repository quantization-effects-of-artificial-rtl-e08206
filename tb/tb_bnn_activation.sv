// tb_bnn_activation: exhaustive sums for the two published threshold sets
// (6, 18, 30 and 4, 13, 22), checking every bin boundary: a sum equal to a
// threshold stays in the lower bin.
module tb_bnn_activation;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [5:0] s;
  logic [1:0] a4, a3;
  int bin_cnt[4];

  bnn_activation #(.SUM_W(6), .T1(6), .T2(18), .T3(30)) dut4 (.sum_i(s), .act_o(a4));
  bnn_activation #(.SUM_W(6), .T1(4), .T2(13), .T3(22)) dut3 (.sum_i(s), .act_o(a3));

  always #5 clk = ~clk;

  function automatic int bin_of(int v, int t1, int t2, int t3);
    return (v > t3) ? 3 : (v > t2) ? 2 : (v > t1) ? 1 : 0;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      s = 6'(v);
      @(posedge clk);
      checks += 2;
      if (int'(a4) != bin_of(v, 6, 18, 30)) begin
        failures++;
        $display("FAIL 4-input sum=%0d act=%0d", v, a4);
      end
      if (int'(a3) != bin_of(v, 4, 13, 22)) begin
        failures++;
        $display("FAIL 3-input sum=%0d act=%0d", v, a3);
      end
      bin_cnt[a4]++;
    end
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (bin_cnt[b] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
