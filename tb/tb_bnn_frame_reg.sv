// tb_bnn_frame_reg: loads, holds and resets a 4 x 12-bit frame register.
// Checks that a frame is captured only when load is high, that it is held
// otherwise, that valid is high exactly in the cycle after a load, and
// that reset clears frame and valid.
module tb_bnn_frame_reg;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n, load;
  logic [3:0][11:0] din, q, model;
  logic valid, model_valid;

  bnn_frame_reg #(.N(4), .W(12)) dut (
    .clk_i(clk), .rst_ni(rst_n), .load_i(load), .samples_i(din),
    .frame_o(q), .valid_o(valid)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    load = 1'b1;
    din = '1;
    @(posedge clk);
    #1;
    checks += 2;
    if (q != '0) failures++;
    if (valid) failures++;
    rst_n = 1'b1;
    model = '0;
    model_valid = 1'b0;
    for (int t = 0; t < 500; t++) begin
      load = ($urandom_range(2) == 0);
      for (int i = 0; i < 4; i++) din[i] = 12'($urandom_range(4095));
      @(posedge clk);
      if (load) model = din;
      model_valid = load;
      #1;
      checks += 2;
      if (q != model) begin
        failures++;
        $display("FAIL frame t=%0d", t);
      end
      if (valid != model_valid) begin
        failures++;
        $display("FAIL valid t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
