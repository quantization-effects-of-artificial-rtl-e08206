// tb_bnn_workloads: the two other published network shapes, 128-64-128-2
// ("a") and 128-16-64-2 ("c"), built from the same RTL by overriding the
// hidden layer sizes of bnn_top (the default shape, 128-32-32-2, is run
// by tb_bnn_top). Both classify the same stream of single-pulse,
// double-pulse and random-noise frames; each verdict is compared with
// bnn_ref_pkg and must arrive two clock edges after its frame.
module tb_bnn_workloads;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  localparam int NFRAMES = 150;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n, in_valid;
  logic [127:0][11:0] samples;
  logic va, vc;
  logic [1:0][1:0] sa, sc;
  logic ga, ua, gc, uc;
  verdict_e da, dc;

  bnn_top #(.H1(64), .H2(128)) dut_a (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .samples_i(samples),
    .out_valid_o(va), .scores_o(sa), .good_o(ga), .ugly_o(ua), .verdict_o(da)
  );
  bnn_top #(.H1(16), .H2(64)) dut_c (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .samples_i(samples),
    .out_valid_o(vc), .scores_o(sc), .good_o(gc), .ugly_o(uc), .verdict_o(dc)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (NFRAMES * 4 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nv_a[4], nv_c[4];
    rst_n = 1'b0;
    in_valid = 1'b0;
    samples = '0;
    repeat (3) @(posedge clk);
    #2;
    rst_n = 1'b1;
    for (int t = 0; t < NFRAMES; t++) begin
      int f[], ya[], yc[];
      case (t % 3)
        0: make_frame(128, 1, f);
        1: make_frame(128, 2, f);
        default: random_frame(128, 12, f);
      endcase
      foreach (f[i]) samples[i] = 12'(f[i]);
      in_valid = 1'b1;
      ref_network(f, 12, 7, 64, 128, 2, SEED_DEF, ya);
      ref_network(f, 12, 7, 16, 64, 2, SEED_DEF, yc);
      @(posedge clk);
      #2;
      in_valid = 1'b0;
      checks += 2;
      if (va || vc) failures++;  // not yet: latency is two edges
      @(posedge clk);
      #2;
      checks += 4;
      if (!va || !vc) failures++;
      if (int'(sa[0]) != ya[0] || int'(sa[1]) != ya[1]) begin
        failures++;
        $display("FAIL a: frame %0d scores %0d,%0d exp %0d,%0d", t, sa[0], sa[1], ya[0], ya[1]);
      end
      if (int'(sc[0]) != yc[0] || int'(sc[1]) != yc[1]) begin
        failures++;
        $display("FAIL c: frame %0d scores %0d,%0d exp %0d,%0d", t, sc[0], sc[1], yc[0], yc[1]);
      end
      if (da != verdict_e'({ya[0] >= 2, ya[1] >= 2}) ||
          dc != verdict_e'({yc[0] >= 2, yc[1] >= 2})) failures++;
      nv_a[int'(da)]++;
      nv_c[int'(dc)]++;
    end
    $display("a 128-64-128-2: undecided=%0d ugly=%0d good=%0d either=%0d",
             nv_a[0], nv_a[1], nv_a[2], nv_a[3]);
    $display("c 128-16-64-2:  undecided=%0d ugly=%0d good=%0d either=%0d",
             nv_c[0], nv_c[1], nv_c[2], nv_c[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
