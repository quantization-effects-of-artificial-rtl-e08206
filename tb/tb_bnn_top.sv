// tb_bnn_top: end-to-end test of the trigger classifier at its default
// size (128 x 12-bit frames, 128-32-32-2 network), with no parameter
// overrides.
//
// Frames are single pulses, overlapping double pulses and uniformly
// random noise, sent back to back and with idle gaps. For each frame the
// expected scores and verdict are computed by bnn_ref_pkg; the testbench
// checks the values and that out_valid rises exactly two clock edges after
// the edge that took the frame, and never otherwise. It also counts how
// often each mechanism occurred and fails if one never did: each of the
// four verdicts, every synapse operation, saturation of the integer
// increase, every activation bin, back-to-back frames, idle cycles in
// which the outputs hold, and a reset in the middle of traffic.
module tb_bnn_top;
  import bnn_pkg::*;
  import bnn_ref_pkg::*;

  localparam int LATENCY = 2;
  localparam int NFRAMES = 600;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic rst_n, in_valid;
  logic [127:0][11:0] samples;
  logic out_valid, good, ugly;
  logic [1:0][1:0] scores;
  verdict_e verdict;

  bnn_top dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .samples_i(samples),
    .out_valid_o(out_valid), .scores_o(scores), .good_o(good),
    .ugly_o(ugly), .verdict_o(verdict)
  );

  always #5 clk = ~clk;

  typedef struct {
    int       due;      // cycle in which out_valid must be high
    int       s0, s1;   // expected scores
  } exp_t;
  exp_t q[$];

  int cycle = 0;
  int n_verdict[4];
  int n_back_to_back = 0, n_idle_hold = 0, n_resets = 0, n_out = 0;
  logic prev_in_valid = 1'b0;
  logic [1:0][1:0] last_scores;

  initial begin
    repeat (NFRAMES * 4 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker, sampled just after each clock edge.
  always @(posedge clk) begin
    #1;
    cycle++;
    if (!rst_n) begin
      last_scores = '0;  // reset clears the output registers
    end else begin
      if (q.size() > 0 && q[0].due == cycle) begin
        exp_t e;
        verdict_e ev;
        e = q.pop_front();
        ev = verdict_e'({e.s0 >= 2, e.s1 >= 2});
        checks += 3;
        if (!out_valid) begin
          failures++;
          $display("FAIL out_valid low in cycle %0d", cycle);
        end
        if (int'(scores[0]) != e.s0 || int'(scores[1]) != e.s1) begin
          failures++;
          $display("FAIL scores %0d,%0d exp %0d,%0d", scores[0], scores[1], e.s0, e.s1);
        end
        if (verdict != ev || good != (e.s0 >= 2) || ugly != (e.s1 >= 2)) begin
          failures++;
          $display("FAIL verdict %s exp %s", verdict.name(), ev.name());
        end
        n_verdict[int'(ev)]++;
        n_out++;
        last_scores = scores;
      end else begin
        checks++;
        if (out_valid) begin
          failures++;
          $display("FAIL unexpected out_valid in cycle %0d", cycle);
        end
        if (n_out > 0) begin
          checks++;
          if (scores != last_scores) failures++;
          else n_idle_hold++;
        end
      end
    end
  end

  task automatic send_frame(int kind);
    int f[], y[];
    exp_t e;
    case (kind)
      0: make_frame(128, 1, f);
      1: make_frame(128, 2, f);
      default: random_frame(128, 12, f);
    endcase
    foreach (f[i]) samples[i] = 12'(f[i]);
    in_valid = 1'b1;
    ref_network(f, 12, 7, 32, 32, 2, SEED_DEF, y);
    e.due = cycle + LATENCY;
    e.s0  = y[0];
    e.s1  = y[1];
    if (prev_in_valid) n_back_to_back++;
    @(posedge clk);
    #2;
    q.push_back(e);
    prev_in_valid = 1'b1;
  endtask

  task automatic idle(int n);
    in_valid = 1'b0;
    repeat (n) begin
      for (int i = 0; i < 128; i++) samples[i] = 12'($urandom_range(4095));
      @(posedge clk);
      #2;
    end
    prev_in_valid = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    samples = '0;
    repeat (3) @(posedge clk);
    #2;
    rst_n = 1'b1;
    for (int t = 0; t < NFRAMES; t++) begin
      send_frame(t % 3);
      if ($urandom_range(3) == 0) idle(1 + $urandom_range(2));
      if (t == NFRAMES / 2) begin
        // Reset in the middle of traffic: pending results are dropped.
        idle(LATENCY + 1);
        rst_n = 1'b0;
        @(posedge clk);
        #2;
        checks++;
        if (out_valid) failures++;
        rst_n = 1'b1;
        n_resets++;
      end
    end
    idle(LATENCY + 3);

    $display("verdicts: undecided=%0d ugly=%0d good=%0d either=%0d",
             n_verdict[0], n_verdict[1], n_verdict[2], n_verdict[3]);
    $display("ops: block=%0d pass=%0d incr=%0d neg=%0d, incr saturated=%0d",
             cnt_op[0], cnt_op[1], cnt_op[2], cnt_op[3], cnt_incr_sat);
    $display("activation bins: %0d %0d %0d %0d", cnt_bin[0], cnt_bin[1],
             cnt_bin[2], cnt_bin[3]);
    $display("back-to-back=%0d idle-hold=%0d resets=%0d frames out=%0d",
             n_back_to_back, n_idle_hold, n_resets, n_out);
    for (int v = 0; v < 4; v++) begin
      checks++;
      if (n_verdict[v] == 0) begin
        failures++;
        $display("FAIL verdict %0d never produced", v);
      end
      checks += 2;
      if (cnt_op[v] == 0) failures++;
      if (cnt_bin[v] == 0) failures++;
    end
    checks += 6;
    if (cnt_incr_sat == 0)   failures++;
    if (n_back_to_back == 0) failures++;
    if (n_idle_hold == 0)    failures++;
    if (n_resets == 0)       failures++;
    if (n_out != NFRAMES)    failures++;  // every frame produced a verdict
    if (q.size() != 0)       failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
