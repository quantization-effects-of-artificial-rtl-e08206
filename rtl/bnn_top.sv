// bnn_top: pulse-shape trigger classifier built around the LUT-native BNN.
//
// A frame of N_IN ADC samples (128 x 12 bits) is presented on samples_i
// with in_valid_i high for one clock. The frame register captures it on
// that clock edge; the combinational network (128-32-32-2 by default)
// classifies it; the verdict is registered on the next edge. So
// out_valid_o rises two clock edges after the edge that sampled
// in_valid_i, and a new frame can be accepted on every clock. The clock
// period must cover the network's combinational delay (about 10-15 ns on
// the FPGA fabric the design targets), or the path must be constrained as
// a multicycle path.
//
// Outputs: the two output neuron values (scores_o[0] = good,
// scores_o[1] = ugly), the class bits and the combined verdict
// (good / ugly / either / undecided). The registers around the network
// are this design's choice; the network itself has no clocked element.
// Synchronous active-low reset.
module bnn_top
  import bnn_pkg::*;
#(
  parameter int unsigned N_IN     = N_IN_DEF,      // samples per frame
  parameter int unsigned SAMPLE_W = SAMPLE_W_DEF,  // ADC bits per sample
  parameter int unsigned IN_W     = IN_W_DEF,      // input-layer bits
  parameter int unsigned H1       = H1_DEF,        // first hidden layer
  parameter int unsigned H2       = H2_DEF,        // second hidden layer
  parameter int unsigned SEED     = SEED_DEF       // weight set
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,      // synchronous, low
  input  logic                          in_valid_i,  // frame present
  input  logic [N_IN-1:0][SAMPLE_W-1:0] samples_i,   // frame, sample 0 first
  output logic                          out_valid_o, // verdict new
  output logic [1:0][1:0]               scores_o,    // output neurons
  output logic                          good_o,      // "good" claimed
  output logic                          ugly_o,      // "ugly" claimed
  output verdict_e                      verdict_o    // combined verdict
);

  logic [N_IN-1:0][SAMPLE_W-1:0] frame;
  logic                          frame_valid;
  logic [1:0][1:0]               scores;
  logic                          good, ugly;
  verdict_e                      verdict;

  bnn_frame_reg #(.N(N_IN), .W(SAMPLE_W)) u_frame (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .load_i   (in_valid_i),
    .samples_i(samples_i),
    .frame_o  (frame),
    .valid_o  (frame_valid)
  );

  bnn_network #(
    .N_IN(N_IN), .SAMPLE_W(SAMPLE_W), .IN_W(IN_W),
    .H1(H1), .H2(H2), .N_OUT(2), .SEED(SEED)
  ) u_net (
    .samples_i(frame),
    .out_o    (scores)
  );

  bnn_class_decode u_dec (
    .out_i    (scores),
    .good_o   (good),
    .ugly_o   (ugly),
    .verdict_o(verdict)
  );

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      out_valid_o <= 1'b0;
      scores_o    <= '0;
      good_o      <= 1'b0;
      ugly_o      <= 1'b0;
      verdict_o   <= V_UNDECIDED;
    end else begin
      out_valid_o <= frame_valid;
      if (frame_valid) begin
        scores_o  <= scores;
        good_o    <= good;
        ugly_o    <= ugly;
        verdict_o <= verdict;
      end
    end
  end

  // The class bits and the verdict always agree.
  a_verdict: assert property (@(posedge clk_i) disable iff (!rst_ni)
    verdict_o == verdict_e'({good_o, ugly_o}));

endmodule
