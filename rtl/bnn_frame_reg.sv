// bnn_frame_reg: frame register in front of the combinational network.
//
// Captures a whole frame of N samples of W bits in one clock when load_i is
// high and holds it until the next load; valid_o is high for the one cycle
// after a load, marking a new frame. With the defaults it holds
// 128 x 12 = 1536 flip-flops, in line with the roughly 1.5k flip-flops
// reported for every BNN variant, which is why this design registers the
// raw 12-bit samples. Synchronous active-low reset clears the frame and
// valid_o.
module bnn_frame_reg
  import bnn_pkg::*;
#(
  parameter int unsigned N = N_IN_DEF,      // samples per frame
  parameter int unsigned W = SAMPLE_W_DEF   // bits per sample
) (
  input  logic                clk_i,
  input  logic                rst_ni,    // synchronous, active low
  input  logic                load_i,    // capture samples_i this cycle
  input  logic [N-1:0][W-1:0] samples_i, // incoming frame
  output logic [N-1:0][W-1:0] frame_o,   // held frame
  output logic                valid_o    // frame_o is new this cycle
);

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      frame_o <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= load_i;
      if (load_i) frame_o <= samples_i;
    end
  end

endmodule
