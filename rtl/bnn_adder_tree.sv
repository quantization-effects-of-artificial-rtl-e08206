// bnn_adder_tree: combinational pairwise adder tree.
//
// Sums N unsigned operands of IN_W bits as ((x0+x1)+(x2+x3))+..., so the
// depth grows with log2(N) instead of N. N must be a power of two, as
// the network's layer widths are. The tree is laid out as a heap:
// leaves at node[N..2N-1], node[i] = node[2i] + node[2i+1], root node[1].
// The result has OUT_W = IN_W + log2(N) bits and cannot overflow. No
// pipeline registers: the sum is valid one combinational delay after the
// operands.
module bnn_adder_tree #(
  parameter int unsigned N     = 4,                 // operand count, 2^n
  parameter int unsigned IN_W  = 2,                 // operand width
  parameter int unsigned OUT_W = IN_W + $clog2(N)   // sum width
) (
  input  logic [N-1:0][IN_W-1:0] x_i,  // operands, x_i[0] first
  output logic [OUT_W-1:0]       sum_o // sum of all operands
);

  if ((N & (N - 1)) != 0 || N == 0) begin : g_bad_n
    $error("bnn_adder_tree: N must be a power of two");
  end

  if (N == 1) begin : g_single
    assign sum_o = OUT_W'(x_i[0]);
  end else begin : g_tree
    // One sum per tree node; node[0] is unused.
    logic [2*N-1:1][OUT_W-1:0] node;

    for (genvar i = 0; i < N; i++) begin : g_leaf
      assign node[N+i] = OUT_W'(x_i[i]);
    end
    for (genvar i = N - 1; i >= 1; i--) begin : g_node
      assign node[i] = node[2*i] + node[2*i+1];
    end
    assign sum_o = node[1];
  end

endmodule
