// adder_tree: combinational balanced binary adder tree over N signed inputs.
//
// The inputs, sign-extended to OUT_W bits and padded with zeros to the next
// power of two P2, are the leaves of a heap-ordered binary tree: node i is
// the sum of nodes 2i+1 and 2i+2, the leaves sit at P2-1 .. 2*P2-2 and
// node 0 is the result. Depth is clog2(N) adders. OUT_W = IN_W + clog2(N)
// is wide enough for any sum. This is the "+" block of a PE cell, which the
// paper describes as an adder tree; the balanced form is this design's
// choice.
module adder_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = IN_W + ((N > 1) ? $clog2(N) : 0)
) (
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);

  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 0;
  localparam int unsigned P2     = 1 << LEVELS;

  logic signed [OUT_W-1:0] node [2*P2-1];

  for (genvar i = 0; i < P2; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign node[P2 - 1 + i] = OUT_W'(in[i]);
    end else begin : g_pad
      assign node[P2 - 1 + i] = '0;
    end
  end

  for (genvar i = 0; i < P2 - 1; i++) begin : g_node
    assign node[i] = node[2*i + 1] + node[2*i + 2];
  end

  assign sum = node[0];

endmodule
