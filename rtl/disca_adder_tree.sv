// disca_adder_tree: binary adder tree summing N unsigned IN_W-bit operands.
//
// The operands are the leaves of a complete binary tree stored as a heap:
// node i has children 2i+1 and 2i+2, leaves are nodes N-1 .. 2N-2 and node 0
// is the sum. Each internal node is one two-input adder, giving a depth of
// ceil(log2 N) adders. Purely combinational. The published design only names
// the adder tree; the heap arrangement is this design's choice.
module disca_adder_tree #(
  parameter int unsigned N     = 32,
  parameter int unsigned IN_W  = 4,
  localparam int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic [IN_W-1:0]  in [N],
  output logic [OUT_W-1:0] sum
);

  logic [OUT_W-1:0] node [2*N-1];

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign node[N-1+i] = OUT_W'(in[i]);
  end

  for (genvar i = 0; i < N-1; i++) begin : g_add
    assign node[i] = node[2*i+1] + node[2*i+2];
  end

  assign sum = node[0];

endmodule
