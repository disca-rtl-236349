// disca_parallel_counter: population count of one SC multiplication result.
//
// Counts the ones in a W-bit product bitstream (W = 8 for BP8), turning the
// quasi-stochastic product into a binary number 0..W. Purely combinational.
// The published design names a layer of parallel counters; the plain adder-chain count
// used here is this design's choice.
module disca_parallel_counter #(
  parameter int unsigned W   = 8,
  localparam int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  bits,
  output logic [CW-1:0] count
);

  always_comb begin
    count = '0;
    for (int i = 0; i < W; i++) count += CW'(bits[i]);
  end

endmodule
