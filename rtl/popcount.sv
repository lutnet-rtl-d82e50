// popcount: population count of an N-bit vector.
//
// Sums the +1 terms produced by one column of inference operators; a BNN or
// LUTNet neuron sums its +/-1 products with a popcount rather than a general
// adder tree.  Written as a plain sum of the bits and left to synthesis to
// build the tree (the paper gives the function, not the structure).
// Output width is clog2(N+1), enough for the all-ones count.
// Timing: purely combinational.
module popcount #(
  parameter int unsigned N = 288
) (
  input  logic [N-1:0]           bits,
  output logic [$clog2(N+1)-1:0] count
);
  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < N; i++)
      count = count + ($clog2(N+1))'(bits[i]);
  end
endmodule
