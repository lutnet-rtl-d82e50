// accumulator: tile accumulator following the popcount of a tiled LUTNet layer.
//
// An adder whose output register is fed back to its input, summing the
// popcounts of the successive input tiles of one output channel.  When
// `first` is set the register loads din instead of adding, which starts a
// new sum without a separate clear cycle.
// Interface: en qualifies din; acc holds the running sum.
// Timing: acc is updated on the rising clock edge after en; synchronous
// active-low reset clears it (reset and load-on-first are this design's
// choices; the adder-and-register loop is the paper's).
module accumulator #(
  parameter int unsigned IN_W  = 9,
  parameter int unsigned ACC_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             first,
  input  logic [IN_W-1:0]  din,
  output logic [ACC_W-1:0] acc
);
  always_ff @(posedge clk) begin
    if (!rst_n)      acc <= '0;
    else if (en)     acc <= first ? ACC_W'(din) : acc + ACC_W'(din);
  end
endmodule
