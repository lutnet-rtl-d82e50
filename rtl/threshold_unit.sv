// threshold_unit: activation function of a LUTNet layer.
//
// Turns the accumulated count of +1 terms of each output channel into a
// binary activation: y = 1 (+1) when the count reaches the channel's
// threshold, else 0 (-1).  Batch normalisation, the layer scaling factor
// and the sign activation of a binarised network all fold into this one
// per-channel threshold, which also absorbs the offset between a count of
// +1 terms and a +/-1 sum.  The C thresholds sit in a small register file;
// the COLS columns of the LUT array share it, column j of output tile
// `group` reading channel group*COLS + j.
// Interface: acc[COLS] in, y[COLS] out (combinational); thresholds are
// written through wr_en/wr_addr/wr_data (synchronous) and must be loaded
// before use; they have no reset value.
// The paper only names the activation block; the threshold form, the
// register file and its port are this design's choices.
module threshold_unit #(
  parameter int unsigned C          = 256,
  parameter int unsigned COLS       = 32,
  parameter int unsigned ACC_W      = 12
) (
  input  logic                                   clk,
  input  logic [$clog2(C/COLS > 1 ? C/COLS : 2)-1:0] group,
  input  logic [COLS-1:0][ACC_W-1:0]             acc,
  output logic [COLS-1:0]                        y,
  input  logic                                   wr_en,
  input  logic [$clog2(C)-1:0]                   wr_addr,
  input  logic [ACC_W-1:0]                       wr_data
);
  logic [ACC_W-1:0] thr [C];

  always_ff @(posedge clk)
    if (wr_en) thr[wr_addr] <= wr_data;

  always_comb
    for (int unsigned j = 0; j < COLS; j++)
      y[j] = acc[j] >= thr[int'(group) * COLS + j];
endmodule
