// param_ram: on-chip RAM holding the learned LUT parameters p of a tiled
// LUTNet layer.
//
// One word per tile step (address to*TI + ti); each word holds P bits for
// every inference node of the LUT array (bit node*P + q is p_{q+1} of that
// node).  The whole word is read in one cycle so that every node gets its
// parameters for the current tile together.  The contents are learned
// during training and are loaded through the write port before use (on an
// FPGA they could equally be preset by the bitstream); the RAM has no reset
// and holds arbitrary values until loaded.
// Timing: synchronous read, rd_data valid one cycle after rd_addr; a write
// takes effect at the clock edge (read-during-write to the same address
// returns the old word).  Port and latency are this design's choices; the
// RAM feeding P LUT inputs per node is the paper's.
module param_ram #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 9216
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
