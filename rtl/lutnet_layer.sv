// lutnet_layer: one tiled (K,P)-LUTNet layer engine.
//
// Computes, for an N_IN-bit binary input vector x (one convolution window,
// or the input of a fully connected layer), C_OUT binary outputs
//     y_c = f( sum over tiles t, sum over nodes m of g_m(x~(m,t), p~(m,t)) )
// where each g_m is a learned K-input Boolean function implemented by one
// (K,P)-LUT: K-P of its inputs are activations, P are learned parameters read
// from on-chip RAM.  The layer is tiled TI ways over its inputs and TO ways
// over its outputs, so a LUT array of (N_IN/TI) x (C_OUT/TO) nodes is reused
// TI*TO times per input vector, once per tile step, with fresh p~ each time.
//
// Datapath per tile step (one step per clock):
//   issue   tile_sequencer picks (to, ti); the RAM word for step to*TI+ti is
//           read and input tile ti is taken from the input buffer;
//   stage 1 lut_array evaluates all nodes; one popcount per column counts the
//           +1 outputs; results registered;
//   stage 2 one accumulator per column adds the TI popcounts of an output
//           tile (loaded on the first input tile);
//   stage 3 after the last input tile, threshold_unit binarises the COLS sums
//           into output channels to*COLS .. to*COLS+COLS-1.
// When all TO output tiles are done, out_valid pulses for one cycle with the
// full C_OUT-bit result in out_data.
//
// Interface: in_valid/in_ready handshake on in_data (the vector is copied
// into an internal buffer on acceptance).  out_valid is a pulse with no
// back-pressure.  pram_* writes a parameter RAM word, thr_* a threshold;
// both tables must be loaded before the first vector (they are the trained
// parameters, kept in RAM rather than hardened, and have no reset value).
// Timing: a vector accepted in cycle A produces out_valid in cycle
// A + TI*TO + 4; a new vector can be accepted every TI*TO cycles.
//
// With P = 0 and TI = TO = 1 the same RTL is the unrolled (K,0)-LUTNet layer:
// every node is a plain K-LUT and no RAM is built.
//
// From the paper: the (K,P)-LUT node, the LUT array with hardened masks and
// preserved first connections, popcount followed by an accumulator, the RAM
// feeding P inputs per node, tiling over inputs and outputs, and the default
// sizes (CNV's sixth convolution: 2304 inputs, 256 outputs, (5,1)-LUTs,
// TI = TO = 8, 64.6% pruned).  This design's own choices: the threshold form
// of the activation, the loop order, the pipeline, the handshakes and the
// placeholder tables in lutnet_pkg standing in for a trained network.
module lutnet_layer #(
  parameter int unsigned N_IN       = 2304,
  parameter int unsigned C_OUT      = 256,
  parameter int unsigned K          = 5,
  parameter int unsigned P          = 1,
  parameter int unsigned TI         = 8,
  parameter int unsigned TO         = 8,
  parameter int unsigned DENSITY_PM = 354,
  parameter int unsigned SEED       = 1,
  // derived
  localparam int unsigned ROWS   = N_IN / TI,
  localparam int unsigned COLS   = C_OUT / TO,
  localparam int unsigned PW     = (P > 0) ? P : 1,
  localparam int unsigned RAM_W  = ROWS * COLS * PW,
  localparam int unsigned STEPS  = TI * TO,
  localparam int unsigned AW     = $clog2(STEPS > 1 ? STEPS : 2),
  localparam int unsigned PC_W   = $clog2(ROWS + 1),
  localparam int unsigned ACC_W  = $clog2(N_IN + 1),
  localparam int unsigned CW     = $clog2(C_OUT > 1 ? C_OUT : 2)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [N_IN-1:0]   in_data,
  output logic              out_valid,
  output logic [C_OUT-1:0]  out_data,
  input  logic              pram_wr_en,
  input  logic [AW-1:0]     pram_wr_addr,
  input  logic [RAM_W-1:0]  pram_wr_data,
  input  logic              thr_wr_en,
  input  logic [CW-1:0]     thr_wr_addr,
  input  logic [ACC_W-1:0]  thr_wr_data
);
  import lutnet_pkg::*;

  localparam int unsigned TIW = $clog2(TI > 1 ? TI : 2);
  localparam int unsigned TOW = $clog2(TO > 1 ? TO : 2);

  if (N_IN % TI != 0 || C_OUT % TO != 0) begin : g_bad_tiling
    $error("lutnet_layer: TI must divide N_IN and TO must divide C_OUT");
  end

  // ---------------- issue: sequencer, input buffer, RAM read ----------------
  logic           accept, issue, first, last;
  logic [TIW-1:0] ti;
  logic [TOW-1:0] to;

  tile_sequencer #(.TI(TI), .TO(TO)) u_seq (
    .clk, .rst_n, .in_valid, .in_ready, .accept,
    .issue, .ti, .to, .first, .last
  );

  logic [N_IN-1:0] in_buf;
  always_ff @(posedge clk)
    if (accept) in_buf <= in_data;

  step_t          s1, s2, s3;
  logic [ROWS-1:0] tile_q;

  always_ff @(posedge clk) begin
    if (!rst_n) s1 <= '0;
    else        s1 <= '{valid: issue, first: first, last: last, to: 16'(to)};
    tile_q <= in_buf[int'(ti) * ROWS +: ROWS];
  end

  logic [RAM_W-1:0] p_word;
  if (P > 0) begin : g_ram
    param_ram #(.DEPTH(STEPS), .WIDTH(RAM_W)) u_ram (
      .clk,
      .rd_addr (AW'(int'(to) * TI + int'(ti))),
      .rd_data (p_word),
      .wr_en   (pram_wr_en),
      .wr_addr (pram_wr_addr),
      .wr_data (pram_wr_data)
    );
  end else begin : g_noram
    // Unrolled (K,0) layer: no parameter inputs, the RAM ports are unused.
    assign p_word = '0;
  end

  // ---------------- stage 1: LUT array and popcounts ----------------
  logic [COLS-1:0][ROWS-1:0] node_y;
  logic [COLS-1:0][PC_W-1:0] pc, pc_q;

  lut_array #(.K(K), .P(P), .ROWS(ROWS), .COLS(COLS),
              .DENSITY_PM(DENSITY_PM), .SEED(SEED)) u_array (
    .tile (tile_q),
    .p    (p_word),
    .y    (node_y)
  );

  for (genvar j = 0; j < COLS; j++) begin : g_pc
    popcount #(.N(ROWS)) u_pc (.bits(node_y[j]), .count(pc[j]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) s2 <= '0;
    else        s2 <= s1;
    pc_q <= pc;
  end

  // ---------------- stage 2: tile accumulators ----------------
  logic [COLS-1:0][ACC_W-1:0] acc;
  for (genvar j = 0; j < COLS; j++) begin : g_acc
    accumulator #(.IN_W(PC_W), .ACC_W(ACC_W)) u_acc (
      .clk, .rst_n, .en(s2.valid), .first(s2.first), .din(pc_q[j]), .acc(acc[j])
    );
  end

  always_ff @(posedge clk)
    if (!rst_n) s3 <= '0;
    else        s3 <= s2;

  // ---------------- stage 3: activation and output assembly ----------------
  logic [COLS-1:0] act;
  threshold_unit #(.C(C_OUT), .COLS(COLS), .ACC_W(ACC_W)) u_thr (
    .clk,
    .group   (TOW'(s3.to)),
    .acc     (acc),
    .y       (act),
    .wr_en   (thr_wr_en),
    .wr_addr (thr_wr_addr),
    .wr_data (thr_wr_data)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= s3.valid && s3.last && (int'(s3.to) == TO - 1);
    end
    if (s3.valid && s3.last)
      out_data[int'(s3.to) * COLS +: COLS] <= act;
  end
endmodule
