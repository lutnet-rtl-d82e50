// lut_array: the hard-wired array of (K,P)-LUT inference operators of a
// LUTNet layer.
//
// ROWS x COLS nodes.  Column j serves one output channel per output tile;
// row i is the node whose original BNN connection is element i of the
// current input tile.  Each kept node is a kp_lut whose first activation
// input is tile element i and whose other K-P-1 activation inputs are
// further, distinct elements of the same tile; its P parameter inputs come
// from the parameter RAM word of the current tile step.  Nodes removed by
// pruning are not built and output 0, i.e. they add nothing to the column's
// popcount.  Masks, wiring and the pruning pattern are elaboration-time
// constants, taken from lutnet_pkg (node index = j*ROWS + i); in the
// paper's flow a generator writes them from the trained network.
// Interface: tile[ROWS] and p[ROWS*COLS*P] in, y[COLS][ROWS] out.
// Timing: purely combinational.
// The P bits of pruned nodes are left unread (the RAM layout keeps one
// slot per node position); a lint tool reports them as unused.
module lut_array #(
  parameter int unsigned K          = 5,
  parameter int unsigned P          = 1,
  parameter int unsigned ROWS       = 288,
  parameter int unsigned COLS       = 32,
  parameter int unsigned DENSITY_PM = 354,
  parameter int unsigned SEED       = 1
) (
  input  logic [ROWS-1:0]                        tile,
  input  logic [ROWS*COLS*(P > 0 ? P : 1)-1:0]   p,
  output logic [COLS-1:0][ROWS-1:0]              y
);
  localparam int unsigned NX = K - P;
  localparam int unsigned PW = (P > 0) ? P : 1;

  for (genvar j = 0; j < COLS; j++) begin : g_col
    for (genvar i = 0; i < ROWS; i++) begin : g_row
      localparam int unsigned NODE = j * ROWS + i;
      if (lutnet_pkg::node_kept(SEED, NODE, DENSITY_PM)) begin : g_node
        localparam logic [(1<<lutnet_pkg::KMAX)-1:0] FULL_MASK = lutnet_pkg::node_mask(SEED, NODE);
        logic [NX-1:0] xs;
        for (genvar e = 0; e < NX; e++) begin : g_in
          assign xs[e] = tile[lutnet_pkg::node_conn(SEED, NODE, i, e, NX, ROWS)];
        end
        kp_lut #(.K(K), .P(P), .MASK(FULL_MASK[(1<<K)-1:0])) u_lut (
          .x(xs), .p(p[NODE*PW +: PW]), .y(y[j][i])
        );
      end else begin : g_pruned
        assign y[j][i] = 1'b0;
      end
    end
  end
endmodule
