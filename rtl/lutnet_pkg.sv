// lutnet_pkg: types and table functions shared by the LUTNet layer engine.
//
// Activations, LUT outputs and RAM parameters are binary values in {-1,+1},
// held in one bit each with 1 = +1 and 0 = -1.
//
// A trained LUTNet layer is defined by three tables that come out of
// training: the K-LUT mask of every node, the activation each node input is
// wired to, and which nodes survived pruning; a fourth table, the learned p
// bits, fills the parameter RAM.  This package generates stand-ins for the
// first three from a seed with a small integer hash, so that the RTL
// elaborates and can be checked without a trained network.  To build a real
// layer, replace the bodies of node_mask, node_conn and node_kept with
// lookups into the trained tables; nothing else needs to change.  The p bits
// and the activation thresholds are run-time data, loaded into RAM.
//
// The tile-step record (step_t) passes one issued tile through the pipeline.
package lutnet_pkg;

  // Maximum supported LUT size (inputs per physical LUT on current FPGAs).
  localparam int unsigned KMAX = 6;

  // One issued tile step of the engine.
  typedef struct packed {
    logic        valid;  // a tile is being processed in this stage
    logic        first;  // first input tile of an output tile: clear accumulator
    logic        last;   // last input tile of an output tile: result complete
    logic [15:0] to;     // output tile index
  } step_t;

  // 32-bit integer hash (xorshift-multiply finaliser).
  function automatic logic [31:0] mix32(input logic [31:0] a);
    logic [31:0] v;
    v = a;
    v = v ^ (v >> 16);
    v = v * 32'h7feb352d;
    v = v ^ (v >> 15);
    v = v * 32'h846ca68b;
    v = v ^ (v >> 16);
    return v;
  endfunction

  function automatic logic [31:0] hash3(input int unsigned seed, input int unsigned a,
                                        input int unsigned salt);
    return mix32(mix32(mix32(seed) ^ a) ^ (salt * 32'h9e3779b9));
  endfunction

  // Mask of node `node`: bit a is the LUT output for address a, where the
  // address is {p_P..p_1, x_{K-P}..x_1}.  Only the low 2^K bits are used.
  function automatic logic [(1<<KMAX)-1:0] node_mask(input int unsigned seed,
                                                     input int unsigned node);
    return {hash3(seed, node, 11), hash3(seed, node, 12)};
  endfunction

  // True if node `node` survived pruning (kept with probability density_pm/1000).
  function automatic bit node_kept(input int unsigned seed, input int unsigned node,
                                   input int unsigned density_pm);
    return (hash3(seed, node, 13) % 1000) < density_pm;
  endfunction

  // Tile element wired to activation input e (0-based) of node `node` in row
  // `row` of a tile of `tile` elements, for a LUT with `nx` activation inputs.
  // Input 0 keeps the node's original connection (tile element `row`); the
  // others are distinct elements different from `row`, one drawn from each of
  // nx-1 equal slices of the remaining tile positions.
  function automatic int unsigned node_conn(input int unsigned seed, input int unsigned node,
                                            input int unsigned row, input int unsigned e,
                                            input int unsigned nx, input int unsigned tile);
    int unsigned span, off;
    if (e == 0 || tile < 2) return row;
    span = (tile - 1) / (nx - 1);
    if (span == 0) span = 1;
    off  = 1 + (e - 1) * span + (hash3(seed, node * 8 + e, 14) % span);
    return (row + off) % tile;
  endfunction

endpackage
