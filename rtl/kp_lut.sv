// kp_lut: one (K,P)-LUT inference operator of LUTNet.
//
// A K-input LUT computing an arbitrary learned Boolean function g(x, p) of
// K-P activation inputs x and P parameter inputs p (streamed from RAM in a
// tiled layer).  As in the LUTNet microarchitecture, it is built as 2^P
// internal (K-P)-input sub-tables that share the activation inputs, followed
// by a 2^P:1 multiplexer selected by p.  With P = 0 it is a plain K-LUT.
//
// Interface: x[K-P-1:0] (x[0] is the node's original BNN connection),
// p[max(P,1)-1:0] (ignored when P = 0), y.  1 encodes +1 and 0 encodes -1.
// The mask bit at address {p, x} is the output; the learned mask is a
// parameter, i.e. hardened into the LUT as in the paper's flow.
// Timing: purely combinational.
//
// Follows the paper: the sub-table-plus-multiplexer structure, and the
// feasibility rule 2^(2^(K-P)) >= 2^P, checked at elaboration.  This
// design's choice: placing p in the upper address bits (the paper's equation
// and its figure disagree on the order of inputs).
module kp_lut #(
  parameter int unsigned    K    = 5,
  parameter int unsigned    P    = 1,
  parameter logic [(1<<K)-1:0] MASK = '0
) (
  input  logic [K-P-1:0]            x,
  input  logic [(P > 0 ? P : 1)-1:0] p,
  output logic                      y
);
  localparam int unsigned NX  = K - P;
  localparam int unsigned SUB = 1 << NX;   // entries per internal sub-table

  if (P >= K) begin : g_bad_p
    $error("kp_lut: P must be below K");
  end
  if ((1 << SUB) < (1 << P)) begin : g_infeasible
    $error("kp_lut: infeasible (K,P): 2^(2^(K-P)) < 2^P");
  end

  // Outputs of the 2^P internal (K-P)-LUTs.
  logic [(1<<P)-1:0] sub_y;
  for (genvar s = 0; s < (1 << P); s++) begin : g_sub
    localparam logic [SUB-1:0] SUB_MASK = MASK[s*SUB +: SUB];
    assign sub_y[s] = SUB_MASK[x];
  end

  if (P == 0) begin : g_nomux
    assign y = sub_y[0];
    logic unused_p;
    assign unused_p = p[0];
  end else begin : g_mux
    assign y = sub_y[p];
  end
endmodule
