// tile_sequencer: control of a tiled LUTNet layer.
//
// After an input vector is accepted, issues its TI*TO tile steps, one per
// cycle: output tile `to` in the outer loop, input tile `ti` in the inner
// loop, so each output tile's channels are finished before the next begins
// and only one set of COLS accumulators is needed.  `first` and `last` mark
// the first and last input tile of each output tile.  The next vector can be
// accepted in the same cycle as the last step of the current one, so
// back-to-back vectors take exactly TI*TO cycles each.
// Interface: in_valid/in_ready handshake (accept = in_valid & in_ready);
// issue/ti/to/first/last describe the step issued this cycle.
// Timing: registered counters, synchronous active-low reset.
// The paper fixes the tiling (TI input tiles, TO output tiles, one pass of
// the LUT array per tile); the loop order and the handshake are this
// design's choices.
module tile_sequencer #(
  parameter int unsigned TI = 8,
  parameter int unsigned TO = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  output logic                           in_ready,
  output logic                           accept,
  output logic                           issue,
  output logic [$clog2(TI > 1 ? TI : 2)-1:0] ti,
  output logic [$clog2(TO > 1 ? TO : 2)-1:0] to,
  output logic                           first,
  output logic                           last
);
  logic busy;
  logic last_ti, last_to;

  assign last_ti  = (int'(ti) == TI - 1);
  assign last_to  = (int'(to) == TO - 1);
  assign issue    = busy;
  assign first    = busy && (ti == '0);
  assign last     = busy && last_ti;
  assign in_ready = !busy || (last_ti && last_to);
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      ti   <= '0;
      to   <= '0;
    end else if (busy && !(last_ti && last_to)) begin
      if (last_ti) begin
        ti <= '0;
        to <= to + 1'b1;
      end else begin
        ti <= ti + 1'b1;
      end
    end else begin
      // idle, or issuing the final step: start over if a vector is accepted
      busy <= accept;
      ti   <= '0;
      to   <= '0;
    end
  end

  // A step is only issued while a vector is held.
  assert property (@(posedge clk) disable iff (!rst_n) first |-> issue);
endmodule
