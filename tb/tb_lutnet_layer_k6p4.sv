// tb_lutnet_layer_k6p4: the tiled layer with (6,4)-LUTs, the largest
// parameter share that is still feasible for 6-input LUTs (two activation
// inputs, four RAM-fed select bits, 16 sub-tables per LUT), at reduced
// size: 64 inputs, 16 outputs, TI = 2, TO = 4, 40% of the nodes kept.
// See lutnet_layer_tb_body.svh.
module tb_lutnet_layer_k6p4;
  localparam int N_IN = 64, C_OUT = 16, K = 6, P = 4, TI = 2, TO = 4;
  localparam int DPM = 400, SEED = 21, NB = 3, NG = 3;
  `include "lutnet_layer_tb_body.svh"

  initial begin
    @(tb_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  lutnet_layer #(.N_IN(N_IN), .C_OUT(C_OUT), .K(K), .P(P), .TI(TI), .TO(TO),
                 .DENSITY_PM(DPM), .SEED(SEED)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_data,
    .pram_wr_en, .pram_wr_addr, .pram_wr_data, .thr_wr_en, .thr_wr_addr, .thr_wr_data
  );
endmodule
