// tb_lutnet_layer: end-to-end test of the tiled LUTNet layer at reduced size
// (96 inputs, 16 outputs, (5,1)-LUTs, TI = 4, TO = 2, half the nodes
// pruned).  See lutnet_layer_tb_body.svh for the checks.
module tb_lutnet_layer;
  localparam int N_IN = 96, C_OUT = 16, K = 5, P = 1, TI = 4, TO = 2;
  localparam int DPM = 500, SEED = 9, NB = 4, NG = 3;
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
