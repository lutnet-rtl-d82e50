// tb_lutnet_layer_ti16: the tiled layer with the deepest tiling of the
// evaluated (Ti,To) points, TI = 16 and TO = 8 (128 steps per vector, a
// 128-word parameter RAM), with (4,2)-LUTs (two activation inputs, two
// RAM-fed select bits) and 256 inputs per channel, the size of an LFC hidden
// layer's channels. Outputs are cut to 32 so that the array is 16 x 4 nodes;
// 30% of the nodes kept. See lutnet_layer_tb_body.svh.
module tb_lutnet_layer_ti16;
  localparam int N_IN = 256, C_OUT = 32, K = 4, P = 2, TI = 16, TO = 8;
  localparam int DPM = 300, SEED = 33, NB = 3, NG = 2;
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
