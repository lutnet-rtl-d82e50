// tb_lutnet_layer_unrolled: the same layer RTL configured as an unrolled
// (K,0)-LUTNet layer (P = 0, TI = TO = 1): 72 inputs, 8 outputs, 4-LUTs,
// 30% of the nodes kept.  No parameter RAM is built; a new vector is
// accepted every cycle.  See lutnet_layer_tb_body.svh.
module tb_lutnet_layer_unrolled;
  localparam int N_IN = 72, C_OUT = 8, K = 4, P = 0, TI = 1, TO = 1;
  localparam int DPM = 300, SEED = 4, NB = 6, NG = 4;
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
