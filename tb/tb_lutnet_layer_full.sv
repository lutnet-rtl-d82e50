// tb_lutnet_layer_full: end-to-end test of the layer at its default size,
// CNV's sixth convolutional layer as (5,1)-LUTNet: 2304 inputs, 256
// outputs, TI = TO = 8, 64.6% of the nodes pruned.  The layer is
// instantiated without parameter overrides; the constants below restate the
// defaults for the reference model.  See lutnet_layer_tb_body.svh.
module tb_lutnet_layer_full;
  localparam int N_IN = 2304, C_OUT = 256, K = 5, P = 1, TI = 8, TO = 8;
  localparam int DPM = 354, SEED = 1, NB = 2, NG = 2;
  `include "lutnet_layer_tb_body.svh"

  initial begin
    @(tb_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  lutnet_layer dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_data,
    .pram_wr_en, .pram_wr_addr, .pram_wr_data, .thr_wr_en, .thr_wr_addr, .thr_wr_data
  );
endmodule
