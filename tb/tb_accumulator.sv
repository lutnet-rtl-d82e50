// tb_accumulator: drives random popcounts with random first/enable patterns
// and compares the register with a running sum kept in the testbench.
module tb_accumulator;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [8:0]  din = '0;
  logic [11:0] acc;
  int model;

  accumulator #(.IN_W(9), .ACC_W(12)) dut (.clk, .rst_n, .en, .first, .din, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); @(negedge clk);
    checks++;
    if (acc !== '0) begin failures++; $display("FAIL: not cleared by reset"); end
    rst_n = 1;
    model = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      en    = ($urandom % 4) != 0;
      first = ($urandom % 8) == 0;
      din   = 9'($urandom % 289);
      @(negedge clk);   // one edge has passed
      if (en) model = first ? int'(din) : (model + int'(din)) % 4096;
      en = 0;
      checks++;
      if (int'(acc) != model) begin
        failures++;
        $display("FAIL t=%0d: acc=%0d expected %0d", t, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
