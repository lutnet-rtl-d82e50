// tb_param_ram: loads a 16 x 224 RAM with random words, reads them back
// checking the one-cycle read latency, then mixes random writes and reads
// against a copy of the contents kept in the testbench.
module tb_param_ram;
  localparam int D = 16, W = 224;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [3:0] rd_addr = '0, wr_addr = '0;
  logic wr_en = 0;
  logic [W-1:0] rd_data, wr_data = '0;
  logic [W-1:0] model [D];

  param_ram #(.DEPTH(D), .WIDTH(W)) dut (.clk, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      for (int w = 0; w < W; w += 32) model[a][w +: 32] = $urandom;
      @(negedge clk);
      wr_en = 1; wr_addr = 4'(a); wr_data = model[a];
    end
    @(negedge clk);
    wr_en = 0;
    // read every word; data must appear one edge after the address
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      rd_addr = 4'(a);
      #1;
      if (a > 0) begin
        checks++;   // before the edge the old word is still shown
        if (rd_data !== model[a-1]) begin failures++; $display("FAIL: latency, addr %0d", a); end
      end
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL: loaded word %0d", a); end
    end
    // random writes and reads
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) == 1;
      wr_addr = 4'($urandom);
      for (int w = 0; w < W; w += 32) wr_data[w +: 32] = $urandom;
      rd_addr = 4'($urandom);
      @(negedge clk);
      checks++;
      if (rd_data !== model[rd_addr]) begin failures++; $display("FAIL: read %0d after write", rd_addr); end
      if (wr_en) model[wr_addr] = wr_data;
      wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
