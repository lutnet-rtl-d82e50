// tb_threshold_unit: loads random thresholds for 16 channels over 4
// columns, checks the >= comparison with sums on, just below and just above
// each threshold for every output tile, then rewrites some and checks again.
module tb_threshold_unit;
  localparam int C = 16, COLS = 4, AW = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [1:0] group = '0;
  logic [COLS-1:0][AW-1:0] acc = '0;
  logic [COLS-1:0] y;
  logic wr_en = 0;
  logic [3:0] wr_addr = '0;
  logic [AW-1:0] wr_data = '0;
  int thr [C];

  threshold_unit #(.C(C), .COLS(COLS), .ACC_W(AW)) dut (.clk, .group, .acc, .y, .wr_en, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sweep();
    for (int g = 0; g < C / COLS; g++)
      for (int d = -1; d <= 1; d++) begin
        group = 2'(g);
        for (int j = 0; j < COLS; j++) begin
          int v;
          v = thr[g*COLS+j] + d;
          if (v < 0) v = 0;
          if (v > 255) v = 255;
          acc[j] = AW'(v);
        end
        #1;
        for (int j = 0; j < COLS; j++) begin
          checks++;
          if (y[j] !== (int'(acc[j]) >= thr[g*COLS+j])) begin
            failures++;
            $display("FAIL ch %0d acc %0d thr %0d y %b", g*COLS+j, acc[j], thr[g*COLS+j], y[j]);
          end
        end
      end
  endtask

  initial begin
    for (int c = 0; c < C; c++) begin
      thr[c] = 1 + int'($urandom % 250);
      @(negedge clk);
      wr_en = 1; wr_addr = 4'(c); wr_data = AW'(thr[c]);
    end
    @(negedge clk);
    wr_en = 0;
    sweep();
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 4'($urandom); wr_data = AW'($urandom % 120);
      @(negedge clk);
      wr_en = 0;
      thr[wr_addr] = int'(wr_data);
    end
    sweep();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
