// tb_tile_sequencer: checks the order of tile steps (output tile outer,
// input tile inner), the first/last marks, the in_ready handshake, the
// TI*TO-cycle spacing of back-to-back vectors and idling between vectors,
// with TI = 3, TO = 2.
module tb_tile_sequencer;
  localparam int TI = 3, TO = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic in_ready, accept, issue, first, last;
  logic [1:0] ti;
  logic [0:0] to;
  int cyc = 0;

  tile_sequencer #(.TI(TI), .TO(TO)) dut (.clk, .rst_n, .in_valid, .in_ready, .accept,
                                          .issue, .ti, .to, .first, .last);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL cycle %0d: %s", cyc, what); end
  endtask

  // Offer a vector; `gap` idle cycles first.  Returns the cycle of acceptance.
  task automatic offer(input int gap, output int acc_cyc);
    repeat (gap) begin
      @(negedge clk);
      chk(!issue && in_ready && !accept, "idle gap");
    end
    in_valid = 1;
    while (!in_ready) @(negedge clk);
    acc_cyc = cyc;
    #1;
    chk(accept, "accept with valid and ready");
    @(negedge clk);
    in_valid = 0;
  endtask

  // Expected step sequence, checked by a monitor.
  int exp_ti = 0, exp_to = 0, steps = 0;
  always @(negedge clk) if (rst_n && issue) begin
    chk(int'(ti) == exp_ti && int'(to) == exp_to, $sformatf("step ti=%0d to=%0d exp %0d/%0d", ti, to, exp_ti, exp_to));
    chk(first == (exp_ti == 0), "first mark");
    chk(last == (exp_ti == TI - 1), "last mark");
    chk(in_ready == (exp_ti == TI - 1 && exp_to == TO - 1), "in_ready only on final step");
    steps++;
    if (exp_ti == TI - 1) begin
      exp_ti = 0;
      exp_to = (exp_to == TO - 1) ? 0 : exp_to + 1;
    end else exp_ti++;
  end

  initial begin
    int a0, a1, a2, a3;
    repeat (3) @(negedge clk);
    chk(!issue && in_ready, "idle after reset");
    rst_n = 1;
    @(negedge clk);
    chk(!issue, "no step without a vector");
    // three back-to-back vectors: accepted TI*TO cycles apart
    in_valid = 1;
    while (!in_ready) @(negedge clk);
    a0 = cyc; @(negedge clk);
    while (!in_ready) @(negedge clk);
    a1 = cyc; @(negedge clk);
    while (!in_ready) @(negedge clk);
    a2 = cyc; @(negedge clk);
    in_valid = 0;
    chk(a1 - a0 == TI * TO, $sformatf("back-to-back spacing %0d", a1 - a0));
    chk(a2 - a1 == TI * TO, $sformatf("back-to-back spacing %0d", a2 - a1));
    repeat (TI * TO + 2) @(negedge clk);
    chk(!issue && in_ready, "idle after last vector");
    chk(steps == 3 * TI * TO, $sformatf("step count %0d", steps));
    offer(4, a3);
    repeat (TI * TO + 2) @(negedge clk);
    chk(steps == 4 * TI * TO, $sformatf("step count %0d", steps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
