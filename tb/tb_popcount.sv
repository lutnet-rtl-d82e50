// tb_popcount: random and corner-case check of the popcount at the default
// column height of 288 bits.  The reference counts the ones with a loop of
// its own.
module tb_popcount;
  localparam int N = 288;
  int checks = 0, failures = 0;
  logic [N-1:0] bits;
  logic [$clog2(N+1)-1:0] count;

  popcount #(.N(N)) dut (.bits, .count);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [N-1:0] v);
    int e;
    bits = v;
    #1;
    e = 0;
    for (int i = 0; i < N; i++) if (v[i]) e++;
    checks++;
    if (int'(count) != e) begin
      failures++;
      $display("FAIL: count=%0d expected %0d", count, e);
    end
  endtask

  initial begin
    check_one('0);
    check_one('1);
    check_one(N'(1));
    check_one({1'b1, (N-1)'(0)});
    for (int t = 0; t < 500; t++) begin
      logic [N-1:0] v;
      for (int w = 0; w < N; w += 32) v[w +: 32] = $urandom;
      // vary the density of ones
      if (t % 3 == 1) for (int w = 0; w < N; w += 32) v[w +: 32] &= $urandom;
      if (t % 3 == 2) for (int w = 0; w < N; w += 32) v[w +: 32] |= $urandom;
      check_one(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
