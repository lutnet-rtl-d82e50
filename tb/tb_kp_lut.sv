// tb_kp_lut: exhaustive check of the (K,P)-LUT operator.
//
// Three instances with fixed random masks, (5,1), (6,2) and (3,0), are driven
// through every input combination.  The expected output is looked up in the
// mask with the address {p, x}, computed here from the mask bits directly;
// for P > 0 the check is also made through the sub-table view: entry x of
// sub-table p must be the output.
module tb_kp_lut;
  int checks = 0, failures = 0;

  localparam logic [31:0] M51 = 32'hC3A5_96E1;
  localparam logic [63:0] M62 = 64'h0123_4567_89AB_CDEF ^ 64'hF0F0_5A5A_3C3C_9669;
  localparam logic [7:0]  M30 = 8'b1001_0110;

  logic [3:0] x51; logic [0:0] p51; logic y51;
  logic [3:0] x62; logic [1:0] p62; logic y62;
  logic [2:0] x30; logic [0:0] p30; logic y30;

  kp_lut #(.K(5), .P(1), .MASK(M51)) u51 (.x(x51), .p(p51), .y(y51));
  kp_lut #(.K(6), .P(2), .MASK(M62)) u62 (.x(x62), .p(p62), .y(y62));
  kp_lut #(.K(3), .P(0), .MASK(M30)) u30 (.x(x30), .p(p30), .y(y30));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 32; a++) begin
      logic [15:0] sub;
      {p51, x51} = 5'(a);
      #1;
      sub = M51[int'(p51)*16 +: 16];
      checks++;
      if (y51 !== sub[x51] || y51 !== M51[a]) begin
        failures++;
        $display("FAIL (5,1) addr %0d: y=%b exp=%b", a, y51, M51[a]);
      end
    end
    for (int a = 0; a < 64; a++) begin
      logic [15:0] sub;
      {p62, x62} = 6'(a);
      #1;
      sub = M62[int'(p62)*16 +: 16];
      checks++;
      if (y62 !== sub[x62] || y62 !== M62[a]) begin
        failures++;
        $display("FAIL (6,2) addr %0d: y=%b exp=%b", a, y62, M62[a]);
      end
    end
    for (int a = 0; a < 16; a++) begin
      {p30, x30} = 4'(a);
      #1;
      checks++;
      if (y30 !== M30[a[2:0]]) begin
        failures++;
        $display("FAIL (3,0) addr %0d: y=%b exp=%b", a, y30, M30[a[2:0]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
