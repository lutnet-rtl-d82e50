// tb_lut_array: checks every node of a 16 x 4 array of (5,1)-LUTs (60%
// kept) against a model that applies the node tables of lutnet_pkg: pruned
// nodes must output 0; a kept node must output its mask bit at the address
// formed from its wired tile elements and its p bit.  Also checks that the
// first input of each kept node is its own row and that the other inputs
// are distinct.
module tb_lut_array;
  localparam int K = 5, P = 1, ROWS = 16, COLS = 4, DPM = 600, SEED = 5, NX = K - P;
  int checks = 0, failures = 0;
  logic [ROWS-1:0] tile;
  logic [ROWS*COLS*P-1:0] p;
  logic [COLS-1:0][ROWS-1:0] y;
  int n_kept = 0, n_pruned = 0;

  lut_array #(.K(K), .P(P), .ROWS(ROWS), .COLS(COLS), .DENSITY_PM(DPM), .SEED(SEED)) dut (.tile, .p, .y);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // wiring rules
    for (int n = 0; n < ROWS * COLS; n++) begin
      int c [NX];
      bit ok;
      for (int e = 0; e < NX; e++) c[e] = lutnet_pkg::node_conn(SEED, n, n % ROWS, e, NX, ROWS);
      ok = (c[0] == n % ROWS);
      for (int a = 0; a < NX; a++)
        for (int b = a + 1; b < NX; b++) if (c[a] == c[b]) ok = 0;
      checks++;
      if (!ok) begin failures++; $display("FAIL wiring node %0d", n); end
      if (lutnet_pkg::node_kept(SEED, n, DPM)) n_kept++; else n_pruned++;
    end
    for (int t = 0; t < 300; t++) begin
      tile = 16'($urandom);
      p = 64'({$urandom, $urandom});
      #1;
      for (int j = 0; j < COLS; j++)
        for (int i = 0; i < ROWS; i++) begin
          int n;
          logic [K-1:0] addr;
          logic [63:0] m;
          logic e;
          n = j * ROWS + i;
          if (lutnet_pkg::node_kept(SEED, n, DPM)) begin
            for (int q = 0; q < NX; q++) addr[q] = tile[lutnet_pkg::node_conn(SEED, n, i, q, NX, ROWS)];
            addr[K-1] = p[n];
            m = lutnet_pkg::node_mask(SEED, n);
            e = m[addr];
          end else e = 1'b0;
          checks++;
          if (y[j][i] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL node %0d: y=%b exp=%b", n, y[j][i], e);
          end
        end
    end
    checks++;
    if (n_kept == 0 || n_pruned == 0) begin failures++; $display("FAIL: need both kept and pruned nodes"); end
    $display("kept %0d pruned %0d", n_kept, n_pruned);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
