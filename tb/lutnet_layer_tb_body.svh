// Shared body of the lutnet_layer end-to-end testbenches.
//
// The including module defines N_IN, C_OUT, K, P, TI, TO, DPM (kept nodes per
// thousand), SEED, NB (vectors sent back to back) and NG (vectors sent with
// idle gaps), includes this file, then instantiates lutnet_layer on the
// signals declared here, and ends the run when tb_done fires by printing the
// TB_RESULT line and calling $finish.
//
// The reference model evaluates the layer equation directly: for every
// output channel c it walks all TI input tiles and all kept nodes of column
// c mod COLS, forms each node's LUT address from its wired activations and
// its p bits for step (c / COLS)*TI + ti, sums the mask bits and compares
// the sum with the channel threshold.  The node tables come from lutnet_pkg
// (they stand for the trained network); p bits and thresholds are random
// and loaded through the layer's write ports.
//
// Mechanisms counted (each must occur): back-to-back acceptance, idle input
// cycles, parameter RAM rewrite between vectors, threshold rewrite, both
// output values, both p values feeding kept nodes (P > 0), pruned nodes
// (DPM < 1000).  Latency (TI*TO + 4 cycles from acceptance to out_valid)
// and spacing of back-to-back acceptances (TI*TO cycles) are checked.

localparam int ROWS  = N_IN / TI;
localparam int COLS  = C_OUT / TO;
localparam int NODES = ROWS * COLS;
localparam int NX    = K - P;
localparam int PW    = (P > 0) ? P : 1;
localparam int RAM_W = NODES * PW;
localparam int STEPS = TI * TO;
localparam int AW    = $clog2(STEPS > 1 ? STEPS : 2);
localparam int ACC_W = $clog2(N_IN + 1);
localparam int CW    = $clog2(C_OUT > 1 ? C_OUT : 2);
localparam int LAT   = STEPS + 4;

int checks = 0, failures = 0;
logic clk = 0, rst_n = 0, in_valid = 0;
logic in_ready, out_valid;
logic [N_IN-1:0]  in_data = '0;
logic [C_OUT-1:0] out_data;
logic             pram_wr_en = 0;
logic [AW-1:0]    pram_wr_addr = '0;
logic [RAM_W-1:0] pram_wr_data = '0;
logic             thr_wr_en = 0;
logic [CW-1:0]    thr_wr_addr = '0;
logic [ACC_W-1:0] thr_wr_data = '0;

bit          kept [NODES];
int          conn [NODES][NX];
logic [63:0] mask [NODES];
logic [RAM_W-1:0] pmem [STEPS];
int          thr  [C_OUT];
int          terms[C_OUT];

logic [C_OUT-1:0] exp_q [$];
int               acc_q [$];
int cyc = 0, last_acc = -1000000;
bit started = 1'b0;
int n_b2b = 0, n_idle = 0, n_pram_rw = 0, n_thr_rw = 0, n_ones = 0, n_zeros = 0;
int n_p0 = 0, n_p1 = 0, n_pruned = 0, n_out = 0;

event tb_done;  // end of the run: test finished or watchdog expired

always #5 clk = ~clk;
always @(posedge clk) cyc++;

initial begin
  repeat (40000) @(posedge clk);
  failures++;
  $display("watchdog expired");
  -> tb_done;
end

function automatic logic [C_OUT-1:0] ref_out(input logic [N_IN-1:0] x);
  logic [C_OUT-1:0] r;
  for (int c = 0; c < C_OUT; c++) begin
    int to, j, sum;
    to = c / COLS;
    j = c % COLS;
    sum = 0;
    for (int ti = 0; ti < TI; ti++)
      for (int i = 0; i < ROWS; i++) begin
        int n;
        logic [5:0] a;
        n = j * ROWS + i;
        if (kept[n]) begin
          a = '0;
          for (int e = 0; e < NX; e++) a[e] = x[ti * ROWS + conn[n][e]];
          for (int q = 0; q < P; q++) begin
            a[NX + q] = pmem[to * TI + ti][n * PW + q];
            if (a[NX + q]) n_p1++; else n_p0++;
          end
          sum += int'(mask[n][a]);
        end
      end
    r[c] = (sum >= thr[c]);
  end
  return r;
endfunction

function automatic logic [N_IN-1:0] rand_vec();
  logic [N_IN-1:0] v;
  for (int b = 0; b < N_IN; b++) v[b] = 1'($urandom);
  return v;
endfunction

function automatic logic [RAM_W-1:0] rand_word();
  logic [RAM_W-1:0] v;
  for (int b = 0; b < RAM_W; b++) v[b] = 1'($urandom);
  return v;
endfunction

// All tasks start and end just after a falling clock edge.
task automatic write_pram(input int a, input logic [RAM_W-1:0] w);
  pram_wr_en = 1; pram_wr_addr = AW'(a); pram_wr_data = w;
  @(negedge clk);
  pram_wr_en = 0;
  pmem[a] = w;
endtask

task automatic write_thr(input int c, input int t);
  thr_wr_en = 1; thr_wr_addr = CW'(c); thr_wr_data = ACC_W'(t);
  @(negedge clk);
  thr_wr_en = 0;
  thr[c] = t;
endtask

task automatic send(input logic [N_IN-1:0] x);
  in_valid = 1; in_data = x;
  while (!in_ready) @(negedge clk);
  if (cyc - last_acc == STEPS) n_b2b++;
  checks++;
  if (last_acc >= 0 && cyc - last_acc < STEPS) begin
    failures++;
    $display("FAIL: acceptances %0d cycles apart", cyc - last_acc);
  end
  exp_q.push_back(ref_out(x));
  acc_q.push_back(cyc);
  last_acc = cyc;
  @(negedge clk);
  in_valid = 0;
endtask

task automatic drain();
  while (exp_q.size() != 0) @(negedge clk);
  repeat (3) @(negedge clk);
endtask

always @(negedge clk) if (rst_n) begin
  if (started && in_ready && !in_valid) n_idle++;
  if (out_valid) begin
    logic [C_OUT-1:0] e;
    int a;
    n_out++;
    checks += 2;
    if (exp_q.size() == 0) begin
      failures += 2;
      $display("FAIL: unexpected out_valid at cycle %0d", cyc);
    end else begin
      e = exp_q.pop_front();
      a = acc_q.pop_front();
      if (out_data !== e) begin
        failures++;
        $display("FAIL: output %0d mismatch: %0d of %0d channels differ", n_out, $countones(out_data ^ e), C_OUT);
      end
      if (cyc - a != LAT) begin
        failures++;
        $display("FAIL: latency %0d, expected %0d", cyc - a, LAT);
      end
      n_ones += $countones(out_data);
      n_zeros += C_OUT - $countones(out_data);
    end
  end
end

initial begin
  for (int n = 0; n < NODES; n++) begin
    kept[n] = lutnet_pkg::node_kept(SEED, n, DPM);
    mask[n] = lutnet_pkg::node_mask(SEED, n);
    for (int e = 0; e < NX; e++) conn[n][e] = lutnet_pkg::node_conn(SEED, n, n % ROWS, e, NX, ROWS);
    if (!kept[n]) n_pruned++;
  end
  for (int c = 0; c < C_OUT; c++) begin
    terms[c] = 0;
    for (int i = 0; i < ROWS; i++) if (kept[(c % COLS) * ROWS + i]) terms[c] += TI;
  end
  repeat (3) @(negedge clk);
  rst_n = 1;
  @(negedge clk);
  // load the trained parameters: p bits and thresholds
  if (P > 0) for (int a = 0; a < STEPS; a++) write_pram(a, rand_word());
  for (int c = 0; c < C_OUT; c++) begin
    int t;
    t = terms[c] / 2 + int'($urandom % 9) - 4;
    write_thr(c, t < 0 ? 0 : t);
  end
  started = 1'b1;
  // back-to-back vectors
  for (int v = 0; v < NB; v++) send(rand_vec());
  drain();
  // rewrite part of the trained state between vectors
  if (P > 0) begin
    write_pram(STEPS - 1, rand_word());
    n_pram_rw++;
  end
  write_thr(0, 0);                                 // channel 0 always +1
  write_thr(C_OUT - 1, (1 << ACC_W) - 1);          // last channel always -1
  n_thr_rw += 2;
  // vectors with idle gaps
  for (int v = 0; v < NG; v++) begin
    repeat (1 + int'($urandom % 5)) @(negedge clk);
    send(rand_vec());
  end
  drain();
  // mechanism coverage
  checks += 7;
  if (NB > 1 && n_b2b == 0) begin failures++; $display("FAIL: no back-to-back acceptance"); end
  if (n_idle == 0) begin failures++; $display("FAIL: no idle input cycle"); end
  if (P > 0 && n_pram_rw == 0) begin failures++; $display("FAIL: no parameter RAM rewrite"); end
  if (n_thr_rw == 0) begin failures++; $display("FAIL: no threshold rewrite"); end
  if (n_ones == 0 || n_zeros == 0) begin failures++; $display("FAIL: outputs not of both values"); end
  if (P > 0 && (n_p0 == 0 || n_p1 == 0)) begin failures++; $display("FAIL: p not of both values"); end
  if (DPM < 1000 && n_pruned == 0) begin failures++; $display("FAIL: no pruned node"); end
  checks++;
  if (n_out != NB + NG) begin failures++; $display("FAIL: %0d outputs, expected %0d", n_out, NB + NG); end
  $display("outputs %0d  back-to-back %0d  idle cycles %0d  pram rewrites %0d  thr rewrites %0d",
           n_out, n_b2b, n_idle, n_pram_rw, n_thr_rw);
  $display("output ones %0d zeros %0d  p=+1 %0d p=-1 %0d  pruned nodes %0d of %0d",
           n_ones, n_zeros, n_p1, n_p0, n_pruned, NODES);
  -> tb_done;
end
