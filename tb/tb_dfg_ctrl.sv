// tb_dfg_ctrl: self-checking test of the solver sequencer.
// Runs solves of 0, 1 and 3 iterations on a small, unequal problem shape and
// checks, against an independently built list of passes: the order of
// (phase, row) at every FIN cycle, the number of STREAM cycles of every row,
// the 'first' strobe of every sum, the segment split of the X pass, the
// x/z bank flips, the iteration count, and the total cycle count from start
// to done given by the latency formula.
module tb_dfg_ctrl;
  import dfg_pkg::*;
  localparam int N = 3, NZ = 2, P = 4, CW = $clog2(N + P + NZ + 1);
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] max_iter = '0;
  phase_e phase;
  logic [CW-1:0] row, col;
  logic stream, seg, mac_en, mac_first, mac_seg, fin, xb, zb, busy, done;
  logic [15:0] iter;
  int checks = 0, failures = 0;

  dfg_ctrl #(.N(N), .NZ(NZ), .P(P)) dut (.*);

  always #5 clk = ~clk;

  // Expected pass list.
  phase_e exp_ph[$];
  int     exp_rows[$], exp_terms[$];

  task automatic push(phase_e ph, int rows, int terms);
    exp_ph.push_back(ph); exp_rows.push_back(rows); exp_terms.push_back(terms);
  endtask

  task automatic run(int iters);
    int pi = 0, r = 0, nstream = 0, cyc = 0, firsts = 0, seg1 = 0;
    logic xb0, zb0;
    longint exp_cyc;
    exp_ph.delete(); exp_rows.delete(); exp_terms.delete();
    push(PH_INIT_AX, P, N); push(PH_INIT_BZ, P, NZ);
    for (int k = 0; k < iters; k++) begin
      push(PH_X, N, N + P); push(PH_AX, P, N); push(PH_Z, NZ, P); push(PH_BZ, P, NZ);
    end
    exp_cyc = P*(N+2) + P*(NZ+2) + iters*(N*(N+P+2) + P*(N+2) + NZ*(P+2) + P*(NZ+2));
    xb0 = xb; zb0 = zb;
    @(negedge clk); start = 1; max_iter = 16'(iters);
    @(posedge clk); #1; start = 0;
    while (!done) begin
      cyc++;
      if (stream) begin
        nstream++;
        if (seg) seg1++;
      end
      if (mac_en && mac_first) firsts++;
      if (fin) begin
        checks++;
        if (pi >= exp_ph.size() || phase != exp_ph[pi] || int'(row) != r || nstream != exp_terms[pi]) begin
          failures++;
          $display("FAIL fin: phase %s row %0d streams %0d (pass %0d)", phase.name(), row, nstream, pi);
        end
        checks++;
        if (firsts != (phase == PH_X ? 2 : 1) || seg1 != (phase == PH_X ? P : 0)) begin
          failures++;
          $display("FAIL strobes: phase %s firsts %0d seg1 %0d", phase.name(), firsts, seg1);
        end
        nstream = 0; firsts = 0; seg1 = 0;
        r++;
        if (pi < exp_rows.size() && r == exp_rows[pi]) begin r = 0; pi++; end
      end
      @(posedge clk); #1;
      if (cyc > 100000) break;
    end
    checks++;
    if (longint'(cyc) != exp_cyc) begin
      failures++; $display("FAIL cycles %0d expected %0d", cyc, exp_cyc);
    end
    checks++;
    if (pi != exp_ph.size() || int'(iter) != iters) begin
      failures++; $display("FAIL passes %0d of %0d, iter %0d", pi, exp_ph.size(), iter);
    end
    checks++;
    if (xb != (xb0 ^ iters[0]) || zb != (zb0 ^ iters[0])) begin
      failures++; $display("FAIL bank flips");
    end
    @(posedge clk); #1;
    checks++;
    if (busy || done) begin failures++; $display("FAIL not idle after done"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    checks++;
    if (busy || xb || zb) begin failures++; $display("FAIL reset state"); end
    run(0);
    run(1);
    run(3);
    run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
