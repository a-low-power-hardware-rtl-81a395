// tb_dfg_top: end-to-end test of the DFGPGD solver core on a small problem
// (N = 5, NZ = 4, P = 6, so every memory has a different shape).
// Each scenario loads the cached matrices and the start point through the
// host port, runs a solve, and compares x, z, v and the feedback cache u,
// read back through the host port, with the bit-exact reference model
// (dfg_model_pkg). It also checks the start-to-done cycle count of every
// solve against the latency formula.
// Scenarios: a dense random solve; a warm restart from the previous result
// without reloading; an initialisation-only solve (max_iter = 0); a solve
// with large data that drives the arithmetic into saturation; and an
// identity-coupled solve (A and B hold I and -I in their leading 4x4 block,
// c = 0, H'H symmetric).
// Mechanisms that must each happen at least once: initialisation pass,
// iteration, soft-threshold shrink to zero, soft-threshold pass with
// shrinkage, saturation, warm restart.
module tb_dfg_top;
  import dfg_pkg::*;
  import dfg_model_pkg::*;

  localparam int N = 5, NZ = 4, P = 6;

  logic clk = 0, rst_n = 0;
  logic load_we = 0;
  mem_sel_e load_sel = SEL_HTH, rd_sel = SEL_X;
  logic [31:0] load_addr = '0, rd_addr = '0;
  fx_t load_data = '0, rd_data;
  logic start = 0;
  logic [15:0] max_iter = '0;
  fx_t inv_lx = '0, thr = '0;
  logic busy, done;
  logic [15:0] iter;

  int checks = 0, failures = 0;
  int n_init = 0, n_iters = 0, n_warm = 0;
  dfg_model m;

  dfg_top #(.N(N), .NZ(NZ), .P(P)) dut (.*);

  always #5 clk = ~clk;

  task automatic load_vec(mem_sel_e sel, int vals[]);
    foreach (vals[i]) begin
      @(negedge clk);
      load_we = 1; load_sel = sel; load_addr = 32'(i); load_data = fx_t'(vals[i]);
    end
    @(negedge clk); load_we = 0;
  endtask

  task automatic load_all();
    load_vec(SEL_HTH, m.hth); load_vec(SEL_HTB, m.htb); load_vec(SEL_KX, m.kx);
    load_vec(SEL_A, m.a);     load_vec(SEL_B, m.b);     load_vec(SEL_KZ, m.kz);
    load_vec(SEL_C, m.c);     load_vec(SEL_X, m.x);     load_vec(SEL_Z, m.z);
    load_vec(SEL_V, m.v);
  endtask

  task automatic cmp_vec(mem_sel_e sel, int exp[], string tag);
    foreach (exp[i]) begin
      @(negedge clk); rd_sel = sel; rd_addr = 32'(i);
      @(posedge clk); #1;
      checks++;
      if (int'(rd_data) != exp[i]) begin
        failures++;
        $display("FAIL %s %s[%0d] = %0d, model %0d", tag, sel.name(), i, rd_data, exp[i]);
      end
    end
  endtask

  task automatic run_solve(int iters, int ilx, int t, string tag);
    longint cyc = 0;
    m.run(iters, ilx, t);
    @(negedge clk); start = 1; max_iter = 16'(iters); inv_lx = fx_t'(ilx); thr = fx_t'(t);
    @(posedge clk); #1; start = 0;
    while (!done) begin
      @(posedge clk); #1;
      cyc++;
    end
    checks++;
    if (cyc != m.cycles(iters) || int'(iter) != iters) begin
      failures++;
      $display("FAIL %s: %0d cycles (expected %0d), iter %0d", tag, cyc, m.cycles(iters), iter);
    end
    n_init++;
    n_iters += int'(iter);
    cmp_vec(SEL_X, m.x, tag); cmp_vec(SEL_Z, m.z, tag);
    cmp_vec(SEL_V, m.v, tag); cmp_vec(SEL_U, m.u, tag);
  endtask

  function automatic int rnd(int lim);
    return $urandom_range(0, 2 * lim) - lim;
  endfunction

  task automatic fill_random(int mlim, int vlim);
    foreach (m.hth[i]) m.hth[i] = rnd(mlim);
    foreach (m.kx[i])  m.kx[i]  = rnd(mlim);
    foreach (m.a[i])   m.a[i]   = rnd(mlim);
    foreach (m.b[i])   m.b[i]   = rnd(mlim);
    foreach (m.kz[i])  m.kz[i]  = rnd(mlim);
    foreach (m.htb[i]) m.htb[i] = rnd(vlim);
    foreach (m.c[i])   m.c[i]   = rnd(vlim);
    foreach (m.x[i])   m.x[i]   = rnd(vlim);
    foreach (m.z[i])   m.z[i]   = rnd(vlim);
    foreach (m.v[i])   m.v[i]   = rnd(vlim);
  endtask

  initial begin
    m = new(N, NZ, P);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1: dense random data, moderate magnitudes
    fill_random(96, 1024);
    load_all();
    run_solve(4, 26, 40, "dense");

    // 2: warm restart from the result of 1
    run_solve(3, 26, 40, "warm");
    n_warm++;

    // 3: initialisation only
    fill_random(96, 1024);
    load_all();
    run_solve(0, 26, 40, "init-only");

    // 4: large data, saturating arithmetic
    fill_random(60000, 2000000);
    load_all();
    run_solve(2, 200, 300, "saturating");

    // 5: identity-coupled: A and B hold I and -I in their leading 4x4 block
    fill_random(40, 800);
    foreach (m.a[i]) m.a[i] = 0;
    foreach (m.b[i]) m.b[i] = 0;
    foreach (m.c[i]) m.c[i] = 0;
    for (int i = 0; i < NZ; i++) begin m.a[i*N+i] = 256; m.b[i*NZ+i] = -256; end
    for (int i = 0; i < N; i++) for (int j = 0; j < i; j++) m.hth[i*N+j] = m.hth[j*N+i];
    load_all();
    run_solve(6, 40, 64, "identity");

    checks++;
    if (m.n_zeroed == 0 || m.n_kept == 0 || m.n_sat == 0 || n_init == 0 || n_iters == 0 || n_warm == 0) begin
      failures++;
      $display("FAIL mechanism coverage: zeroed %0d kept %0d sat %0d init %0d iters %0d warm %0d",
               m.n_zeroed, m.n_kept, m.n_sat, n_init, n_iters, n_warm);
    end
    $display("mechanisms: init passes %0d, iterations %0d, shrunk to zero %0d, shrunk %0d, saturations %0d, warm restarts %0d",
             n_init, n_iters, m.n_zeroed, m.n_kept, m.n_sat, n_warm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
