// tb_dfg_full: full-size run of the DFGPGD core at its default parameters
// (N = NZ = P = 700) on a synthetic LASSO problem with n = 700 unknowns and
// m = 270 measurements:  minimise 1/2 ||Hx - b||^2 + gamma*||z||_1, x - z = 0.
// The testbench draws a random H (entries about N(0, 1/m)), a sparse x_true
// with S non-zeros and b = H x_true, forms H'H and H'b in Q16.8, sets
// A = I, B = -I, c = 0, L = I, lambda = 1, lambda_x = 8 (above ||H'H||_2,
// which is about (1 + sqrt(n/m))^2 = 6.8), lambda_z = 1, so that
//   Kx = (1/(lambda_x*lambda)) A'L = I/8,  Kz = (1/(lambda_z*lambda)) B'L = -I,
//   inv_lx = 1/8,  thr = gamma/lambda_z,
// loads everything through the host port, runs ITERS iterations from zero
// and compares x, z, v and u with the bit-exact model, and the cycle count
// with the latency formula. It also reports the LASSO objective before and
// after and checks that the solve reduced it.
module tb_dfg_full;
  import dfg_pkg::*;
  import dfg_model_pkg::*;

  localparam int N = 700, M = 270, S = 10, ITERS = 10;
  localparam int INV_LX = 32;   // 1/8 in Q16.8
  localparam int THR = 26;      // gamma = 0.1

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
  dfg_model m;
  int h[], bvec[], xt[];

  dfg_top dut (.*);

  always #5 clk = ~clk;

  task automatic load_vec(mem_sel_e sel, int vals[]);
    foreach (vals[i]) begin
      @(negedge clk);
      load_we = 1; load_sel = sel; load_addr = 32'(i); load_data = fx_t'(vals[i]);
    end
    @(negedge clk); load_we = 0;
  endtask

  task automatic cmp_vec(mem_sel_e sel, int exp[]);
    foreach (exp[i]) begin
      @(negedge clk); rd_sel = sel; rd_addr = 32'(i);
      @(posedge clk); #1;
      checks++;
      if (int'(rd_data) != exp[i]) begin
        failures++;
        if (failures < 20) $display("FAIL %s[%0d] = %0d, model %0d", sel.name(), i, rd_data, exp[i]);
      end
    end
  endtask

  // LASSO objective in real numbers: 1/2 ||H x - b||^2 + gamma*||x||_1 (the
  // gradient of the first term is H'H x - H'b, the form the core uses).
  function automatic real objective(int xv[]);
    real f = 0.0, r;
    for (int i = 0; i < M; i++) begin
      r = -real'(bvec[i]) / 256.0;
      for (int j = 0; j < N; j++) r += real'(h[i*N+j]) * real'(xv[j]) / 65536.0;
      f += 0.5 * r * r;
    end
    foreach (xv[j]) f += 0.1 * ((xv[j] < 0) ? -real'(xv[j]) : real'(xv[j])) / 256.0;
    return f;
  endfunction

  initial begin
    longint cyc = 0, s;
    real f0, f1;
    m = new(N, N, N);
    h = new[M*N]; bvec = new[M]; xt = new[N];
    // H ~ N(0, 1/m) approximated by a sum of uniforms; 1/sqrt(270) = 15.6 LSB
    foreach (h[i]) h[i] = ($urandom_range(0, 31) + $urandom_range(0, 31) + $urandom_range(0, 31)
                           + $urandom_range(0, 31)) * 2 / 3 - 41;
    foreach (xt[j]) xt[j] = 0;
    for (int k = 0; k < S; k++) xt[$urandom_range(0, N-1)] = ($urandom_range(0, 1) ? 1 : -1) * $urandom_range(256, 1024);
    for (int i = 0; i < M; i++) begin
      s = 0; for (int j = 0; j < N; j++) s += longint'(h[i*N+j]) * xt[j];
      bvec[i] = int'(s >>> 8);
    end
    for (int i = 0; i < N; i++) begin
      for (int j = i; j < N; j++) begin
        s = 0; for (int r = 0; r < M; r++) s += longint'(h[r*N+i]) * h[r*N+j];
        m.hth[i*N+j] = int'(s >>> 8);
        m.hth[j*N+i] = int'(s >>> 8);
      end
      s = 0; for (int r = 0; r < M; r++) s += longint'(h[r*N+i]) * bvec[r];
      m.htb[i] = int'(s >>> 8);
    end
    foreach (m.kx[i]) m.kx[i] = 0;
    foreach (m.a[i])  m.a[i]  = 0;
    foreach (m.b[i])  m.b[i]  = 0;
    foreach (m.kz[i]) m.kz[i] = 0;
    for (int i = 0; i < N; i++) begin
      m.kx[i*N+i] = INV_LX; m.a[i*N+i] = 256; m.b[i*N+i] = -256; m.kz[i*N+i] = -256;
    end
    foreach (m.c[i]) m.c[i] = 0;
    foreach (m.x[i]) m.x[i] = 0;
    foreach (m.z[i]) m.z[i] = 0;
    foreach (m.v[i]) m.v[i] = 0;
    f0 = objective(m.x);

    repeat (3) @(posedge clk);
    rst_n = 1;
    load_vec(SEL_HTH, m.hth); load_vec(SEL_HTB, m.htb); load_vec(SEL_KX, m.kx);
    load_vec(SEL_A, m.a);     load_vec(SEL_B, m.b);     load_vec(SEL_KZ, m.kz);
    load_vec(SEL_C, m.c);     load_vec(SEL_X, m.x);     load_vec(SEL_Z, m.z);
    load_vec(SEL_V, m.v);

    m.run(ITERS, INV_LX, THR);
    @(negedge clk); start = 1; max_iter = 16'(ITERS); inv_lx = fx_t'(INV_LX); thr = fx_t'(THR);
    @(posedge clk); #1; start = 0;
    while (!done) begin
      @(posedge clk); #1;
      cyc++;
    end
    checks++;
    if (cyc != m.cycles(ITERS) || int'(iter) != ITERS) begin
      failures++;
      $display("FAIL %0d cycles (expected %0d), iter %0d", cyc, m.cycles(ITERS), iter);
    end
    cmp_vec(SEL_X, m.x); cmp_vec(SEL_Z, m.z); cmp_vec(SEL_V, m.v); cmp_vec(SEL_U, m.u);
    f1 = objective(m.z);
    checks++;
    if (!(f1 < f0)) begin failures++; $display("FAIL objective did not decrease"); end
    $display("solve: %0d iterations in %0d cycles; objective %f -> %f; z zeros %0d of %0d; saturations %0d",
             ITERS, cyc, f0, f1, m.n_zeroed, m.n_zeroed + m.n_kept, m.n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
