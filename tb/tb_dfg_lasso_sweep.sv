// tb_dfg_lasso_sweep: accuracy against iteration count on a synthetic LASSO
// problem, at one tenth of the full problem size (n = 70, m = 27, the same
// m/n ratio as the n = 700, m = 270 case), for MAX_ITER = 10, 100 and 300.
//   minimise 1/2 ||Hx - b||^2 + gamma*||z||_1  subject to  x - z = 0
// with A = I, B = -I, c = 0, L = I, lambda = 1, lambda_x = 8, lambda_z = 1,
// gamma = 0.1. Each run starts from x = z = v = 0. For every run the
// testbench checks x, z, v and u bit-exactly against the reference model and
// the cycle count against the latency formula, then reports the relative
// error |f - f*| / f* of the hardware's z, where f* comes from the same
// iteration carried out in double precision for 5000 iterations. It checks
// that 300 iterations end closer to f* than 10 do.
module tb_dfg_lasso_sweep;
  import dfg_pkg::*;
  import dfg_model_pkg::*;

  localparam int N = 70, M = 27, S = 4;
  localparam int INV_LX = 32;   // 1/8
  localparam int THR = 26;      // gamma / lambda_z = 0.1
  localparam real GAMMA = 0.1;

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
  int h[], bvec[], xt[], zeros[];

  dfg_top #(.N(N), .NZ(N), .P(N)) dut (.*);

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

  function automatic real objective_r(real xv[]);
    real f = 0.0, r;
    for (int i = 0; i < M; i++) begin
      r = -real'(bvec[i]) / 256.0;
      for (int j = 0; j < N; j++) r += real'(h[i*N+j]) / 256.0 * xv[j];
      f += 0.5 * r * r;
    end
    foreach (xv[j]) f += GAMMA * ((xv[j] < 0) ? -xv[j] : xv[j]);
    return f;
  endfunction

  function automatic real objective_q(int xv[]);
    real xr[];
    xr = new[N];
    foreach (xv[j]) xr[j] = real'(xv[j]) / 256.0;
    return objective_r(xr);
  endfunction

  // The same iteration in double precision (A = I, B = -I, c = 0).
  function automatic real reference_optimum(int iters);
    real x[], z[], v[], u[], xn[], g[], hth[], htb[], y, t;
    x = new[N]; z = new[N]; v = new[N]; u = new[N]; xn = new[N]; hth = new[N*N]; htb = new[N];
    foreach (hth[i]) hth[i] = real'(m.hth[i]) / 256.0;
    foreach (htb[i]) htb[i] = real'(m.htb[i]) / 256.0;
    foreach (x[i]) begin x[i] = 0; z[i] = 0; v[i] = 0; u[i] = 0; end
    t = real'(THR) / 256.0;
    for (int k = 0; k < iters; k++) begin
      for (int i = 0; i < N; i++) begin
        real s = 0;
        for (int j = 0; j < N; j++) s += hth[i*N+j] * x[j];
        xn[i] = x[i] - (s - htb[i]) / 8.0 - u[i] / 8.0;
      end
      x = xn;
      for (int i = 0; i < N; i++) begin
        y = z[i] + (x[i] - z[i] + v[i]);          // z - Kz w, Kz = -I
        z[i] = (y > t) ? y - t : (y < -t) ? y + t : 0.0;
      end
      for (int i = 0; i < N; i++) begin
        real r = x[i] - z[i];
        v[i] += r;
        u[i] = v[i] + r;
      end
    end
    return objective_r(z);
  endfunction

  initial begin
    longint s, cyc;
    real fstar, f, rel[3];
    int iters_list[3] = '{10, 100, 300};
    m = new(N, N, N);
    h = new[M*N]; bvec = new[M]; xt = new[N]; zeros = new[N];
    foreach (zeros[i]) zeros[i] = 0;
    // H entries about N(0, 1/m): 1/sqrt(27) = 49 LSB
    foreach (h[i]) h[i] = ($urandom_range(0, 97) + $urandom_range(0, 97) + $urandom_range(0, 97)
                           + $urandom_range(0, 97)) * 2 / 3 - 130;
    foreach (xt[j]) xt[j] = 0;
    for (int k = 0; k < S; k++) xt[$urandom_range(0, N-1)] = ($urandom_range(0, 1) ? 1 : -1) * $urandom_range(256, 768);
    for (int i = 0; i < M; i++) begin
      s = 0; for (int j = 0; j < N; j++) s += longint'(h[i*N+j]) * xt[j];
      bvec[i] = int'(s >>> 8);
    end
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        s = 0; for (int r = 0; r < M; r++) s += longint'(h[r*N+i]) * h[r*N+j];
        m.hth[i*N+j] = int'(s >>> 8);
      end
      s = 0; for (int r = 0; r < M; r++) s += longint'(h[r*N+i]) * bvec[r];
      m.htb[i] = int'(s >>> 8);
    end
    foreach (m.kx[i]) begin m.kx[i] = 0; m.a[i] = 0; m.b[i] = 0; m.kz[i] = 0; end
    for (int i = 0; i < N; i++) begin
      m.kx[i*N+i] = INV_LX; m.a[i*N+i] = 256; m.b[i*N+i] = -256; m.kz[i*N+i] = -256;
    end
    foreach (m.c[i]) m.c[i] = 0;
    fstar = reference_optimum(5000);

    repeat (3) @(posedge clk);
    rst_n = 1;
    load_vec(SEL_HTH, m.hth); load_vec(SEL_HTB, m.htb); load_vec(SEL_KX, m.kx);
    load_vec(SEL_A, m.a);     load_vec(SEL_B, m.b);     load_vec(SEL_KZ, m.kz);
    load_vec(SEL_C, m.c);

    foreach (iters_list[r]) begin
      foreach (m.x[i]) begin m.x[i] = 0; m.z[i] = 0; m.v[i] = 0; end
      load_vec(SEL_X, zeros); load_vec(SEL_Z, zeros); load_vec(SEL_V, zeros);
      m.run(iters_list[r], INV_LX, THR);
      cyc = 0;
      @(negedge clk); start = 1; max_iter = 16'(iters_list[r]); inv_lx = fx_t'(INV_LX); thr = fx_t'(THR);
      @(posedge clk); #1; start = 0;
      while (!done) begin
        @(posedge clk); #1;
        cyc++;
      end
      checks++;
      if (cyc != m.cycles(iters_list[r]) || int'(iter) != iters_list[r]) begin
        failures++;
        $display("FAIL %0d cycles (expected %0d), iter %0d", cyc, m.cycles(iters_list[r]), iter);
      end
      cmp_vec(SEL_X, m.x); cmp_vec(SEL_Z, m.z); cmp_vec(SEL_V, m.v); cmp_vec(SEL_U, m.u);
      f = objective_q(m.z);
      rel[r] = (f - fstar) / fstar;
      if (rel[r] < 0) rel[r] = -rel[r];
      f = reference_optimum(iters_list[r]);
      $display("MAX_ITER %0d: %0d cycles, f* = %f, relative error %f %% (Q16.8 core), %f %% (same iterations in double precision)",
               iters_list[r], cyc, fstar, 100.0 * rel[r], 100.0 * (f - fstar) / fstar);
    end
    checks++;
    if (!(rel[2] < rel[0])) begin failures++; $display("FAIL accuracy did not improve with iterations"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
