// dfg_model_pkg: bit-exact reference model of the DFGPGD solver core, for the
// testbenches. It recomputes every iterate with plain 64-bit integer
// arithmetic on Q16.8 words (truncating shift, saturation to 24 bits), in the
// same order of operations as the hardware, and counts the events the
// end-to-end tests must see: saturations and soft-threshold outcomes.
package dfg_model_pkg;

  localparam longint MAXV = 64'sd8388607;    // 2^23 - 1
  localparam longint MINV = -64'sd8388608;   // -2^23

  class dfg_model;
    int n, nz, p;
    int hth[], htb[], kx[], a[], b[], kz[], c[];
    int x[], z[], v[], u[], ax[], bz[];
    int n_sat, n_zeroed, n_kept, n_iter;

    function new(int n_, int nz_, int p_);
      n = n_; nz = nz_; p = p_;
      hth = new[n*n]; htb = new[n]; kx = new[n*p]; a = new[p*n]; b = new[p*nz];
      kz = new[nz*p]; c = new[p]; x = new[n]; z = new[nz]; v = new[p];
      u = new[p]; ax = new[p]; bz = new[p];
      n_sat = 0; n_zeroed = 0; n_kept = 0; n_iter = 0;
    endfunction

    function int sat(longint s);
      if (s > MAXV) begin n_sat++; return int'(MAXV); end
      if (s < MINV) begin n_sat++; return int'(MINV); end
      return int'(s);
    endfunction
    function int red(longint s);            // sum of products -> Q16.8
      return sat(s >>> 8);
    endfunction
    function int add(int x1, int x2); return sat(longint'(x1) + longint'(x2)); endfunction
    function int sub(int x1, int x2); return sat(longint'(x1) - longint'(x2)); endfunction
    function int mul(int x1, int x2); return red(longint'(x1) * longint'(x2)); endfunction
    function int shrink(int y, int t);
      if (t < 0) t = 0;
      if (y > t)  begin n_kept++; return y - t; end
      if (y < -t) begin n_kept++; return y + t; end
      n_zeroed++;
      return 0;
    endfunction

    // One solve: initialisation and 'iters' iterations.
    function void run(int iters, int inv_lx, int thr);
      int xn[], zn[];
      longint s, s2;
      xn = new[n]; zn = new[nz];
      for (int i = 0; i < p; i++) begin
        s = 0; for (int j = 0; j < n; j++) s += longint'(a[i*n+j]) * x[j];
        ax[i] = red(s);
      end
      for (int i = 0; i < p; i++) begin
        s = 0; for (int j = 0; j < nz; j++) s += longint'(b[i*nz+j]) * z[j];
        bz[i] = red(s);
        u[i] = add(sub(add(ax[i], bz[i]), c[i]), v[i]);
      end
      for (int k = 0; k < iters; k++) begin
        for (int i = 0; i < n; i++) begin
          s = 0;  for (int j = 0; j < n; j++) s  += longint'(hth[i*n+j]) * x[j];
          s2 = 0; for (int l = 0; l < p; l++) s2 += longint'(kx[i*p+l]) * u[l];
          xn[i] = sub(sub(x[i], mul(inv_lx, sub(red(s), htb[i]))), red(s2));
        end
        x = xn;
        for (int i = 0; i < p; i++) begin
          s = 0; for (int j = 0; j < n; j++) s += longint'(a[i*n+j]) * x[j];
          ax[i] = red(s);
          u[i] = add(sub(add(ax[i], bz[i]), c[i]), v[i]);   // w
        end
        for (int i = 0; i < nz; i++) begin
          s = 0; for (int l = 0; l < p; l++) s += longint'(kz[i*p+l]) * u[l];
          zn[i] = shrink(sub(z[i], red(s)), thr);
        end
        z = zn;
        for (int i = 0; i < p; i++) begin
          int r;
          s = 0; for (int j = 0; j < nz; j++) s += longint'(b[i*nz+j]) * z[j];
          bz[i] = red(s);
          r = sub(add(ax[i], bz[i]), c[i]);
          v[i] = add(v[i], r);
          u[i] = add(v[i], r);
        end
        n_iter++;
      end
    endfunction

    // Clock edges from the one that samples start to the one that raises done.
    function longint cycles(int iters);
      return longint'(p)*(n+2) + longint'(p)*(nz+2)
             + longint'(iters) * (longint'(n)*(n+p+2) + longint'(p)*(n+2)
                                  + longint'(nz)*(p+2) + longint'(p)*(nz+2));
    endfunction
  endclass

endpackage
