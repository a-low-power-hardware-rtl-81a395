// tb_dfg_soft_thresh: self-checking test of the l1 proximal operator.
// Applies random and boundary inputs (|y| just above, at and below the
// threshold, full-scale values, negative thresholds) and compares output and
// 'zeroed' flag with sign(y)*max(|y|-t,0) computed in integers.
module tb_dfg_soft_thresh;
  import dfg_pkg::*;
  fx_t y, thr, z;
  logic zeroed;
  int checks = 0, failures = 0;
  int n_zero = 0, n_kept = 0;

  dfg_soft_thresh dut (.y, .thr, .z, .zeroed);

  task automatic check(int yi, int ti);
    int t, e;
    y = fx_t'(yi); thr = fx_t'(ti);
    #1;
    t = (ti < 0) ? 0 : ti;
    e = (yi > t) ? yi - t : (yi < -t) ? yi + t : 0;
    checks++;
    if (int'(z) != e || zeroed != !(yi > t || yi < -t)) begin
      failures++;
      $display("FAIL y=%0d t=%0d z=%0d zeroed=%0b expected %0d", yi, ti, z, zeroed, e);
    end
    if (zeroed) n_zero++; else n_kept++;
  endtask

  initial begin
    check(0, 0); check(1, 0); check(-1, 0);
    check(256, 256); check(257, 256); check(-257, 256); check(-256, 256);
    check(8388607, 100); check(-8388608, 100); check(-8388608, 0);
    check(500, -30); check(-20, -30);
    check(8388607, 8388607); check(-8388608, 8388607);
    for (int i = 0; i < 2000; i++) begin
      automatic int ti = $urandom_range(0, 4095);
      automatic int yi = $signed($urandom) >>> ($urandom_range(8, 19));
      check(yi, ti);
    end
    checks++;
    if (n_zero == 0 || n_kept == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
