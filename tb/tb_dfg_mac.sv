// tb_dfg_mac: self-checking test of the multiply-accumulate unit.
// Drives random Q16.8 operand streams of random length (including full-scale
// values), restarts sums with 'first', idles with 'en' low, and compares the
// accumulator every cycle with a 64-bit integer sum of the exact products.
// Also checks that the result appears exactly one cycle after the operands.
module tb_dfg_mac;
  import dfg_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  fx_t a = '0, b = '0;
  acc_t acc;
  int checks = 0, failures = 0;
  longint model = 0;

  dfg_mac dut (.clk, .rst_n, .en, .first, .a, .b, .acc);

  always #5 clk = ~clk;

  function automatic int rnd24();
    case ($urandom_range(0, 3))
      0: return  8388607;
      1: return -8388608;
      default: return $signed($urandom) >>> 8;
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    if (acc !== 0) begin failures++; $display("FAIL reset acc=%0d", acc); end
    checks++;
    for (int s = 0; s < 300; s++) begin
      automatic int len = $urandom_range(1, 40);
      for (int t = 0; t < len; t++) begin
        automatic int ai = rnd24(), bi = rnd24();
        automatic bit idle = ($urandom_range(0, 7) == 0) && (t != 0);
        @(negedge clk);
        en = !idle; first = (t == 0); a = fx_t'(ai); b = fx_t'(bi);
        @(posedge clk); #1;
        if (!idle) model = (t == 0 ? 0 : model) + longint'(ai) * longint'(bi);
        checks++;
        if (acc !== model) begin
          failures++;
          $display("FAIL seq %0d term %0d: acc=%0d model=%0d", s, t, acc, model);
        end
      end
    end
    @(negedge clk); en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
