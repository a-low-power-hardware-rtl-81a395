// tb_dfg_ram: self-checking test of the cache memory.
// Fills a 64-word memory, then issues random writes and random reads on both
// read ports in the same cycles, comparing each read with a shadow copy. It
// checks the one-cycle read latency and that a word written in cycle t is
// returned by a read addressed in cycle t+1.
module tb_dfg_ram;
  localparam int W = 24, DEPTH = 64, AW = 6;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr0 = '0, raddr1 = '0;
  logic [W-1:0] wdata = '0, rdata0, rdata1;
  logic [W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  dfg_ram #(.W(W), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr0, .rdata0, .raddr1, .rdata1);

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = W'($urandom);
      shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 3000; k++) begin
      logic [W-1:0] e0, e1;
      @(negedge clk);
      raddr0 = AW'($urandom); raddr1 = AW'($urandom);
      e0 = shadow[raddr0]; e1 = shadow[raddr1];
      we = $urandom_range(0, 1);
      waddr = AW'($urandom); wdata = W'($urandom);
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      checks += 2;
      if (rdata0 !== e0) begin failures++; $display("FAIL port0 addr %0d: %h vs %h", raddr0, rdata0, e0); end
      if (rdata1 !== e1) begin failures++; $display("FAIL port1 addr %0d: %h vs %h", raddr1, rdata1, e1); end
    end
    // write then read back in the very next cycle
    @(negedge clk); we = 1; waddr = 6'd17; wdata = 24'hABCDEF; shadow[17] = wdata;
    @(negedge clk); we = 0; raddr0 = 6'd17; raddr1 = 6'd17;
    @(posedge clk); #1;
    checks++;
    if (rdata0 !== 24'hABCDEF || rdata1 !== 24'hABCDEF) begin failures++; $display("FAIL read after write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
