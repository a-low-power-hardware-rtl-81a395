// dfg_ram: on-chip cache memory of the DFGPGD core.
//
// Every matrix and vector the solver keeps on chip (the pre-computed H'H,
// H'b and scaled A'L, B'L, the constraint data A, B, c, the iterates x, z, v
// and the dual-feedback cache) lives in one instance of this memory. It is a
// plain array with one write port and two independent read ports, both
// synchronous: an address presented in cycle t returns its word in cycle t+1.
// A write at the end of cycle t is seen by a read addressed in cycle t+1.
// The contents are not reset; the host loads them before a solve.
// The two read ports and the one-cycle latency are this design's choice; the
// solver only requires that the data be cached on chip.
module dfg_ram #(
  parameter int unsigned W     = 24,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr0,
  output logic [W-1:0]  rdata0,
  input  logic [AW-1:0] raddr1,
  output logic [W-1:0]  rdata1
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata0 <= mem[raddr0];
    rdata1 <= mem[raddr1];
  end

  // A write outside the array is a caller error.
  a_waddr_range: assert property (@(posedge clk) we |-> (32'(waddr) < DEPTH));

endmodule
