// dfg_mac: multiply-accumulate unit for one row of a matrix-vector product.
//
// Each enabled cycle adds the exact 48-bit product a*b of two Q16.8 words to a
// 64-bit accumulator; 'first' starts a new sum instead of adding to the old
// one. The sum keeps all 16 fractional bits, so a row of any length up to
// 2^15 terms is exact and is rounded only once by the caller (dfg_pkg's
// fx_from_acc). Timing: the sum including the operands of cycle t is on 'acc'
// in cycle t+1. Reset clears the accumulator.
// One product per cycle is this design's choice; the paper states only that
// the solver is built from matrix-vector multiplications and additions.
module dfg_mac
  import dfg_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic first,
  input  fx_t  a,
  input  fx_t  b,
  output acc_t acc
);

  prod_t prod;
  assign prod = a * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= '0;
    else if (en)   acc <= (first ? acc_t'(0) : acc) + acc_t'(prod);
  end

endmodule
