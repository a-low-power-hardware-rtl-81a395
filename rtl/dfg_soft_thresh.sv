// dfg_soft_thresh: proximal operator of the l1 norm (soft thresholding).
//
// For the LASSO penalty h(z) = gamma*||z||_1 and the z-update metric
// lambda_z*I, the z-update of DFGPGD reduces element-wise to
//   z_new = sign(y) * max(|y| - t, 0),   t = gamma / lambda_z,
// where y = z - (1/(lambda_z*lambda)) B'L w is the gradient-stepped point.
// Purely combinational. 'thr' is read as non-negative; a negative value is
// treated as zero (no shrinkage). Because |y| > t >= 0 whenever the output is
// non-zero, the result never overflows. 'zeroed' flags an input that was
// shrunk to exactly zero. The closed form is the standard prox of the l1 norm;
// the paper gives the z-update as an argmin.
module dfg_soft_thresh
  import dfg_pkg::*;
(
  input  fx_t  y,
  input  fx_t  thr,
  output fx_t  z,
  output logic zeroed
);

  fx_t t;
  assign t = thr[W-1] ? fx_t'(0) : thr;

  always_comb begin
    zeroed = 1'b0;
    if (y > t)        z = y - t;
    else if (y < -t)  z = y + t;
    else begin
      z      = '0;
      zeroed = 1'b1;
    end
  end

endmodule
