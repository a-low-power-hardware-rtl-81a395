// dfg_pkg: number format, fixed-point helpers and shared encodings of the
// DFGPGD solver core.
//
// Every datum in the core is a signed two's-complement fixed-point number of
// W = 24 bits with FRAC = 8 fractional bits (16 integer bits including the
// sign), the word format the solver was evaluated with. Dot products are
// accumulated exactly in ACC_W = 64 bits and reduced to the 24-bit format only
// once, at the end of a row. Reduction truncates towards minus infinity (an
// arithmetic shift, the default quantisation of common HLS fixed-point types)
// and saturates on overflow (this design's choice: a wrapped value would feed
// a wildly wrong iterate back into the loop).
package dfg_pkg;

  parameter int unsigned W     = 24;  // word length
  parameter int unsigned FRAC  = 8;   // fractional bits
  parameter int unsigned ACC_W = 64;  // accumulator width (exact for > 2^15 terms)

  typedef logic signed [W-1:0]     fx_t;
  typedef logic signed [2*W-1:0]   prod_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam fx_t FX_MAX = {1'b0, {(W-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(W-1){1'b0}}};

  // Clamp an integer (in units of one LSB of fx_t) to the representable range.
  function automatic fx_t fx_sat(input acc_t a);
    if (a > acc_t'(FX_MAX)) return FX_MAX;
    if (a < acc_t'(FX_MIN)) return FX_MIN;
    return fx_t'(a);
  endfunction

  // Reduce a sum of products (2*FRAC fractional bits) to fx_t.
  function automatic fx_t fx_from_acc(input acc_t a);
    return fx_sat(a >>> FRAC);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(acc_t'(a) + acc_t'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(acc_t'(a) - acc_t'(b));
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    prod_t p;
    p = a * b;
    return fx_from_acc(acc_t'(p));
  endfunction

  // Residual of the equality constraint, one row: (Ax)_i + (Bz)_i - c_i.
  function automatic fx_t fx_resid(input fx_t ax, input fx_t bz, input fx_t c);
    return fx_sub(fx_add(ax, bz), c);
  endfunction

  // Which memory the host port addresses.
  typedef enum logic [3:0] {
    SEL_HTH = 4'd0,  // H'H, N x N, row-major
    SEL_HTB = 4'd1,  // H'b, N
    SEL_KX  = 4'd2,  // (1/(lambda_x*lambda)) A'L, N x P, row-major
    SEL_A   = 4'd3,  // A, P x N, row-major
    SEL_B   = 4'd4,  // B, P x NZ, row-major
    SEL_KZ  = 4'd5,  // (1/(lambda_z*lambda)) B'L, NZ x P, row-major
    SEL_C   = 4'd6,  // c, P
    SEL_X   = 4'd7,  // x iterate, N
    SEL_Z   = 4'd8,  // z iterate, NZ
    SEL_V   = 4'd9,  // scaled dual v, P
    SEL_U   = 4'd10  // feedback cache u (read only)
  } mem_sel_e;

  // Row passes of one solve. INIT_* run once per start; X..BZ once per iteration.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_INIT_AX = 3'd1,  // ax = A x0
    PH_INIT_BZ = 3'd2,  // bz = B z0, u = ax + bz - c + v0
    PH_X       = 3'd3,  // x update (gradient step plus dual feedback)
    PH_AX      = 3'd4,  // ax = A x_new, w = ax + bz - c + v (into the u cache)
    PH_Z       = 3'd5,  // z update (soft threshold)
    PH_BZ      = 3'd6   // bz = B z_new, v update, u for the next iteration
  } phase_e;

endpackage
