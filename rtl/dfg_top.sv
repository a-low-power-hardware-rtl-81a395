// dfg_top: Dual-Feedback Generalized Proximal Gradient Descent (DFGPGD) solver.
//
// Solves  minimise g(x) + gamma*||z||_1  subject to  A x + B z = c,  with
// g(x) = 1/2 ||H x - b||^2, by iterating, for k = 0 .. max_iter-1,
//   u     = A x + B z - c + v                      (cached, not recomputed)
//   x_new = x - inv_lx*(H'H x - H'b) - Kx u         Kx = (1/(lambda_x*lambda)) A'L
//   w     = A x_new + B z - c + v
//   z_new = soft(z - Kz w, thr)                    Kz = (1/(lambda_z*lambda)) B'L
//   v_new = v + (A x_new + B z_new - c)
// The x-update is a plain gradient step plus a feedback term, so no matrix is
// ever inverted. The residual r = A x_new + B z_new - c computed for the v
// update is reused at once to form the next u = r + v_new; together with the
// cached products A x and B z this is the "dual feedback" cache. H'H, H'b, Kx
// and Kz are computed by the host and loaded into on-chip memories.
//
// Datapath: two multiply-accumulate units (dfg_mac) on one operand stream,
// only one of them enabled in any cycle, a
// soft-threshold unit (dfg_soft_thresh), thirteen cache memories (dfg_ram) and a
// row-serial sequencer (dfg_ctrl). All data are Q16.8 (24-bit) fixed point,
// see dfg_pkg. x and z are double-buffered so a pass can read the old iterate
// while writing the new one.
//
// Host interface (all synchronous to clk, active-low asynchronous reset):
//   load_we/load_sel/load_addr/load_data write one word per cycle while the
//   core is idle (ignored while busy). Matrices are row-major. x and z are
//   written to, and read from, their live bank.
//   start (while idle) latches max_iter, inv_lx (= 1/lambda_x) and thr
//   (= gamma/lambda_z) and runs a solve; 'done' pulses at its end; 'iter'
//   counts completed iterations.
//   rd_sel/rd_addr (idle only) return the word on rd_data one cycle later.
// Latency: see dfg_ctrl; one iteration takes
//   N(N+P+2) + P(N+2) + NZ(P+2) + P(NZ+2) cycles.
// The equations, the caching of H'H, H'b and the scaled A'L, the reuse of the
// residual, and the Q16.8 format follow the paper. The memory organisation,
// the one-product-per-cycle schedule, rounding and saturation, and the host
// interface are this design's own choices.
module dfg_top
  import dfg_pkg::*;
#(
  parameter int unsigned N    = 700,  // length of x
  parameter int unsigned NZ   = 700,  // length of z
  parameter int unsigned P    = 700,  // number of equality constraints
  parameter int unsigned IT_W = 16,
  parameter int unsigned LAW  = 32    // host address width
) (
  input  logic            clk,
  input  logic            rst_n,
  // host load port
  input  logic            load_we,
  input  mem_sel_e        load_sel,
  input  logic [LAW-1:0]  load_addr,
  input  fx_t             load_data,
  // host read port
  input  mem_sel_e        rd_sel,
  input  logic [LAW-1:0]  rd_addr,
  output fx_t             rd_data,
  // run control
  input  logic            start,
  input  logic [IT_W-1:0] max_iter,
  input  fx_t             inv_lx,
  input  fx_t             thr,
  output logic            busy,
  output logic            done,
  output logic [IT_W-1:0] iter
);

  localparam int unsigned CW = $clog2(N + P + NZ + 1);
  localparam int unsigned A_NN  = $clog2(N * N);
  localparam int unsigned A_NP  = $clog2(N * P);
  localparam int unsigned A_PN  = $clog2(P * N);
  localparam int unsigned A_PZ  = $clog2(P * NZ);
  localparam int unsigned A_ZP  = $clog2(NZ * P);
  localparam int unsigned A_N   = $clog2(N);
  localparam int unsigned A_P   = $clog2(P);
  localparam int unsigned A_2N  = $clog2(2 * N);
  localparam int unsigned A_2Z  = $clog2(2 * NZ);

  // ---------------------------------------------------------------- control
  phase_e        phase;
  logic [CW-1:0] row, col;
  logic          mac_en, mac_first, mac_seg, fin, xb, zb;

  dfg_ctrl #(.N(N), .NZ(NZ), .P(P), .IT_W(IT_W), .CW(CW)) u_ctrl (
    .clk, .rst_n, .start(start && !busy), .max_iter,
    .phase, .row, .col, .stream(), .seg(), .mac_en, .mac_first, .mac_seg, .fin,
    .xb, .zb, .busy, .done, .iter
  );

  fx_t inv_lx_q, thr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inv_lx_q <= '0;
      thr_q    <= '0;
    end else if (start && !busy) begin
      inv_lx_q <= inv_lx;
      thr_q    <= thr;
    end
  end

  logic host_we;
  assign host_we = load_we && !busy;

  // Flat indices used by the passes.
  logic [31:0] col_u;      // column index inside the Kx segment of the X pass
  assign col_u = (phase == PH_X) ? 32'(col) - N : 32'(col);

  // --------------------------------------------------------------- memories
  fx_t hth_q, kx_q, a_q, b_q, kz_q;
  fx_t htb_q, c_q, x_q0, x_q1, z_q0, z_q1, v_q1, u_q0, u_q1, ax_q, bz_q;
  fx_t unused0[6];

  // Results of the FIN cycle.
  fx_t x_new, z_new, v_new, u_new, ax_new, bz_new;
  logic we_x, we_z, we_v, we_u, we_ax, we_bz;

  dfg_ram #(.W(W), .DEPTH(N * N)) u_hth (
    .clk, .we(host_we && load_sel == SEL_HTH), .waddr(A_NN'(load_addr)), .wdata(load_data),
    .raddr0(A_NN'(32'(row) * N + 32'(col))), .rdata0(hth_q),
    .raddr1('0), .rdata1(unused0[0]));

  dfg_ram #(.W(W), .DEPTH(N * P)) u_kx (
    .clk, .we(host_we && load_sel == SEL_KX), .waddr(A_NP'(load_addr)), .wdata(load_data),
    .raddr0(A_NP'(32'(row) * P + col_u)), .rdata0(kx_q),
    .raddr1('0), .rdata1(unused0[1]));

  dfg_ram #(.W(W), .DEPTH(P * N)) u_a (
    .clk, .we(host_we && load_sel == SEL_A), .waddr(A_PN'(load_addr)), .wdata(load_data),
    .raddr0(A_PN'(32'(row) * N + 32'(col))), .rdata0(a_q),
    .raddr1('0), .rdata1(unused0[2]));

  dfg_ram #(.W(W), .DEPTH(P * NZ)) u_b (
    .clk, .we(host_we && load_sel == SEL_B), .waddr(A_PZ'(load_addr)), .wdata(load_data),
    .raddr0(A_PZ'(32'(row) * NZ + 32'(col))), .rdata0(b_q),
    .raddr1('0), .rdata1(unused0[3]));

  dfg_ram #(.W(W), .DEPTH(NZ * P)) u_kz (
    .clk, .we(host_we && load_sel == SEL_KZ), .waddr(A_ZP'(load_addr)), .wdata(load_data),
    .raddr0(A_ZP'(32'(row) * P + 32'(col))), .rdata0(kz_q),
    .raddr1('0), .rdata1(unused0[4]));

  dfg_ram #(.W(W), .DEPTH(N)) u_htb (
    .clk, .we(host_we && load_sel == SEL_HTB), .waddr(A_N'(load_addr)), .wdata(load_data),
    .raddr0('0), .rdata0(unused0[5]),
    .raddr1(A_N'(row)), .rdata1(htb_q));

  fx_t unused1[2];
  dfg_ram #(.W(W), .DEPTH(P)) u_c (
    .clk, .we(host_we && load_sel == SEL_C), .waddr(A_P'(load_addr)), .wdata(load_data),
    .raddr0('0), .rdata0(unused1[0]),
    .raddr1(A_P'(row)), .rdata1(c_q));

  // x: two banks of N words; bank xb is live, the X pass writes bank ~xb.
  dfg_ram #(.W(W), .DEPTH(2 * N)) u_x (
    .clk,
    .we(busy ? we_x : (host_we && load_sel == SEL_X)),
    .waddr(busy ? A_2N'(32'(!xb) * N + 32'(row)) : A_2N'(32'(xb) * N + load_addr)),
    .wdata(busy ? x_new : load_data),
    .raddr0(A_2N'(32'(xb) * N + 32'(col))), .rdata0(x_q0),
    .raddr1(busy ? A_2N'(32'(xb) * N + 32'(row)) : A_2N'(32'(xb) * N + rd_addr)), .rdata1(x_q1));

  // z: two banks of NZ words; the Z pass writes bank ~zb.
  dfg_ram #(.W(W), .DEPTH(2 * NZ)) u_z (
    .clk,
    .we(busy ? we_z : (host_we && load_sel == SEL_Z)),
    .waddr(busy ? A_2Z'(32'(!zb) * NZ + 32'(row)) : A_2Z'(32'(zb) * NZ + load_addr)),
    .wdata(busy ? z_new : load_data),
    .raddr0(A_2Z'(32'(zb) * NZ + 32'(col))), .rdata0(z_q0),
    .raddr1(busy ? A_2Z'(32'(zb) * NZ + 32'(row)) : A_2Z'(32'(zb) * NZ + rd_addr)), .rdata1(z_q1));

  fx_t unused2[3];
  dfg_ram #(.W(W), .DEPTH(P)) u_v (
    .clk,
    .we(busy ? we_v : (host_we && load_sel == SEL_V)),
    .waddr(busy ? A_P'(row) : A_P'(load_addr)),
    .wdata(busy ? v_new : load_data),
    .raddr0('0), .rdata0(unused2[0]),
    .raddr1(busy ? A_P'(row) : A_P'(rd_addr)), .rdata1(v_q1));

  // Dual-feedback cache: u before the X pass, w (same form, with x_new)
  // before the Z pass.
  dfg_ram #(.W(W), .DEPTH(P)) u_u (
    .clk, .we(we_u), .waddr(A_P'(row)), .wdata(u_new),
    .raddr0(A_P'(col_u)), .rdata0(u_q0),
    .raddr1(A_P'(rd_addr)), .rdata1(u_q1));

  dfg_ram #(.W(W), .DEPTH(P)) u_ax (
    .clk, .we(we_ax), .waddr(A_P'(row)), .wdata(ax_new),
    .raddr0('0), .rdata0(unused2[1]),
    .raddr1(A_P'(row)), .rdata1(ax_q));

  dfg_ram #(.W(W), .DEPTH(P)) u_bz (
    .clk, .we(we_bz), .waddr(A_P'(row)), .wdata(bz_new),
    .raddr0('0), .rdata0(unused2[2]),
    .raddr1(A_P'(row)), .rdata1(bz_q));

  // ---------------------------------------------------------- multiply-add
  fx_t  op_m, op_v;
  acc_t acc0, acc1;

  always_comb begin
    unique case (phase)
      PH_X:              begin op_m = mac_seg ? kx_q : hth_q; op_v = mac_seg ? u_q0 : x_q0; end
      PH_INIT_AX, PH_AX: begin op_m = a_q;  op_v = x_q0; end
      PH_INIT_BZ, PH_BZ: begin op_m = b_q;  op_v = z_q0; end
      PH_Z:              begin op_m = kz_q; op_v = u_q0; end
      default:           begin op_m = '0;   op_v = '0;   end
    endcase
  end

  // acc0: the single sum of every pass and the gradient sum H'H x of the X
  // pass; acc1: the feedback sum Kx u of the X pass.
  dfg_mac u_mac0 (.clk, .rst_n, .en(mac_en && !mac_seg), .first(mac_first),
                  .a(op_m), .b(op_v), .acc(acc0));
  dfg_mac u_mac1 (.clk, .rst_n, .en(mac_en && mac_seg), .first(mac_first),
                  .a(op_m), .b(op_v), .acc(acc1));

  // ----------------------------------------------------- row results (FIN)
  fx_t  sum0, grad, step, fb, y_z, resid;

  assign sum0  = fx_from_acc(acc0);
  assign grad  = fx_sub(sum0, htb_q);                 // (H'H x - H'b)_i
  assign step  = fx_mul(inv_lx_q, grad);
  assign fb    = fx_from_acc(acc1);                   // (Kx u)_i
  assign x_new = fx_sub(fx_sub(x_q1, step), fb);
  assign y_z   = fx_sub(z_q1, sum0);                  // z_i - (Kz w)_i

  dfg_soft_thresh u_prox (.y(y_z), .thr(thr_q), .z(z_new), .zeroed());

  always_comb begin
    ax_new = sum0;
    bz_new = sum0;
    resid  = '0;
    v_new  = v_q1;
    u_new  = '0;
    unique case (phase)
      PH_INIT_BZ: begin
        resid = fx_resid(ax_q, sum0, c_q);
        u_new = fx_add(resid, v_q1);                  // u = A x0 + B z0 - c + v0
      end
      PH_AX: begin
        u_new = fx_add(fx_resid(sum0, bz_q, c_q), v_q1); // w = A x_new + B z - c + v
      end
      PH_BZ: begin
        resid = fx_resid(ax_q, sum0, c_q);            // r = A x_new + B z_new - c
        v_new = fx_add(v_q1, resid);
        u_new = fx_add(v_new, resid);                 // next u = r + v_new
      end
      default: ;
    endcase
  end

  assign we_x  = fin && (phase == PH_X);
  assign we_z  = fin && (phase == PH_Z);
  assign we_v  = fin && (phase == PH_BZ);
  assign we_u  = fin && (phase == PH_INIT_BZ || phase == PH_AX || phase == PH_BZ);
  assign we_ax = fin && (phase == PH_INIT_AX || phase == PH_AX);
  assign we_bz = fin && (phase == PH_INIT_BZ || phase == PH_BZ);

  // ------------------------------------------------------------ read back
  mem_sel_e rd_sel_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_sel_q <= SEL_X;
    else        rd_sel_q <= rd_sel;
  end

  always_comb begin
    unique case (rd_sel_q)
      SEL_Z:   rd_data = z_q1;
      SEL_V:   rd_data = v_q1;
      SEL_U:   rd_data = u_q1;
      default: rd_data = x_q1;
    endcase
  end

  // The host must not load while a solve runs (such writes are dropped).
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !load_we);
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);

endmodule
