// dfg_ctrl: sequencer of the DFGPGD solver core.
//
// A solve is a chain of row passes over the cached matrices. After 'start' the
// controller runs two initialisation passes (INIT_AX: A x0, INIT_BZ: B z0 and
// the first feedback term u = A x0 + B z0 - c + v0), then max_iter iterations
// of four passes each:
//   X  : N  rows of N+P terms  (H'H x, then scaled A'L u)  -> x_new
//   AX : P  rows of N terms    (A x_new)                   -> w cached
//   Z  : NZ rows of P terms    (scaled B'L w)              -> z_new
//   BZ : P  rows of NZ terms   (B z_new)                   -> v, u cached
// Every row takes (terms) STREAM cycles, one per product, then one WAIT
// cycle (memory and accumulator latency) and one FIN cycle in which the
// datapath writes the row's result. 'row', 'col' and 'phase' address the
// memories during STREAM; mac_* are the same strobes one cycle later, aligned
// with the memory outputs. xb/zb select the live bank of the double-buffered
// x and z memories; they flip at the end of the X and Z passes.
// The clock edge that samples 'start' is followed, this many edges later, by the
// edge that raises the one-cycle 'done' pulse:
//   P(N+2) + P(NZ+2) + max_iter*[N(N+P+2) + P(N+2) + NZ(P+2) + P(NZ+2)].
// With max_iter = 0 only the initialisation runs. The pass order follows the
// algorithm's equations; the row-serial schedule is this design's choice.
module dfg_ctrl
  import dfg_pkg::*;
#(
  parameter int unsigned N    = 700,
  parameter int unsigned NZ   = 700,
  parameter int unsigned P    = 700,
  parameter int unsigned IT_W = 16,
  parameter int unsigned CW   = $clog2(N + P + NZ + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [IT_W-1:0] max_iter,
  output phase_e          phase,
  output logic [CW-1:0]   row,
  output logic [CW-1:0]   col,
  output logic            stream,     // a product term is addressed this cycle
  output logic            seg,        // term belongs to the second sum (X pass)
  output logic            mac_en,     // operands of last cycle's term are valid
  output logic            mac_first,
  output logic            mac_seg,
  output logic            fin,        // row result is written this cycle
  output logic            xb,
  output logic            zb,
  output logic            busy,
  output logic            done,       // one-cycle pulse at the end of a solve
  output logic [IT_W-1:0] iter        // iterations completed in this solve
);

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_WAIT, S_FIN} state_e;
  state_e st;
  logic [IT_W-1:0] iter_max;

  function automatic logic [CW-1:0] rows_of(input phase_e ph);
    case (ph)
      PH_X:    return CW'(N);
      PH_Z:    return CW'(NZ);
      default: return CW'(P);
    endcase
  endfunction

  function automatic logic [CW-1:0] terms_of(input phase_e ph);
    case (ph)
      PH_X:                return CW'(N + P);
      PH_INIT_AX, PH_AX:   return CW'(N);
      PH_Z:                return CW'(P);
      default:             return CW'(NZ);
    endcase
  endfunction

  assign stream = (st == S_STREAM);
  assign fin    = (st == S_FIN);
  assign busy   = (st != S_IDLE);
  assign seg    = (phase == PH_X) && (col >= CW'(N));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      phase     <= PH_IDLE;
      row       <= '0;
      col       <= '0;
      xb        <= 1'b0;
      zb        <= 1'b0;
      iter      <= '0;
      iter_max  <= '0;
      done      <= 1'b0;
      mac_en    <= 1'b0;
      mac_first <= 1'b0;
      mac_seg   <= 1'b0;
    end else begin
      done      <= 1'b0;
      mac_en    <= stream;
      mac_first <= stream && ((col == '0) || (phase == PH_X && col == CW'(N)));
      mac_seg   <= seg;
      unique case (st)
        S_IDLE: if (start) begin
          st       <= S_STREAM;
          phase    <= PH_INIT_AX;
          row      <= '0;
          col      <= '0;
          iter     <= '0;
          iter_max <= max_iter;
        end
        S_STREAM: begin
          if (col == terms_of(phase) - 1'b1) st <= S_WAIT;
          else                               col <= col + 1'b1;
        end
        S_WAIT: st <= S_FIN;
        S_FIN: begin
          col <= '0;
          st  <= S_STREAM;
          if (row != rows_of(phase) - 1'b1) begin
            row <= row + 1'b1;
          end else begin
            row <= '0;
            unique case (phase)
              PH_INIT_AX: phase <= PH_INIT_BZ;
              PH_INIT_BZ: begin
                if (iter_max == '0) begin
                  st    <= S_IDLE;
                  phase <= PH_IDLE;
                  done  <= 1'b1;
                end else begin
                  phase <= PH_X;
                end
              end
              PH_X: begin
                phase <= PH_AX;
                xb    <= ~xb;
              end
              PH_AX: phase <= PH_Z;
              PH_Z: begin
                phase <= PH_BZ;
                zb    <= ~zb;
              end
              PH_BZ: begin
                iter <= iter + 1'b1;
                if (iter + 1'b1 == iter_max) begin
                  st    <= S_IDLE;
                  phase <= PH_IDLE;
                  done  <= 1'b1;
                end else begin
                  phase <= PH_X;
                end
              end
              default: begin
                st    <= S_IDLE;
                phase <= PH_IDLE;
              end
            endcase
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_phase_live: assert property (@(posedge clk) disable iff (!rst_n) busy |-> (phase != PH_IDLE));
  a_col_range:  assert property (@(posedge clk) disable iff (!rst_n) stream |-> (col < terms_of(phase)));

endmodule
