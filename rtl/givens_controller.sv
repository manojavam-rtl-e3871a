// givens_controller: writes the Givens rotation matrix R into memory.
//
// R is the identity except for R[p][p] = R[q][q] = cos(theta),
// R[p][q] = -sin(theta) and R[q][p] = sin(theta). With
// theta = atan(2 c_pq / (c_pp - c_qq)) / 2 these signs are the ones for which
// R^T C R has a zero at (p, q); the source design prints the opposite signs
// next to the same angle formula, which would not zero the pivot. The stored R starts as the
// identity (the controller of the whole design writes it before the first
// rotation), so each new rotation only needs its four entries written. The
// controller first returns the four entries of the previous rotation to
// identity values (1 on the diagonal, 0 off it), then writes the new ones.
// It drives two write ports in parallel, one entry on each, so each group of
// four entries takes two write events; this stands for the dual-port memory
// of the source design.
//
// Each entry becomes a masked tile write: the entry (r, c) lives in tile
// r_base + (r/T)*n_tiles + c/T, at element (r%T, c%T), and only that element's
// mask bit is set. Each port holds `req` until its `ack`.
//
// Interface and timing: `start` with p, q, cos, sin begins; `done` pulses
// after the last write is acknowledged. The entry order, the restore step and
// the masked tile write are this implementation's choices.
module givens_controller
  import manojavam_pkg::*;
#(
  parameter int T = 4
) (
  input  logic                          clk,
  input  logic                          rst,
  input  taddr_t                        r_base,
  input  idx_t                          n_tiles,
  input  logic                          start,
  input  idx_t                          p,
  input  idx_t                          q,
  input  word_t                         cos_i,
  input  word_t                         sin_i,
  output logic                          busy,
  output logic                          done,
  // two write ports towards the memory controller
  output logic  [1:0]                   req,
  output taddr_t [1:0]                  addr,
  output word_t [1:0][T-1:0][T-1:0]     wdata,
  output logic  [1:0][T*T-1:0]          wmask,
  input  logic  [1:0]                   ack
);

  typedef enum logic [2:0] {G_IDLE, G_RST1, G_RST2, G_SET1, G_SET2, G_DONE} gst_e;
  gst_e  st;
  idx_t  p_q, q_q, pp_old, qq_old;
  word_t cos_q, sin_q;
  logic  have_old;
  logic  [1:0] pend;

  // Entry (row, col, value) for each port in each state.
  idx_t  er [2];
  idx_t  ec [2];
  word_t evl [2];

  always_comb begin
    er[0] = '0; ec[0] = '0; evl[0] = '0;
    er[1] = '0; ec[1] = '0; evl[1] = '0;
    case (st)
      G_RST1: begin
        er[0] = pp_old; ec[0] = pp_old; evl[0] = ONE;
        er[1] = qq_old; ec[1] = qq_old; evl[1] = ONE;
      end
      G_RST2: begin
        er[0] = pp_old; ec[0] = qq_old; evl[0] = '0;
        er[1] = qq_old; ec[1] = pp_old; evl[1] = '0;
      end
      G_SET1: begin
        er[0] = p_q; ec[0] = p_q; evl[0] = cos_q;
        er[1] = q_q; ec[1] = q_q; evl[1] = cos_q;
      end
      G_SET2: begin
        er[0] = p_q; ec[0] = q_q; evl[0] = -sin_q;
        er[1] = q_q; ec[1] = p_q; evl[1] = sin_q;
      end
      default: ;
    endcase
  end

  for (genvar k = 0; k < 2; k++) begin : g_port
    idx_t ti, tj, ii, jj;
    assign ti = er[k] / idx_t'(T);
    assign tj = ec[k] / idx_t'(T);
    assign ii = er[k] % idx_t'(T);
    assign jj = ec[k] % idx_t'(T);
    assign addr[k] = r_base + taddr_t'(ti) * taddr_t'(n_tiles) + taddr_t'(tj);
    always_comb begin
      wdata[k] = '0;
      wmask[k] = '0;
      wdata[k][ii][jj] = evl[k];
      wmask[k][int'(ii)*T + int'(jj)] = 1'b1;
    end
    assign req[k] = pend[k];
  end

  assign busy = (st != G_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st       <= G_IDLE;
      have_old <= 1'b0;
      pend     <= '0;
      done     <= 1'b0;
      pp_old   <= '0;
      qq_old   <= '0;
    end else begin
      done <= 1'b0;
      pend <= pend & ~ack;
      case (st)
        G_IDLE: if (start) begin
          p_q   <= p;
          q_q   <= q;
          cos_q <= cos_i;
          sin_q <= sin_i;
          st    <= have_old ? G_RST1 : G_SET1;
          pend  <= 2'b11;
        end
        G_RST1: if ((pend & ~ack) == 2'b00) begin
          st <= G_RST2; pend <= 2'b11;
        end
        G_RST2: if ((pend & ~ack) == 2'b00) begin
          st <= G_SET1; pend <= 2'b11;
        end
        G_SET1: if ((pend & ~ack) == 2'b00) begin
          st <= G_SET2; pend <= 2'b11;
        end
        G_SET2: if ((pend & ~ack) == 2'b00) begin
          st       <= G_DONE;
          have_old <= 1'b1;
          pp_old   <= p_q;
          qq_old   <= q_q;
        end
        G_DONE: begin
          st   <= G_IDLE;
          done <= 1'b1;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

endmodule
