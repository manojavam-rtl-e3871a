// top_controller: the top-level controller that sequences the whole PCA
// computation on the shared datapath.
//
// Operation, after `start`:
//   INIT  write the identity into the Givens matrix R and the eigenvector
//         matrix V0 (through the write port of the shared LHS cache).
//   COV   C = X^T X, with `mode` = MODE_COV. The DLE scans C as it is written.
//   Then, NUM_ITER times (the fixed Jacobi iteration count), with `mode` =
//   MODE_ROT:
//   JAC   finish the DLE scan; the Jacobian unit computes the rotation and
//         writes it into R. Wait for it.
//   ROT1  T = C R
//   ROT2  C = R^T T   (the DLE scans the new C for the next pivot)
//   ROT3  V_next = V_cur R (two V buffers are used in turn, since a pass
//         cannot overwrite an operand it still reads).
//   DONE  `done` is held; `v_sel` tells which V buffer holds the result.
//
// Every pass is a block-streamed product P = A * B of tiled matrices. For
// each row block r and each group of S column blocks c = g..g+S-1 (lanes
// beyond the last column block are disabled): clear the accumulators; for
// each k, read A(r,k) from the shared LHS cache (broadcast) and B(k,c) from
// each lane's private RHS cache, then run one engine step; finally write each
// lane's accumulator tile to P(r,c) through its RHS cache, and hand it to the
// DLE when the pass is scanned. A is read transposed when the pass computes
// X^T or R^T, so that those matrices never need storing. Matrices are stored
// tile by tile in row-major tile order, n_tiles tile columns per row except
// X, whose tile row length is also n_tiles (N / T feature tiles).
//
// The phase order, row-block / column-group schedule, one-bit mode signal and
// fixed iteration count follow the source design; the pass decomposition of
// R^T C R into two products, the V double buffer, the identity
// initialisation and the cache flush at every pass start are this
// implementation's choices.
module top_controller
  import manojavam_pkg::*;
#(
  parameter int S        = 8,
  parameter int NUM_ITER = 50
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  idx_t                 m_tiles,   // row tiles of X   (M / T)
  input  idx_t                 n_tiles,   // feature tiles    (N / T)
  input  taddr_t               x_base,
  input  taddr_t               c_base,
  input  taddr_t               r_base,
  input  taddr_t               t_base,
  input  taddr_t               v0_base,
  input  taddr_t               v1_base,
  output logic                 busy,
  output logic                 done,
  output logic                 v_sel,     // 0: V0 holds V, 1: V1 holds V
  output mode_e                mode,
  output logic [7:0]           iter,
  // caches
  output logic                 flush,
  input  logic                 lhs_ready,
  output logic                 lhs_rd_req,
  output taddr_t               lhs_rd_addr,
  input  logic                 lhs_rd_valid,
  output logic                 lhs_transpose,
  output logic                 init_wr_req,
  output taddr_t               init_wr_addr,
  output logic                 init_wr_diag,  // the init tile is an identity tile
  input  logic                 init_wr_done,
  input  logic  [S-1:0]        rhs_ready,
  output logic  [S-1:0]        rhs_rd_req,
  output taddr_t [S-1:0]       rhs_rd_addr,
  input  logic  [S-1:0]        rhs_rd_valid,
  output logic  [S-1:0]        rhs_wr_req,
  output taddr_t [S-1:0]       rhs_wr_addr,
  input  logic  [S-1:0]        rhs_wr_done,
  // engine
  output logic                 eng_start,
  output logic  [S-1:0]        lane_en,
  output logic                 acc_clr,
  input  logic                 eng_done,
  // DLE / Jacobian unit
  output logic                 dle_clear,
  output logic                 dle_tile_valid,
  output logic  [7:0]          dle_lane,
  output idx_t                 dle_row_blk,
  output idx_t                 dle_col_blk,
  input  logic                 dle_ready,
  output logic                 dle_finish,
  input  logic                 jac_done
);

  typedef enum logic [2:0] {PH_IDLE, PH_INIT, PH_COV, PH_JAC, PH_ROT1, PH_ROT2, PH_ROT3, PH_DONE} phase_e;
  typedef enum logic [3:0] {
    S_IDLE, S_FLUSH, S_GROUP, S_ISSUE, S_WAIT, S_COMP, S_CWAIT,
    S_WB, S_NEXT, S_PDONE
  } pst_e;

  phase_e ph;
  pst_e   st;

  // Pass descriptor
  taddr_t a_base, b_base, o_base;
  logic   a_trans, scan;
  idx_t   k_tiles;

  idx_t r, g, k;
  logic [S-1:0] got, wpend;
  logic         lhs_got;
  logic [7:0]   dl;         // DLE feed lane
  logic         jac_fin;
  idx_t         ii, ij;     // INIT tile
  logic         ivs;        // INIT: 0 = R, 1 = V0

  function automatic taddr_t tile_at(taddr_t base, idx_t row, idx_t col);
    return base + taddr_t'(row) * taddr_t'(n_tiles) + taddr_t'(col);
  endfunction

  // Lane enables for the current column group.
  always_comb begin
    for (int s = 0; s < S; s++)
      lane_en[s] = (int'(g) + s) < int'(n_tiles);
  end

  always_comb begin
    lhs_rd_addr   = a_trans ? tile_at(a_base, k, r) : tile_at(a_base, r, k);
    lhs_transpose = a_trans;
    for (int s = 0; s < S; s++) begin
      rhs_rd_addr[s] = tile_at(b_base, k, idx_t'(int'(g) + s));
      rhs_wr_addr[s] = tile_at(o_base, r, idx_t'(int'(g) + s));
    end
    init_wr_addr = tile_at(ivs ? v0_base : r_base, ii, ij);
    init_wr_diag = (ii == ij);
    dle_row_blk  = r;
    dle_col_blk  = idx_t'(int'(g) + int'(dl));
  end

  assign busy = (ph != PH_IDLE) && (ph != PH_DONE);
  assign done = (ph == PH_DONE);
  assign mode = (ph == PH_IDLE || ph == PH_INIT || ph == PH_COV) ? MODE_COV : MODE_ROT;

  // Descriptor of the pass that the current phase runs.
  always_comb begin
    case (ph)
      PH_COV:  begin a_base = x_base;  a_trans = 1'b1; b_base = x_base;
                     o_base = c_base;  k_tiles = m_tiles; scan = 1'b1; end
      PH_ROT1: begin a_base = c_base;  a_trans = 1'b0; b_base = r_base;
                     o_base = t_base;  k_tiles = n_tiles; scan = 1'b0; end
      PH_ROT2: begin a_base = r_base;  a_trans = 1'b1; b_base = t_base;
                     o_base = c_base;  k_tiles = n_tiles; scan = 1'b1; end
      default: begin a_base = v_sel ? v1_base : v0_base; a_trans = 1'b0;
                     b_base = r_base;  o_base = v_sel ? v0_base : v1_base;
                     k_tiles = n_tiles; scan = 1'b0; end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ph <= PH_IDLE; st <= S_IDLE;
      iter <= '0; v_sel <= 1'b0;
      flush <= 1'b0; lhs_rd_req <= 1'b0; rhs_rd_req <= '0; rhs_wr_req <= '0;
      init_wr_req <= 1'b0; eng_start <= 1'b0; acc_clr <= 1'b0;
      dle_clear <= 1'b0; dle_tile_valid <= 1'b0; dle_finish <= 1'b0;
      r <= '0; g <= '0; k <= '0; got <= '0; lhs_got <= 1'b0; wpend <= '0; dl <= '0;
      jac_fin <= 1'b0; ii <= '0; ij <= '0; ivs <= 1'b0;
    end else begin
      flush <= 1'b0; lhs_rd_req <= 1'b0; rhs_rd_req <= '0; rhs_wr_req <= '0;
      init_wr_req <= 1'b0; eng_start <= 1'b0; acc_clr <= 1'b0;
      dle_clear <= 1'b0; dle_tile_valid <= 1'b0; dle_finish <= 1'b0;

      case (ph)
        PH_IDLE: if (start) begin
          ph <= PH_INIT; ii <= '0; ij <= '0; ivs <= 1'b0;
          iter <= '0; v_sel <= 1'b0; st <= S_IDLE;
        end

        // Identity into R and V0, one tile per write.
        PH_INIT: begin
          if (st == S_IDLE) begin
            if (lhs_ready) begin
              init_wr_req <= 1'b1;
              st <= S_WAIT;
            end
          end else if (init_wr_done) begin
            st <= S_IDLE;
            if (ij + 1 < n_tiles) ij <= ij + 1;
            else begin
              ij <= '0;
              if (ii + 1 < n_tiles) ii <= ii + 1;
              else begin
                ii <= '0;
                if (!ivs) ivs <= 1'b1;
                else begin
                  ph <= PH_COV;
                  st <= S_FLUSH;
                end
              end
            end
          end
        end

        PH_JAC: begin
          if (!jac_fin) begin
            if (dle_ready) begin
              dle_finish <= 1'b1;
              jac_fin    <= 1'b1;
            end
          end else if (jac_done) begin
            jac_fin <= 1'b0;
            ph <= PH_ROT1;
            st <= S_FLUSH;
          end
        end

        PH_DONE: if (start) begin
          ph <= PH_INIT; ii <= '0; ij <= '0; ivs <= 1'b0;
          iter <= '0; v_sel <= 1'b0; st <= S_IDLE;
        end

        default: begin   // a matrix pass: COV, ROT1, ROT2, ROT3
          case (st)
            S_FLUSH: begin
              flush <= 1'b1;
              if (scan) dle_clear <= 1'b1;
              r <= '0; g <= '0;
              st <= S_GROUP;
            end
            S_GROUP: begin
              acc_clr <= 1'b1;
              k <= '0;
              st <= S_ISSUE;
            end
            S_ISSUE: if (lhs_ready && ((rhs_ready & lane_en) == lane_en)) begin
              lhs_rd_req <= 1'b1;
              rhs_rd_req <= lane_en;
              lhs_got <= 1'b0;
              got     <= ~lane_en;
              st <= S_WAIT;
            end
            S_WAIT: begin
              if (lhs_rd_valid) lhs_got <= 1'b1;
              got <= got | rhs_rd_valid;
              if ((lhs_got || lhs_rd_valid) && ((got | rhs_rd_valid) == '1))
                st <= S_COMP;
            end
            S_COMP: begin
              eng_start <= 1'b1;
              st <= S_CWAIT;
            end
            S_CWAIT: if (eng_done) begin
              if (k + 1 < k_tiles) begin
                k <= k + 1;
                st <= S_ISSUE;
              end else begin
                st <= S_WB;
                rhs_wr_req <= lane_en;
                wpend <= lane_en;
                dl <= '0;
              end
            end
            S_WB: begin
              logic dle_all;
              wpend <= wpend & ~rhs_wr_done;
              // Feed the lanes' tiles to the DLE one by one.
              dle_all = !scan || (int'(dl) >= S) || !lane_en[dl[$clog2(S > 1 ? S : 2)-1:0]];
              if (!dle_all && dle_ready && !dle_tile_valid)
                dle_tile_valid <= 1'b1;
              if (dle_tile_valid)   // the DLE takes lane dl in this cycle
                dl <= dl + 8'd1;
              if (((wpend & ~rhs_wr_done) == '0) && dle_all && !dle_tile_valid)
                st <= S_NEXT;
            end
            S_NEXT: begin
              if (int'(g) + S < int'(n_tiles)) begin
                g <= idx_t'(int'(g) + S);
                st <= S_GROUP;
              end else if (r + 1 < n_tiles) begin
                g <= '0;
                r <= r + 1;
                st <= S_GROUP;
              end else begin
                st <= S_PDONE;
              end
            end
            S_PDONE: begin
              st <= S_IDLE;
              case (ph)
                PH_COV:  ph <= PH_JAC;
                PH_ROT1: begin ph <= PH_ROT2; st <= S_FLUSH; end
                PH_ROT2: begin ph <= PH_ROT3; st <= S_FLUSH; end
                default: begin   // ROT3 ends an iteration
                  v_sel <= ~v_sel;
                  iter  <= iter + 8'd1;
                  if (int'(iter) + 1 >= NUM_ITER) ph <= PH_DONE;
                  else ph <= PH_JAC;
                end
              endcase
            end
            default: st <= S_FLUSH;
          endcase
        end
      endcase
    end
  end

  assign dle_lane = dl;

  // Engine steps start only with every enabled lane's operand present.
  a_start_operands: assert property (@(posedge clk) disable iff (rst)
    eng_start |-> lhs_got && (got == '1));

endmodule
