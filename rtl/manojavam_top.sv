// manojavam_top: the unified PCA accelerator, MANOJAVAM(T, S).
//
// One datapath computes both halves of PCA: the covariance matrix C = X^T X
// of a standardised data set X (M samples x N features), and its
// eigendecomposition by the Jacobi method, C -> R^T C R, V -> V R, repeated a
// fixed NUM_ITER times with the rotation R chosen from the largest
// off-diagonal element. At the end the diagonal of C holds the eigenvalues
// and V (buffer V0 or V1, see `v_sel`) the eigenvectors as columns.
//
// Blocks:
//   mm_engine          S lanes of T x T systolic arrays with accumulators
//   tile_cache (x S+1) one shared LHS cache and S private RHS caches, one
//                      T x T tile per line, mode-aware write-miss policy
//   jacobian_unit      DLE pivot search, CORDIC arctan / shift / sin-cos,
//                      Givens controller
//   memory_controller  arbitrates the caches and the Givens write ports onto
//                      the external memory port
//   top_controller     schedules the passes and drives the one-bit mode
// The external DRAM is not part of the design: its port (`mem_*`) is brought
// out. Every access moves one T x T tile; writes carry a per-element mask.
// Matrices live in that memory at the tile base addresses given on the
// *_base inputs, in row-major tile order with N/T tiles per tile row.
//
// Timing: `start` (one cycle, with m_tiles, n_tiles and the bases stable
// until `done`) begins a run; `done` stays high after the last iteration.
// Memory may take any number of cycles: it answers each `mem_req` with a
// one-cycle `mem_ack` (carrying `mem_rdata` for reads).
//
// The ev_* outputs pulse per cache on hits, misses, allocating writes and
// write-around writes; they and the pivot outputs are for observation only.
module manojavam_top
  import manojavam_pkg::*;
#(
  parameter int T        = 4,
  parameter int S        = 8,
  parameter int NUM_ITER = 50,
  parameter int LINES    = 64,
  parameter int MAX_N    = 4096
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 start,
  input  idx_t                 m_tiles,
  input  idx_t                 n_tiles,
  input  taddr_t               x_base,
  input  taddr_t               c_base,
  input  taddr_t               r_base,
  input  taddr_t               t_base,
  input  taddr_t               v0_base,
  input  taddr_t               v1_base,
  output logic                 busy,
  output logic                 done,
  output logic                 v_sel,
  output mode_e                mode,
  output logic [7:0]           iter,
  // external memory (DDR3) port
  output logic                 mem_req,
  output logic                 mem_we,
  output taddr_t               mem_addr,
  output word_t [T-1:0][T-1:0] mem_wdata,
  output logic  [T*T-1:0]      mem_wmask,
  input  logic                 mem_ack,
  input  word_t [T-1:0][T-1:0] mem_rdata,
  // observation
  output idx_t                 piv_p,
  output idx_t                 piv_q,
  output word_t                piv_cpq,
  output word_t                rot_cos,
  output word_t                rot_sin,
  output logic  [S:0]          ev_hit,
  output logic  [S:0]          ev_miss,
  output logic  [S:0]          ev_wr_alloc,
  output logic  [S:0]          ev_wr_around
);

  localparam int NREQ = S + 3;

  // ---------------- controller <-> datapath ----------------
  logic                 flush;
  logic                 lhs_ready, lhs_rd_req, lhs_rd_valid, lhs_transpose;
  taddr_t               lhs_rd_addr;
  logic                 init_wr_req, init_wr_diag, init_wr_done;
  taddr_t               init_wr_addr;
  logic  [S-1:0]        rhs_ready, rhs_rd_req, rhs_rd_valid, rhs_wr_req, rhs_wr_done;
  taddr_t [S-1:0]       rhs_rd_addr, rhs_wr_addr;
  logic                 eng_start, acc_clr, eng_done, eng_busy;
  logic  [S-1:0]        lane_en;
  logic                 dle_clear, dle_tile_valid, dle_ready, dle_finish, jac_done;
  logic  [7:0]          dle_lane;
  idx_t                 dle_row_blk, dle_col_blk;

  word_t [T-1:0][T-1:0]        lhs_tile, init_tile, dle_tile;
  word_t [S-1:0][T-1:0][T-1:0] rhs_tile, acc;

  // ---------------- memory controller request bundle ----------------
  logic  [NREQ-1:0]               mc_req, mc_we, mc_ack;
  taddr_t [NREQ-1:0]              mc_addr;
  word_t [NREQ-1:0][T-1:0][T-1:0] mc_wdata;
  logic  [NREQ-1:0][T*T-1:0]      mc_wmask;
  word_t [T-1:0][T-1:0]           mc_rdata;

  top_controller #(.S(S), .NUM_ITER(NUM_ITER)) u_ctrl (
    .clk, .rst, .start, .m_tiles, .n_tiles,
    .x_base, .c_base, .r_base, .t_base, .v0_base, .v1_base,
    .busy, .done, .v_sel, .mode, .iter,
    .flush, .lhs_ready, .lhs_rd_req, .lhs_rd_addr, .lhs_rd_valid, .lhs_transpose,
    .init_wr_req, .init_wr_addr, .init_wr_diag, .init_wr_done,
    .rhs_ready, .rhs_rd_req, .rhs_rd_addr, .rhs_rd_valid,
    .rhs_wr_req, .rhs_wr_addr, .rhs_wr_done,
    .eng_start, .lane_en, .acc_clr, .eng_done,
    .dle_clear, .dle_tile_valid, .dle_lane, .dle_row_blk, .dle_col_blk,
    .dle_ready, .dle_finish, .jac_done
  );

  // Identity or zero tile for the initialisation of R and V.
  always_comb begin
    init_tile = '0;
    if (init_wr_diag)
      for (int i = 0; i < T; i++) init_tile[i][i] = ONE;
  end

  // Shared LHS cache (L1), memory requester 0.
  tile_cache #(.T(T), .LINES(LINES)) u_lhs_cache (
    .clk, .rst, .mode, .flush, .ready(lhs_ready),
    .rd_req(lhs_rd_req), .rd_addr(lhs_rd_addr), .rd_valid(lhs_rd_valid), .rd_data(lhs_tile),
    .wr_req(init_wr_req), .wr_addr(init_wr_addr), .wr_data(init_tile), .wr_done(init_wr_done),
    .m_req(mc_req[0]), .m_we(mc_we[0]), .m_addr(mc_addr[0]), .m_wdata(mc_wdata[0]),
    .m_ack(mc_ack[0]), .m_rdata(mc_rdata),
    .ev_hit(ev_hit[0]), .ev_miss(ev_miss[0]),
    .ev_wr_alloc(ev_wr_alloc[0]), .ev_wr_around(ev_wr_around[0])
  );
  assign mc_wmask[0] = '1;

  // Private RHS caches (PL1_s), memory requesters 1..S.
  for (genvar s = 0; s < S; s++) begin : g_rhs
    tile_cache #(.T(T), .LINES(LINES)) u_rhs_cache (
      .clk, .rst, .mode, .flush, .ready(rhs_ready[s]),
      .rd_req(rhs_rd_req[s]), .rd_addr(rhs_rd_addr[s]), .rd_valid(rhs_rd_valid[s]),
      .rd_data(rhs_tile[s]),
      .wr_req(rhs_wr_req[s]), .wr_addr(rhs_wr_addr[s]), .wr_data(acc[s]),
      .wr_done(rhs_wr_done[s]),
      .m_req(mc_req[s+1]), .m_we(mc_we[s+1]), .m_addr(mc_addr[s+1]),
      .m_wdata(mc_wdata[s+1]), .m_ack(mc_ack[s+1]), .m_rdata(mc_rdata),
      .ev_hit(ev_hit[s+1]), .ev_miss(ev_miss[s+1]),
      .ev_wr_alloc(ev_wr_alloc[s+1]), .ev_wr_around(ev_wr_around[s+1])
    );
    assign mc_wmask[s+1] = '1;
  end

  mm_engine #(.T(T), .S(S)) u_engine (
    .clk, .rst, .start(eng_start), .lhs_transpose, .lhs_tile, .rhs_tile,
    .lane_en, .acc_clr, .busy(eng_busy), .done(eng_done), .acc
  );

  // Accumulator outputs to the DLE, one lane at a time.
  assign dle_tile = acc[dle_lane[$clog2(S > 1 ? S : 2)-1:0]];

  logic [1:0] g_req, g_ack;
  assign mc_req[S+2:S+1] = g_req;
  assign mc_we[S+2:S+1]  = 2'b11;
  assign g_ack           = mc_ack[S+2:S+1];

  jacobian_unit #(.T(T), .MAX_N(MAX_N)) u_jacobi (
    .clk, .rst,
    .dle_clear, .dle_tile_valid, .dle_tile, .dle_row_blk, .dle_col_blk,
    .dle_ready, .dle_finish,
    .r_base, .n_tiles, .done(jac_done),
    .piv_p, .piv_q, .piv_cpq, .rot_cos, .rot_sin,
    .g_req, .g_addr(mc_addr[S+2:S+1]), .g_wdata(mc_wdata[S+2:S+1]),
    .g_wmask(mc_wmask[S+2:S+1]), .g_ack
  );

  memory_controller #(.T(T), .NREQ(NREQ)) u_memctl (
    .clk, .rst, .req(mc_req), .we(mc_we), .addr(mc_addr), .wdata(mc_wdata),
    .wmask(mc_wmask), .ack(mc_ack), .rdata(mc_rdata),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wmask, .mem_ack, .mem_rdata
  );

  // The controller starts the engine only when it is idle, and only selects
  // existing lanes for the DLE feed.
  a_engine_idle: assert property (@(posedge clk) disable iff (rst) eng_start |-> !eng_busy)
    else $error("engine started while busy");
  a_dle_lane: assert property (@(posedge clk) disable iff (rst) dle_tile_valid |-> int'(dle_lane) < S)
    else $error("DLE lane out of range");

endmodule
