// jacobian_unit: finds the Jacobi pivot and produces the Givens rotation.
//
// Chain: DLE -> CORDIC arctan -> 1-bit right shift -> CORDIC sine/cosine ->
// Givens controller, as in the Jacobian unit drawing of the source design.
//   * The DLE scans the accumulator output tiles of a pass (dle_* inputs) and
//     on `dle_finish` reports c_pq, c_pp, c_qq, p and q.
//   * The arctan unit computes 2*theta = atan(2 c_pq / (c_pp - c_qq)); it is
//     fed y = c_pq and x = (c_pp - c_qq)/2, which has the same ratio and
//     cannot overflow a word.
//   * An arithmetic right shift by one bit gives theta (|theta| <= pi/4).
//   * The sine/cosine unit gives cos(theta) and sin(theta).
//   * The Givens controller writes R[p][p], R[q][q], R[p][q], R[q][p] to the
//     stored Givens matrix through its two write ports.
// `done` pulses when the Givens matrix in memory holds the new rotation.
//
// Timing: 2 cycles DLE readout, CORDIC_N+1 cycles per CORDIC unit, then the
// memory writes (two write events of two entries each, preceded by two that
// restore the previous rotation's entries).
module jacobian_unit
  import manojavam_pkg::*;
#(
  parameter int T     = 4,
  parameter int MAX_N = 4096
) (
  input  logic                          clk,
  input  logic                          rst,
  // DLE stream
  input  logic                          dle_clear,
  input  logic                          dle_tile_valid,
  input  word_t [T-1:0][T-1:0]          dle_tile,
  input  idx_t                          dle_row_blk,
  input  idx_t                          dle_col_blk,
  output logic                          dle_ready,
  input  logic                          dle_finish,
  // Givens matrix location
  input  taddr_t                        r_base,
  input  idx_t                          n_tiles,
  output logic                          done,
  // observation of the pivot and rotation (for status and test)
  output idx_t                          piv_p,
  output idx_t                          piv_q,
  output word_t                         piv_cpq,
  output word_t                         rot_cos,
  output word_t                         rot_sin,
  // Givens write ports
  output logic  [1:0]                   g_req,
  output taddr_t [1:0]                  g_addr,
  output word_t [1:0][T-1:0][T-1:0]     g_wdata,
  output logic  [1:0][T*T-1:0]          g_wmask,
  input  logic  [1:0]                   g_ack
);

  logic  res_valid;
  word_t c_pq, c_pp, c_qq;
  idx_t  p, q;

  dle #(.T(T), .MAX_N(MAX_N)) u_dle (
    .clk, .rst, .clear(dle_clear), .tile_valid(dle_tile_valid),
    .tile_in(dle_tile), .row_blk(dle_row_blk), .col_blk(dle_col_blk),
    .ready(dle_ready), .finish(dle_finish), .res_valid,
    .c_pq, .c_pp, .c_qq, .p, .q
  );

  word_t diff_half;
  assign diff_half = (c_pp >>> 1) - (c_qq >>> 1);

  logic  at_valid;
  word_t two_theta, theta;

  cordic_arctan u_atan (
    .clk, .rst, .in_valid(res_valid), .x(diff_half), .y(c_pq),
    .out_valid(at_valid), .angle(two_theta)
  );

  assign theta = two_theta >>> 1;   // the 1-bit right shifter

  logic  sc_valid;
  word_t cos_t, sin_t;

  cordic_sincos u_sincos (
    .clk, .rst, .in_valid(at_valid), .theta,
    .out_valid(sc_valid), .cos_o(cos_t), .sin_o(sin_t)
  );

  logic g_busy;  // Givens controller activity

  givens_controller #(.T(T)) u_givens (
    .clk, .rst, .r_base, .n_tiles, .start(sc_valid),
    .p, .q, .cos_i(cos_t), .sin_i(sin_t), .busy(g_busy), .done,
    .req(g_req), .addr(g_addr), .wdata(g_wdata), .wmask(g_wmask), .ack(g_ack)
  );

  assign piv_p   = p;
  assign piv_q   = q;
  assign piv_cpq = c_pq;

  always_ff @(posedge clk) begin
    if (rst) begin
      rot_cos <= '0;
      rot_sin <= '0;
    end else if (sc_valid) begin
      rot_cos <= cos_t;
      rot_sin <= sin_t;
    end
  end

  // A new rotation may only reach the Givens controller once the previous
  // rotation's writes are finished (the top-level schedule guarantees this).
  a_givens_idle: assert property (@(posedge clk) disable iff (rst) sc_valid |-> !g_busy)
    else $error("rotation started while the Givens controller is busy");

endmodule
