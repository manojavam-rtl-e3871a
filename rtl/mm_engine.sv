// mm_engine: the matrix multiplication engine, S lanes of
// (mpu_rhs -> T x T systolic array -> matrix accumulator) sharing one mpu_lhs.
//
// One `start` performs one block-streaming step: the LHS tile (broadcast to
// every lane, optionally transposed) and each lane's own RHS tile are latched
// in the padding units, the arrays are cleared and run for 3T-2 cycles, and
// every enabled lane then adds its T x T product tile into its accumulator.
// Repeating this over the K tiles of a row block / column block pair leaves
// the S output tiles in the accumulators. `acc_clr` empties the accumulators
// before a new group of output tiles. The `mode` bit of the datapath does not
// change the engine: covariance (X^T X) and rotation (R^T C R, V R) are both
// plain tile products here, selected by what the controller fetches.
//
// Timing: `done` pulses exactly 3T cycles after the cycle in which `start` is
// sampled, and `acc` is valid from that cycle; `busy` is high in between.
// Tile products are not overlapped: the array is drained before the next
// start. The lane structure and the shared LHS / private RHS feeding follow
// the source design; the step timing and the single shared LHS padding unit
// are this implementation's choices.
module mm_engine
  import manojavam_pkg::*;
#(
  parameter int T = 4,
  parameter int S = 8
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         start,
  input  logic                         lhs_transpose,
  input  word_t [T-1:0][T-1:0]         lhs_tile,
  input  word_t [S-1:0][T-1:0][T-1:0]  rhs_tile,
  input  logic  [S-1:0]                lane_en,
  input  logic                         acc_clr,
  output logic                         busy,
  output logic                         done,
  output word_t [S-1:0][T-1:0][T-1:0]  acc
);

  typedef enum logic [1:0] {E_IDLE, E_RUN, E_ADD} est_e;
  est_e       st;
  logic [7:0] cnt;
  logic [S-1:0] lane_q;
  localparam logic [7:0] LAST = 8'(3*T-3);

  word_t [T-1:0] a_left;
  logic load, sa_clr, sa_en, acc_add;

  assign load    = (st == E_IDLE) && start;
  assign sa_clr  = load;
  assign sa_en   = (st == E_RUN);
  assign acc_add = (st == E_ADD);
  assign busy    = (st != E_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st     <= E_IDLE;
      cnt    <= '0;
      done   <= 1'b0;
      lane_q <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        E_IDLE: if (start) begin
          st     <= E_RUN;
          cnt    <= '0;
          lane_q <= lane_en;
        end
        E_RUN: begin
          cnt <= cnt + 8'd1;
          if (cnt == LAST) st <= E_ADD;
        end
        E_ADD: begin
          st   <= E_IDLE;
          done <= 1'b1;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  mpu_lhs #(.T(T)) u_mpu_lhs (
    .clk, .load, .transpose(lhs_transpose), .tile_in(lhs_tile), .cnt, .a_left
  );

  for (genvar s = 0; s < S; s++) begin : g_lane
    word_t [T-1:0]        b_top;
    word_t [T-1:0][T-1:0] prod;

    mpu_rhs #(.T(T)) u_mpu_rhs (
      .clk, .load, .tile_in(rhs_tile[s]), .cnt, .b_top
    );

    systolic_array #(.T(T)) u_sa (
      .clk, .rst, .clr(sa_clr), .en(sa_en), .a_left, .b_top, .c_out(prod)
    );

    matrix_accumulator #(.T(T)) u_acc (
      .clk, .rst, .clr(acc_clr), .add(acc_add && lane_q[s]),
      .tile_in(prod), .acc(acc[s])
    );
  end

endmodule
