// mpu_rhs: matrix padding unit for the right-hand operand (B) of a tile
// product.
//
// It latches one T x T tile and then, on each step `cnt`, presents column j of
// the systolic array with element B[cnt-j][j] (zero outside 0..T-1), so that
// column j starts j cycles after column 0. The source design gives the two
// operands separate padding units because their skews run along different
// axes; this one skews down columns where mpu_lhs skews along rows.
//
// Interface: `load` captures `tile_in`; `b_top` is combinational from the
// latched tile and the step number `cnt`.
module mpu_rhs
  import manojavam_pkg::*;
#(
  parameter int T = 4
) (
  input  logic                 clk,
  input  logic                 load,
  input  word_t [T-1:0][T-1:0] tile_in,
  input  logic [7:0]           cnt,
  output word_t [T-1:0]        b_top
);

  word_t [T-1:0][T-1:0] tile_q;

  always_ff @(posedge clk) begin
    if (load) tile_q <= tile_in;
  end

  always_comb begin
    for (int j = 0; j < T; j++) begin
      b_top[j] = '0;
      for (int k = 0; k < T; k++)
        if (int'(cnt) == k + j) b_top[j] = tile_q[k][j];
    end
  end

endmodule
