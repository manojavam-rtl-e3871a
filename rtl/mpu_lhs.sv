// mpu_lhs: matrix padding unit for the left-hand operand (A) of a tile product.
//
// It latches one T x T tile and then, on each enabled step `cnt`, presents row
// i of the array with element A[i][cnt-i] (zero outside 0..T-1). That gives
// the parallelogram input profile the systolic array needs: row i starts i
// cycles after row 0. With `transpose` set at load time the unit presents the
// transpose of the latched tile instead, A[i][k] := tile[k][i]; this is how
// X^T (covariance) and R^T (rotation) are fed from tiles stored untransposed.
//
// Interface: `load` captures `tile_in` and `transpose`; `cnt` is the step
// number driven by the engine; `a_left` is combinational from the latched
// tile and cnt. The source design names separate padding units for the two
// operands; the counter-indexed form and the transpose option are this
// implementation's choices.
module mpu_lhs
  import manojavam_pkg::*;
#(
  parameter int T = 4
) (
  input  logic                 clk,
  input  logic                 load,
  input  logic                 transpose,
  input  word_t [T-1:0][T-1:0] tile_in,
  input  logic [7:0]           cnt,
  output word_t [T-1:0]        a_left
);

  word_t [T-1:0][T-1:0] tile_q;

  always_ff @(posedge clk) begin
    if (load) begin
      for (int i = 0; i < T; i++)
        for (int k = 0; k < T; k++)
          tile_q[i][k] <= transpose ? tile_in[k][i] : tile_in[i][k];
    end
  end

  always_comb begin
    for (int i = 0; i < T; i++) begin
      a_left[i] = '0;
      for (int k = 0; k < T; k++)
        if (int'(cnt) == k + i) a_left[i] = tile_q[i][k];
    end
  end

endmodule
