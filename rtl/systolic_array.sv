// systolic_array: T x T output-stationary systolic array of pe elements.
//
// Operand A enters from the left, one row of A per array row; operand B enters
// from the top, one column of B per array column. Both move one element per
// cycle (A rightwards, B downwards), so PE(i,j) multiplies A[i][k] with
// B[k][j] when both arrive k+i+j cycles after the first beat, provided the
// inputs are skewed (row i delayed i cycles, column j delayed j cycles); the
// matrix padding units mpu_lhs/mpu_rhs produce that skew. After 3T-2 enabled
// cycles PE(i,j).acc holds (A*B)[i][j]; `c_out` shows all accumulators in
// parallel. `clr` empties the array before a new tile product.
//
// The T x T grid, nearest-neighbour links and per-PE MAC follow the array
// figure of the source design; output-stationary accumulation is inferred
// from its PE detail (the output register feeds back into the MAC).
module systolic_array
  import manojavam_pkg::*;
#(
  parameter int T = 4
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  clr,
  input  logic                  en,
  input  word_t [T-1:0]         a_left,   // a_left[i] enters row i
  input  word_t [T-1:0]         b_top,    // b_top[j] enters column j
  output word_t [T-1:0][T-1:0]  c_out     // c_out[i][j]
);

  word_t h [T][T+1];  // h[i][j] : A operand entering PE(i,j)
  word_t v [T+1][T];  // v[i][j] : B operand entering PE(i,j)

  for (genvar i = 0; i < T; i++) begin : g_edge
    assign h[i][0] = a_left[i];
    assign v[0][i] = b_top[i];
  end

  for (genvar i = 0; i < T; i++) begin : g_row
    for (genvar j = 0; j < T; j++) begin : g_col
      pe u_pe (
        .clk, .rst, .clr, .en,
        .a_in (h[i][j]),
        .b_in (v[i][j]),
        .a_out(h[i][j+1]),
        .b_out(v[i+1][j]),
        .acc  (c_out[i][j])
      );
    end
  end

endmodule
