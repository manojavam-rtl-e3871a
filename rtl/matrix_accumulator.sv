// matrix_accumulator: T x T register tile that sums partial-product tiles.
//
// Each systolic array is paired with one accumulator. While a row block and a
// column block are streamed through the array tile by tile, every finished
// T x T product tile is added element-wise into the accumulator, so after the
// last tile it holds the complete output submatrix tile.
//
// Interface and timing: `clr` empties the tile (priority over `add`); `add`
// adds `tile_in` on the next rising edge; `acc` is the registered sum.
// Reset is synchronous, active high (this implementation's choice).
module matrix_accumulator
  import manojavam_pkg::*;
#(
  parameter int T = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 clr,
  input  logic                 add,
  input  word_t [T-1:0][T-1:0] tile_in,
  output word_t [T-1:0][T-1:0] acc
);

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      acc <= '0;
    end else if (add) begin
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++)
          acc[i][j] <= acc[i][j] + tile_in[i][j];
    end
  end

endmodule
