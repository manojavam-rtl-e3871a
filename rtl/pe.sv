// pe: one processing element of the output-stationary systolic array.
//
// The element holds three registers, as in the array's PE drawing: a
// horizontal register that forwards the left operand (A) to the right
// neighbour, a vertical register that forwards the top operand (B) to the
// neighbour below, and an output register that accumulates a*b (the MAC
// feedback path). The product is the fixed-point product of manojavam_pkg
// (rescaled by FRAC_W bits).
//
// Timing: when `en` is high, the operands present on a_in/b_in are multiplied
// and added to acc on the rising edge, and copied into a_out/b_out for the
// neighbours in the same edge (one cycle per hop). `clr` zeroes all three
// registers and has priority over `en`. Reset is synchronous, active high;
// this choice and the clear input are this implementation's own.
module pe
  import manojavam_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  clr,
  input  logic  en,
  input  word_t a_in,
  input  word_t b_in,
  output word_t a_out,
  output word_t b_out,
  output word_t acc
);

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else if (en) begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= acc + fx_mul(a_in, b_in);
    end
  end

endmodule
