// cordic_sincos: pipelined CORDIC in rotation mode, gives cos(theta) and
// sin(theta).
//
// The vector (1/K, 0) is rotated by theta in CORDIC_N micro-rotations of
// +/-atan(2^-i), chosen by the sign of the residual angle; the pre-scaling by
// the inverse gain 1/K makes the final x and y equal cos and sin directly.
// Valid for |theta| up to about 1.74 rad; the Jacobian unit only feeds
// |theta| <= pi/4.
//
// Interface and timing: Q15.16 in and out, one angle per cycle, `out_valid`
// follows `in_valid` by CORDIC_N+1 cycles. The source design draws separate
// CORDIC sine and cosine units working in parallel; one rotation-mode CORDIC
// yields both from the same iterations, so this implementation uses a single
// unit for the pair.
module cordic_sincos
  import manojavam_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  word_t theta,
  output logic  out_valid,
  output word_t cos_o,
  output word_t sin_o
);

  word_t xs [CORDIC_N+1];
  word_t ys [CORDIC_N+1];
  word_t zs [CORDIC_N+1];
  logic  vs [CORDIC_N+1];

  always_ff @(posedge clk) begin
    if (rst) vs[0] <= 1'b0;
    else     vs[0] <= in_valid;
    xs[0] <= CORDIC_INV_GAIN;
    ys[0] <= '0;
    zs[0] <= theta;
  end

  for (genvar i = 0; i < CORDIC_N; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (rst) vs[i+1] <= 1'b0;
      else     vs[i+1] <= vs[i];
      if (zs[i] >= 0) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - atan_tab(i);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + atan_tab(i);
      end
    end
  end

  assign out_valid = vs[CORDIC_N];
  assign cos_o     = xs[CORDIC_N];
  assign sin_o     = ys[CORDIC_N];

endmodule
