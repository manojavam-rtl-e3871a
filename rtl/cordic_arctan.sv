// cordic_arctan: pipelined CORDIC in vectoring mode, angle = atan(y / x).
//
// The Jacobian unit uses it for 2*theta = atan(2 c_pq / (c_pp - c_qq)).
// A front stage folds the input into the right half plane (x < 0 is handled
// by negating both x and y, which leaves y/x unchanged), so the result lies
// in [-pi/2, pi/2] as arctangent requires. Then CORDIC_N stages each rotate
// the vector by -/+atan(2^-i) towards the x axis and accumulate the angle.
// x = y = 0 gives 0.
//
// Interface and timing: inputs and the result are Q15.16 (angle in radians).
// One input per cycle; `out_valid` follows `in_valid` by CORDIC_N+1 cycles.
// The internal width is two bits wider than a word to hold the CORDIC gain.
// The source design specifies a pipelined CORDIC arctangent; the iteration
// count and formats are this implementation's choices.
module cordic_arctan
  import manojavam_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  word_t x,
  input  word_t y,
  output logic  out_valid,
  output word_t angle
);

  localparam int XW = WORD_W + 2;
  typedef logic signed [XW-1:0] xw_t;

  xw_t   xs [CORDIC_N+1];
  xw_t   ys [CORDIC_N+1];
  word_t zs [CORDIC_N+1];
  logic  vs [CORDIC_N+1];

  // Stage 0: fold into the right half plane.
  always_ff @(posedge clk) begin
    if (rst) begin
      vs[0] <= 1'b0;
    end else begin
      vs[0] <= in_valid;
    end
    if (x < 0) begin
      xs[0] <= -xw_t'(x);
      ys[0] <= -xw_t'(y);
    end else begin
      xs[0] <= xw_t'(x);
      ys[0] <= xw_t'(y);
    end
    zs[0] <= '0;
  end

  for (genvar i = 0; i < CORDIC_N; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (rst) vs[i+1] <= 1'b0;
      else     vs[i+1] <= vs[i];
      if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + atan_tab(i);
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - atan_tab(i);
      end
    end
  end

  assign out_valid = vs[CORDIC_N];
  assign angle     = zs[CORDIC_N];

endmodule
