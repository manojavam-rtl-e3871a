// tb_cordic_arctan: random (x, y) in all four quadrants, plus x = 0, against
// atan(y/x) from the simulator's real arithmetic (tolerance 2e-4 rad), one
// input per cycle, checking the CORDIC_N+1 cycle latency.
// The arctangent stage itself follows the original Jacobian unit; the 2e-4
// tolerance suits the 16-stage, Q15.16 form chosen here.
module tb_cordic_arctan;
  import manojavam_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  word_t x, y, angle;
  always #5 clk = ~clk;
  cordic_arctan dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  real expq [$];
  int  sent_at [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (out_valid) begin
    real e, g;
    int t0;
    e = expq.pop_front();
    t0 = sent_at.pop_front();
    g = $itor(angle) / 65536.0;
    checks++;
    if (g - e > 2e-4 || e - g > 2e-4) begin failures++; $display("got %f expected %f", g, e); end
    checks++;
    if (cyc - t0 != CORDIC_N + 1) begin failures++; $display("latency %0d", cyc - t0); end
  end
  initial begin
    x = '0; y = '0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int n = 0; n < 300; n++) begin
      real xr, yr;
      @(negedge clk);
      x = word_t'($signed($urandom_range(0, 20000000)) - 10000000);
      y = word_t'($signed($urandom_range(0, 20000000)) - 10000000);
      if (n == 5) x = '0;
      xr = $itor(x); yr = $itor(y);
      in_valid = 1;
      expq.push_back((xr == 0.0) ? ((yr > 0) ? 1.5707963 : -1.5707963) : $atan(yr / xr));
      sent_at.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (CORDIC_N + 4) @(negedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
