// tb_cordic_sincos: random angles in [-pi/4, pi/4] against $cos/$sin
// (tolerance 2e-4), one angle per cycle, checking the CORDIC_N+1 latency.
// The original asks for sin and cos of theta in parallel; the tolerance and
// the angle range come from this implementation.
module tb_cordic_sincos;
  import manojavam_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  word_t theta, cos_o, sin_o;
  always #5 clk = ~clk;
  cordic_sincos dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  real thq [$];
  int  sent_at [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (out_valid) begin
    real th, gc, gs;
    int t0;
    th = thq.pop_front();
    t0 = sent_at.pop_front();
    gc = $itor(cos_o) / 65536.0;
    gs = $itor(sin_o) / 65536.0;
    checks++;
    if (gc - $cos(th) > 2e-4 || $cos(th) - gc > 2e-4 || gs - $sin(th) > 2e-4 || $sin(th) - gs > 2e-4) begin
      failures++; $display("theta %f: got %f %f", th, gc, gs);
    end
    checks++;
    if (cyc - t0 != CORDIC_N + 1) failures++;
  end
  initial begin
    theta = '0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      theta = word_t'($signed($urandom_range(0, 102944)) - 51472);
      in_valid = 1;
      thq.push_back($itor(theta) / 65536.0);
      sent_at.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (CORDIC_N + 4) @(negedge clk);
    checks++;
    if (thq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
