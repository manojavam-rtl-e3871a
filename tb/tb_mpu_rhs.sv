// tb_mpu_rhs: loads random tiles and checks, for every step number, that
// column j of the output carries B[step-j][j] or zero.
// The skewed feed is what the original's padding unit exists for; the counter
// interface is this design's.
module tb_mpu_rhs;
  import manojavam_pkg::*;
  localparam int T = 4;
  logic clk = 0, load = 0;
  word_t [T-1:0][T-1:0] tile_in;
  logic [7:0] cnt;
  word_t [T-1:0] b_top;
  always #5 clk = ~clk;
  mpu_rhs #(.T(T)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    cnt = '0;
    for (int trial = 0; trial < 20; trial++) begin
      word_t [T-1:0][T-1:0] tl;
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) tl[i][j] = word_t'($urandom);
      @(negedge clk); tile_in = tl; load = 1;
      @(negedge clk); load = 0; tile_in = '0;
      for (int t = 0; t < 3*T; t++) begin
        cnt = 8'(t);
        #1;
        for (int j = 0; j < T; j++) begin
          word_t e;
          int k;
          k = t - j;
          e = (k >= 0 && k < T) ? tl[k][j] : '0;
          checks++;
          if (b_top[j] !== e) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
