// tb_mpu_lhs: loads random tiles (plain and transposed) and checks, for every
// step number, that row i of the output carries A[i][step-i] or zero.
// The skewed feed is what the original's padding unit exists for; the
// transpose option is this design's.
module tb_mpu_lhs;
  import manojavam_pkg::*;
  localparam int T = 4;
  logic clk = 0, load = 0, transpose = 0;
  word_t [T-1:0][T-1:0] tile_in;
  logic [7:0] cnt;
  word_t [T-1:0] a_left;
  always #5 clk = ~clk;
  mpu_lhs #(.T(T)) dut (.*);
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
      logic tr;
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) tl[i][j] = word_t'($urandom);
      tr = trial[0];
      @(negedge clk); tile_in = tl; transpose = tr; load = 1;
      @(negedge clk); load = 0; tile_in = '0;
      for (int t = 0; t < 3*T; t++) begin
        cnt = 8'(t);
        #1;
        for (int i = 0; i < T; i++) begin
          word_t e;
          int k;
          k = t - i;
          e = (k >= 0 && k < T) ? (tr ? tl[k][i] : tl[i][k]) : '0;
          checks++;
          if (a_left[i] !== e) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
