// tb_systolic_array: feeds random T x T tiles into the array with the
// diagonal skew built here in the testbench, and checks after exactly 3T-2
// enabled cycles that every PE holds the element of the matrix product, and
// that the last element is not yet complete one cycle earlier.
// The grid and operand flow follow the original array drawing; the 3T-2 cycle
// count follows from that structure.
module tb_systolic_array;
  import manojavam_pkg::*;
  localparam int T = 4;
  logic clk = 0, rst = 1, clr = 0, en = 0;
  word_t [T-1:0] a_left, b_top;
  word_t [T-1:0][T-1:0] c_out;
  always #5 clk = ~clk;
  systolic_array #(.T(T)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  word_t A [T][T];
  word_t B [T][T];
  initial begin
    a_left = '0; b_top = '0;
    @(posedge clk); rst <= 0;
    for (int trial = 0; trial < 20; trial++) begin
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++) begin
          A[i][j] = word_t'($signed($urandom_range(0, 262144)) - 131072);
          B[i][j] = word_t'($signed($urandom_range(0, 262144)) - 131072);
        end
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0;
      for (int t = 0; t < 3*T-2; t++) begin
        en = 1;
        for (int i = 0; i < T; i++) begin
          a_left[i] = (t - i >= 0 && t - i < T) ? A[i][t-i] : '0;
          b_top[i]  = (t - i >= 0 && t - i < T) ? B[t-i][i] : '0;
        end
        @(negedge clk);
        if (t == 3*T-3-1) begin
          // one cycle before the end the corner PE misses its last product
          word_t s;
          s = '0;
          for (int k = 0; k < T-1; k++) s += fx_mul(A[T-1][k], B[k][T-1]);
          checks++;
          if (c_out[T-1][T-1] !== s) failures++;
        end
      end
      en = 0;
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++) begin
          word_t s;
          s = '0;
          for (int k = 0; k < T; k++) s += fx_mul(A[i][k], B[k][j]);
          checks++;
          if (c_out[i][j] !== s) begin
            failures++;
            if (failures < 10) $display("C[%0d][%0d] got %0d expected %0d", i, j, c_out[i][j], s);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
