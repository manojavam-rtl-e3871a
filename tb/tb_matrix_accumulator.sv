// tb_matrix_accumulator: adds random tiles with random gaps and clears, and
// checks the tile against a software sum after every cycle.
// The accumulate-per-lane role is the original's; clear priority and reset are
// this design's choices.
module tb_matrix_accumulator;
  import manojavam_pkg::*;
  localparam int T = 4;
  logic clk = 0, rst = 1, clr = 0, add = 0;
  word_t [T-1:0][T-1:0] tile_in, acc, model;
  always #5 clk = ~clk;
  matrix_accumulator #(.T(T)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    tile_in = '0;
    @(posedge clk); rst <= 0;
    @(negedge clk);
    model = '0;
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++)
        tile_in[i][j] = word_t'($signed($urandom_range(0, 2000000)) - 1000000);
      add = ($urandom_range(0, 2) != 0);
      clr = (n % 50 == 49);
      @(negedge clk);
      if (clr) model = '0;
      else if (add)
        for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) model[i][j] += tile_in[i][j];
      checks++;
      if (acc !== model) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
