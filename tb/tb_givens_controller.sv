// tb_givens_controller: issues a sequence of rotations (p, q, cos, sin) and
// answers the two write ports with random delays, applying each masked tile
// write to a model memory. After every rotation the stored matrix must be
// the identity except for R[p][p] = R[q][q] = cos, R[p][q] = -sin,
// R[q][p] = sin; the previous rotation's entries must have been restored.
// Also checks that both ports write in the same cycle at least once.
// The four-entry form of R is the original's, with the signs corrected so that
// the pivot is zeroed; the restore step and the two write ports follow this
// design.
module tb_givens_controller;
  import manojavam_pkg::*;
  localparam int T = 4, NT = 3, N = NT * T;
  localparam taddr_t RB = 100;
  logic clk = 0, rst = 1, start = 0, busy, done;
  idx_t p, q;
  word_t cos_i, sin_i;
  logic [1:0] req, ack;
  taddr_t [1:0] addr;
  word_t [1:0][T-1:0][T-1:0] wdata;
  logic [1:0][T*T-1:0] wmask;
  always #5 clk = ~clk;
  givens_controller #(.T(T)) dut (.clk, .rst, .r_base(RB), .n_tiles(idx_t'(NT)), .start,
    .p, .q, .cos_i, .sin_i, .busy, .done, .req, .addr, .wdata, .wmask, .ack);
  int checks = 0, failures = 0, both = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  word_t [T-1:0][T-1:0] mem [256];  // indexed by the low 8 address bits
  // Two independent responders with random delay.
  for (genvar k = 0; k < 2; k++) begin : g_resp
    int wait_n = 0;
    initial ack[k] = 0;
    always @(posedge clk) begin
      ack[k] <= 1'b0;
      if (!rst && req[k] && !ack[k]) begin
        if (wait_n == 0) begin
          ack[k] <= 1'b1;
          for (int e = 0; e < T*T; e++)
            if (wmask[k][e]) mem[addr[k][7:0]][e/T][e%T] <= wdata[k][e/T][e%T];
          wait_n <= $urandom_range(0, 3);
        end else wait_n <= wait_n - 1;
      end
    end
  end
  always @(posedge clk) if (req == 2'b11) both++;
  function automatic word_t rget(int r, int c);
    return mem[8'(RB + taddr_t'((r / T) * NT + c / T))][r % T][c % T];
  endfunction
  initial begin
    for (int a = 0; a < 256; a++) mem[a] = '0;
    for (int i = 0; i < N; i++) mem[8'(RB + taddr_t'((i / T) * NT + i / T))][i % T][i % T] = ONE;
    p = '0; q = '0; cos_i = '0; sin_i = '0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int n = 0; n < 12; n++) begin
      int pp, qq;
      pp = $urandom_range(0, N - 2);
      qq = $urandom_range(pp + 1, N - 1);
      @(negedge clk);
      p = idx_t'(pp); q = idx_t'(qq);
      cos_i = word_t'($urandom_range(40000, 65536));
      sin_i = word_t'($signed($urandom_range(0, 80000)) - 40000);
      start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          word_t e;
          e = (i == j) ? ONE : '0;
          if (i == pp && j == pp) e = cos_i;
          if (i == qq && j == qq) e = cos_i;
          if (i == pp && j == qq) e = -sin_i;
          if (i == qq && j == pp) e = sin_i;
          checks++;
          if (rget(i, j) !== e) begin
            failures++;
            if (failures < 10) $display("R[%0d][%0d] = %0d expected %0d", i, j, rget(i, j), e);
          end
        end
    end
    checks++;
    if (both == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
