// tb_jacobian_unit: streams random symmetric matrices through the Jacobian
// unit and lets it write the Givens matrix into a model memory. Checks the
// pivot (p, q) against a search done here, cos and sin against the
// floating-point rotation angle, and, independently of any sign convention,
// that R^T C R computed here in real arithmetic has (p, q) element close to
// zero.
// The DLE -> arctan -> shift -> sin/cos -> Givens chain is the original's; the
// sign-free check keeps the test valid for either sign convention.
module tb_jacobian_unit;
  import manojavam_pkg::*;
  localparam int T = 4, NT = 2, N = NT * T;
  localparam taddr_t RB = 40;
  logic clk = 0, rst = 1, dle_clear = 0, dle_tile_valid = 0, dle_ready, dle_finish = 0, done;
  word_t [T-1:0][T-1:0] dle_tile;
  idx_t dle_row_blk, dle_col_blk, piv_p, piv_q;
  word_t piv_cpq, rot_cos, rot_sin;
  logic [1:0] g_req, g_ack;
  taddr_t [1:0] g_addr;
  word_t [1:0][T-1:0][T-1:0] g_wdata;
  logic [1:0][T*T-1:0] g_wmask;
  always #5 clk = ~clk;
  jacobian_unit #(.T(T), .MAX_N(64)) dut (.clk, .rst, .dle_clear, .dle_tile_valid, .dle_tile,
    .dle_row_blk, .dle_col_blk, .dle_ready, .dle_finish, .r_base(RB), .n_tiles(idx_t'(NT)),
    .done, .piv_p, .piv_q, .piv_cpq, .rot_cos, .rot_sin,
    .g_req, .g_addr, .g_wdata, .g_wmask, .g_ack);
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  word_t [T-1:0][T-1:0] mem [128];
  initial g_ack = '0;
  always @(posedge clk) begin
    g_ack <= '0;
    for (int k = 0; k < 2; k++)
      if (g_req[k] && !g_ack[k]) begin
        g_ack[k] <= 1'b1;
        for (int e = 0; e < T*T; e++)
          if (g_wmask[k][e]) mem[g_addr[k]][e/T][e%T] <= g_wdata[k][e/T][e%T];
      end
  end
  function automatic real rget(int r, int c);
    return $itor(mem[RB + taddr_t'((r / T) * NT + c / T)][r % T][c % T]) / 65536.0;
  endfunction
  word_t Cm [N][N];
  task automatic chk(string w, real g, real e, real tol);
    checks++;
    if (g - e > tol || e - g > tol) begin failures++; $display("%s: got %f expected %f", w, g, e); end
  endtask
  initial begin
    for (int a = 0; a < 128; a++) mem[a] = '0;
    for (int i = 0; i < N; i++) mem[RB + taddr_t'((i / T) * NT + i / T)][i % T][i % T] = ONE;
    dle_tile = '0; dle_row_blk = '0; dle_col_blk = '0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int trial = 0; trial < 6; trial++) begin
      int ep, eq;
      word_t mx;
      real th, cc, ss, cpp, cqq, cpq, z;
      for (int i = 0; i < N; i++)
        for (int j = i; j < N; j++) begin
          Cm[i][j] = word_t'($signed($urandom_range(0, 400000)) - 200000);
          Cm[j][i] = Cm[i][j];
        end
      mx = -1; ep = 0; eq = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        if (i != j && (Cm[i][j] < 0 ? -Cm[i][j] : Cm[i][j]) > mx) begin
          mx = Cm[i][j] < 0 ? -Cm[i][j] : Cm[i][j]; ep = i; eq = j;
        end
      @(negedge clk); dle_clear = 1;
      @(negedge clk); dle_clear = 0;
      for (int rb = 0; rb < NT; rb++)
        for (int cb = 0; cb < NT; cb++) begin
          while (!dle_ready) @(negedge clk);
          for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) dle_tile[i][j] = Cm[rb*T+i][cb*T+j];
          dle_row_blk = idx_t'(rb); dle_col_blk = idx_t'(cb); dle_tile_valid = 1;
          @(negedge clk); dle_tile_valid = 0;
          @(negedge clk);
        end
      while (!dle_ready) @(negedge clk);
      dle_finish = 1;
      @(negedge clk); dle_finish = 0;
      while (!done) @(negedge clk);
      checks++;
      if (int'(piv_p) != ep || int'(piv_q) != eq) begin failures++; $display("pivot %0d,%0d expected %0d,%0d", piv_p, piv_q, ep, eq); end
      cpp = $itor(Cm[ep][ep]) / 65536.0; cqq = $itor(Cm[eq][eq]) / 65536.0; cpq = $itor(Cm[ep][eq]) / 65536.0;
      th = 0.5 * $atan(2.0 * cpq / (cpp - cqq));
      cc = $cos(th); ss = $sin(th);
      chk("R[p][p]", rget(ep, ep), cc, 1e-3);
      chk("R[q][q]", rget(eq, eq), cc, 1e-3);
      chk("R[p][q]", rget(ep, eq), -ss, 1e-3);
      chk("R[q][p]", rget(eq, ep), ss, 1e-3);
      // (R^T C R)[p][q] from the stored R
      z = 0.0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        z += rget(i, ep) * ($itor(Cm[i][j]) / 65536.0) * rget(j, eq);
      chk("rotated pivot", z, 0.0, 2e-3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
