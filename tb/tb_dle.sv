// tb_dle: streams every tile of random symmetric N x N matrices (row block by
// row block, as the engine writes them) into the DLE and checks c_pq, p, q,
// c_pp and c_qq against a search done here. The diagonal is made larger than
// every off-diagonal element in some matrices, so a DLE without tile-aware
// masking would report a diagonal element. Also checks the T*T-cycle scan
// time per tile.
// The masking rule under test is the original tile-aware filtering; the once-
// per-scan report and element order are this design's.
module tb_dle;
  import manojavam_pkg::*;
  localparam int T = 4, NT = 3, N = NT * T;
  logic clk = 0, rst = 1, clear = 0, tile_valid = 0, ready, finish = 0, res_valid;
  word_t [T-1:0][T-1:0] tile_in;
  idx_t row_blk, col_blk, p, q;
  word_t c_pq, c_pp, c_qq;
  always #5 clk = ~clk;
  dle #(.T(T), .MAX_N(64)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  word_t Cm [N][N];
  initial begin
    tile_in = '0; row_blk = '0; col_blk = '0;
    repeat (2) @(posedge clk); rst <= 0;
    for (int trial = 0; trial < 8; trial++) begin
      int ep, eq;
      word_t mx;
      for (int i = 0; i < N; i++)
        for (int j = i; j < N; j++) begin
          Cm[i][j] = word_t'($signed($urandom_range(0, 2000000)) - 1000000);
          if (i == j && trial[0]) Cm[i][j] = 32'sd5000000 + word_t'(i);
          Cm[j][i] = Cm[i][j];
        end
      mx = -1; ep = 0; eq = 0;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
        if (i != j && (Cm[i][j] < 0 ? -Cm[i][j] : Cm[i][j]) > mx) begin
          mx = Cm[i][j] < 0 ? -Cm[i][j] : Cm[i][j]; ep = i; eq = j;
        end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int rb = 0; rb < NT; rb++)
        for (int cb = 0; cb < NT; cb++) begin
          int lat;
          while (!ready) @(negedge clk);
          for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) tile_in[i][j] = Cm[rb*T+i][cb*T+j];
          row_blk = idx_t'(rb); col_blk = idx_t'(cb); tile_valid = 1;
          @(negedge clk); tile_valid = 0;
          lat = 0;
          while (!ready) begin @(negedge clk); lat++; end
          checks++;
          if (lat != T*T) begin failures++; $display("scan took %0d cycles", lat); end
        end
      finish = 1;
      @(negedge clk); finish = 0;
      while (!res_valid) @(negedge clk);
      checks++;
      if (c_pq !== Cm[ep][eq] || int'(p) != ep || int'(q) != eq ||
          c_pp !== Cm[ep][ep] || c_qq !== Cm[eq][eq]) begin
        failures++;
        $display("trial %0d: got p=%0d q=%0d cpq=%0d cpp=%0d cqq=%0d, expected p=%0d q=%0d cpq=%0d",
                 trial, p, q, c_pq, c_pp, c_qq, ep, eq, Cm[ep][eq]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
