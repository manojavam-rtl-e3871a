// tb_tile_cache: runs one cache against the DDR3 model and checks read
// misses and hits (data and event pulses), line conflicts, flush, a write
// hit, write-around on a write miss in covariance mode (no line allocated)
// and write-allocate without fetch in rotation mode (the next read hits).
// A second phase issues 600 random reads, writes and flushes in random modes
// and compares every data word, every hit / miss / allocate / write-around
// pulse, every memory read and memory write against a shadow model of the
// tags kept here.
// The mode-dependent write-miss policy is the original's; write-through, hit
// behaviour and flush are this design's.
module tb_tile_cache;
  import manojavam_pkg::*;
  localparam int T = 4, LINES = 8;
  logic clk = 0, rst = 1, flush = 0, ready;
  mode_e mode = MODE_COV;
  logic rd_req = 0, rd_valid, wr_req = 0, wr_done;
  taddr_t rd_addr = '0, wr_addr = '0;
  word_t [T-1:0][T-1:0] rd_data, wr_data, m_wdata, m_rdata;
  logic m_req, m_we, m_ack, ev_hit, ev_miss, ev_wr_alloc, ev_wr_around;
  taddr_t m_addr;
  always #5 clk = ~clk;
  tile_cache #(.T(T), .LINES(LINES)) dut (.*);
  ddr3_model #(.T(T), .DEPTH(1024)) u_mem (
    .clk, .mem_req(m_req), .mem_we(m_we), .mem_addr(m_addr), .mem_wdata(m_wdata),
    .mem_wmask('1), .mem_ack(m_ack), .mem_rdata(m_rdata)
  );
  int checks = 0, failures = 0;
  int hits = 0, misses = 0, allocs = 0, arounds = 0;
  always @(posedge clk) begin
    hits <= hits + int'(ev_hit); misses <= misses + int'(ev_miss);
    allocs <= allocs + int'(ev_wr_alloc); arounds <= arounds + int'(ev_wr_around);
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic word_t [T-1:0][T-1:0] pat(int a);
    word_t [T-1:0][T-1:0] x;
    for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) x[i][j] = word_t'(a * 1000 + i * T + j);
    return x;
  endfunction
  task automatic rd(int a, output int lat, output word_t [T-1:0][T-1:0] d);
    while (!ready) @(negedge clk);
    rd_addr = taddr_t'(a); rd_req = 1; lat = 0;
    @(negedge clk); rd_req = 0;
    while (!rd_valid) begin @(negedge clk); lat++; end
    d = rd_data;
    @(negedge clk);
  endtask
  task automatic wr(int a, word_t [T-1:0][T-1:0] d);
    while (!ready) @(negedge clk);
    wr_addr = taddr_t'(a); wr_data = d; wr_req = 1;
    @(negedge clk); wr_req = 0;
    while (!wr_done) @(negedge clk);
    @(negedge clk);
  endtask
  task automatic expect_read(int a, word_t [T-1:0][T-1:0] e, bit hit);
    int lat, h0, m0;
    word_t [T-1:0][T-1:0] d;
    h0 = hits; m0 = misses;
    rd(a, lat, d);
    checks++;
    if (d !== e) begin failures++; $display("read %0d wrong data", a); end
    checks++;
    if (hit ? (hits != h0 + 1 || lat != 0) : (misses != m0 + 1 || lat == 0)) begin
      failures++; $display("read %0d: expected %s (lat %0d)", a, hit ? "hit" : "miss", lat);
    end
  endtask
  initial begin
    int a0;
    for (int a = 0; a < 64; a++) u_mem.mem[a] = pat(a);
    wr_data = '0;
    repeat (2) @(posedge clk); rst <= 0;
    @(negedge clk);
    expect_read(3, pat(3), 0);
    expect_read(3, pat(3), 1);
    expect_read(3 + LINES, pat(3 + LINES), 0);   // conflict evicts line 3
    expect_read(3, pat(3), 0);
    flush = 1; @(negedge clk); flush = 0;
    expect_read(3, pat(3), 0);
    // write hit updates the line and memory
    wr(3, pat(500));
    expect_read(3, pat(500), 1);
    checks++; if (u_mem.mem[3] !== pat(500)) failures++;
    // covariance mode: write-around
    a0 = arounds;
    wr(20, pat(601));
    checks++; if (arounds != a0 + 1) failures++;
    checks++; if (u_mem.mem[20] !== pat(601)) failures++;
    expect_read(20, pat(601), 0);
    // rotation mode: write-allocate, no fetch on write
    mode = MODE_ROT;
    a0 = allocs;
    wr(37, pat(702));
    checks++; if (allocs != a0 + 1) failures++;
    checks++; if (u_mem.mem[37] !== pat(702)) failures++;
    expect_read(37, pat(702), 1);
    // Random phase against a shadow model.
    begin
      logic   sv [LINES];
      int     st [LINES];
      word_t [T-1:0][T-1:0] shadow [64];
      for (int a = 0; a < 64; a++) shadow[a] = u_mem.mem[a];
      for (int l = 0; l < LINES; l++) sv[l] = 1'b0;
      flush = 1; @(negedge clk); flush = 0;
      for (int n = 0; n < 600; n++) begin
        int a, op, l, r0, w0, h0, m0, al0, ar0, lat;
        bit hit;
        word_t [T-1:0][T-1:0] d;
        a = $urandom_range(0, 63); l = a % LINES; op = $urandom_range(0, 19);
        mode = mode_e'($urandom_range(0, 1));
        hit = sv[l] && st[l] == a;
        r0 = u_mem.reads; w0 = u_mem.writes;
        h0 = hits; m0 = misses; al0 = allocs; ar0 = arounds;
        if (op == 0) begin
          flush = 1; @(negedge clk); flush = 0;
          for (int k = 0; k < LINES; k++) sv[k] = 1'b0;
        end else if (op < 11) begin
          rd(a, lat, d);
          checks++;
          if (d !== shadow[a]) begin failures++; $display("random read %0d wrong data", a); end
          checks++;
          if (hits != h0 + int'(hit) || misses != m0 + int'(!hit) ||
              u_mem.reads != r0 + int'(!hit) || u_mem.writes != w0) begin
            failures++; $display("random read %0d: expected %s", a, hit ? "hit" : "miss");
          end
          sv[l] = 1'b1; st[l] = a;
        end else begin
          d = pat($urandom_range(0, 100000));
          wr(a, d);
          shadow[a] = d;
          checks++;
          if (u_mem.mem[a] !== d || u_mem.writes != w0 + 1 || u_mem.reads != r0) begin
            failures++; $display("random write %0d: memory not written through, or a fetch", a);
          end
          checks++;
          if (hit ? (allocs != al0 || arounds != ar0)
                  : (mode == MODE_ROT ? (allocs != al0 + 1 || arounds != ar0)
                                      : (arounds != ar0 + 1 || allocs != al0))) begin
            failures++; $display("random write %0d: wrong write policy (mode %0d)", a, mode);
          end
          if (!hit && mode == MODE_ROT) begin sv[l] = 1'b1; st[l] = a; end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
