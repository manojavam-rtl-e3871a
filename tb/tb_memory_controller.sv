// tb_memory_controller: three requesters issue bursts of writes (full and
// masked) and reads at the same time through the arbiter into the DDR3
// model. Checks every read against a shadow copy, that every request is
// acknowledged once, and that grants rotate (no requester is served twice in
// a row while another one waits).
// The original only names this block; round-robin order and masked writes are
// this design's, and are what is checked.
module tb_memory_controller;
  import manojavam_pkg::*;
  localparam int T = 2, NREQ = 3, DEPTH = 64;
  logic clk = 0, rst = 1;
  logic [NREQ-1:0] req = '0, we = '0, ack;
  taddr_t [NREQ-1:0] addr;
  word_t [NREQ-1:0][T-1:0][T-1:0] wdata;
  logic [NREQ-1:0][T*T-1:0] wmask;
  word_t [T-1:0][T-1:0] rdata, mem_wdata, mem_rdata;
  logic mem_req, mem_we, mem_ack;
  taddr_t mem_addr;
  logic [T*T-1:0] mem_wmask;
  always #5 clk = ~clk;
  memory_controller #(.T(T), .NREQ(NREQ)) dut (.*);
  ddr3_model #(.T(T), .DEPTH(DEPTH), .LATENCY(3)) u_mem (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  word_t [T-1:0][T-1:0] shadow [DEPTH];
  int last_served = -1, repeat_while_waiting = 0;
  always @(posedge clk) if (!rst && mem_ack) begin
    if ($countones(req) > 1) begin
      checks++;
      if (int'(dut.gnt) == last_served) begin
        failures++;
        repeat_while_waiting++;
      end
    end
    last_served = int'(dut.gnt);
  end
  task automatic port(int r);
    for (int n = 0; n < 40; n++) begin
      int a;
      logic w;
      a = r * 16 + $urandom_range(0, 15);
      w = $urandom_range(0, 1);
      @(negedge clk);
      addr[r] = taddr_t'(a); we[r] = w;
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) wdata[r][i][j] = word_t'($urandom);
      wmask[r] = (n % 3 == 0) ? 4'b0101 : '1;
      if (w) for (int e = 0; e < T*T; e++) if (wmask[r][e]) shadow[a][e/T][e%T] = wdata[r][e/T][e%T];
      req[r] = 1;
      do @(posedge clk); while (!ack[r]);
      #1;
      if (!w) begin
        checks++;
        if (rdata !== shadow[a]) begin failures++; $display("port %0d read %0d wrong", r, a); end
      end
      req[r] = 0;
    end
  endtask
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      for (int i = 0; i < T; i++) for (int j = 0; j < T; j++) shadow[a][i][j] = word_t'(a * 10 + i * T + j);
      u_mem.mem[a] = shadow[a];
    end
    addr = '0; wdata = '0; wmask = '0;
    repeat (3) @(posedge clk); rst <= 0;
    fork
      port(0);
      port(1);
      port(2);
    join
    if (repeat_while_waiting != 0) $display("round robin violated %0d times", repeat_while_waiting);
    checks++;
    if (u_mem.reads + u_mem.writes != 120) begin failures++; $display("memory saw %0d accesses", u_mem.reads + u_mem.writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
