// ddr3_model: behavioural model of the external DRAM seen through the
// accelerator's memory port. Not synthesizable design logic: it stands in for
// the off-chip DDR3 memory in simulation.
//
// DEPTH tiles of T x T words. A request (`mem_req` high) is answered
// LATENCY cycles later with a one-cycle `mem_ack`; a read returns the tile in
// `mem_rdata` with the ack, a write stores the elements whose `mem_wmask` bit
// (index i*T+j) is set. Testbenches preload and inspect `mem` directly.
// The original names a DDR3 memory behind a cache-DDR3 interface; the
// tile-wide port, fixed latency and masked writes are this design's own.
module ddr3_model
  import manojavam_pkg::*;
#(
  parameter int T       = 4,
  parameter int DEPTH   = 65536,
  parameter int LATENCY = 4
) (
  input  logic                 clk,
  input  logic                 mem_req,
  input  logic                 mem_we,
  input  taddr_t               mem_addr,
  input  word_t [T-1:0][T-1:0] mem_wdata,
  input  logic  [T*T-1:0]      mem_wmask,
  output logic                 mem_ack,
  output word_t [T-1:0][T-1:0] mem_rdata
);

  word_t [T-1:0][T-1:0] mem [DEPTH];
  int cnt = 0;
  int reads = 0, writes = 0;

  initial mem_ack = 1'b0;

  always @(posedge clk) begin
    mem_ack <= 1'b0;
    if (mem_req && !mem_ack) begin
      if (cnt == LATENCY - 1) begin
        cnt <= 0;
        mem_ack <= 1'b1;
        if (mem_we) begin
          writes <= writes + 1;
          for (int i = 0; i < T; i++)
            for (int j = 0; j < T; j++)
              if (mem_wmask[i*T+j]) mem[mem_addr % DEPTH][i][j] <= mem_wdata[i][j];
        end else begin
          reads <= reads + 1;
          mem_rdata <= mem[mem_addr % DEPTH];
        end
      end else begin
        cnt <= cnt + 1;
      end
    end
  end

endmodule
