// tile_cache: direct-mapped tile cache with its cache controller.
//
// Every line holds one complete T x T tile, so a tile is read in a single
// access instead of T row reads. The same module serves as the shared LHS
// cache (L1) and as each of the S private RHS caches (PL1); each instance is
// managed by its own controller FSM inside this module, giving S+1
// controllers in all, as in the source design.
//
// Reads: a hit returns the tile one cycle after `rd_req`; a miss fetches the
// tile from memory, fills the line and then returns it.
// Writes are written through to memory in both modes. The write-miss policy
// follows the datapath mode, as the source design prescribes:
//   MODE_COV : write-around  - a write miss does not allocate a line;
//   MODE_ROT : write-allocate, no fetch on write - a write miss installs the
//              written tile in its line without reading memory first.
// A write hit updates the line in both modes. `flush` invalidates every line
// (one cycle); the controller of the whole design flushes at the start of
// every matrix pass so that no line goes stale while memory is rewritten.
// Write-through, flush and the line count are this implementation's choices.
//
// Handshake: `rd_req`/`wr_req` are accepted only when `ready` is high and are
// answered by a one-cycle `rd_valid` or `wr_done`. The memory side holds
// `m_req` until the one-cycle `m_ack` (which carries `m_rdata` for reads).
// ev_* outputs pulse once per hit, miss, allocating write and write-around.
module tile_cache
  import manojavam_pkg::*;
#(
  parameter int T     = 4,
  parameter int LINES = 64
) (
  input  logic                 clk,
  input  logic                 rst,
  input  mode_e                mode,
  input  logic                 flush,
  output logic                 ready,
  // core read port
  input  logic                 rd_req,
  input  taddr_t               rd_addr,
  output logic                 rd_valid,
  output word_t [T-1:0][T-1:0] rd_data,
  // core write port
  input  logic                 wr_req,
  input  taddr_t               wr_addr,
  input  word_t [T-1:0][T-1:0] wr_data,
  output logic                 wr_done,
  // memory side
  output logic                 m_req,
  output logic                 m_we,
  output taddr_t               m_addr,
  output word_t [T-1:0][T-1:0] m_wdata,
  input  logic                 m_ack,
  input  word_t [T-1:0][T-1:0] m_rdata,
  // events
  output logic                 ev_hit,
  output logic                 ev_miss,
  output logic                 ev_wr_alloc,
  output logic                 ev_wr_around
);

  // LINES must be a power of two: the line index is the low address bits.
  localparam int IW = (LINES > 1) ? $clog2(LINES) : 1;
  typedef logic [IW-1:0] lidx_t;

  word_t [T-1:0][T-1:0] data_q [LINES];
  taddr_t               tag_q  [LINES];
  logic   [LINES-1:0]   valid_q;

  typedef enum logic [1:0] {C_IDLE, C_RDMISS, C_WRITE} cst_e;
  cst_e   st;
  taddr_t addr_q;
  word_t [T-1:0][T-1:0] wdata_q;

  lidx_t rd_idx, wr_idx;
  logic  rd_hit, wr_hit;

  assign rd_idx = rd_addr[IW-1:0];
  assign wr_idx = wr_addr[IW-1:0];
  assign rd_hit = valid_q[rd_idx] && (tag_q[rd_idx] == rd_addr);
  assign wr_hit = valid_q[wr_idx] && (tag_q[wr_idx] == wr_addr);
  assign ready  = (st == C_IDLE) && !rd_valid && !wr_done;

  assign m_req   = (st == C_RDMISS) || (st == C_WRITE);
  assign m_we    = (st == C_WRITE);
  assign m_addr  = addr_q;
  assign m_wdata = wdata_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      st           <= C_IDLE;
      valid_q      <= '0;
      rd_valid     <= 1'b0;
      wr_done      <= 1'b0;
      addr_q       <= '0;
      ev_hit       <= 1'b0;
      ev_miss      <= 1'b0;
      ev_wr_alloc  <= 1'b0;
      ev_wr_around <= 1'b0;
    end else begin
      rd_valid     <= 1'b0;
      wr_done      <= 1'b0;
      ev_hit       <= 1'b0;
      ev_miss      <= 1'b0;
      ev_wr_alloc  <= 1'b0;
      ev_wr_around <= 1'b0;
      if (flush) valid_q <= '0;
      case (st)
        C_IDLE: begin
          if (ready && rd_req && !flush) begin
            if (rd_hit) begin
              rd_data  <= data_q[rd_idx];
              rd_valid <= 1'b1;
              ev_hit   <= 1'b1;
            end else begin
              addr_q  <= rd_addr;
              ev_miss <= 1'b1;
              st      <= C_RDMISS;
            end
          end else if (ready && wr_req && !flush) begin
            addr_q  <= wr_addr;
            wdata_q <= wr_data;
            st      <= C_WRITE;
            if (wr_hit) begin
              data_q[wr_idx] <= wr_data;
            end else if (mode == MODE_ROT) begin
              data_q[wr_idx]  <= wr_data;   // allocate, no fetch
              tag_q[wr_idx]   <= wr_addr;
              valid_q[wr_idx] <= 1'b1;
              ev_wr_alloc     <= 1'b1;
            end else begin
              ev_wr_around    <= 1'b1;      // write-around
            end
          end
        end
        C_RDMISS: if (m_ack) begin
          data_q[addr_q[IW-1:0]]  <= m_rdata;
          tag_q[addr_q[IW-1:0]]   <= addr_q;
          valid_q[addr_q[IW-1:0]] <= 1'b1;
          rd_data  <= m_rdata;
          rd_valid <= 1'b1;
          st       <= C_IDLE;
        end
        C_WRITE: if (m_ack) begin
          wr_done <= 1'b1;
          st      <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // A request is only issued while the controller is ready.
  a_rd_when_ready: assert property (@(posedge clk) disable iff (rst)
    (rd_req || wr_req) |-> ready || st != C_IDLE || rd_valid || wr_done || flush);

endmodule
