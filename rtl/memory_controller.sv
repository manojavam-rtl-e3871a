// memory_controller: round-robin arbiter between the tile requesters of the
// accelerator and the single external memory port (the cache-DDR3 interface).
//
// Requesters are the S+1 cache controllers and the two write ports of the
// Givens controller. Each requester holds `req` with its command until the
// one-cycle `ack`; reads return `rdata`, registered, with that ack. The controller serves
// one transaction at a time: it grants the next requesting port after the
// last one served, forwards the command unchanged to the memory port and waits
// for `mem_ack`. Writes carry a per-element mask (T*T bits) so that single
// Givens-matrix entries can be written into a stored tile.
//
// The source design names a memory controller and a cache-DDR3 interface but
// does not describe them; round-robin arbitration, one outstanding request and
// the masked-write command are this implementation's choices. The external
// memory itself is outside the design.
module memory_controller
  import manojavam_pkg::*;
#(
  parameter int T    = 4,
  parameter int NREQ = 11
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic  [NREQ-1:0]                 req,
  input  logic  [NREQ-1:0]                 we,
  input  taddr_t [NREQ-1:0]                addr,
  input  word_t [NREQ-1:0][T-1:0][T-1:0]   wdata,
  input  logic  [NREQ-1:0][T*T-1:0]        wmask,
  output logic  [NREQ-1:0]                 ack,
  output word_t [T-1:0][T-1:0]             rdata,
  // external memory port
  output logic                             mem_req,
  output logic                             mem_we,
  output taddr_t                           mem_addr,
  output word_t [T-1:0][T-1:0]             mem_wdata,
  output logic  [T*T-1:0]                  mem_wmask,
  input  logic                             mem_ack,
  input  word_t [T-1:0][T-1:0]             mem_rdata
);

  localparam int GW = (NREQ > 1) ? $clog2(NREQ) : 1;
  typedef logic [GW-1:0] gidx_t;

  logic  busy;
  gidx_t gnt, last;
  gidx_t pick;
  logic  any;

  // Round-robin choice: first requester after `last`.
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= NREQ; k++) begin
      gidx_t c;
      c = gidx_t'((int'(last) + k) % NREQ);
      if (!any && req[c]) begin
        pick = c;
        any  = 1'b1;
      end
    end
  end

  assign mem_req   = busy;
  assign mem_we    = we[gnt];
  assign mem_addr  = addr[gnt];
  assign mem_wdata = wdata[gnt];
  assign mem_wmask = wmask[gnt];

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      gnt  <= '0;
      last <= gidx_t'(NREQ-1);
      ack  <= '0;
    end else begin
      ack <= '0;
      if (!busy) begin
        if (any && ack == '0) begin
          busy <= 1'b1;
          gnt  <= pick;
        end
      end else if (mem_ack) begin
        busy     <= 1'b0;
        last     <= gnt;
        ack[gnt] <= 1'b1;
        rdata    <= mem_rdata;
      end
    end
  end

endmodule
