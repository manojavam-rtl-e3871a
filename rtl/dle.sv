// dle: Data Lookup Engine of the Jacobian unit.
//
// The DLE sees every output tile of the covariance (or rotated covariance)
// matrix as it leaves the matrix accumulators, and finds, in one linear scan
// over the stream, the off-diagonal element c_pq of largest magnitude, its
// indices p and q, and the diagonal elements c_pp and c_qq. No second pass
// over memory is needed.
//
// How it works: each tile is latched and scanned one element per cycle
// (T*T cycles per tile). Element (i,j) of the tile at row block rb, column
// block cb has global indices p = rb*T+i, q = cb*T+j. Tile-aware filtering:
// when rb == cb the tile lies on the main diagonal and its elements with
// i == j are masked from the comparison; they are stored instead in a
// diagonal register file of MAX_N entries. All other elements are compared by
// magnitude with the running maximum (strictly greater wins, so of the two
// symmetric copies the one met first, p < q, is kept). `finish` ends the scan:
// two cycles later `res_valid` pulses with c_pq, p, q and c_pp = diag[p],
// c_qq = diag[q]. `clear` starts a new scan.
//
// Interface: `tile_valid` is accepted when `ready`; `finish` must be given
// when `ready` is high after the last tile. The masking rule follows the
// source design; the element-serial scan, the diagonal register file and
// reporting once per full pass (rather than per row block) are this
// implementation's choices.
module dle
  import manojavam_pkg::*;
#(
  parameter int T     = 4,
  parameter int MAX_N = 4096
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 clear,
  input  logic                 tile_valid,
  input  word_t [T-1:0][T-1:0] tile_in,
  input  idx_t                 row_blk,
  input  idx_t                 col_blk,
  output logic                 ready,
  input  logic                 finish,
  output logic                 res_valid,
  output word_t                c_pq,
  output word_t                c_pp,
  output word_t                c_qq,
  output idx_t                 p,
  output idx_t                 q
);

  localparam int DW = $clog2(MAX_N);
  localparam int EW = $clog2(T*T) + 1;

  word_t diag [MAX_N];

  word_t [T-1:0][T-1:0] tile_q;
  idx_t  rb_q, cb_q;
  logic  scanning;
  logic [EW-1:0] e;
  logic  fin1;

  word_t max_abs;
  logic  found;

  // Current element of the scan.
  idx_t  ei, ej, gp, gq;
  word_t ev, ev_abs;
  logic  is_diag;

  always_comb begin
    ei      = idx_t'(e) / idx_t'(T);
    ej      = idx_t'(e) % idx_t'(T);
    ev      = tile_q[ei][ej];
    ev_abs  = ev[WORD_W-1] ? -ev : ev;
    gp      = idx_t'(rb_q * idx_t'(T) + ei);
    gq      = idx_t'(cb_q * idx_t'(T) + ej);
    is_diag = (rb_q == cb_q) && (ei == ej);
  end

  assign ready = !scanning && !fin1;

  always_ff @(posedge clk) begin
    if (rst) begin
      scanning  <= 1'b0;
      e         <= '0;
      fin1      <= 1'b0;
      res_valid <= 1'b0;
      found     <= 1'b0;
      max_abs   <= '0;
      p         <= '0;
      q         <= '0;
      c_pq      <= '0;
      c_pp      <= '0;
      c_qq      <= '0;
    end else begin
      res_valid <= 1'b0;
      if (clear) begin
        found   <= 1'b0;
        max_abs <= '0;
        p       <= '0;
        q       <= '0;
        c_pq    <= '0;
      end
      if (ready && tile_valid && !clear) begin
        tile_q   <= tile_in;
        rb_q     <= row_blk;
        cb_q     <= col_blk;
        e        <= '0;
        scanning <= 1'b1;
      end else if (scanning) begin
        if (is_diag) begin
          diag[gp[DW-1:0]] <= ev;
        end else if (!found || ev_abs > max_abs) begin
          found   <= 1'b1;
          max_abs <= ev_abs;
          c_pq    <= ev;
          p       <= gp;
          q       <= gq;
        end
        e <= e + EW'(1);
        if (e == EW'(T*T-1)) scanning <= 1'b0;
      end
      fin1 <= ready && finish;
      if (fin1) begin
        c_pp      <= diag[p[DW-1:0]];
        c_qq      <= diag[q[DW-1:0]];
        res_valid <= 1'b1;
      end
    end
  end

endmodule
