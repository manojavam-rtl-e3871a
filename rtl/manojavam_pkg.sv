// manojavam_pkg: types and constants shared by every block of the PCA
// accelerator.
//
// All arithmetic is signed two's-complement fixed point with WORD_W bits of
// which FRAC_W are fraction bits (Q15.16 by default). The source design states
// only that it uses a fixed-point datapath; the word format, the angle format
// (radians, same Q format) and the CORDIC iteration count are choices of this
// implementation. The tile address space (ADDR_W) indexes whole T x T tiles,
// because every cache line and every memory beat holds one complete tile.
package manojavam_pkg;

  localparam int WORD_W     = 32;  // data word width
  localparam int FRAC_W     = 16;  // fraction bits
  localparam int ADDR_W     = 24;  // tile address width towards external memory
  localparam int IDX_W      = 16;  // matrix row/column index width
  localparam int CORDIC_N   = 16;  // CORDIC iterations (one pipeline stage each)

  typedef logic signed [WORD_W-1:0] word_t;
  typedef logic [ADDR_W-1:0]        taddr_t;
  typedef logic [IDX_W-1:0]         idx_t;

  // One in Q15.16
  localparam word_t ONE = word_t'(1) <<< FRAC_W;

  // Datapath mode issued by the top-level controller.
  typedef enum logic {
    MODE_COV = 1'b0,   // covariance computation C = X^T X
    MODE_ROT = 1'b1    // Jacobi rotation C' = R^T C R, V = V R
  } mode_e;

  // Fixed-point multiply: full product, rescaled by FRAC_W (arithmetic shift).
  function automatic word_t fx_mul(input word_t a, input word_t b);
    logic signed [2*WORD_W-1:0] p;
    p = a * b;
    return word_t'(p >>> FRAC_W);
  endfunction

  // atan(2^-i) in Q15.16 radians, i = 0..CORDIC_N-1:
  // round(atan(2^-i) * 2^16).
  function automatic word_t atan_tab(input int i);
    case (i)
      0: return 32'sd51472;  1: return 32'sd30386;  2: return 32'sd16055;
      3: return 32'sd8150;   4: return 32'sd4091;   5: return 32'sd2047;
      6: return 32'sd1024;   7: return 32'sd512;    8: return 32'sd256;
      9: return 32'sd128;   10: return 32'sd64;    11: return 32'sd32;
     12: return 32'sd16;    13: return 32'sd8;     14: return 32'sd4;
     15: return 32'sd2;
      default: return 32'sd1;
    endcase
  endfunction

  // 1/K, the inverse CORDIC gain, in Q15.16: round(2^16 / prod sqrt(1+4^-i)).
  localparam word_t CORDIC_INV_GAIN = 32'sd39797;

endpackage
