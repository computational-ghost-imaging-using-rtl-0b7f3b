// cgi_pkg -- types and constants shared by the computational ghost imaging
// (CGI) reconstruction circuit.
//
// All arithmetic is unsigned or two's-complement fixed point.  A format is
// written (sign, integer bits, fraction bits):
//   S_i                 (0,8,0)   8-bit object light intensity from the ADC
//   <S_i>, <S_i I>,
//   <R_i I>             (0,9,12)  21-bit ensemble averages
//   <R_i>, selector out (0,9,0)   9-bit integer
//   products            (0,18,12) 30 bits
//   <O(x,y)>            (1,19,12) 32-bit signed result
// These widths are the ones printed in the block diagrams of the design; the
// alignment of an 8-bit sample inside a 21-bit average (pre-division by the
// pattern count, see scale_term) is this implementation's choice.
package cgi_pkg;

  localparam int S_W     = 8;            // (0,8,0)
  localparam int FRAC_W  = 12;           // fraction bits of the averages
  localparam int AVG_INT = 9;            // integer bits of the averages
  localparam int AVG_W   = AVG_INT + FRAC_W;   // (0,9,12) = 21
  localparam int R_W     = 9;            // (0,9,0)
  localparam int PROD_W  = R_W + AVG_W;  // (0,18,12) = 30
  localparam int O_W     = PROD_W + 2;   // (1,19,12) = 32

  localparam int LFSR_LEN = 71;          // flip-flops M(70)..M(0)

  typedef logic [S_W-1:0]          sample_t;
  typedef logic [AVG_W-1:0]        avg_t;
  typedef logic [R_W-1:0]          ravg_t;
  typedef logic [PROD_W-1:0]       prod_t;
  typedef logic signed [O_W-1:0]   pix_t;

  // Host-to-FPGA command bytes understood by the receiver unit.
  typedef enum logic [7:0] {
    CMD_LOAD_RAVG  = 8'h01,   // + 2 bytes, <R_i>, little-endian
    CMD_LOAD_TABLE = 8'h02,   // + NPIX x 3 bytes, <R_i I(x,y)> in raster order
    CMD_LOAD_S     = 8'h03    // + N_PAT bytes, S_0 .. S_{N-1}; the last starts a frame
  } cmd_e;

  // One addend of an ensemble average: S * 2^FRAC_W / 2^log2_n, truncated to
  // the (0,9,12) grid.  Accumulating it n times gives the average directly.
  function automatic avg_t scale_term(input sample_t s, input int log2_n);
    logic [AVG_W-1:0] wide;
    wide = AVG_W'({s, {FRAC_W{1'b0}}});
    return avg_t'(wide >> log2_n);
  endfunction

endpackage
