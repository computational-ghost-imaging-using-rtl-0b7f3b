// parallel_calc -- the parallel calculator: NMOD calculation modules and the
// output multiplexer.
//
// Every module receives the same S_i and one bit of the pattern word, so one
// clock accumulates one pattern for NMOD pixels.  Module m owns pixel m (in
// raster order) of the current pass and takes pattern bit I(NMOD-1-m); with
// the M-sequence generator this hands pixel m the sequence bit NMOD*w + m.
// The multiplexer puts module `sel`'s word (at address `addr`) on `sia`, the
// path by which results are copied into the image RAM.
//
// Module count, fan-out of S_i, the I(63)..I(0) order and the (0,9,12) widths
// follow the published drawing; which drawn module is pixel 1 and the binary
// select are this design's choices.  `sia` is combinational from `sel`/`addr`.
module parallel_calc #(
  parameter int NMOD   = 64,
  parameter int PASSES = 16,
  parameter int LOG2_N = 14,
  localparam int AW = (PASSES > 1) ? $clog2(PASSES) : 1,
  localparam int SW = (NMOD > 1) ? $clog2(NMOD) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             clr,
  input  logic [AW-1:0]    addr,
  input  cgi_pkg::sample_t s,
  input  logic [NMOD-1:0]  pattern,
  input  logic [SW-1:0]    sel,
  output cgi_pkg::avg_t    sia
);
  import cgi_pkg::*;

  avg_t acc [NMOD];

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    calc_module #(.PASSES(PASSES), .LOG2_N(LOG2_N)) u_mod (
      .clk  (clk),
      .en   (en),
      .clr  (clr),
      .addr (addr),
      .i_bit(pattern[NMOD-1-m]),
      .s    (s),
      .acc  (acc[m])
    );
  end

  assign sia = acc[sel];

endmodule
