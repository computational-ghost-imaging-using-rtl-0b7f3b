// dgi_combine -- output arithmetic of differential ghost imaging.
//
// Computes, for one pixel,
//   <O(x,y)> = <R_i> * <S_i I(x,y)>  -  sel(<S_i>) * <R_i I(x,y)>
// which is the DGI formula multiplied through by <R_i> so that no divider is
// needed (the constant factor <R_i> on the result is dropped).  sel(<S_i>) is
// the selector: the integer bits [20:12] of the (0,9,12) <S_i> register.
// Both products are (0,18,12); their difference is a (1,19,12) signed word.
// The two multipliers, selector, subtractor and every width follow the
// published diagram; truncation in the selector is this design's choice.
// Purely combinational.
module dgi_combine (
  input  cgi_pkg::ravg_t r_avg,
  input  cgi_pkg::avg_t  sia,
  input  cgi_pkg::avg_t  s_avg,
  input  cgi_pkg::avg_t  ria,
  output cgi_pkg::pix_t  o
);
  import cgi_pkg::*;

  ravg_t s_int;
  prod_t p_top, p_bot;

  assign s_int = s_avg[AVG_W-1 -: R_W];
  assign p_top = PROD_W'(r_avg) * PROD_W'(sia);
  assign p_bot = PROD_W'(s_int) * PROD_W'(ria);
  assign o     = signed'(O_W'(p_top)) - signed'(O_W'(p_bot));

endmodule
