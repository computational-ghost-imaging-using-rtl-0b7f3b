// mean_acc -- the <S_i> adder and register.
//
// Adds every arriving S_i, pre-divided by n = 2^LOG2_N (cgi_pkg::scale_term),
// to a (0,9,12) register, so after n samples the register holds the ensemble
// average <S_i>.  The adder with register feedback and the widths follow the
// published diagram; the alignment and the clear input are this design's.
// Timing: `avg` is the register; an `en` cycle updates it at the next edge;
// `clr` (frame start) has priority over `en`.
module mean_acc #(
  parameter int LOG2_N = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  cgi_pkg::sample_t s,
  output cgi_pkg::avg_t    avg
);
  import cgi_pkg::*;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   avg <= '0;
    else if (clr) avg <= '0;
    else if (en)  avg <= avg + scale_term(s, LOG2_N);
  end

endmodule
