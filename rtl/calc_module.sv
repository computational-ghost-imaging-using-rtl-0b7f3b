// calc_module -- one calculation module of the parallel calculator.
//
// Forms S_i * I for one pixel (I is a single pattern bit, so the product is
// S_i gated by I) and adds it to a running ensemble average held in a small
// RAM.  The RAM has one word per pass: in pass p the module accumulates the
// pixel it owns in that pass at address p, and after all passes the same
// address port reads the finished <S_i I(x,y)> values out.
//
// Each addend is S_i pre-divided by n = 2^LOG2_N and truncated to the (0,9,12)
// grid (cgi_pkg::scale_term), so after n patterns the word is the average
// itself.  The gate, the adder, the RAM in the feedback loop and the (0,8,0) /
// (0,9,12) widths follow the published module drawing; the term alignment,
// the RAM depth and the clear input are this design's choices.
//
// Timing: the RAM reads asynchronously (distributed RAM), so a
// read-add-write completes every clock.  `acc` shows mem[addr] combinationally.
// `clr` with `en` writes the addend alone (first pattern of a pass).
module calc_module #(
  parameter int PASSES = 16,
  parameter int LOG2_N = 14,
  localparam int AW = (PASSES > 1) ? $clog2(PASSES) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             clr,
  input  logic [AW-1:0]    addr,
  input  logic             i_bit,
  input  cgi_pkg::sample_t s,
  output cgi_pkg::avg_t    acc
);
  import cgi_pkg::*;

  avg_t    mem [PASSES];
  sample_t gated;
  avg_t    sum;

  assign gated = s & {S_W{i_bit}};
  assign acc   = mem[addr];
  assign sum   = (clr ? '0 : acc) + scale_term(gated, LOG2_N);

  always_ff @(posedge clk) begin
    if (en) mem[addr] <= sum;
  end

endmodule
