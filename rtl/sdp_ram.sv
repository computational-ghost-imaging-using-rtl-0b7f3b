// sdp_ram -- simple dual-port RAM: one write port, one registered read port.
//
// Used for the three memories of the calculation unit: the S_i memory, the
// <S_i I(x,y)> image RAM and the host-loaded <R_i I(x,y)> table.  Written as
// an array with a synchronous read so that FPGA tools map it to block RAM.
// Timing: a write at an edge is visible to a read issued at a later edge;
// `rdata` shows mem[raddr] one clock after `raddr` is presented.
// The memories' existence and word widths come from the published design; the
// port arrangement is this design's choice.
module sdp_ram #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 21,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
