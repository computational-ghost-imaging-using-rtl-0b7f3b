// cgi_top -- dedicated circuit for computational ghost imaging (CGI).
//
// Receiver unit -> calculation unit -> transmitter unit.  The host sends
// <R_i>, the <R_i I(x,y)> table and the N_PAT object light intensities S_i as
// a byte stream (rx_*, see rx_unit); once the last S_i has arrived the
// calculation unit reconstructs the IMG_W x IMG_H image and the transmitter
// returns it as 4 bytes per pixel in raster order (tx_*, see tx_unit).  With
// the defaults (32x32 pixels, 16384 patterns, 64 calculation modules) the
// reconstruction itself takes 16 x 16384 + 1024 + 1 = 263,169 clocks, 2.63 ms
// at the 100 MHz clock of the published design.
// The three-unit structure follows the published top-level diagram; the byte
// formats on rx_*/tx_* are this design's own (the USB interface device that
// carries them is outside this RTL).
module cgi_top #(
  parameter int N_PAT = 16384,
  parameter int IMG_W = 32,
  parameter int IMG_H = 32,
  parameter int NMOD  = 64,
  parameter logic [cgi_pkg::LFSR_LEN-1:0] SEED = 71'h2A_5AC3_C30F_0F12_34AB
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rx_valid,
  input  logic [7:0]  rx_data,
  output logic        rx_ready,
  output logic        tx_valid,
  output logic [7:0]  tx_data,
  input  logic        tx_ready,
  output logic        busy,
  output logic [31:0] calc_cycles
);
  import cgi_pkg::*;

  localparam int NPIX = IMG_W * IMG_H;
  localparam int PXW  = $clog2(NPIX);

  logic           r_avg_we;
  ravg_t          r_avg_wdata;
  logic           tab_we;
  logic [PXW-1:0] tab_waddr;
  avg_t           tab_wdata;
  logic           s_valid, s_ready;
  sample_t        s_data;
  logic           o_valid, o_ready;
  pix_t           o_data;
  logic [PXW-1:0] o_pix;

  rx_unit #(.NPIX(NPIX), .N_PAT(N_PAT)) u_rx (
    .clk, .rst_n, .rx_valid, .rx_data, .rx_ready,
    .r_avg_we, .r_avg_wdata, .tab_we, .tab_waddr, .tab_wdata,
    .s_valid, .s_data, .s_ready
  );

  calc_unit #(.N_PAT(N_PAT), .IMG_W(IMG_W), .IMG_H(IMG_H), .NMOD(NMOD), .SEED(SEED)) u_calc (
    .clk, .rst_n, .r_avg_we, .r_avg_wdata, .tab_we, .tab_waddr, .tab_wdata,
    .s_valid, .s_data, .s_ready,
    .o_valid, .o_data, .o_pix, .o_ready, .busy, .calc_cycles
  );

  tx_unit u_tx (
    .clk, .rst_n, .o_valid, .o_data, .o_ready, .tx_valid, .tx_data, .tx_ready
  );

endmodule
