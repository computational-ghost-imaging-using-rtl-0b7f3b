// rx_unit -- receiver unit: host-to-FPGA byte stream decoder.
//
// Bytes arrive from the USB interface device on a valid/ready stream.  Each
// transfer starts with a command byte (cgi_pkg::cmd_e):
//   0x01 LOAD_RAVG : 2 bytes, little-endian, low 9 bits -> <R_i> register
//   0x02 LOAD_TABLE: NPIX words of 3 bytes, little-endian, low 21 bits ->
//                    <R_i I(x,y)> table, addresses 0..NPIX-1 in raster order
//   0x03 LOAD_S    : N_PAT bytes, S_0 .. S_{N-1}, passed to the calculation
//                    unit's s_* stream (backpressure from s_ready)
// Any other command byte is dropped.  Register and table writes are one-clock
// pulses issued on the clock the last byte of a word is accepted; S bytes pass
// through combinationally (s_valid = rx_valid while in LOAD_S).
// The published design only says that the receiver is the USB transmission
// circuit from the host; the command format is this design's own.
module rx_unit #(
  parameter int NPIX  = 1024,
  parameter int N_PAT = 16384,
  localparam int PXW = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int NW  = $clog2(N_PAT + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rx_valid,
  input  logic [7:0]       rx_data,
  output logic             rx_ready,
  output logic             r_avg_we,
  output cgi_pkg::ravg_t   r_avg_wdata,
  output logic             tab_we,
  output logic [PXW-1:0]   tab_waddr,
  output cgi_pkg::avg_t    tab_wdata,
  output logic             s_valid,
  output cgi_pkg::sample_t s_data,
  input  logic             s_ready
);
  import cgi_pkg::*;

  typedef enum logic [1:0] {RX_CMD, RX_RAVG, RX_TAB, RX_S} rx_state_e;
  rx_state_e state;

  logic [1:0]     byte_idx;
  logic [15:0]    shreg;       // bytes of the word collected so far
  logic [PXW-1:0] tab_addr;
  logic [NW-1:0]  s_left;
  logic           fire;

  assign rx_ready = (state == RX_S) ? s_ready : 1'b1;
  assign fire     = rx_valid && rx_ready;
  assign s_valid  = (state == RX_S) && rx_valid;
  assign s_data   = rx_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= RX_CMD;
      byte_idx    <= '0;
      shreg       <= '0;
      tab_addr    <= '0;
      s_left      <= '0;
      r_avg_we    <= 1'b0;
      r_avg_wdata <= '0;
      tab_we      <= 1'b0;
      tab_waddr   <= '0;
      tab_wdata   <= '0;
    end else begin
      r_avg_we <= 1'b0;
      tab_we   <= 1'b0;
      if (fire) begin
        unique case (state)
          RX_CMD: begin
            byte_idx <= '0;
            tab_addr <= '0;
            unique case (rx_data)
              CMD_LOAD_RAVG:  state <= RX_RAVG;
              CMD_LOAD_TABLE: state <= RX_TAB;
              CMD_LOAD_S: begin
                state  <= RX_S;
                s_left <= NW'(N_PAT);
              end
              default: state <= RX_CMD;
            endcase
          end
          RX_RAVG: begin
            if (byte_idx == 2'd0) begin
              shreg[7:0] <= rx_data;
              byte_idx   <= 2'd1;
            end else begin
              r_avg_we    <= 1'b1;
              r_avg_wdata <= ravg_t'({rx_data, shreg[7:0]});
              state       <= RX_CMD;
            end
          end
          RX_TAB: begin
            if (byte_idx != 2'd2) begin
              shreg    <= {rx_data, shreg[15:8]};
              byte_idx <= byte_idx + 1'b1;
            end else begin
              tab_we    <= 1'b1;
              tab_waddr <= tab_addr;
              tab_wdata <= avg_t'({rx_data, shreg});
              byte_idx  <= '0;
              tab_addr  <= tab_addr + 1'b1;
              if (tab_addr == PXW'(NPIX - 1)) state <= RX_CMD;
            end
          end
          RX_S: begin
            s_left <= s_left - 1'b1;
            if (s_left == NW'(1)) state <= RX_CMD;
          end
          default: state <= RX_CMD;
        endcase
      end
    end
  end

endmodule
