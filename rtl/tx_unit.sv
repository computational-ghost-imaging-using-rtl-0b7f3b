// tx_unit -- transmitter unit: FPGA-to-host byte stream encoder.
//
// Takes one reconstructed pixel <O(x,y)> (32-bit (1,19,12) two's complement)
// at a time on a valid/ready stream and sends it to the USB interface device
// as four bytes, least significant first.  A new pixel is accepted only when
// the previous one's last byte has been taken, so o_ready is high while the
// unit is empty.  tx_data/tx_valid are registered and held until tx_ready.
// The published design names the transmitter as the USB transmission circuit
// to the host; the byte order and handshake are this design's choices.
// Lint reports rst_n as used both asynchronously and synchronously: the
// synchronous use is only the `disable iff` of the handshake assertion.
module tx_unit (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          o_valid,
  input  cgi_pkg::pix_t o_data,
  output logic          o_ready,
  output logic          tx_valid,
  output logic [7:0]    tx_data,
  input  logic          tx_ready
);
  import cgi_pkg::*;

  logic [31:0] word;
  logic [1:0]  left;      // bytes still to send after the current one

  assign o_ready = !tx_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word     <= '0;
      left     <= '0;
      tx_valid <= 1'b0;
      tx_data  <= '0;
    end else if (!tx_valid) begin
      if (o_valid) begin
        tx_valid <= 1'b1;
        tx_data  <= o_data[7:0];
        word     <= 32'(o_data);
        left     <= 2'd3;
      end
    end else if (tx_ready) begin
      if (left == 2'd0) begin
        tx_valid <= 1'b0;
      end else begin
        word    <= {8'h00, word[31:8]};
        tx_data <= word[15:8];
        left    <= left - 1'b1;
      end
    end
  end

  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));

endmodule
