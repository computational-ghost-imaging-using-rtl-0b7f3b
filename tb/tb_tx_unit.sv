// tb_tx_unit -- offers random 32-bit pixels with random gaps to the
// transmitter, applies random backpressure on the byte side, and checks that
// every pixel comes out as four bytes, least significant first, in order.
module tb_tx_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  logic o_valid = 1'b0, tx_ready = 1'b0;
  logic signed [31:0] o_data = '0;
  logic o_ready, tx_valid;
  logic [7:0] tx_data;
  int checks = 0, failures = 0;
  logic [7:0] bytes_exp [$];
  int sent = 0;

  always #5 clk = ~clk;

  tx_unit dut (.clk, .rst_n, .o_valid, .o_data, .o_ready, .tx_valid, .tx_data, .tx_ready);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) tx_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    checks++;
    if (bytes_exp.size() == 0) begin failures++; $display("extra byte"); end
    else if (tx_data !== bytes_exp.pop_front()) begin failures++; $display("byte mismatch"); end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin o_valid = 1'b0; @(negedge clk); end
      o_valid = 1'b1; o_data = $urandom;
      @(posedge clk);
      while (!o_ready) @(posedge clk);
      for (int b = 0; b < 4; b++) bytes_exp.push_back(o_data[8*b +: 8]);
      sent++;
      #1;
      o_valid = 1'b0;
    end
    while (bytes_exp.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (tx_valid) begin failures++; $display("tx_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
