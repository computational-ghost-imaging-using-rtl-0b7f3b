// tb_sdp_ram -- random writes and reads on a 1024 x 21 RAM checked against
// an array model, including the one-clock read latency and a read of an
// address written in the same clock (old data is returned).
module tb_sdp_ram;
  localparam int DEPTH = 1024;
  localparam int WIDTH = 21;

  logic clk = 1'b0, we = 1'b0;
  logic [9:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] expect_q;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 10'(a); wdata = WIDTH'($urandom);
      model[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      we    = 1'($urandom);
      waddr = 10'($urandom);
      wdata = WIDTH'($urandom);
      raddr = ($urandom_range(0, 7) == 0) ? waddr : 10'($urandom);
      expect_q = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 5) $display("read %0d: got %h exp %h", raddr, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
