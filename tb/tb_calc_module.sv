// tb_calc_module -- drives one calculation module with random samples,
// pattern bits, pass addresses and clear pulses and compares every word of
// its RAM with a software model of the gated accumulation.
module tb_calc_module;
  import cgi_ref_pkg::*;

  localparam int PASSES = 4;
  localparam int LOG2_N = 5;

  logic clk = 1'b0, en = 1'b0, clr = 1'b0, i_bit = 1'b0;
  logic [1:0] addr = '0;
  logic [7:0] s = '0;
  logic [20:0] acc;
  longint unsigned model [PASSES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  calc_module #(.PASSES(PASSES), .LOG2_N(LOG2_N)) dut (.clk, .en, .clr, .addr, .i_bit, .s, .acc);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    en = 1'b0;
    for (int a = 0; a < PASSES; a++) begin
      addr = 2'(a);
      #1;
      checks++;
      if (acc !== 21'(model[a])) begin
        failures++;
        $display("addr %0d: got %h exp %h", a, acc, 21'(model[a]));
      end
    end
  endtask

  initial begin
    // clear every word first
    for (int a = 0; a < PASSES; a++) begin
      @(negedge clk);
      en = 1'b1; clr = 1'b1; addr = 2'(a); i_bit = 1'b0; s = 8'hFF;
      model[a] = 0;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      en    = ($urandom_range(0, 4) != 0);
      clr   = ($urandom_range(0, 60) == 0);
      addr  = 2'($urandom_range(0, PASSES - 1));
      i_bit = 1'($urandom);
      s     = 8'($urandom);
      if (en) model[addr] = (clr ? 0 : model[addr]) + (i_bit ? avg_term(64'(s), LOG2_N) : 0);
      if (en) model[addr] &= 64'h1F_FFFF;
      if (n % 500 == 499) begin
        @(negedge clk);
        check_all();
      end
    end
    @(negedge clk);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
