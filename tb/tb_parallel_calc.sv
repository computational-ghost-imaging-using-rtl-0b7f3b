// tb_parallel_calc -- runs the 64-module parallel calculator over a short
// random pattern set (4 passes of 32 patterns) and reads every module's
// every pass back through the multiplexer.  Checks that module m uses
// pattern bit I(63-m) and that passes land at their own addresses.
module tb_parallel_calc;
  import cgi_ref_pkg::*;

  localparam int NMOD   = 64;
  localparam int PASSES = 4;
  localparam int LOG2_N = 5;
  localparam int N      = 1 << LOG2_N;

  logic clk = 1'b0, en = 1'b0, clr = 1'b0;
  logic [1:0] addr = '0;
  logic [7:0] s = '0;
  logic [63:0] pattern = '0;
  logic [5:0] sel = '0;
  logic [20:0] sia;
  longint unsigned model [PASSES][NMOD];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  parallel_calc #(.NMOD(NMOD), .PASSES(PASSES), .LOG2_N(LOG2_N)) dut (
    .clk, .en, .clr, .addr, .s, .pattern, .sel, .sia);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[p, m]) model[p][m] = 0;
    for (int p = 0; p < PASSES; p++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        en      = 1'b1;
        clr     = (i == 0);
        addr    = 2'(p);
        s       = 8'($urandom);
        pattern = {$urandom, $urandom};
        for (int m = 0; m < NMOD; m++)
          if (pattern[NMOD-1-m]) model[p][m] += avg_term(64'(s), LOG2_N);
      end
      // an idle gap must leave the sums alone
      @(negedge clk);
      en = 1'b0; s = 8'hFF; pattern = '1;
      repeat (3) @(negedge clk);
    end
    en = 1'b0;
    for (int p = 0; p < PASSES; p++)
      for (int m = 0; m < NMOD; m++) begin
        addr = 2'(p); sel = 6'(m);
        #1;
        checks++;
        if (sia !== 21'(model[p][m])) begin
          failures++;
          if (failures < 6) $display("pass %0d module %0d: got %h exp %h", p, m, sia, 21'(model[p][m]));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
