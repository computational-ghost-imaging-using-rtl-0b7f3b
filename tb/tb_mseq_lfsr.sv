// tb_mseq_lfsr -- checks the parallel M-sequence generator against a serial
// model of the sequence, for the 64-bit step and for a 16-bit step, with
// random stalls and a reload of the seed in the middle.
module tb_mseq_lfsr;
  import cgi_ref_pkg::*;

  localparam logic [70:0] SEED = 71'h2A_5AC3_C30F_0F12_34AB;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0;
  logic [63:0] pat64;
  logic [15:0] pat16;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mseq_lfsr #(.STEP(64), .SEED(SEED)) dut64 (.clk, .rst_n, .load, .step, .pattern(pat64));
  mseq_lfsr #(.STEP(16), .SEED(SEED)) dut16 (.clk, .rst_n, .load, .step, .pattern(pat16));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int words);
    mseq_ref r64 = new(SEED);
    mseq_ref r16 = new(SEED);
    logic [63:0] e64;
    logic [15:0] e16;
    for (int w = 0; w < words; w++) begin
      for (int j = 0; j < 64; j++) e64[63-j] = r64.next();
      for (int j = 0; j < 16; j++) e16[15-j] = r16.next();
      // a random number of idle cycles: the word must not change
      do begin
        step = ($urandom_range(0, 3) != 0);
        @(negedge clk);
        checks += 2;
        if (pat64 !== e64) begin
          failures++;
          if (failures < 5) $display("word %0d: 64-bit got %h exp %h", w, pat64, e64);
        end
        if (pat16 !== e16) begin
          failures++;
          if (failures < 5) $display("word %0d: 16-bit got %h exp %h", w, pat16, e16);
        end
        @(posedge clk);
        #1;
      end while (!step);
      step = 1'b0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    #1;
    run(3000);
    // reload the seed: the sequence starts again
    @(negedge clk); load = 1'b1; @(posedge clk); #1; load = 1'b0;
    run(500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
