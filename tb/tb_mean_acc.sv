// tb_mean_acc -- feeds n = 256 random samples (with idle cycles) to the <S_i>
// accumulator and checks the running value after each, then a clear.
module tb_mean_acc;
  import cgi_ref_pkg::*;

  localparam int LOG2_N = 8;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [7:0] s = '0;
  logic [20:0] avg;
  longint unsigned model = 0, plain = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mean_acc #(.LOG2_N(LOG2_N)) dut (.clk, .rst_n, .clr, .en, .s, .avg);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (avg !== '0) begin failures++; $display("not zero after reset"); end
    for (int n = 0; n < (1 << LOG2_N); ) begin
      en = ($urandom_range(0, 3) != 0);
      s  = 8'($urandom);
      @(negedge clk);
      if (en) begin
        model += avg_term(64'(s), LOG2_N);
        plain += 64'(s);
        n++;
      end
      checks++;
      if (avg !== 21'(model)) begin
        failures++;
        if (failures < 5) $display("sample %0d: got %h exp %h", n, avg, 21'(model));
      end
    end
    en = 1'b0;
    // with 256 = 2^8 samples and 12 fraction bits no bit is lost here
    checks++;
    if (longint'(avg) * 256 != plain * 4096) begin
      failures++;
      $display("average %h is not sum/256 (sum %0d)", avg, plain);
    end
    clr = 1'b1; en = 1'b1; s = 8'hFF;
    @(negedge clk);
    clr = 1'b0; en = 1'b0;
    checks++;
    if (avg !== '0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
