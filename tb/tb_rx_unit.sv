// tb_rx_unit -- sends every command of the host protocol (and a junk byte)
// to the receiver with random gaps, and random backpressure on the S stream,
// and checks the <R_i> write, every table write (address and data) and the
// S stream, including that the receiver returns to command decoding after
// exactly N_PAT samples.
module tb_rx_unit;
  localparam int NPIX = 16, N = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic rx_valid = 1'b0, s_ready = 1'b0;
  logic [7:0] rx_data = '0;
  logic rx_ready, r_avg_we, tab_we, s_valid;
  logic [8:0] r_avg_wdata;
  logic [3:0] tab_waddr;
  logic [20:0] tab_wdata;
  logic [7:0] s_data;
  int checks = 0, failures = 0;

  logic [20:0] tab_exp [NPIX];
  logic [7:0]  s_exp [$];
  logic [8:0]  r_exp;
  int tab_seen = 0, r_seen = 0, s_seen = 0;

  always #5 clk = ~clk;

  rx_unit #(.NPIX(NPIX), .N_PAT(N)) dut (
    .clk, .rst_n, .rx_valid, .rx_data, .rx_ready,
    .r_avg_we, .r_avg_wdata, .tab_we, .tab_waddr, .tab_wdata,
    .s_valid, .s_data, .s_ready);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sink side: random ready on S, compare everything that comes out
  always @(negedge clk) s_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n) begin
    if (r_avg_we) begin
      checks++; r_seen++;
      if (r_avg_wdata !== r_exp) begin failures++; $display("r_avg %h exp %h", r_avg_wdata, r_exp); end
    end
    if (tab_we) begin
      checks++;
      if (tab_waddr !== 4'(tab_seen) || tab_wdata !== tab_exp[tab_seen]) begin
        failures++;
        $display("table write %0d: addr %0d data %h exp %h", tab_seen, tab_waddr, tab_wdata, tab_exp[tab_seen]);
      end
      tab_seen++;
    end
    if (s_valid && s_ready) begin
      checks++; s_seen++;
      if (s_exp.size() == 0) begin failures++; $display("unexpected S byte"); end
      else if (s_data !== s_exp.pop_front()) begin failures++; $display("S byte mismatch"); end
    end
  end

  task automatic send(logic [7:0] b);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin rx_valid = 1'b0; @(negedge clk); end
    rx_valid = 1'b1; rx_data = b;
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    #1;
    rx_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    send(8'h7E);                             // unknown: ignored
    r_exp = 9'h1A5;
    send(8'h01); send(8'hA5); send(8'h01);   // <R_i> = 0x1A5
    foreach (tab_exp[q]) tab_exp[q] = 21'($urandom);
    send(8'h02);
    foreach (tab_exp[q]) begin
      send(tab_exp[q][7:0]); send(tab_exp[q][15:8]); send({3'b000, tab_exp[q][20:16]});
    end
    send(8'h03);
    for (int i = 0; i < N; i++) begin
      automatic logic [7:0] b = 8'($urandom);
      s_exp.push_back(b);
      send(b);
    end
    // back in command mode: this must be a new <R_i>, not an S byte
    r_exp = 9'h002;
    send(8'h01); send(8'h02); send(8'h00);
    repeat (3) @(negedge clk);
    checks += 3;
    if (r_seen != 2) begin failures++; $display("r writes %0d", r_seen); end
    if (tab_seen != NPIX) begin failures++; $display("table writes %0d", tab_seen); end
    if (s_seen != N) begin failures++; $display("S bytes %0d", s_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
