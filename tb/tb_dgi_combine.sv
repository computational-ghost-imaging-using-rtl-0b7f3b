// tb_dgi_combine -- random and corner operands for the divider-free DGI
// output arithmetic, checked against 64-bit integer evaluation of
// <R>*<SI> - floor(<S>)*<RI> in (1,19,12) format.
module tb_dgi_combine;
  logic [8:0]  r_avg;
  logic [20:0] sia, s_avg, ria;
  logic signed [31:0] o;
  int checks = 0, failures = 0;

  dgi_combine dut (.r_avg, .sia, .s_avg, .ria, .o);

  task automatic try(logic [8:0] r, logic [20:0] a, logic [20:0] sv, logic [20:0] t);
    longint e;
    r_avg = r; sia = a; s_avg = sv; ria = t;
    #1;
    e = longint'(r) * longint'(a) - (longint'(sv) >> 12) * longint'(t);
    checks++;
    if (longint'(o) != e) begin
      failures++;
      if (failures < 5) $display("r=%0d sia=%0d s=%0d ria=%0d: got %0d exp %0d", r, a, sv, t, o, e);
    end
  endtask

  initial begin
    try('0, '0, '0, '0);
    try('1, '1, '0, '0);
    try('0, '0, '1, '1);
    try('1, '1, '1, '1);
    try(9'd256, 21'h080000, 21'h07F800, 21'h040000);
    for (int n = 0; n < 20000; n++)
      try(9'($urandom), 21'($urandom), 21'($urandom), 21'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
