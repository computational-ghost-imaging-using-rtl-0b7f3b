// tb_calc_unit -- two reconstructions by a reduced calculation unit (8x8
// pixels, 64 patterns, 16 modules, so 4 passes) of two different binary
// objects.  Loads <R_i> and the table as a host would, streams S_i with
// random gaps, takes the pixels with random backpressure and checks
//   - every pixel against the reference model (bit exact),
//   - the raster order of o_pix,
//   - calc_cycles = PASSES*N + 1 + NPIX,
//   - that S is refused while the unit is busy,
//   - that the reconstruction is brighter on the object than off it.
module tb_calc_unit;
  import cgi_ref_pkg::*;

  localparam int N = 64, W = 8, H = 8, NMOD = 16, NPIX = W * H;
  localparam int PASSES = NPIX / NMOD;
  localparam logic [70:0] SEED = 71'h2A_5AC3_C30F_0F12_34AB;

  logic clk = 1'b0, rst_n = 1'b0;
  logic r_avg_we = 1'b0, tab_we = 1'b0, s_valid = 1'b0, o_ready = 1'b0;
  logic [8:0] r_avg_wdata = '0;
  logic [5:0] tab_waddr = '0;
  logic [20:0] tab_wdata = '0;
  logic [7:0] s_data = '0;
  logic s_ready, o_valid, busy;
  logic signed [31:0] o_data;
  logic [5:0] o_pix;
  logic [31:0] calc_cycles;
  int checks = 0, failures = 0;
  int refused = 0, stalls = 0;

  always #5 clk = ~clk;

  calc_unit #(.N_PAT(N), .IMG_W(W), .IMG_H(H), .NMOD(NMOD), .SEED(SEED)) dut (
    .clk, .rst_n, .r_avg_we, .r_avg_wdata, .tab_we, .tab_waddr, .tab_wdata,
    .s_valid, .s_data, .s_ready, .o_valid, .o_data, .o_pix, .o_ready, .busy, .calc_cycles);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cgi_model mdl;

  task automatic frame(bit obj []);
    longint exp_o [];
    longint in_sum = 0, out_sum = 0;
    int in_n = 0, out_n = 0, got = 0;
    mdl.expose(obj);
    mdl.expected(exp_o);
    // S stream with gaps
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) begin s_valid = 1'b0; @(negedge clk); end
      s_valid = 1'b1; s_data = 8'(mdl.s[i]);
      while (!s_ready) @(negedge clk);
      @(posedge clk);
      #1;
    end
    @(negedge clk);
    s_valid = 1'b1; s_data = 8'hAA;       // must be refused while busy
    repeat (10) begin
      @(posedge clk);
      checks++;
      if (s_ready) failures++;
      else refused++;
    end
    @(negedge clk);
    s_valid = 1'b0;
    // collect pixels
    while (got < NPIX) begin
      @(negedge clk);
      o_ready = ($urandom_range(0, 2) != 0);
      if (o_valid && !o_ready) stalls++;
      @(posedge clk);
      if (o_valid && o_ready) begin
        checks += 2;
        if (o_pix != 6'(got)) begin failures++; $display("pixel order %0d got %0d", got, o_pix); end
        if (longint'(o_data) != exp_o[got]) begin
          failures++;
          if (failures < 6) $display("pixel %0d: got %0d exp %0d", got, o_data, exp_o[got]);
        end
        if (obj[got]) begin in_sum += longint'(o_data); in_n++; end
        else begin out_sum += longint'(o_data); out_n++; end
        got++;
      end
    end
    @(negedge clk);
    o_ready = 1'b0;
    checks++;
    if (calc_cycles != 32'(PASSES * N + 1 + NPIX)) begin
      failures++;
      $display("calc_cycles %0d exp %0d", calc_cycles, PASSES * N + 1 + NPIX);
    end
    checks++;
    if (in_sum * out_n <= out_sum * in_n) begin
      failures++;
      $display("object not brighter than background: in %0d/%0d out %0d/%0d", in_sum, in_n, out_sum, out_n);
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after the last pixel"); end
  endtask

  initial begin
    bit obj [];
    mdl = new(N, NPIX, NMOD, SEED);
    obj = new[NPIX];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // host: <R_i> and the table
    @(negedge clk);
    r_avg_we = 1'b1; r_avg_wdata = 9'(mdl.r_avg);
    for (int q = 0; q < NPIX; q++) begin
      @(negedge clk);
      r_avg_we = 1'b0;
      tab_we = 1'b1; tab_waddr = 6'(q); tab_wdata = 21'(mdl.ria[q]);
    end
    @(negedge clk);
    tab_we = 1'b0;
    foreach (obj[q]) obj[q] = ((q % W) >= 2 && (q % W) < 6 && (q / W) >= 1 && (q / W) < 5);
    frame(obj);
    foreach (obj[q]) obj[q] = ((q / W) == 6) || ((q % W) == 1);
    frame(obj);
    checks += 2;
    if (refused == 0) begin failures++; $display("no refusal seen"); end
    if (stalls == 0) begin failures++; $display("no output stall seen"); end
    $display("refusals %0d output stalls %0d", refused, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
