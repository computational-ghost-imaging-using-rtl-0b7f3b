// tb_cgi_top_nmod16 -- the end-to-end test of tb_cgi_top with the parallel
// calculator cut to 16 calculation modules (the smaller of the two configurations
// whose calculation time was measured): 64 passes of one half line each, so
// calc_cycles = 64*16384 + 1 + 1024 (10.5 ms at 100 MHz).  Otherwise as below.
//
// tb_cgi_top -- end-to-end test of the whole circuit at its default size:
// 32x32 pixels, 16384 patterns, 64 calculation modules.
//
// Acts as the host: computes <R_i> and the <R_i I(x,y)> table from its own
// serial model of the M-sequence, simulates the light S_i passing two
// different binary objects, and sends everything over the rx byte stream.
// The second frame's S bytes are sent while the first frame is still being
// calculated, so the input stalls.  The tx byte stream is taken with random
// backpressure.  Checks:
//   - every pixel of both frames, bit exact against the reference model;
//   - calc_cycles = 16*16384 + 1 + 1024 (2.63 ms at 100 MHz);
//   - the reconstruction is brighter on the object than off it;
//   - each mechanism happened: input stall while busy, output stall,
//     an unknown command byte dropped, 16 passes per frame, two frames.
module tb_cgi_top_nmod16;
  import cgi_ref_pkg::*;

  localparam int N = 16384, W = 32, H = 32, NMOD = 16, NPIX = W * H;
  localparam int PASSES = NPIX / NMOD;
  localparam logic [70:0] SEED = 71'h2A_5AC3_C30F_0F12_34AB;
  localparam int EXP_CYCLES = PASSES * N + 1 + NPIX;

  logic clk = 1'b0, rst_n = 1'b0;
  logic rx_valid = 1'b0, tx_ready = 1'b0;
  logic [7:0] rx_data = '0;
  logic rx_ready, tx_valid, busy;
  logic [7:0] tx_data;
  logic [31:0] calc_cycles;
  int checks = 0, failures = 0;
  int in_stalls = 0, out_stalls = 0, passes = 0, frames = 0;

  always #5 clk = ~clk;

  cgi_top #(.NMOD(NMOD)) dut (.clk, .rst_n, .rx_valid, .rx_data, .rx_ready,
               .tx_valid, .tx_data, .tx_ready, .busy, .calc_cycles);

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (rx_valid && !rx_ready) in_stalls++;
    if (tx_valid && !tx_ready) out_stalls++;
    if (dut.u_calc.v1 && dut.u_calc.clr1) passes++;
  end

  cgi_model mdl;
  bit obj [2][];
  longint exp_o [2][];

  task automatic send(logic [7:0] b);
    @(negedge clk);
    rx_valid = 1'b1; rx_data = b;
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    #1;
    rx_valid = 1'b0;
  endtask

  task automatic send_s(int f);
    mdl.expose(obj[f]);
    mdl.expected(exp_o[f]);
    send(8'h03);
    for (int i = 0; i < N; i++) send(8'(mdl.s[i]));
  endtask

  // receive side: 4 bytes per pixel, checked as they complete
  initial begin
    logic [31:0] word;
    longint in_sum, out_sum;
    int in_n, out_n;
    wait (rst_n);
    for (int f = 0; f < 2; f++) begin
      in_sum = 0; out_sum = 0; in_n = 0; out_n = 0;
      for (int q = 0; q < NPIX; q++) begin
        for (int b = 0; b < 4; b++) begin
          do begin
            @(negedge clk);
            tx_ready = ($urandom_range(0, 3) != 0);
            @(posedge clk);
          end while (!(tx_valid && tx_ready));
          word[8*b +: 8] = tx_data;
        end
        checks++;
        if (longint'(signed'(word)) != exp_o[f][q]) begin
          failures++;
          if (failures < 6) $display("frame %0d pixel %0d: got %0d exp %0d", f, q, signed'(word), exp_o[f][q]);
        end
        if (obj[f][q]) begin in_sum += longint'(signed'(word)); in_n++; end
        else begin out_sum += longint'(signed'(word)); out_n++; end
      end
      checks += 2;
      if (calc_cycles != 32'(EXP_CYCLES)) begin
        failures++;
        $display("calc_cycles %0d exp %0d", calc_cycles, EXP_CYCLES);
      end
      if (in_sum * out_n <= out_sum * in_n) begin
        failures++;
        $display("frame %0d: object not brighter than background", f);
      end
      $display("frame %0d: mean on object %0d, off object %0d, %0d cycles (%0.3f ms at 100 MHz)",
               f, in_sum / longint'(in_n), out_sum / longint'(out_n), calc_cycles, calc_cycles * 1.0e-5);
      frames++;
    end
    @(negedge clk);
    tx_ready = 1'b0;
    repeat (10) @(negedge clk);
    checks += 6;
    if (busy)            begin failures++; $display("busy after the last frame"); end
    if (in_stalls == 0)  begin failures++; $display("mechanism not seen: input stall"); end
    if (out_stalls == 0) begin failures++; $display("mechanism not seen: output stall"); end
    if (passes != 2 * PASSES) begin failures++; $display("passes %0d exp %0d", passes, 2 * PASSES); end
    if (frames != 2)     begin failures++; $display("frames %0d", frames); end
    if (dut.u_rx.state != 0) begin failures++; $display("receiver not back in command state"); end
    $display("input stalls %0d, output stalls %0d, passes %0d, frames %0d", in_stalls, out_stalls, passes, frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mdl = new(N, NPIX, NMOD, SEED);
    foreach (obj[f]) obj[f] = new[NPIX];
    // frame 0: a filled rectangle; frame 1: a ring
    for (int q = 0; q < NPIX; q++) begin
      automatic int x = q % W;
      automatic int y = q / W;
      obj[0][q] = (x >= 8 && x < 20 && y >= 6 && y < 26);
      obj[1][q] = ((x - 16) * (x - 16) + (y - 16) * (y - 16) <= 121) &&
                  ((x - 16) * (x - 16) + (y - 16) * (y - 16) >= 36);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    send(8'h55);                                   // unknown command: dropped
    send(8'h01); send(8'(mdl.r_avg)); send(8'(mdl.r_avg >> 8));
    send(8'h02);
    for (int q = 0; q < NPIX; q++) begin
      send(8'(mdl.ria[q])); send(8'(mdl.ria[q] >> 8)); send(8'(mdl.ria[q] >> 16));
    end
    send_s(0);
    send_s(1);                                     // stalls while frame 0 runs
  end
endmodule
