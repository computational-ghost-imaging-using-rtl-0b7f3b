// tb_cgi_quality -- image quality of the fixed-point circuit against a
// floating-point reconstruction, at the default size (32x32 pixels, 16384
// patterns, 64 modules).
//
// A grey-level test object T(x,y) in [0,1] (a tilted background, a bright disc
// and a dark bar) is "measured" with the circuit's own patterns:
// S_i = floor(255 * sum(I_i T) / sum(T)), the 8-bit value an AD converter would
// give.  The same S_i are reconstructed twice:
//   - by the circuit, through the rx/tx byte streams of cgi_top;
//   - in double precision with the DGI formula
//       O = <S I> - <S>/<R> <R I>,   R_i = number of lit pixels of pattern i.
// Both images are stretched linearly to 0..255 (min to max) and compared with
// 255*T by PSNR and by a single-window SSIM.  Checks: the circuit's output is
// bit exact against the fixed-point model, the circuit's PSNR is within 3 dB
// of the floating-point one, and its SSIM within 0.05.
module tb_cgi_quality;
  import cgi_ref_pkg::*;

  localparam int N = 16384, W = 32, H = 32, NMOD = 64, NPIX = W * H;
  localparam logic [70:0] SEED = 71'h2A_5AC3_C30F_0F12_34AB;

  logic clk = 1'b0, rst_n = 1'b0;
  logic rx_valid = 1'b0, tx_ready = 1'b1;
  logic [7:0] rx_data = '0;
  logic rx_ready, tx_valid, busy;
  logic [7:0] tx_data;
  logic [31:0] calc_cycles;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cgi_top dut (.clk, .rst_n, .rx_valid, .rx_data, .rx_ready,
               .tx_valid, .tx_data, .tx_ready, .busy, .calc_cycles);

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cgi_model mdl;
  real t [NPIX];
  real o_hw [NPIX];
  real o_fp [NPIX];
  longint exp_o [];

  task automatic send(logic [7:0] b);
    @(negedge clk);
    rx_valid = 1'b1; rx_data = b;
    @(posedge clk);
    while (!rx_ready) @(posedge clk);
    #1;
    rx_valid = 1'b0;
  endtask

  // stretch to 0..255 and compare with 255*t
  function automatic void quality(real o [NPIX], output real psnr, output real ssim);
    real lo = o[0], hi = o[0], mse = 0.0;
    real mx = 0.0, my = 0.0, vx = 0.0, vy = 0.0, cxy = 0.0;
    real c1 = (0.01 * 255) ** 2, c2 = (0.03 * 255) ** 2;
    real x [NPIX];
    foreach (o[q]) begin
      if (o[q] < lo) lo = o[q];
      if (o[q] > hi) hi = o[q];
    end
    foreach (o[q]) begin
      x[q] = 255.0 * (o[q] - lo) / (hi - lo);
      mse += (x[q] - 255.0 * t[q]) ** 2;
      mx += x[q];
      my += 255.0 * t[q];
    end
    mse /= NPIX; mx /= NPIX; my /= NPIX;
    foreach (o[q]) begin
      vx  += (x[q] - mx) ** 2;
      vy  += (255.0 * t[q] - my) ** 2;
      cxy += (x[q] - mx) * (255.0 * t[q] - my);
    end
    vx /= NPIX; vy /= NPIX; cxy /= NPIX;
    psnr = 10.0 * $log10(255.0 * 255.0 / mse);
    ssim = ((2 * mx * my + c1) * (2 * cxy + c2)) / ((mx * mx + my * my + c1) * (vx + vy + c2));
  endfunction

  initial begin
    real tsum, sbar, rbar, psnr_hw, psnr_fp, ssim_hw, ssim_fp;
    real si [];
    int  ri [];
    logic [31:0] word;
    mdl = new(N, NPIX, NMOD, SEED);
    // grey-level object
    tsum = 0.0;
    for (int q = 0; q < NPIX; q++) begin
      automatic int x = q % W;
      automatic int y = q / W;
      t[q] = 0.15 + 0.25 * x / (W - 1);
      if ((x - 12) * (x - 12) + (y - 12) * (y - 12) <= 49) t[q] = 0.95;
      if (x >= 20 && x < 27 && y >= 4 && y < 28) t[q] = 0.0;
      tsum += t[q];
    end
    // measurement
    si = new[N];
    ri = new[N];
    for (int i = 0; i < N; i++) begin
      automatic real acc = 0.0;
      ri[i] = 0;
      for (int q = 0; q < NPIX; q++) if (mdl.pat[i][q]) begin acc += t[q]; ri[i]++; end
      mdl.s[i] = longint'($floor(255.0 * acc / tsum));
      si[i] = real'(mdl.s[i]);
    end
    mdl.expected(exp_o);
    // floating-point DGI
    sbar = 0.0; rbar = 0.0;
    for (int i = 0; i < N; i++) begin sbar += si[i]; rbar += ri[i]; end
    sbar /= N; rbar /= N;
    for (int q = 0; q < NPIX; q++) begin
      automatic real sI = 0.0;
      automatic real rI = 0.0;
      for (int i = 0; i < N; i++) if (mdl.pat[i][q]) begin sI += si[i]; rI += ri[i]; end
      o_fp[q] = sI / N - sbar / rbar * (rI / N);
    end
    // run the circuit
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    send(8'h01); send(8'(mdl.r_avg)); send(8'(mdl.r_avg >> 8));
    send(8'h02);
    for (int q = 0; q < NPIX; q++) begin
      send(8'(mdl.ria[q])); send(8'(mdl.ria[q] >> 8)); send(8'(mdl.ria[q] >> 16));
    end
    send(8'h03);
    for (int i = 0; i < N; i++) send(8'(mdl.s[i]));
    for (int q = 0; q < NPIX; q++) begin
      for (int b = 0; b < 4; b++) begin
        do @(posedge clk); while (!(tx_valid && tx_ready));
        word[8*b +: 8] = tx_data;
      end
      checks++;
      if (longint'(signed'(word)) != exp_o[q]) begin
        failures++;
        if (failures < 6) $display("pixel %0d: got %0d exp %0d", q, signed'(word), exp_o[q]);
      end
      o_hw[q] = real'(signed'(word));
    end
    quality(o_hw, psnr_hw, ssim_hw);
    quality(o_fp, psnr_fp, ssim_fp);
    $display("fixed-point circuit: PSNR %0.2f dB, SSIM %0.3f", psnr_hw, ssim_hw);
    $display("floating-point DGI : PSNR %0.2f dB, SSIM %0.3f", psnr_fp, ssim_fp);
    checks += 2;
    if (psnr_hw < psnr_fp - 3.0) begin failures++; $display("fixed-point PSNR too low"); end
    if (ssim_hw < ssim_fp - 0.05) begin failures++; $display("fixed-point SSIM too low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
