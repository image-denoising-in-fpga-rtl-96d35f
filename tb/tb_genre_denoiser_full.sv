// tb_genre_denoiser_full -- the end-to-end test of tb_genre_denoiser at
// the design's default size: a 512 x 512 noisy image, five levels, 4096
// gradient-descent iterations, the top instantiated without parameters.
// Unlike the small test, pass 1 (analyse) runs without stalls here so that
// the whole frame can be held against the 3.5 ms budget at 183 MHz (640500
// cycles). The first pixel of pass 2 (denoise) is offered at once, so it
// waits through the flush and the solve (back-pressure). The shrinkage factors and every output pixel are
// compared with the bit-true reference model. Timing checks: one output
// pixel per clock in the stall-free denoise pass, the first output LAT+2
// cycles after the first input, the flush LAT samples long and the solve
// GD_ITERS*(NB+1) cycles long. Every mechanism (stall, back-pressure,
// flush, solve, analyse-to-denoise switch, output clamping) must occur.
module tb_genre_denoiser_full;
  import genre_pkg::*;
  import genre_ref_pkg::*;

  localparam int IMG_W    = 512;
  localparam int IMG_H    = 512;
  localparam int LEVELS   = 5;
  localparam int GD_ITERS = 4096;
  localparam int NB       = 3 * LEVELS + 1;
  localparam int N        = IMG_W * IMG_H;
  localparam int LAT      = fb_latency(LEVELS, IMG_W);
  localparam int SIGMA2   = 310;   // variance of the uniform noise, 30*31/3
  localparam bit STALLS   = 1'b0;
  // Frame budget: 3.5 ms at 183 MHz, the execution time and clock rate the
  // paper reports for 512 x 512 images.
  localparam longint BUDGET = 640500;
  localparam longint WATCHDOG = 3 * N + 3 * LAT + GD_ITERS * (NB + 1) + 5000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic analyse = 1'b1, pix_valid = 1'b0, pix_ready;
  logic [PIX_W-1:0] pix = '0, xhat;
  logic [SIGMA2_W-1:0] sigma2 = SIGMA2_W'(SIGMA2);
  logic xhat_valid, alpha_valid, busy;
  alpha_t alpha [NB];

  int checks = 0, failures = 0;
  int n_stall = 0, n_backpressure = 0, n_flush = 0, n_solve = 0, n_clamp = 0;
  int n_analyse_pass = 0, n_denoise_pass = 0, n_out = 0;
  longint cyc = 0, t_first_in2 = -1, t_first_out = -1, t_last_out = -1;
  longint t_flush_start = -1, flush_len = 0, solve_len = 0, t_first_in1 = -1;
  real se_in = 0.0, se_out = 0.0, psnr_in, psnr_out;

  always #5 clk = ~clk;

  genre_denoiser dut (
    .clk, .rst_n, .analyse, .sigma2, .pix_valid, .pix, .pix_ready,
    .xhat_valid, .xhat, .alpha, .alpha_valid, .busy);

  genre_model m;
  byte unsigned img[], clean[];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12 || what.substr(0,4) != "xhat") $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Cycle counter, mechanism counters and output checker.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.state == 2'd2) flush_len++;
      if (dut.state == 2'd3) solve_len++;
      if (dut.state == 2'd2 && t_flush_start < 0) begin t_flush_start = cyc; n_flush++; end
      if (dut.state != 2'd2) t_flush_start = -1;
      if (dut.gd_done) n_solve++;
      if (xhat_valid) begin
        if (t_first_out < 0) t_first_out = cyc;
        t_last_out = cyc;
        check(n_out < N, "too many output pixels");
        if (n_out < N) begin
          check(int'(xhat) == m.xhat[n_out],
                $sformatf("xhat[%0d] got %0d exp %0d", n_out, xhat, m.xhat[n_out]));
          if (xhat == 8'd0 || xhat == 8'd255) n_clamp++;
          se_out += (real'(xhat) - real'(clean[n_out])) ** 2;
        end
        n_out++;
      end
    end
  end

  // Offers N pixels; stalls at random if asked.
  task automatic send_pass(input bit an, input bit stalls, output longint t_first);
    int i;
    i = 0;
    t_first = -1;
    while (i < N) begin
      @(negedge clk);
      if (stalls && ($urandom % 4) == 0) begin
        pix_valid = 1'b0;
        n_stall++;
      end else begin
        pix_valid = 1'b1;
        pix       = img[i];
        analyse   = an;
        if (!pix_ready) n_backpressure++;
        else begin
          if (i == 0) begin
            t_first = cyc;
            if (an) n_analyse_pass++; else n_denoise_pass++;
          end
          i++;
        end
      end
    end
    @(negedge clk);
    pix_valid = 1'b0;
  endtask

  initial begin
    make_image(IMG_W, IMG_H, 30, 5, img);
    make_image(IMG_W, IMG_H, 0, 5, clean);
    foreach (img[i]) se_in += (real'(img[i]) - real'(clean[i])) ** 2;
    m = new(IMG_W, IMG_H, LEVELS);
    m.run_filter_bank(img, 1'b0);
    m.run_estimate(SIGMA2);
    m.run_gd(GD_ITERS);
    m.run_denoise();

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    send_pass(1'b1, STALLS, t_first_in1);
    // Pass 2 is offered at once and must wait for the flush and the solve.
    send_pass(1'b0, 1'b0, t_first_in2);
    wait (n_out >= N || cyc > WATCHDOG - 10);
    repeat (5) @(posedge clk);

    check(alpha_valid, "alpha_valid not set");
    for (int i = 0; i < NB; i++)
      check(alpha[i] == m.alpha[i], $sformatf("alpha[%0d] got %0d exp %0d", i, alpha[i], m.alpha[i]));
    check(n_out == N, $sformatf("output count %0d", n_out));
    check(t_last_out - t_first_out == N - 1, "denoise output not one pixel per clock");
    check(t_first_out - t_first_in2 == LAT + 2,
          $sformatf("first output after %0d cycles", t_first_out - t_first_in2));
    check(flush_len == 2 * LAT, $sformatf("flush cycles %0d", flush_len));
    check(solve_len == GD_ITERS * (NB + 1) + 1, $sformatf("solve cycles %0d", solve_len));
    check(!busy, "still busy");

    $display("mechanisms: stalls=%0d backpressure=%0d flushes=%0d solves=%0d analyse_passes=%0d denoise_passes=%0d clamped=%0d",
             n_stall, n_backpressure, n_flush, n_solve, n_analyse_pass, n_denoise_pass, n_clamp);
    $display("alpha[0]=%0d alpha[%0d]=%0d (2^24 = 1.0)", alpha[0], NB - 1, alpha[NB-1]);
    psnr_in  = 10.0 * $log10(255.0 * 255.0 * N / se_in);
    psnr_out = 10.0 * $log10(255.0 * 255.0 * N / se_out);
    $display("PSNR noisy %0.2f dB, denoised %0.2f dB", psnr_in, psnr_out);
    check(psnr_out > psnr_in + 1.0, "denoising gained less than 1 dB");
    $display("cycles from first input to last output: %0d (budget %0d)", t_last_out - t_first_in1, BUDGET);
    if (!STALLS) check(t_last_out - t_first_in1 <= BUDGET, "frame budget exceeded");
    check(!STALLS || n_stall > 0, "no stall");
    check(n_backpressure > 0, "no back-pressure");
    check(n_flush == 2, "flush count");
    check(n_solve == 1, "solve count");
    check(n_analyse_pass == 1 && n_denoise_pass == 1, "mode switch");
    check(n_clamp > 0, "no clamped output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
