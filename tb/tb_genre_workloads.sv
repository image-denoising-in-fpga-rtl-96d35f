// tb_genre_workloads -- the denoiser at its default size on the three noise
// types it is meant for: a 512 x 512 image with Gaussian, uniform and
// Laplacian noise, each of standard deviation 25 (variance 625), each run
// as a complete analyse pass, solve and denoise pass.
//
// The clean scene is synthetic, built to have the brightness and contrast
// of a typical natural test photograph (mean near 124, standard deviation
// near 50): smooth shading, blocks with sharp edges and fine texture. Its
// mean square is above 16384, the level at which an unscaled gradient
// descent with mu = 2^-13 would diverge, so the test also shows that the
// solver stays stable on such images. Noise is drawn from a fixed-seed
// generator (Box-Muller for Gaussian, inverse CDF for Laplacian), added,
// rounded and clipped to 8 bits.
//
// Checks per frame: every shrinkage factor and every output pixel equal to
// the bit-true reference model, the output count, the frame time (first
// input to last output) within 3.5 ms at 183 MHz = 640500 cycles, all
// factors finite (|alpha| < 4), a PSNR gain of at least 3 dB and a higher
// structural similarity (SSIM, taken over the whole image with
// c1 = (0.01*255)^2 and c2 = (0.03*255)^2) after denoising than before.
module tb_genre_workloads;
  import genre_pkg::*;
  import genre_ref_pkg::*;

  localparam int IMG_W    = 512;
  localparam int IMG_H    = 512;
  localparam int LEVELS   = 5;
  localparam int GD_ITERS = 4096;
  localparam int NB       = 3 * LEVELS + 1;
  localparam int N        = IMG_W * IMG_H;
  localparam int SIGMA    = 25;
  localparam longint BUDGET = 640500;
  localparam int NKIND    = 3;
  localparam longint WATCHDOG = NKIND * (BUDGET + 1000);

  logic clk = 1'b0, rst_n = 1'b0;
  logic analyse = 1'b1, pix_valid = 1'b0, pix_ready;
  logic [PIX_W-1:0] pix = '0, xhat;
  logic [SIGMA2_W-1:0] sigma2 = SIGMA2_W'(SIGMA * SIGMA);
  logic xhat_valid, alpha_valid, busy;
  alpha_t alpha [NB];

  int checks = 0, failures = 0, n_out = 0;
  longint cyc = 0, t_last_out = -1;
  real se_out = 0.0;
  byte unsigned outimg[];

  always #5 clk = ~clk;

  genre_denoiser dut (
    .clk, .rst_n, .analyse, .sigma2, .pix_valid, .pix, .pix_ready,
    .xhat_valid, .xhat, .alpha, .alpha_valid, .busy);

  genre_model m;
  byte unsigned clean[], img[];
  int unsigned seed = 32'd12345;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Uniform real in (0, 1) from a 32-bit LCG.
  function automatic real urand();
    seed = seed * 1664525 + 1013904223;
    return (real'(seed >> 8) + 0.5) / 16777216.0;
  endfunction

  function automatic real noise(input int kind);
    real u, v;
    case (kind)
      0: begin  // Gaussian
        u = urand();
        v = urand();
        return SIGMA * $sqrt(-2.0 * $ln(u)) * $cos(6.283185307179586 * v);
      end
      1: return SIGMA * $sqrt(3.0) * (2.0 * urand() - 1.0);  // uniform
      default: begin  // Laplacian, scale sigma / sqrt(2)
        u = urand() - 0.5;
        v = SIGMA / $sqrt(2.0);
        return (u < 0) ? v * $ln(1.0 + 2.0 * u) : -v * $ln(1.0 - 2.0 * u);
      end
    endcase
  endfunction

  function automatic void make_scene();
    clean = new[N];
    for (int r = 0; r < IMG_H; r++)
      for (int c = 0; c < IMG_W; c++) begin
        real v;
        v = 118.0 + 45.0 * $sin(6.283185307179586 * c / 170.0) * $cos(6.283185307179586 * r / 230.0)
                  + 10.0 * $sin(6.283185307179586 * (c + 2 * r) / 11.0);
        if (((r / 64) + (c / 96)) % 3 == 0) v += 45.0;
        if (r > 300 && r < 420 && c > 60 && c < 200) v = 235.0;
        if (r > 40 && r < 120 && c > 330 && c < 470) v = 20.0 + (c - 330) * 0.3;
        clean[r * IMG_W + c] = (v < 0.0) ? 8'd0 : (v > 255.0) ? 8'd255 : 8'(int'(v));
      end
  endfunction

  always @(posedge clk)
    if (rst_n) begin
      cyc <= cyc + 1;
      if (xhat_valid) begin
        t_last_out = cyc;
        if (n_out < N) begin
          check(int'(xhat) == m.xhat[n_out],
                $sformatf("xhat[%0d] got %0d exp %0d", n_out, xhat, m.xhat[n_out]));
          se_out += (real'(xhat) - real'(clean[n_out])) ** 2;
          outimg[n_out] = xhat;
        end
        n_out++;
      end
    end

  // Structural similarity of image a against the clean scene, whole image.
  function automatic real ssim(input byte unsigned a[]);
    real ma, mb, va, vb, cov, c1, c2;
    ma = 0.0; mb = 0.0; va = 0.0; vb = 0.0; cov = 0.0;
    foreach (a[i]) begin
      ma += real'(a[i]) / N;
      mb += real'(clean[i]) / N;
    end
    foreach (a[i]) begin
      va  += (real'(a[i]) - ma) ** 2 / N;
      vb  += (real'(clean[i]) - mb) ** 2 / N;
      cov += (real'(a[i]) - ma) * (real'(clean[i]) - mb) / N;
    end
    c1 = (0.01 * 255.0) ** 2;
    c2 = (0.03 * 255.0) ** 2;
    return ((2.0 * ma * mb + c1) * (2.0 * cov + c2)) / ((ma * ma + mb * mb + c1) * (va + vb + c2));
  endfunction

  task automatic send_pass(input bit an, output longint t_first);
    int i;
    i = 0;
    t_first = -1;
    while (i < N) begin
      @(negedge clk);
      pix_valid = 1'b1;
      pix       = img[i];
      analyse   = an;
      if (pix_ready) begin
        if (i == 0) t_first = cyc;
        i++;
      end
    end
    @(negedge clk);
    pix_valid = 1'b0;
  endtask

  initial begin
    real mean, msq, se_in, psnr_in, psnr_out, ssim_in, ssim_out;
    longint t_first, t_dummy;
    string kname [NKIND];
    kname = '{"Gaussian", "uniform", "Laplacian"};
    make_scene();
    mean = 0.0;
    msq  = 0.0;
    foreach (clean[i]) begin
      mean += real'(clean[i]) / N;
      msq  += real'(clean[i]) ** 2 / N;
    end
    $display("scene: mean %0.1f, rms %0.1f, std %0.1f", mean, $sqrt(msq), $sqrt(msq - mean * mean));
    check(msq > 16384.0, "scene mean square not above 16384");
    img = new[N];
    outimg = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int kind = 0; kind < NKIND; kind++) begin
      se_in = 0.0;
      foreach (clean[i]) begin
        real v;
        v = real'(clean[i]) + noise(kind);
        img[i] = (v < 0.0) ? 8'd0 : (v > 255.0) ? 8'd255 : 8'(int'(v + 0.5));
        se_in += (real'(img[i]) - real'(clean[i])) ** 2;
      end
      m = new(IMG_W, IMG_H, LEVELS);
      m.run_filter_bank(img, 1'b0);
      m.run_estimate(SIGMA * SIGMA);
      m.run_gd(GD_ITERS);
      m.run_denoise();

      n_out  = 0;
      se_out = 0.0;
      send_pass(1'b1, t_first);
      send_pass(1'b0, t_dummy);
      wait (n_out >= N || cyc > WATCHDOG - 10);
      repeat (5) @(posedge clk);

      check(alpha_valid, "alpha_valid not set");
      for (int i = 0; i < NB; i++) begin
        check(alpha[i] == m.alpha[i], $sformatf("alpha[%0d] got %0d exp %0d", i, alpha[i], m.alpha[i]));
        check(alpha[i] < 4 * 2 ** 24 && alpha[i] > -4 * 2 ** 24, $sformatf("alpha[%0d] = %0d diverged", i, alpha[i]));
      end
      check(n_out == N, $sformatf("output count %0d", n_out));
      check(t_last_out - t_first <= BUDGET,
            $sformatf("frame took %0d cycles, budget %0d", t_last_out - t_first, BUDGET));
      psnr_in  = 10.0 * $log10(255.0 * 255.0 * N / se_in);
      psnr_out = 10.0 * $log10(255.0 * 255.0 * N / se_out);
      check(psnr_out > psnr_in + 3.0, "PSNR gain below 3 dB");
      ssim_in  = ssim(img);
      ssim_out = ssim(outimg);
      check(ssim_out > ssim_in, "SSIM did not improve");
      $display("%s noise: SSIM %0.4f -> %0.4f", kname[kind], ssim_in, ssim_out);
      $display("%s noise, sigma %0d: PSNR %0.2f -> %0.2f dB (gain %0.2f), frame %0d cycles",
               kname[kind], SIGMA, psnr_in, psnr_out, psnr_out - psnr_in, t_last_out - t_first);
      $write("  alpha:");
      for (int i = 0; i < NB; i++) $write(" %0.3f", real'(alpha[i]) / 16777216.0);
      $write("\n");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
