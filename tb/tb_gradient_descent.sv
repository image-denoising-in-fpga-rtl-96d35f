// tb_gradient_descent -- solves two random, diagonally dominant 4 x 4
// systems with 120 iterations each. Checks: alpha bit-exact against a
// model of the fixed-point update, the solve time (one cycle to leave idle
// plus ITERS * (NB + 1) cycles) from start to done, busy held high for the whole solve, alpha
// restarting from 1.0 for the second solve, and the residual |c - Q alpha|
// shrinking by at least 100x.
module tb_gradient_descent;
  import genre_pkg::*;

  localparam int NB = 4, ITERS = 120, RUNS = 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  qn_t    q     [NB][NB];
  qn_t    c     [NB];
  alpha_t alpha [NB];
  logic   busy, done;
  longint ma [NB];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gradient_descent #(.NB(NB), .ITERS(ITERS)) dut (.clk, .rst_n, .start, .q, .c, .alpha, .busy, .done);

  initial begin : watchdog
    repeat (RUNS * ITERS * (NB + 1) + 500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Real-valued residual norm (max over rows) for alpha held in `a`.
  function automatic real resid(input longint a [NB]);
    real r, m;
    m = 0.0;
    for (int i = 0; i < NB; i++) begin
      r = real'(c[i]) / 4096.0;
      for (int k = 0; k < NB; k++) r -= real'(q[i][k]) / 4096.0 * real'(a[k]) / 16777216.0;
      if (r < 0) r = -r;
      if (r > m) m = r;
    end
    return m;
  endfunction

  initial begin
    for (int run = 0; run < RUNS; run++) begin
      int cycles;
      real r0, r1;
      for (int i = 0; i < NB; i++)
        for (int k = i; k < NB; k++) begin
          // Q in 12-fraction-bit units: diagonal 2000..3600, off-diagonal
          // +-400, so 120 steps leave alpha short of its fixed point (the
          // step size matters)
          q[i][k] = (i == k) ? qn_t'((2000 + $urandom % 1600) * 4096)
                             : qn_t'((int'($urandom % 800) - 400) * 4096);
          q[k][i] = q[i][k];
        end
      foreach (c[i]) c[i] = qn_t'((int'($urandom % 80000) - 40000) * 4096);
      foreach (ma[i]) ma[i] = longint'(1) <<< ALPHA_FRAC;
      r0 = resid(ma);
      // model
      for (int it = 0; it < ITERS; it++) begin
        longint acc [NB];
        longint res;
        for (int i = 0; i < NB; i++) begin
          acc[i] = 0;
          for (int k = 0; k < NB; k++) acc[i] += longint'(q[i][k]) * ma[k];
        end
        for (int i = 0; i < NB; i++) begin
          res   = (longint'(c[i]) <<< (ALPHA_FRAC - QN_FRAC)) - (acc[i] >>> QN_FRAC);
          ma[i] = longint'(alpha_t'(ma[i] + (res >>> (MU_SHIFT + GD_PRESCALE))));
        end
      end
      if (run == 0) begin
        repeat (2) @(posedge clk);
        rst_n = 1'b1;
      end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cycles = 1;
      checks++;
      foreach (alpha[i]) if (alpha[i] !== alpha_t'(1) <<< ALPHA_FRAC) begin
        failures++;
        $display("alpha not restarted at 1.0");
        break;
      end
      while (!done) begin
        checks++;
        if (!busy) begin
          failures++;
          $display("busy dropped during the solve");
        end
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (cycles != ITERS * (NB + 1) + 1) begin
        failures++;
        $display("solve took %0d cycles, expected %0d", cycles, ITERS * (NB + 1) + 1);
      end
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (longint'(alpha[i]) != ma[i]) begin
          failures++;
          $display("run %0d alpha[%0d] got %0d exp %0d", run, i, alpha[i], ma[i]);
        end
      end
      r1 = resid(ma);
      checks++;
      if (!(r1 * 100.0 < r0)) begin
        failures++;
        $display("residual %f -> %f did not shrink", r0, r1);
      end
      $display("run %0d: %0d cycles, residual %f -> %f", run, cycles, r0, r1);
      @(negedge clk);
      checks++;
      if (busy || done) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
