// tb_matvec_c -- random Psi rows and pixels into a 7-column (two-level)
// right-hand-side unit with N = 16 and a fixed noise variance; each cycle
// c_i must equal floor(64 * sum psi_i y / N) - sigma^2 * 2^(12-2j), in
// 12-fraction-bit units. A clear mid-run restarts the sums.
module tb_matvec_c;
  import genre_pkg::*;

  localparam int NB = 7, LEVELS = 2, LOG2N = 4, NS = 300;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  psi_t psi [NB];
  logic [PIX_W-1:0] y = '0;
  logic [SIGMA2_W-1:0] sigma2 = 16'd625;
  qn_t  c   [NB];
  longint acc [NB];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  matvec_c #(.NB(NB), .LEVELS(LEVELS), .LOG2N(LOG2N)) dut (.clk, .rst_n, .clear, .en, .psi, .y, .sigma2, .c);

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (acc[i]) acc[i] = 0;
    foreach (psi[i]) psi[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < NS; step++) begin
      @(negedge clk);
      for (int i = 0; i < NB; i++) begin
        int lvl;
        longint exp;
        lvl = band_level(i, LEVELS);
        exp = ((acc[i] <<< (QN_FRAC - PSI_FRAC)) >>> LOG2N) - (longint'(sigma2) <<< (QN_FRAC - 2 * lvl));
        checks++;
        if (longint'(c[i]) != exp) begin
          failures++;
          if (failures < 10) $display("step %0d c[%0d] got %0d exp %0d", step, i, c[i], exp);
        end
      end
      clear = (step == NS / 2);
      en    = ($urandom % 4) != 0;
      y     = PIX_W'($urandom);
      foreach (psi[i]) psi[i] = psi_t'($urandom);
      if (clear) foreach (acc[i]) acc[i] = 0;
      else if (en)
        foreach (acc[i]) acc[i] += longint'(psi[i]) * longint'(y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
