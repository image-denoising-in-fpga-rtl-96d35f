// tb_haar_decompose -- drives the decomposition side with reference LL
// bands (as ll_subband_gen would deliver them) and checks all 16 outputs:
// the level-j bands must appear delay_j + j accepted samples after their
// anchor, delay_j = (LEVELS-j) + (2^LEVELS - 2^j)(LINE+1).
module tb_haar_decompose;
  import genre_pkg::*;
  import genre_ref_pkg::*;

  localparam int LINE = 64, ROWS = 40, LEVELS = 5, NB = 16, N = LINE * ROWS;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  smp_t ll [LEVELS];
  smp_t band [NB];
  int checks = 0, failures = 0, nonzero = 0;

  always #5 clk = ~clk;

  haar_decompose #(.LINE(LINE), .LEVELS(LEVELS)) dut (.clk, .rst_n, .en, .ll, .band);

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  genre_model m;
  byte unsigned img[];

  initial begin
    make_image(LINE, ROWS, 30, 9, img);
    m = new(LINE, ROWS, LEVELS);
    m.run_filter_bank(img, 1'b0);
    foreach (ll[j]) ll[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < N + m.LAT;) begin
      @(negedge clk);
      en = ($urandom % 5) != 0;
      for (int j = 0; j < LEVELS; j++)
        ll[j] = (step - j >= 0) ? smp_t'(m.ll[j * m.TT + m.OFF + step - j]) : smp_t'(0);
      if (en) begin
        for (int i = 0; i < NB; i++) begin
          int j, dly, an;
          longint exp;
          j   = (i >= 3 * LEVELS) ? LEVELS : i / 3 + 1;
          dly = (LEVELS - j) + ((1 << LEVELS) - (1 << j)) * (LINE + 1);
          an  = step - j - dly;
          exp = (an + m.OFF >= 0) ? m.bd[i * m.TT + m.OFF + an] : 0;
          checks++;
          if (exp != 0) nonzero++;
          if (longint'(band[i]) != exp) begin
            failures++;
            if (failures < 10) $display("band %0d step %0d got %0d exp %0d", i, step, band[i], exp);
          end
        end
        step++;
      end
    end
    checks++;
    if (nonzero < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
