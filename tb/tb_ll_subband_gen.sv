// tb_ll_subband_gen -- feeds a 64 x 40 noisy image (with bubbles) into the
// LL generator and compares LL_1..LL_4 with the reference cascade: ll[j]
// must hold the LL_j value anchored j accepted samples back.
module tb_ll_subband_gen;
  import genre_pkg::*;
  import genre_ref_pkg::*;

  localparam int LINE = 64, ROWS = 40, LEVELS = 5, N = LINE * ROWS;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [7:0] x = '0;
  smp_t ll [LEVELS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ll_subband_gen #(.LINE(LINE), .LEVELS(LEVELS)) dut (.clk, .rst_n, .en, .x, .ll);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  genre_model m;
  byte unsigned img[];

  initial begin
    make_image(LINE, ROWS, 30, 3, img);
    m = new(LINE, ROWS, LEVELS);
    m.run_filter_bank(img, 1'b0);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < N + 100;) begin
      @(negedge clk);
      en = ($urandom % 5) != 0;
      x  = (step < N) ? img[step] : 8'd0;
      if (en) begin
        for (int j = 1; j < LEVELS; j++) begin
          longint exp;
          exp = m.ll[j * m.TT + m.OFF + step - j];
          checks++;
          if (longint'(ll[j]) != exp) begin
            failures++;
            if (failures < 10) $display("LL%0d step %0d got %0d exp %0d", j, step, ll[j], exp);
          end
        end
        step++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
