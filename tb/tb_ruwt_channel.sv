// tb_ruwt_channel -- four recomposition channels (level 1 LH, level 2 HL,
// level 3 HH, level 5 LL) fed with reference decomposition bands; each
// output must equal the reference column of Psi centred on pixel
// p = n - 3 - (L-1)(LINE+1) at accepted sample n (latency three).
module tb_ruwt_channel;
  import genre_pkg::*;
  import genre_ref_pkg::*;

  localparam int LINE = 64, ROWS = 40, LEVELS = 5, N = LINE * ROWS;
  localparam int NCH = 4;
  localparam int COL [NCH] = '{0, 4, 8, 15};   // Psi columns under test
  localparam int LVL [NCH] = '{1, 2, 3, 5};

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  smp_t b [NCH];
  psi_t psi [NCH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ruwt_channel #(.LINE(LINE), .LEVEL(1), .BAND(BAND_LH)) dut0 (.clk, .rst_n, .en, .b(b[0]), .psi(psi[0]));
  ruwt_channel #(.LINE(LINE), .LEVEL(2), .BAND(BAND_HL)) dut1 (.clk, .rst_n, .en, .b(b[1]), .psi(psi[1]));
  ruwt_channel #(.LINE(LINE), .LEVEL(3), .BAND(BAND_HH)) dut2 (.clk, .rst_n, .en, .b(b[2]), .psi(psi[2]));
  ruwt_channel #(.LINE(LINE), .LEVEL(5), .BAND(BAND_LL)) dut3 (.clk, .rst_n, .en, .b(b[3]), .psi(psi[3]));

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  genre_model m;
  byte unsigned img[];

  initial begin
    make_image(LINE, ROWS, 30, 21, img);
    m = new(LINE, ROWS, LEVELS);
    m.run_filter_bank(img, 1'b1);
    foreach (b[k]) b[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < N + m.LAT;) begin
      @(negedge clk);
      en = ($urandom % 5) != 0;
      for (int k = 0; k < NCH; k++) b[k] = smp_t'(m.bd[COL[k] * m.TT + m.OFF + step]);
      if (en) begin
        for (int k = 0; k < NCH; k++) begin
          int p;
          p = step - 3 - ((1 << LVL[k]) - 1) * (LINE + 1);
          if (p >= 0 && p < N) begin
            checks++;
            if (longint'(psi[k]) != m.psi[COL[k] * N + p]) begin
              failures++;
              if (failures < 10) $display("col %0d p %0d got %0d exp %0d", COL[k], p, psi[k], m.psi[COL[k] * N + p]);
            end
          end
        end
        step++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
