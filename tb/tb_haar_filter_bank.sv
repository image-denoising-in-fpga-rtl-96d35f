// tb_haar_filter_bank -- checks every column of Psi and the aligned pixel
// against the bit-true reference (direct box sums) on a 64 x 40 noisy
// image with random input bubbles. Also checks the near-perfect
// reconstruction sum_i psi_i = y within one pixel, which does not rely on
// the reference model, and the latency: the row centred on pixel p must
// appear at accepted sample p + LAT and not earlier.
module tb_haar_filter_bank;
  import genre_pkg::*;
  import genre_ref_pkg::*;

  localparam int LINE   = 64;
  localparam int ROWS   = 40;
  localparam int LEVELS = 5;
  localparam int NB     = 3 * LEVELS + 1;
  localparam int N      = LINE * ROWS;
  localparam int LAT    = fb_latency(LEVELS, LINE);

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [7:0] x = '0, y_al;
  psi_t psi [NB];
  int checks = 0, failures = 0, recon_bad = 0, bubbles = 0;

  always #5 clk = ~clk;

  haar_filter_bank #(.LINE(LINE), .LEVELS(LEVELS)) dut (
    .clk, .rst_n, .en, .x, .psi, .y_al);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  genre_model m;
  byte unsigned img[];

  initial begin
    make_image(LINE, ROWS, 30, 11, img);
    m = new(LINE, ROWS, LEVELS);
    m.run_filter_bank(img, 1'b1);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < N + LAT;) begin
      @(negedge clk);
      en = ($urandom % 5) != 0;
      x  = (step < N) ? img[step] : 8'd0;
      if (!en) bubbles++;
      if (en) begin
        if (step >= LAT) begin
          int p;
          longint sum;
          p   = step - LAT;
          sum = 0;
          for (int i = 0; i < NB; i++) begin
            checks++;
            sum += longint'(psi[i]);
            if (longint'(psi[i]) != m.psi[i * N + p]) begin
              failures++;
              if (failures < 10)
                $display("psi mismatch p=%0d col=%0d got=%0d exp=%0d", p, i, psi[i], m.psi[i * N + p]);
            end
          end
          checks++;
          if (y_al != img[p]) begin
            failures++;
            if (failures < 10) $display("y_al mismatch p=%0d got=%0d exp=%0d", p, y_al, img[p]);
          end
          checks++;
          if (sum - 64 * longint'(img[p]) > 64 || 64 * longint'(img[p]) - sum > 64) begin
            recon_bad++;
            failures++;
            if (recon_bad < 5) $display("reconstruction p=%0d sum/64=%0d y=%0d", p, sum / 64, img[p]);
          end
        end else if (step == LAT - 1) begin
          // one sample before the first row: the outputs must not yet hold it
          checks++;
          if (psi[NB-1] == psi_t'(m.psi[(NB - 1) * N]) && psi[NB-1] != 0 &&
              psi[0] == psi_t'(m.psi[0]) && psi[1] == psi_t'(m.psi[N]) && psi[0] != 0) begin
            failures++;
            $display("row 0 appeared early");
          end
        end
        step++;
      end
    end
    checks++;
    if (bubbles == 0) failures++;
    $display("bubbles=%0d reconstruction_misses=%0d", bubbles, recon_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
