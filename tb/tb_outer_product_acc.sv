// tb_outer_product_acc -- random Psi rows (with enable gaps and a clear in
// the middle of the run) into a 4-column accumulator with N = 256; every
// cycle all 16 outputs, including the mirrored lower triangle, are compared
// with floor(sum psi_i psi_j / N).
module tb_outer_product_acc;
  import genre_pkg::*;

  localparam int NB = 4, LOG2N = 8, NS = 300;  // at most N rows between clears

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  psi_t psi [NB];
  qn_t  q   [NB][NB];
  longint acc [NB][NB];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  outer_product_acc #(.NB(NB), .LOG2N(LOG2N)) dut (.clk, .rst_n, .clear, .en, .psi, .q);

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (acc[i, j]) acc[i][j] = 0;
    foreach (psi[i]) psi[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < NS; step++) begin
      @(negedge clk);
      // outputs reflect everything accepted so far
      for (int i = 0; i < NB; i++)
        for (int j = 0; j < NB; j++) begin
          checks++;
          if (longint'(q[i][j]) != (acc[i][j] >>> LOG2N)) begin
            failures++;
            if (failures < 10) $display("step %0d q[%0d][%0d] got %0d exp %0d", step, i, j, q[i][j], acc[i][j] >>> LOG2N);
          end
        end
      clear = (step == NS / 2);
      en    = ($urandom % 4) != 0;
      foreach (psi[i]) psi[i] = psi_t'($urandom);
      if (clear) foreach (acc[i, j]) acc[i][j] = 0;
      else if (en)
        foreach (acc[i, j]) acc[i][j] += longint'(psi[i]) * longint'(psi[j]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
