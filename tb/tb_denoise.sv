// tb_denoise -- random Psi rows and weights into a 4-column output stage.
// Every input accepted on `en` must come out exactly two cycles later, in
// order, as round-half-up(sum psi_i alpha_i / 2^30) clamped to 0..255; the
// test also counts that both clamp limits and the in-range path occur.
module tb_denoise;
  import genre_pkg::*;

  localparam int NB = 4, NS = 2000;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  psi_t   psi   [NB];
  alpha_t alpha [NB];
  logic   valid;
  logic [PIX_W-1:0] xhat;
  int exp_q [$];
  int sent = 0, got = 0, lo = 0, hi = 0, mid = 0;
  int checks = 0, failures = 0;
  logic en_d1 = 1'b0, en_d2 = 1'b0;

  always #5 clk = ~clk;

  denoise #(.NB(NB)) dut (.clk, .rst_n, .en, .psi, .alpha, .valid, .xhat);

  initial begin : watchdog
    repeat (NS + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (psi[i]) psi[i] = '0;
    foreach (alpha[i]) alpha[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int step = 0; step < NS; step++) begin
      @(negedge clk);
      // output side: valid must track en two cycles back
      checks++;
      if (valid !== en_d2) failures++;
      if (valid) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        got++;
        if (int'(xhat) != e) begin
          failures++;
          if (failures < 10) $display("output %0d got %0d exp %0d", got, xhat, e);
        end
      end
      en_d2 = en_d1;
      // input side
      en = (step < NS - 4) && (($urandom % 3) != 0);
      en_d1 = en;
      foreach (psi[i]) psi[i] = psi_t'(int'($urandom % 40000) - 20000);
      foreach (alpha[i]) alpha[i] = alpha_t'(int'($urandom % (1 << 25)) - (1 << 23));
      if (en) begin
        longint s;
        longint r;
        s = 0;
        foreach (psi[i]) s += longint'(psi[i]) * longint'(alpha[i]);
        r = (s + (longint'(1) <<< 29)) >>> 30;
        if (r < 0) begin r = 0; lo++; end
        else if (r > 255) begin r = 255; hi++; end
        else mid++;
        exp_q.push_back(int'(r));
        sent++;
      end
    end
    checks += 4;
    if (got != sent) failures++;
    if (lo == 0) failures++;
    if (hi == 0) failures++;
    if (mid == 0) failures++;
    $display("sent %0d got %0d  low-clamp %0d high-clamp %0d in-range %0d", sent, got, lo, hi, mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
