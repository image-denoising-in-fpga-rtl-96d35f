// tb_haar2d_uwt -- random signed samples into a 2D Haar filter with spacing
// 2 on 8-sample lines; the four outputs are compared with LH/HL/HH/LL
// formed from A = x(n-2*8-2), B = x(n-2*8), C = x(n-2), D = x(n), zero
// before the first sample; latency one accepted sample.
module tb_haar2d_uwt;
  localparam int W = 10, D = 2, LINE = 8, NS = 400;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic signed [W-1:0] x = '0;
  logic signed [W+1:0] lh, hl, hh, ll;
  int hist [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  haar2d_uwt #(.W_IN(W), .D(D), .LINE(LINE)) dut (.clk, .rst_n, .en, .x, .lh, .hl, .hh, .ll);

  initial begin : watchdog
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int h(input int n);
    return (n < 0) ? 0 : hist[n];
  endfunction

  initial begin
    int step;
    step = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (step < NS) begin
      @(negedge clk);
      en = ($urandom % 4) != 0;
      x  = W'($urandom);
      if (en) begin
        if (step > 0) begin
          int n, a, b, c, dd;
          n  = step - 1;   // outputs hold the result for the previous sample
          a  = h(n - D * LINE - D);
          b  = h(n - D * LINE);
          c  = h(n - D);
          dd = h(n);
          checks += 4;
          if (int'(lh) != dd - a + c - b) failures++;
          if (int'(hl) != dd - a - c + b) failures++;
          if (int'(hh) != dd + a - c - b) failures++;
          if (int'(ll) != dd + a + c + b) failures++;
        end
        hist[step] = int'(x);
        step++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
