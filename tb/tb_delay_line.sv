// tb_delay_line -- drives five delay lines (depths 0, 1, 2, 5 and 37) with
// random data and random enable gaps and checks that each output equals the
// input DEPTH accepted samples earlier, and zero before that many samples.
module tb_delay_line;
  localparam int NS = 600;
  localparam int NDL = 5;
  localparam int DEPTHS [NDL] = '{0, 1, 2, 5, 37};

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [11:0] d = '0;
  logic [11:0] q [NDL];
  logic [11:0] hist [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar k = 0; k < NDL; k++) begin : g_dut
    delay_line #(.W(12), .DEPTH(DEPTHS[k])) dut (.clk, .rst_n, .en, .d, .q(q[k]));
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int step;
    step = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (step < NS) begin
      @(negedge clk);
      en = ($urandom % 3) != 0;
      d  = 12'($urandom);
      #1;
      if (en) begin
        hist[step] = d;
        for (int k = 0; k < NDL; k++) begin
          logic [11:0] exp;
          if (DEPTHS[k] == 0) exp = d;
          else exp = (step >= DEPTHS[k]) ? hist[step - DEPTHS[k]] : 12'd0;
          checks++;
          if (q[k] !== exp) begin
            failures++;
            if (failures < 10) $display("depth %0d step %0d got %h exp %h", DEPTHS[k], step, q[k], exp);
          end
        end
        step++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
