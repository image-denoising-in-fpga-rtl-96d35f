// haar2d_uwt -- one level of the undecimated 2D Haar transform with the
// individual (non-combined) kernels.
//
// The input is a row-vectorised image, one sample per accepted cycle, rows
// LINE samples long. With spacing D = L/2 = 2^(j-1) for level j, the four
// corners of the kernel are
//   D = x(n)            the current sample
//   C = x(n - D)        D samples to the left   (1 x L/2 delay)
//   B = x(n - D*LINE)   D rows up               (L/2 x LINE delay)
//   A = x(n - D*LINE-D) D rows up, D to the left (tap after B)
// and the sub-bands are formed with the shared partial sums D+A, D-A, C+B, C-B:
//   LH = D - A + C - B      HL = D - A - C + B
//   HH = D + A - C - B      LL = D + A + C + B
// Eight additions per input sample, as in the paper. The outputs are the raw
// sums, W_IN+2 bits, without the 1/4 normalisation; the caller shifts them to
// its number format. Outputs are registered: latency one accepted sample.
module haar2d_uwt #(
  parameter int W_IN = 16,
  parameter int D    = 1,
  parameter int LINE = 512
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic signed [W_IN-1:0] x,
  output logic signed [W_IN+1:0] lh,
  output logic signed [W_IN+1:0] hl,
  output logic signed [W_IN+1:0] hh,
  output logic signed [W_IN+1:0] ll
);

  logic [W_IN-1:0] a_raw, b_raw, c_raw;
  logic signed [W_IN+1:0] a, b, c, d;
  logic signed [W_IN+1:0] dpa, dma, cpb, cmb;

  delay_line #(.W(W_IN), .DEPTH(D * LINE)) u_dl_b (
    .clk, .rst_n, .en, .d(x), .q(b_raw));
  delay_line #(.W(W_IN), .DEPTH(D)) u_dl_a (
    .clk, .rst_n, .en, .d(b_raw), .q(a_raw));
  delay_line #(.W(W_IN), .DEPTH(D)) u_dl_c (
    .clk, .rst_n, .en, .d(x), .q(c_raw));

  always_comb begin
    a   = (W_IN+2)'(signed'(a_raw));
    b   = (W_IN+2)'(signed'(b_raw));
    c   = (W_IN+2)'(signed'(c_raw));
    d   = (W_IN+2)'(x);
    dpa = d + a;
    dma = d - a;
    cpb = c + b;
    cmb = c - b;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lh <= '0;
      hl <= '0;
      hh <= '0;
      ll <= '0;
    end else if (en) begin
      lh <= dma + cmb;
      hl <= dma - cmb;
      hh <= dpa - cpb;
      ll <= dpa + cpb;
    end

endmodule
