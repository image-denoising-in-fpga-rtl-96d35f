// ruwt_channel -- recursive recomposition filter (2D RUWT) for one sub-band.
//
// The level-j recomposition kernel is L x L (L = 2^j), one sign per L/2 x L/2
// quadrant, scaled by 1/L^2. It is a box filter of size L/2 x L/2 followed by
// the 2D individual Haar filter with spacing L/2:
//   row recursion     r(n) = r(n-1)    + b(n) - b(n-L/2)
//   column recursion  y(n) = y(n-LINE) + r(n) - r(n-(L/2)*LINE)
//   then haar2d_uwt on y and selection of one of its four outputs.
// The recomposition kernels are the decomposition kernels flipped in both
// directions; in the causal quadrant labelling of haar2d_uwt that turns LH
// into -LH and HL into -HL, and leaves HH and LL unchanged.
// The result is scaled by 2^-2j and truncated to 4 fraction bits at level 1
// and 6 above, then delivered with PSI_FRAC = 6 fraction bits.
// Widths grow as the paper gives them: k + log2(L/2) after the row
// recursion, k + 2log2(L) - 2 after the column recursion, k + 2log2(L)
// after the individual filter (k = SMP_W). The running sums are exact
// integers, so they return to zero after L/2 rows of zero input.
// Latency: three accepted samples (one register per stage).
module ruwt_channel
  import genre_pkg::*;
#(
  parameter int    LINE    = 512,
  parameter int    LEVEL   = 1,
  parameter band_e BAND    = BAND_HH
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  smp_t b,
  output psi_t psi
);

  localparam int H       = 1 << (LEVEL - 1);        // L/2
  localparam int RW      = SMP_W + LEVEL - 1;       // row-sum width
  localparam int CW      = SMP_W + 2 * (LEVEL - 1); // column-sum width
  localparam int IN_FRAC = dec_frac(LEVEL);
  localparam int OFRAC   = rec_frac(LEVEL);
  localparam int SH      = IN_FRAC + 2 * LEVEL - OFRAC;

  // Row recursion filter.
  logic [SMP_W-1:0]     b_old;
  logic signed [RW-1:0] rsum;

  delay_line #(.W(SMP_W), .DEPTH(H)) u_row_dl (
    .clk, .rst_n, .en, .d(b), .q(b_old));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  rsum <= '0;
    else if (en) rsum <= rsum + RW'(b) - RW'(signed'(b_old));

  // Column recursion filter.
  logic [RW-1:0]        r_old;
  logic [CW-1:0]        csum_fb;
  logic signed [CW-1:0] csum;

  delay_line #(.W(RW), .DEPTH(H * LINE)) u_col_dl (
    .clk, .rst_n, .en, .d(rsum), .q(r_old));
  delay_line #(.W(CW), .DEPTH(LINE - 1)) u_fb_dl (
    .clk, .rst_n, .en, .d(csum), .q(csum_fb));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  csum <= '0;
    else if (en) csum <= signed'(csum_fb) + CW'(rsum) - CW'(signed'(r_old));

  // 2D individual filter with spacing L/2.
  logic signed [CW+1:0] s_lh, s_hl, s_hh, s_ll, sel;

  haar2d_uwt #(.W_IN(CW), .D(H), .LINE(LINE)) u_ind (
    .clk, .rst_n, .en, .x(csum),
    .lh(s_lh), .hl(s_hl), .hh(s_hh), .ll(s_ll));

  always_comb begin
    unique case (BAND)
      BAND_LH: sel = -s_lh;
      BAND_HL: sel = -s_hl;
      BAND_HH: sel = s_hh;
      default: sel = s_ll;
    endcase
  end

  assign psi = psi_t'((sel >>> SH) <<< (PSI_FRAC - OFRAC));

endmodule
