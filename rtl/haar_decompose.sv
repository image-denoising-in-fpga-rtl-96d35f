// haar_decompose -- decomposition side of the filter bank: per-level
// alignment delays followed by one 2D Haar filter per level.
//
// Level j takes the low-pass band LL_(j-1) from ll_subband_gen (LL_0 is the
// image), delays it and filters it with spacing 2^(j-1). It outputs LH, HL
// and HH of that level, divided by four and truncated to min(2j,6) fraction
// bits; the deepest level also outputs its LL band. The delays are chosen
// so that, after each band has gone through its own recomposition filter
// (whose window grows with the level), all columns of Psi refer to the same
// pixel:
//   delay_j = (LEVELS - j) + (2^LEVELS - 2^j) * (LINE + 1)
// The (LEVELS - j) term makes up for the register stages of the LL cascade,
// the other for the larger windows of the deeper levels. The delay sits on
// the filter inputs, where the words are narrowest; the deepest level needs
// none. Latency from ll[j-1] to the level-j outputs: delay_j + 1 samples.
module haar_decompose
  import genre_pkg::*;
#(
  parameter int LINE   = 512,
  parameter int LEVELS = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  smp_t ll   [LEVELS],
  output smp_t band [3*LEVELS+1]
);

  for (genvar j = 1; j <= LEVELS; j++) begin : g_level
    localparam int DLY = (LEVELS - j) + ((1 << LEVELS) - (1 << j)) * (LINE + 1);
    localparam int SH  = dec_frac(j - 1) + 2 - dec_frac(j);

    logic [SMP_W-1:0]        xin;
    logic signed [SMP_W+1:0] s_lh, s_hl, s_hh, s_ll;

    delay_line #(.W(SMP_W), .DEPTH(DLY)) u_align (
      .clk, .rst_n, .en, .d(ll[j-1]), .q(xin));

    haar2d_uwt #(.W_IN(SMP_W), .D(1 << (j - 1)), .LINE(LINE)) u_flt (
      .clk, .rst_n, .en, .x(signed'(xin)),
      .lh(s_lh), .hl(s_hl), .hh(s_hh), .ll(s_ll));

    assign band[3*(j-1)+0] = smp_t'(s_lh >>> SH);
    assign band[3*(j-1)+1] = smp_t'(s_hl >>> SH);
    assign band[3*(j-1)+2] = smp_t'(s_hh >>> SH);
    if (j == LEVELS) begin : g_ll
      assign band[3*LEVELS] = smp_t'(s_ll >>> SH);
    end
  end

endmodule
