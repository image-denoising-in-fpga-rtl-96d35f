// ll_subband_gen -- computes the low-pass (LL) sub-bands of levels 1 to
// LEVELS-1 ahead of the decomposition filters.
//
// The stages form a cascade: stage j applies the LL kernel of a 2D Haar
// filter with spacing 2^(j-1) to the LL band of stage j-1 (stage 0 is the
// image), divides by four and truncates to min(2j,6) fraction bits. Every
// stage is one accepted sample deep, so ll[j] at any moment holds the LL_j
// value whose 2^j x 2^j support ends (bottom-right) j samples back in the
// input stream. ll[0] is the input pixel itself, widened to a sample word.
// Because the low-pass bands feed the deeper levels, producing them early
// and delaying them (haar_decompose) is what lets all levels leave the
// decomposition side aligned. Only the LL output of each haar2d_uwt stage is
// used here; its three detail sums are left unconnected and are removed by
// synthesis.
module ll_subband_gen
  import genre_pkg::*;
#(
  parameter int LINE   = 512,
  parameter int LEVELS = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [PIX_W-1:0] x,
  output smp_t             ll [LEVELS]
);

  assign ll[0] = smp_t'({1'b0, x});

  for (genvar j = 1; j < LEVELS; j++) begin : g_stage
    localparam int SH = dec_frac(j - 1) + 2 - dec_frac(j);
    logic signed [SMP_W+1:0] s_lh, s_hl, s_hh, s_ll;

    haar2d_uwt #(.W_IN(SMP_W), .D(1 << (j - 1)), .LINE(LINE)) u_flt (
      .clk, .rst_n, .en, .x(ll[j-1]),
      .lh(s_lh), .hl(s_hl), .hh(s_hh), .ll(s_ll));

    assign ll[j] = smp_t'(s_ll >>> SH);
  end

endmodule
