// haar_filter_bank -- the Haar filter bank of the GenRE denoiser: turns the
// row-vectorised noisy image into the 3*LEVELS+1 columns of Psi, one row of
// Psi per accepted pixel.
//
// Structure (left to right): ll_subband_gen computes LL_1..LL_(LEVELS-1)
// ahead of time; haar_decompose delays them per level and applies the 2D
// Haar filters with the individual kernels (2D UWT); one ruwt_channel per
// sub-band applies the recursive recomposition filter (2D RUWT). Column i of
// Psi is psi[i]; see genre_pkg for the numbering and number formats.
// psi[i] is sub-band i of the image filtered by the zero-phase kernel
// R_i D_i centred on one pixel p, the same pixel for every i; pixels before
// the first one of a pass and after the last one are taken as zero.
// The noisy pixel p itself is delivered alongside as y_al, so that Psi^T y
// can be formed in step.
// Timing: with `en` high for every sample (image pixels followed by zeros
// while flushing), the row centred on pixel p is on the outputs during the
// accepted sample p + LAT, LAT = genre_pkg::fb_latency(LEVELS, LINE)
// (15911 samples for 512-pixel lines and five levels).
module haar_filter_bank
  import genre_pkg::*;
#(
  parameter int LINE   = 512,
  parameter int LEVELS = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [PIX_W-1:0] x,
  output psi_t             psi [3*LEVELS+1],
  output logic [PIX_W-1:0] y_al
);

  localparam int NB  = 3 * LEVELS + 1;
  localparam int LAT = fb_latency(LEVELS, LINE);

  smp_t ll   [LEVELS];
  smp_t band [NB];

  ll_subband_gen #(.LINE(LINE), .LEVELS(LEVELS)) u_llgen (
    .clk, .rst_n, .en, .x, .ll);

  haar_decompose #(.LINE(LINE), .LEVELS(LEVELS)) u_dec (
    .clk, .rst_n, .en, .ll, .band);

  for (genvar i = 0; i < NB; i++) begin : g_rec
    ruwt_channel #(
      .LINE (LINE),
      .LEVEL(band_level(i, LEVELS)),
      .BAND (band_kind(i, LEVELS))
    ) u_ch (
      .clk, .rst_n, .en, .b(band[i]), .psi(psi[i]));
  end

  delay_line #(.W(PIX_W), .DEPTH(LAT)) u_y_align (
    .clk, .rst_n, .en, .d(x), .q(y_al));

endmodule
