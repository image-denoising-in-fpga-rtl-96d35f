// genre_denoiser -- GenRE-Haar image denoiser (top level).
//
// The image (IMG_W x IMG_H, row-vectorised, 8-bit pixels) is streamed in
// twice. The Haar filter bank turns each pixel into one row of Psi, the 16
// sub-band images of a five-level undecimated Haar transform after
// recomposition. The first pass (analyse = 1) accumulates Q = Psi^T Psi
// and c = Psi^T y - q, then gradient descent solves Q alpha = c for the
// per-sub-band shrinkage factors. The second pass (analyse = 0) outputs
// x_hat = Psi alpha. Two passes are needed because Psi (N x 16 words) is far
// too large to store. analyse plays the part of the Analyse/Denoise input: it
// enables the shrinkage estimator when high and the denoise stage when low.
//
// Interface: pix/pix_valid/pix_ready is a valid-ready stream; a transfer
// happens when both are high, and the source may pause at any time. The
// `analyse` level is sampled with the first pixel of a pass. After the
// last pixel the controller feeds LAT zero samples through the filter bank
// (pix_ready low) to push out the last rows of Psi and to leave every
// delay line and running sum at zero for the next pass. After an analyse
// pass it runs the solver (pix_ready low for GD_ITERS*17 cycles), then
// raises alpha_valid. The denoised stream appears on xhat/xhat_valid, in
// pixel order, two cycles after the row of Psi it comes from; its first
// pixel follows the first input pixel by LAT accepted samples. sigma2 is
// the noise variance in pixel units and must be held during a solve.
//
// Timing at the default size (512 x 512, LEVELS = 5, LINE 512): LAT =
// 15911; one pass with flush takes 262144 + 15911 cycles at one pixel per
// cycle, the solve 4096 * 17 = 69632 cycles. Image sizes must be powers of
// two (the normalisation by N is a shift). The two-pass scheme, the block
// structure and the arithmetic follow the paper; the handshake, the flush,
// the normalisation by N, the extra 1/4 scaling the step size is applied to
// (see gradient_descent) and the iteration count are this design's.
// rst_n also appears in the `disable iff` of the two handshake assertions,
// which lint reports as a reset used both asynchronously and synchronously;
// the assertions are not hardware, so the warning stands.
module genre_denoiser
  import genre_pkg::*;
#(
  parameter int IMG_W    = 512,
  parameter int IMG_H    = 512,
  parameter int LEVELS   = 5,
  parameter int GD_ITERS = 4096
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                analyse,
  input  logic [SIGMA2_W-1:0] sigma2,
  input  logic                pix_valid,
  input  logic [PIX_W-1:0]    pix,
  output logic                pix_ready,
  output logic                xhat_valid,
  output logic [PIX_W-1:0]    xhat,
  output alpha_t              alpha [3*LEVELS+1],
  output logic                alpha_valid,
  output logic                busy
);

  localparam int NB    = 3 * LEVELS + 1;
  localparam int N     = IMG_W * IMG_H;
  localparam int LOG2N = $clog2(N);
  localparam int LAT   = fb_latency(LEVELS, IMG_W);
  localparam int KW    = $clog2(N + LAT + 1);

  typedef enum logic [1:0] {S_IDLE, S_PASS, S_FLUSH, S_SOLVE} state_e;
  state_e state;

  logic          mode_analyse;
  logic [KW-1:0] k;            // accepted samples in the current pass
  logic          adv, row_valid, clear;
  logic [PIX_W-1:0] fb_x, y_al;
  psi_t  psi [NB];
  qn_t   q   [NB][NB];
  qn_t   c   [NB];
  logic  gd_start, gd_busy, gd_done;

  assign pix_ready = (state == S_IDLE) || (state == S_PASS);
  assign adv       = (pix_ready && pix_valid) || (state == S_FLUSH);
  assign fb_x      = (state == S_FLUSH) ? '0 : pix;
  assign row_valid = adv && (k >= KW'(LAT));
  assign clear     = (state == S_IDLE) && pix_valid && analyse;
  assign gd_start  = (state == S_FLUSH) && (k == KW'(N + LAT - 1)) && mode_analyse;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state        <= S_IDLE;
      mode_analyse <= 1'b0;
      k            <= '0;
      alpha_valid  <= 1'b0;
    end else begin
      if (adv) k <= k + 1'b1;
      unique case (state)
        S_IDLE: if (pix_valid) begin
          mode_analyse <= analyse;
          if (analyse) alpha_valid <= 1'b0;
          state <= (N == 1) ? S_FLUSH : S_PASS;
        end
        S_PASS: if (adv && k == KW'(N - 1)) state <= S_FLUSH;
        S_FLUSH: if (k == KW'(N + LAT - 1)) begin
          k     <= '0;
          state <= mode_analyse ? S_SOLVE : S_IDLE;
        end
        S_SOLVE: if (gd_done) begin
          alpha_valid <= 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end

  haar_filter_bank #(.LINE(IMG_W), .LEVELS(LEVELS)) u_fb (
    .clk, .rst_n, .en(adv), .x(fb_x), .psi, .y_al);

  outer_product_acc #(.NB(NB), .LOG2N(LOG2N)) u_q (
    .clk, .rst_n, .clear, .en(row_valid && mode_analyse), .psi, .q);

  matvec_c #(.NB(NB), .LEVELS(LEVELS), .LOG2N(LOG2N)) u_c (
    .clk, .rst_n, .clear, .en(row_valid && mode_analyse), .psi, .y(y_al),
    .sigma2, .c);

  gradient_descent #(.NB(NB), .ITERS(GD_ITERS)) u_gd (
    .clk, .rst_n, .start(gd_start), .q, .c, .alpha,
    .busy(gd_busy), .done(gd_done));

  denoise #(.NB(NB)) u_dn (
    .clk, .rst_n, .en(row_valid && !mode_analyse), .psi, .alpha,
    .valid(xhat_valid), .xhat);

  // The controller only changes state on the cycles the rules below expect.
  a_flush_ready: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_FLUSH |-> !pix_ready);
  a_solve_gd: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_SOLVE |-> gd_busy || gd_done);

endmodule
