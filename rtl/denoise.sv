// denoise -- output stage: x_hat = Psi alpha, one pixel per row of Psi.
//
// Stage 1 registers the NB products alpha_i * psi_i (NB multipliers);
// stage 2 adds them, rounds to the nearest integer (half rounds up) and
// clamps the result to the 8-bit pixel range. Rounding to an 8-bit integer
// follows the paper; clamping is this design's choice. `en` marks a valid
// input row and is carried along as `valid`: latency two cycles, one pixel
// per cycle.
module denoise
  import genre_pkg::*;
#(
  parameter int NB = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  psi_t             psi   [NB],
  input  alpha_t           alpha [NB],
  output logic             valid,
  output logic [PIX_W-1:0] xhat
);

  localparam int PW    = PSI_W + ALPHA_W;
  localparam int FR    = PSI_FRAC + ALPHA_FRAC;
  localparam int SUM_W = PW + $clog2(NB) + 1;

  logic signed [PW-1:0] prod [NB];
  logic                 v1;
  logic signed [SUM_W-1:0] sum, rnd;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v1 <= 1'b0;
      for (int i = 0; i < NB; i++) prod[i] <= '0;
    end else begin
      v1 <= en;
      if (en)
        for (int i = 0; i < NB; i++) prod[i] <= psi[i] * alpha[i];
    end

  always_comb begin
    sum = '0;
    for (int i = 0; i < NB; i++) sum += SUM_W'(prod[i]);
    rnd = (sum + (SUM_W'(1) <<< (FR - 1))) >>> FR;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      valid <= 1'b0;
      xhat  <= '0;
    end else begin
      valid <= v1;
      if (v1) begin
        if (rnd < 0)                          xhat <= '0;
        else if (rnd > SUM_W'((1 << PIX_W) - 1)) xhat <= '1;
        else                                  xhat <= rnd[PIX_W-1:0];
      end
    end

endmodule
