// matvec_c -- forms c = (Psi^T y - q) / N, the right-hand side of
// Q alpha = c.
//
// One row of Psi and the matching noisy pixel y arrive per accepted cycle;
// NB multipliers accumulate psi_i * y. q_i = N sigma^2 H_i(1,1), where
// H_i(1,1), the diagonal of the composite analysis/synthesis filter of
// column i, is 2^-2j for a level-j column with these kernels (the sum of the
// squared kernel taps). After the division by N = 2^LOG2N the correction is
// sigma^2 * 2^-2j, which is a shift of the noise-variance input; it is
// subtracted with plain adders. Output: QN_FRAC = 12 fraction bits,
// combinational from the accumulators. `clear` has priority over `en`.
module matvec_c
  import genre_pkg::*;
#(
  parameter int NB     = 16,
  parameter int LEVELS = 5,
  parameter int LOG2N  = 18
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                en,
  input  psi_t                psi [NB],
  input  logic [PIX_W-1:0]    y,
  input  logic [SIGMA2_W-1:0] sigma2,
  output qn_t                 c   [NB]
);

  localparam int PW    = PSI_W + PIX_W + 1;
  localparam int ACC_W = PW + LOG2N;

  for (genvar i = 0; i < NB; i++) begin : g_lane
    localparam int LVL = band_level(i, LEVELS);
    localparam int QSH = QN_FRAC - 2 * LVL;   // sigma^2 * 2^-2j in QN_FRAC units
    logic signed [ACC_W-1:0] acc;
    logic signed [PW-1:0]    prod;
    logic signed [QN_W-1:0]  qterm;
    logic signed [QN_W-1:0]  scaled;

    assign prod = psi[i] * signed'({1'b0, y});

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)     acc <= '0;
      else if (clear) acc <= '0;
      else if (en)    acc <= acc + ACC_W'(prod);

    if (QSH >= 0) begin : g_qshl
      assign qterm = QN_W'({1'b0, sigma2}) <<< QSH;
    end else begin : g_qshr
      assign qterm = QN_W'({1'b0, sigma2}) >>> (-QSH);
    end

    assign scaled = QN_W'(((ACC_W+QN_FRAC)'(acc)) <<< (QN_FRAC - PSI_FRAC) >>> LOG2N);
    assign c[i]   = scaled - qterm;
  end

endmodule
