// gradient_descent -- solves Q alpha = c for the shrinkage parameters by
// gradient descent, alpha_k = alpha_(k-1) + mu (c - Q alpha_(k-1)).
//
// mu = 2^-MU_SHIFT = 2^-13 (a shift) and alpha_0 = 1 for every sub-band, as
// in the paper. The product Q alpha uses NB multipliers: in each of NB
// cycles one column of Q is multiplied by one entry of alpha and added into
// NB row accumulators; one more cycle updates alpha. An iteration therefore
// takes NB+1 cycles and a solve ITERS*(NB+1) cycles after `start`, then
// `done` pulses for one cycle and alpha holds its value until the next
// start. Q and c must stay constant while `busy` is high.
// Formats: Q and c with QN_FRAC = 12 fraction bits, alpha with
// ALPHA_FRAC = 24; the product Q alpha is kept at full width, the residual
// is taken with 24 fraction bits and shifted by MU_SHIFT + GD_PRESCALE
// (floor). The extra shift by GD_PRESCALE = 2 is this design's: it applies
// mu = 2^-13 to Q/(4N) and c/(4N) instead of Q/N and c/N. With Q/N the
// iteration diverges once the largest eigenvalue, about the mean square of
// the LL5 band, passes 2/mu = 16384 (a mid-grey image of mean 128 already
// does); with Q/(4N) the limit is 65536, above any 8-bit image's low band.
// The solution alpha is unchanged by the scaling.
// The number of iterations is this design's choice; the paper does not
// state one.
module gradient_descent
  import genre_pkg::*;
#(
  parameter int NB    = 16,
  parameter int ITERS = 4096
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  qn_t    q     [NB][NB],
  input  qn_t    c     [NB],
  output alpha_t alpha [NB],
  output logic   busy,
  output logic   done
);

  localparam int PW    = QN_W + ALPHA_W;
  localparam int ACC_W = PW + $clog2(NB) + 1;
  localparam int KW    = (NB > 1) ? $clog2(NB) : 1;
  localparam int IW    = $clog2(ITERS + 1);
  localparam int RW    = ACC_W;  // residual width, 24 fraction bits

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_UPDATE} state_e;
  state_e state;

  logic [KW-1:0] k;
  logic [IW-1:0] iter;
  logic signed [ACC_W-1:0] acc [NB];
  logic signed [RW-1:0]    res [NB];

  // Residual c - Q alpha with ALPHA_FRAC fraction bits.
  always_comb
    for (int i = 0; i < NB; i++)
      res[i] = (RW'(c[i]) <<< (ALPHA_FRAC - QN_FRAC)) - (acc[i] >>> QN_FRAC);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
      iter  <= '0;
      done  <= 1'b0;
      for (int i = 0; i < NB; i++) begin
        alpha[i] <= alpha_t'(1) <<< ALPHA_FRAC;
        acc[i]   <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          k     <= '0;
          iter  <= '0;
          for (int i = 0; i < NB; i++) begin
            alpha[i] <= alpha_t'(1) <<< ALPHA_FRAC;
            acc[i]   <= '0;
          end
        end
        S_MAC: begin
          for (int i = 0; i < NB; i++)
            acc[i] <= acc[i] + ACC_W'(q[i][k] * alpha[k]);
          if (k == KW'(NB - 1)) state <= S_UPDATE;
          k <= k + 1'b1;
        end
        S_UPDATE: begin
          for (int i = 0; i < NB; i++) begin
            alpha[i] <= alpha[i] + alpha_t'(res[i] >>> (MU_SHIFT + GD_PRESCALE));
            acc[i]   <= '0;
          end
          k <= '0;
          if (iter == IW'(ITERS - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_MAC;
          end
          iter <= iter + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end

  assign busy = (state != S_IDLE);

endmodule
