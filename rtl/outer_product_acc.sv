// outer_product_acc -- accumulates Q = Psi^T Psi as a sum of outer
// products of the rows of Psi.
//
// One row of Psi (NB values) arrives per accepted cycle (`en`). Because Q
// is symmetric only the NB(NB+1)/2 entries on and above the diagonal are
// computed: one multiplier and one accumulator each (136 for NB = 16). The
// lower triangle is the reflection of the upper one. `clear` zeroes the
// accumulators at the start of an analysis pass and has priority over `en`.
// The output is Q divided by the pixel count N = 2^LOG2N (an arithmetic
// shift), with QN_FRAC = 12 fraction bits; dividing Q and c by the same N
// leaves the solution alpha unchanged and keeps the gradient step size
// meaningful. Accumulators are 2*PSI_W + LOG2N bits wide and cannot
// overflow for up to 2^LOG2N rows. Latency: the output follows the last
// accumulated row by one cycle.
module outer_product_acc
  import genre_pkg::*;
#(
  parameter int NB    = 16,
  parameter int LOG2N = 18
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic en,
  input  psi_t psi [NB],
  output qn_t  q   [NB][NB]
);

  localparam int ACC_W = 2 * PSI_W + LOG2N;

  for (genvar i = 0; i < NB; i++) begin : g_row
    for (genvar j = i; j < NB; j++) begin : g_col
      logic signed [ACC_W-1:0]   acc;
      logic signed [2*PSI_W-1:0] prod;

      assign prod = psi[i] * psi[j];

      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n)     acc <= '0;
        else if (clear) acc <= '0;
        else if (en)    acc <= acc + ACC_W'(prod);

      assign q[i][j] = qn_t'(acc >>> LOG2N);
      if (j != i) begin : g_mirror
        assign q[j][i] = qn_t'(acc >>> LOG2N);
      end
    end
  end

endmodule
