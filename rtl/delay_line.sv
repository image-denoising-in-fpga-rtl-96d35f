// delay_line -- fixed delay of DEPTH accepted samples on a stream.
//
// This is every "Delay" box of the architecture: the L/2 and L/2 x 512 taps
// of the 2D Haar filters, the one-row feedback of the column recursion, the
// per-level alignment delays of the decomposition side and the alignment of
// the noisy pixel with Psi. The stream advances only when `en` is high, so
// DEPTH counts samples, not clock cycles.
//
// DEPTH 0 is a wire and DEPTH 1 a register. Larger depths use a circular
// buffer of DEPTH-1 words (a block RAM on an FPGA: one write and one
// synchronous read per sample, same address) followed by the output
// register. Until the buffer has been filled once the output is zero: the
// stream is taken to be zero before the first sample, which gives the filters
// zero padding without having to clear the RAM. Reset is asynchronous,
// active low.
module delay_line #(
  parameter int W     = 16,
  parameter int DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else if (DEPTH == 1) begin : g_reg
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)  q <= '0;
      else if (en) q <= d;
  end else begin : g_ram
    localparam int AW = (DEPTH > 2) ? $clog2(DEPTH - 1) : 1;
    localparam logic [AW-1:0] LAST = AW'(DEPTH - 2);

    logic [W-1:0]  mem [DEPTH-1];
    logic [AW-1:0] ptr;
    logic          primed;

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) begin
        ptr    <= '0;
        primed <= 1'b0;
      end else if (en) begin
        ptr <= (ptr == LAST) ? '0 : ptr + 1'b1;
        if (ptr == LAST) primed <= 1'b1;
      end

    always_ff @(posedge clk)
      if (en) mem[ptr] <= d;

    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)  q <= '0;
      else if (en) q <= primed ? mem[ptr] : '0;
  end

endmodule
