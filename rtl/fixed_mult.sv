// fixed_mult -- the k-bit fixed point multiplier of Fig. 7.
//
// Multiplies two unsigned k-bit integers (the two dither-rounded operands) and
// returns the full 2k-bit product; interpreting the operands as fixed point
// values with a common scale is left to the caller, who divides the
// accumulated result by (2^k - 1)^2. The paper gives the unit by name and
// width only; one pipeline register at the output is this design's choice.
//
// Interface: a, b and in_valid are sampled at the clock edge; p and out_valid
// appear one clock later.
module fixed_mult #(
  parameter int unsigned K = dc_pkg::K_BITS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [K-1:0]   a,
  input  logic [K-1:0]   b,
  output logic           out_valid,
  output logic [2*K-1:0] p
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      p         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) p <= (2*K)'(a) * (2*K)'(b);
    end
  end

endmodule
