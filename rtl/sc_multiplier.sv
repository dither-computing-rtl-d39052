// sc_multiplier -- multiplication of two pulse streams by bitwise AND.
//
// The product z = x y of two numbers held as N-pulse sequences is the sequence
// Z_i = X_i AND Y_i, whose count of ones estimates N z. With x in Format 1
// (dither_encoder) and y in Format 2 (spread_encoder) the estimate is unbiased
// with O(1/N^2) mean squared error, as the paper shows; the gate itself is the
// paper's. Registering the output is this design's choice.
//
// Interface: x and y must be aligned (valid and last in the same cycles; an
// assertion checks it). z follows one clock later, one pulse per clock.
module sc_multiplier (
  input  logic           clk,
  input  logic           rst_n,
  input  dc_pkg::pulse_t x,
  input  dc_pkg::pulse_t y,
  output dc_pkg::pulse_t z
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) z <= dc_pkg::PULSE_IDLE;
    else begin
      z.valid <= x.valid & y.valid;
      z.bit_  <= x.valid & y.valid & x.bit_ & y.bit_;
      z.last  <= x.valid & y.valid & x.last;
    end
  end

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (x.valid == y.valid) && (!x.valid || x.last == y.last))
    else $error("sc_multiplier: operand streams are not aligned");

endmodule
