// dither_rounder -- dither rounding of a non-negative fixed-point number to k bits.
//
// Dither rounding replaces the random last bit of stochastic rounding by one
// pulse of a dither sequence: d(alpha, i) = floor(alpha) + X_i, where X is the
// dither representation (length N) of the fraction alpha - floor(alpha) and i is
// the index of this use of the operand. Used N times with the N indices of a
// sequence, the results average to alpha exactly in expectation, with an
// error of O(1/N) instead of O(1/sqrt(N)) for stochastic rounding. This is one
// "Dither rounding" box of Fig. 7.
//
// The result is clipped to the k-bit range [0, 2^k - 1] as the paper's k-bit
// quantizer does on overflow; `sat` flags a clipped result. Negative inputs do
// not occur (the paper restricts itself to non-negative numbers).
//
// Interface (combinational): alpha has K integer and A_FRAC fraction bits,
// already scaled to the quantizer range by the caller. rank is the index
// sigma(i_s mod N) in [0,N), n_len is N, rnd a random word for the trial.
module dither_rounder #(
  parameter int unsigned K      = dc_pkg::K_BITS,
  parameter int unsigned A_FRAC = dc_pkg::A_FRAC,
  parameter int unsigned N_W    = $clog2(dc_pkg::DIM_MAX + 1),
  parameter int unsigned RND_W  = dc_pkg::RND_W
) (
  input  logic [K+A_FRAC-1:0] alpha,
  input  logic [N_W-1:0]      n_len,
  input  logic [N_W-1:0]      rank,
  input  logic [RND_W-1:0]    rnd,
  output logic [K-1:0]        q,
  output logic                sat
);

  logic [K-1:0] whole;
  logic         pulse, up_unused, det_unused;

  assign whole = alpha[K+A_FRAC-1:A_FRAC];

  dither_bit #(.N_W(N_W), .FRAC_W(A_FRAC), .RND_W(RND_W)) u_bit (
    .x({1'b0, alpha[A_FRAC-1:0]}), .n_len, .rank, .rnd,
    .bit_(pulse), .upper(up_unused), .det(det_unused));

  always_comb begin
    sat = pulse && (whole == '1);
    q   = sat ? whole : whole + K'(pulse);
  end

endmodule
