// dither_encoder -- Format-1 dither computing sequence generator.
//
// Turns a number x in [0,1] into N pulses whose count of ones estimates N x
// without bias and with O(1/N^2) variance of the mean. The permutation sigma
// is the identity ("Format 1"): the certain pulses come first, so for
// x <= 1/2 the sequence is n ones followed by N-n Bernoulli(delta) pulses, and
// for x > 1/2 it is n Bernoulli(1-delta) pulses followed by N-n zeros (see
// dither_bit). This is the encoding the paper uses for the data operand of a
// multiplication and for both operands of a scaled addition.
//
// Operation: a one-cycle `start` latches x and n_len (N >= 1; N = 0 is
// ignored). From the next cycle on, `out` carries one pulse per clock for N
// clocks, `last` on the N-th; `busy` is high in exactly those cycles. A start
// while busy restarts the sequence. Each pulse consumes one fresh random
// number from a private xorshift generator seeded by SEED (this design's
// choice of random source).
module dither_encoder #(
  parameter int unsigned N_W    = dc_pkg::N_W,
  parameter int unsigned FRAC_W = dc_pkg::FRAC_W,
  parameter int unsigned RND_W  = dc_pkg::RND_W,
  parameter logic [31:0] SEED   = 32'h2545_F491
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [FRAC_W:0]  x,
  input  logic [N_W-1:0]   n_len,
  output dc_pkg::pulse_t   out,
  output logic             busy,
  output logic             upper    // x > 1/2 for the sequence in flight
);

  logic [FRAC_W:0] x_q;
  logic [N_W-1:0]  n_q;
  logic [N_W-1:0]  idx;
  logic [31:0]     rnd;
  logic            pulse, det_unused;

  prng #(.SEED(SEED)) u_rng (.clk, .rst_n, .step(busy), .rnd);

  dither_bit #(.N_W(N_W), .FRAC_W(FRAC_W), .RND_W(RND_W)) u_bit (
    .x(x_q), .n_len(n_q), .rank(idx), .rnd(rnd[RND_W-1:0]),
    .bit_(pulse), .upper(upper), .det(det_unused));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      x_q  <= '0;
      n_q  <= '0;
      idx  <= '0;
    end else if (start && n_len != '0) begin
      busy <= 1'b1;
      x_q  <= x;
      n_q  <= n_len;
      idx  <= '0;
    end else if (busy) begin
      idx <= idx + 1'b1;
      if (idx == n_q - 1'b1) busy <= 1'b0;
    end
  end

  assign out.valid = busy;
  assign out.bit_  = busy & pulse;
  assign out.last  = busy & (idx == n_q - 1'b1);

  initial assert (RND_W >= FRAC_W && RND_W <= 32)
    else $error("dither_encoder: need FRAC_W <= RND_W <= 32");

endmodule
