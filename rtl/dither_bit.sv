// dither_bit -- one pulse of the dither computing representation of x.
//
// For x in [0,1] and a sequence length N the dither representation is N
// Bernoulli variables X_1..X_N, ordered by a rank 0..N-1 (rank = sigma^-1 of
// the pulse position):
//   x <= 1/2 : n = floor(N x).  Ranks below n are 1 with certainty; every other
//              rank is 1 with probability delta = (N x - n)/(N - n).
//   x >  1/2 : n = ceil(N x).   Ranks at or above n are 0 with certainty; every
//              rank below n is 1 with probability 1 - delta, delta = (n - N x)/n.
// The expected number of ones is exactly N x (no bias) and the variance of the
// mean is O(1/N^2). This follows the encoding of the paper directly.
//
// No divider is needed: with R a uniform RND_W-bit random integer, the trial
// "R (N-n) < frac(N x) 2^RND_W" succeeds with probability frac(Nx)/(N-n) up to
// a quantisation of 2^-RND_W, and likewise for the upper half. That comparison
// form, and the widths, are this design's choices.
//
// Interface (purely combinational): x is unsigned with FRAC_W fraction bits and
// one integer bit (so 1.0 is 1 << FRAC_W); n_len is N >= 1; rank is in [0,N);
// rnd supplies the random integer R. bit_ is the pulse; upper tells which of
// the two cases applied and det that the pulse was fixed without a trial.
module dither_bit #(
  parameter int unsigned N_W    = dc_pkg::N_W,
  parameter int unsigned FRAC_W = dc_pkg::FRAC_W,
  parameter int unsigned RND_W  = dc_pkg::RND_W
) (
  input  logic [FRAC_W:0]  x,
  input  logic [N_W-1:0]   n_len,
  input  logic [N_W-1:0]   rank,
  input  logic [RND_W-1:0] rnd,
  output logic             bit_,
  output logic             upper,
  output logic             det
);

  localparam int unsigned PW = N_W + FRAC_W + 1;   // width of N*x
  localparam int unsigned TW = RND_W + N_W + 1;    // width of a trial product

  logic [PW-1:0]     nx;        // N*x, FRAC_W fraction bits
  logic [N_W:0]      n_floor;   // floor(N x)
  logic [FRAC_W-1:0] f;         // frac(N x), in units of 2^-FRAC_W
  logic [N_W:0]      n_sel;     // n of the case that applies
  logic [N_W:0]      rem;       // N - n (lower case)
  logic [FRAC_W:0]   rp;        // n - N x (upper case), units of 2^-FRAC_W
  logic [TW-1:0]     lhs, rhs;
  logic              trial;
  logic              in_front;  // rank < n

  always_comb begin
    nx      = PW'(n_len) * PW'(x);
    n_floor = nx[PW-1:FRAC_W];
    f       = nx[FRAC_W-1:0];
    upper   = x > (FRAC_W+1)'(1 << (FRAC_W-1));
    rp      = '0;
    rem     = '0;
    if (!upper) begin
      n_sel = n_floor;
      rem   = (N_W+1)'(n_len) - n_floor;
      lhs   = TW'(rnd) * TW'(rem);
      rhs   = TW'(f) << (RND_W - FRAC_W);
      trial = lhs < rhs;                 // P = frac(Nx)/(N-n)
    end else begin
      n_sel = n_floor + (N_W+1)'(f != '0);
      rp    = (f != '0) ? ((FRAC_W+1)'(1) << FRAC_W) - (FRAC_W+1)'(f) : '0;
      lhs   = TW'(rnd) * TW'(n_sel);
      rhs   = TW'(rp) << (RND_W - FRAC_W);
      trial = lhs >= rhs;                // P = 1 - (n-Nx)/n
    end
    in_front = (N_W+1)'(rank) < n_sel;
    if (!upper) begin
      bit_ = in_front | trial;
      det  = in_front;
    end else begin
      bit_ = in_front & trial;
      det  = !in_front;
    end
  end

endmodule
