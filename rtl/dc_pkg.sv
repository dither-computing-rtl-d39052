// dc_pkg -- types and constants shared by the dither computing blocks.
//
// A pulse stream carries one bit per clock: `valid` marks the cycles that
// belong to a sequence, `bit_` is the pulse X_i and `last` marks its N-th and
// final pulse. Every stream block in this design produces and consumes this
// struct. The value represented by a sequence of N pulses is (number of ones)/N.
//
// Numbers in [0,1] are unsigned fixed point with FRAC_W fraction bits and one
// integer bit, so that 1.0 itself can be represented. Sequence lengths are
// unsigned N_W-bit integers. The widths are this design's choice; the
// sequence lengths in the evaluation reach beyond 10^4, which N_W = 15 covers.
package dc_pkg;

  // Default widths used by the stream datapath.
  localparam int unsigned N_W    = 15;  // sequence length N up to 2^15-1
  localparam int unsigned FRAC_W = 16;  // fraction bits of an operand in [0,1]
  localparam int unsigned RND_W  = 24;  // random bits per Bernoulli trial

  // Defaults of the dither-rounding matrix multiplier (Fig. 7 datapath).
  localparam int unsigned K_BITS  = 8;   // k of the k-bit fixed point multiplier
  localparam int unsigned A_FRAC  = 12;  // fraction bits of a matrix element before rounding
  localparam int unsigned DIM_MAX = 100; // largest p, q and r

  typedef struct packed {
    logic valid;
    logic bit_;
    logic last;
  } pulse_t;

  localparam pulse_t PULSE_IDLE = '{valid: 1'b0, bit_: 1'b0, last: 1'b0};

endpackage
