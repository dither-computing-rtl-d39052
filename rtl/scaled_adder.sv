// scaled_adder -- dither scaled addition u = (x + y)/2 of two pulse streams.
//
// A control sequence W selects, pulse by pulse, between the operands:
// U_i = W_i X_i + (1 - W_i) Y_i. In dither computing W is not random pulse by
// pulse; it is one of the two alternating sequences s = 1,0,1,0,... (s_i = 1
// for odd i, counting from 1) or 1 - s, picked by a fair coin once per
// sequence. Each choice takes half of the X pulses and the complementary half
// of the Y pulses, so the count is unbiased with O(1/N^2) variance. This is the
// paper's scheme; the coin comes from a private xorshift generator (SEED), and
// the registered output is this design's choice.
//
// Interface: x and y must be aligned pulse streams (asserted). A sequence
// starts with the first valid pulse after a `last` (or after reset). u follows
// one clock later; `w_phase` holds the coin of the current sequence
// (0: W = s, 1: W = 1 - s) and `seq_start` pulses when a coin is drawn.
module scaled_adder #(
  parameter logic [31:0] SEED = 32'hB5AD_4ECE
) (
  input  logic           clk,
  input  logic           rst_n,
  input  dc_pkg::pulse_t x,
  input  dc_pkg::pulse_t y,
  output dc_pkg::pulse_t u,
  output logic           w_phase,
  output logic           seq_start
);

  logic        in_seq;    // inside a sequence (a pulse has been seen, no last yet)
  logic        odd_q;     // the next pulse has an odd 1-based index
  logic        phase_q;
  logic [31:0] rnd;
  logic        phase, odd, w;

  prng #(.SEED(SEED)) u_rng (.clk, .rst_n, .step(seq_start), .rnd);

  assign seq_start = x.valid && !in_seq;
  assign phase     = in_seq ? phase_q : rnd[31];
  assign odd       = in_seq ? odd_q : 1'b1;
  assign w         = odd ^ phase;          // s_i = 1 for odd i; W = s or 1 - s

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_seq  <= 1'b0;
      odd_q   <= 1'b1;
      phase_q <= 1'b0;
      u       <= dc_pkg::PULSE_IDLE;
    end else begin
      u.valid <= x.valid;
      u.bit_  <= x.valid & (w ? x.bit_ : y.bit_);
      u.last  <= x.valid & x.last;
      if (x.valid) begin
        phase_q <= phase;
        odd_q   <= !odd;
        in_seq  <= !x.last;
      end
    end
  end

  assign w_phase = phase;

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (x.valid == y.valid) && (!x.valid || x.last == y.last))
    else $error("scaled_adder: operand streams are not aligned");

endmodule
