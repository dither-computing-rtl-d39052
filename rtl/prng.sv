// prng -- 32-bit xorshift pseudo-random number generator.
//
// The dither and stochastic encodings need independent uniform random numbers
// for their Bernoulli trials, for the random phase T of the Format-2 spreading
// and for the fair coin that picks the control sequence W of the scaled adder.
// The analysis treats these as ideal random variables and names no generator;
// this block is this design's choice of source: Marsaglia's xorshift32
// (x ^= x<<13; x ^= x>>17; x ^= x<<5), period 2^32-1, one state update per
// clock in which `step` is high.
//
// Interface: `rnd` is the current state and is valid in every cycle. Reset
// loads SEED (which must be non-zero). When `step` is high the state moves to
// its successor at the next rising clock edge, so the value seen in a cycle is
// consumed by that cycle's step.
module prng #(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        step,
  output logic [31:0] rnd
);

  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rnd <= SEED;
    else if (step) rnd <= xorshift32(rnd);
  end

  initial assert (SEED != 32'd0) else $error("prng: SEED must be non-zero");

endmodule
