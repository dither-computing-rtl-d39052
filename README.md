# Dither computing in SystemVerilog

Stochastic computing holds a number x in [0,1] as N pulses, each 1 with
probability x, and reads it back as (number of ones)/N. Arithmetic becomes
cheap: one AND gate multiplies, one multiplexer averages. The estimate is
unbiased, but its variance falls only as 1/N. Deterministic pulse codes, such
as unary codes, get the error down to O(1/N^2). They are biased, though,
because only multiples of 1/N can be represented exactly.

Dither computing keeps the good half of each. As many pulses as possible are
fixed deterministically, and only the small leftover is made random. The
result is unbiased and its mean squared error is O(1/N^2). The same idea gives
**dither rounding**: over the N times a value is used, each rounding to a
k-bit integer takes one pulse of the value's dither sequence as its last bit.
Stochastic rounding instead draws a fresh random last bit every time.

The scheme comes from C. W. Wu, "Dither computing: a hybrid
deterministic-stochastic computing framework". This repository turns it into
synthesizable RTL with two parts:

* a **pulse-stream datapath**, made of dither encoders in the two formats the
  scheme needs, an AND multiplier, the dither scaled adder and counters;
* a **dither-rounding matrix multiplier**, which computes C = A B with every
  partial product formed from two dither-rounded k-bit operands, as in the
  paper's Fig. 7.

Where the paper gives the mechanism, the RTL follows it. The widths,
handshakes, storage, random number generator and a few interpretations are
this design's own; they are listed in [Departures and choices](#departures-and-choices).

## 1. The dither representation (`dither_bit`)

Take x in [0,1] and a length N. The N pulses are ordered by a *rank*
0..N-1, and a permutation sigma maps each rank to a position in time.

| case | n | ranks below n | ranks from n up |
|---|---|---|---|
| x <= 1/2 | floor(N x) | 1 | 1 with probability delta = (N x - n)/(N - n) |
| x > 1/2 | ceil(N x) | 1 with probability 1 - delta, delta = (n - N x)/n | 0 |

Either way the expected number of ones is exactly N x. Only one side of the
split is random, and since n >= N/2 in the upper case and N - n >= N/2 in the
lower one, delta <= 2/N. The variance of the count is therefore at most 2,
whatever N is. For stochastic coding it is N x (1 - x).

`dither_bit` computes one pulse from (x, N, rank, random word R) in one
combinational step, with no divider. In the lower case it multiplies the
trial out:

    pulse = rank < n  or  R * (N - n) < frac(N x) * 2^RND_W

Because R is uniform on [0, 2^RND_W), this holds with probability
frac(N x)/(N - n). The upper case works the same way with
`R * n >= (n - N x) * 2^RND_W`. delta is therefore realised to within
2^-RND_W (RND_W = 24). x is unsigned with FRAC_W = 16 fraction bits plus one
integer bit, so x = 1.0 is representable. N x is formed exactly.

## 2. Pulse-stream arithmetic

Every stream block passes a `dc_pkg::pulse_t {valid, bit_, last}`: one pulse
per clock while `valid`, with `last` on the N-th.

**Format 1 (`dither_encoder`)** uses the identity permutation. The certain
ones come first, then the random tail; for x > 1/2 the random part comes
first, followed by zeros. After a one-clock `start` it emits N pulses on N
consecutive clocks, beginning the next clock. Each pulse uses a fresh random
word from the encoder's own xorshift generator.

**Format 2 (`spread_encoder`)** is the second operand of a product. Its ones
must be spread as evenly as possible, so that ANDing it with a Format-1
operand, whose ones sit at the front, picks a fair share of them. It works in
two phases:

1. `load`: over N clocks, draw one dither sample of y and keep only its
   number of ones, s. `loaded` then rises. This suits a weight that is fixed
   during inference: it is precoded once.
2. `start`: draw a phase t uniform in [0,N) and emit N pulses. Pulse j is 1
   when j*s + t crosses a multiple of N, that is, when
   floor(((j+1)s + t)/N) > floor((j s + t)/N).

   This is a Bresenham-style accumulator. It gives exactly s ones, with gaps
   of floor(N/s) or ceil(N/s). Any window of a slots therefore holds
   floor(a s/N) or ceil(a s/N) ones, so the AND with a Format-1 operand of
   a ones estimates a s/N to within one pulse.

**Multiplication (`sc_multiplier`)** is Z_i = X_i AND Y_i, registered. An
assertion checks that the two streams are aligned.

**Scaled addition (`scaled_adder`)** computes U_i = W_i X_i + (1 - W_i) Y_i,
giving u = (x + y)/2. In stochastic computing W would be random pulse by
pulse. Here W is one of two fixed alternating sequences:
s = 1,0,1,0,... (s_i = 1 for odd i, counting from 1) or its complement 1 - s.
A fair coin picks one at the first pulse of each sequence. Each choice takes
half of the X pulses and the complementary half of the Y pulses. The coin
removes the remaining bias, and the variance stays O(1/N^2). `w_phase` shows
the coin, and `seq_start` pulses when it is drawn.

**Counting (`pulse_counter`)** adds up ones and pulses. One clock after
`last` it presents `count` and `len`; the estimate is count/len.

### The stream section of `dither_top`

The top chains these blocks into one multiply-and-add, u = (x w + b)/2. The
weight w is precoded in Format 2. The data x and the bias b are encoded in
Format 1. This is the neural-network use the paper sketches.

    w_load --> spread_encoder (w) --+
    op_start -> dither_encoder (x) -+-> AND --> z --+--> pulse_counter -> z_count
    op_start+1 -> dither_encoder (b) ---------------+-> scaled_adder -> u -> pulse_counter -> u_count

* `op_start` is taken only while `op_ready` is high. It starts x and an
  emission of w on the same clock.
* b starts one clock later, because the AND register delays z by one clock.
* `z_done` comes N + 2 clocks after the edge that takes `op_start`, and
  `u_done` one clock after that.
* The next operation can start once all three encoders are idle.

The product stream z is not Format 1: its ones are spread over the first a
slots. The paper analyses the scaled adder only for two Format-1 operands. In
expectation u is still (z + b)/2, because the coin is fair, but when the ones
of z fall on slots of one parity its spread is larger. The paper leaves the
conversion of results back to Format 1 or Format 2 ("additional logic") open,
and it is not built.

## 3. Dither rounding and the matrix multiplier

For a non-negative alpha, already scaled to the quantizer range
[0, 2^k - 1], dither rounding is

    d(alpha, i) = floor(alpha) + X_i,    X = dither representation of frac(alpha)

`dither_rounder` implements it on top of `dither_bit`. It clips to 2^k - 1,
like the k-bit quantizer on overflow, and `sat` flags a clip.

`dither_matmul` computes C = A B for A (p x q) and B (q x r), with p, q and r
up to DIM = 100. Each partial product A_ij B_jk goes through the Fig. 7 path:

    A_ij -> dither_rounder (N_A = r, index sigma_L(i_s mod r)) --+
                                                                 +--> fixed_mult (k x k) -> accumulate C_ik
    B_jk -> dither_rounder (N_B = p, index sigma_R(i_s mod p)) --+
                         ^ both indices from one count i_s (mult_counter)

Every element of A is used r times and every element of B p times, so those
are the sequence lengths. i_s counts the partial products issued, and it is a
single count shared by both operands, as in Fig. 7. `mult_counter` keeps
i_s mod r and i_s mod p as wrapping counters. It also keeps their images
under sigma, the stride permutations c * stride mod N, which are runtime
inputs:

* a stride of 1 is the identity;
* any stride coprime to N is a permutation.

**Why the issue order matters.** The order is i, k, j, with the inner index j
fastest, so each C_ik is one dot product. The index of every operand then
advances along the dot product: the q terms of C_ik use q different pulse
ranks, and their rounding errors tend to cancel. If each operand were indexed
by its own use count instead (k for A_ij, i for B_jk), every A_ij in row i
would use the same rank for a given k. Their errors would add up.

The matrix experiment in the paper uses 100 x 100 matrices with entries in
[0, 1/2), N = 100 and k = 1..8. The RTL run on one such pair gives the
following e_f, on the original [0,1] scale. The other two columns are
computed in the testbench for the same pair.

| k | round to nearest | stochastic rounding | dither rounding (RTL) |
|---|---|---|---|
| 1 | 626 | 238 | 184 |
| 2 | 138 | 58 | 46 |
| 3 | 30 | 24 | 19 |
| 4 | 9.3 | 11.1 | 9.1 |
| 5 | 3.8 | 5.4 | 4.5 |
| 6 | 1.9 | 2.6 | 2.1 |
| 7 | 0.98 | 1.31 | 1.05 |
| 8 | 0.47 | 0.64 | 0.55 |

These are close to the published curves, as far as values can be read off a
log-scale plot. Dither
rounding is below stochastic rounding at every k. For small k it is far below
round-to-nearest, and it ends slightly above it from k = 5 on. A software
model with per-operand use counts as the index gives e_f of about 3.9 at
k = 8, which is why the shared count matters.

**Pipeline.** One partial product goes in every clock:

* **S0**: `mult_counter` issues (i, k, j) and the two ranks; both random
  generators step.
* **S1**: synchronous reads of A_ij and B_jk, then both rounders
  (combinational).
* **S2**: `fixed_mult` output register. The accumulator restarts at j = 0,
  and at j = q - 1 it writes C_ik.

A run takes p*q*r + 3 clocks from the edge that samples `start` to `done`.

**Rounding once instead of per product.** The paper also evaluates two
cheaper schemes:

* round each A_ij once and reuse it for every k, while B is still rounded per
  partial product (pq + pqr roundings);
* round A and B once each, then multiply the rounded matrices
  (pq + qr roundings).

`round_a_once` and `round_b_once`, sampled with `start`, select these. A
pre-pass goes through A row by row and/or B column by column, one element per
clock. It sends each element through the same rounder and writes the k-bit
integer back in place. The product pass then sees integers, which the
rounders pass through unchanged. The paper does not say which index a
once-rounded element uses. Here the index is sigma(j) with N = q, so the q
elements that meet in one dot product take q different ranks. The pre-pass
adds p*q (for A), q*r (for B) and one clock. Afterwards the arrays hold the
rounded matrices, so reload them before the next run.

**Number formats.** Elements are written as K integer and A_FRAC = 12
fraction bits, already multiplied by 2^k - 1. C_ik holds the integer sum of
k-bit products (2K + 7 bits); dividing by (2^k - 1)^2 returns to the
original scale. To run with k < 8, scale to 2^k - 1: the values then never
reach the clip level.

## 4. Interface of `dither_top`

| group | ports | notes |
|---|---|---|
| stream config | `n_len` | N for the stream section, 1..2^15-1 |
| weight | `w_load`, `w_val` -> `w_loaded`, `w_ones` | precode takes N clocks |
| operation | `op_start`, `x_val`, `b_val` -> `op_ready` | values in [0,1], FRAC_W = 16 fraction bits |
| results | `z_count`/`z_done`, `u_count`/`u_done` | counts out of N |
| observation | `x_upper`, `avg_phase`, `avg_seq_start` | encoder half, adder coin |
| matrix load | `mm_wr_en`, `mm_wr_sel_b`, `mm_wr_row`, `mm_wr_col`, `mm_wr_data` | one element per clock, only while idle (asserted) |
| matrix run | `mm_start`, `mm_p`, `mm_q`, `mm_r`, `mm_stride_a`, `mm_stride_b`, `mm_round_a_once`, `mm_round_b_once` -> `mm_busy`, `mm_done` | strides below their N (and below q for a pre-pass), coprime to it for a permutation |
| matrix read | `mm_rd_row`, `mm_rd_col` -> `mm_rd_data` | one clock latency |
| events | `mm_sat_a`, `mm_sat_b` | a rounding clipped at 2^k - 1 |

Reset is asynchronous and active low (`rst_n`). Everything runs on one clock,
`clk`.

## 5. Parameters

| parameter | default | origin |
|---|---|---|
| `N_W` | 15 | own choice; covers N beyond the 10^4 of the paper's plots |
| `FRAC_W` | 16 | own choice |
| `RND_W` | 24 | own choice: random bits per trial |
| `K` | 8 | largest k of the paper's matrix experiment |
| `A_FRAC` | 12 | own choice |
| `DIM` | 100 | size of the paper's matrix experiment |
| seeds | various | own choice; each random consumer has its own xorshift32 generator |

## 6. Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.
`tb/dc_ref_pkg.sv` holds the reference arithmetic. It computes the xorshift
step and the dither pulse definition in exact 64-bit integers, independently
of the RTL.

| testbench | what it establishes |
|---|---|
| `prng_tb` | xorshift32 recurrence, known value, hold without `step` |
| `dither_bit_tb` | 20k random cases against the reference; certain pulses; x = 0, 1/2, 1; mean count = N x |
| `dither_encoder_tb` | timing (N pulses, `last`); exact m/N codes; certain part; mean = N x and count variance <= 2.5 over 150 runs |
| `spread_encoder_tb` | load takes N clocks; exact s; exactly s ones with gaps floor/ceil(N/s); the phase moves; mean s = N y |
| `sc_multiplier_tb` | AND and framing one clock later |
| `scaled_adder_tb` | every output pulse against W = s or 1 - s; coin constant within a sequence and balanced; Format-1 counts within one of (a+b)/2 |
| `pulse_counter_tb` | counts, lengths and `done` with idle gaps |
| `dither_rounder_tb` | 20k cases against the reference incl. saturation; N-use sums keep the certain pulses and average to N alpha |
| `mult_counter_tb` | issue order, i_s, sigma(i_s mod N) for random strides, flags, stalls on `advance` |
| `fixed_mult_tb` | products and latency |
| `dither_matmul_tb` | nine shapes, every C_ik bit-exact against the reference, including the three round-once combinations; run length in clocks |
| `dither_top_tb` | end to end at default parameters: timing, exact-operand product bounds, u against a model built from the internal z and b streams, unbiased means, four matrix runs; counts that each mechanism happened (weight precode, both encoding halves, both coins, `op_start` held off, matrix run, non-identity stride, saturation, both round-once pre-passes) |
| `dither_full_tb` | full size: 100 x 100 x 100 product (10^6 partial products), all C bit-exact; prints e_f (0.53 dither, 0.47 round-to-nearest on its data) |
| `dither_ksweep_tb` | the matrix experiment for k = 1..8, C bit-exact, e_f table of section 3 and its ordering |
| `dither_emse_tb` | the stream accuracy experiment: L and the absolute bias of x, x y and (x+y)/2 for N = 8..8192 over 50 pairs x 50 trials; N^2 L bounded (about 0.5) and no bias beyond 5 standard errors |

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/dc_pkg.sv tb/dc_ref_pkg.sv \
        tb/dither_top_tb.sv --top-module dither_top_tb -Mdir obj_top
    ./obj_top/Vdither_top_tb +verilator+rand+reset+2

Every testbench finishes within a minute; the full-size one takes a few seconds.

How far to trust it:

* The matrix path is checked bit-exactly against an independent model, in
  all three rounding modes, and it reproduces the published error curves.
* The stream path is checked structurally: timing, certain pulses, exact
  codes and spreading gaps.
* The stream path is also checked statistically. The block tests use a few
  hundred runs and loose tolerances. The accuracy workload uses 2500 samples
  per N and shows N^2 L of about 0.5 for x, x y and (x+y)/2 from N = 8 to
  8192, which matches the level of the published plots.
* The random sources are pseudo-random. No test looks for correlations
  between generators beyond these statistics.

## Departures and choices

* **Random source.** The analysis assumes ideal random variables. Here each
  consumer has a 32-bit xorshift generator, and delta is quantised to 2^-24.
* **Format-2 spreading rule.** The paper writes the spreading permutation as
  sigma(i) = floor(i s_y + T) mod N for i = 1..floor(N/s_y). Read
  literally, the step and the count are swapped, and it does not place s_y
  evenly spaced ones. This design places the ones at the crossings of
  j*s_y + t with the multiples of N, t = floor(T N), which spreads them as
  evenly as possible.
* **When the phase is drawn.** The phase is drawn at every emission; the
  sample is drawn once at load time.
* **Index of dither rounding.** The paper describes i_s both as "how many
  times the dither rounding operation has been applied so far" and, in
  Fig. 7, as one count feeding both operands' permutations. This design
  uses the shared count with issue order i, k, j. Its results agree with the
  paper's matrix experiment, whereas per-element use counts do not (section 3).
* **sigma.** For the stream product the paper fixes the permutation of x as
  the identity. For dither rounding it says only that sigma_L and sigma_R are
  fixed permutations. Here they are stride permutations, set at run time.
* **Stream chaining.** The top feeds the product stream into the scaled
  adder. The paper analyses the adder for Format-1 inputs, and it does not
  give the recoding logic between operations.
* **Storage and sequencing.** The on-chip arrays, the load and read ports,
  the three-stage pipeline, the in-place round-once pre-pass and the integer
  scaling convention of the matrix multiplier are this design's.
* **Not built:**
  * the comparison schemes (stochastic computing, the deterministic variant,
    traditional and stochastic rounding);
  * negative operands;
  * format recoding;
  * the analog crossbar integration.
* **Workloads beyond the built sizes.** The MNIST experiments (10000 x 784
  inputs) and the Fashion-MNIST MLP exceed DIM = 100. They also need trained
  weights and layers (bias, ReLU, softmax) that are not part of this
  datapath. The two accuracy experiments that fit are run in full in shape.
  The stream experiment stops at N = 8192 and 50 x 50 samples, where the
  paper goes past N = 10^4 with 1000 x 1000. The matrix experiment uses one
  pair where the paper averages 100.

## Files

`rtl/` holds one module or package per file:

* `dc_pkg` (types, default widths)
* `prng`
* `dither_bit`
* `dither_encoder`
* `spread_encoder`
* `sc_multiplier`
* `scaled_adder`
* `pulse_counter`
* `dither_rounder`
* `mult_counter`
* `fixed_mult`
* `dither_matmul`
* `dither_top` (the top)

`tb/` holds the testbenches listed above and `dc_ref_pkg`.
