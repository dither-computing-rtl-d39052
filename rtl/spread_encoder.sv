// spread_encoder -- Format-2 dither sequence generator (ones spread out).
//
// The second operand of a dither multiplication must have its ones spread over
// the sequence as evenly as possible, so that ANDing it with a Format-1
// operand (ones at the front) picks a fair share of them. The block works in
// two phases.
//
//  load : y and n_len are latched, and over N clocks a dither sample
//         (y_1..y_N) of y is drawn exactly as in dither_encoder; only its
//         number of ones s_y is kept. `loaded` rises when the count is ready.
//         This matches precoding a fixed weight once, as the paper suggests.
//  emit : each `start` (accepted while loaded and not emitting) draws a phase t uniform in
//         [0,N) and emits N pulses, pulse j being 1 when j*s_y + t crosses a
//         multiple of N:  floor(((j+1) s_y + t)/N) > floor((j s_y + t)/N).
//         Exactly s_y ones result, with gaps of floor(N/s_y) or ceil(N/s_y).
//
// The paper writes the spreading permutation as sigma(i) = floor(i s_y + T)
// mod N with T uniform on [0,1]; that formula does not place s_y distinct ones
// as written, so this design uses the evenly spaced placement above with the
// random offset t = floor(T N), which is what "spreading 1 bits as much as
// possible" with a random phase describes.
//
// Timing: `out` starts the cycle after `start`, one pulse per clock for N
// clocks, like dither_encoder, so two encoders started together are aligned.
module spread_encoder #(
  parameter int unsigned N_W    = dc_pkg::N_W,
  parameter int unsigned FRAC_W = dc_pkg::FRAC_W,
  parameter int unsigned RND_W  = dc_pkg::RND_W,
  parameter logic [31:0] SEED   = 32'h9E37_79B9
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [FRAC_W:0]  y,
  input  logic [N_W-1:0]   n_len,
  output logic             loaded,
  output logic [N_W:0]     s_count,   // ones in the precoded sample
  input  logic             start,
  output dc_pkg::pulse_t   out,
  output logic             busy
);

  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_READY, S_EMIT} state_e;
  state_e state;

  logic [FRAC_W:0] y_q;
  logic [N_W-1:0]  n_q;
  logic [N_W-1:0]  idx;
  logic [N_W:0]    acc;        // phase accumulator, always < N
  logic [N_W+1:0]  acc_sum;
  logic [31:0]     rnd;
  logic            sample, up_unused, det_unused;
  logic [N_W-1:0]  phase;

  prng #(.SEED(SEED)) u_rng (.clk, .rst_n,
    .step(state == S_COUNT || (start && state == S_READY)), .rnd);

  dither_bit #(.N_W(N_W), .FRAC_W(FRAC_W), .RND_W(RND_W)) u_bit (
    .x(y_q), .n_len(n_q), .rank(idx), .rnd(rnd[RND_W-1:0]),
    .bit_(sample), .upper(up_unused), .det(det_unused));

  // t = floor(R N / 2^32): uniform phase in [0,N)
  always_comb begin
    logic [N_W+31:0] prod;
    prod  = (N_W+32)'(rnd) * (N_W+32)'(n_q);
    phase = prod[N_W+31:32];
  end

  assign acc_sum = (N_W+2)'(acc) + (N_W+2)'(s_count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      y_q     <= '0;
      n_q     <= '0;
      idx     <= '0;
      acc     <= '0;
      s_count <= '0;
    end else if (load && n_len != '0) begin
      state   <= S_COUNT;
      y_q     <= y;
      n_q     <= n_len;
      idx     <= '0;
      s_count <= '0;
    end else begin
      unique case (state)
        S_IDLE: ;
        S_COUNT: begin
          s_count <= s_count + (N_W+1)'(sample);
          idx     <= idx + 1'b1;
          if (idx == n_q - 1'b1) state <= S_READY;
        end
        S_READY: if (start) begin
          state <= S_EMIT;
          idx   <= '0;
          acc   <= (N_W+1)'(phase);
        end
        S_EMIT: begin
          acc <= (acc_sum >= (N_W+2)'(n_q)) ? (N_W+1)'(acc_sum - (N_W+2)'(n_q))
                                            : (N_W+1)'(acc_sum);
          idx <= idx + 1'b1;
          if (idx == n_q - 1'b1) state <= S_READY;
        end
      endcase
    end
  end

  assign loaded    = (state == S_READY) || (state == S_EMIT);
  assign busy      = (state == S_EMIT);
  assign out.valid = busy;
  assign out.bit_  = busy && (acc_sum >= (N_W+2)'(n_q));
  assign out.last  = busy && (idx == n_q - 1'b1);

endmodule
