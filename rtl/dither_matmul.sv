// dither_matmul -- matrix product C = A B with dither-rounded operands and a
// k-bit fixed point multiplier (the scheme of Fig. 7, applied p*q*r times).
//
// A (p x q) and B (q x r) are held in on-chip arrays as non-negative fixed
// point numbers already scaled to the quantizer range [0, 2^k - 1]
// (K integer and A_FRAC fraction bits). For every partial product A_ij B_jk
// both operands are dither rounded to k-bit integers, with sequence lengths
// N_A = r and N_B = p and indices from mult_counter, multiplied by fixed_mult
// and summed over j into C_ik. C holds integer sums of k-bit products; the
// caller divides by (2^k - 1)^2 to return to the original scale. Rounding both
// operands of every partial product (2pqr roundings) is the paper's main
// scheme; storage, issue order and accumulation are this design's choices.
//
// Pipeline, one partial product per clock:
//   S0  mult_counter issues (i,k,j) and the ranks; both generators step.
//   S1  A_ij and B_jk are read (synchronous arrays), rounded (combinational).
//   S2  fixed_mult output; the accumulator adds it (cleared at j = 0) and at
//       j = q-1 writes C_ik.
// A run of p*q*r products takes p*q*r + 3 clocks from `start` to `done`.
//
// Rounding variants. With round_a_once (and/or round_b_once) set at `start`,
// a pre-pass first dither-rounds every element of A (B) once and writes the
// k-bit integer back in place, one element per clock through the same
// rounder; the product pass then finds integers, which its rounders leave
// unchanged. This gives the paper's other two schemes: A rounded once per
// element and B per partial product (pq + pqr roundings), or both matrices
// rounded separately (pq + qr). The paper does not say how the index of a
// once-rounded element is formed; here A is swept row by row and B column by
// column, with N = q and index sigma(j), so the q roundings that meet in one
// dot product use q different ranks. The run then takes
// [p*q] + [q*r] + 1 + p*q*r + 3 clocks, and A and/or B hold the rounded
// integers afterwards.
//
// Interface: write A or B element (wr_row, wr_col) with wr_en (wr_sel_b picks
// B) while idle. `start` with p, q, r in [1, DIM], the two strides (see
// mult_counter) and the two round-once flags begins a run; `busy` covers it and `done` pulses at its end.
// C_ik is read with rd_row/rd_col, data one clock later. `sat_a`/`sat_b` flag
// a clipped rounding in S1. Each rounder draws its random numbers from its own
// xorshift generator (SEED_A, SEED_B), one per partial product.
module dither_matmul #(
  parameter int unsigned K      = dc_pkg::K_BITS,
  parameter int unsigned A_FRAC = dc_pkg::A_FRAC,
  parameter int unsigned DIM    = dc_pkg::DIM_MAX,
  parameter int unsigned RND_W  = dc_pkg::RND_W,
  parameter logic [31:0] SEED_A = 32'h6A09_E667,
  parameter logic [31:0] SEED_B = 32'hBB67_AE85,
  localparam int unsigned DIM_W = $clog2(DIM + 1),
  localparam int unsigned EW    = K + A_FRAC,
  localparam int unsigned CW    = 2 * K + $clog2(DIM + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // element load
  input  logic             wr_en,
  input  logic             wr_sel_b,
  input  logic [DIM_W-1:0] wr_row,
  input  logic [DIM_W-1:0] wr_col,
  input  logic [EW-1:0]    wr_data,
  // run control
  input  logic             start,
  input  logic [DIM_W-1:0] p_dim,
  input  logic [DIM_W-1:0] q_dim,
  input  logic [DIM_W-1:0] r_dim,
  input  logic [DIM_W-1:0] stride_a,
  input  logic [DIM_W-1:0] stride_b,
  input  logic             round_a_once,
  input  logic             round_b_once,
  output logic             busy,
  output logic             done,
  // result read
  input  logic [DIM_W-1:0] rd_row,
  input  logic [DIM_W-1:0] rd_col,
  output logic [CW-1:0]    rd_data,
  // events
  output logic             sat_a,
  output logic             sat_b
);

  localparam int unsigned AW = $clog2(DIM * DIM);

  logic [EW-1:0] amem [DIM*DIM];
  logic [EW-1:0] bmem [DIM*DIM];
  logic [CW-1:0] cmem [DIM*DIM];

  function automatic logic [AW-1:0] addr(input logic [DIM_W-1:0] row,
                                         input logic [DIM_W-1:0] col);
    return AW'(row) * AW'(DIM) + AW'(col);
  endfunction

  // ---- run phases ---------------------------------------------------------
  typedef enum logic [1:0] {PH_IDLE, PH_QA, PH_QB, PH_GAP} phase_t;
  phase_t           phase;
  logic [DIM_W-1:0] p_q, q_q, r_q, sa_q, sb_q;
  logic             rb_once_q;
  logic             take, mc_start;
  logic [DIM_W-1:0] pp_o, pp_i, pp_rank, pp_outer_n, pp_stride;
  logic             pp_on, pp_row_end, pp_end;
  logic [DIM_W:0]   pp_sum;

  assign take = start && !busy;

  // quantize-once pre-pass: A row by row (outer i, inner j), B column by
  // column (outer k, inner j); inner index j gives the rank sigma(j), N = q
  assign pp_on      = (phase == PH_QA) || (phase == PH_QB);
  assign pp_outer_n = (phase == PH_QA) ? p_q : r_q;
  assign pp_stride  = (phase == PH_QA) ? sa_q : sb_q;
  assign pp_row_end = (pp_i == q_q - 1'b1);
  assign pp_end     = pp_row_end && (pp_o == pp_outer_n - 1'b1);
  assign pp_sum     = {1'b0, pp_rank} + {1'b0, pp_stride};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE;
      {p_q, q_q, r_q, sa_q, sb_q, pp_o, pp_i, pp_rank} <= '0;
      rb_once_q <= 1'b0;
    end else begin
      if (take) begin
        p_q <= p_dim; q_q <= q_dim; r_q <= r_dim;
        sa_q <= stride_a; sb_q <= stride_b;
        rb_once_q <= round_b_once;
        {pp_o, pp_i, pp_rank} <= '0;
        phase <= round_a_once ? PH_QA : (round_b_once ? PH_QB : PH_IDLE);
      end else if (pp_on) begin
        if (pp_end) begin
          {pp_o, pp_i, pp_rank} <= '0;
          phase <= (phase == PH_QA && rb_once_q) ? PH_QB : PH_GAP;
        end else if (pp_row_end) begin
          pp_o    <= pp_o + 1'b1;
          pp_i    <= '0;
          pp_rank <= '0;
        end else begin
          pp_i    <= pp_i + 1'b1;
          pp_rank <= (pp_sum >= {1'b0, q_q}) ? DIM_W'(pp_sum - {1'b0, q_q}) : DIM_W'(pp_sum);
        end
      end else if (phase == PH_GAP) begin
        phase <= PH_IDLE;
      end
    end
  end

  // the product pass starts with the run, or one clock after the last
  // pre-pass write has landed
  assign mc_start = (take && !round_a_once && !round_b_once) || (phase == PH_GAP);

  // ---- S0: issue --------------------------------------------------------
  logic               act0, first0, last0, lastall0;
  logic [DIM_W-1:0]   i0, k0, j0, ra0, rb0;
  logic [3*DIM_W-1:0] is_unused;
  logic [31:0]        rnd_a, rnd_b;
  logic               gap;

  assign gap = (phase == PH_GAP);

  mult_counter #(.DIM_W(DIM_W)) u_cnt (
    .clk, .rst_n, .start(mc_start), .advance(1'b1),
    .p_dim(gap ? p_q : p_dim), .q_dim(gap ? q_q : q_dim), .r_dim(gap ? r_q : r_dim),
    .stride_a(gap ? sa_q : stride_a), .stride_b(gap ? sb_q : stride_b),
    .active(act0), .i(i0), .k(k0), .j(j0), .i_s(is_unused),
    .rank_a(ra0), .rank_b(rb0), .first_j(first0), .last_j(last0),
    .last_all(lastall0));

  prng #(.SEED(SEED_A)) u_rng_a (.clk, .rst_n, .step(act0 || phase == PH_QA), .rnd(rnd_a));
  prng #(.SEED(SEED_B)) u_rng_b (.clk, .rst_n, .step(act0 || phase == PH_QB), .rnd(rnd_b));

  // ---- S1: read and round -------------------------------------------------
  logic               v1, first1, last1, lastall1;
  logic [DIM_W-1:0]   i1, k1, ra1, rb1;
  logic [RND_W-1:0]   rnda1, rndb1;
  logic [EW-1:0]      a1, b1;
  logic [K-1:0]       qa, qb;
  logic               pa1, pb1;        // S1 holds a pre-pass element of A / B
  logic [DIM_W-1:0]   prk1;            // its rank
  logic [AW-1:0]      pad1;            // its address

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; lastall1 <= 1'b0;
      {i1, k1, ra1, rb1} <= '0;
      pa1 <= 1'b0; pb1 <= 1'b0; prk1 <= '0; pad1 <= '0;
      rnda1 <= '0; rndb1 <= '0;
    end else begin
      v1       <= act0;
      first1   <= first0;
      last1    <= last0;
      lastall1 <= lastall0;
      i1  <= i0;   k1  <= k0;
      ra1 <= ra0;  rb1 <= rb0;
      rnda1 <= rnd_a[RND_W-1:0];
      rndb1 <= rnd_b[RND_W-1:0];
      pa1   <= (phase == PH_QA);
      pb1   <= (phase == PH_QB);
      prk1  <= pp_rank;
      pad1  <= (phase == PH_QA) ? addr(pp_o, pp_i) : addr(pp_i, pp_o);
    end
  end

  always_ff @(posedge clk) begin
    a1 <= amem[(phase == PH_QA) ? addr(pp_o, pp_i) : addr(i0, j0)];
    b1 <= bmem[(phase == PH_QB) ? addr(pp_i, pp_o) : addr(j0, k0)];
    // the pre-pass writes the rounded integer back in place
    if (wr_en && !wr_sel_b) amem[addr(wr_row, wr_col)] <= wr_data;
    else if (pa1)           amem[pad1] <= {qa, A_FRAC'(0)};
    if (wr_en &&  wr_sel_b) bmem[addr(wr_row, wr_col)] <= wr_data;
    else if (pb1)           bmem[pad1] <= {qb, A_FRAC'(0)};
  end

  // sequence lengths: N_A = r and N_B = p in the product pass, N = q in the
  // pre-pass
  dither_rounder #(.K(K), .A_FRAC(A_FRAC), .N_W(DIM_W), .RND_W(RND_W)) u_rnd_a (
    .alpha(a1), .n_len(pa1 ? q_q : r_q), .rank(pa1 ? prk1 : ra1), .rnd(rnda1), .q(qa), .sat(sat_a));
  dither_rounder #(.K(K), .A_FRAC(A_FRAC), .N_W(DIM_W), .RND_W(RND_W)) u_rnd_b (
    .alpha(b1), .n_len(pb1 ? q_q : p_q), .rank(pb1 ? prk1 : rb1), .rnd(rndb1), .q(qb), .sat(sat_b));

  // ---- S2: multiply and accumulate --------------------------------------
  logic             v2, first2, last2, lastall2;
  logic [DIM_W-1:0] i2, k2;
  logic [2*K-1:0]   prod;
  logic [CW-1:0]    acc, acc_next;

  fixed_mult #(.K(K)) u_mul (.clk, .rst_n, .in_valid(v1), .a(qa), .b(qb),
                             .out_valid(v2), .p(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first2 <= 1'b0; last2 <= 1'b0; lastall2 <= 1'b0;
      i2 <= '0; k2 <= '0;
    end else begin
      first2   <= first1;
      last2    <= last1;
      lastall2 <= lastall1 & v1;
      i2 <= i1;
      k2 <= k1;
    end
  end

  assign acc_next = (first2 ? '0 : acc) + CW'(prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= v2 & lastall2;
      if (v2) acc <= acc_next;
    end
  end

  always_ff @(posedge clk) begin
    if (v2 && last2) cmem[addr(i2, k2)] <= acc_next;
    rd_data <= cmem[addr(rd_row, rd_col)];
  end

  assign busy = (phase != PH_IDLE) | act0 | v1 | v2 | pa1 | pb1;

  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !wr_en)
    else $error("dither_matmul: matrix written during a run");
  a_dims: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> (p_dim <= DIM_W'(DIM) && q_dim <= DIM_W'(DIM) && r_dim <= DIM_W'(DIM)))
    else $error("dither_matmul: dimension above DIM");
  a_prepass_stride: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (q_dim <= 1 || ((!round_a_once || stride_a < q_dim) && (!round_b_once || stride_b < q_dim))))
    else $error("dither_matmul: a pre-pass stride must be below q");

endmodule
