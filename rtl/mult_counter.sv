// mult_counter -- "Mult. count i_s" of Fig. 7: sequencing of the partial
// products of C = A B and the dither index of each operand.
//
// The partial products A_ij B_jk are issued one per clock in the order
// i (row of A), k (column of B), j (inner index, fastest), so that each C_ik
// is one dot product. i_s counts the multiplications issued so far; as in
// Fig. 7 this single count feeds both rounders. Each element of A is used r
// times and each element of B p times, so the lengths are N_A = r and
// N_B = p, and the index handed to a rounder is sigma(i_s mod N). Both
// residues are kept as counters that wrap (no divider).
//
// The permutations are sigma_L(c) = c * stride_a mod r and
// sigma_R(c) = c * stride_b mod p, kept by modular addition alongside the
// residues (a stride must be below its N and coprime to it; 1 is the identity,
// which the paper uses for the left operand). The stride form of sigma and the
// issue order are this design's choices; with j innermost the indices rotate
// along every dot product, so the rounding errors of its terms do not line up.
//
// Interface: `start` (while idle) clears the count and sets `active`; while
// active and `advance` is high the count steps once per clock. The outputs
// describe the partial product issued in the current cycle; `last_all` marks
// the final one, after which `active` falls.
module mult_counter #(
  parameter int unsigned DIM_W = $clog2(dc_pkg::DIM_MAX + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               advance,
  input  logic [DIM_W-1:0]   p_dim,
  input  logic [DIM_W-1:0]   q_dim,
  input  logic [DIM_W-1:0]   r_dim,
  input  logic [DIM_W-1:0]   stride_a,
  input  logic [DIM_W-1:0]   stride_b,
  output logic               active,
  output logic [DIM_W-1:0]   i,
  output logic [DIM_W-1:0]   k,
  output logic [DIM_W-1:0]   j,
  output logic [3*DIM_W-1:0] i_s,       // global multiplication count
  output logic [DIM_W-1:0]   rank_a,    // sigma_L(i_s mod r)
  output logic [DIM_W-1:0]   rank_b,    // sigma_R(i_s mod p)
  output logic               first_j,
  output logic               last_j,
  output logic               last_all
);

  logic [DIM_W-1:0] p_q, q_q, r_q, sa_q, sb_q;
  logic [DIM_W-1:0] res_a, res_b;             // i_s mod r, i_s mod p

  function automatic logic [DIM_W-1:0] add_mod(input logic [DIM_W-1:0] a,
                                               input logic [DIM_W-1:0] b,
                                               input logic [DIM_W-1:0] m);
    logic [DIM_W:0] s;
    s = (DIM_W+1)'(a) + (DIM_W+1)'(b);
    return (s >= (DIM_W+1)'(m)) ? DIM_W'(s - (DIM_W+1)'(m)) : DIM_W'(s);
  endfunction

  assign first_j  = active && (j == '0);
  assign last_j   = active && (j == q_q - 1'b1);
  assign last_all = last_j && (k == r_q - 1'b1) && (i == p_q - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      {i, k, j, rank_a, rank_b, res_a, res_b} <= '0;
      i_s <= '0;
      {p_q, q_q, r_q, sa_q, sb_q} <= '0;
    end else if (start && !active) begin
      active <= (p_dim != '0) && (q_dim != '0) && (r_dim != '0);
      {i, k, j, rank_a, rank_b, res_a, res_b} <= '0;
      i_s  <= '0;
      p_q  <= p_dim;
      q_q  <= q_dim;
      r_q  <= r_dim;
      sa_q <= stride_a;
      sb_q <= stride_b;
    end else if (active && advance) begin
      i_s <= i_s + 1'b1;
      // residues of i_s and their images under sigma
      if (res_a == r_q - 1'b1) begin
        res_a  <= '0;
        rank_a <= '0;
      end else begin
        res_a  <= res_a + 1'b1;
        rank_a <= add_mod(rank_a, sa_q, r_q);
      end
      if (res_b == p_q - 1'b1) begin
        res_b  <= '0;
        rank_b <= '0;
      end else begin
        res_b  <= res_b + 1'b1;
        rank_b <= add_mod(rank_b, sb_q, p_q);
      end
      // loop indices i, k, j
      if (!last_j) j <= j + 1'b1;
      else begin
        j <= '0;
        if (k != r_q - 1'b1) k <= k + 1'b1;
        else begin
          k <= '0;
          if (i != p_q - 1'b1) i <= i + 1'b1;
          else begin
            i      <= '0;
            active <= 1'b0;
          end
        end
      end
    end
  end

  a_stride: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !active) |-> ((stride_a < r_dim || r_dim <= 1) && (stride_b < p_dim || p_dim <= 1)))
    else $error("mult_counter: a stride must be below its sequence length");

endmodule
