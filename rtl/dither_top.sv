// dither_top -- dither computing datapath: pulse-stream arithmetic and the
// dither-rounding matrix multiplier.
//
// Two independent sections share the chip.
//
// Pulse-stream section (one neuron-style multiply-and-add, u = (x w + b)/2):
//   w  weight, precoded once in Format 2 by spread_encoder (w_load); it can
//      then be emitted any number of times.
//   x  data operand, Format 1 (dither_encoder), started by op_start together
//      with an emission of w, so that the two streams are aligned.
//   z  = x AND w (sc_multiplier), counted by a pulse_counter (z_count / N).
//   b  bias, Format 1 (dither_encoder), started one clock after x so that it
//      lines up with z, which the AND gate delays by a clock.
//   u  = dither scaled addition of z and b (scaled_adder), counted
//      (u_count / N).
// The paper sketches this use (weight precoded in Format 2, bias and data in
// Format 1); it analyses the scaled adder for two Format-1 operands, whereas
// here its first operand is the product stream, which is this design's choice
// of chaining. Timing: z_done comes N + 2 clocks after op_start, u_done one
// clock after that. op_start is taken only while op_ready.
//
// Matrix section: dither_matmul (Fig. 7 applied to all p*q*r partial products);
// see that module for its interface, which is brought out unchanged.
module dither_top #(
  parameter int unsigned N_W    = dc_pkg::N_W,
  parameter int unsigned FRAC_W = dc_pkg::FRAC_W,
  parameter int unsigned RND_W  = dc_pkg::RND_W,
  parameter int unsigned K      = dc_pkg::K_BITS,
  parameter int unsigned A_FRAC = dc_pkg::A_FRAC,
  parameter int unsigned DIM    = dc_pkg::DIM_MAX,
  localparam int unsigned DIM_W = $clog2(DIM + 1),
  localparam int unsigned EW    = K + A_FRAC,
  localparam int unsigned CW    = 2 * K + $clog2(DIM + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // ---- pulse-stream section
  input  logic [N_W-1:0]   n_len,
  input  logic             w_load,
  input  logic [FRAC_W:0]  w_val,
  output logic             w_loaded,
  output logic [N_W:0]     w_ones,
  input  logic             op_start,
  input  logic [FRAC_W:0]  x_val,
  input  logic [FRAC_W:0]  b_val,
  output logic             op_ready,
  output logic [N_W:0]     z_count,
  output logic             z_done,
  output logic [N_W:0]     u_count,
  output logic             u_done,
  output logic             x_upper,
  output logic             avg_phase,
  output logic             avg_seq_start,
  // ---- matrix section
  input  logic             mm_wr_en,
  input  logic             mm_wr_sel_b,
  input  logic [DIM_W-1:0] mm_wr_row,
  input  logic [DIM_W-1:0] mm_wr_col,
  input  logic [EW-1:0]    mm_wr_data,
  input  logic             mm_start,
  input  logic [DIM_W-1:0] mm_p,
  input  logic [DIM_W-1:0] mm_q,
  input  logic [DIM_W-1:0] mm_r,
  input  logic [DIM_W-1:0] mm_stride_a,
  input  logic [DIM_W-1:0] mm_stride_b,
  input  logic             mm_round_a_once,
  input  logic             mm_round_b_once,
  output logic             mm_busy,
  output logic             mm_done,
  input  logic [DIM_W-1:0] mm_rd_row,
  input  logic [DIM_W-1:0] mm_rd_col,
  output logic [CW-1:0]    mm_rd_data,
  output logic             mm_sat_a,
  output logic             mm_sat_b
);

  dc_pkg::pulse_t xs, ws, bs, zs, us;
  logic           x_busy, w_busy, b_busy, b_upper_unused;
  logic           go, go_d;
  logic [N_W:0]   z_len_unused, u_len_unused;

  assign op_ready = w_loaded && !w_busy && !x_busy && !b_busy && !go_d;
  assign go       = op_start && op_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) go_d <= 1'b0;
    else        go_d <= go;
  end

  spread_encoder #(.N_W(N_W), .FRAC_W(FRAC_W), .RND_W(RND_W), .SEED(32'h9E37_79B9)) u_w_enc (
    .clk, .rst_n, .load(w_load && !w_busy), .y(w_val), .n_len,
    .loaded(w_loaded), .s_count(w_ones), .start(go), .out(ws), .busy(w_busy));

  dither_encoder #(.N_W(N_W), .FRAC_W(FRAC_W), .RND_W(RND_W), .SEED(32'h2545_F491)) u_x_enc (
    .clk, .rst_n, .start(go), .x(x_val), .n_len, .out(xs), .busy(x_busy),
    .upper(x_upper));

  dither_encoder #(.N_W(N_W), .FRAC_W(FRAC_W), .RND_W(RND_W), .SEED(32'h3C6E_F372)) u_b_enc (
    .clk, .rst_n, .start(go_d), .x(b_val), .n_len, .out(bs), .busy(b_busy),
    .upper(b_upper_unused));

  sc_multiplier u_mul (.clk, .rst_n, .x(xs), .y(ws), .z(zs));

  scaled_adder #(.SEED(32'hB5AD_4ECE)) u_add (
    .clk, .rst_n, .x(zs), .y(bs), .u(us),
    .w_phase(avg_phase), .seq_start(avg_seq_start));

  pulse_counter #(.CNT_W(N_W + 1)) u_z_cnt (
    .clk, .rst_n, .in(zs), .count(z_count), .len(z_len_unused), .done(z_done));
  pulse_counter #(.CNT_W(N_W + 1)) u_u_cnt (
    .clk, .rst_n, .in(us), .count(u_count), .len(u_len_unused), .done(u_done));

  dither_matmul #(.K(K), .A_FRAC(A_FRAC), .DIM(DIM), .RND_W(RND_W)) u_mm (
    .clk, .rst_n,
    .wr_en(mm_wr_en), .wr_sel_b(mm_wr_sel_b), .wr_row(mm_wr_row),
    .wr_col(mm_wr_col), .wr_data(mm_wr_data),
    .start(mm_start), .p_dim(mm_p), .q_dim(mm_q), .r_dim(mm_r),
    .stride_a(mm_stride_a), .stride_b(mm_stride_b),
    .round_a_once(mm_round_a_once), .round_b_once(mm_round_b_once),
    .busy(mm_busy), .done(mm_done),
    .rd_row(mm_rd_row), .rd_col(mm_rd_col), .rd_data(mm_rd_data),
    .sat_a(mm_sat_a), .sat_b(mm_sat_b));

endmodule
