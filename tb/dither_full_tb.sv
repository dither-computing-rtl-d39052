// dither_full_tb -- full-size run of dither_top at its default parameters:
// the 100 x 100 by 100 x 100 matrix product with elements drawn uniformly from
// [0, 1/2) and scaled to the 8-bit quantizer range [0, 255] (N_A = r = 100,
// N_B = p = 100), which is the matrix experiment of the evaluation at k = 8.
// Every C_ik is compared with an exact reference (same xorshift sequences and
// dither rounding definition). The Frobenius error e_f = ||AB - C~||_F of the
// dither-rounded product and of a round-to-nearest product are printed for
// information; the check is that e_f stays below 1 (the expected value is
// near 0.55; an index scheme whose rounding errors line up gives about 4). A multiply-and-add of the stream section at N = 100 is also
// run. The run takes 10^6 + 3 clocks.
module dither_full_tb;
  import dc_ref_pkg::*;
  localparam int NW = dc_pkg::N_W, FW = dc_pkg::FRAC_W;
  localparam int K = dc_pkg::K_BITS, AF = dc_pkg::A_FRAC, RW = dc_pkg::RND_W;
  localparam int DIM = dc_pkg::DIM_MAX;
  localparam int DW = $clog2(DIM + 1), EW = K + AF, CW = 2 * K + $clog2(DIM + 1);
  localparam logic [31:0] SEED_A = 32'h6A09_E667, SEED_B = 32'hBB67_AE85;
  localparam int SB = 37;   // permutation stride of the right operand

  logic clk = 0, rst_n = 0;
  logic [NW-1:0] n_len;
  logic w_load = 0, op_start = 0, w_loaded, op_ready, z_done, u_done;
  logic x_upper, avg_phase, avg_seq_start;
  logic [FW:0] w_val, x_val, b_val;
  logic [NW:0] w_ones, z_count, u_count;
  logic mm_wr_en = 0, mm_wr_sel_b = 0, mm_start = 0, mm_busy, mm_done, mm_sat_a, mm_sat_b;
  logic mm_round_a_once = 0, mm_round_b_once = 0;
  logic [DW-1:0] mm_wr_row, mm_wr_col, mm_p, mm_q, mm_r, mm_stride_a, mm_stride_b, mm_rd_row, mm_rd_col;
  logic [EW-1:0] mm_wr_data;
  logic [CW-1:0] mm_rd_data;
  int checks = 0, failures = 0;

  dither_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned am [DIM][DIM], bm [DIM][DIM];
  real ar [DIM][DIM], br [DIM][DIM];
  logic [31:0] st_a = SEED_A, st_b = SEED_B;

  function automatic longint unsigned dround(longint unsigned a, int n, int rank, logic [31:0] r);
    longint unsigned q;
    q = (a >> AF) + ref_dither(a & ((64'd1 << AF) - 1), AF, n, rank, r[RW-1:0], RW);
    return (q > (1 << K) - 1) ? (1 << K) - 1 : q;
  endfunction

  initial begin
    longint unsigned cexp;
    real scale, ef_d, ef_t, cr, ct, e;
    int cyc, zc, is;
    scale = real'((1 << K) - 1);
    n_len = '0; w_val = '0; x_val = '0; b_val = '0;
    {mm_wr_row, mm_wr_col, mm_p, mm_q, mm_r, mm_stride_a, mm_stride_b, mm_rd_row, mm_rd_col} = '0;
    mm_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // matrices: a in [0, 1/2), alpha = a (2^k - 1) with AF fraction bits
    for (int s = 0; s < 2; s++)
      for (int row = 0; row < DIM; row++)
        for (int col = 0; col < DIM; col++) begin
          real a;
          longint unsigned v;
          a = real'($urandom_range(0, 32'h7FFF_FFFF)) / 4294967296.0;
          v = longint'(a * scale * real'(1 << AF));
          if (s == 0) begin am[row][col] = v; ar[row][col] = a; end
          else        begin bm[row][col] = v; br[row][col] = a; end
          @(negedge clk);
          mm_wr_en = 1; mm_wr_sel_b = s[0]; mm_wr_row = DW'(row); mm_wr_col = DW'(col); mm_wr_data = EW'(v);
        end
    @(negedge clk);
    mm_wr_en = 0;
    mm_p = DW'(DIM); mm_q = DW'(DIM); mm_r = DW'(DIM); mm_stride_a = DW'(1); mm_stride_b = DW'(SB);
    mm_start = 1;
    @(negedge clk);
    mm_start = 0;
    cyc = 1;
    while (!mm_done) begin @(negedge clk); cyc++; end
    check(cyc == DIM * DIM * DIM + 3, $sformatf("full run took %0d clocks", cyc));

    ef_d = 0; ef_t = 0; is = 0;
    for (int i = 0; i < DIM; i++)
      for (int k = 0; k < DIM; k++) begin
        cexp = 0; cr = 0; ct = 0;
        for (int j = 0; j < DIM; j++) begin
          cexp += dround(am[i][j], DIM, is % DIM, st_a) * dround(bm[j][k], DIM, ((is % DIM) * SB) % DIM, st_b);
          is++;
          st_a = xorshift32(st_a);
          st_b = xorshift32(st_b);
          cr += ar[i][j] * br[j][k];
          ct += real'($rtoi(ar[i][j] * scale + 0.5)) * real'($rtoi(br[j][k] * scale + 0.5));
        end
        mm_rd_row = DW'(i); mm_rd_col = DW'(k);
        @(negedge clk);
        check(longint'(mm_rd_data) == cexp, $sformatf("C[%0d][%0d] = %0d expected %0d", i, k, mm_rd_data, cexp));
        e = real'(mm_rd_data) / (scale * scale) - cr;  ef_d += e * e;
        e = ct / (scale * scale) - cr;                 ef_t += e * e;
      end
    ef_d = $sqrt(ef_d); ef_t = $sqrt(ef_t);
    $display("k=%0d 100x100 product: e_f dither rounding %f, round to nearest %f", K, ef_d, ef_t);
    check(ef_d < 1.0, "dither-rounded product close to AB");

    // one multiply-and-add of the stream section at N = 100
    @(negedge clk);
    n_len = NW'(100); w_val = (FW+1)'((longint'(30) << FW) / 100 + 1); w_load = 1;
    @(negedge clk);
    w_load = 0;
    while (!w_loaded) @(negedge clk);
    x_val = (FW+1)'(1 << (FW - 1)); b_val = '0; op_start = 1;
    @(negedge clk);
    op_start = 0;
    while (!z_done) @(negedge clk);
    zc = z_count;
    check(zc == int'(w_ones) / 2 || zc == (int'(w_ones) + 1) / 2,
          $sformatf("x = 1/2 times w: %0d of %0d ones", zc, w_ones));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
