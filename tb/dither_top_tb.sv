// dither_top_tb -- end-to-end test of dither_top at its default parameters.
//
// Pulse-stream section: a weight w is precoded in Format 2, then many
// multiply-and-add operations u = (x w + b)/2 run. Checked per operation:
//  * z_done N+2 and u_done N+3 clocks after the edge that takes op_start;
//  * for exact operands x = a/N, w = c/N the product count is
//    floor(a c/N) or ceil(a c/N) (the spread ones of w in the first a slots);
//  * the u count equals the count of the scaled addition formed from the z
//    and b streams seen inside the design and the coin it reports;
//  * for arbitrary operands the mean product count over many operations is
//    x s (s = ones in the precoded weight) and the mean of 2u is z + b.
// Matrix section: two small C = A B runs compared with an exact reference
// (same as dither_matmul_tb), one of them with saturating elements.
// Each mechanism (weight precode, both halves of the dither encoding, both
// coins of the scaled adder, an op_start held off while busy, a matrix run,
// a non-identity permutation stride, a saturated rounding, the A and B
// round-once pre-passes) is counted and a
// failure is counted for any that never happened.
module dither_top_tb;
  import dc_ref_pkg::*;
  localparam int NW = dc_pkg::N_W, FW = dc_pkg::FRAC_W;
  localparam int K = dc_pkg::K_BITS, AF = dc_pkg::A_FRAC, RW = dc_pkg::RND_W;
  localparam int DIM = dc_pkg::DIM_MAX;
  localparam int DW = $clog2(DIM + 1), EW = K + AF, CW = 2 * K + $clog2(DIM + 1);
  localparam logic [31:0] SEED_A = 32'h6A09_E667, SEED_B = 32'hBB67_AE85;

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

  // mechanism counters
  int n_precode = 0, n_lower = 0, n_upper = 0, n_coin0 = 0, n_coin1 = 0;
  int n_held = 0, n_mm_runs = 0, n_stride = 0, n_sat = 0;
  int n_round_a_once = 0, n_round_b_once = 0;
  always @(posedge clk) begin
    if (avg_seq_start) begin if (avg_phase) n_coin1++; else n_coin0++; end
    n_sat += (mm_sat_a | mm_sat_b);
  end

  // model of the scaled addition from the streams inside the design
  int u_model = 0, u_model_done = -1, pulse_idx = 0;
  bit coin;
  always @(posedge clk) if (rst_n && dut.zs.valid) begin
    if (avg_seq_start) begin coin = avg_phase; pulse_idx = 1; u_model = 0; end
    u_model += ((((pulse_idx % 2) == 1) ^ coin) ? dut.zs.bit_ : dut.bs.bit_);
    pulse_idx++;
    if (dut.zs.last) u_model_done = u_model;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic precode(input longint unsigned wi, input int n);
    @(negedge clk);
    n_len = NW'(n); w_val = (FW+1)'(wi); w_load = 1;
    @(negedge clk);
    w_load = 0;
    while (!w_loaded) @(negedge clk);
    n_precode++;
  endtask

  // one multiply-and-add; returns the z and u counts
  task automatic op(input longint unsigned xi, input longint unsigned bi, input int n,
                    output int zc, output int uc);
    int cyc;
    @(negedge clk);
    x_val = (FW+1)'(xi); b_val = (FW+1)'(bi); op_start = 1;
    #1;
    check(op_ready, "ready before an operation");
    if (xi * 2 > (64'd1 << FW)) n_upper++; else n_lower++;
    @(negedge clk);
    cyc = 1;
    // hold op_start for a clock: the design must not take it again
    if ($urandom_range(0, 3) == 0) begin
      check(!op_ready, "not ready while an operation runs");
      n_held++;
      @(negedge clk);
      cyc++;
    end
    op_start = 0;
    while (!z_done) begin @(negedge clk); cyc++; end
    check(cyc == n + 2, $sformatf("z_done after %0d clocks, N=%0d", cyc, n));
    zc = z_count;
    @(negedge clk);
    check(u_done, "u_done one clock after z_done");
    uc = u_count;
    check(uc == u_model_done, $sformatf("u count %0d, scaled addition of the streams gives %0d", uc, u_model_done));
    @(negedge clk);
  endtask

  longint unsigned am [DIM][DIM], bm [DIM][DIM];
  logic [31:0] st_a = SEED_A, st_b = SEED_B;

  function automatic longint unsigned dround(longint unsigned a, int n, int rank, logic [31:0] r);
    longint unsigned q;
    q = (a >> AF) + ref_dither(a & ((64'd1 << AF) - 1), AF, n, rank, r[RW-1:0], RW);
    return (q > (1 << K) - 1) ? (1 << K) - 1 : q;
  endfunction

  task automatic mm_run(input int p, input int q, input int r, input int sa, input int sb, input int sat_pct,
                        input bit ra = 0, input bit rb = 0);
    longint unsigned cexp;
    int cyc, is;
    for (int s = 0; s < 2; s++)
      for (int row = 0; row < ((s == 0) ? p : q); row++)
        for (int col = 0; col < ((s == 0) ? q : r); col++) begin
          longint unsigned v;
          v = ($urandom_range(0, 99) < sat_pct) ? (((1 << K) - 1) << AF) | $urandom_range(1, (1 << AF) - 1)
                                               : $urandom_range(0, (1 << EW) - 1);
          if (s == 0) am[row][col] = v; else bm[row][col] = v;
          @(negedge clk);
          mm_wr_en = 1; mm_wr_sel_b = s[0]; mm_wr_row = DW'(row); mm_wr_col = DW'(col); mm_wr_data = EW'(v);
          @(negedge clk);
          mm_wr_en = 0;
        end
    @(negedge clk);
    mm_p = DW'(p); mm_q = DW'(q); mm_r = DW'(r); mm_stride_a = DW'(sa); mm_stride_b = DW'(sb);
    mm_round_a_once = ra; mm_round_b_once = rb;
    mm_start = 1;
    @(negedge clk);
    mm_start = 0;
    {mm_round_a_once, mm_round_b_once} = '0;
    cyc = 1;
    while (!mm_done) begin @(negedge clk); cyc++; end
    check(cyc == p * q * r + 3 + (ra ? p * q : 0) + (rb ? q * r : 0) + ((ra || rb) ? 1 : 0),
          "matrix run: pre-pass and one partial product per clock");
    n_mm_runs++;
    if (sa != 1 || sb != 1) n_stride++;
    if (ra) n_round_a_once++;
    if (rb) n_round_b_once++;
    // pre-pass reference: round once, keep the integer
    if (ra)
      for (int i = 0; i < p; i++)
        for (int j = 0; j < q; j++) begin
          am[i][j] = dround(am[i][j], q, (j * sa) % q, st_a) << AF;
          st_a = xorshift32(st_a);
        end
    if (rb)
      for (int k = 0; k < r; k++)
        for (int j = 0; j < q; j++) begin
          bm[j][k] = dround(bm[j][k], q, (j * sb) % q, st_b) << AF;
          st_b = xorshift32(st_b);
        end
    is = 0;
    for (int i = 0; i < p; i++)
      for (int k = 0; k < r; k++) begin
        cexp = 0;
        for (int j = 0; j < q; j++) begin
          cexp += dround(am[i][j], r, ((is % r) * sa) % r, st_a) * dround(bm[j][k], p, ((is % p) * sb) % p, st_b);
          is++;
          st_a = xorshift32(st_a);
          st_b = xorshift32(st_b);
        end
        mm_rd_row = DW'(i); mm_rd_col = DW'(k);
        @(negedge clk);
        check(longint'(mm_rd_data) == cexp, $sformatf("C[%0d][%0d] = %0d expected %0d", i, k, mm_rd_data, cexp));
      end
  endtask

  initial begin
    int n, a, c, zc, uc, bc;
    longint unsigned xi, wi, bi;
    real zmean, dmean, ex;
    n_len = '0; w_val = '0; x_val = '0; b_val = '0;
    {mm_wr_row, mm_wr_col, mm_p, mm_q, mm_r, mm_stride_a, mm_stride_b, mm_rd_row, mm_rd_col} = '0;
    mm_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!w_loaded && !op_ready, "nothing to emit after reset");

    // exact operands, N = 64
    n = 64;
    for (int t = 0; t < 8; t++) begin
      c = $urandom_range(0, n);
      precode((longint'(c) << FW) / n, n);
      check(int'(w_ones) == c, "exact weight precoded");
      for (int e = 0; e < 10; e++) begin
        a  = $urandom_range(0, n);
        bc = $urandom_range(0, n);
        op((longint'(a) << FW) / n, (longint'(bc) << FW) / n, n, zc, uc);
        check(zc == (a * c) / n || zc == (a * c + n - 1) / n,
              $sformatf("z = %0d for a=%0d c=%0d N=%0d", zc, a, c, n));
      end
    end
    // arbitrary operands: unbiased means
    for (int t = 0; t < 4; t++) begin
      n  = $urandom_range(30, 120);
      wi = $urandom_range(0, 1 << FW);
      xi = $urandom_range(0, 1 << FW);
      bi = $urandom_range(0, 1 << FW);
      precode(wi, n);
      zmean = 0; dmean = 0;
      for (int e = 0; e < 200; e++) begin
        op(xi, bi, n, zc, uc);
        zmean += zc;
        dmean += 2.0 * uc - zc - real'(n) * real'(bi) / real'(64'd1 << FW);
      end
      zmean /= 200.0; dmean /= 200.0;
      ex = real'(xi) / real'(64'd1 << FW) * real'(w_ones);
      check(zmean - ex < 0.6 && ex - zmean < 0.6, $sformatf("mean z %f vs x s %f", zmean, ex));
      check(dmean < 1.2 && dmean > -1.2, $sformatf("mean of 2u - z - N b: %f", dmean));
    end

    mm_run(6, 7, 5, 1, 1, 0);
    mm_run(9, 4, 8, 3, 2, 10);
    mm_run(5, 6, 7, 5, 1, 5, 1, 0);      // A rounded once per element
    mm_run(7, 8, 6, 3, 5, 5, 1, 1);      // A and B rounded separately

    check(n_precode > 0, "mechanism: weight precoded");
    check(n_lower > 0 && n_upper > 0, "mechanism: both halves of the dither encoding");
    check(n_coin0 > 0 && n_coin1 > 0, "mechanism: both scaled-adder coins");
    check(n_held > 0, "mechanism: op_start held off while busy");
    check(n_mm_runs > 0, "mechanism: matrix run");
    check(n_stride > 0, "mechanism: non-identity permutation");
    check(n_sat > 0, "mechanism: saturated rounding");
    check(n_round_a_once > 0, "mechanism: A rounded once (pre-pass)");
    check(n_round_b_once > 0, "mechanism: B rounded once (pre-pass)");
    $display("mechanisms: precode=%0d lower=%0d upper=%0d coin0=%0d coin1=%0d held=%0d mm_runs=%0d stride=%0d sat=%0d a_once=%0d b_once=%0d",
             n_precode, n_lower, n_upper, n_coin0, n_coin1, n_held, n_mm_runs, n_stride, n_sat,
             n_round_a_once, n_round_b_once);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
