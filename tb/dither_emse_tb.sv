// dither_emse_tb -- accuracy workload of the pulse-stream section of
// dither_top at its default parameters: the sample EMSE L and |bias| of
//   * the representation of x (weight precoded as w = 1, so z = x),
//   * the product z = x y (weight w = y, re-precoded for every trial so that
//     each trial uses a fresh sample of Y, as in the analysis),
//   * the scaled addition u = (x + y)/2 (w = 1, bias operand b = y, so u
//     averages two Format-1 streams),
// for several lengths N, over P random pairs (x, y) and T trials per pair.
// The pairs are the same for every N. L is the mean over pairs of the mean
// squared error over trials; |bias| is the mean over pairs of the absolute
// mean error.
//
// Checks, for each quantity and N:
//   * N^2 L stays below a constant (O(1/N^2) mean squared error, where
//     stochastic coding would give N^2 L growing like N);
//   * the error averaged over all pairs and trials is within 5 standard
//     errors of zero (no bias).
// A table of N, L and |bias| is printed.
module dither_emse_tb;
  localparam int NW = dc_pkg::N_W, FW = dc_pkg::FRAC_W;
  localparam int K = dc_pkg::K_BITS, AF = dc_pkg::A_FRAC;
  localparam int DIM = dc_pkg::DIM_MAX;
  localparam int DW = $clog2(DIM + 1), EW = K + AF, CW = 2 * K + $clog2(DIM + 1);
  localparam int P = 50, T = 50;          // pairs, trials per pair
  localparam int NN = 6;
  localparam int NLIST [NN] = '{8, 32, 128, 512, 2048, 8192};
  localparam longint unsigned ONE = 64'd1 << FW;

  logic clk = 0, rst_n = 0;
  logic [NW-1:0] n_len;
  logic w_load = 0, op_start = 0, w_loaded, op_ready, z_done, u_done;
  logic x_upper, avg_phase, avg_seq_start;
  logic [FW:0] w_val, x_val, b_val;
  logic [NW:0] w_ones, z_count, u_count;
  logic mm_wr_en = 0, mm_wr_sel_b = 0, mm_start = 0, mm_busy, mm_done, mm_sat_a, mm_sat_b;
  logic mm_round_a_once = 0, mm_round_b_once = 0;
  logic [DW-1:0] mm_wr_row = '0, mm_wr_col = '0, mm_p = DW'(1), mm_q = DW'(1), mm_r = DW'(1);
  logic [DW-1:0] mm_stride_a = DW'(1), mm_stride_b = DW'(1), mm_rd_row = '0, mm_rd_col = '0;
  logic [EW-1:0] mm_wr_data = '0;
  logic [CW-1:0] mm_rd_data;
  int checks = 0, failures = 0;

  dither_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000000) @(posedge clk);
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
  endtask

  task automatic op(input longint unsigned xi, input longint unsigned bi,
                    output int zc, output int uc);
    while (!op_ready) @(negedge clk);
    x_val = (FW+1)'(xi); b_val = (FW+1)'(bi); op_start = 1;
    @(negedge clk);
    op_start = 0;
    while (!z_done) @(negedge clk);
    zc = z_count;
    @(negedge clk);
    uc = u_count;
  endtask

  longint unsigned xs [P], ys [P];

  // accumulate one quantity: per-pair sums of the error and its square
  typedef struct {real sum_l; real sum_absb; real sum_e; real sum_e2; int n;} acc_t;

  function automatic void add_pair(ref acc_t a, input real e_sum, input real e2_sum);
    a.sum_l    += e2_sum / T;
    a.sum_absb += (e_sum / T < 0) ? -e_sum / T : e_sum / T;
    a.sum_e    += e_sum;
    a.sum_e2   += e2_sum;
    a.n        += T;
  endfunction

  task automatic judge(input string what, input acc_t a, input int n, input real l_bound);
    real l, b, mean, sd;
    l = a.sum_l / P;
    b = a.sum_absb / P;
    mean = a.sum_e / a.n;
    sd = $sqrt(a.sum_e2 / a.n - mean * mean);
    $display("  %-14s N=%4d  L=%10.3e  N^2 L=%6.3f  |bias|=%10.3e", what, n, l, l * n * n, b);
    check(l * n * n <= l_bound, $sformatf("%s N=%0d: N^2 L = %f above %f", what, n, l * n * n, l_bound));
    check(mean <= 5.0 * sd / $sqrt(real'(a.n)) + 1e-9 && -mean <= 5.0 * sd / $sqrt(real'(a.n)) + 1e-9,
          $sformatf("%s N=%0d: mean error %e, standard error %e", what, n, mean, sd / $sqrt(real'(a.n))));
  endtask

  initial begin
    acc_t ax, az, au;
    int zc, uc, n;
    real x, y, e, ex, ex2, ez, ez2, eu, eu2;

    n_len = NW'(8); w_val = '0; x_val = '0; b_val = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int p = 0; p < P; p++) begin
      xs[p] = longint'($urandom_range(0, 32'(ONE)));
      ys[p] = longint'($urandom_range(0, 32'(ONE)));
    end

    $display("pulse-stream accuracy, %0d pairs x %0d trials", P, T);
    for (int ni = 0; ni < NN; ni++) begin
      n = NLIST[ni];
      ax = '{0.0, 0.0, 0.0, 0.0, 0}; az = ax; au = ax;
      for (int p = 0; p < P; p++) begin
        x = real'(xs[p]) / real'(ONE);
        y = real'(ys[p]) / real'(ONE);
        // representation and scaled addition: w = 1 (z = x), b = y
        precode(ONE, n);
        check(int'(w_ones) == n, "w = 1 precodes N ones");
        ex = 0; ex2 = 0; eu = 0; eu2 = 0;
        for (int t = 0; t < T; t++) begin
          op(xs[p], ys[p], zc, uc);
          e = real'(zc) / n - x;             ex += e; ex2 += e * e;
          e = real'(uc) / n - (x + y) / 2.0; eu += e; eu2 += e * e;
        end
        add_pair(ax, ex, ex2);
        add_pair(au, eu, eu2);
        // product: a fresh Format-2 sample of y for every trial
        ez = 0; ez2 = 0;
        for (int t = 0; t < T; t++) begin
          precode(ys[p], n);
          op(xs[p], 0, zc, uc);
          e = real'(zc) / n - x * y;         ez += e; ez2 += e * e;
        end
        add_pair(az, ez, ez2);
      end
      judge("x", ax, n, 1.0);
      judge("z = x y", az, n, 2.0);
      judge("u = (x + y)/2", au, n, 1.5);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
