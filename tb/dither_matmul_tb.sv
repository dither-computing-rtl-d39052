// dither_matmul_tb -- loads random matrices (some elements at the top of the
// k-bit range, to make the rounders saturate), runs C = A B for several shapes
// and strides and compares every C_ik with a reference computed here: the same
// xorshift sequences (one word per partial product, in issue order i, k, j),
// the dither rounding definition from dc_ref_pkg and exact integer sums.
// Checks the run takes p*q*r + 3 clocks from the edge that takes `start` to
// `done` (one partial product per clock) and that `busy` covers it.
// Runs with round_a_once / round_b_once check the pre-pass too: the reference
// first rounds A row by row and/or B column by column (N = q, index
// sigma(j)), and the run takes [p*q] + [q*r] + 1 more clocks.
module dither_matmul_tb;
  import dc_ref_pkg::*;
  localparam int K = dc_pkg::K_BITS, AF = dc_pkg::A_FRAC, RW = dc_pkg::RND_W;
  localparam int DIM = dc_pkg::DIM_MAX;
  localparam int DW = $clog2(DIM + 1), EW = K + AF, CW = 2 * K + $clog2(DIM + 1);
  localparam logic [31:0] SEED_A = 32'h6A09_E667, SEED_B = 32'hBB67_AE85;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_sel_b = 0, start = 0, busy, done, sat_a, sat_b;
  logic round_a_once = 0, round_b_once = 0;
  logic [DW-1:0] wr_row, wr_col, p_dim, q_dim, r_dim, stride_a, stride_b, rd_row, rd_col;
  logic [EW-1:0] wr_data;
  logic [CW-1:0] rd_data;
  int checks = 0, failures = 0, nsat = 0;

  dither_matmul dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) nsat += (sat_a | sat_b);

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
  logic [31:0] st_a = SEED_A, st_b = SEED_B;

  function automatic longint unsigned dround(longint unsigned a, int n, int rank, logic [31:0] r);
    longint unsigned w, q;
    w = a >> AF;
    q = w + ref_dither(a & ((64'd1 << AF) - 1), AF, n, rank, r[RW-1:0], RW);
    return (q > (1 << K) - 1) ? (1 << K) - 1 : q;
  endfunction

  task automatic write_el(input bit sel_b, input int row, input int col, input longint unsigned v);
    @(negedge clk);
    wr_en = 1; wr_sel_b = sel_b; wr_row = DW'(row); wr_col = DW'(col); wr_data = EW'(v);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic run(input int p, input int q, input int r, input int sa, input int sb, input int sat_pct,
                     input bit ra = 0, input bit rb = 0);
    longint unsigned cexp, got;
    int cyc, is, exp_cyc;
    for (int i = 0; i < p; i++) for (int j = 0; j < q; j++) begin
      am[i][j] = ($urandom_range(0, 99) < sat_pct) ? (((1 << K) - 1) << AF) | $urandom_range(1, (1 << AF) - 1)
                                                  : $urandom_range(0, (1 << EW) - 1);
      write_el(0, i, j, am[i][j]);
    end
    for (int j = 0; j < q; j++) for (int k = 0; k < r; k++) begin
      bm[j][k] = ($urandom_range(0, 99) < sat_pct) ? (((1 << K) - 1) << AF) | $urandom_range(1, (1 << AF) - 1)
                                                  : $urandom_range(0, (1 << EW) - 1);
      write_el(1, j, k, bm[j][k]);
    end
    @(negedge clk);
    p_dim = DW'(p); q_dim = DW'(q); r_dim = DW'(r); stride_a = DW'(sa); stride_b = DW'(sb);
    round_a_once = ra; round_b_once = rb;
    start = 1;
    @(negedge clk);
    start = 0;
    {round_a_once, round_b_once} = '0;
    cyc = 1;
    while (!done) begin
      check(busy, "busy during the run");
      @(negedge clk); cyc++;
    end
    exp_cyc = p * q * r + 3 + (ra ? p * q : 0) + (rb ? q * r : 0) + ((ra || rb) ? 1 : 0);
    check(cyc == exp_cyc, $sformatf("run %0dx%0dx%0d (%0d%0d) took %0d clocks, expected %0d", p, q, r, ra, rb, cyc, exp_cyc));
    @(negedge clk);
    check(!busy, "idle after done");
    // pre-pass: each element rounded once, written back as an integer
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
        rd_row = DW'(i); rd_col = DW'(k);
        @(negedge clk);
        got = rd_data;
        check(got == cexp, $sformatf("C[%0d][%0d] = %0d expected %0d", i, k, got, cexp));
      end
  endtask

  initial begin
    {wr_row, wr_col, p_dim, q_dim, r_dim, stride_a, stride_b, rd_row, rd_col} = '0;
    wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 1, 1, 1, 1, 0);
    run(3, 4, 5, 2, 1, 10);
    run(7, 5, 9, 1, 3, 5);
    run(12, 10, 11, 5, 7, 5);
    run(16, 3, 16, 1, 5, 0);
    // rounding variants (strides below q as well)
    run(6, 7, 5, 3, 2, 5, 1, 0);
    run(5, 9, 8, 2, 4, 5, 0, 1);
    run(9, 11, 7, 5, 3, 5, 1, 1);
    run(4, 1, 3, 0, 0, 0, 1, 1);
    check(nsat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
