// dither_ksweep_tb -- matrix workload of dither_top at its default
// parameters: the error of C = A B for one pair of 100 x 100 matrices with
// entries drawn uniformly from [0, 1/2), for multiplier widths k = 1 .. 8.
// For each k the entries are scaled to [0, 2^k - 1]; they then never reach
// the clip level, so the 8-bit datapath performs the k-bit scheme. Every C_ik
// is compared with an exact reference (same random sequences, same dither
// rounding definition), and the Frobenius error e_f = ||AB - C~||_F is
// compared with round-to-nearest and with stochastic rounding of both
// operands, both computed here. Checks: dither rounding below stochastic
// rounding at every k, well below round-to-nearest for k <= 3, never far
// above it, and falling with k. 8 runs of 10^6 + 3 clocks.
module dither_ksweep_tb;
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
    repeat (12000000) @(posedge clk);
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
    real scale, ef_d, ef_t, ef_s, cr, ct, cs, e, fa, fb;
    real efd [9], eft [9], efs [9];
    int cyc, is;
    n_len = '0; w_val = '0; x_val = '0; b_val = '0;
    {mm_wr_row, mm_wr_col, mm_p, mm_q, mm_r, mm_stride_a, mm_stride_b, mm_rd_row, mm_rd_col} = '0;
    mm_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // one pair of matrices with entries in [0, 1/2), used for every k
    for (int row = 0; row < DIM; row++)
      for (int col = 0; col < DIM; col++) begin
        ar[row][col] = real'($urandom_range(0, 32'h7FFF_FFFF)) / 4294967296.0;
        br[row][col] = real'($urandom_range(0, 32'h7FFF_FFFF)) / 4294967296.0;
      end

    $display("C = A B, 100 x 100, entries in [0, 1/2), N_A = N_B = 100");
    $display("   k   traditional    stochastic        dither");
    for (int kb = 1; kb <= K; kb++) begin
      // alpha = a (2^k - 1) with AF fraction bits; it stays below 2^k - 1,
      // so the K-bit datapath computes the k-bit scheme exactly
      scale = real'((1 << kb) - 1);
      for (int s = 0; s < 2; s++)
        for (int row = 0; row < DIM; row++)
          for (int col = 0; col < DIM; col++) begin
            longint unsigned v;
            v = longint'((s == 0 ? ar[row][col] : br[row][col]) * scale * real'(1 << AF));
            if (s == 0) am[row][col] = v; else bm[row][col] = v;
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
      check(cyc == DIM * DIM * DIM + 3, $sformatf("k=%0d run took %0d clocks", kb, cyc));

      ef_d = 0; ef_t = 0; ef_s = 0; is = 0;
      for (int i = 0; i < DIM; i++)
        for (int k = 0; k < DIM; k++) begin
          cexp = 0; cr = 0; ct = 0; cs = 0;
          for (int j = 0; j < DIM; j++) begin
            cexp += dround(am[i][j], DIM, is % DIM, st_a) * dround(bm[j][k], DIM, ((is % DIM) * SB) % DIM, st_b);
            is++;
            st_a = xorshift32(st_a);
            st_b = xorshift32(st_b);
            cr += ar[i][j] * br[j][k];
            ct += real'($rtoi(ar[i][j] * scale + 0.5)) * real'($rtoi(br[j][k] * scale + 0.5));
            // stochastic rounding of both operands, for comparison
            fa = $floor(ar[i][j] * scale); fb = $floor(br[j][k] * scale);
            fa += (real'($urandom) / 4294967296.0 < ar[i][j] * scale - fa) ? 1.0 : 0.0;
            fb += (real'($urandom) / 4294967296.0 < br[j][k] * scale - fb) ? 1.0 : 0.0;
            cs += fa * fb;
          end
          mm_rd_row = DW'(i); mm_rd_col = DW'(k);
          @(negedge clk);
          check(longint'(mm_rd_data) == cexp, $sformatf("k=%0d C[%0d][%0d] = %0d expected %0d", kb, i, k, mm_rd_data, cexp));
          e = real'(mm_rd_data) / (scale * scale) - cr;  ef_d += e * e;
          e = ct / (scale * scale) - cr;                 ef_t += e * e;
          e = cs / (scale * scale) - cr;                 ef_s += e * e;
        end
      efd[kb] = $sqrt(ef_d); eft[kb] = $sqrt(ef_t); efs[kb] = $sqrt(ef_s);
      $display("  %2d  %12.4f  %12.4f  %12.4f", kb, eft[kb], efs[kb], efd[kb]);
      check(efd[kb] < efs[kb], $sformatf("k=%0d: dither rounding %f not below stochastic rounding %f", kb, efd[kb], efs[kb]));
      check(efd[kb] < 1.5 * eft[kb], $sformatf("k=%0d: dither rounding %f far above traditional %f", kb, efd[kb], eft[kb]));
      if (kb > 1) check(efd[kb] < efd[kb-1], $sformatf("k=%0d: error does not fall with k", kb));
    end
    // small k: dither rounding well below traditional rounding
    for (int kb = 1; kb <= 3; kb++)
      check(efd[kb] < 0.8 * eft[kb], $sformatf("k=%0d: dither %f not below traditional %f", kb, efd[kb], eft[kb]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
