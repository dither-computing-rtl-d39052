// dither_bit_tb -- compares every output of dither_bit with the exact integer
// reference of the dither encoding for random and corner-case operands, and
// checks the certain pulses (rank < floor(Nx) for x <= 1/2, rank >= ceil(Nx)
// for x > 1/2) and the averaged count E = N x over the ranks.
module dither_bit_tb;
  import dc_ref_pkg::*;
  localparam int NW = dc_pkg::N_W, FW = dc_pkg::FRAC_W, RW = dc_pkg::RND_W;

  logic [FW:0]    x;
  logic [NW-1:0]  n_len, rank;
  logic [RW-1:0]  rnd;
  logic           bit_, upper, det;
  int checks = 0, failures = 0;

  dither_bit dut (.x, .n_len, .rank, .rnd, .bit_, .upper, .det);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned xi, n, nx, nfl, ncl;
    real sum, expect_sum;
    // random operands
    for (int t = 0; t < 20000; t++) begin
      n  = $urandom_range(1, (t % 3 == 0) ? 20 : 30000);
      xi = $urandom_range(0, 1 << FW);
      if (t % 7 == 0) xi = (longint'($urandom_range(0, n)) << FW) / n; // near m/N
      x     = (FW+1)'(xi);
      n_len = NW'(n);
      rank  = NW'($urandom_range(0, n - 1));
      rnd   = RW'($urandom);
      #1;
      check(bit_ == ref_dither(xi, FW, n, rank, rnd, RW),
            $sformatf("x=%0d N=%0d rank=%0d r=%0d got %0b", xi, n, rank, rnd, bit_));
      check(upper == (xi * 2 > (64'd1 << FW)), "upper flag");
      nx  = n * xi;
      nfl = nx >> FW;
      ncl = (nx + (64'd1 << FW) - 1) >> FW;
      if (!upper && rank < nfl) check(bit_ == 1'b1 && det, "certain one");
      if (upper && rank >= ncl) check(bit_ == 1'b0 && det, "certain zero");
    end
    // corner cases: 0, 1/2, 1
    for (int t = 0; t < 200; t++) begin
      n = $urandom_range(1, 1000);
      n_len = NW'(n);
      rank  = NW'($urandom_range(0, n - 1));
      rnd   = RW'($urandom);
      x = '0;          #1 check(bit_ == 1'b0, "x = 0 gives 0");
      x = 1'b1 << FW;  #1 check(bit_ == 1'b1, "x = 1 gives 1");
      x = 1'b1 << (FW-1); #1
      check(bit_ == ref_dither(64'd1 << (FW-1), FW, n, rank, rnd, RW), "x = 1/2");
      check(!upper, "x = 1/2 is the lower case");
    end
    // unbiased in expectation: average count over many random words
    for (int t = 0; t < 10; t++) begin
      n  = $urandom_range(3, 50);
      xi = $urandom_range(0, 1 << FW);
      x = (FW+1)'(xi); n_len = NW'(n);
      sum = 0;
      for (int rep = 0; rep < 400; rep++)
        for (int k = 0; k < n; k++) begin
          rank = NW'(k); rnd = RW'($urandom); #1;
          sum += bit_;
        end
      sum = sum / 400.0;
      expect_sum = real'(n) * real'(xi) / real'(64'd1 << FW);
      check((sum - expect_sum) < 0.25 && (expect_sum - sum) < 0.25,
            $sformatf("mean count %f vs N x = %f", sum, expect_sum));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
