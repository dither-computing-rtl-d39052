// dither_rounder_tb -- random fixed-point inputs against the reference
// d(alpha, i) = floor(alpha) + X_i clipped to 2^k - 1, including inputs whose
// integer part is already 2^k - 1 (saturation) and exact integers (no
// rounding). Also checks that the N uses of one value, with the N indices,
// average to alpha: the sum keeps the certain pulses and its mean deviation
// from N alpha over many values is close to zero.
module dither_rounder_tb;
  import dc_ref_pkg::*;
  localparam int K = dc_pkg::K_BITS, AF = dc_pkg::A_FRAC, RW = dc_pkg::RND_W;
  localparam int NW = $clog2(dc_pkg::DIM_MAX + 1);
  logic [K+AF-1:0] alpha;
  logic [NW-1:0]   n_len, rank;
  logic [RW-1:0]   rnd;
  logic [K-1:0]    q;
  logic            sat;
  int checks = 0, failures = 0;

  dither_rounder dut (.alpha, .n_len, .rank, .rnd, .q, .sat);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned a, whole, fr, expq, sum;
    int n, nsat;
    real dev = 0;
    bit b;
    nsat = 0;
    for (int t = 0; t < 20000; t++) begin
      a = $urandom_range(0, (1 << (K + AF)) - 1);
      if (t % 5 == 0) a = ((1 << K) - 1) << AF | $urandom_range(0, (1 << AF) - 1);
      if (t % 11 == 0) a = a & ~((64'd1 << AF) - 1);
      n = $urandom_range(1, dc_pkg::DIM_MAX);
      alpha = (K+AF)'(a); n_len = NW'(n);
      rank = NW'($urandom_range(0, n - 1));
      rnd = RW'($urandom);
      #1;
      whole = a >> AF;
      fr    = a & ((64'd1 << AF) - 1);
      b     = ref_dither(fr, AF, n, rank, rnd, RW);
      expq  = whole + b;
      if (expq > (1 << K) - 1) expq = (1 << K) - 1;
      check(longint'(q) == expq, $sformatf("alpha=%0h N=%0d rank=%0d q=%0d expected %0d", a, n, rank, q, expq));
      check(sat == (b && whole == (1 << K) - 1), "saturation flag");
      nsat += sat;
    end
    check(nsat > 100, "saturation exercised");
    // N uses with the N indices: sum of the rounded values
    for (int t = 0; t < 300; t++) begin
      n = $urandom_range(1, dc_pkg::DIM_MAX);
      whole = $urandom_range(0, (1 << K) - 2);
      fr = ((longint'($urandom_range(0, n)) << AF) / n);        // close to m/N
      if (fr >= (64'd1 << AF)) fr = (64'd1 << AF) - 1;
      alpha = (K+AF)'((whole << AF) | fr); n_len = NW'(n);
      sum = 0;
      for (int i = 0; i < n; i++) begin
        rank = NW'(i); rnd = RW'($urandom); #1;
        sum += q;
      end
      if (fr * 2 <= (64'd1 << AF))
        check(sum >= whole * n + ((n * fr) >> AF),
              $sformatf("N=%0d sum %0d below the certain ones", n, sum));
      else
        check(sum <= whole * n + ((n * fr + (64'd1 << AF) - 1) >> AF),
              $sformatf("N=%0d sum %0d above the possible ones", n, sum));
      dev += real'(sum) - real'(whole * n) - real'(n * fr) / real'(64'd1 << AF);
    end
    dev = dev / 300.0;
    check(dev < 0.3 && dev > -0.3, $sformatf("mean deviation of the N-use sum %f", dev));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
