// spread_encoder_tb -- checks Format-2 encoding. Load takes exactly N clocks
// (loaded rises then); for y = m/N the precoded count is m; every emission has
// exactly s ones in N clocks (one per clock, `last` on the N-th) with gaps of
// floor(N/s) or ceil(N/s) between successive ones; the phase differs between
// emissions; for arbitrary y the mean of s over many loads equals N y.
module spread_encoder_tb;
  localparam int NW = dc_pkg::N_W, FW = dc_pkg::FRAC_W;
  logic clk = 0, rst_n = 0, load = 0, start = 0;
  logic [FW:0]   y;
  logic [NW-1:0] n_len;
  logic loaded, busy;
  logic [NW:0] s_count;
  dc_pkg::pulse_t out;
  int checks = 0, failures = 0;

  spread_encoder dut (.clk, .rst_n, .load, .y, .n_len, .loaded, .s_count,
                      .start, .out, .busy);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_load(input longint unsigned yi, input int n);
    int cyc;
    @(negedge clk);
    y = (FW+1)'(yi); n_len = NW'(n); load = 1;
    @(negedge clk);
    load = 0;
    cyc = 1;
    while (!loaded) begin @(negedge clk); cyc++; end
    check(cyc == n + 1, $sformatf("load of N=%0d took %0d clocks", n, cyc - 1));
  endtask

  task automatic emit(input int n, output bit seq[$]);
    seq = {};
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int k = 0; k < n; k++) begin
      check(out.valid, "valid during emission");
      check(out.last == (k == n - 1), "last on N-th pulse");
      seq.push_back(out.bit_);
      @(negedge clk);
    end
    check(!out.valid && loaded, "idle and still loaded after emission");
  endtask

  task automatic check_spread(input bit seq[$], input int n, input int s);
    int cnt, prev, gap, lo, hi;
    cnt = 0; prev = -1;
    lo = (s == 0) ? 0 : n / s;
    hi = (s == 0) ? 0 : (n + s - 1) / s;
    foreach (seq[k]) if (seq[k]) begin
      cnt++;
      if (prev >= 0) begin
        gap = k - prev;
        check(gap >= lo && gap <= hi, $sformatf("gap %0d not in [%0d,%0d] (N=%0d s=%0d)", gap, lo, hi, n, s));
      end
      prev = k;
    end
    check(cnt == s, $sformatf("emitted %0d ones, expected %0d", cnt, s));
  endtask

  initial begin
    bit seq[$];
    int n, m, first_pos, distinct;
    longint unsigned yi;
    real mean, ex;
    y = '0; n_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!loaded, "not loaded after reset");
    for (int t = 0; t < 30; t++) begin
      n  = 1 << $urandom_range(1, 8);
      m  = $urandom_range(0, n);
      yi = (longint'(m) << FW) / n;
      do_load(yi, n);
      check(int'(s_count) == m, $sformatf("s = %0d for %0d/%0d", s_count, m, n));
      first_pos = -1; distinct = 0;
      for (int e = 0; e < 6; e++) begin
        emit(n, seq);
        check_spread(seq, n, m);
        for (int k = 0; k < n; k++) if (seq[k]) begin
          if (first_pos >= 0 && k != first_pos) distinct = 1;
          if (first_pos < 0) first_pos = k;
          break;
        end
      end
      if (m > 0 && m < n && n / m >= 4) check(distinct == 1, "random phase moves the ones");
    end
    // arbitrary y: s is the count of an unbiased dither sample
    for (int t = 0; t < 6; t++) begin
      n  = $urandom_range(20, 200);
      yi = $urandom_range(0, 1 << FW);
      mean = 0;
      for (int rep = 0; rep < 100; rep++) begin
        do_load(yi, n);
        mean += s_count;
        emit(n, seq);
        check_spread(seq, n, int'(s_count));
      end
      mean = mean / 100.0;
      ex = real'(n) * real'(yi) / real'(64'd1 << FW);
      check(mean - ex < 0.5 && ex - mean < 0.5, $sformatf("mean s %f vs N y %f", mean, ex));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
