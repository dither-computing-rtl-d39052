// dither_encoder_tb -- drives dither_encoder with exact and arbitrary values.
// Checks: one pulse per clock for exactly N clocks starting the clock after
// start, `last` on the N-th; x = m/N gives exactly m ones at the front; the
// certain part of the sequence (front ones for x <= 1/2, trailing zeros for
// x > 1/2); and over many sequences the mean count equals N x and the
// variance of the count stays bounded (dither: <= 2, stochastic would be ~N/4).
module dither_encoder_tb;
  localparam int NW = dc_pkg::N_W, FW = dc_pkg::FRAC_W;
  logic clk = 0, rst_n = 0, start = 0;
  logic [FW:0]   x;
  logic [NW-1:0] n_len;
  dc_pkg::pulse_t out;
  logic busy, upper;
  int checks = 0, failures = 0;

  dither_encoder dut (.clk, .rst_n, .start, .x, .n_len, .out, .busy, .upper);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // runs one sequence, returns the pulses
  task automatic run(input longint unsigned xi, input int n, output bit seq[$]);
    seq = {};
    @(negedge clk);
    x = (FW+1)'(xi); n_len = NW'(n); start = 1;
    @(negedge clk);
    start = 0;
    for (int k = 0; k < n; k++) begin
      check(out.valid && busy, "valid for N clocks");
      check(out.last == (k == n - 1), "last on N-th pulse");
      seq.push_back(out.bit_);
      @(negedge clk);
    end
    check(!out.valid && !busy, "idle after N clocks");
  endtask

  initial begin
    bit seq[$];
    int cnt, n;
    longint unsigned xi, nx;
    real mean, var_, ex;
    x = '0; n_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // exact values m/N, N a power of two
    for (int t = 0; t < 40; t++) begin
      n = 1 << $urandom_range(0, 8);
      cnt = $urandom_range(0, n);
      xi = (longint'(cnt) << FW) / n;
      run(xi, n, seq);
      for (int k = 0; k < n; k++) check(seq[k] == (k < cnt), $sformatf("exact %0d/%0d pos %0d", cnt, n, k));
    end
    // arbitrary values: statistics and certain part
    for (int t = 0; t < 12; t++) begin
      n  = (t < 6) ? $urandom_range(5, 60) : $urandom_range(100, 400);
      xi = $urandom_range(0, 1 << FW);
      nx = longint'(n) * xi;
      mean = 0; var_ = 0;
      for (int rep = 0; rep < 150; rep++) begin
        run(xi, n, seq);
        cnt = 0;
        foreach (seq[k]) cnt += seq[k];
        if (xi * 2 <= (64'd1 << FW)) begin
          for (int k = 0; k < (nx >> FW); k++) check(seq[k] == 1, "front ones");
          check(upper == 0, "lower case flag");
        end else begin
          for (int k = int'((nx + (64'd1 << FW) - 1) >> FW); k < n; k++) check(seq[k] == 0, "trailing zeros");
          check(upper == 1, "upper case flag");
        end
        mean += cnt;
        var_ += real'(cnt) * real'(cnt);
      end
      mean = mean / 150.0;
      var_ = var_ / 150.0 - mean * mean;
      ex = real'(nx) / real'(64'd1 << FW);
      check(mean - ex < 0.4 && ex - mean < 0.4, $sformatf("N=%0d mean %f vs %f", n, mean, ex));
      check(var_ <= 2.5, $sformatf("N=%0d count variance %f", n, var_));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
