// mult_counter_tb -- for random p, q, r and strides, the counter must issue
// every (i, k, j) once in the order i, k, j (j fastest), one per clock while
// advance is high, with i_s counting them, rank_a = (i_s mod r) * stride_a
// mod r, rank_b = (i_s mod p) * stride_b mod p, and first_j / last_j /
// last_all on the right products; active must fall after p*q*r advances.
module mult_counter_tb;
  localparam int DW = $clog2(dc_pkg::DIM_MAX + 1);
  logic clk = 0, rst_n = 0, start = 0, advance = 0;
  logic [DW-1:0] p_dim, q_dim, r_dim, stride_a, stride_b;
  logic active, first_j, last_j, last_all;
  logic [DW-1:0] i, k, j, rank_a, rank_b;
  logic [3*DW-1:0] i_s;
  int checks = 0, failures = 0;

  mult_counter dut (.clk, .rst_n, .start, .advance, .p_dim, .q_dim, .r_dim,
    .stride_a, .stride_b, .active, .i, .k, .j, .i_s, .rank_a, .rank_b,
    .first_j, .last_j, .last_all);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int gcd(int a, int b);
    while (b != 0) begin int t = a % b; a = b; b = t; end
    return a;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, q, r, sa, sb, cycles, issued;
    bit seen_a [int];
    {p_dim, q_dim, r_dim, stride_a, stride_b} = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      p = $urandom_range(1, (t == 0) ? 1 : 12);
      q = $urandom_range(1, 12);
      r = $urandom_range(1, 12);
      sa = 1;
      sb = 1;
      if (r > 1) do sa = $urandom_range(1, r - 1); while (gcd(sa, r) != 1);
      if (p > 1) do sb = $urandom_range(1, p - 1); while (gcd(sb, p) != 1);
      @(negedge clk);
      p_dim = DW'(p); q_dim = DW'(q); r_dim = DW'(r);
      stride_a = DW'(sa); stride_b = DW'(sb);
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 0; issued = 0;
      for (int ii = 0; ii < p; ii++)
        for (int kk = 0; kk < r; kk++)
          for (int jj = 0; jj < q; jj++) begin
            advance = ($urandom_range(0, 3) != 0);
            while (!advance) begin
              check(active && int'(i) == ii && int'(k) == kk && int'(j) == jj, "holds without advance");
              @(negedge clk); cycles++;
              advance = ($urandom_range(0, 3) != 0);
            end
            #1;
            check(active, "active");
            check(int'(i) == ii && int'(k) == kk && int'(j) == jj,
                  $sformatf("order: got (%0d,%0d,%0d) expected (%0d,%0d,%0d)", i, k, j, ii, kk, jj));
            check(int'(i_s) == issued, "i_s counts products");
            check(int'(rank_a) == ((issued % r) * sa) % r, $sformatf("rank_a %0d expected %0d", rank_a, ((issued % r) * sa) % r));
            check(int'(rank_b) == ((issued % p) * sb) % p, $sformatf("rank_b %0d expected %0d", rank_b, ((issued % p) * sb) % p));
            check(first_j == (jj == 0) && last_j == (jj == q - 1), "first_j/last_j");
            check(last_all == (ii == p - 1 && kk == r - 1 && jj == q - 1), "last_all");
            @(negedge clk); cycles++; issued++;
          end
      advance = 0;
      check(!active, "inactive after p*q*r products");
      check(issued == p * q * r, "issued count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
