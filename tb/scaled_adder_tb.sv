// scaled_adder_tb -- sequences of random length on two aligned random streams.
// For each pulse the expected output is X when W = 1 and Y when W = 0, where
// W_i = s_i (1 for odd i, counting from 1) if the sequence's coin is 0 and
// 1 - s_i if it is 1. Checks the coin is constant within a sequence, both coin
// values occur, and, for Format-1 operands x = a/N, y = b/N, that the count of
// u is within one of (a + b)/2.
module scaled_adder_tb;
  logic clk = 0, rst_n = 0;
  dc_pkg::pulse_t x, y, u;
  logic w_phase, seq_start;
  int checks = 0, failures = 0;

  scaled_adder dut (.clk, .rst_n, .x, .y, .u, .w_phase, .seq_start);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, a, b, cnt, seen0, seen1;
    bit ph, w, exp_bit;
    x = dc_pkg::PULSE_IDLE; y = dc_pkg::PULSE_IDLE;
    seen0 = 0; seen1 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      n = $urandom_range(1, 64);
      a = $urandom_range(0, n);
      b = $urandom_range(0, n);
      cnt = 0;
      for (int i = 1; i <= n; i++) begin
        @(negedge clk);
        x.valid = 1; y.valid = 1;
        x.last = (i == n); y.last = (i == n);
        // half the sequences random bits, half Format-1 unary codes
        x.bit_ = (t % 2) ? (i <= a) : $urandom_range(0, 1);
        y.bit_ = (t % 2) ? (i <= b) : $urandom_range(0, 1);
        #1;
        if (i == 1) begin
          check(seq_start, "coin drawn on the first pulse");
          ph = w_phase;
          if (ph) seen1++; else seen0++;
        end else begin
          check(!seq_start && w_phase == ph, "coin constant within a sequence");
        end
        w = ((i % 2) == 1) ^ ph;
        exp_bit = w ? x.bit_ : y.bit_;
        @(negedge clk);
        check(u.valid && u.bit_ == exp_bit && u.last == (i == n),
              $sformatf("seq %0d pulse %0d: u=%b expected %b", t, i, u.bit_, exp_bit));
        cnt += u.bit_;
        // idle gap of random length between sequences, sometimes none
        x.valid = 0; y.valid = 0; x.last = 0; y.last = 0;
        #1;
      end
      if (t % 2) check(2 * cnt >= a + b - 2 && 2 * cnt <= a + b + 2,
                       $sformatf("count %0d vs (%0d+%0d)/2", cnt, a, b));
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    check(seen0 > 200 && seen1 > 200, $sformatf("coin balance %0d/%0d", seen0, seen1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
