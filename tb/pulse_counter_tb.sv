// pulse_counter_tb -- random sequences with idle gaps; after each `last` the
// counter must present the number of ones and of pulses for one clock.
module pulse_counter_tb;
  logic clk = 0, rst_n = 0;
  dc_pkg::pulse_t in;
  logic [dc_pkg::N_W:0] count, len;
  logic done;
  int checks = 0, failures = 0;

  pulse_counter dut (.clk, .rst_n, .in, .count, .len, .done);
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
    int n, ones;
    in = dc_pkg::PULSE_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      n = (t == 0) ? 1 : $urandom_range(1, (t % 10 == 0) ? 3000 : 50);
      ones = 0;
      for (int i = 1; i <= n; i++) begin
        @(negedge clk);
        in.valid = 1; in.bit_ = $urandom_range(0, 1); in.last = (i == n);
        ones += in.bit_;
        if (i != n && $urandom_range(0, 3) == 0) begin
          @(negedge clk);
          check(!done, "no done mid-sequence");
          in = dc_pkg::PULSE_IDLE;
        end
      end
      @(negedge clk);
      in = dc_pkg::PULSE_IDLE;
      check(done, "done one clock after last");
      check(int'(count) == ones && int'(len) == n,
            $sformatf("count %0d/%0d expected %0d/%0d", count, len, ones, n));
      @(negedge clk);
      check(!done, "done lasts one clock");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
