// sc_multiplier_tb -- random aligned streams; z must be the AND of x and y one
// clock later, with valid and last carried along.
module sc_multiplier_tb;
  logic clk = 0, rst_n = 0;
  dc_pkg::pulse_t x, y, z, exp_z;
  int checks = 0, failures = 0;

  sc_multiplier dut (.clk, .rst_n, .x, .y, .z);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    x = dc_pkg::PULSE_IDLE; y = dc_pkg::PULSE_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ones = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      x.valid = ($urandom_range(0, 4) != 0);
      x.bit_  = x.valid & $urandom_range(0, 1);
      y.bit_  = x.valid & $urandom_range(0, 1);
      x.last  = x.valid & ($urandom_range(0, 9) == 0);
      y.valid = x.valid;
      y.last  = x.last;
      exp_z.valid = x.valid;
      exp_z.bit_  = x.bit_ & y.bit_;
      exp_z.last  = x.last;
      @(negedge clk);
      check(z == exp_z, $sformatf("z=%b expected %b", z, exp_z));
      ones += z.bit_;
    end
    check(ones > 500, "products with ones were seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
