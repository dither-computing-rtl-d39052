// prng_tb -- checks the xorshift32 generator against its published recurrence,
// a known value (seed 1 -> 270369) and that the state holds without `step`.
module prng_tb;
  import dc_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0;
  logic [31:0] rnd, rnd1, expv;
  int checks = 0, failures = 0;

  prng #(.SEED(32'hDEAD_BEEF)) dut (.clk, .rst_n, .step, .rnd);
  prng #(.SEED(32'd1)) dut1 (.clk, .rst_n, .step, .rnd(rnd1));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rnd == 32'hDEAD_BEEF, "reset value");
    expv = 32'hDEAD_BEEF;
    step = 1;
    @(negedge clk);
    check(rnd1 == 32'd270369, "xorshift32(1) = 270369");
    expv = xorshift32(expv);
    check(rnd == expv, "first step");
    for (int n = 0; n < 2000; n++) begin
      step = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (step) expv = xorshift32(expv);
      check(rnd == expv, $sformatf("step %0d", n));
      check(rnd != 0, "never zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
