// fixed_mult_tb -- random and extreme k-bit operands; the 2k-bit product must
// appear one clock after the operands, with out_valid following in_valid.
module fixed_mult_tb;
  localparam int K = dc_pkg::K_BITS;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [K-1:0] a, b;
  logic [2*K-1:0] p;
  int checks = 0, failures = 0;

  fixed_mult dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .p);
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
    int ea, eb;
    bit ev;
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      ea = (t < 4) ? ((t & 1) ? (1 << K) - 1 : 0) : $urandom_range(0, (1 << K) - 1);
      eb = (t < 4) ? ((t & 2) ? (1 << K) - 1 : 0) : $urandom_range(0, (1 << K) - 1);
      ev = (t < 4) ? 1'b1 : ($urandom_range(0, 3) != 0);
      a = K'(ea); b = K'(eb); in_valid = ev;
      @(negedge clk);
      in_valid = 0;
      check(out_valid == ev, "out_valid one clock after in_valid");
      if (ev) check(int'(p) == ea * eb, $sformatf("%0d * %0d = %0d", ea, eb, p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
