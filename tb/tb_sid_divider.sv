// tb_sid_divider: random signed dividends and unsigned divisors, including
// divisor 0 and 1 and the extremes; the quotient one cycle later must be the
// truncated quotient (0 for divisor 0).
module tb_sid_divider;
  logic clk = 1'b0, rst = 1'b1;
  logic signed [13:0] dividend, quotient;
  logic [13:0] divisor;
  int checks = 0, failures = 0;

  sid_divider dut (.*);

  always #5 clk = ~clk;

  initial begin
    dividend = '0; divisor = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      int e;
      dividend = 14'($urandom);
      divisor  = (i % 3 == 0) ? 14'($urandom_range(1, 40)) : 14'($urandom);
      if (i % 50 == 0) divisor = '0;
      if (i % 50 == 1) divisor = 14'd1;
      if (i % 50 == 2) dividend = -14'sd8192;
      e = (divisor == 0) ? 0 : int'(dividend) / int'(divisor);
      @(negedge clk);
      checks++;
      if (int'(quotient) != e) begin
        failures++;
        if (failures < 10) $display("FAIL %0d / %0d got %0d exp %0d", dividend, divisor, quotient, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
