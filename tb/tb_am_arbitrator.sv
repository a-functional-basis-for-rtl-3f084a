// tb_am_arbitrator: random and extreme weights; one cycle later sigma1 must
// be the 17-bit Walsh sum saturated to 14-bit signed. Counts saturations.
module tb_am_arbitrator;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic [7:0] walsh;
  logic signed [13:0] x [8];
  logic signed [13:0] sigma1;
  int checks = 0, failures = 0, sats = 0;

  am_arbitrator #(.N(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      int e;
      walsh = 8'($urandom);
      for (int k = 0; k < 8; k++) x[k] = (i % 4 == 0) ? 14'($urandom_range(3000, 8191)) : 14'($urandom);
      e = 0;
      for (int k = 0; k < 8; k++) e += walsh[k] ? int'(x[k]) : -int'(x[k]);
      if (sat(e, 14) != e) sats++;
      @(negedge clk);
      checks++;
      if (int'(sigma1) != sat(e, 14)) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d exp %0d", sigma1, sat(e, 14));
      end
    end
    checks++;
    if (sats == 0) failures++;
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
