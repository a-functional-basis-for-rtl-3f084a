// tb_pm_arbitrator: random Walsh states and weights; one cycle later sin_o
// and cos_o must be sin/cos of the Walsh sum taken modulo 2^13, and enable
// must follow data_valid.
module tb_pm_arbitrator;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, data_valid = 1'b0, enable;
  logic [7:0] walsh;
  logic signed [13:0] x [8];
  logic signed [13:0] sin_o, cos_o;
  int checks = 0, failures = 0;

  pm_arbitrator #(.N(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      int e, ph;
      walsh = 8'($urandom);
      for (int k = 0; k < 8; k++) x[k] = 14'($urandom);
      data_valid = 1'b1;
      e = 0;
      for (int k = 0; k < 8; k++) e += walsh[k] ? int'(x[k]) : -int'(x[k]);
      ph = e & 8191;
      @(negedge clk);
      checks += 3;
      if (!enable) failures++;
      if (int'(sin_o) != sin_ref(ph)) begin failures++; if (failures < 10) $display("FAIL sin %0d %0d", sin_o, sin_ref(ph)); end
      if (int'(cos_o) != cos_ref(ph)) begin failures++; if (failures < 10) $display("FAIL cos %0d %0d", cos_o, cos_ref(ph)); end
    end
    data_valid = 1'b0;
    @(negedge clk);
    checks++;
    if (enable) failures++;
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
