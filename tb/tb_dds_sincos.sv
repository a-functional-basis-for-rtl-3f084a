// tb_dds_sincos: all 8192 phases; outputs one cycle after valid_in must be
// round(8191 sin) and round(8191 cos) of 2*pi*p/8192; `enable` follows
// valid_in by one cycle and outputs hold while valid_in is low. Key points
// (0, quarter, half) are also checked against fixed numbers.
module tb_dds_sincos;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, valid_in = 1'b0, enable;
  logic [12:0] phase;
  logic signed [13:0] sin_out, cos_out;
  int checks = 0, failures = 0;

  dds_sincos dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    phase = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int p = 0; p < 8192; p++) begin
      phase = 13'(p); valid_in = 1'b1;
      @(negedge clk);
      chk(enable, "enable");
      chk(int'(sin_out) == sin_ref(p), $sformatf("sin p=%0d got %0d exp %0d", p, sin_out, sin_ref(p)));
      chk(int'(cos_out) == cos_ref(p), $sformatf("cos p=%0d got %0d exp %0d", p, cos_out, cos_ref(p)));
      if (p == 0)    chk(sin_out == 0 && cos_out == 8191, "phase 0");
      if (p == 2048) chk(sin_out == 8191 && cos_out == 0, "phase pi/2");
      if (p == 4096) chk(sin_out == 0 && cos_out == -8191, "phase pi");
    end
    phase = 13'd1000; valid_in = 1'b0;
    @(negedge clk);
    chk(!enable && int'(sin_out) == sin_ref(8191), "hold when not valid");
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
