// tb_weights_estimation: every 13-bit fidelity code; two cycles after
// valid_in the weight must be round(asin(2P-1) * 2047/(pi/2)) with P in
// units of 1/(2^13-1), with valid_out; the weight is held afterwards.
module tb_weights_estimation;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, valid_in = 1'b0, valid_out;
  logic [12:0] p;
  logic signed [11:0] gtx;
  int checks = 0, failures = 0;

  weights_estimation dut (.*);

  always #5 clk = ~clk;

  initial begin
    p = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int v = 0; v < 8192; v += ((v % 97 == 0) ? 1 : 3)) begin
      p = 13'(v); valid_in = 1'b1;
      @(negedge clk);
      valid_in = 1'b0; p = 13'($urandom);
      checks++;
      if (valid_out) failures++;       // not after one cycle
      @(negedge clk);
      checks++;
      if (!valid_out || int'(gtx) != asin_ref(v)) begin
        failures++;
        if (failures < 10) $display("FAIL p=%0d got %0d exp %0d", v, gtx, asin_ref(v));
      end
    end
    checks += 3;
    if (asin_ref(8191) != 2047) failures++;
    if (asin_ref(0) != -2047) failures++;
    if (asin_ref(4096) != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
