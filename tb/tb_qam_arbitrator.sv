// tb_qam_arbitrator: random 14-bit operands; two cycles later the products
// must equal (sigma1 >>> 7) * (cos >>> 7) and (sigma1 >>> 7) * (sin >>> 7),
// i.e. the signed 7-bit MSB fields multiplied.
module tb_qam_arbitrator;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic signed [13:0] sigma1, sin_i, cos_i, i_prod, q_prod;
  int checks = 0, failures = 0;
  int ei [$], eq [$];

  qam_arbitrator dut (.*);

  always #5 clk = ~clk;

  initial begin
    sigma1 = '0; sin_i = '0; cos_i = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      sigma1 = 14'($urandom); sin_i = 14'($urandom); cos_i = 14'($urandom);
      if (i % 9 == 0) begin sigma1 = -14'sd8192; cos_i = -14'sd8192; end
      ei.push_back((int'(sigma1) >>> 7) * (int'(cos_i) >>> 7));
      eq.push_back((int'(sigma1) >>> 7) * (int'(sin_i) >>> 7));
      @(negedge clk);
      if (i >= 1) begin
        int a, b;
        a = ei.pop_front(); b = eq.pop_front();
        checks += 2;
        if (int'(i_prod) != sext(a, 14)) begin failures++; if (failures < 10) $display("FAIL I %0d %0d", i_prod, a); end
        if (int'(q_prod) != sext(b, 14)) begin failures++; if (failures < 10) $display("FAIL Q %0d %0d", q_prod, b); end
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
