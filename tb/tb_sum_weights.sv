// tb_sum_weights: random Walsh states and two's-complement weights,
// including extreme values, for N = 8 / 14-bit and N = 32 / 12-bit; the
// sum must equal sum_k (W_k ? X_k : -X_k).
module tb_sum_weights;
  logic [7:0] w8;
  logic signed [13:0] x8 [8];
  logic signed [16:0] s8;
  logic [31:0] w32;
  logic signed [11:0] x32 [32];
  logic signed [16:0] s32;
  int checks = 0, failures = 0;

  sum_weights #(.N(8),  .XW(14)) u8  (.walsh(w8),  .x(x8),  .sum(s8));
  sum_weights #(.N(32), .XW(12)) u32 (.walsh(w32), .x(x32), .sum(s32));

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int e8, e32;
      w8 = 8'($urandom); w32 = $urandom;
      for (int k = 0; k < 8; k++) begin
        x8[k] = 14'($urandom);
        if (i % 5 == 0) x8[k] = (i % 10 == 0) ? -14'sd8192 : 14'sd8191;
      end
      for (int k = 0; k < 32; k++) begin
        x32[k] = 12'($urandom);
        if (i % 5 == 0) x32[k] = -12'sd2048;
      end
      #1;
      e8 = 0; e32 = 0;
      for (int k = 0; k < 8; k++)  e8  += w8[k]  ? int'(x8[k])  : -int'(x8[k]);
      for (int k = 0; k < 32; k++) e32 += w32[k] ? int'(x32[k]) : -int'(x32[k]);
      checks += 2;
      if (int'(s8) != e8)   begin failures++; if (failures < 10) $display("FAIL N=8 got %0d exp %0d", s8, e8); end
      if (int'(s32) != e32) begin failures++; if (failures < 10) $display("FAIL N=32 got %0d exp %0d", s32, e32); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
