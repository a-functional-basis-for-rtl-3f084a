// tb_walsh_sid: feeds fidelities to SID instances with 32 and 16 sensors,
// checks the trigger-to-output latency of 5 clock cycles and every sample of
// the streamed reconstruction: b_hat(j) = sat14(sum_k +-asin_ref(P_k)) / D
// with + where W_k(j) = 1, over 2^clog2(N) segments of t2 cycles; b_hat is
// 0 and valid low outside the burst.
module tb_walsh_sid;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, trig32 = 1'b0, trig16 = 1'b0;
  logic [12:0] p32 [32];
  logic [12:0] p16 [16];
  logic [13:0] d;
  logic [3:0]  t2;
  logic signed [13:0] b32, b16;
  logic v32, v16;
  int checks = 0, failures = 0, sats = 0;

  walsh_sid #(.N(32)) u32 (.clk, .rst, .trigger(trig32), .p(p32), .d, .t2, .b_hat(b32), .valid(v32));
  walsh_sid #(.N(16)) u16 (.clk, .rst, .trigger(trig16), .p(p16), .d, .t2, .b_hat(b16), .valid(v16));

  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  task automatic run(int n, int tt, int spread);
    int m, te, lat, w [32], dd;
    m = $clog2(n); te = (tt == 0) ? 1 : tt;
    for (int k = 0; k < n; k++) begin
      int v;
      v = 4096 + $urandom_range(0, 2 * spread) - spread;
      if (v < 0) v = 0;
      if (v > 8191) v = 8191;
      if (n == 32) p32[k] = 13'(v); else p16[k] = 13'(v);
      w[k] = asin_ref(v);
    end
    dd = $urandom_range(1, 20);
    d = 14'(dd); t2 = 4'(tt);
    @(negedge clk);
    if (n == 32) trig32 = 1'b1; else trig16 = 1'b1;
    @(negedge clk); trig32 = 1'b0; trig16 = 1'b0;
    for (int k = 0; k < n; k++) begin             // inputs may change after sampling
      if (n == 32) p32[k] = 13'($urandom); else p16[k] = 13'($urandom);
    end
    lat = 1;
    while (!((n == 32) ? v32 : v16) && lat < 20) begin @(negedge clk); lat++; end
    chk(lat == 5, $sformatf("N=%0d latency %0d", n, lat));
    for (int c = 0; c < te * (1 << m); c++) begin
      int sum, e, got;
      sum = 0;
      for (int k = 0; k < n; k++) sum += wbar(k, m, c / te) ? -w[k] : w[k];
      if (sat(sum, 14) != sum) sats++;
      e = sat(sum, 14) / dd;
      got = (n == 32) ? int'(b32) : int'(b16);
      chk(got == e && ((n == 32) ? v32 : v16), $sformatf("N=%0d c=%0d got %0d exp %0d", n, c, got, e));
      @(negedge clk);
    end
    chk(!((n == 32) ? v32 : v16) && ((n == 32) ? b32 : b16) == 0, "idle after burst");
  endtask

  initial begin
    for (int k = 0; k < 32; k++) p32[k] = '0;
    for (int k = 0; k < 16; k++) p16[k] = '0;
    d = 14'd1; t2 = 4'd1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run(32, 1, 300);
    run(32, 3, 1500);
    run(16, 2, 400);
    run(16, 1, 4096);
    run(32, 0, 4096);
    checks++;
    if (sats == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
