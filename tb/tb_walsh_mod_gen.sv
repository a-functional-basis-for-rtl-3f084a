// tb_walsh_mod_gen: after a one-cycle trigger the N outputs must be
// W_k = 1 xor Wbar_k over 2^clog2(N) segments of t2 cycles, starting two
// clock edges after the trigger rose (DFF + start), with data_valid high
// exactly for the burst and all outputs 0 outside it. Instances with
// N = 8 and N = 16; also a retrigger in the middle of a burst.
module tb_walsh_mod_gen;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, trig8 = 1'b0, trig16 = 1'b0;
  logic [3:0] t2;
  logic [7:0]  w8;
  logic [15:0] w16;
  logic v8, v16;
  int checks = 0, failures = 0;

  walsh_mod_gen #(.N(8))  u8  (.clk, .rst, .trigger(trig8),  .t2, .walsh(w8),  .data_valid(v8));
  walsh_mod_gen #(.N(16)) u16 (.clk, .rst, .trigger(trig16), .t2, .walsh(w16), .data_valid(v16));

  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  task automatic burst(int n, int tt);
    int m, total, te;
    m = $clog2(n);
    te = (tt == 0) ? 1 : tt;
    total = te * (1 << m);
    @(negedge clk); t2 = 4'(tt);
    if (n == 8) trig8 = 1'b1; else trig16 = 1'b1;
    @(negedge clk); trig8 = 1'b0; trig16 = 1'b0;
    chk((n == 8 ? v8 : v16) == 1'b0, "not yet valid one cycle after trigger");
    @(negedge clk);
    for (int c = 0; c < total + 2; c++) begin
      for (int k = 0; k < n; k++) begin
        bit e;
        e = (c < total) ? ~wbar(k, m, c / te) : 1'b0;
        chk(((n == 8) ? w8[k] : w16[k]) == e, $sformatf("N=%0d k=%0d c=%0d", n, k, c));
      end
      chk(((n == 8) ? v8 : v16) == (c < total), "data_valid");
      @(negedge clk);
    end
  endtask

  initial begin
    t2 = 4'd1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    burst(8, 1);
    burst(8, 3);
    burst(8, 15);
    burst(16, 2);
    burst(16, 0);
    // retrigger during a burst restarts at segment 0
    @(negedge clk); t2 = 4'd2; trig8 = 1'b1;
    @(negedge clk); trig8 = 1'b0;
    repeat (6) @(negedge clk);
    trig8 = 1'b1;
    @(negedge clk); trig8 = 1'b0;
    @(negedge clk);
    chk(v8 && w8 == 8'hFF, "retrigger restarts at segment 0");
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
