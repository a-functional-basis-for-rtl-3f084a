// tb_timing_sequencer: for several (s, t1, R) the timing output must be
// Wbar_s with 2^m(s) segments of t1 cycles, repeated R times with no gap,
// and `trigger` must pulse exactly one cycle after every bit flip. The
// Rademacher outputs must follow R_j = bit (m-1-j) of the segment index
// during a pass and be 0 otherwise. Covers
// the Fig. 2 order 12, order 3 repeated twice (Fig. 3b), s = 255 with
// maximal R, s = 0 and R = 0 (no output).
module tb_timing_sequencer;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0;
  logic [3:0] repeats;
  logic [7:0] t1, s;
  logic walsh_timing, trigger, busy;
  logic [7:0] rademacher;
  int checks = 0, failures = 0;

  timing_sequencer dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  task automatic run(int ss, int tt, int rr);
    int m, total, ntrig, nflip;
    bit w1, w2, w;
    m = bitw(ss);
    total = rr * tt * (1 << m);
    @(negedge clk); s = 8'(ss); t1 = 8'(tt); repeats = 4'(rr); start = 1'b1;
    @(negedge clk);                 // edge e0: start seen
    @(negedge clk);                 // edge e1: first segment begins
    w1 = 1'b0; w2 = 1'b0; ntrig = 0; nflip = 0;
    for (int c = 0; c < total + 4; c++) begin
      logic [7:0] r;
      r = '0;
      if (c < total) begin
        w = wbar(ss, m, (c % (tt * (1 << m))) / tt);
        for (int j = 0; j < m; j++) r[j] = 1'(((c % (tt * (1 << m))) / tt) >> (m - 1 - j));
      end else begin
        w = 1'b0;
      end
      chk(rademacher == r, $sformatf("s=%0d c=%0d rademacher %b exp %b", ss, c, rademacher, r));
      chk(walsh_timing == w, $sformatf("s=%0d t1=%0d R=%0d c=%0d walsh", ss, tt, rr, c));
      chk(trigger == (w1 ^ w2), $sformatf("s=%0d c=%0d trigger", ss, c));
      if (trigger) ntrig++;
      if (w != w1) nflip++;
      w2 = w1; w1 = w;
      @(negedge clk);
    end
    start = 1'b0;
    chk(ntrig == nflip, "one trigger per flip");
    chk(!busy, "idle at end");
    @(negedge clk);
  endtask

  initial begin
    s = '0; t1 = 8'd1; repeats = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run(3, 4, 2);
    run(12, 3, 1);
    run(1, 1, 3);
    run(255, 2, 15);
    run(0, 5, 2);
    run(5, 6, 0);
    run(200, 255, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
