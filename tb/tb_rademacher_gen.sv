// tb_rademacher_gen: checks every Rademacher output, `running`, `last` and
// the auxiliary done bit cycle by cycle against the definition R_j = bit
// (m-1-j) of the segment index, for several clock expansions and widths,
// including a restart in the middle of a run.
module tb_rademacher_gen;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, stop = 1'b0;
  logic [7:0] ce;
  logic [3:0] m;
  logic [7:0] rad;
  logic running, last, done;
  int checks = 0, failures = 0;

  rademacher_gen #(.M(8), .CEW(8)) dut (.*, .clk_expand(ce));

  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  task automatic run(int t, int mm);
    int tt, total;
    tt = (t == 0) ? 1 : t;
    total = tt * (1 << mm);
    @(negedge clk); ce = 8'(t); m = 4'(mm); start = 1'b1;
    @(negedge clk); start = 1'b0;
    for (int c = 0; c < total; c++) begin
      int seg;
      logic [7:0] exp_rad;
      seg = c / tt;
      exp_rad = '0;
      for (int j = 0; j < mm; j++) exp_rad[j] = 1'((seg >> (mm - 1 - j)) & 1);
      chk(running, "running");
      chk(rad == exp_rad, $sformatf("rad t=%0d m=%0d c=%0d got %b exp %b", t, mm, c, rad, exp_rad));
      chk(last == (c == total - 1), "last");
      chk(!done, "done early");
      @(negedge clk);
    end
    chk(!running && rad == '0, "stopped");
    chk(done, "done bit");
  endtask

  initial begin
    ce = 8'd1; m = 4'd3;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run(1, 3);
    run(3, 4);
    run(2, 8);
    run(0, 2);
    run(7, 1);
    run(5, 0);
    // restart in the middle of a run
    @(negedge clk); ce = 8'd2; m = 4'd3; start = 1'b1;
    @(negedge clk); start = 1'b0;
    repeat (5) @(negedge clk);
    start = 1'b1;
    @(negedge clk); start = 1'b0;
    chk(running && rad == 8'b0 && !last, "restart at segment 0");
    @(negedge clk); @(negedge clk);
    chk(rad == 8'b100, "restart segment 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
