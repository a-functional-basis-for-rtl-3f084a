// tb_repeat_module: for every R in 0..15 a pass of 3 cycles is simulated by
// pulsing seq_last; the module must stay enabled for exactly R passes, ask
// for R-1 restarts, and be disabled at once for R = 0.
module tb_repeat_module;
  logic clk = 1'b0, rst = 1'b1, start = 1'b0, seq_last = 1'b0;
  logic [3:0] repeats;
  logic enable, restart;
  int checks = 0, failures = 0;

  repeat_module #(.RW(4)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeats = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    chk(!enable, "idle after reset");
    for (int r = 0; r < 16; r++) begin
      int en_cycles, restarts;
      en_cycles = 0; restarts = 0;
      repeats = 4'(r);
      start = 1'b1;
      @(negedge clk); start = 1'b0;
      for (int c = 0; c < 3 * 17; c++) begin
        seq_last = (c % 3 == 2);
        #1;
        if (enable) en_cycles++;
        if (restart) restarts++;
        @(negedge clk);
      end
      seq_last = 1'b0;
      chk(en_cycles == 3 * r, $sformatf("R=%0d enabled %0d cycles", r, en_cycles));
      chk(restarts == ((r > 0) ? r - 1 : 0), $sformatf("R=%0d restarts %0d", r, restarts));
      chk(!enable, "disabled after run");
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
