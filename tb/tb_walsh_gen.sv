// tb_walsh_gen: random Paley orders, Rademacher patterns and both forms;
// the output must equal complement XOR parity(order AND rad) after the
// order register has loaded. Also the Fig. 2 example order 12 = R2 xor R3.
module tb_walsh_gen;
  logic clk = 1'b0;
  logic [7:0] order, rad;
  logic complement, walsh;
  int checks = 0, failures = 0;

  walsh_gen #(.M(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      order = 8'($urandom); rad = 8'($urandom); complement = 1'($urandom);
      if (i % 7 == 0) order = 8'd12;
      @(negedge clk);
      checks++;
      if (walsh != (complement ^ (^(order & rad)))) begin
        failures++;
        if (failures < 10) $display("FAIL order=%0d rad=%b c=%b got %b", order, rad, complement, walsh);
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
