// tb_edge_detect: random input stream; the any-edge instance must pulse one
// cycle after every change, the rising-edge instance only after 0->1.
module tb_edge_detect;
  logic clk = 1'b0, rst = 1'b1, d = 1'b0, p_any, p_rise;
  int checks = 0, failures = 0;
  logic d1;

  edge_detect #(.RISING(1'b0)) u_any  (.clk, .rst, .d, .pulse(p_any));
  edge_detect #(.RISING(1'b1)) u_rise (.clk, .rst, .d, .pulse(p_rise));

  always #5 clk = ~clk;

  initial begin
    d1 = 1'b0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // d was sampled at the edge just passed, d1 at the edge before
      checks += 2;
      if (p_any != (d ^ d1)) failures++;
      if (p_rise != (d & ~d1)) failures++;
      d1 = d;
      d = 1'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
