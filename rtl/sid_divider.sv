// sid_divider: output scaling of the Walsh signal reconstruction.
//
// Divides the signed DIV_W-bit reconstructed sum by the unsigned DIV_W-bit
// divisor D = gamma*T and registers the signed DIV_W-bit quotient, one clock
// cycle from operands to result. Division truncates toward zero; D = 0 gives
// 0. Operand widths and the one-cycle latency follow the paper; the
// treatment of D = 0 and the rounding are this design's choices.
module sid_divider
  import walsh_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [DIV_W-1:0]  dividend,
  input  logic [DIV_W-1:0]         divisor,
  output logic signed [DIV_W-1:0]  quotient
);

  logic signed [DIV_W:0] q_full;

  always_comb begin
    if (divisor == '0) q_full = '0;
    else               q_full = (DIV_W+1)'(dividend) / $signed({1'b0, divisor});
  end

  always_ff @(posedge clk) begin
    if (rst) quotient <= '0;
    else     quotient <= q_full[DIV_W-1:0];
  end

endmodule
