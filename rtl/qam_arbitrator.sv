// qam_arbitrator: quadrature-amplitude-modulation arbitrator.
//
// Multiplies the amplitude envelope Sigma_W^(1) by cos and sin of the phase
// Sigma_W^(2). As in the paper only the seven most significant bits of each
// 14-bit operand enter the signed 7 x 7 multipliers, whose 14-bit products
// are the QAM I and Q words. Two pipeline registers (operands, then
// products) give the two extra clock cycles of latency the paper quotes for
// this mode; the split of those two cycles is this design's choice.
module qam_arbitrator
  import walsh_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [DAC_W-1:0]  sigma1,
  input  logic signed [DAC_W-1:0]  sin_i,
  input  logic signed [DAC_W-1:0]  cos_i,
  output logic signed [DAC_W-1:0]  i_prod,
  output logic signed [DAC_W-1:0]  q_prod
);

  logic signed [QAM_OPW-1:0] a_q, s_q, c_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      a_q    <= '0;
      s_q    <= '0;
      c_q    <= '0;
      i_prod <= '0;
      q_prod <= '0;
    end else begin
      a_q    <= sigma1[DAC_W-1 -: QAM_OPW];
      s_q    <= sin_i[DAC_W-1 -: QAM_OPW];
      c_q    <= cos_i[DAC_W-1 -: QAM_OPW];
      i_prod <= DAC_W'(a_q * c_q);
      q_prod <= DAC_W'(a_q * s_q);
    end
  end

endmodule
