// am_arbitrator: amplitude-modulation arbitrator.
//
// Sum Weights forms Sigma_W = sum X_k W_k (XW + clog2(N) bits, 17 for N = 8);
// the Overflow stage limits it to the 14-bit output range by saturation, and
// one register aligns the result, Sigma_W^(1), with the one-cycle DDS of the
// phase path. Latency: one clock from the Walsh inputs. Saturation as the
// overflow rule is this design's choice; the paper says only that the sum is
// checked against an overflow value.
module am_arbitrator
  import walsh_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [N-1:0]          walsh,
  input  logic signed [XW-1:0]  x [N],
  output logic signed [XW-1:0]  sigma1
);

  localparam int SW = XW + ((N > 1) ? $clog2(N) : 1);

  logic signed [SW-1:0] sum;

  sum_weights #(.N(N), .XW(XW)) u_sum (
    .walsh (walsh),
    .x     (x),
    .sum   (sum)
  );

  always_ff @(posedge clk) begin
    if (rst) sigma1 <= '0;
    else     sigma1 <= sat14(32'(sum));
  end

endmodule
