// pm_arbitrator: phase-modulation arbitrator.
//
// Sum Weights forms the phase Sigma_W^(2) = sum X_k W_k; its low PHASE_W (13)
// bits, a phase in units of 2*pi/2^13 that wraps naturally, drive the DDS
// look-up, which returns sin and cos of the phase one clock later together
// with an `enable` flag derived from `data_valid`. Using the low bits as the
// phase is this design's choice; the paper gives a 13-bit DDS input and a
// 17-bit sum.
module pm_arbitrator
  import walsh_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [N-1:0]             walsh,
  input  logic signed [XW-1:0]     x [N],
  input  logic                     data_valid,
  output logic signed [DAC_W-1:0]  sin_o,
  output logic signed [DAC_W-1:0]  cos_o,
  output logic                     enable
);

  localparam int SW = XW + ((N > 1) ? $clog2(N) : 1);

  logic signed [SW-1:0] sigma2;

  sum_weights #(.N(N), .XW(XW)) u_sum (
    .walsh (walsh),
    .x     (x),
    .sum   (sigma2)
  );

  dds_sincos #(.PW(PHASE_W), .OW(DAC_W)) u_dds (
    .clk      (clk),
    .rst      (rst),
    .valid_in (data_valid),
    .phase    (sigma2[PHASE_W-1:0]),
    .sin_out  (sin_o),
    .cos_out  (cos_o),
    .enable   (enable)
  );

  logic unused;
  assign unused = ^sigma2[SW-1:PHASE_W];

endmodule
