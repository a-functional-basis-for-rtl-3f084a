// dds_sincos: phase-to-amplitude converter for the phase-modulation path.
//
// Converts a PW-bit phase p (full circle = 2^PW) into OW-bit two's-complement
// sin and cos values, A*sin(2*pi*p/2^PW) and A*cos(...), A = 2^(OW-1) - 1, in
// one clock cycle. The FPGA implementation uses the vendor's DDS core as a
// look-up table; here a single-port-per-output ROM of one full sine period is
// filled at elaboration, and cos is read at the phase advanced by a quarter
// turn. `enable` is `valid_in` delayed by the same one cycle and tells the
// next registers when the outputs are settled; outputs hold while valid_in is
// low. The ROM and its contents (rounded sine) are this design's choice.
module dds_sincos #(
  parameter int PW = 13,
  parameter int OW = 14
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  valid_in,
  input  logic [PW-1:0]         phase,
  output logic signed [OW-1:0]  sin_out,
  output logic signed [OW-1:0]  cos_out,
  output logic                  enable
);

  localparam int    DEPTH = 1 << PW;
  localparam real   PI    = 3.14159265358979323846;
  localparam real   AMP   = real'((1 << (OW-1)) - 1);

  logic signed [OW-1:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++)
      rom[i] = OW'(int'(AMP * $sin(2.0 * PI * real'(i) / real'(DEPTH))));
  end

  logic [PW-1:0] phase_c;
  assign phase_c = phase + PW'(DEPTH / 4);

  always_ff @(posedge clk) begin
    if (rst) begin
      sin_out <= '0;
      cos_out <= '0;
      enable  <= 1'b0;
    end else begin
      enable <= valid_in;
      if (valid_in) begin
        sin_out <= rom[phase];
        cos_out <= rom[phase_c];
      end
    end
  end

endmodule
