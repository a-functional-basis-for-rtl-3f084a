// weights_estimation: Walsh weight from a measured fidelity.
//
// Computes gamma*T*X_k = arcsin(2 P_k - 1) for one sensor. The 13-bit
// fidelity P_k (0 .. 2^13-1 standing for 0 .. 1) is sampled into a 14-bit
// register shifted left by one ({P_k, 0} = 2 P_k); "1", i.e. 2^13 - 1, is
// subtracted, giving P* in [-8191, 8191]; P* addresses a 2^14-entry arcsine
// table whose signed 12-bit output is round(asin(P*/8191) * 2047 / (pi/2)),
// so +-2047 stands for +-pi/2.
//
// Timing: `valid_in` high before edge k samples P_k at k; the weight appears
// at edge k+1 with `valid_out`, two cycles after valid_in rose, and is held
// until the next sample. The shift/subtract/LUT structure and the two-cycle
// latency are the paper's; the table's output scaling and the value of the
// unused code -8192 (clamped to -pi/2) are this design's choices.
module weights_estimation
  import walsh_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     valid_in,
  input  logic [P_W-1:0]           p,
  output logic signed [GTX_W-1:0]  gtx,
  output logic                     valid_out
);

  localparam int  DEPTH = 1 << (P_W + 1);
  localparam real PI    = 3.14159265358979323846;
  localparam int  ONE   = (1 << P_W) - 1;
  localparam int  OMAX  = (1 << (GTX_W - 1)) - 1;

  logic signed [GTX_W-1:0] asin_lut [DEPTH];

  // Address c holds the value for P* = c (two's complement, 14 bits). The
  // arcsine is odd, so each positive entry also gives its negative mirror;
  // the unused code -8192 repeats the entry for -8191.
  initial begin
    for (int c = 0; c < DEPTH / 2; c++) begin
      asin_lut[c] = GTX_W'(int'($asin(real'(c) / real'(ONE)) * real'(OMAX) / (PI / 2.0)));
      asin_lut[(DEPTH - c) % DEPTH] = -asin_lut[c];
    end
    asin_lut[DEPTH / 2] = asin_lut[DEPTH / 2 + 1];
  end

  logic [P_W:0]         p2_q;   // sampling / shift register, 2 P_k
  logic                 v1;
  logic signed [P_W+1:0] pstar;

  assign pstar = $signed({1'b0, p2_q}) - (P_W+2)'(ONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      p2_q      <= '0;
      v1        <= 1'b0;
      gtx       <= '0;
      valid_out <= 1'b0;
    end else begin
      v1 <= valid_in;
      if (valid_in) p2_q <= {p, 1'b0};
      valid_out <= v1;
      if (v1) gtx <= asin_lut[pstar[P_W:0]];
    end
  end

endmodule
