// walsh_filter_synth: Walsh Filter Synthesizer.
//
// Combines the N streaming Walsh functions W* with user weights X_k into the
// I and Q words for a two-channel DAC feeding an IQ mixer. Three arbitrators
// run in parallel on the same Walsh inputs and weights:
//   AM  : I = Sigma^(1) (saturated sum), Q = 0
//   PhiM: I = cos(Sigma^(2)), Q = sin(Sigma^(2))
//   QAM : I = Sigma^(1) cos(Sigma^(2)), Q = Sigma^(1) sin(Sigma^(2))
// and `mode` (00 AM, 01 PhiM, 11 QAM, as printed on the output multiplexers)
// selects one before the output DFFs. Code 10 outputs 0 (this design's
// choice).
//
// Timing: Walsh inputs change at edge k; AM and PhiM words reach i_out/q_out
// at edge k+2 (sum/DDS register, then output DFF), QAM words at k+4 (two
// multiplier stages). The output DFFs load only while the DDS `enable`
// (data valid delayed to match) is high and load 0 otherwise, so the outputs
// rest at 0 between bursts; this gating is this design's reading of the
// paper's glitch-suppressing enable.
module walsh_filter_synth
  import walsh_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [N-1:0]             walsh,
  input  logic signed [XW-1:0]     x [N],
  input  mod_mode_e                mode,
  input  logic                     data_valid,
  output logic signed [DAC_W-1:0]  i_out,
  output logic signed [DAC_W-1:0]  q_out
);

  logic signed [DAC_W-1:0] sigma1, sin_v, cos_v, i_qam, q_qam;
  logic                    v1, v2, v3;

  am_arbitrator #(.N(N)) u_am (
    .clk    (clk),
    .rst    (rst),
    .walsh  (walsh),
    .x      (x),
    .sigma1 (sigma1)
  );

  pm_arbitrator #(.N(N)) u_pm (
    .clk        (clk),
    .rst        (rst),
    .walsh      (walsh),
    .x          (x),
    .data_valid (data_valid),
    .sin_o      (sin_v),
    .cos_o      (cos_v),
    .enable     (v1)
  );

  qam_arbitrator u_qam (
    .clk    (clk),
    .rst    (rst),
    .sigma1 (sigma1),
    .sin_i  (sin_v),
    .cos_i  (cos_v),
    .i_prod (i_qam),
    .q_prod (q_qam)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      v2    <= 1'b0;
      v3    <= 1'b0;
      i_out <= '0;
      q_out <= '0;
    end else begin
      v2 <= v1;
      v3 <= v2;
      unique case (mode)
        MODE_AM: begin
          i_out <= v1 ? sigma1 : '0;
          q_out <= '0;
        end
        MODE_PM: begin
          i_out <= v1 ? cos_v : '0;
          q_out <= v1 ? sin_v : '0;
        end
        MODE_QAM: begin
          i_out <= v3 ? i_qam : '0;
          q_out <= v3 ? q_qam : '0;
        end
        default: begin
          i_out <= '0;
          q_out <= '0;
        end
      endcase
    end
  end

endmodule
