// walsh_top: Walsh controller chip: output stage plus system identification.
//
// Holds the two real-time Walsh subsystems of the design:
//   * walsh_controller: timing sequencer, modulation generator and filter
//     synthesizer producing the I/Q DAC words (N_CTRL Walsh channels, 8 by
//     default);
//   * walsh_sid: weight estimation from N_SID sensor fidelities and streamed
//     reconstruction of the sensed signal (32 by default).
// The PLL, the two-channel DAC, the sensor qubits and the host processor
// that writes the programming inputs are outside: their signals are ports.
// `clk` and `clk_b` are the PLL's two outputs (equal frequency, clk_b
// inverted). The SID path runs on `clk`. All ports are plain signals and
// arrays; `mode` uses the 2-bit encoding 00 AM, 01 PhiM, 11 QAM.
module walsh_top
  import walsh_pkg::*;
#(
  parameter int N_CTRL = 8,
  parameter int N_SID  = 32
) (
  input  logic                     clk,
  input  logic                     clk_b,
  input  logic                     rst,
  // controller programming
  input  logic                     start,
  input  logic [REP_W-1:0]         repeats,
  input  logic [T1_W-1:0]          t1,
  input  logic [ORDER_W-1:0]       s,
  input  logic [T2_W-1:0]          t2,
  input  logic signed [XW-1:0]     weights [N_CTRL],
  input  logic [1:0]               mode,
  // controller outputs
  output logic signed [DAC_W-1:0]  i_dac,
  output logic signed [DAC_W-1:0]  q_dac,
  output logic                     walsh_timing,
  output logic                     trigger,
  output logic [N_CTRL-1:0]        walsh_star,
  output logic                     data_valid,
  output logic                     busy,
  output logic [ORDER_W-1:0]       rademacher,
  // system identification
  input  logic                     sid_trigger,
  input  logic [P_W-1:0]           sid_p [N_SID],
  input  logic [DIV_W-1:0]         sid_d,
  input  logic [T2_W-1:0]          sid_t2,
  output logic signed [DIV_W-1:0]  b_hat,
  output logic                     b_valid
);

  walsh_controller #(.N(N_CTRL)) u_ctrl (
    .clk          (clk),
    .clk_b        (clk_b),
    .rst          (rst),
    .start        (start),
    .repeats      (repeats),
    .t1           (t1),
    .s            (s),
    .t2           (t2),
    .weights      (weights),
    .mode         (mod_mode_e'(mode)),
    .i_dac        (i_dac),
    .q_dac        (q_dac),
    .walsh_timing (walsh_timing),
    .trigger      (trigger),
    .walsh_star   (walsh_star),
    .data_valid   (data_valid),
    .busy         (busy),
    .rademacher   (rademacher)
  );

  walsh_sid #(.N(N_SID)) u_sid (
    .clk     (clk),
    .rst     (rst),
    .trigger (sid_trigger),
    .p       (sid_p),
    .d       (sid_d),
    .t2      (sid_t2),
    .b_hat   (b_hat),
    .valid   (b_valid)
  );

endmodule
