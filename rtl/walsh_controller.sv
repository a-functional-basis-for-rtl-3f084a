// walsh_controller: the Walsh-based output stage of the controller.
//
// Timing Sequencer -> Walsh Modulation Generator -> Walsh Filter Synthesizer.
// The sequencer runs on `clk` and emits a trigger at every bit flip of the
// timing Walsh function Wbar_s; each trigger starts a burst of the first N
// Walsh functions (segments of t2 cycles) in the modulation generator, and
// the synthesizer turns them into I/Q DAC words according to the weights and
// the modulation mode. The modulation generator and synthesizer run on
// `clk_b`, the complement of `clk` (both come from a PLL outside this
// module), so the trigger is picked up half a cycle after it is launched.
//
// Latency from a flip of `walsh_timing` (a `clk` edge) to I/Q in AM or PhiM
// mode: 1 cycle to the trigger, 1.5 cycles to the Walsh outputs, 2 cycles to
// I/Q: 4.5 clock cycles, as in the paper. QAM adds 2 cycles. `rst` is
// synchronous in each clock domain and active high. The timing function, its
// Rademacher functions, the trigger, W* and data valid are also brought out,
// as the paper routes them to pins for diagnostics.
module walsh_controller
  import walsh_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                     clk,
  input  logic                     clk_b,
  input  logic                     rst,
  input  logic                     start,
  input  logic [REP_W-1:0]         repeats,
  input  logic [T1_W-1:0]          t1,
  input  logic [ORDER_W-1:0]       s,
  input  logic [T2_W-1:0]          t2,
  input  logic signed [XW-1:0]     weights [N],
  input  mod_mode_e                mode,
  output logic signed [DAC_W-1:0]  i_dac,
  output logic signed [DAC_W-1:0]  q_dac,
  output logic                     walsh_timing,
  output logic                     trigger,
  output logic [N-1:0]             walsh_star,
  output logic                     data_valid,
  output logic                     busy,
  output logic [ORDER_W-1:0]       rademacher
);

  timing_sequencer u_ts (
    .clk          (clk),
    .rst          (rst),
    .start        (start),
    .repeats      (repeats),
    .t1           (t1),
    .s            (s),
    .walsh_timing (walsh_timing),
    .trigger      (trigger),
    .busy         (busy),
    .rademacher   (rademacher)
  );

  walsh_mod_gen #(.N(N)) u_wmg (
    .clk        (clk_b),
    .rst        (rst),
    .trigger    (trigger),
    .t2         (t2),
    .walsh      (walsh_star),
    .data_valid (data_valid)
  );

  walsh_filter_synth #(.N(N)) u_wfs (
    .clk        (clk_b),
    .rst        (rst),
    .walsh      (walsh_star),
    .x          (weights),
    .mode       (mode),
    .data_valid (data_valid),
    .i_out      (i_dac),
    .q_out      (q_dac)
  );

endmodule
