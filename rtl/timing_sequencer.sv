// timing_sequencer: Walsh Timing Sequencer.
//
// Produces the timing function Wbar_s (Paley order s, starting at 0), with
// segments of t1 clock cycles and 2^m(s) segments per pass, where m(s) is the
// bit width of s; the pass is repeated R times back to back. Every bit flip
// of the timing function, rising or falling, produces a one-cycle `trigger`
// pulse for the downstream modulation generator.
//
// Structure (as in the paper): a Rademacher Generator, a Walsh Generator, an
// Edge Detect flip-flop and a Repeat Module (counter + comparator).
//
// Timing: the rising edge of `start` is seen at clock edge e0, where s, t1
// and R are captured; the first segment begins at e1. A bit flip of
// `walsh_timing` at edge k gives `trigger` high for the cycle after edge k+1
// (one clock cycle, as the paper's latency budget states). R = 0 suppresses
// the run; s = 0 gives a constant-0 function and no triggers. `rademacher`
// brings out the Rademacher functions R_0 .. R_{m-1} that form the timing
// function, for diagnostics (0 when idle and above order m-1). `rst` is
// synchronous and active high. Capturing the inputs at start and
// edge-sensitive start are this design's choices.
module timing_sequencer
  import walsh_pkg::*;
#(
  parameter int M  = ORDER_W,
  parameter int TW = T1_W,
  parameter int RW = REP_W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [RW-1:0] repeats,
  input  logic [TW-1:0] t1,
  input  logic [M-1:0]  s,
  output logic          walsh_timing,
  output logic          trigger,
  output logic          busy,
  output logic [M-1:0]  rademacher
);

  logic          start_q, go;
  logic [M-1:0]  s_q;
  logic [TW-1:0] t1_q;
  logic [RW-1:0] r_q;
  logic [3:0]    m_q;
  logic [M-1:0]  rad;
  logic          running, last, done;
  logic          rep_enable, restart;
  logic          walsh_raw;

  always_ff @(posedge clk) begin
    if (rst) begin
      start_q <= 1'b0;
      go      <= 1'b0;
      s_q     <= '0;
      t1_q    <= '0;
      r_q     <= '0;
      m_q     <= '0;
    end else begin
      start_q <= start;
      go      <= start & ~start_q;
      if (start & ~start_q) begin
        s_q  <= s;
        t1_q <= t1;
        r_q  <= repeats;
        m_q  <= 4'(bit_width8(ORDER_W'(s)));
      end
    end
  end

  rademacher_gen #(.M(M), .CEW(TW)) u_rad (
    .clk        (clk),
    .rst        (rst),
    .start      ((go && (r_q != '0)) || restart),
    .stop       (1'b0),
    .clk_expand (t1_q),
    .m          (m_q),
    .rad        (rad),
    .running    (running),
    .last       (last),
    .done       (done)
  );

  walsh_gen #(.M(M)) u_walsh (
    .clk        (clk),
    .order      (s_q),
    .complement (1'b0),
    .rad        (rad),
    .walsh      (walsh_raw)
  );

  repeat_module #(.RW(RW)) u_rep (
    .clk      (clk),
    .rst      (rst),
    .start    (go),
    .seq_last (last),
    .repeats  (r_q),
    .enable   (rep_enable),
    .restart  (restart)
  );

  assign walsh_timing = walsh_raw & rep_enable;
  assign busy         = running;
  assign rademacher   = rad;

  edge_detect #(.RISING(1'b0)) u_edge (
    .clk   (clk),
    .rst   (rst),
    .d     (walsh_timing),
    .pulse (trigger)
  );

  // The auxiliary done bit is not needed here: the repeat module works from
  // `last`, the final cycle of a pass.
  logic unused_done;
  assign unused_done = done;

endmodule
