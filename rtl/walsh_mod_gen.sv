// walsh_mod_gen: Walsh Modulation Generator.
//
// On a trigger, streams the first N Paley-ordered Walsh functions
// W_0 .. W_{N-1} in parallel, in the complement form (W_0 = 1) used for
// waveform synthesis. One Rademacher Generator is shared by N Walsh
// Generators whose orders are the constants 0 .. N-1. Each segment lasts t2
// clock cycles and a burst has 2^MW segments, MW = clog2(N) (the bit width
// of the highest order; e.g. 16 segments for 16 functions). `data_valid` is
// high while the burst runs; outside it all outputs are 0.
//
// Timing: the trigger passes through one DFF (an Edge Detect that keeps only
// its rising edge). A trigger that rises just before clock edge k is seen at
// k, and the functions start at edge k+1. In the controller this module runs
// on the inverted clock, so a trigger launched on the main clock reaches the
// Walsh outputs 1.5 main-clock cycles later. A new trigger during a burst
// restarts it. t2 is captured on the trigger. The gating of the outputs to
// 0 and the segment count 2^clog2(N) are this design's reading of the paper.
module walsh_mod_gen
  import walsh_pkg::*;
#(
  parameter int N  = 8,
  parameter int TW = T2_W
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          trigger,
  input  logic [TW-1:0] t2,
  output logic [N-1:0]  walsh,
  output logic          data_valid
);

  localparam int MW = (N > 1) ? $clog2(N) : 1;

  logic          start;
  logic [TW-1:0] t2_q;
  logic [MW-1:0] rad;
  logic          running, last, done;
  logic [N-1:0]  walsh_raw;

  edge_detect #(.RISING(1'b1)) u_trig (
    .clk   (clk),
    .rst   (rst),
    .d     (trigger),
    .pulse (start)
  );

  always_ff @(posedge clk) begin
    if (rst)        t2_q <= '0;
    else if (start) t2_q <= t2;
  end

  rademacher_gen #(.M(MW), .CEW(TW)) u_rad (
    .clk        (clk),
    .rst        (rst),
    .start      (start),
    .stop       (1'b0),
    .clk_expand (t2_q),
    .m          (4'(MW)),
    .rad        (rad),
    .running    (running),
    .last       (last),
    .done       (done)
  );

  for (genvar k = 0; k < N; k++) begin : g_wg
    walsh_gen #(.M(MW)) u_wg (
      .clk        (clk),
      .order      (MW'(k)),
      .complement (1'b1),
      .rad        (rad),
      .walsh      (walsh_raw[k])
    );
  end

  assign walsh      = running ? walsh_raw : '0;
  assign data_valid = running;

  logic unused;
  assign unused = last ^ done;

endmodule
