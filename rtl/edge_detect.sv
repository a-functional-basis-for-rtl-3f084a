// edge_detect: registered bit-flip detector.
//
// A D flip-flop keeps the previous value of `d`; a second flip-flop registers
// the comparison, so a change of `d` seen at clock edge k yields a one-cycle
// `pulse` at edge k+1. With RISING = 0 both rising and falling flips are
// reported (the Timing Sequencer triggers on every transition of its Walsh
// function); with RISING = 1 only 0->1 transitions are (used to turn a
// trigger level into a single start). The one-DFF flip detector is the
// paper's; the output register and the RISING option are this design's.
module edge_detect #(
  parameter bit RISING = 1'b0
) (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic pulse
);

  logic d_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      d_q   <= 1'b0;
      pulse <= 1'b0;
    end else begin
      d_q   <= d;
      pulse <= RISING ? (d & ~d_q) : (d ^ d_q);
    end
  end

endmodule
