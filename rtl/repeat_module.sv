// repeat_module: repetition counter for the Walsh timing sequence.
//
// A counter is loaded with 1 when a run starts and is incremented at the end
// of every pass of the base sequence. A comparator holds `enable` high while
// counter <= R, so the sequence plays R times; R = 0 disables the output.
// `restart` is asserted combinationally in the last cycle of a pass when
// another pass is due, so the next pass begins on the following edge with no
// gap. The counter/comparator and the R = 0 rule are the paper's; the restart
// handshake is this design's.
module repeat_module #(
  parameter int RW = 4
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic          seq_last,
  input  logic [RW-1:0] repeats,
  output logic          enable,
  output logic          restart
);

  logic [RW:0] cnt;

  assign enable  = (cnt != '0) && (cnt <= {1'b0, repeats});
  assign restart = enable && seq_last && (cnt < {1'b0, repeats});

  always_ff @(posedge clk) begin
    if (rst)                     cnt <= '0;
    else if (start)              cnt <= (RW+1)'(1);
    else if (enable && seq_last) cnt <= cnt + 1'b1;
  end

endmodule
