// walsh_gen: real-time Walsh function generator (Paley order).
//
// The Walsh function of Paley order l is the modulo-2 sum of the Rademacher
// functions R_j selected by the set bits b_j of l. It is built, as in the
// paper, from a cascade of M identical LUT cells: cell j passes its input
// through when b_j = 0 and returns In XOR R_j when b_j = 1. The first cell's
// input is `complement`: 0 gives the form Wbar_l (Wbar_0 = 0) used for timing,
// 1 gives W_l = Wbar_l XOR 1 (W_0 = 1) used for waveform synthesis.
//
// The order is held in a register that loads every clock cycle, so a new
// order takes effect one cycle after it is applied; the Rademacher inputs
// reach `walsh` through combinational logic only (no added latency).
module walsh_gen #(
  parameter int M = 8
) (
  input  logic         clk,
  input  logic [M-1:0] order,
  input  logic         complement,
  input  logic [M-1:0] rad,
  output logic         walsh
);

  logic [M-1:0] order_q;
  logic [M:0]   chain;

  always_ff @(posedge clk) order_q <= order;

  assign chain[0] = complement;
  for (genvar j = 0; j < M; j++) begin : g_lut
    // LUT cell: XOR gate feeding input 1 of a 2:1 mux, In on input 0.
    assign chain[j+1] = order_q[j] ? (chain[j] ^ rad[j]) : chain[j];
  end
  assign walsh = chain[M];

endmodule
