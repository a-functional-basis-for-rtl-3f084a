// walsh_sid: Walsh-based system identification and signal reconstruction.
//
// N parallel sensors, each modulated by a Walsh sequence of order k, return
// fidelities P_k. On `trigger` this module turns every P_k into a Walsh
// weight gamma*T*X_k = arcsin(2P_k - 1) (one Weights Estimation unit per
// sensor), then streams the reconstruction
//     b_hat = ( sum_k (gamma T X_k) * W_k ) / D,    D = gamma*T,
// segment by segment: a Walsh Modulation Generator produces W_0 .. W_{N-1}
// (complement form, W_0 = 1; 2^clog2(N) segments of t2 cycles), a Sum Weights
// adder forms the signed sum, which is saturated to the divider's 14-bit
// input, and the divider scales it.
//
// Timing (trigger rising before edge k counts as time 0): weights valid after
// 2 cycles, Walsh functions after 4, first b_hat sample after 5 cycles, as
// the paper quotes. `valid` marks b_hat samples of the burst; b_hat is 0
// outside it. One divider after the adder (rather than one per weight) and
// the saturation are this design's choices.
module walsh_sid
  import walsh_pkg::*;
#(
  parameter int N = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     trigger,
  input  logic [P_W-1:0]           p [N],
  input  logic [DIV_W-1:0]         d,
  input  logic [T2_W-1:0]          t2,
  output logic signed [DIV_W-1:0]  b_hat,
  output logic                     valid
);

  localparam int SW = GTX_W + ((N > 1) ? $clog2(N) : 1);

  logic signed [GTX_W-1:0] gtx [N];
  logic [N-1:0]            we_valid;
  logic [N-1:0]            walsh;
  logic                    data_valid;
  logic signed [SW-1:0]    sum;
  logic signed [DIV_W-1:0] dividend;

  for (genvar k = 0; k < N; k++) begin : g_we
    weights_estimation u_we (
      .clk       (clk),
      .rst       (rst),
      .valid_in  (trigger),
      .p         (p[k]),
      .gtx       (gtx[k]),
      .valid_out (we_valid[k])
    );
  end

  walsh_mod_gen #(.N(N)) u_wmg (
    .clk        (clk),
    .rst        (rst),
    .trigger    (we_valid[0]),
    .t2         (t2),
    .walsh      (walsh),
    .data_valid (data_valid)
  );

  sum_weights #(.N(N), .XW(GTX_W)) u_sum (
    .walsh (walsh),
    .x     (gtx),
    .sum   (sum)
  );

  assign dividend = data_valid ? sat14(32'(sum)) : '0;

  sid_divider u_div (
    .clk      (clk),
    .rst      (rst),
    .dividend (dividend),
    .divisor  (d),
    .quotient (b_hat)
  );

  always_ff @(posedge clk) begin
    if (rst) valid <= 1'b0;
    else     valid <= data_valid;
  end

  logic unused;
  assign unused = ^we_valid[N-1:1];

endmodule
