// sum_weights: Walsh synthesis adder, Sigma_W = sum_k X_k * W_k, W_k in {+1,-1}.
//
// For each channel a multiplexer selects +X_k when W_k = 1 and -X_k (the
// weight inverted plus one, i.e. two's-complement negation, one bit wider)
// when W_k = 0; the N signed terms are added. Weights are XW-bit two's
// complement; the sum is XW + clog2(N) bits wide, which cannot overflow.
// Purely combinational: the enclosing arbitrator registers the result.
// The +-X_k multiplexer and the adder are the paper's; the adder tree shape is
// left to synthesis.
module sum_weights #(
  parameter int N  = 8,
  parameter int XW = 14,
  parameter int SW = XW + ((N > 1) ? $clog2(N) : 1)
) (
  input  logic [N-1:0]          walsh,
  input  logic signed [XW-1:0]  x [N],
  output logic signed [SW-1:0]  sum
);

  always_comb begin
    logic signed [SW-1:0] acc;
    logic signed [XW:0]   term;
    acc = '0;
    for (int k = 0; k < N; k++) begin
      term = walsh[k] ? (XW+1)'(x[k]) : -((XW+1)'(x[k]));
      acc  = acc + SW'(term);
    end
    sum = acc;
  end

endmodule
