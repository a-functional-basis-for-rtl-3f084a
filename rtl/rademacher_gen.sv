// rademacher_gen: real-time Rademacher function generator.
//
// A segment counter counts clk_expand clock cycles per segment; a second,
// (M+1)-bit counter holds the segment index. For a sequence of 2^m segments
// the Rademacher function R_j (j = 0..m-1) is bit m-1-j of the index, so R_0
// changes once per sequence, R_1 twice and so on: a square wave starting at 0
// whose period halves with each order. Outputs R_j for j >= m are 0. Bit m of
// the index is the auxiliary "done" bit that marks the end of the sequence.
//
// Interface: `start` (one-cycle pulse) begins the sequence at segment 0 on the
// next edge, also in the middle of a run; `stop` aborts. `rad`, `running` and
// `last` are combinational from the registered counters, so they change on the
// clock edge that follows `start`. `last` is high during the final clock cycle
// of the final segment, which lets a caller restart seamlessly.
//
// The counter-and-comparator structure follows the paper; the index-bit
// mapping, the start/stop interface and treating clk_expand = 0 as 1 are this
// design's choices.
module rademacher_gen #(
  parameter int M   = 8,  // maximum bit width of the Paley order
  parameter int CEW = 8   // width of the clock-expansion input
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  input  logic           stop,
  input  logic [CEW-1:0] clk_expand,
  input  logic [3:0]     m,
  output logic [M-1:0]   rad,
  output logic           running,
  output logic           last,
  output logic           done
);

  logic [CEW-1:0] seg_cnt;
  logic [M:0]     idx;
  logic           run_q;
  logic           seg_end;
  logic [M:0]     idx_last;
  logic [CEW-1:0] ce_m1;

  assign ce_m1    = (clk_expand == '0) ? '0 : clk_expand - 1'b1;
  assign seg_end  = run_q && (seg_cnt == ce_m1);
  assign idx_last = (M+1)'((1 << m) - 1);
  assign last     = seg_end && (idx == idx_last);
  assign running  = run_q;
  assign done     = |(idx & ((M+1)'(1) << m));

  always_ff @(posedge clk) begin
    if (rst || stop) begin
      run_q   <= 1'b0;
      seg_cnt <= '0;
      idx     <= '0;
    end else if (start) begin
      run_q   <= 1'b1;
      seg_cnt <= '0;
      idx     <= '0;
    end else if (run_q) begin
      if (seg_end) begin
        seg_cnt <= '0;
        idx     <= idx + 1'b1;
        if (last) run_q <= 1'b0;
      end else begin
        seg_cnt <= seg_cnt + 1'b1;
      end
    end
  end

  always_comb begin
    rad = '0;
    for (int j = 0; j < M; j++)
      if (run_q && (j < int'(m))) rad[j] = idx[int'(m) - 1 - j];
  end

endmodule
