// tb_walsh_controller: end-to-end check of the output stage with the two
// complementary clocks. For AM (first-order Walsh AM filter W_0 + W_3,
// timing Wbar_3 repeated twice), PhiM and QAM it measures, for every trigger
// event, the time from the flip of the timing function to the first change
// of the I output (4.5 cycles in AM/PhiM, 6.5 in QAM), then samples I and Q
// in the middle of every modulation segment against the model, and checks
// that the outputs return to 0 after the burst.
module tb_walsh_controller;
  import walsh_pkg::*;
  import walsh_ref_pkg::*;
  localparam real TC = 10.0;
  logic clk = 1'b0, clk_b, rst = 1'b1, start = 1'b0;
  logic [3:0] repeats, t2;
  logic [7:0] t1, s;
  logic signed [13:0] weights [8];
  mod_mode_e mode;
  logic signed [13:0] i_dac, q_dac;
  logic walsh_timing, trigger, data_valid, busy;
  logic [7:0] rademacher;
  logic [7:0] walsh_star;
  int checks = 0, failures = 0;

  walsh_controller #(.N(8)) dut (.*);

  always #5 clk = ~clk;
  assign clk_b = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic void model(int seg, output int ie, output int qe);
    int sum, s1, ph;
    sum = 0;
    for (int k = 0; k < 8; k++) sum += wbar(k, 3, seg) ? -int'(weights[k]) : int'(weights[k]);
    s1 = sat(sum, 14); ph = sum & 8191;
    case (mode)
      MODE_AM:  begin ie = s1; qe = 0; end
      MODE_PM:  begin ie = cos_ref(ph); qe = sin_ref(ph); end
      MODE_QAM: begin ie = sext((s1 >>> 7) * (cos_ref(ph) >>> 7), 14);
                      qe = sext((s1 >>> 7) * (sin_ref(ph) >>> 7), 14); end
      default:  begin ie = 0; qe = 0; end
    endcase
  endfunction

  // One run: start, then for each of `nflips` timing flips check latency and
  // the burst. Weights must make segment 0 of I non-zero.
  task automatic run(int ss, int tt1, int rr, int tt2, int nflips);
    real tw, ti, lat_exp;
    lat_exp = (mode == MODE_QAM) ? 6.5 : 4.5;
    @(negedge clk); s = 8'(ss); t1 = 8'(tt1); repeats = 4'(rr); t2 = 4'(tt2); start = 1'b1;
    for (int f = 0; f < nflips; f++) begin
      int ie, qe;
      @(walsh_timing); tw = $realtime;
      @(i_dac); ti = $realtime;
      chk((ti - tw) == lat_exp * TC, $sformatf("latency %0.1f cycles", (ti - tw) / TC));
      #(TC * tt2 / 2.0);
      for (int j = 0; j < 8; j++) begin
        model(j, ie, qe);
        chk(int'(i_dac) == ie && int'(q_dac) == qe,
            $sformatf("mode %0d seg %0d I %0d/%0d Q %0d/%0d", mode, j, i_dac, ie, q_dac, qe));
        #(TC * tt2);
      end
      chk(i_dac == 0 && q_dac == 0, "outputs back to 0");
    end
    wait (!busy);
    start = 1'b0;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    s = '0; t1 = 8'd1; repeats = '0; t2 = 4'd1; mode = MODE_AM;
    for (int k = 0; k < 8; k++) weights[k] = '0;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    // AM filter W0 + W3 on Wbar_3 repeated twice: 4 triggers
    weights[0] = 14'sd3000; weights[3] = 14'sd1000;
    run(3, 40, 2, 2, 4);
    // phase modulation
    mode = MODE_PM;
    weights[0] = 14'sd1000; weights[1] = 14'sd700; weights[3] = -14'sd300;
    run(1, 30, 1, 1, 1);
    // QAM
    mode = MODE_QAM;
    weights[0] = 14'sd5000; weights[2] = 14'sd1200; weights[5] = 14'sd2222;
    run(2, 50, 1, 3, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
