// tb_walsh_top: end-to-end test of the whole chip at its default sizes
// (8 modulation channels, 32 SID sensors). It runs
//   1. an AM Walsh filter (W_0 + W_3) triggered by Wbar_3 repeated twice,
//   2. an AM burst whose Walsh sum overflows and must saturate,
//   3. a PhiM and a QAM burst,
//   4. a start with R = 0, which must produce nothing,
//   5. a reset in the middle of a burst, then a new run,
//   6. a SID reconstruction from 32 fidelities,
// checks latency and every segment value against the model, and counts how
// often each mechanism happened: a failure is counted for any that never did.
module tb_walsh_top;
  import walsh_pkg::*;
  import walsh_ref_pkg::*;
  localparam real TC = 10.0;
  logic clk = 1'b0, clk_b, rst = 1'b1, start = 1'b0;
  logic [3:0] repeats, t2, sid_t2;
  logic [7:0] t1, s;
  logic signed [13:0] weights [8];
  logic [1:0] mode;
  logic signed [13:0] i_dac, q_dac, b_hat;
  logic walsh_timing, trigger, data_valid, busy, sid_trigger = 1'b0, b_valid;
  logic [7:0] rademacher;
  logic [7:0] walsh_star;
  logic [12:0] sid_p [32];
  logic [13:0] sid_d;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_rise = 0, n_fall = 0, n_trig = 0, n_repeat = 0, n_sat = 0, n_am = 0, n_pm = 0,
      n_qam = 0, n_disabled = 0, n_sid = 0, n_lat = 0, n_reset = 0, edges_in_reset = 0, n_rad = 0;

  walsh_top dut (.*);

  always #5 clk = ~clk;
  assign clk_b = ~clk;

  always @(posedge walsh_timing) n_rise++;
  always @(negedge walsh_timing) n_fall++;
  always @(posedge clk) if (trigger) n_trig++;
  // the diagnostic Rademacher outputs must compose the timing function
  always @(negedge clk) if (busy) begin
    n_rad++;
    chk(walsh_timing == ^(rademacher & s), "timing function = XOR of selected Rademachers");
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic void model(int seg, output int ie, output int qe, output bit satd);
    int sum, s1, ph;
    sum = 0;
    for (int k = 0; k < 8; k++) sum += wbar(k, 3, seg) ? -int'(weights[k]) : int'(weights[k]);
    s1 = sat(sum, 14); ph = sum & 8191;
    satd = (s1 != sum);
    case (mod_mode_e'(mode))
      MODE_AM:  begin ie = s1; qe = 0; end
      MODE_PM:  begin ie = cos_ref(ph); qe = sin_ref(ph); end
      MODE_QAM: begin ie = sext((s1 >>> 7) * (cos_ref(ph) >>> 7), 14);
                      qe = sext((s1 >>> 7) * (sin_ref(ph) >>> 7), 14); end
      default:  begin ie = 0; qe = 0; end
    endcase
  endfunction

  task automatic run(int ss, int tt1, int rr, int tt2, int nflips);
    real tw, ti, lat_exp;
    int flips_per_pass;
    bit satd;
    lat_exp = (mod_mode_e'(mode) == MODE_QAM) ? 6.5 : 4.5;
    flips_per_pass = 0;
    for (int j = 1; j < (1 << bitw(ss)); j++)
      if (wbar(ss, bitw(ss), j) != wbar(ss, bitw(ss), j - 1)) flips_per_pass++;
    @(negedge clk); s = 8'(ss); t1 = 8'(tt1); repeats = 4'(rr); t2 = 4'(tt2); start = 1'b1;
    for (int f = 0; f < nflips; f++) begin
      int ie, qe;
      @(walsh_timing); tw = $realtime;
      @(i_dac); ti = $realtime;
      chk((ti - tw) == lat_exp * TC, $sformatf("latency %0.1f cycles", (ti - tw) / TC));
      if ((ti - tw) == 4.5 * TC) n_lat++;
      if (f >= flips_per_pass) n_repeat++;
      #(TC * tt2 / 2.0);
      for (int j = 0; j < 8; j++) begin
        model(j, ie, qe, satd);
        chk(int'(i_dac) == ie && int'(q_dac) == qe,
            $sformatf("mode %0d seg %0d I %0d/%0d Q %0d/%0d", mode, j, i_dac, ie, q_dac, qe));
        if (satd && mod_mode_e'(mode) == MODE_AM && (i_dac == 8191 || i_dac == -8192)) n_sat++;
        #(TC * tt2);
      end
      chk(i_dac == 0 && q_dac == 0, "outputs back to 0");
      case (mod_mode_e'(mode))
        MODE_AM: n_am++;
        MODE_PM: n_pm++;
        MODE_QAM: n_qam++;
        default: ;
      endcase
    end
    wait (!busy);
    start = 1'b0;
    repeat (5) @(negedge clk);
  endtask

  task automatic run_sid(int tt);
    int w [32], lat, dd;
    for (int k = 0; k < 32; k++) begin
      int v;
      v = 4096 + $urandom_range(0, 1200) - 600;
      sid_p[k] = 13'(v);
      w[k] = asin_ref(v);
    end
    dd = 3; sid_d = 14'(dd); sid_t2 = 4'(tt);
    @(negedge clk); sid_trigger = 1'b1;
    @(negedge clk); sid_trigger = 1'b0;
    lat = 1;
    while (!b_valid && lat < 20) begin @(negedge clk); lat++; end
    chk(lat == 5, $sformatf("SID latency %0d", lat));
    for (int c = 0; c < tt * 32; c++) begin
      int sum;
      sum = 0;
      for (int k = 0; k < 32; k++) sum += wbar(k, 5, c / tt) ? -w[k] : w[k];
      chk(b_valid && int'(b_hat) == sat(sum, 14) / dd, $sformatf("SID c=%0d got %0d exp %0d", c, b_hat, sat(sum, 14) / dd));
      @(negedge clk);
    end
    n_sid++;
  endtask

  initial begin
    int trig_before;
    s = '0; t1 = 8'd1; repeats = '0; t2 = 4'd1; mode = 2'b00;
    sid_d = 14'd1; sid_t2 = 4'd1;
    for (int k = 0; k < 32; k++) sid_p[k] = 13'd4096;
    for (int k = 0; k < 8; k++) weights[k] = '0;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    // 1. AM filter, Wbar_3 repeated twice
    weights[0] = 14'sd3000; weights[3] = 14'sd1000;
    run(3, 40, 2, 2, 4);
    // 2. overflow
    for (int k = 0; k < 8; k++) weights[k] = 14'sd3000;
    run(1, 40, 1, 1, 1);
    // 3. PhiM and QAM
    for (int k = 0; k < 8; k++) weights[k] = '0;
    mode = 2'b01; weights[0] = 14'sd1000; weights[1] = 14'sd700; weights[3] = -14'sd300;
    run(1, 30, 1, 1, 1);
    mode = 2'b11; weights[0] = 14'sd5000; weights[2] = 14'sd1200; weights[5] = 14'sd2222;
    run(2, 50, 1, 3, 2);
    // 4. R = 0 disables the output
    trig_before = n_trig;
    @(negedge clk); s = 8'd7; t1 = 8'd3; repeats = 4'd0; start = 1'b1;
    repeat (60) @(negedge clk);
    start = 1'b0;
    chk(n_trig == trig_before && !busy && i_dac == 0, "R=0 gives no output");
    if (n_trig == trig_before) n_disabled++;
    // 5. reset in the middle of a burst; ready again within three cycles
    for (int k = 0; k < 8; k++) weights[k] = '0;
    mode = 2'b00; weights[0] = 14'sd2000; weights[2] = 14'sd500;
    @(negedge clk); s = 8'd1; t1 = 8'd20; repeats = 4'd3; t2 = 4'd4; start = 1'b1;
    @(posedge data_valid);
    repeat (5) @(negedge clk);
    edges_in_reset = n_rise + n_fall - n_trig;
    rst = 1'b1;
    @(negedge clk);
    rst = 1'b0; start = 1'b0;
    repeat (2) @(negedge clk);
    // an edge of walsh_timing cut by the reset produces no trigger
    edges_in_reset = n_rise + n_fall - n_trig - edges_in_reset;
    chk(edges_in_reset <= 1, "at most one edge lost in reset");
    chk(!busy && !data_valid && i_dac == 0 && q_dac == 0, "idle after reset");
    if (!busy && i_dac == 0) n_reset++;
    run(1, 20, 1, 2, 1);
    // 6. SID reconstruction
    run_sid(2);
    $display("mechanisms: rise=%0d fall=%0d trig=%0d repeat=%0d sat=%0d am=%0d pm=%0d qam=%0d r0=%0d rad=%0d reset=%0d sid=%0d lat4.5=%0d",
             n_rise, n_fall, n_trig, n_repeat, n_sat, n_am, n_pm, n_qam, n_disabled, n_rad, n_reset, n_sid, n_lat);
    checks++; if (n_reset == 0) failures++;
    checks++; if (n_rad == 0) failures++;
    checks++; if (n_rise == 0) failures++;
    checks++; if (n_fall == 0) failures++;
    checks++; if (n_trig + edges_in_reset != n_rise + n_fall) failures++;
    checks++; if (n_repeat == 0) failures++;
    checks++; if (n_sat == 0) failures++;
    checks++; if (n_am == 0) failures++;
    checks++; if (n_pm == 0) failures++;
    checks++; if (n_qam == 0) failures++;
    checks++; if (n_disabled == 0) failures++;
    checks++; if (n_sid == 0) failures++;
    checks++; if (n_lat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
