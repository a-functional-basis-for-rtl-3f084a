// tb_sid_field: reconstruction of a dephasing field, as a sensor array would
// see it, by the 32-sensor SID block.
//
// For each trial the testbench draws a smooth field theta(t) = gamma*T*b(t)
// on [0, T) (a sum of three sinusoids of random frequency, amplitude and
// phase, |theta| < 1.2 rad), and works out what each sensor would measure:
//     X_k   = (1/T) * integral of W_k(t/T) * theta(t) dt   (64 points per
//             segment),
//     P_k   = (1 + sin(X_k)) / 2, quantised to 13 bits.
// From the P_k alone the block must stream, for each of the 32 time
// segments, the segment average of the field:
//     b_hat(j) = avg_j(theta) * (2047 / (pi/2)) / D.
// This holds because the first 2^m Walsh functions span exactly the
// functions that are constant on 2^m segments. The tolerance covers table
// rounding (half an LSB per weight) and fidelity quantisation, summed over
// the sensors.
//
// In a second pass only the 16 lowest orders are measured. The other
// sensors read P = 1/2 and so contribute zero weight. The expected output is
// then the average over pairs of segments.
module tb_sid_field;
  import walsh_ref_pkg::*;

  localparam int  N   = 32;
  localparam int  M   = 5;
  localparam int  SUB = 64;
  localparam real SCALE = 2047.0 / (PI / 2.0);

  logic clk = 1'b0, rst = 1'b1, trigger = 1'b0;
  logic [12:0] p [N];
  logic [13:0] d;
  logic [3:0]  t2;
  logic signed [13:0] b_hat;
  logic valid;
  int checks = 0, failures = 0;
  int n_full = 0, n_half = 0;
  real worst = 0.0;

  walsh_sid u_dut (.clk, .rst, .trigger, .p, .d, .t2, .b_hat, .valid);

  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", what, $time); end
  endtask

  real amp [3], frq [3], phs [3];

  function automatic real theta(real t);
    real v;
    v = 0.0;
    for (int i = 0; i < 3; i++) v += amp[i] * $sin(2.0 * PI * frq[i] * t + phs[i]);
    return v;
  endfunction

  // n_used: number of sensors measured (32 or 16); dd: divisor D; tt: t2
  task automatic trial(int n_used, int dd, int tt);
    real seg_avg [N];
    real xk, tol;
    int te, lat, group;
    for (int i = 0; i < 3; i++) begin
      amp[i] = real'($urandom_range(0, 400)) / 1000.0;
      frq[i] = real'($urandom_range(20, 600)) / 100.0;
      phs[i] = real'($urandom_range(0, 6283)) / 1000.0;
    end
    for (int j = 0; j < N; j++) begin
      seg_avg[j] = 0.0;
      for (int s = 0; s < SUB; s++)
        seg_avg[j] += theta((real'(j * SUB + s) + 0.5) / real'(N * SUB));
      seg_avg[j] /= real'(SUB);
    end
    for (int k = 0; k < N; k++) begin
      if (k < n_used) begin
        xk = 0.0;
        for (int j = 0; j < N; j++) xk += wbar(k, M, j) ? -seg_avg[j] : seg_avg[j];
        xk /= real'(N);
        p[k] = 13'(int'(8191.0 * (1.0 + $sin(xk)) / 2.0));
      end else begin
        p[k] = 13'd4096;
      end
    end
    d = 14'(dd); t2 = 4'(tt);
    te = (tt == 0) ? 1 : tt;
    group = N / n_used;
    tol = (0.5 + 0.25) * real'(n_used) / real'(dd) + 1.0;
    @(negedge clk); trigger = 1'b1;
    @(negedge clk); trigger = 1'b0;
    lat = 1;
    while (!valid && lat < 20) begin @(negedge clk); lat++; end
    chk(lat == 5, $sformatf("latency %0d", lat));
    for (int c = 0; c < te * N; c++) begin
      real e, err;
      int j0;
      j0 = (c / te) / group * group;
      e = 0.0;
      for (int g = 0; g < group; g++) e += seg_avg[j0 + g];
      e = e / real'(group) * SCALE / real'(dd);
      err = real'(b_hat) - e;
      if (err < 0.0) err = -err;
      if (err * real'(dd) > worst) worst = err * real'(dd);
      chk(valid && err <= tol,
          $sformatf("N=%0d D=%0d seg %0d got %0d exp %0.1f", n_used, dd, c / te, b_hat, e));
      @(negedge clk);
    end
    chk(!valid && b_hat == 0, "idle after burst");
    if (n_used == N) n_full++; else n_half++;
  endtask

  initial begin
    for (int k = 0; k < N; k++) p[k] = '0;
    d = 14'd1; t2 = 4'd1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int r = 0; r < 6; r++) trial(32, 1 + (r % 3), r % 3);
    for (int r = 0; r < 6; r++) trial(16, 1 + (r % 2), 1);
    $display("trials: 32 functions=%0d 16 functions=%0d, worst error %0.2f LSB (at D=1)",
             n_full, n_half, worst);
    checks++; if (n_full == 0) failures++;
    checks++; if (n_half == 0) failures++;
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
