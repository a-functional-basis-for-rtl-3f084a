// tb_walsh_filter_synth: random Walsh states, weights and data-valid per
// cycle in each mode. In AM and PhiM the outputs must equal the model two
// cycles after the inputs; in QAM four cycles after. Model: AM I = sat14(sum),
// Q = 0; PhiM I = cos, Q = sin of (sum mod 2^13); QAM I/Q = 7-MSB product of
// sat14(sum) and cos/sin; all zero when data valid was low; mode 10 gives 0.
module tb_walsh_filter_synth;
  import walsh_pkg::*;
  import walsh_ref_pkg::*;
  logic clk = 1'b0, rst = 1'b1, data_valid = 1'b0;
  logic [7:0] walsh;
  logic signed [13:0] x [8];
  mod_mode_e mode;
  logic signed [13:0] i_out, q_out;
  int checks = 0, failures = 0;
  int ei [$], eq [$];

  walsh_filter_synth #(.N(8)) dut (.*);

  always #5 clk = ~clk;

  function automatic void model(mod_mode_e md, logic [7:0] w, bit v, output int i_e, output int q_e);
    int sum, s1, ph;
    sum = 0;
    for (int k = 0; k < 8; k++) sum += w[k] ? int'(x[k]) : -int'(x[k]);
    s1 = sat(sum, 14);
    ph = sum & 8191;
    i_e = 0; q_e = 0;
    if (v) begin
      case (md)
        MODE_AM:  begin i_e = s1; q_e = 0; end
        MODE_PM:  begin i_e = cos_ref(ph); q_e = sin_ref(ph); end
        MODE_QAM: begin
          i_e = sext((s1 >>> 7) * (cos_ref(ph) >>> 7), 14);
          q_e = sext((s1 >>> 7) * (sin_ref(ph) >>> 7), 14);
        end
        default: ;
      endcase
    end
  endfunction

  task automatic run(mod_mode_e md, int cycles);
    int lat;
    lat = (md == MODE_QAM) ? 4 : 2;
    ei.delete(); eq.delete();
    mode = md;
    for (int c = 0; c < cycles; c++) begin
      int a, b;
      walsh = 8'($urandom);
      data_valid = ($urandom_range(0, 7) != 0);
      if (c % 50 == 0) for (int k = 0; k < 8; k++) x[k] = 14'($urandom_range(0, 16383));
      model(md, walsh, data_valid, a, b);
      ei.push_back(a); eq.push_back(b);
      @(negedge clk);
      if (ei.size() >= lat) begin
        a = ei.pop_front(); b = eq.pop_front();
        if (c > 8) begin
          checks += 2;
          if (int'(i_out) != a || int'(q_out) != b) begin
            failures++;
            if (failures < 10) $display("FAIL mode=%0d c=%0d I %0d/%0d Q %0d/%0d", md, c, i_out, a, q_out, b);
          end
        end
      end
    end
  endtask

  initial begin
    mode = MODE_AM; walsh = '0;
    for (int k = 0; k < 8; k++) x[k] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run(MODE_AM, 800);
    run(MODE_PM, 800);
    run(MODE_QAM, 800);
    run(MODE_OFF, 100);
    run(MODE_AM, 200);
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
