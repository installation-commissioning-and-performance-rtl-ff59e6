// tb_prl_monitor: the monitor chassis next to the master oscillator.
//
// Such a chassis digitizes four RF signals: forward and reverse of two
// reference lines (line A on the PRL inputs, line B on two cavity
// inputs). Line A is tracked by the loop; line B's forward/reverse average
// is computed from its two cavity channels. Both lines are driven from the
// same MO, so the two averages differ by a constant. Each line's cable
// stretches on its own and the chassis LO drifts; the difference between
// the tracked reference and line B's average must stay constant, which is
// the out-of-loop consistency check between two PRL segments.
module tb_prl_monitor;
  import prl_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real FS_PAIR = 1320.0e6 / 14.0 / 33.0;

  logic clk = 0, rst = 1;
  adc_t adc_fwd = '0, adc_rev = '0;
  adc_t adc_cav [4];
  logic reg_we = 0;
  logic [3:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic fwd_valid, fwd_sel, rev_valid, rev_sel;
  iq_t fwd_data, rev_data;
  logic cav_valid [4], cav_sel [4];
  iq_t cav_data [4];
  phase_t track_phase;
  int checks = 0, failures = 0;

  prl_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #30000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real lambda = 0.0, da = 0.0, db = 0.0;
  real off_a = 0.7, off_b = -1.9, th_b = 0.5;  // line B's average sits 0.5 rad off
  real amp = 0.316 * 32767.0;
  longint n = 0;
  always @(negedge clk) begin
    real w;
    w = 2.0 * PI * 7.0 / 33.0 * real'(n % 33);
    adc_fwd    <= adc_t'($rtoi(amp * $cos(w + lambda + off_a + da)));
    adc_rev    <= adc_t'($rtoi(amp * $cos(w + lambda - off_a - da)));
    adc_cav[0] <= adc_t'($rtoi(amp * $cos(w + lambda + th_b + off_b + db)));
    adc_cav[1] <= adc_t'($rtoi(amp * $cos(w + lambda + th_b - off_b - db)));
    adc_cav[2] <= '0;
    adc_cav[3] <= '0;
    n <= n + 1;
  end

  real ph_f, ph_r, mag_f, mag_r, ph_bf, ph_br;
  iq_t hf, hr, hb0, hb1;
  always @(posedge clk) begin
    if (fwd_valid && !fwd_sel) begin hf = fwd_data; hr = rev_data; end
    if (fwd_valid && fwd_sel) begin
      ph_f = $atan2(real'(fwd_data), real'(hf));
      ph_r = $atan2(real'(rev_data), real'(hr));
      mag_f = $sqrt(real'(hf) ** 2 + real'(fwd_data) ** 2);
      mag_r = $sqrt(real'(hr) ** 2 + real'(rev_data) ** 2);
    end
    if (cav_valid[0] && !cav_sel[0]) begin hb0 = cav_data[0]; hb1 = cav_data[1]; end
    if (cav_valid[0] && cav_sel[0]) begin
      ph_bf = $atan2(real'(cav_data[0]), real'(hb0));
      ph_br = $atan2(real'(cav_data[1]), real'(hb1));
    end
  end

  function automatic real wrap(real x);
    while (x > PI) x -= 2 * PI;
    while (x < -PI) x += 2 * PI;
    return x;
  endfunction
  function automatic real fabs(real x);
    return x < 0.0 ? -x : x;
  endfunction
  // line B average, taken modulo pi (the offset ambiguity) as 2x angle
  function automatic real avg2_b();
    return wrap(ph_bf + ph_br);
  endfunction

  task automatic wr(input logic [3:0] a, input logic [31:0] v);
    @(negedge clk);
    reg_we = 1; reg_addr = a; reg_wdata = v;
    @(negedge clk);
    reg_we = 0;
  endtask

  initial begin
    real delta, g, ref2;
    int m_sep = 0;
    for (int k = 0; k < 4; k++) adc_cav[k] = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (10 * 33) @(negedge clk);
    delta = wrap(ph_f - ph_r) / 2.0;
    if (fabs(wrap(delta + PI)) < fabs(delta)) delta = wrap(delta + PI);
    g = 10.0e3 / FS_PAIR * (2.0 ** 36) / 2.0;
    wr(REG_GAIN_F_RE, 32'($rtoi(g / mag_f * $cos(-delta))));
    wr(REG_GAIN_F_IM, 32'($rtoi(g / mag_f * $sin(-delta))));
    wr(REG_GAIN_R_RE, 32'($rtoi(g / mag_r * $cos(delta))));
    wr(REG_GAIN_R_IM, 32'($rtoi(g / mag_r * $sin(delta))));
    wr(REG_CTRL, 1);
    repeat (400 * 33) @(negedge clk);
    // with line A locked, line B's doubled average relative to the LO is
    // 2*th_b modulo 2*pi
    ref2 = avg2_b();
    checks++;
    if (fabs(wrap(ref2 - 2.0 * th_b)) > 0.006) begin
      failures++;
      $display("line B average %f, want %f", ref2 / 2.0, th_b);
    end
    for (int s = 0; s < 30; s++) begin
      da = da + 0.03;
      db = db - 0.02;
      lambda = lambda + 0.003;
      repeat (400 * 33) @(negedge clk);
      checks++;
      if (fabs(wrap(avg2_b() - ref2)) > 0.008) begin
        failures++;
        $display("segments inconsistent: %f vs %f", avg2_b(), ref2);
      end
      m_sep++;
    end
    if (m_sep == 0) failures++;
    $display("mechanisms: segment_consistency=%0d", m_sep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
