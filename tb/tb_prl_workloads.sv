// tb_prl_workloads: the tracking loop with the longer decimations shown
// with the published loop noise spectra, 528 and 8448 (16 and 256 times 33).
//
// Two chassis, one per decimation, see the same plant: forward/reverse PRL
// tones at -10 dBFS and one cavity tone, all at 7/33 of the ADC rate. The
// scaling shift grows with log2 of the decimation (19+4, 19+8) so the
// baseband magnitude stays the same. Each chassis is set up like a real one
// (measure with averaging off, choose the offset, write the gains for a
// bandwidth that suits its pair rate: 10 kHz at 528, 100 Hz at 8448), then
// the cable stretches. Checked: lock, the cavity phase held through the
// stretch, and one I/Q pair per DECIM clocks.
module tb_prl_workloads;
  import prl_pkg::*;
  localparam int NI = 2;
  localparam int DEC [NI] = '{528, 8448};
  localparam real BW [NI] = '{10.0e3, 100.0};
  localparam real PI = 3.14159265358979;
  localparam real F_ADC = 1320.0e6 / 14.0;

  logic clk = 0, rst = 1;
  adc_t adc_fwd = '0, adc_rev = '0;
  adc_t adc_cav [1];
  logic reg_we [NI];
  logic [3:0] reg_addr [NI];
  logic [31:0] reg_wdata [NI], reg_rdata [NI];
  logic fwd_valid [NI], fwd_sel [NI], rev_valid [NI], rev_sel [NI];
  iq_t fwd_data [NI], rev_data [NI];
  logic cav_valid [NI][1], cav_sel [NI][1];
  iq_t cav_data [NI][1];
  phase_t track_phase [NI];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < NI; i++) begin : g_chassis
    prl_top #(.N_CAV(1), .DECIM(DEC[i]), .SHIFT(19 + $clog2(DEC[i] / 33))) dut (
      .clk, .rst, .adc_fwd, .adc_rev, .adc_cav,
      .reg_we(reg_we[i]), .reg_addr(reg_addr[i]), .reg_wdata(reg_wdata[i]),
      .reg_rdata(reg_rdata[i]),
      .fwd_valid(fwd_valid[i]), .fwd_sel(fwd_sel[i]), .fwd_data(fwd_data[i]),
      .rev_valid(rev_valid[i]), .rev_sel(rev_sel[i]), .rev_data(rev_data[i]),
      .cav_valid(cav_valid[i]), .cav_sel(cav_sel[i]), .cav_data(cav_data[i]),
      .track_phase(track_phase[i]));
  end

  always #5 clk = ~clk;

  initial begin
    #250000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // plant
  real d = 0.0, theta0 = -0.4, off = 2.2, psi = 1.0;
  real amp_prl = 0.316 * 32767.0;
  longint n = 0;
  always @(negedge clk) begin
    real w;
    w = 2.0 * PI * 7.0 / 33.0 * real'(n % 33);
    adc_fwd <= adc_t'($rtoi(amp_prl * $cos(w + theta0 + off + d)));
    adc_rev <= adc_t'($rtoi(amp_prl * $cos(w + theta0 - off - d)));
    adc_cav[0] <= adc_t'($rtoi(0.5 * 32767.0 * $cos(w + psi)));
    n <= n + 1;
  end

  // stream capture
  real ph_f [NI], ph_r [NI], mag_f [NI], mag_r [NI], ph_c [NI];
  iq_t hf [NI], hr [NI], hc [NI];
  int pairs [NI], last [NI], bad [NI];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int i = 0; i < NI; i++) begin
      if (fwd_valid[i] && !fwd_sel[i]) begin
        hf[i] = fwd_data[i]; hr[i] = rev_data[i];
        if (pairs[i] > 0 && cyc - last[i] != DEC[i]) bad[i]++;
        last[i] = cyc;
        pairs[i]++;
      end
      if (fwd_valid[i] && fwd_sel[i]) begin
        ph_f[i] = $atan2(real'(fwd_data[i]), real'(hf[i]));
        ph_r[i] = $atan2(real'(rev_data[i]), real'(hr[i]));
        mag_f[i] = $sqrt(real'(hf[i]) ** 2 + real'(fwd_data[i]) ** 2);
        mag_r[i] = $sqrt(real'(hr[i]) ** 2 + real'(rev_data[i]) ** 2);
      end
      if (cav_valid[i][0] && !cav_sel[i][0]) hc[i] = cav_data[i][0];
      if (cav_valid[i][0] && cav_sel[i][0]) ph_c[i] = $atan2(real'(cav_data[i][0]), real'(hc[i]));
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

  task automatic check(input bit ok, input string what, input int i);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL decim %0d: %s f=%f r=%f c=%f", DEC[i], what, ph_f[i],
                                  ph_r[i], ph_c[i]);
    end
  endtask

  task automatic wr(input int i, input logic [3:0] a, input logic [31:0] v);
    @(negedge clk);
    reg_we[i] = 1; reg_addr[i] = a; reg_wdata[i] = v;
    @(negedge clk);
    reg_we[i] = 0;
  endtask

  task automatic setup(input int i);
    real delta, g;
    delta = wrap(ph_f[i] - ph_r[i]) / 2.0;
    if (fabs(wrap(delta + PI)) < fabs(delta)) delta = wrap(delta + PI);
    g = BW[i] / (F_ADC / real'(DEC[i])) * (2.0 ** 36) / 2.0;
    wr(i, REG_GAIN_F_RE, 32'($rtoi(g / mag_f[i] * $cos(-delta))));
    wr(i, REG_GAIN_F_IM, 32'($rtoi(g / mag_f[i] * $sin(-delta))));
    wr(i, REG_GAIN_R_RE, 32'($rtoi(g / mag_r[i] * $cos(delta))));
    wr(i, REG_GAIN_R_IM, 32'($rtoi(g / mag_r[i] * $sin(delta))));
    wr(i, REG_CTRL, 1);
  endtask

  task automatic check_locked(input int i, input string what);
    real avg;
    avg = wrap(ph_f[i] + wrap(ph_r[i] - ph_f[i]) / 2.0);
    check(fabs(wrap(2.0 * avg)) < 0.006, what, i);
  endtask

  initial begin
    real cav0 [NI];
    int m_lock = 0, m_stretch = 0;
    for (int i = 0; i < NI; i++) begin
      reg_we[i] = 0; reg_addr[i] = '0; reg_wdata[i] = '0;
      pairs[i] = 0; last[i] = 0; bad[i] = 0;
    end
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (4 * 8448) @(negedge clk);
    for (int i = 0; i < NI; i++) setup(i);
    // the 8448 loop has a 18-pair (13.5 ms) time constant
    repeat (250 * 8448) @(negedge clk);
    for (int i = 0; i < NI; i++) begin
      check_locked(i, "lock");
      cav0[i] = ph_c[i];
      m_lock++;
    end
    for (int s = 0; s < 8; s++) begin
      d = d + 0.05;
      repeat (10 * 8448) @(negedge clk);
      for (int i = 0; i < NI; i++) begin
        check(fabs(wrap(ph_c[i] - cav0[i])) < 0.004, "cavity phase moved with stretch", i);
        m_stretch++;
      end
    end
    for (int i = 0; i < NI; i++) check(bad[i] == 0 && pairs[i] > 300, "pair spacing", i);
    $display("mechanisms: lock=%0d stretch=%0d", m_lock, m_stretch);
    if (m_lock == 0 || m_stretch == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
