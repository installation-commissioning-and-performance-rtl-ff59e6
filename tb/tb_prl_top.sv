// tb_prl_top: end-to-end test of the PRL firmware at its default sizes.
//
// The testbench plays the analog world and the control software. Every
// ADC clock it produces 7/33-turn IF tones for the forward and reverse PRL
// couplers and for N_CAV cavity pickups. Their phases, relative to the
// chassis' own LO, are built from
//   lambda(t): drift of the LO distribution, common to all channels,
//   d(t):      PRL cable stretch, +d on forward and -d on reverse,
//   theta0, off: the coupler's average phase and forward/reverse offset,
//   psi_k:     the cavity phases relative to the reference.
// The software step measures the forward/reverse phases and amplitudes
// with averaging off, picks the forward/reverse offset (the one of the two
// candidates 180 degrees apart nearest a nominal value), computes the four
// gain registers for a requested bandwidth and turns averaging on.
//
// Checked: lock (average PRL phase driven to zero); cavity phase held
// constant, by the loop, through cable stretch and LO drift; with
// averaging off the reference phase is zero and the cavity phase follows
// the LO drift; single-input (L3) mode with the reverse gains at zero; a
// high-bandwidth (300 kHz) setting; register read-back of the phase; one
// I/Q pair per DECIM clocks on every stream. Each mechanism is counted
// and one that never happened is a failure.
module tb_prl_top;
  import prl_pkg::*;
  localparam int N_CAV = 4, DECIM = 33;
  localparam real PI = 3.14159265358979;
  localparam real FS_PAIR = 1320.0e6 / 14.0 / 33.0;  // pair rate, Hz

  logic clk = 0, rst = 1;
  adc_t adc_fwd = '0, adc_rev = '0;
  adc_t adc_cav [N_CAV];
  logic reg_we = 0;
  logic [3:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic fwd_valid, fwd_sel, rev_valid, rev_sel;
  iq_t fwd_data, rev_data;
  logic cav_valid [N_CAV], cav_sel [N_CAV];
  iq_t cav_data [N_CAV];
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

  // ---------------- plant ----------------
  real lambda = 0.0, d = 0.0, theta0 = 0.8, off = 1.3;
  real psi [N_CAV] = '{0.3, -1.2, 2.0, -2.9};
  real amp_prl = 0.316 * 32767.0;  // -10 dBFS
  real amp_cav = 0.5 * 32767.0;
  real rev_on = 1.0;
  longint n = 0;

  always @(negedge clk) begin
    real w;
    w = 2.0 * PI * 7.0 / 33.0 * real'(n % 33);
    adc_fwd <= adc_t'($rtoi(amp_prl * $cos(w + lambda + theta0 + off + d)));
    adc_rev <= adc_t'($rtoi(rev_on * amp_prl * $cos(w + lambda + theta0 - off - d)));
    for (int k = 0; k < N_CAV; k++)
      adc_cav[k] <= adc_t'($rtoi(amp_cav * $cos(w + lambda + psi[k])));
    n <= n + 1;
  end

  // ---------------- stream capture ----------------
  real ph_f, ph_r, mag_f, mag_r;
  real ph_c [N_CAV];
  iq_t hold_f, hold_r;
  iq_t hold_c [N_CAV];
  int  pairs = 0, last_pair = 0, cyc = 0, spacing_bad = 0;
  always @(posedge clk) begin
    cyc++;
    if (fwd_valid && !fwd_sel) begin
      hold_f = fwd_data;
      hold_r = rev_data;
      if (pairs > 0 && cyc - last_pair != DECIM) spacing_bad++;
      last_pair = cyc;
      pairs++;
    end
    if (fwd_valid && fwd_sel) begin
      ph_f = $atan2(real'(fwd_data), real'(hold_f));
      ph_r = $atan2(real'(rev_data), real'(hold_r));
      mag_f = $sqrt(real'(hold_f) ** 2 + real'(fwd_data) ** 2);
      mag_r = $sqrt(real'(hold_r) ** 2 + real'(rev_data) ** 2);
    end
    for (int k = 0; k < N_CAV; k++) begin
      if (cav_valid[k] && !cav_sel[k]) hold_c[k] = cav_data[k];
      if (cav_valid[k] && cav_sel[k]) ph_c[k] = $atan2(real'(cav_data[k]), real'(hold_c[k]));
    end
  end

  // ---------------- helpers ----------------
  function automatic real fabs(real x);
    return x < 0.0 ? -x : x;
  endfunction

  function automatic real wrap(real x);
    while (x > PI) x -= 2 * PI;
    while (x < -PI) x += 2 * PI;
    return x;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30)
        $display("FAIL %s (t=%0t) f=%f r=%f c0=%f trk=%f", what, $time, ph_f, ph_r, ph_c[0],
                 track_rad());
    end
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] v);
    @(negedge clk);
    reg_we = 1; reg_addr = a; reg_wdata = v;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic rd(input logic [3:0] a, output logic [31:0] v);
    @(negedge clk);
    reg_addr = a;
    #1 v = reg_rdata;
  endtask

  task automatic wait_pairs(input int np);
    repeat (np * DECIM) @(negedge clk);
  endtask

  function automatic real track_rad();
    return 2.0 * PI * real'(track_phase) / real'(1 << PHASE_W);
  endfunction

  // software: measure, choose the offset, compute and write the gains.
  // loop gain per pair K = 2*pi*BW/FS_PAIR; the integrator adds
  // (G_f*a_f + G_r*a_r)*err / 2**SUM_SHIFT per pair to a 2**26-per-turn
  // accumulator, so G*a = K * 2**36 / (2*pi) / 2 per direction.
  task automatic setup_gains(input real bw, input real nominal, input bit single);
    real delta, k, gf, gr;
    wr(REG_CTRL, 0);
    wait_pairs(8);
    delta = wrap(ph_f - ph_r) / 2.0;
    if (fabs(wrap(delta + PI - nominal)) < fabs(wrap(delta - nominal))) delta = wrap(delta + PI);
    k = 2.0 * PI * bw / FS_PAIR * (2.0 ** 36) / (2.0 * PI);
    if (single) begin
      gf = k / mag_f;
      gr = 0.0;
      delta = 0.0;
    end else begin
      gf = k / 2.0 / mag_f;
      gr = k / 2.0 / mag_r;
    end
    wr(REG_GAIN_F_RE, 32'($rtoi(gf * $cos(-delta))));
    wr(REG_GAIN_F_IM, 32'($rtoi(gf * $sin(-delta))));
    wr(REG_GAIN_R_RE, 32'($rtoi(gr * $cos(delta))));
    wr(REG_GAIN_R_IM, 32'($rtoi(gr * $sin(delta))));
    wr(REG_CTRL, 1);
  endtask

  int m_lock = 0, m_stretch = 0, m_lo_drift = 0, m_disabled = 0, m_single = 0,
      m_fast = 0, m_readback = 0, m_offset_choice = 0;

  task automatic check_locked(input real tol, input string what);
    real avg;
    avg = wrap(ph_f + wrap(ph_r - ph_f) / 2.0);
    // average of forward and reverse after the offset is zero (mod pi)
    check(fabs(wrap(2.0 * avg)) < 2.0 * tol, {what, ": PRL average not zero"});
  endtask

  initial begin
    real cav0 [N_CAV];
    real c0;
    logic [31:0] v;
    for (int k = 0; k < N_CAV; k++) adc_cav[k] = '0;
    repeat (4) @(negedge clk);
    rst = 0;

    // averaging off after reset: reference phase zero. The LO starts at
    // reset, the plant's clock count before it, so the LO phase sits at a
    // fixed angle c0 to the plant's time origin; measure it once.
    wait_pairs(10);
    check(track_phase == 0, "phase not zero when disabled");
    c0 = wrap(ph_c[0] - (lambda + psi[0]));
    for (int k = 0; k < N_CAV; k++)
      check(fabs(wrap(ph_c[k] - (c0 + lambda + psi[k]))) < 0.003, "open-loop cavity phase");
    m_disabled++;

    // set up at 10 kHz (the tested bandwidth) and lock
    setup_gains(10.0e3, 0.0, 0);
    m_offset_choice++;
    wait_pairs(400);
    check_locked(0.003, "lock");
    check(fabs(wrap(track_rad() - (c0 + lambda + theta0))) < 0.003 ||
          fabs(wrap(track_rad() - (c0 + lambda + theta0 + PI))) < 0.003, "tracking phase");
    m_lock++;
    rd(REG_PHASE, v);
    check(v == 32'(track_phase), "phase read-back");
    m_readback++;
    for (int k = 0; k < N_CAV; k++) cav0[k] = ph_c[k];

    // cable stretch: forward and reverse move oppositely
    for (int s = 0; s < 40; s++) begin
      d = d + 0.02;
      wait_pairs(20);
      for (int k = 0; k < N_CAV; k++)
        check(fabs(wrap(ph_c[k] - cav0[k])) < 0.004, "cavity phase moved with cable stretch");
      m_stretch++;
    end
    // LO distribution drift: all channels move together (slowly: the loop
    // is type 1, so a fast ramp would leave a lag)
    for (int s = 0; s < 20; s++) begin
      lambda = lambda - 0.01;
      wait_pairs(400);
      for (int k = 0; k < N_CAV; k++)
        check(fabs(wrap(ph_c[k] - cav0[k])) < 0.004, "cavity phase moved with LO drift");
      m_lo_drift++;
    end
    check_locked(0.003, "after drift");

    // averaging off again: the LO becomes the reference, cavities follow lambda
    wr(REG_CTRL, 0);
    wait_pairs(10);
    check(track_phase == 0, "phase not zero after disable");
    for (int k = 0; k < N_CAV; k++)
      check(fabs(wrap(ph_c[k] - (c0 + lambda + psi[k]))) < 0.003, "cavity phase with LO reference");
    m_disabled++;

    // nominal offset near pi picks the other candidate; loop still locks
    setup_gains(10.0e3, PI, 0);
    m_offset_choice++;
    wait_pairs(400);
    check_locked(0.003, "lock, other offset");
    m_lock++;

    // maximum bandwidth
    setup_gains(300.0e3, 0.0, 0);
    wait_pairs(100);
    check_locked(0.003, "lock at 300 kHz");
    // a 0.05 rad LO step is followed within 20 pairs (7 us); at 10 kHz the
    // loop time constant alone is 45 pairs
    for (int s = 0; s < 10; s++) begin
      d = d - 0.05;
      lambda = lambda + 0.05;
      wait_pairs(20);
      check_locked(0.003, "tracking at 300 kHz");
    end
    m_fast++;

    // single-input (L3) rack: no reverse wave, lock to forward at zero
    rev_on = 0.0;
    wait_pairs(4);
    setup_gains(10.0e3, 0.0, 1);
    wait_pairs(400);
    check(fabs(wrap(ph_f)) < 0.003, "single input: forward not at zero");
    for (int s = 0; s < 10; s++) begin
      lambda = lambda + 0.01;
      wait_pairs(400);
      check(fabs(wrap(ph_f)) < 0.004, "single input tracking");
    end
    m_single++;

    check(spacing_bad == 0 && pairs > 1000, "one I/Q pair per DECIM clocks");
    $display("mechanisms: lock=%0d stretch=%0d lo_drift=%0d disabled=%0d single=%0d fast=%0d readback=%0d offset_choice=%0d",
             m_lock, m_stretch, m_lo_drift, m_disabled, m_single, m_fast, m_readback, m_offset_choice);
    if (m_lock == 0 || m_stretch == 0 || m_lo_drift == 0 || m_disabled == 0 || m_single == 0 ||
        m_fast == 0 || m_readback == 0 || m_offset_choice == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
