// tb_prl_phase_avg: checks the phase-averaging tracking module.
//
// Part 1, open loop: random interleaved forward/reverse I/Q samples and
// random complex gains. A model computes Im(g_f*x_f + g_r*x_r) one I/Q half
// at a time, scales it by 2**-SUM_SHIFT and integrates modulo one turn;
// phase_o must equal the model's integrator exactly, four clocks after the
// input (the pipeline latency), on every clock. Clearing enable must bring
// the phase to zero.
//
// Part 2, closed loop: the testbench plays the PRL. Its baseband samples
// are a*exp(j*(theta_f - phi)) and a*exp(j*(theta_r - phi)) with phi the
// module's phase output, one pair every DECIM clocks. The gains carry the
// forward/reverse offset. The loop must settle to phi = (theta_f +
// theta_r)/2 and stay there while the cable "stretches" (theta_f rises
// and theta_r falls by the same amount), and follow a step of the common
// phase. With the reverse gains at zero (single-input mode) it must lock
// phi to theta_f.
module tb_prl_phase_avg;
  import prl_pkg::*;
  localparam int GUARD = 8, SUM_SHIFT = 10, DECIM = 33;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst = 1, enable = 0;
  cgain_t g_fwd = '0, g_rev = '0;
  logic in_valid = 0, in_sel = 0;
  iq_t fwd_x = '0, rev_x = '0;
  phase_t phase_o;
  int checks = 0, failures = 0;

  prl_phase_avg #(.GUARD(GUARD), .SUM_SHIFT(SUM_SHIFT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- part 1 ----------------
  longint model_acc;
  longint model_q [$];

  task automatic open_loop_step(input logic v, input logic sel, input iq_t xf, input iq_t xr);
    longint ph;
    // enable acts on the integrator directly, not through the pipeline
    if (!enable) begin
      model_acc = 0;
      foreach (model_q[i]) model_q[i] = 0;
    end
    @(negedge clk);
    if (model_q.size() == 4) begin
      ph = model_q.pop_front();
      checks++;
      if (longint'(phase_o) != (ph >> GUARD)) begin
        failures++;
        if (failures < 10) $display("phase %0d want %0d", phase_o, ph >> GUARD);
      end
    end
    in_valid = v; in_sel = sel; fwd_x = xf; rev_x = xr;
    if (v && enable) begin
      longint p;
      p = sel ? longint'(xf) * longint'(g_fwd.re) + longint'(xr) * longint'(g_rev.re)
              : longint'(xf) * longint'(g_fwd.im) + longint'(xr) * longint'(g_rev.im);
      model_acc = (model_acc + (p >>> SUM_SHIFT)) & ((longint'(1) << (PHASE_W + GUARD)) - 1);
    end
    model_q.push_back(model_acc);
  endtask

  // ---------------- part 2 ----------------
  real a;
  task automatic closed_loop_pair(input real th_f, input real th_r);
    real phi;
    phi = 2.0 * PI * real'(phase_o) / real'(1 << PHASE_W);
    @(negedge clk);
    in_valid = 1; in_sel = 0;
    fwd_x = iq_t'($rtoi(a * $cos(th_f - phi)));
    rev_x = iq_t'($rtoi(a * $cos(th_r - phi)));
    @(negedge clk);
    in_sel = 1;
    fwd_x = iq_t'($rtoi(a * $sin(th_f - phi)));
    rev_x = iq_t'($rtoi(a * $sin(th_r - phi)));
    @(negedge clk);
    in_valid = 0;
    repeat (DECIM - 3) @(negedge clk);
  endtask

  function automatic real wrap(real x);
    while (x > PI) x -= 2 * PI;
    while (x < -PI) x += 2 * PI;
    return x;
  endfunction

  task automatic expect_phase(input real want, input real tol, input string what);
    real phi, e;
    phi = 2.0 * PI * real'(phase_o) / real'(1 << PHASE_W);
    e = wrap(phi - want);
    checks++;
    if (e > tol || e < -tol) begin
      failures++;
      $display("%s: phase %f rad, want %f", what, phi, want);
    end
  endtask

  function automatic cgain_t mkgain(real mag, real arg);
    cgain_t g;
    g.re = gain_t'($rtoi(mag * $cos(arg)));
    g.im = gain_t'($rtoi(mag * $sin(arg)));
    return g;
  endfunction

  initial begin
    model_acc = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    // part 1: exact, clock by clock
    for (int seg = 0; seg < 6; seg++) begin
      g_fwd.re = gain_t'($urandom); g_fwd.im = gain_t'($urandom);
      g_rev.re = gain_t'($urandom); g_rev.im = gain_t'($urandom);
      if (seg == 3) begin g_rev = '0; end
      enable = (seg != 4);
      for (int k = 0; k < 400; k++) begin
        if ($urandom_range(3) == 0) open_loop_step(0, 0, iq_t'($urandom), iq_t'($urandom));
        open_loop_step(1, 0, iq_t'($urandom), iq_t'($urandom));
        open_loop_step(1, 1, iq_t'($urandom), iq_t'($urandom));
      end
      // drain with idle inputs and check that phase is held
      repeat (6) open_loop_step(0, 0, '0, '0);
    end
    enable = 0;
    repeat (6) open_loop_step(0, 0, '0, '0);
    checks++;
    if (phase_o != '0) begin failures++; $display("disable did not zero the phase"); end

    // part 2: closed loop, -10 dBFS signals
    begin
      real th0, d, off;
      a   = 0.316 * 131071.0;
      th0 = 1.1;               // common (average) phase
      off = 0.9;               // half the forward/reverse difference
      g_fwd = mkgain(7000.0, -off);  // offset subtracted from forward
      g_rev = mkgain(7000.0, off);   // and added to reverse
      enable = 1;
      for (int n = 0; n < 600; n++) closed_loop_pair(th0 + off, th0 - off);
      expect_phase(th0, 0.002, "settled");
      // cable stretch: forward and reverse phases move in opposite senses
      for (int n = 0; n < 3000; n++) begin
        d = 0.6 * real'(n) / 3000.0;
        closed_loop_pair(th0 + off + d, th0 - off - d);
        if (n % 300 == 299) expect_phase(th0, 0.01, "drift");
      end
      // step of the common phase
      th0 = -2.0;
      for (int n = 0; n < 600; n++) closed_loop_pair(th0 + off + d, th0 - off - d);
      expect_phase(th0, 0.01, "step");
      // single-input mode: reverse gains zero, lock to forward
      g_rev = '0;
      g_fwd = mkgain(14000.0, 0.0);
      for (int n = 0; n < 600; n++) closed_loop_pair(0.4, 2.9);
      expect_phase(0.4, 0.002, "single input");
      // disabled: reference phase zero
      enable = 0;
      closed_loop_pair(0.4, 2.9);
      expect_phase(0.0, 1e-9, "disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
