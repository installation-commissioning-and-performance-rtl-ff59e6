// tb_ddc_channel: checks one downconverter channel.
//
// The testbench plays the LO itself (ideal cos/sin of 7/33 turn per clock,
// delayed by LO_LAT clocks as lo_nco's would be) and an IF tone of random
// amplitude and phase on the ADC input. An integer model sums the same
// products over each block of DECIM samples, shifts and saturates; every
// I and Q word must equal the model exactly, come out I first then Q on
// the next clock, and one pair must appear every DECIM clocks. The phase of
// each pair must also be the tone's phase (within 0.002 rad), which checks
// that the boxcar removes the image at twice the IF. A full-scale tone
// with a smaller SHIFT checks saturation.
module tb_ddc_channel;
  import prl_pkg::*;
  localparam int DECIM = 33, LO_LAT = 20;
  localparam real AMP = 0.98 * 131072.0, PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  adc_t adc = '0;
  logic lo_valid = 0;
  iq_t lo_cos = '0, lo_sin = '0;
  logic iq_valid [2], iq_sel [2];
  iq_t iq_data [2];
  int checks = 0, failures = 0;

  ddc_channel #(.DECIM(DECIM), .SHIFT(19), .LO_LAT(LO_LAT)) dut (
    .clk, .rst, .adc, .lo_valid, .lo_cos, .lo_sin,
    .iq_valid(iq_valid[0]), .iq_sel(iq_sel[0]), .iq_data(iq_data[0]));
  // a second instance with less shift, driven into saturation
  ddc_channel #(.DECIM(DECIM), .SHIFT(15), .LO_LAT(LO_LAT)) dut_sat (
    .clk, .rst, .adc, .lo_valid, .lo_cos, .lo_sin,
    .iq_valid(iq_valid[1]), .iq_sel(iq_sel[1]), .iq_data(iq_data[1]));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint satf(longint v, int sh);
    longint s = v >>> sh;
    if (s > 131071) return 131071;
    if (s < -131072) return -131072;
    return s;
  endfunction

  // model state
  adc_t   a_hist [$];
  longint exp_q [2][$];  // I, Q, I, Q ... per instance
  longint acc_i, acc_q;
  int     nprod;
  real    theta, amp;
  real    th_hist [$];   // tone phase of each ADC sample
  real    exp_th [$];    // tone phase of each expected pair
  int     last_i_cycle [2];
  int     cyc;
  int     pairs [2];

  // output checker
  always @(negedge clk) if (!rst) begin
    cyc++;
    for (int k = 0; k < 2; k++) if (iq_valid[k]) begin
      longint e;
      checks++;
      if (exp_q[k].size() == 0) begin
        failures++;
        $display("inst %0d: unexpected output", k);
      end else begin
        e = exp_q[k].pop_front();
        if (longint'(iq_data[k]) != e || iq_sel[k] != (exp_q[k].size() % 2 == 0)) begin
          failures++;
          if (failures < 10) $display("inst %0d: got %0d sel %0b want %0d", k, iq_data[k],
                                      iq_sel[k], e);
        end
      end
      if (!iq_sel[k]) begin
        if (last_i_cycle[k] > 0) begin
          checks++;
          if (cyc - last_i_cycle[k] != DECIM) begin
            failures++;
            $display("inst %0d: pair spacing %0d", k, cyc - last_i_cycle[k]);
          end
        end
        last_i_cycle[k] = cyc;
        pairs[k]++;
      end
    end
  end

  // phase checker on the unsaturated instance
  iq_t got_i;
  always @(negedge clk) if (!rst && iq_valid[0]) begin
    if (!iq_sel[0]) got_i = iq_data[0];
    else begin
      real ph, err;
      ph  = $atan2(real'(iq_data[0]), real'(got_i));
      err = ph - exp_th.pop_front();
      if (err > PI) err -= 2 * PI;
      if (err < -PI) err += 2 * PI;
      checks++;
      if (err > 0.002 || err < -0.002) begin
        failures++;
        $display("phase %f error %f", ph, err);
      end
    end
  end

  task automatic tone(input real a, input real th, input int blocks);
    amp = a;
    theta = th;
    for (int n = 0; n < blocks * DECIM; n++) begin
      int m;
      real w;
      longint c, s, p_i, p_q;
      @(negedge clk);
      m = a_hist.size();   // absolute sample index
      w = 2.0 * PI * 7.0 / 33.0;
      adc = adc_t'($rtoi(a * $cos(w * m + th) + (m % 3) - 1));
      a_hist.push_back(adc);
      th_hist.push_back(th);
      if (m >= LO_LAT) begin
        lo_valid = 1;
        c = longint'($rtoi(AMP * $cos(w * (m - LO_LAT)) + (AMP * $cos(w * (m - LO_LAT)) >= 0 ? 0.5 : -0.5)));
        s = longint'($rtoi(AMP * $sin(w * (m - LO_LAT)) + (AMP * $sin(w * (m - LO_LAT)) >= 0 ? 0.5 : -0.5)));
        lo_cos = iq_t'(c);
        lo_sin = iq_t'(s);
        p_i = longint'(a_hist[m - LO_LAT]) * c;
        p_q = -(longint'(a_hist[m - LO_LAT]) * s);
        acc_i += p_i;
        acc_q += p_q;
        nprod++;
        if (nprod == DECIM) begin
          exp_th.push_back(th_hist[m - LO_LAT]);
          exp_q[0].push_back(satf(acc_i, 19));
          exp_q[0].push_back(satf(acc_q, 19));
          exp_q[1].push_back(satf(acc_i, 15));
          exp_q[1].push_back(satf(acc_q, 15));
          acc_i = 0; acc_q = 0; nprod = 0;
        end
      end
    end
  endtask

  initial begin
    acc_i = 0; acc_q = 0; nprod = 0; cyc = 0;
    last_i_cycle = '{0, 0};
    pairs = '{0, 0};
    repeat (3) @(negedge clk);
    rst = 0;
    tone(10000.0, 0.7, 10);
    for (int t = 0; t < 8; t++)
      tone(1000.0 + real'($urandom_range(30000)), real'($urandom_range(6283)) / 1000.0 - PI, 6);
    tone(32000.0, -2.5, 6);
    @(negedge clk);
    lo_valid = 0;
    repeat (3 * DECIM) @(negedge clk);
    checks++;
    if (exp_q[0].size() > 2 || pairs[0] < 60) begin
      failures++;
      $display("outputs missing: %0d left, %0d pairs", exp_q[0].size(), pairs[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
