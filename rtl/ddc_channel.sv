// ddc_channel: digital downconverter of one ADC channel to complex baseband.
//
// Each ADC sample is multiplied by the shared digital LO (cos, -sin), which
// moves the IF signal to DC, and DECIM consecutive products are summed (a
// first-order CIC, i.e. a boxcar). With the IF at 7/33 of the sample rate
// and DECIM a multiple of 33, the boxcar sums the image at twice the IF over
// whole turns, so it cancels; what remains is A/2 * DECIM * exp(j*(theta -
// phi_LO)) for an input A*cos(w*n + theta). The sum is scaled by 2**-SHIFT
// and saturated to IQ_W bits.
//
// Interface: adc is one sample per clock. The ADC samples are delayed by
// LO_LAT clocks so that sample n meets the LO value computed for the same
// clock (lo_nco latency). Every DECIM clocks the channel emits I on one
// clock (iq_valid=1, iq_sel=0) and Q on the next (iq_valid=1, iq_sel=1):
// the interleaved I/Q stream the phase-averaging module takes. All channels
// of one chassis share lo_nco and reset, so their streams stay aligned.
//
// The publication says only that the forward and reverse references (and
// the cavity signals) are digitally downconverted to baseband with a
// downconverter shared between cavity and PRL signals. The mixer/boxcar
// structure, DECIM = 33 (the "CIC: 33" setting shown with the loop noise
// spectra) and the widths are this design's own choices.
module ddc_channel
  import prl_pkg::*;
#(
  parameter int unsigned DECIM  = 33,
  parameter int unsigned SHIFT  = 19,
  parameter int unsigned LO_LAT = 20,
  parameter int unsigned OW     = IQ_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  adc_t                 adc,
  input  logic                 lo_valid,
  input  logic signed [OW-1:0] lo_cos,
  input  logic signed [OW-1:0] lo_sin,
  output logic                 iq_valid,
  output logic                 iq_sel,
  output iq_t                  iq_data
);
  localparam int unsigned PW    = ADC_W + OW;
  localparam int unsigned ACC_W = PW + $clog2(DECIM) + 1;
  localparam int unsigned CW    = $clog2(DECIM);

  // ADC delay line matching the LO latency
  adc_t adc_d [LO_LAT+1];
  assign adc_d[0] = adc;
  for (genvar k = 0; k < LO_LAT; k++) begin : g_dly
    always_ff @(posedge clk) adc_d[k+1] <= adc_d[k];
  end

  // mixer
  logic signed [PW-1:0] prod_i, prod_q;
  logic                 prod_valid;
  always_ff @(posedge clk) begin
    if (rst) begin
      prod_valid <= 1'b0;
      prod_i     <= '0;
      prod_q     <= '0;
    end else begin
      prod_valid <= lo_valid;
      prod_i     <= adc_d[LO_LAT] * lo_cos;
      prod_q     <= -(adc_d[LO_LAT] * lo_sin);
    end
  end

  function automatic iq_t sat(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> SHIFT;
    if (s > ACC_W'(signed'(IQ_W'({1'b0, {(IQ_W-1){1'b1}}}))))
      return {1'b0, {(IQ_W-1){1'b1}}};
    else if (s < ACC_W'(signed'(IQ_W'({1'b1, {(IQ_W-1){1'b0}}}))))
      return {1'b1, {(IQ_W-1){1'b0}}};
    else
      return IQ_W'(s);
  endfunction

  // boxcar decimator
  logic signed [ACC_W-1:0] acc_i, acc_q;
  logic [CW-1:0]           cnt;
  iq_t                     hold_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      acc_i    <= '0;
      acc_q    <= '0;
      cnt      <= '0;
      iq_valid <= 1'b0;
      iq_sel   <= 1'b0;
      iq_data  <= '0;
      hold_q   <= '0;
    end else begin
      iq_valid <= 1'b0;
      if (iq_valid && !iq_sel) begin
        iq_valid <= 1'b1;
        iq_sel   <= 1'b1;
        iq_data  <= hold_q;
      end
      if (prod_valid) begin
        if (cnt == CW'(DECIM - 1)) begin
          cnt      <= '0;
          acc_i    <= '0;
          acc_q    <= '0;
          iq_valid <= 1'b1;
          iq_sel   <= 1'b0;
          iq_data  <= sat(acc_i + ACC_W'(prod_i));
          hold_q   <= sat(acc_q + ACC_W'(prod_q));
        end else begin
          cnt   <= cnt + 1'b1;
          acc_i <= acc_i + ACC_W'(prod_i);
          acc_q <= acc_q + ACC_W'(prod_q);
        end
      end
    end
  end

  initial assert (DECIM >= 3) else $error("ddc_channel: DECIM must be >= 3");
endmodule
