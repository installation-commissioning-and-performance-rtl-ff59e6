// prl_top: PRL phase-averaging firmware of one LLRF chassis.
//
// The chassis digitizes the forward and reverse waves of the phase
// reference line (PRL), picked off by a directional coupler, together with
// the cavity pickup signals. One digital LO (lo_nco) feeds a downconverter
// (ddc_channel) for every one of these channels. The forward and reverse
// baseband streams enter the phase-averaging loop (prl_phase_avg), whose
// integrator output is added to the LO phase. The loop thus moves the LO
// until the gain-weighted average phase of the two PRL signals is zero; as
// the PRL cable stretches, the forward phase moves one way and the reverse
// phase the other, so their average, and with it every cavity phase
// measured with this LO, stays put. Software reaches the gains, the enable
// and the tracking phase through prl_regs.
//
//   adc_fwd --> ddc --+
//                     +--> prl_phase_avg --> track_phase --+
//   adc_rev --> ddc --+                                    |
//   adc_cav[k] -> ddc --> cav_* (cavity I/Q, to the field  |
//                         controller)                      |
//   lo_nco <-----------------------------------------------+
//
// Interface: one sample of each ADC per clock (the ADC clock). All
// baseband outputs are interleaved I/Q streams (valid, sel: 0=I, 1=Q),
// one pair every DECIM clocks. Register port: see prl_regs. The analog
// parts (PRL cable, couplers, MO-rack PLL, downconverters, ADCs) are
// outside; their signals are the ADC inputs.
//
// From the publication: the shared LO and downconverter, the gains, the
// sum, the integrator and the enable. The number of cavity channels, the
// decimation, all widths and the register port are this design's choices.
module prl_top
  import prl_pkg::*;
#(
  parameter int unsigned N_CAV     = 4,
  parameter int unsigned DECIM     = 33,
  parameter int unsigned SHIFT     = 19,
  parameter int unsigned ITER      = 18,
  parameter int unsigned GUARD     = 8,
  parameter int unsigned SUM_SHIFT = 10
) (
  input  logic        clk,
  input  logic        rst,
  // digitizer samples
  input  adc_t        adc_fwd,
  input  adc_t        adc_rev,
  input  adc_t        adc_cav [N_CAV],
  // software register port
  input  logic        reg_we,
  input  logic [3:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  // baseband outputs
  output logic        fwd_valid,
  output logic        fwd_sel,
  output iq_t         fwd_data,
  output logic        rev_valid,
  output logic        rev_sel,
  output iq_t         rev_data,
  output logic        cav_valid [N_CAV],
  output logic        cav_sel   [N_CAV],
  output iq_t         cav_data  [N_CAV],
  output phase_t      track_phase
);
  localparam int unsigned LO_LAT = ITER + 2;

  logic             enable;
  cgain_t           g_fwd, g_rev;
  logic [NCO_W-1:0] lo_step;
  logic             lo_valid;
  iq_t              lo_cos, lo_sin;

  prl_regs u_regs (
    .clk, .rst,
    .we   (reg_we),
    .addr (reg_addr),
    .wdata(reg_wdata),
    .rdata(reg_rdata),
    .track_phase,
    .enable, .g_fwd, .g_rev, .lo_step
  );

  lo_nco #(.ITER(ITER)) u_lo (
    .clk, .rst,
    .step       (lo_step),
    .track_phase,
    .lo_valid, .lo_cos, .lo_sin
  );

  ddc_channel #(.DECIM(DECIM), .SHIFT(SHIFT), .LO_LAT(LO_LAT)) u_ddc_fwd (
    .clk, .rst, .adc(adc_fwd), .lo_valid, .lo_cos, .lo_sin,
    .iq_valid(fwd_valid), .iq_sel(fwd_sel), .iq_data(fwd_data)
  );

  ddc_channel #(.DECIM(DECIM), .SHIFT(SHIFT), .LO_LAT(LO_LAT)) u_ddc_rev (
    .clk, .rst, .adc(adc_rev), .lo_valid, .lo_cos, .lo_sin,
    .iq_valid(rev_valid), .iq_sel(rev_sel), .iq_data(rev_data)
  );

  for (genvar k = 0; k < N_CAV; k++) begin : g_cav
    ddc_channel #(.DECIM(DECIM), .SHIFT(SHIFT), .LO_LAT(LO_LAT)) u_ddc_cav (
      .clk, .rst, .adc(adc_cav[k]), .lo_valid, .lo_cos, .lo_sin,
      .iq_valid(cav_valid[k]), .iq_sel(cav_sel[k]), .iq_data(cav_data[k])
    );
  end

  prl_phase_avg #(.GUARD(GUARD), .SUM_SHIFT(SUM_SHIFT)) u_avg (
    .clk, .rst, .enable, .g_fwd, .g_rev,
    .in_valid(fwd_valid),
    .in_sel  (fwd_sel),
    .fwd_x   (fwd_data),
    .rev_x   (rev_data),
    .phase_o (track_phase)
  );

  // the two PRL streams must stay aligned for the averaging to be valid
  a_aligned: assert property (@(posedge clk) disable iff (rst)
                              fwd_valid == rev_valid && fwd_sel == rev_sel);
endmodule
