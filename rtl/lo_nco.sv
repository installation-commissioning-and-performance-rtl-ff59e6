// lo_nco: the digital local oscillator shared by all downconverter channels.
//
// A phase accumulator advances by `step` every ADC clock. The tracking
// phase from the phase-averaging loop (`track_phase`, one turn full scale)
// is added on top of the accumulator, so moving track_phase moves the phase
// of the LO seen by every channel at once. The sum, rounded to PW bits,
// drives a CORDIC that produces cos and sin.
//
// Interface: one ADC sample per clock. lo_cos/lo_sin belong to the sample
// period that started LATENCY = ITER + 2 clocks earlier (one clock for the
// phase sum register, ITER + 1 for the CORDIC); the downconverter delays
// the ADC samples by the same amount. Synchronous, active-high reset
// clears the accumulator.
//
// From the publication: FPGA logic moves the phase of the digital LO to get
// zero average phase of the two PRL signals, and the same LO processes the
// cavity pickup signals. The accumulator/CORDIC structure and all widths
// are this design's own choices.
module lo_nco
  import prl_pkg::*;
#(
  parameter int unsigned PW   = 18,  // phase bits fed to the CORDIC
  parameter int unsigned OW   = IQ_W,
  parameter int unsigned ITER = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [NCO_W-1:0]     step,
  input  phase_t               track_phase,
  output logic                 lo_valid,
  output logic signed [OW-1:0] lo_cos,
  output logic signed [OW-1:0] lo_sin
);
  logic [NCO_W-1:0] acc;
  logic [NCO_W-1:0] sum;
  logic [PW-1:0]    lo_phase;
  logic             sum_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc       <= '0;
      sum       <= '0;
      sum_valid <= 1'b0;
    end else begin
      acc       <= acc + step;
      sum       <= acc + {track_phase, {(NCO_W-PHASE_W){1'b0}}};
      sum_valid <= 1'b1;
    end
  end

  // round to PW bits (the carry out of the rounding wraps, as a phase should)
  assign lo_phase = PW'((sum + (NCO_W'(1) << (NCO_W-PW-1))) >> (NCO_W-PW));

  cordic_sincos #(.PW(PW), .OW(OW), .ITER(ITER)) u_cordic (
    .clk, .rst,
    .valid_i(sum_valid),
    .phase  (lo_phase),
    .valid_o(lo_valid),
    .cos_o  (lo_cos),
    .sin_o  (lo_sin)
  );
endmodule
