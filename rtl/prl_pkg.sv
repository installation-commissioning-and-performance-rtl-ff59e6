// prl_pkg: widths, types and register addresses shared by the phase
// reference line (PRL) tracking firmware.
//
// All data paths use signed two's-complement fixed point. Phases are
// expressed in turns: a PHASE_W-bit phase word covers one full turn, so
// phase / 2**PHASE_W is the fraction of 360 degrees. The widths are this
// design's own choices (the source publication gives none); they follow
// the 18-bit multiplier ports common on FPGAs.
package prl_pkg;

  localparam int unsigned ADC_W   = 16;  // digitizer sample width
  localparam int unsigned IQ_W    = 18;  // baseband I or Q sample width
  localparam int unsigned GAIN_W  = 18;  // PRL gain register width
  localparam int unsigned PHASE_W = 18;  // tracking phase width (one turn)
  localparam int unsigned NCO_W   = 32;  // LO phase accumulator width

  // LO phase step: IF / f_sample = 7/33 of a turn per ADC sample
  // (1320 MHz LO - 1300 MHz PRL = 20 MHz IF, sampled at 1320/14 MHz).
  localparam logic [NCO_W-1:0] NCO_STEP_7_33 = 32'd911053669;

  typedef logic signed [ADC_W-1:0]  adc_t;
  typedef logic signed [IQ_W-1:0]   iq_t;
  typedef logic signed [GAIN_W-1:0] gain_t;
  typedef logic [PHASE_W-1:0]       phase_t;

  // Complex PRL gain: one register for the real and one for the imaginary
  // part, for each of the forward and reverse directions.
  typedef struct packed {
    gain_t re;
    gain_t im;
  } cgain_t;

  // Register map of prl_regs (word addresses).
  typedef enum logic [3:0] {
    REG_CTRL      = 4'd0,  // bit 0: phase averaging enable
    REG_GAIN_F_RE = 4'd1,  // forward gain, real part
    REG_GAIN_F_IM = 4'd2,  // forward gain, imaginary part
    REG_GAIN_R_RE = 4'd3,  // reverse gain, real part
    REG_GAIN_R_IM = 4'd4,  // reverse gain, imaginary part
    REG_LO_STEP   = 4'd5,  // LO phase step per ADC sample
    REG_PHASE     = 4'd6   // read only: tracking (reference) phase
  } reg_addr_e;

endpackage
