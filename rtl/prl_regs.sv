// prl_regs: software-visible control registers of the PRL tracking loop.
//
// Software computes the four PRL gain registers (real and imaginary part of
// the forward and of the reverse gain) from the tracking bandwidth, the
// nominal and actual forward/reverse phase offset and the two signal
// strengths, and writes them here; it also switches phase averaging on and
// off. This block holds those values, the LO phase step, and lets software
// read back the tracking phase.
//
// Interface: a simple synchronous register port. A write (we=1) to `addr`
// takes effect on the next clock edge; rdata is the combinational read of
// `addr`. Gain registers take the low GAIN_W bits of wdata (signed); reads
// sign-extend them. Register map: see prl_pkg::reg_addr_e.
//
// Reset: phase averaging off, all gains zero, LO step = 7/33 turn.
// The publication names the gain registers and the software enable; the
// bus, the addresses and the reset values are this design's own choices.
module prl_regs
  import prl_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             we,
  input  logic [3:0]       addr,
  input  logic [31:0]      wdata,
  output logic [31:0]      rdata,
  input  phase_t           track_phase,
  output logic             enable,
  output cgain_t           g_fwd,
  output cgain_t           g_rev,
  output logic [NCO_W-1:0] lo_step
);
  always_ff @(posedge clk) begin
    if (rst) begin
      enable  <= 1'b0;
      g_fwd   <= '0;
      g_rev   <= '0;
      lo_step <= NCO_STEP_7_33;
    end else if (we) begin
      unique case (addr)
        REG_CTRL:      enable   <= wdata[0];
        REG_GAIN_F_RE: g_fwd.re <= wdata[GAIN_W-1:0];
        REG_GAIN_F_IM: g_fwd.im <= wdata[GAIN_W-1:0];
        REG_GAIN_R_RE: g_rev.re <= wdata[GAIN_W-1:0];
        REG_GAIN_R_IM: g_rev.im <= wdata[GAIN_W-1:0];
        REG_LO_STEP:   lo_step  <= wdata;
        default: ;  // REG_PHASE is read only; other addresses ignored
      endcase
    end
  end

  always_comb begin
    unique case (addr)
      REG_CTRL:      rdata = {31'd0, enable};
      REG_GAIN_F_RE: rdata = 32'(g_fwd.re);
      REG_GAIN_F_IM: rdata = 32'(g_fwd.im);
      REG_GAIN_R_RE: rdata = 32'(g_rev.re);
      REG_GAIN_R_IM: rdata = 32'(g_rev.im);
      REG_LO_STEP:   rdata = lo_step;
      REG_PHASE:     rdata = 32'(track_phase);
      default:       rdata = '0;
    endcase
  end
endmodule
