// prl_phase_avg: the phase-averaging tracking loop of the PRL firmware.
//
// The forward and reverse PRL references, already at complex baseband
// (x_f, x_r), are each multiplied by a complex PRL gain set by software
// (g_f, g_r) and summed. The imaginary part of g_f*x_f + g_r*x_r is, for
// small angles, proportional to the average of the two phases after the
// forward/reverse offset carried in the gains' arguments is removed. That
// error is integrated, and the integrator is the tracking (reference) phase
// handed to the shared digital LO; the loop drives the average phase to
// zero, cancelling the drift of the PRL cable length.
//
// Structure (as the publication describes it): two multipliers, one per
// input pair, and two adders, one adding the two products and one forming
// the integrator, in a four-clock pipeline from input to averaged phase.
// The I/Q samples arrive interleaved, so each multiplier sees x_I on one
// clock and x_Q on the next; the gain part is chosen to match
// (Im(g*x) = g_im*x_I + g_re*x_Q), and the integrator adds both halves in
// turn, which forms the imaginary part without a third adder.
//
//   clock 1: register x_f, x_r and the matching gain parts
//   clock 2: p_f = x_f*g_f(part), p_r = x_r*g_r(part)
//   clock 3: s = p_f + p_r
//   clock 4: acc = acc + s * 2**-SUM_SHIFT      (phase = top PHASE_W bits)
//
// The integrator keeps GUARD bits below the phase output to reduce
// rounding error (the guard bits mentioned by the publication; their number
// is this design's choice). With enable low the integrator is held at zero,
// so the reference phase is zero and the LO itself is the phase reference.
// For a single-input (L3) rack software writes zero to both reverse gains.
//
// Interface: in_valid/in_sel/fwd_x/rev_x is the interleaved stream of
// ddc_channel (I with in_sel=0, then Q with in_sel=1 on the next clock);
// the forward and reverse streams are aligned. Gains are static registers.
// Widths, SUM_SHIFT and the reset value (zero) are this design's choices.
module prl_phase_avg
  import prl_pkg::*;
#(
  parameter int unsigned GUARD     = 8,
  parameter int unsigned SUM_SHIFT = 10
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   enable,
  input  cgain_t g_fwd,
  input  cgain_t g_rev,
  input  logic   in_valid,
  input  logic   in_sel,
  input  iq_t    fwd_x,
  input  iq_t    rev_x,
  output phase_t phase_o
);
  localparam int unsigned ACC_W = PHASE_W + GUARD;
  localparam int unsigned P_W   = IQ_W + GAIN_W;
  localparam int unsigned S_W   = P_W + 1;

  logic                  v1, v2, v3;
  iq_t                   xf1, xr1;
  gain_t                 gf1, gr1;
  logic signed [P_W-1:0] pf2, pr2;
  logic signed [S_W-1:0] s3;
  logic [ACC_W-1:0]      s3_scaled;
  logic [ACC_W-1:0]      acc;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      xf1 <= '0; xr1 <= '0; gf1 <= '0; gr1 <= '0;
      pf2 <= '0; pr2 <= '0; s3 <= '0;
      acc <= '0;
    end else begin
      // clock 1
      v1  <= in_valid;
      xf1 <= fwd_x;
      xr1 <= rev_x;
      gf1 <= in_sel ? g_fwd.re : g_fwd.im;
      gr1 <= in_sel ? g_rev.re : g_rev.im;
      // clock 2: the two multipliers
      v2  <= v1;
      pf2 <= xf1 * gf1;
      pr2 <= xr1 * gr1;
      // clock 3: adder one
      v3  <= v2;
      s3  <= S_W'(pf2) + S_W'(pr2);
      // clock 4: adder two, the integrator (wraps modulo one turn)
      if (!enable)  acc <= '0;
      else if (v3)  acc <= acc + s3_scaled;
    end
  end

  // scaled error, truncated to the integrator width (the sum wraps anyway)
  assign s3_scaled = ACC_W'(s3 >>> SUM_SHIFT);
  assign phase_o   = acc[ACC_W-1 -: PHASE_W];

  // I is always followed by its Q on the next clock.
  a_iq_pair: assert property (@(posedge clk) disable iff (rst)
                              in_valid && !in_sel |=> in_valid && in_sel);
endmodule
