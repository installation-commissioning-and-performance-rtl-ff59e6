// cordic_sincos: pipelined CORDIC that turns a phase word into cos and sin.
//
// The digital LO needs cos/sin of its running phase every clock. This is a
// rotation-mode CORDIC: the input phase (PW bits, one turn full scale) is
// first folded into +-90 degrees by a 180-degree pre-rotation, then ITER
// shift-and-add micro-rotations drive the residual angle to zero. The start
// vector is pre-scaled by 1/K (K = CORDIC gain, 1.6468) so the outputs have
// amplitude 0.98 of full scale of the OW-bit signed outputs; it carries FB
// extra fraction bits that are rounded off at the end. Error is within
// about 2 LSB.
//
// Interface: phase is accepted every clock; cos_o/sin_o appear LATENCY =
// ITER + 1 clocks later. valid_i is carried along as valid_o. No reset is
// needed on the data pipeline; valid is reset.
//
// The publication only says that the LO phase is moved by the tracking
// loop; the use of a CORDIC and all its sizes are this design's choices.
module cordic_sincos #(
  parameter int unsigned PW   = 18,
  parameter int unsigned OW   = 18,
  parameter int unsigned ITER = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 valid_i,
  input  logic [PW-1:0]        phase,
  output logic                 valid_o,
  output logic signed [OW-1:0] cos_o,
  output logic signed [OW-1:0] sin_o
);
  localparam int unsigned FB = 3;         // extra fraction bits against rounding
  localparam int unsigned W  = OW + 2 + FB; // 2 bits for the CORDIC growth
  localparam int unsigned ZW = 26;      // residual angle width (turns)
  // 0.98 * (2**(OW-1)) / K, the start magnitude
  localparam logic signed [W-1:0] X0 =
      W'(longint'(real'(longint'(1) << (OW-1+FB)) * 0.98 * 0.6072529350088827));

  // atan(2**-i) in units of 2**-32 turn
  localparam logic [31:0] ATAN32 [24] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465,  32'd10679838,  32'd5340245,   32'd2670163,  32'd1335087,
    32'd667544,    32'd333772,    32'd166886,    32'd83443,    32'd41722,
    32'd20861,     32'd10430,     32'd5215,      32'd2608,     32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81};

  logic signed [W-1:0]  x [ITER+1];
  logic signed [W-1:0]  y [ITER+1];
  logic signed [ZW-1:0] z [ITER+1];
  logic [ITER:0]        v;

  // Stage 0: fold into +-90 degrees.
  logic signed [ZW-1:0] z_in;
  assign z_in = ZW'(signed'({phase, {(ZW-PW){1'b0}}}));

  always_ff @(posedge clk) begin
    if (z_in > signed'(ZW'(1) <<< (ZW-2))) begin
      x[0] <= -X0;
      z[0] <= z_in - (ZW'(1) <<< (ZW-1));
    end else if (z_in < -(signed'(ZW'(1) <<< (ZW-2)))) begin
      x[0] <= -X0;
      z[0] <= z_in + (ZW'(1) <<< (ZW-1));
    end else begin
      x[0] <= X0;
      z[0] <= z_in;
    end
    y[0] <= '0;
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    localparam logic signed [ZW-1:0] A = ZW'(ATAN32[i] >> (32 - ZW));
    always_ff @(posedge clk) begin
      if (z[i] >= 0) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - A;
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + A;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) v <= '0;
    else     v <= {v[ITER-1:0], valid_i};
  end

  // Round away the fraction bits; |x|,|y| <= 0.98 full scale, so dropping
  // the growth bits is safe.
  assign cos_o   = OW'((x[ITER] + W'(1 << (FB-1))) >>> FB);
  assign sin_o   = OW'((y[ITER] + W'(1 << (FB-1))) >>> FB);
  assign valid_o = v[ITER];

  initial assert (ITER <= 24 && ITER >= 4 && PW <= ZW)
    else $error("cordic_sincos: unsupported ITER/PW");
endmodule
