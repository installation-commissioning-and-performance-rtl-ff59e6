// tb_lo_nco: checks the digital LO against an independent phase model.
//
// For several LO steps (7/33 turn among them) and a tracking phase that
// jumps to new random values, the LO output after m clocks must be
// AMP*cos/sin(2*pi*((m - LAT)*step + track_phase*2**14) / 2**32) with
// LAT = ITER + 2, within TOL LSB (CORDIC error plus the 18-bit phase
// rounding). lo_valid must rise exactly LAT clocks after reset.
module tb_lo_nco;
  import prl_pkg::*;
  localparam int ITER = 18, LAT = ITER + 2;
  localparam real AMP = 0.98 * 131072.0, TOL = 4.0, PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  logic [NCO_W-1:0] step = NCO_STEP_7_33;
  phase_t track_phase = '0;
  logic lo_valid;
  iq_t lo_cos, lo_sin;
  int checks = 0, failures = 0;

  lo_nco #(.ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected sum register value after n clocks, kept for LAT clocks
  logic [NCO_W-1:0] exp_sum [$];

  task automatic run(input logic [NCO_W-1:0] st, input int cycles);
    step = st;
    rst  = 1;
    exp_sum.delete();
    @(negedge clk);
    @(negedge clk);
    rst = 0;
    for (int m = 1; m <= cycles; m++) begin
      if (m % 97 == 0) track_phase = phase_t'($urandom);
      @(negedge clk);
      // sum after m clocks = (m-1)*step + track_phase at that clock edge
      exp_sum.push_back(NCO_W'(m - 1) * st + {track_phase, 14'd0});
      checks++;
      if (lo_valid !== (m >= LAT)) begin
        failures++;
        $display("lo_valid=%0b after %0d clocks", lo_valid, m);
      end
      if (m >= LAT) begin
        real ang, ec, es;
        // output after m clocks comes from the sum after m-ITER-1 clocks
        ang = 2.0 * PI * real'(exp_sum[0]) / 4294967296.0;
        void'(exp_sum.pop_front());
        ec = real'(lo_cos) - AMP * $cos(ang);
        es = real'(lo_sin) - AMP * $sin(ang);
        checks++;
        if (ec > TOL || ec < -TOL || es > TOL || es < -TOL) begin
          failures++;
          if (failures < 10)
            $display("m=%0d cos %0d sin %0d want %f %f", m, lo_cos, lo_sin,
                     AMP * $cos(ang), AMP * $sin(ang));
        end
      end
    end
  endtask

  initial begin
    run(NCO_STEP_7_33, 2000);
    run(32'h0100_0000, 1000);
    run(NCO_W'($urandom), 1000);
    run(32'hF000_0001, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
