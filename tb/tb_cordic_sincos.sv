// tb_cordic_sincos: checks the CORDIC against real-valued cos/sin.
//
// Random and corner phases (0, +-90, 180 degrees, quadrant edges) are fed
// one per clock. Each output pair must match AMP*cos/sin of the phase that
// entered exactly ITER+1 clocks earlier, within TOL LSB, and valid_o must
// follow valid_i with the same latency.
module tb_cordic_sincos;
  localparam int PW = 18, OW = 18, ITER = 18, LAT = ITER + 1, N = 3000;
  localparam real AMP = 0.98 * 131072.0, TOL = 2.5, PI = 3.14159265358979;

  logic clk = 0, rst = 1, valid_i = 0;
  logic [PW-1:0] phase = '0;
  logic valid_o;
  logic signed [OW-1:0] cos_o, sin_o;
  int checks = 0, failures = 0;
  logic [PW-1:0] hist [$];
  logic          vhist [$];

  cordic_sincos #(.PW(PW), .OW(OW), .ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #(10 * (N + 200));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PW-1:0] pick(int i);
    case (i)
      0: return '0;
      1: return PW'(1) << (PW-2);          // +90
      2: return PW'(1) << (PW-1);          // 180
      3: return PW'(3) << (PW-2);          // -90
      4: return (PW'(1) << (PW-2)) + 1;
      5: return (PW'(3) << (PW-2)) - 1;
      6: return '1;
      default: return PW'($urandom);
    endcase
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < N + LAT + 2; i++) begin
      @(negedge clk);
      // compare what is on the outputs now with the input LAT clocks ago
      if (hist.size() == LAT) begin
        logic [PW-1:0] p;
        logic          vv;
        real ang, ec, es;
        p  = hist.pop_front();
        vv = vhist.pop_front();
        checks++;
        if (valid_o !== vv) begin
          failures++;
          $display("valid mismatch at %0d", i);
        end
        if (vv) begin
          ang = 2.0 * PI * real'(p) / real'(1 << PW);
          ec = real'(cos_o) - AMP * $cos(ang);
          es = real'(sin_o) - AMP * $sin(ang);
          checks++;
          if (ec > TOL || ec < -TOL || es > TOL || es < -TOL) begin
            failures++;
            if (failures < 10)
              $display("phase %0d: cos %0d sin %0d, want %f %f", p, cos_o, sin_o,
                       AMP * $cos(ang), AMP * $sin(ang));
          end
        end
      end
      // drive the next input
      valid_i = (i < N) && (i % 17 != 5);
      phase   = pick(i);
      hist.push_back(phase);
      vhist.push_back((i < N) && (i % 17 != 5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
