// tb_prl_regs: checks the PRL control registers.
//
// After reset: enable off, gains zero, LO step 7/33 turn. Random writes to
// random addresses (including the read-only phase register and unused
// addresses) are mirrored in a model; after every write both the read port
// and the decoded outputs must match the model. Gains are GAIN_W-bit signed
// and read back sign-extended; the phase register reads the live input.
module tb_prl_regs;
  import prl_pkg::*;
  logic clk = 0, rst = 1, we = 0;
  logic [3:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  phase_t track_phase = '0;
  logic enable;
  cgain_t g_fwd, g_rev;
  logic [NCO_W-1:0] lo_step;
  int checks = 0, failures = 0;
  logic [31:0] model [16];

  prl_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] sx(logic [31:0] v);
    return 32'(signed'(v[GAIN_W-1:0]));
  endfunction

  task automatic check_all();
    for (int a = 0; a < 16; a++) begin
      logic [31:0] want;
      addr = 4'(a);
      track_phase = phase_t'($urandom);
      #1;
      want = (a == REG_PHASE) ? 32'(track_phase) : (a > REG_PHASE) ? 32'd0 : model[a];
      checks++;
      if (rdata !== want) begin
        failures++;
        if (failures < 10) $display("addr %0d read %h want %h", a, rdata, want);
      end
    end
    checks++;
    if (enable !== model[REG_CTRL][0] || g_fwd.re !== model[REG_GAIN_F_RE][GAIN_W-1:0] ||
        g_fwd.im !== model[REG_GAIN_F_IM][GAIN_W-1:0] ||
        g_rev.re !== model[REG_GAIN_R_RE][GAIN_W-1:0] ||
        g_rev.im !== model[REG_GAIN_R_IM][GAIN_W-1:0] || lo_step !== model[REG_LO_STEP]) begin
      failures++;
      $display("decoded outputs differ from the model");
    end
  endtask

  initial begin
    foreach (model[i]) model[i] = '0;
    model[REG_LO_STEP] = NCO_STEP_7_33;
    repeat (2) @(negedge clk);
    rst = 0;
    check_all();
    for (int n = 0; n < 300; n++) begin
      logic [3:0] a;
      logic [31:0] d;
      @(negedge clk);
      a = 4'($urandom_range(8));
      d = $urandom;
      we = 1; addr = a; wdata = d;
      case (a)
        REG_CTRL: model[a] = {31'd0, d[0]};
        REG_GAIN_F_RE, REG_GAIN_F_IM, REG_GAIN_R_RE, REG_GAIN_R_IM: model[a] = sx(d);
        REG_LO_STEP: model[a] = d;
        default: ;
      endcase
      @(negedge clk);
      we = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
