// tb_nco: checks the code and carrier NCOs against exact rational models.
//
// After a preset (chip 1000, Doppler 1000 Hz) and, later, a loop command
// (f_DLL = 2 chips/s, f_PLL = -2500 Hz), it runs the accumulators for many
// samples and compares code phase and carrier phase with the phase the
// commanded frequencies give (f*n/fs, within 1e-5 chip or cycle), the
// number of `last` pulses with the number of code-period wraps of the
// model, the `epochs` counter, and that `last` marks chip CODE_LEN-1.
module tb_nco;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sample_en, load, cmd_valid, last;
  logic [9:0] load_chip, code_chip;
  logic [31:0] load_frac, code_frac, carr_phase, code_inc, carr_inc, epochs;
  fx_t load_fd;
  lf_out_t cmd;
  int checks = 0, failures = 0;

  nco #(.CODE_LEN(1023)) dut (.*);

  function automatic fx_t f(input real v); return fx_t'(longint'(v * 16777216.0)); endfunction

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp) > tol || (exp - got) > tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real code_rate, carr_rate, code0, carr0, code_exp, carr_exp, got_code;
  int lasts, n_samp, last_bad;
  real abs_pos = 1000.0;
  initial begin
    sample_en = 0; load = 0; cmd_valid = 0; load_chip = 0; load_frac = 0; load_fd = 0; cmd = '0;
    lasts = 0; last_bad = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); load = 1; load_chip = 1000; load_fd = f(1000.0);
    @(negedge clk); load = 0;
    code_rate = 1.023e6 + 1000.0 * 1.023e6 / 1575.42e6;
    carr_rate = 1000.0;
    for (int phase = 0; phase < 2; phase++) begin
      code0 = real'(code_chip) + real'(code_frac) / 4294967296.0;
      carr0 = real'(carr_phase) / 4294967296.0;
      n_samp = 100000;
      for (int n = 0; n < n_samp; n++) begin
        sample_en = 1;
        #1;
        if (last) begin
          lasts++;
          if (code_chip != 10'd1022) last_bad++;
        end
        @(negedge clk);
      end
      sample_en = 0;
      code_exp = code0 + code_rate * n_samp / 4.0e6;
      carr_exp = carr0 + carr_rate * n_samp / 4.0e6;
      got_code = real'(code_chip) + real'(code_frac) / 4294967296.0;
      check("code phase", got_code, code_exp - 1023.0 * $floor(code_exp / 1023.0), 1e-3);
      begin
        real d;
        d = real'(carr_phase) / 4294967296.0 - (carr_exp - $floor(carr_exp));
        d = d - $floor(d + 0.5);        // circular difference
        check("carrier phase", d, 0.0, 1e-4);
      end
      abs_pos = abs_pos + code_rate * n_samp / 4.0e6;
      check("last pulses", real'(lasts), $floor(abs_pos / 1023.0), 0.1);
      check("epochs", real'(epochs), $floor(abs_pos / 1023.0), 0.1);
      checks++;
      if (last_bad != 0) begin failures++; $display("FAIL last away from the final chip"); end
      // new command from the loop filter
      @(negedge clk); cmd_valid = 1; cmd.f_dll = f(2.0); cmd.f_pll = f(-2500.0);
      @(negedge clk); cmd_valid = 0;
      code_rate = 1.023e6 - 2.0;
      carr_rate = -2500.0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
