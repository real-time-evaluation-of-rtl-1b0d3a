// tb_mode_controller: checks the scalar / ultra-tight switching rule.
//
// Random lock and ephemeris vectors, navigation-filter state and force bit
// are applied; one clock later the mode must be ultra-tight exactly when at
// least four channels are both locked and have ephemeris, the filter runs
// and scalar mode is not forced; the gains must be the set of that mode and
// `switches` must count the entries into ultra-tight mode.
module tb_mode_controller;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] locked, eph_valid;
  logic nav_ready, force_stl;
  lf_gains_t gains_stl, gains_vtl, gains;
  track_mode_e mode;
  logic [4:0] n_usable;
  logic [15:0] switches;

  mode_controller #(.N_CH(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_sw, cnt;
    bit exp_vtl, prev_vtl;
    locked = 0; eph_valid = 0; nav_ready = 0; force_stl = 0;
    gains_stl = GAINS_STL; gains_vtl = GAINS_VTL;
    exp_sw = 0; prev_vtl = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n % 7 == 0) begin
        // sparse vectors so that the count crosses four often
        locked    = 16'($urandom) & 16'($urandom);
        eph_valid = 16'($urandom) | 16'($urandom);
        nav_ready = ($urandom_range(5) != 0);
        force_stl = ($urandom_range(9) == 0);
      end
      cnt = $countones(locked & eph_valid);
      exp_vtl = nav_ready && !force_stl && cnt >= 4;
      if (exp_vtl && !prev_vtl) exp_sw++;
      prev_vtl = exp_vtl;
      @(negedge clk);
      checks++;
      if ((mode == MODE_VTL) != exp_vtl || gains != (exp_vtl ? gains_vtl : gains_stl) ||
          int'(n_usable) != cnt || int'(switches) != exp_sw) begin
        failures++;
        $display("FAIL n=%0d cnt=%0d mode=%0d exp=%0d sw=%0d/%0d", n, cnt, mode, exp_vtl, switches, exp_sw);
      end
    end
    checks++;
    if (exp_sw < 10) begin failures++; $display("FAIL too few switches exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
