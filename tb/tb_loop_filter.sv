// tb_loop_filter: self-checking test of the UT-ALFA loop filter.
//
// Drives random discriminator outputs, Doppler rates and both modes, and
// compares f_DLL, f_d and f_PLL with a floating-point model of the loop
// filter figure (f_DLL = K1*dtau - SF*f_d, f_PLL = K3*dphi + f_d,
// f_d += T*(K2*dphi + fdot or Kf*dfd)). Also checks the one-clock latency
// of out_valid and the preset through `init`.
module tb_loop_filter;
  import utalfa_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init, update;
  fx_t init_fd, fdot;
  track_mode_e mode;
  lf_gains_t gains;
  disc_t disc;
  lf_out_t out;
  logic out_valid;
  int checks = 0, failures = 0;

  loop_filter dut (.*);

  function automatic int rnd();
    int v;
    v = $urandom_range(2000);
    return v - 1000;
  endfunction

  function automatic real r(input fx_t v); return real'(v) / 16777216.0; endfunction
  function automatic fx_t f(input real v); return fx_t'(longint'(v * 16777216.0)); endfunction

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp) > tol || (exp - got) > tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real fd_model, k1, k2, k3, kf, T, sf;
  initial begin
    init = 0; update = 0; init_fd = '0; fdot = '0; mode = MODE_STL; gains = GAINS_STL; disc = '0;
    T = 0.001; sf = 1.023e6 / 1575.42e6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    init <= 1; init_fd <= f(1234.5);
    @(posedge clk);
    init <= 0;
    fd_model = 1234.5;
    for (int n = 0; n < 400; n++) begin
      mode  = (n < 200) ? MODE_STL : MODE_VTL;
      gains = (n < 200) ? GAINS_STL : GAINS_VTL;
      k1 = r(gains.k1); k2 = r(gains.k2); k3 = r(gains.k3); kf = r(gains.kf);
      disc.dtau = f((rnd()) / 2000.0);     // +-0.5 chip
      disc.dphi = f((rnd()) / 4000.0);     // +-0.25 cycle
      disc.dfd  = f((rnd()) / 20.0);       // +-50 Hz
      fdot      = f((rnd()) / 10.0);       // +-100 Hz/s
      update <= 1;
      @(posedge clk);
      update <= 0;
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid not one clock after update"); end
      check("f_d",   r(out.f_d),   fd_model, 1e-3);
      check("f_pll", r(out.f_pll), k3 * r(disc.dphi) + fd_model, 1e-3);
      check("f_dll", r(out.f_dll), k1 * r(disc.dtau) - sf * fd_model, 1e-3);
      fd_model = fd_model + T * (k2 * r(disc.dphi) + ((mode == MODE_VTL) ? r(fdot) : kf * r(disc.dfd)));
      @(posedge clk);
      #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid longer than one clock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
