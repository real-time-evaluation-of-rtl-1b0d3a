// tb_discriminators: checks the PLL, FLL and DLL discriminators.
//
// Correlator sums are built from chosen phases and amplitudes:
// prompt = A*(cos phi, sin phi) with a random data-bit sign, early and late
// with magnitudes E and L at random phases. Expected outputs, computed with
// real arithmetic: dphi = phi (cycles), dfd = (phi - phi_prev) * 1/T (Hz,
// with the Costas fold to +-0.25 cycle), dtau = 0.5*(L-E)/(L+E) chips.
// `valid` must come within 200 clocks of `dump`.
module tb_discriminators;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic dump, valid;
  corr_t corr;
  disc_t disc;

  discriminators #(.INV_T(1000)) dut (.*);

  localparam real PI2 = 2.0 * 3.14159265358979;
  function automatic real r(input fx_t v); return real'(v) / 16777216.0; endfunction
  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp) > tol || (exp - got) > tol) begin
      failures++;
      $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real phi, phi_prev, a, e, l, pe, pl, sgn, dfe;
    int lat;
    dump = 0; corr = '0; phi_prev = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      phi = (real'($urandom_range(1000)) - 500.0) / 2100.0;     // +-0.238 cycle
      a   = 20000.0 + real'($urandom_range(3000000));
      e   = 1000.0 + real'($urandom_range(1000000));
      l   = 1000.0 + real'($urandom_range(1000000));
      pe  = real'($urandom_range(1000)) / 1000.0;
      pl  = real'($urandom_range(1000)) / 1000.0;
      sgn = ($urandom_range(1) == 1) ? -1.0 : 1.0;
      corr.ip = 32'(longint'(sgn * a * $cos(PI2 * phi)));
      corr.qp = 32'(longint'(sgn * a * $sin(PI2 * phi)));
      corr.ie = 32'(longint'(e * $cos(PI2 * pe)));
      corr.qe = 32'(longint'(e * $sin(PI2 * pe)));
      corr.il = 32'(longint'(l * $cos(PI2 * pl)));
      corr.ql = 32'(longint'(l * $sin(PI2 * pl)));
      @(negedge clk); dump = 1;
      @(negedge clk); dump = 0;
      lat = 1;
      while (!valid && lat < 1000) begin @(negedge clk); lat++; end
      checks++;
      if (lat > 200) begin failures++; $display("FAIL latency %0d", lat); end
      check("dphi", r(disc.dphi), phi, 2e-4);
      dfe = phi - phi_prev;
      dfe = dfe - $floor(dfe * 2.0 + 0.5) / 2.0;                 // Costas fold
      if (n > 0) check("dfd", r(disc.dfd), dfe * 1000.0, 0.5);
      check("dtau", r(disc.dtau), 0.5 * (l - e) / (l + e), 2e-4);
      phi_prev = phi;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
