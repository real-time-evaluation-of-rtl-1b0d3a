// tb_acquisition: serial-search acquisition on synthetic GPS and Galileo
// signals, with a reduced search grid.
//
// Samples (4 MHz, 8-bit I/Q, zero IF, with noise) stream every clock; the
// testbench knows the signal's code phase at every sample count, so after
// `done` it checks the reported code phase against the signal's phase at
// the first captured sample (`cap_rx`), within a quarter chip, and the
// Doppler bin against the true Doppler, within half a bin.
//   1. GPS PRN 3, code phase 12.1 chips at sample 0, Doppler 430 Hz;
//      grid 40 half-chip phases x 5 bins of 500 Hz: must be found.
//   2. the same signal searched for PRN 4: must not be found.
//   3. Galileo E1-B with a random 4092-chip code written through the code
//      port and the BOC(1,1) sub-carrier, code phase 5.3 chips when the
//      capture starts, Doppler -110 Hz; grid 16 phases x 3 bins of 125 Hz: must be found.
module tb_acquisition;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam real FS = 4.0e6;
  localparam real PI = 3.14159265358979;
  localparam real SFR = 1.023e6 / 1575.42e6;

  logic        start, gal, sample_en;
  logic [5:0]  prn;
  sample_t     sample;
  logic [63:0] rx_count;
  logic        code_wr_en;
  logic [6:0]  code_wr_addr;
  logic [31:0] code_wr_data;
  logic        busy, done, found, half;
  logic [11:0] chip;
  logic signed [31:0] fd;
  logic [63:0] peak, cap_rx;

  acquisition #(
    .N_DOP_GPS(5), .N_PH_GPS(40), .N_DOP_GAL(3), .N_PH_GAL(16)
  ) dut (.*);

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit gps_code [1023];
  bit gal_code [4092];
  bit sig_gal;
  real sig_chip0, sig_fd;

  function automatic int noise(input int span);
    int r;
    r = $urandom_range(2 * span);
    return r - span;
  endfunction

  function automatic real chip_at(input longint n);
    real t;
    t = real'(n) / FS;
    return sig_chip0 + (1.023e6 + SFR * sig_fd) * t;
  endfunction

  // sample stream: one sample per clock, rx_count counts them
  always @(negedge clk) begin
    real c, ph, v;
    int  idx, len;
    bit  s;
    if (rst_n) begin
      len = sig_gal ? 4092 : 1023;
      c   = chip_at(longint'(rx_count + 1));
      idx = int'($floor(c)) % len;
      s   = sig_gal ? gal_code[idx] ^ ((c - $floor(c)) >= 0.5) : gps_code[idx];
      v   = s ? -20.0 : 20.0;
      ph  = 2.0 * PI * (0.7 + sig_fd * real'(rx_count + 1) / FS);
      sample.i  <= 8'(int'(v * $cos(ph)) + noise(30));
      sample.q  <= 8'(int'(v * $sin(ph)) + noise(30));
      sample_en <= 1'b1;
      rx_count  <= rx_count + 1;
    end
  end

  task automatic run(input bit g, input logic [5:0] p, input bit expect_found,
                     input real dop_step, input string name);
    real c0, err, ph_rep;
    @(negedge clk); start = 1; gal = g; prn = p;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    // sample cap_rx was the first one captured (rx_count when it was taken)
    c0 = chip_at(longint'(cap_rx));
    c0 = c0 - (g ? 4092.0 : 1023.0) * $floor(c0 / (g ? 4092.0 : 1023.0));
    ph_rep = real'(chip) + (half ? 0.5 : 0.0);
    err = ph_rep - c0;
    checks++;
    if (found != expect_found) begin
      failures++; $display("FAIL %s: found=%0d", name, found);
    end
    if (expect_found) begin
      checks++;
      if (err > 0.25 || err < -0.25) begin
        failures++; $display("FAIL %s: code phase %f, signal %f", name, ph_rep, c0);
      end
      checks++;
      if (real'(fd) - sig_fd > dop_step / 2 || sig_fd - real'(fd) > dop_step / 2) begin
        failures++; $display("FAIL %s: Doppler %0d, signal %f", name, fd, sig_fd);
      end
    end
    $display("%s: found %0d chip %0d.%0d fd %0d (signal %f chips, %f Hz)", name, found, chip, half ? 5 : 0, fd, c0, sig_fd);
  endtask

  initial begin
    bit [10:1] a, b;
    bit g1s [1023], g2s [1023];
    logic [31:0] w;
    a = '1; b = '1;
    for (int n = 0; n < 1023; n++) begin
      g1s[n] = a[10]; g2s[n] = b[10];
      a = {a[9:1], a[3] ^ a[10]};
      b = {b[9:1], b[2] ^ b[3] ^ b[6] ^ b[8] ^ b[9] ^ b[10]};
    end
    // PRN 3: G2 delay 7
    for (int n = 0; n < 1023; n++) gps_code[n] = g1s[n] ^ g2s[(n - 7 + 1023) % 1023];
    for (int n = 0; n < 4092; n++) gal_code[n] = 1'($urandom);

    start = 0; gal = 0; prn = 3; sample_en = 0; sample = '0; rx_count = 0;
    code_wr_en = 0; code_wr_addr = 0; code_wr_data = 0;
    sig_gal = 0; sig_chip0 = 12.1; sig_fd = 430.0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    run(0, 6'd3, 1, 500.0, "GPS PRN 3");
    run(0, 6'd4, 0, 500.0, "GPS PRN 4 (absent)");

    // Galileo code into the acquisition code memory
    for (int wd = 0; wd < 128; wd++) begin
      for (int k = 0; k < 32; k++) w[k] = (wd * 32 + k < 4092) ? gal_code[wd * 32 + k] : 1'b0;
      @(negedge clk); code_wr_en = 1; code_wr_addr = 7'(wd); code_wr_data = w;
    end
    @(negedge clk); code_wr_en = 0;
    // code phase 5.3 chips at the sample the capture will start with
    sig_gal = 1; sig_fd = -110.0;
    sig_chip0 = 5.3 - (1.023e6 + SFR * sig_fd) * real'(rx_count + 3) / FS;
    run(1, 6'd1, 1, 125.0, "Galileo");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
