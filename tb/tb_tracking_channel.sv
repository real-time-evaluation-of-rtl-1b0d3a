// tb_tracking_channel: closed-loop GPS tracking from a synthetic signal.
//
// The testbench synthesises a GPS L1 C/A signal at zero IF, 4 MHz, 8-bit
// I/Q: PRN 7 from its own code model (G1 xor delayed G2), random 50 bit/s
// data, a carrier with Doppler 1234 Hz and a Doppler rate of 8 Hz/s, and
// the matching code Doppler, plus uniform noise. The channel is started
// with an acquisition-like estimate (code phase rounded down to a chip,
// Doppler 1200 Hz) in scalar mode. From 700 to 900 ms the test checks once
// per 10 ms that the channel is locked, that f_d is within 5 Hz of the
// true Doppler, and that the replica code phase is within 0.1 chip of the
// signal's. At 900 ms it switches to ultra-tight mode with the true Doppler
// rate as xi and checks again from 1.2 to 1.5 s; the navigation decoder must
// reach bit synchronisation. The pull-in is long because the FLL assist
// (Kf = 40) adds to the PLL's proportional path, which with K2 = 355.56
// leaves a slow closed-loop pole near 5.8 1/s.
module tb_tracking_channel;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam real FS     = 4.0e6;
  localparam real FD0    = 1234.0;
  localparam real FDOT   = 8.0;
  localparam real CHIP0  = 100.2;
  localparam real SFR    = 1.023e6 / 1575.42e6;
  localparam real PI     = 3.14159265358979;

  logic        sample_en;
  sample_t     sample;
  logic        enable, start;
  logic [5:0]  prn;
  logic [11:0] init_chip;
  fx_t         init_fd;
  track_mode_e mode;
  lf_gains_t   gains;
  fx_t         fdot;
  logic        ready, locked, epoch, sym_valid, sym_neg, bit_sync, frame_sync;
  logic        word_valid, word_ok, eph_valid;
  corr_t       corr;
  disc_t       disc;
  lf_out_t     lf_out;
  logic [11:0] code_chip;
  logic [31:0] code_frac, epochs;
  logic [29:0] word;
  logic [3:0]  word_idx;

  tracking_channel #(.CONST(CONST_GPS)) dut (
    .clk(clk), .rst_n(rst_n), .sample_en(sample_en), .sample(sample),
    .enable(enable), .start(start), .prn(prn), .init_chip(init_chip), .init_fd(init_fd),
    .code_wr_en(1'b0), .code_wr_addr('0), .code_wr_data('0),
    .mode(mode), .gains(gains), .fdot(fdot),
    .ready(ready), .locked(locked), .epoch(epoch), .corr(corr), .disc(disc), .lf_out(lf_out),
    .code_chip(code_chip), .code_frac(code_frac), .epochs(epochs),
    .sym_valid(sym_valid), .sym_neg(sym_neg), .bit_sync(bit_sync), .frame_sync(frame_sync),
    .word_valid(word_valid), .word(word), .word_idx(word_idx), .word_ok(word_ok),
    .eph_valid(eph_valid)
  );

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit code [1023];

  function automatic int noise(input int span);
    int r;
    r = $urandom_range(2 * span);
    return r - span;
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int clip8(input int v);
    return (v > 127) ? 127 : (v < -127) ? -127 : v;
  endfunction

  initial begin
    bit [10:1] a, b;
    bit g1s [1023], g2s [1023];
    int n_total, bad_lock, bad_fd, bad_code, n_chk;
    real t, ph, chip_true, err, fd_true, fd_est, worst_fd, worst_code;
    real i_r, q_r, amp;
    bit  data;
    int  vi, vq;

    // PRN 7: G2 delay 139
    a = '1; b = '1;
    for (int n = 0; n < 1023; n++) begin
      g1s[n] = a[10]; g2s[n] = b[10];
      a = {a[9:1], a[3] ^ a[10]};
      b = {b[9:1], b[2] ^ b[3] ^ b[6] ^ b[8] ^ b[9] ^ b[10]};
    end
    for (int n = 0; n < 1023; n++) code[n] = g1s[n] ^ g2s[(n - 139 + 1023) % 1023];

    sample_en = 0; sample = '0; enable = 0; start = 0; prn = 7;
    init_chip = 12'(int'($floor(CHIP0))); init_fd = fx_t'(1200) <<< FX_FRAC;
    mode = MODE_STL; gains = GAINS_STL; fdot = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; enable = 1;
    @(negedge clk); start = 0;
    while (!ready) @(negedge clk);

    n_total = 1_500_000 * 4;   // 1.5 s
    amp = 24.0; data = 0;
    bad_lock = 0; bad_fd = 0; bad_code = 0; n_chk = 0; worst_fd = 0; worst_code = 0;
    for (int n = 0; n < n_total; n++) begin
      t = n / FS;
      fd_true = FD0 + FDOT * t;
      chip_true = CHIP0 + 1.023e6 * t + SFR * (FD0 * t + 0.5 * FDOT * t * t);
      // checks every 10 ms: 700-900 ms (scalar) and 1.2-1.5 s (ultra-tight)
      if (((n >= 2_800_000 && n < 3_600_000) || n >= 4_800_000) && n % 40_000 == 0) begin
        n_chk++;
        fd_est = real'(lf_out.f_d) / 16777216.0;
        err = (real'(code_chip) + real'(code_frac) / 4294967296.0) - (chip_true - 1023.0 * $floor(chip_true / 1023.0));
        if (err > 511.5) err -= 1023.0;
        if (err < -511.5) err += 1023.0;
        if (rabs(fd_est - fd_true) > worst_fd) worst_fd = rabs(fd_est - fd_true);
        if (rabs(err) > worst_code) worst_code = rabs(err);
        if (!locked) bad_lock++;
        if (rabs(fd_est - fd_true) > 5.0) bad_fd++;
        if (rabs(err) > 0.1) bad_code++;
      end
      if (n == 3_600_000) begin
        mode = MODE_VTL; gains = GAINS_VTL;
        fdot = fx_t'(longint'(FDOT * 16777216.0));
      end
      if (n % 80_000 == 0) data = 1'($urandom);
      ph = 2.0 * PI * (0.3 + FD0 * t + 0.5 * FDOT * t * t);
      i_r = amp * (code[int'($floor(chip_true)) % 1023] ^ data ? -1.0 : 1.0);
      q_r = i_r * $sin(ph);
      i_r = i_r * $cos(ph);
      vi = clip8(int'(i_r) + noise(40));
      vq = clip8(int'(q_r) + noise(40));
      sample.i = 8'(vi); sample.q = 8'(vq);
      sample_en = 1;
      @(negedge clk);
    end
    sample_en = 0;
    $display("checks at %0d instants: worst |f_d err| %f Hz, worst |code err| %f chip", n_chk, worst_fd, worst_code);
    // three checks per instant
    checks   += 3 * n_chk;
    failures += bad_lock + bad_fd + bad_code;
    if (bad_lock != 0) $display("FAIL not locked at %0d instants", bad_lock);
    if (bad_fd != 0)   $display("FAIL f_d off at %0d instants", bad_fd);
    if (bad_code != 0) $display("FAIL code phase off at %0d instants", bad_code);
    checks++;
    if (!bit_sync) begin failures++; $display("FAIL no bit synchronisation"); end
    checks++;
    if (epochs < 1495 || epochs > 1505) begin failures++; $display("FAIL %0d code periods in 1.5 s", epochs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
