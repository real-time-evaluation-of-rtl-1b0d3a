// tb_utalfa_receiver: end-to-end test of the receiver hardware.
//
// The testbench plays both the RF front end and the processor software.
// Front end: a synthetic 4 MHz, 8-bit I/Q zero-IF signal with two GPS
// satellites (PRN 5 and 9) and four Galileo E1-B satellites (random
// 4092-chip codes with the BOC(1,1) sub-carrier), each with its own code
// phase and Doppler, random data, plus noise. PRN 9 carries alternating
// bits and then one subframe with a real TLM/HOW (preamble and parity).
// Software, over the register bus:
//   - acquires PRN 5 (reduced grid), reads ACQ_RES/ACQ_CAP/ACQ_FD and hands
//     the result to channel 0, projecting the code phase to the start time;
//   - starts channel 1 (PRN 9) and channels 8-11 (Galileo, after writing
//     their codes) with the known code phases and Dopplers;
//   - declares Galileo ephemeris for channels 8-11 and the navigation
//     filter running, so the mode switches to ultra-tight once those four
//     are locked; later forces scalar mode and releases it again;
//   - on every 10 ms snapshot checks T_RX, tau_NCO and f_d of locked
//     channels against the true signal (0.3 chip, 5 Hz).
// Every mechanism is counted and the test fails if any never happened:
// acquisition, channel starts, Galileo code loads, locks, navigation word
// interrupts with a parity-correct TLM, snapshots, switches to ultra-tight
// and back, status reads.
module tb_utalfa_receiver;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam real FS  = 4.0e6;
  localparam real PI  = 3.14159265358979;
  localparam real SFR = 1.023e6 / 1575.42e6;
  localparam int  NS  = 6;                       // satellites
  localparam int  MEAS = 40_000;                 // snapshot period, samples

  logic        fe_valid;
  sample_t     fe_sample;
  logic        bus_wr, bus_rd;
  logic [11:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic        irq_word, meas_valid;
  track_mode_e mode;
  logic [15:0] ch_locked;

  utalfa_receiver #(
    .MEAS_PERIOD(MEAS), .N_PH_GPS(80), .N_DOP_GPS(5), .N_PH_GAL(16), .N_DOP_GAL(3)
  ) dut (.*);

  // ------------------------------------------------------------ satellites
  bit  is_gal [NS] = '{0, 0, 1, 1, 1, 1};
  int  sat_prn [NS] = '{5, 9, 0, 0, 0, 0};
  int  sat_ch [NS] = '{0, 1, 8, 9, 10, 11};
  real sat_fd [NS] = '{520.0, -1500.0, 800.0, -300.0, 2100.0, -2600.0};
  real sat_c0 [NS] = '{30.4, 700.0, 100.2, 1500.7, 3000.1, 50.5};
  real sat_ph [NS] = '{0.1, 0.5, 0.9, 0.3, 0.6, 0.2};
  bit  gps_code [2][1023];
  bit  gal_code [4][4092];
  bit  nav9 [600];                 // PRN 9 data bits
  bit  sym [NS];

  function automatic real rate(input int s);
    return 1.023e6 + SFR * sat_fd[s];
  endfunction
  function automatic real chip_at(input int s, input longint n);
    return sat_c0[s] + rate(s) * real'(n) / FS;
  endfunction
  function automatic real wrap(input real c, input real len);
    return c - len * $floor(c / len);
  endfunction
  function automatic int noise(input int span);
    int r;
    r = $urandom_range(2 * span);
    return r - span;
  endfunction
  function automatic int clip8(input int v);
    return (v > 127) ? 127 : (v < -127) ? -127 : v;
  endfunction

  // sample stream: sample index ns is driven shortly after each rising edge
  longint ns = 0;
  always @(posedge clk) begin
    real si, sq, c, f, ph, a;
    int  len, idx;
    bit  s;
    #2;
    if (rst_n) begin
      si = 0.0; sq = 0.0;
      for (int k = 0; k < NS; k++) begin
        len = is_gal[k] ? 4092 : 1023;
        c = chip_at(k, ns);
        idx = int'($floor(c)) % len;
        f = c - $floor(c);
        if (is_gal[k]) begin
          // one symbol per 4 ms code period
          if (idx == 0 && f < rate(k) / FS) sym[k] = 1'($urandom);
          s = gal_code[k - 2][idx] ^ (f >= 0.5) ^ sym[k];
        end else if (k == 1) begin
          s = gps_code[1][idx] ^ nav9[int'($floor(c / 20460.0)) % 600];
        end else begin
          if (idx == 0 && f < rate(k) / FS && (int'($floor(c / 1023.0)) % 20) == 0) sym[k] = 1'($urandom);
          s = gps_code[0][idx] ^ sym[k];
        end
        a  = s ? -16.0 : 16.0;
        ph = 2.0 * PI * (sat_ph[k] + sat_fd[k] * real'(ns) / FS);
        si += a * $cos(ph);
        sq += a * $sin(ph);
      end
      fe_sample.i <= 8'(clip8(int'(si) + noise(30)));
      fe_sample.q <= 8'(clip8(int'(sq) + noise(30)));
      fe_valid    <= 1'b1;
      ns++;
    end
  end

  // ------------------------------------------------------------ bus
  // two processes use the bus (main sequence and snapshot reader)
  bit bus_lock = 0;
  task automatic grab();
    @(negedge clk);
    while (bus_lock) @(negedge clk);
    bus_lock = 1;
  endtask
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    grab(); bus_wr = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_wr = 0; bus_lock = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    grab(); bus_rd = 1; bus_addr = a;
    @(negedge clk); bus_rd = 0; d = bus_rdata; bus_lock = 0;
  endtask

  // ------------------------------------------------------------ counters
  int n_acq = 0, n_start = 0, n_codes = 0, n_lock = 0, n_irq = 0, n_tlm = 0;
  int n_meas = 0, n_vtl = 0, n_stl = 0, n_status = 0;
  logic [15:0] locked_q = 0;
  track_mode_e mode_q = MODE_STL;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < 16; c++) if (ch_locked[c] && !locked_q[c]) n_lock++;
      for (int c = 0; c < 16; c++) if (ch_locked[c] != locked_q[c]) $display("%0d: channel %0d lock %0d", ns, c, ch_locked[c]);
      locked_q <= ch_locked;
      if (mode == MODE_VTL && mode_q == MODE_STL) n_vtl++;
      if (mode == MODE_STL && mode_q == MODE_VTL) n_stl++;
      mode_q <= mode;
      if (irq_word) n_irq++;
    end
  end

  // start channel `ch` on satellite s at a sample where the code phase is
  // within 1/8 chip of a whole chip; `cap`/`c_acq`/`fd_acq` give the
  // software's estimate (from acquisition) when from_acq is set
  task automatic start_channel(input int s, input bit from_acq, input longint cap,
                               input real c_acq, input real fd_acq);
    real c, len, fd;
    int  ch;
    ch  = sat_ch[s];
    len = is_gal[s] ? 4092.0 : 1023.0;
    fd  = from_acq ? fd_acq : sat_fd[s];
    wr(12'h030 + 12'(ch), 32'(longint'(fd * 65536.0)));
    forever begin
      grab();
      // INIT_CHIP is written now and CH_CFG at the next falling edge; the
      // loaded phase then applies to the sample labelled ns + 2 (T_RX)
      if (from_acq) c = c_acq + (1.023e6 + SFR * fd) * real'(ns + 2 - cap) / FS;
      else          c = chip_at(s, ns + 1);
      c = wrap(c, len);
      if (c - $floor(c) < 0.125 || c - $floor(c) > 0.875) break;
      bus_lock = 0;
    end
    bus_wr = 1; bus_addr = 12'h020 + 12'(ch); bus_wdata = 32'(int'(wrap($floor(c + 0.5), len)));
    @(negedge clk); bus_addr = 12'h010 + 12'(ch); bus_wdata = {1'b1, 24'd0, 6'(sat_prn[s]), 1'b1};
    @(negedge clk); bus_wr = 0; bus_lock = 0;
    n_start++;
  endtask

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // snapshot checks
  int meas_bad = 0;
  initial begin
    logic [31:0] d, mrx;
    real c, f, err;
    forever begin
      @(posedge clk);
      if (meas_valid) begin
        n_meas++;
        // read like the processor would, a few clocks later
        rd(12'h007, mrx);
        for (int s = 0; s < NS; s++) begin
          if (ch_locked[sat_ch[s]]) begin
            rd(12'h410 + 12'(sat_ch[s]), d);
            c = real'(d[31:20]) + real'(d[19:0]) / 1048576.0;
            // the snapshot holds the phase of the sample with index T_RX - 1
            err = c - wrap(chip_at(s, longint'(mrx) - 1), is_gal[s] ? 4092.0 : 1023.0);
            if (err > 100.0) err -= (is_gal[s] ? 4092.0 : 1023.0);
            if (err < -100.0) err += (is_gal[s] ? 4092.0 : 1023.0);
            rd(12'h420 + 12'(sat_ch[s]), d);
            f = real'(signed'(d)) / 65536.0;
            if (n_meas <= 3 || (n_meas % 20) == 0) $display("snapshot %0d sat %0d: code error %f f_d %f", n_meas, s, err, f - sat_fd[s]);
            checks += 2;
            if (err > 0.3 || err < -0.3) begin
              failures++; meas_bad++;
              if (meas_bad < 10) $display("FAIL snapshot %0d sat %0d: code error %f chip", n_meas, s, err);
            end
            if (f - sat_fd[s] > 5.0 || sat_fd[s] - f > 5.0) begin
              failures++; meas_bad++;
              if (meas_bad < 10) $display("FAIL snapshot %0d sat %0d: f_d %f Hz, true %f", n_meas, s, f, sat_fd[s]);
            end
          end
        end
      end
    end
  end

  initial begin
    bit [10:1] a, b;
    bit g1s [1023], g2s [1023];
    int delay [2] = '{17, 141};
    logic [31:0] d, w;
    longint cap;
    real c_acq, fd_acq;
    bit d29s, d30s;
    int nb;

    // --- codes
    a = '1; b = '1;
    for (int n = 0; n < 1023; n++) begin
      g1s[n] = a[10]; g2s[n] = b[10];
      a = {a[9:1], a[3] ^ a[10]};
      b = {b[9:1], b[2] ^ b[3] ^ b[6] ^ b[8] ^ b[9] ^ b[10]};
    end
    for (int p = 0; p < 2; p++)
      for (int n = 0; n < 1023; n++) gps_code[p][n] = g1s[n] ^ g2s[(n - delay[p] + 1023) % 1023];
    for (int g = 0; g < 4; g++)
      for (int n = 0; n < 4092; n++) gal_code[g][n] = 1'($urandom);
    for (int k = 0; k < NS; k++) sym[k] = 0;

    // --- PRN 9 data: 22 alternating bits, one subframe (ID 1), then random
    for (int i = 0; i < 600; i++) nav9[i] = 1'($urandom);
    for (int i = 0; i < 22; i++) nav9[i] = i[0];
    d29s = nav9[20]; d30s = nav9[21]; nb = 22;   // parity continues from the bits sent before
    for (int wd = 0; wd < 10; wd++) begin
      bit dd [25];
      bit D [31];
      bit [7:0] pre;
      int cov [6][15] = '{
        '{1, 2, 3, 5, 6, 10, 11, 12, 13, 14, 17, 18, 20, 23, 0},
        '{2, 3, 4, 6, 7, 11, 12, 13, 14, 15, 18, 19, 21, 24, 0},
        '{1, 3, 4, 5, 7, 8, 12, 13, 14, 15, 16, 19, 20, 22, 0},
        '{2, 4, 5, 6, 8, 9, 13, 14, 15, 16, 17, 20, 21, 23, 0},
        '{1, 3, 5, 6, 7, 9, 10, 14, 15, 16, 17, 18, 21, 22, 24},
        '{3, 5, 6, 8, 9, 10, 11, 13, 15, 19, 22, 23, 24, 0, 0}};
      bit use29 [6] = '{1, 0, 1, 0, 0, 1};
      pre = 8'b1000_1011;
      for (int i = 1; i <= 24; i++) dd[i] = 1'($urandom);
      if (wd == 0) for (int i = 1; i <= 8; i++) dd[i] = pre[8 - i];
      if (wd == 1) begin dd[20] = 0; dd[21] = 0; dd[22] = 1; end
      for (int i = 1; i <= 24; i++) D[i] = dd[i] ^ d30s;
      for (int j = 0; j < 6; j++) begin
        bit p;
        p = use29[j] ? d29s : d30s;
        for (int t = 0; t < 15; t++) if (cov[j][t] != 0) p ^= dd[cov[j][t]];
        D[25 + j] = p;
      end
      for (int i = 1; i <= 30; i++) nav9[nb++] = D[i];
      d29s = D[29]; d30s = D[30];
    end

    fe_valid = 0; fe_sample = '0; bus_wr = 0; bus_rd = 0; bus_addr = 0; bus_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);

    // --- software: mode control and Galileo ephemeris flags
    wr(12'h001, 32'h0000_000F);       // Galileo channels 8..11 have ephemeris
    wr(12'h000, 32'h0000_0002);       // navigation filter running

    // --- Galileo codes and channel starts
    for (int g = 0; g < 4; g++) begin
      wr(12'h003, 32'(g));
      for (int wd = 0; wd < 128; wd++) begin
        for (int k = 0; k < 32; k++) w[k] = (wd * 32 + k < 4092) ? gal_code[g][wd * 32 + k] : 1'b0;
        wr(12'h080 + 12'(wd), w);
      end
      n_codes++;
    end
    start_channel(1, 0, 0, 0.0, 0.0);
    for (int s = 2; s < NS; s++) start_channel(s, 0, 0, 0.0, 0.0);

    // --- acquisition of PRN 5; its code phase is 20.3 chips at about the
    // sample the capture starts with, inside the reduced search window
    sat_c0[0] = 20.3 - rate(0) * real'(ns + 3) / FS;
    wr(12'h002, 32'd5);
    do begin
      repeat (1000) @(negedge clk);
      rd(12'h005, d);
    end while (!d[31]);
    checks++;
    if (!d[30]) begin failures++; $display("FAIL PRN 5 not found"); end
    else n_acq++;
    c_acq = real'(d[11:0]) + (d[12] ? 0.5 : 0.0);
    rd(12'h050, w); cap = longint'(w);
    rd(12'h006, w); fd_acq = real'(signed'(w));
    $display("acquisition: chip %f fd %f cap %0d (true chip %f)", c_acq, fd_acq, cap,
             wrap(chip_at(0, cap - 1), 1023.0));
    start_channel(0, 1, cap, c_acq, fd_acq);

    // --- run; force scalar mode for a while once ultra-tight was reached
    while (n_vtl == 0 && ns < 3_200_000) @(negedge clk);
    repeat (200_000) @(negedge clk);
    wr(12'h000, 32'h0000_0003);
    repeat (100_000) @(negedge clk);
    wr(12'h000, 32'h0000_0002);
    while (ns < 4_600_000) @(negedge clk);

    // --- status and navigation word
    for (int c = 0; c < 16; c++) begin
      rd(12'h400 + 12'(c), d);
      n_status++;
      checks++;
      if (d[1] != ch_locked[c]) begin failures++; $display("FAIL STATUS %0d lock bit: %b %b", c, d[4:0], ch_locked); end
    end
    rd(12'h401, d);
    checks++;
    if (!d[3]) begin failures++; $display("FAIL channel 1 not in frame sync"); end
    rd(12'h441, d);
    if (d[30] && d[29:22] == 8'b1000_1011) n_tlm++;
    rd(12'h004, d);
    checks++;
    if (int'(d[31:16]) != n_vtl) begin failures++; $display("FAIL MODE switches %0d, seen %0d", d[31:16], n_vtl); end

    // --- every mechanism must have happened
    $display("acq %0d starts %0d codes %0d locks %0d irq %0d tlm %0d meas %0d vtl %0d stl %0d status %0d",
             n_acq, n_start, n_codes, n_lock, n_irq, n_tlm, n_meas, n_vtl, n_stl, n_status);
    checks += 10;
    if (n_acq   < 1) begin failures++; $display("FAIL no acquisition"); end
    if (n_start < 6) begin failures++; $display("FAIL channel starts"); end
    if (n_codes < 4) begin failures++; $display("FAIL Galileo code loads"); end
    if (n_lock  < 6) begin failures++; $display("FAIL only %0d locks", n_lock); end
    if (n_irq   < 1) begin failures++; $display("FAIL no navigation word"); end
    if (n_tlm   < 1) begin failures++; $display("FAIL no TLM word read"); end
    if (n_meas  < 10) begin failures++; $display("FAIL too few snapshots"); end
    if (n_vtl   < 2) begin failures++; $display("FAIL ultra-tight mode entered %0d times", n_vtl); end
    if (n_stl   < 1) begin failures++; $display("FAIL no return to scalar mode"); end
    if (n_status < 16) begin failures++; $display("FAIL status reads"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
