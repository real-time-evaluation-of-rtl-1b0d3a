// utalfa_receiver: hardware part of the UT-ALFA GPS/Galileo receiver.
//
// The ultra-tight adaptive-loop-filter receiver keeps the tracking loops of
// a scalar receiver and lets the navigation filter steer only their
// bandwidth: the filter's Doppler-rate estimate for each satellite (xi,
// written into FDOT registers by software) enters each channel's loop
// filter in place of the FLL assist, and the PLL runs with a narrow (3 Hz)
// bandwidth. No fast synchronisation between the navigation filter and the
// NCOs is needed, unlike a vector (VDFLL) receiver.
//
// Contents, following the paper's system figure:
//   data_handler     dispatches 8-bit I/Q samples (4 MHz) to acquisition and
//                    tracking, counts samples (T_RX)
//   acquisition      serial-search engine, GPS and Galileo
//   8 GPS + 8 Galileo tracking_channel (correlators, discriminators, NCOs,
//                    signal generator, loop filter, GPS navigation decoder)
//   obs_gen          10 Hz snapshot of tau_NCO and f_d of every channel
//   mode_controller  scalar -> ultra-tight switch (>= 4 satellites with
//                    ephemeris, navigation filter running)
//   reg_bank         processor register interface (map in reg_bank.sv)
// The processor, its navigation filter and management software, the IMU
// and the RF front end are outside: the front end drives `fe_*`, the
// processor drives the register bus. `irq_word` pulses when any channel
// has a new navigation word, `meas_valid` when a new snapshot is ready.
// Differences from the paper's implementation: the loop filters are
// hardware here (software on the processor in the paper), and all
// fixed-point formats are this design's own.
module utalfa_receiver
  import utalfa_pkg::*;
#(
  parameter int unsigned MEAS_PERIOD  = 400_000,
  parameter int          N_PH_GPS     = 2 * GPS_CODE_LEN,
  parameter int          N_PH_GAL     = 2 * GAL_CODE_LEN,
  parameter int          N_DOP_GPS    = 21,
  parameter int          N_DOP_GAL    = 81
) (
  input  logic        clk,
  input  logic        rst_n,
  // front end
  input  logic        fe_valid,
  input  sample_t     fe_sample,
  // processor register bus
  input  logic        bus_wr,
  input  logic        bus_rd,
  input  logic [11:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  // events and status
  output logic        irq_word,
  output logic        meas_valid,
  output track_mode_e mode,
  output logic [N_GPS+N_GAL-1:0] ch_locked
);

  localparam int N_CH = N_GPS + N_GAL;

  // ---------------------------------------------------------------- wiring
  sample_t     sample;
  logic        trk_en, acq_en, acq_busy_dh;
  logic [63:0] rx_count;

  logic        force_stl, nav_ready;
  logic [7:0]  gal_eph;
  logic        acq_start, acq_gal;
  logic [5:0]  acq_prn;
  lf_gains_t   gains_stl, gains_vtl, gains;
  logic        ch_enable [N_CH];
  logic [5:0]  ch_prn    [N_CH];
  logic        ch_start  [N_CH];
  logic [11:0] ch_chip   [N_CH];
  fx_t         ch_fd     [N_CH];
  fx_t         ch_fdot   [N_CH];
  logic [N_GAL:0] code_wr_en;
  logic [6:0]  code_wr_addr;
  logic [31:0] code_wr_data;

  logic        acq_busy, acq_done, acq_found, acq_half;
  logic [11:0] acq_chip;
  logic signed [31:0] acq_fd;
  logic [63:0] acq_cap_rx;

  logic [11:0] code_chip [N_CH];
  logic [31:0] code_frac [N_CH];
  logic [31:0] epochs    [N_CH];
  fx_t         f_d       [N_CH];
  logic [4:0]  ch_status [N_CH];
  logic [30:0] nav_word  [N_CH];
  logic [N_CH-1:0] eph_valid, word_valid;

  logic [63:0] meas_rx;
  logic [11:0] meas_chip  [N_CH];
  logic [31:0] meas_frac  [N_CH];
  logic [31:0] meas_epoch [N_CH];
  fx_t         meas_fd    [N_CH];

  logic [$clog2(N_CH+1)-1:0] n_usable;
  logic [15:0] switches;

  // ---------------------------------------------------------------- blocks
  data_handler #(.ACQ_LEN(FS_HZ / 250)) u_dh (
    .clk(clk), .rst_n(rst_n), .fe_valid(fe_valid), .fe_sample(fe_sample),
    .acq_req(acq_start), .sample(sample), .trk_en(trk_en), .acq_en(acq_en),
    .acq_busy(acq_busy_dh), .rx_count(rx_count)
  );

  acquisition #(
    .N_PH_GPS(N_PH_GPS), .N_PH_GAL(N_PH_GAL),
    .N_DOP_GPS(N_DOP_GPS), .N_DOP_GAL(N_DOP_GAL)
  ) u_acq (
    .clk(clk), .rst_n(rst_n), .start(acq_start), .prn(acq_prn), .gal(acq_gal),
    .sample_en(acq_en), .sample(sample), .rx_count(rx_count),
    .code_wr_en(code_wr_en[N_GAL]), .code_wr_addr(code_wr_addr), .code_wr_data(code_wr_data),
    .busy(acq_busy), .done(acq_done), .found(acq_found), .chip(acq_chip),
    .half(acq_half), .fd(acq_fd), .peak(), .cap_rx(acq_cap_rx)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    localparam constellation_e CST = (c < N_GPS) ? CONST_GPS : CONST_GAL;
    logic        ready, locked, frame_sync, bit_sync, wv, wok, eph;
    logic [29:0] word;
    lf_out_t     lf_out;

    tracking_channel #(.CONST(CST)) u_ch (
      .clk(clk), .rst_n(rst_n), .sample_en(trk_en), .sample(sample),
      .enable(ch_enable[c]), .start(ch_start[c]), .prn(ch_prn[c]),
      .init_chip(ch_chip[c]), .init_fd(ch_fd[c]),
      .code_wr_en((c < N_GPS) ? 1'b0 : code_wr_en[(c < N_GPS) ? 0 : c - N_GPS]),
      .code_wr_addr(code_wr_addr), .code_wr_data(code_wr_data),
      .mode(mode), .gains(gains), .fdot(ch_fdot[c]),
      .ready(ready), .locked(locked), .epoch(), .corr(), .disc(), .lf_out(lf_out),
      .code_chip(code_chip[c]), .code_frac(code_frac[c]), .epochs(epochs[c]),
      .sym_valid(), .sym_neg(), .bit_sync(bit_sync), .frame_sync(frame_sync),
      .word_valid(wv), .word(word), .word_idx(), .word_ok(wok), .eph_valid(eph)
    );

    assign f_d[c]        = lf_out.f_d;
    assign ch_locked[c]  = locked;
    assign eph_valid[c]  = (c < N_GPS) ? eph : gal_eph[(c < N_GPS) ? 0 : c - N_GPS];
    assign word_valid[c] = wv;
    assign ch_status[c]  = {eph_valid[c], frame_sync, bit_sync, locked, ready};

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  nav_word[c] <= '0;
      else if (wv) nav_word[c] <= {wok, word};
    end
  end

  obs_gen #(.N_CH(N_CH), .MEAS_PERIOD(MEAS_PERIOD)) u_og (
    .clk(clk), .rst_n(rst_n), .sample_en(trk_en), .rx_count(rx_count),
    .code_chip(code_chip), .code_frac(code_frac), .epochs(epochs), .f_d(f_d),
    .meas_valid(meas_valid), .meas_rx_count(meas_rx), .meas_chip(meas_chip),
    .meas_frac(meas_frac), .meas_epoch(meas_epoch), .meas_fd(meas_fd)
  );

  mode_controller #(.N_CH(N_CH)) u_mode (
    .clk(clk), .rst_n(rst_n), .locked(ch_locked), .eph_valid(eph_valid),
    .nav_ready(nav_ready), .force_stl(force_stl),
    .gains_stl(gains_stl), .gains_vtl(gains_vtl),
    .mode(mode), .gains(gains), .n_usable(n_usable), .switches(switches)
  );

  reg_bank #(.N_CH(N_CH)) u_regs (
    .clk(clk), .rst_n(rst_n), .wr_en(bus_wr), .rd_en(bus_rd), .addr(bus_addr),
    .wdata(bus_wdata), .rdata(bus_rdata),
    .force_stl(force_stl), .nav_ready(nav_ready), .gal_eph(gal_eph),
    .acq_start(acq_start), .acq_prn(acq_prn), .acq_gal(acq_gal),
    .gains_stl(gains_stl), .gains_vtl(gains_vtl),
    .ch_enable(ch_enable), .ch_prn(ch_prn), .ch_start(ch_start),
    .ch_chip(ch_chip), .ch_fd(ch_fd), .ch_fdot(ch_fdot),
    .code_wr_en(code_wr_en), .code_wr_addr(code_wr_addr), .code_wr_data(code_wr_data),
    .mode_word({switches, 7'd0, 5'(n_usable), 3'd0, mode == MODE_VTL}),
    .acq_done(acq_done), .acq_found(acq_found), .acq_busy(acq_busy || acq_busy_dh),
    .acq_half(acq_half), .acq_chip(acq_chip), .acq_fd(acq_fd),
    .acq_cap_rx(acq_cap_rx[31:0]),
    .meas_rx(meas_rx[31:0]), .ch_status(ch_status),
    .obs_chip(meas_chip), .obs_frac(meas_frac), .obs_fd(meas_fd),
    .obs_epoch(meas_epoch), .nav_word(nav_word)
  );

  assign irq_word = |word_valid;

endmodule
