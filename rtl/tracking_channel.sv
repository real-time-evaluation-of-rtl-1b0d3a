// tracking_channel: one UT-ALFA tracking channel (GPS L1 C/A or Galileo E1-B).
//
// Closed code and carrier loop: signal generator -> correlators ->
// discriminators -> loop filter -> code & carrier NCOs -> signal generator,
// as in the paper's one-channel architecture figure. The loop filter takes
// the Doppler rate `fdot` (xi, from the navigation filter) in ultra-tight
// mode and its own FLL assist in scalar mode; its f_d, together with the
// NCO code phase tau_NCO, goes to the observation generator.
//
// Start-up: `start` (with `prn`, `init_chip`, `init_fd`, the acquisition
// result) presets the NCOs and the loop filter and (GPS) refills the code
// memory, which takes CODE_LEN clocks. The NCOs count every sample while
// `enable` is high, from `start` on; samples are correlated once the code
// is `ready`. Galileo codes are written beforehand
// through `code_wr_*` (see signal_generator). Each integration period ends
// at the code epoch: dump, ~110 clocks of discriminators, one clock of loop
// filter, then the NCOs take the new frequencies, well before the next
// sample at the 4 MHz sample rate (samples may come every clock in
// simulation; the command then lands a few samples into the next period).
//
// GPS channels decode the navigation message (nav_decoder_gps); Galileo
// channels expose the prompt sign per 4 ms symbol and leave decoding to
// software. `locked` is a phase-lock indicator (|Ip| > 2|Qp| counted up and
// down, threshold 16): the paper does not describe one, this is the
// design's own. In the paper the loop filter runs as software on the
// processor; here it is a hardware block in each channel.
module tracking_channel
  import utalfa_pkg::*;
#(
  parameter constellation_e CONST = CONST_GPS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sample_en,
  input  sample_t     sample,
  // control
  input  logic        enable,
  input  logic        start,
  input  logic [5:0]  prn,
  input  logic [11:0] init_chip,
  input  fx_t         init_fd,
  input  logic        code_wr_en,
  input  logic [6:0]  code_wr_addr,
  input  logic [31:0] code_wr_data,
  input  track_mode_e mode,
  input  lf_gains_t   gains,
  input  fx_t         fdot,
  // status and observations
  output logic        ready,
  output logic        locked,
  output logic        epoch,          // integration period ended (dump)
  output corr_t       corr,
  output disc_t       disc,
  output lf_out_t     lf_out,
  output logic [11:0] code_chip,
  output logic [31:0] code_frac,
  output logic [31:0] epochs,
  output logic        sym_valid,      // prompt sign per integration
  output logic        sym_neg,
  output logic        bit_sync,
  output logic        frame_sync,
  output logic        word_valid,
  output logic [29:0] word,
  output logic [3:0]  word_idx,
  output logic        word_ok,
  output logic        eph_valid
);

  localparam int  CODE_LEN  = (CONST == CONST_GPS) ? GPS_CODE_LEN : GAL_CODE_LEN;
  localparam int  CW        = $clog2(CODE_LEN);
  localparam int  INV_T     = (CONST == CONST_GPS) ? 1000 : 250;
  localparam fx_t T_INT     = (CONST == CONST_GPS) ? fx_t'(16777) : fx_t'(67109);
  localparam logic [31:0] EL_HALF = (CONST == CONST_GPS) ? 32'h8000_0000 : 32'h2000_0000;
  // chips per unit of (L-E)/(L+E): 0.5 for +-0.5 chip C/A, 1/4.8 for
  // +-0.125 chip BOC(1,1) (slope of the BOC(1,1) correlation, 1-3|tau|)
  localparam fx_t DLL_SCALE = (CONST == CONST_GPS) ? fx_t'(1 <<< 23) : fx_t'(3495253);

  logic          run;
  logic [CW-1:0] chip_w;
  logic [31:0]   carr_phase;
  logic          last;
  logic          rep_e, rep_p, rep_l;
  logic signed [2:0] cos_rep, sin_rep;
  logic          disc_valid;
  logic          lf_valid;

  // the NCOs advance on every enabled sample from `start` on, so that the
  // code phase handed over by software stays tied to the sample count while
  // the code memory fills; correlation waits for `ready`
  assign run = sample_en && enable && ready;

  nco #(.CODE_LEN(CODE_LEN)) u_nco (
    .clk        (clk),
    .rst_n      (rst_n),
    .sample_en  (sample_en && enable),
    .load       (start),
    .load_chip  (CW'(init_chip)),
    .load_frac  ('0),
    .load_fd    (init_fd),
    .cmd_valid  (lf_valid),
    .cmd        (lf_out),
    .code_chip  (chip_w),
    .code_frac  (code_frac),
    .carr_phase (carr_phase),
    .code_inc   (),
    .carr_inc   (),
    .last       (last),
    .epochs     (epochs)
  );
  assign code_chip = 12'(chip_w);

  signal_generator #(.CONST(CONST), .CODE_LEN(CODE_LEN), .EL_HALF(EL_HALF)) u_gen (
    .clk        (clk),
    .rst_n      (rst_n),
    .prn_load   (start),
    .prn        (prn),
    .wr_en      (code_wr_en),
    .wr_addr    (code_wr_addr),
    .wr_data    (code_wr_data),
    .ready      (ready),
    .code_chip  (chip_w),
    .code_frac  (code_frac),
    .carr_phase (carr_phase),
    .rep_e      (rep_e),
    .rep_p      (rep_p),
    .rep_l      (rep_l),
    .cos_rep    (cos_rep),
    .sin_rep    (sin_rep)
  );

  correlators u_corr (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (start),
    .sample_en (run),
    .sample    (sample),
    .last      (last && ready),
    .rep_e     (rep_e),
    .rep_p     (rep_p),
    .rep_l     (rep_l),
    .cos_rep   (cos_rep),
    .sin_rep   (sin_rep),
    .corr      (corr),
    .dump      (epoch)
  );

  discriminators #(.INV_T(INV_T), .DLL_SCALE(DLL_SCALE)) u_disc (
    .clk   (clk),
    .rst_n (rst_n),
    .dump  (epoch),
    .corr  (corr),
    .disc  (disc),
    .valid (disc_valid)
  );

  loop_filter #(.T_INT(T_INT)) u_lf (
    .clk       (clk),
    .rst_n     (rst_n),
    .init      (start),
    .init_fd   (init_fd),
    .update    (disc_valid),
    .mode      (mode),
    .gains     (gains),
    .disc      (disc),
    .fdot      (fdot),
    .out       (lf_out),
    .out_valid (lf_valid)
  );

  // ---------------------------------------------------------------- lock
  logic [5:0]         lock_cnt;
  logic signed [31:0] abs_i, abs_q;
  assign abs_i = (corr.ip < 0) ? -corr.ip : corr.ip;
  assign abs_q = (corr.qp < 0) ? -corr.qp : corr.qp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_cnt  <= '0;
      locked    <= 1'b0;
      sym_valid <= 1'b0;
      sym_neg   <= 1'b0;
    end else if (start) begin
      lock_cnt  <= '0;
      locked    <= 1'b0;
      sym_valid <= 1'b0;
    end else begin
      sym_valid <= epoch;
      if (epoch) begin
        sym_neg <= corr.ip < 0;
        if (abs_i > (abs_q <<< 1)) begin
          if (lock_cnt != '1) lock_cnt <= lock_cnt + 1'b1;
        end else if (lock_cnt != '0) begin
          lock_cnt <= lock_cnt - 1'b1;
        end
      end
      locked <= (lock_cnt >= 6'd16);
    end
  end

  // ---------------------------------------------------------------- nav data
  if (CONST == CONST_GPS) begin : g_nav
    nav_decoder_gps u_nav (
      .clk         (clk),
      .rst_n       (rst_n),
      .clear       (start),
      .ms_valid    (sym_valid),
      .ip_neg      (sym_neg),
      .bit_sync    (bit_sync),
      .bit_valid   (),
      .bit_val     (),
      .frame_sync  (frame_sync),
      .word_valid  (word_valid),
      .word        (word),
      .word_idx    (word_idx),
      .word_ok     (word_ok),
      .subframe_id (),
      .eph_valid   (eph_valid)
    );
  end else begin : g_no_nav
    assign bit_sync   = 1'b0;
    assign frame_sync = 1'b0;
    assign word_valid = 1'b0;
    assign word       = '0;
    assign word_idx   = '0;
    assign word_ok    = 1'b0;
    assign eph_valid  = 1'b0;
  end

endmodule
