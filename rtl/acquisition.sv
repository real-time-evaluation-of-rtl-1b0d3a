// acquisition: serial-search acquisition engine for GPS L1 C/A and Galileo E1-B.
//
// On `start` (with `prn`, `gal`) it captures one code period of samples
// (4000 for GPS, 16000 for Galileo at 4 MHz) from the data handler into a
// sample buffer, then searches the two-dimensional grid of Doppler bins and
// code phases (half-chip steps) one cell at a time: for each cell the NCO is
// preset to the cell's code phase and Doppler, the buffer is replayed
// through the signal generator and correlator (prompt only), and the power
// Ip^2 + Qp^2 is compared with the largest so far. At the end `done` rises
// with the best cell (`chip`, `half`, `fd`, Hz) and `found` when the peak
// exceeds TH_RATIO times the mean power of all cells. The code phase is the
// replica phase that matched the first captured sample; `cap_rx` is the
// receiver sample count of that sample, for the hand-over to tracking.
// One cell takes LEN + ~4 clocks, so a full GPS search (21 x 2046 cells)
// takes about 172 M clocks. The paper states only that acquisition (GPS and
// Galileo) is implemented in hardware; the serial search, the grid, the
// threshold test and the Galileo code memory (written through `code_wr_*`,
// as in a tracking channel) are this design's own choices.
module acquisition
  import utalfa_pkg::*;
#(
  parameter int N_DOP_GPS    = 21,
  parameter int DOP_STEP_GPS = 500,
  parameter int N_DOP_GAL    = 81,
  parameter int DOP_STEP_GAL = 125,
  parameter int N_PH_GPS     = 2 * GPS_CODE_LEN,
  parameter int N_PH_GAL     = 2 * GAL_CODE_LEN,
  parameter int TH_RATIO     = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [5:0]  prn,
  input  logic        gal,
  input  logic        sample_en,
  input  sample_t     sample,
  input  logic [63:0] rx_count,
  input  logic        code_wr_en,
  input  logic [6:0]  code_wr_addr,
  input  logic [31:0] code_wr_data,
  output logic        busy,
  output logic        done,
  output logic        found,
  output logic [11:0] chip,
  output logic        half,
  output logic signed [31:0] fd,
  output logic [63:0] peak,
  output logic [63:0] cap_rx
);

  localparam int BUF_LEN = FS_HZ / 250;          // 4 ms, one E1-B code period
  localparam int BW      = $clog2(BUF_LEN);

  typedef enum logic [2:0] {A_IDLE, A_LOAD, A_CAPTURE, A_CELL, A_RUN, A_WAIT, A_DONE} state_e;
  state_e state;

  sample_t        buffer [BUF_LEN];
  sample_t        buf_q;
  logic [BW-1:0]  idx;
  logic [BW-1:0]  len_m1;
  logic           is_gal;
  logic [13:0]    ph;
  logic [6:0]     dop;
  logic           rd_v, rd_last;
  logic [63:0]    sum_pow;

  // ---------------------------------------------------------------- replica
  logic        nco_load;
  logic [11:0] ph_chip;
  logic [31:0] ph_frac;
  fx_t         cell_fd;
  logic        gps_ready, gal_ready;
  logic        gps_e, gps_p, gps_l, gal_e, gal_p, gal_l;
  logic signed [2:0] gps_cos, gps_sin, gal_cos, gal_sin;
  logic [9:0]  gps_chip;
  logic [11:0] gal_chip;
  logic [31:0] gps_frac, gal_frac, gps_carr, gal_carr;
  corr_t       corr;
  logic        dump;
  logic        load_gen;

  assign ph_chip = 12'(ph >> 1);
  assign ph_frac = ph[0] ? 32'h8000_0000 : 32'h0;

  nco #(.CODE_LEN(GPS_CODE_LEN)) u_nco_gps (
    .clk(clk), .rst_n(rst_n), .sample_en(rd_v && !is_gal), .load(nco_load),
    .load_chip(10'(ph_chip)), .load_frac(ph_frac), .load_fd(cell_fd),
    .cmd_valid(1'b0), .cmd('0), .code_chip(gps_chip), .code_frac(gps_frac),
    .carr_phase(gps_carr), .code_inc(), .carr_inc(), .last(), .epochs()
  );
  nco #(.CODE_LEN(GAL_CODE_LEN)) u_nco_gal (
    .clk(clk), .rst_n(rst_n), .sample_en(rd_v && is_gal), .load(nco_load),
    .load_chip(ph_chip), .load_frac(ph_frac), .load_fd(cell_fd),
    .cmd_valid(1'b0), .cmd('0), .code_chip(gal_chip), .code_frac(gal_frac),
    .carr_phase(gal_carr), .code_inc(), .carr_inc(), .last(), .epochs()
  );
  signal_generator #(.CONST(CONST_GPS), .CODE_LEN(GPS_CODE_LEN)) u_gen_gps (
    .clk(clk), .rst_n(rst_n), .prn_load(load_gen), .prn(prn),
    .wr_en(1'b0), .wr_addr('0), .wr_data('0), .ready(gps_ready),
    .code_chip(gps_chip), .code_frac(gps_frac), .carr_phase(gps_carr),
    .rep_e(gps_e), .rep_p(gps_p), .rep_l(gps_l), .cos_rep(gps_cos), .sin_rep(gps_sin)
  );
  signal_generator #(.CONST(CONST_GAL), .CODE_LEN(GAL_CODE_LEN)) u_gen_gal (
    .clk(clk), .rst_n(rst_n), .prn_load(load_gen), .prn(prn),
    .wr_en(code_wr_en), .wr_addr(code_wr_addr), .wr_data(code_wr_data), .ready(gal_ready),
    .code_chip(gal_chip), .code_frac(gal_frac), .carr_phase(gal_carr),
    .rep_e(gal_e), .rep_p(gal_p), .rep_l(gal_l), .cos_rep(gal_cos), .sin_rep(gal_sin)
  );

  correlators u_corr (
    .clk(clk), .rst_n(rst_n), .clear(nco_load), .sample_en(rd_v), .sample(buf_q),
    .last(rd_last),
    .rep_e(is_gal ? gal_e : gps_e), .rep_p(is_gal ? gal_p : gps_p),
    .rep_l(is_gal ? gal_l : gps_l),
    .cos_rep(is_gal ? gal_cos : gps_cos), .sin_rep(is_gal ? gal_sin : gps_sin),
    .corr(corr), .dump(dump)
  );

  // ---------------------------------------------------------------- search
  logic [63:0] pow;
  logic [31:0] n_cells;
  logic [6:0]  n_dop_m1;
  logic [13:0] n_ph_m1;
  int          step;
  assign pow      = 64'(corr.ip * corr.ip) + 64'(corr.qp * corr.qp);
  assign n_dop_m1 = is_gal ? 7'(N_DOP_GAL - 1) : 7'(N_DOP_GPS - 1);
  assign n_ph_m1  = is_gal ? 14'(N_PH_GAL - 1) : 14'(N_PH_GPS - 1);
  assign n_cells  = is_gal ? 32'(N_DOP_GAL * N_PH_GAL) : 32'(N_DOP_GPS * N_PH_GPS);
  assign step     = is_gal ? DOP_STEP_GAL : DOP_STEP_GPS;
  int          cell_hz;
  always_comb begin
    cell_hz = (int'(dop) - int'(n_dop_m1) / 2) * step;
    cell_fd = fx_t'(cell_hz) <<< FX_FRAC;
  end

  always_ff @(posedge clk) begin
    if (state == A_CAPTURE && sample_en) buffer[idx] <= sample;
    buf_q <= buffer[idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE; idx <= '0; len_m1 <= '0; is_gal <= 1'b0; ph <= '0; dop <= '0;
      rd_v <= 1'b0; rd_last <= 1'b0; sum_pow <= '0; nco_load <= 1'b0; load_gen <= 1'b0;
      busy <= 1'b0; done <= 1'b0; found <= 1'b0; chip <= '0; half <= 1'b0; fd <= '0;
      peak <= '0; cap_rx <= '0;
    end else begin
      nco_load <= 1'b0;
      load_gen <= 1'b0;
      rd_v     <= 1'b0;
      rd_last  <= 1'b0;
      unique case (state)
        A_IDLE: if (start) begin
          is_gal   <= gal;
          len_m1   <= gal ? BW'(BUF_LEN - 1) : BW'(BUF_LEN / 4 - 1);
          load_gen <= 1'b1;
          busy     <= 1'b1;
          done     <= 1'b0;
          found    <= 1'b0;
          idx      <= '0;
          state    <= A_LOAD;
        end
        A_LOAD: state <= A_CAPTURE;        // code fill starts
        A_CAPTURE: if (sample_en) begin
          if (idx == '0) cap_rx <= rx_count;
          if (idx == len_m1) begin
            idx   <= '0;
            ph    <= '0;
            dop   <= '0;
            peak  <= '0;
            sum_pow <= '0;
            state <= A_CELL;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        A_CELL: if (is_gal ? gal_ready : gps_ready) begin
          nco_load <= 1'b1;
          idx      <= '0;
          state    <= A_RUN;
        end
        A_RUN: begin
          // buffer read is registered: sample idx meets the replica one
          // clock later, when rd_v is high
          rd_v    <= 1'b1;
          rd_last <= (idx == len_m1);
          if (idx == len_m1) state <= A_WAIT;
          else               idx   <= idx + 1'b1;
        end
        A_WAIT: if (dump) begin
          sum_pow <= sum_pow + pow;
          if (pow > peak) begin
            peak <= pow;
            chip <= ph_chip;
            half <= ph[0];
            fd   <= cell_hz;
          end
          if (ph == n_ph_m1) begin
            ph <= '0;
            if (dop == n_dop_m1) state <= A_DONE;
            else begin dop <= dop + 1'b1; state <= A_CELL; end
          end else begin
            ph    <= ph + 1'b1;
            state <= A_CELL;
          end
        end
        default: begin
          found <= (128'(peak) * 128'(n_cells)) > (128'(sum_pow) * 128'(TH_RATIO));
          done  <= 1'b1;
          busy  <= 1'b0;
          state <= A_IDLE;
        end
      endcase
    end
  end

endmodule
