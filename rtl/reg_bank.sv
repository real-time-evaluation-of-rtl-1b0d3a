// reg_bank: processor-visible registers between software and the channels.
//
// A plain single-cycle register bus (write: `wr_en`, `addr`, `wdata`;
// read: `rd_en`, `addr`, `rdata` valid the next clock). Word addresses:
//   0x000 CTRL       [0] force scalar mode  [1] navigation filter running
//   0x001 GAL_EPH    [7:0] Galileo channels with ephemeris decoded (software)
//   0x002 ACQ_CMD    write: start an acquisition, [5:0] PRN, [8] Galileo
//   0x003 CODE_SEL   [3:0] Galileo channel (0..7) whose code memory 0x080..
//                    writes; 8 selects the acquisition engine's memory
//   0x008-0x00B      scalar-mode gains K1 K2 K3 Kf, Q16.16
//   0x00C-0x00F      ultra-tight-mode gains K1 K2 K3 Kf, Q16.16
//   0x010+c CH_CFG   [0] enable [6:1] PRN; write with [31]=1 starts channel c
//   0x020+c INIT_CHIP code phase from acquisition, chips
//   0x030+c INIT_FD  Doppler from acquisition, Hz Q16.16
//   0x040+c FDOT     Doppler rate xi from the navigation filter, Hz/s Q16.16
//   0x080+w          Galileo code word w (0..127) of channel CODE_SEL
// read only:
//   0x004 MODE       [0] ultra-tight  [8:4] usable satellites  [31:16] switches
//   0x005 ACQ_RES    [31] done [30] found [29] busy [12] half chip
//                    [11:0] code phase, chips, at the first captured sample
//   0x050 ACQ_CAP    T_RX (low 32 bits) of the first captured sample
//   0x006 ACQ_FD     Doppler of the peak, Hz (signed)
//   0x007 MEAS_RX    T_RX (sample count, low 32 bits) of the last snapshot
//   0x400+c STATUS   [0] ready [1] locked [2] bit sync [3] frame sync [4] ephemeris
//   0x410+c OBS_CODE [31:20] chip [19:0] chip fraction (snapshot)
//   0x420+c OBS_FD   f_d snapshot, Hz Q16.16
//   0x430+c OBS_EPOCH code periods counted at the snapshot
//   0x440+c NAV_WORD [29:0] last decoded word [30] parity ok
// Q16.16 values are widened to the internal Q24 format, so the low 8
// fraction bits of the gains, INIT_FD and FDOT outputs are always zero.
// Channels c = 0..7 are GPS, 8..15 Galileo. The paper shows a register block
// between the processor's loop filters and the tracking channels (the
// Doppler rates xi cross it); this map and bus are this design's own.
module reg_bank
  import utalfa_pkg::*;
#(
  parameter int N_CH = N_GPS + N_GAL
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic        rd_en,
  input  logic [11:0] addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  // control outputs
  output logic        force_stl,
  output logic        nav_ready,
  output logic [7:0]  gal_eph,
  output logic        acq_start,
  output logic [5:0]  acq_prn,
  output logic        acq_gal,
  output lf_gains_t   gains_stl,
  output lf_gains_t   gains_vtl,
  output logic        ch_enable [N_CH],
  output logic [5:0]  ch_prn    [N_CH],
  output logic        ch_start  [N_CH],
  output logic [11:0] ch_chip   [N_CH],
  output fx_t         ch_fd     [N_CH],
  output fx_t         ch_fdot   [N_CH],
  output logic [N_GAL:0] code_wr_en,     // [N_GAL] = acquisition
  output logic [6:0]  code_wr_addr,
  output logic [31:0] code_wr_data,
  // status inputs
  input  logic [31:0] mode_word,
  input  logic        acq_done,
  input  logic        acq_found,
  input  logic        acq_busy,
  input  logic        acq_half,
  input  logic [31:0] acq_cap_rx,
  input  logic [11:0] acq_chip,
  input  logic signed [31:0] acq_fd,
  input  logic [31:0] meas_rx,
  input  logic [4:0]  ch_status [N_CH],
  input  logic [11:0] obs_chip  [N_CH],
  input  logic [31:0] obs_frac  [N_CH],
  input  fx_t         obs_fd    [N_CH],
  input  logic [31:0] obs_epoch [N_CH],
  input  logic [30:0] nav_word  [N_CH]
);

  logic [3:0] code_sel;

  function automatic fx_t q16_to_fx(input logic [31:0] v);
    return fx_t'(signed'(v)) <<< (FX_FRAC - 16);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      force_stl <= 1'b0; nav_ready <= 1'b0; gal_eph <= '0;
      acq_start <= 1'b0; acq_prn <= '0; acq_gal <= 1'b0;
      gains_stl <= GAINS_STL; gains_vtl <= GAINS_VTL;
      code_sel <= '0; code_wr_en <= '0; code_wr_addr <= '0; code_wr_data <= '0;
      for (int c = 0; c < N_CH; c++) begin
        ch_enable[c] <= 1'b0; ch_prn[c] <= 6'd1; ch_start[c] <= 1'b0;
        ch_chip[c] <= '0; ch_fd[c] <= '0; ch_fdot[c] <= '0;
      end
    end else begin
      acq_start  <= 1'b0;
      code_wr_en <= '0;
      for (int c = 0; c < N_CH; c++) ch_start[c] <= 1'b0;
      if (wr_en) begin
        unique casez (addr)
          12'h000: {nav_ready, force_stl} <= wdata[1:0];
          12'h001: gal_eph <= wdata[7:0];
          12'h002: begin acq_start <= 1'b1; acq_prn <= wdata[5:0]; acq_gal <= wdata[8]; end
          12'h003: code_sel <= wdata[3:0];
          12'h008: gains_stl.k1 <= q16_to_fx(wdata);
          12'h009: gains_stl.k2 <= q16_to_fx(wdata);
          12'h00A: gains_stl.k3 <= q16_to_fx(wdata);
          12'h00B: gains_stl.kf <= q16_to_fx(wdata);
          12'h00C: gains_vtl.k1 <= q16_to_fx(wdata);
          12'h00D: gains_vtl.k2 <= q16_to_fx(wdata);
          12'h00E: gains_vtl.k3 <= q16_to_fx(wdata);
          12'h00F: gains_vtl.kf <= q16_to_fx(wdata);
          12'b0000_1???_????: begin
            if (int'(code_sel) <= N_GAL) code_wr_en[code_sel] <= 1'b1;
            code_wr_addr         <= addr[6:0];
            code_wr_data         <= wdata;
          end
          default: ;
        endcase
        for (int c = 0; c < N_CH; c++) begin
          if (addr == 12'h010 + 12'(c)) begin
            ch_enable[c] <= wdata[0];
            ch_prn[c]    <= wdata[6:1];
            ch_start[c]  <= wdata[31];
          end
          if (addr == 12'h020 + 12'(c)) ch_chip[c] <= wdata[11:0];
          if (addr == 12'h030 + 12'(c)) ch_fd[c]   <= q16_to_fx(wdata);
          if (addr == 12'h040 + 12'(c)) ch_fdot[c] <= q16_to_fx(wdata);
        end
      end
    end
  end

  // ---------------------------------------------------------------- reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata <= '0;
    end else if (rd_en) begin
      rdata <= '0;
      unique case (addr)
        12'h000: rdata <= {30'd0, nav_ready, force_stl};
        12'h001: rdata <= {24'd0, gal_eph};
        12'h003: rdata <= {28'd0, code_sel};
        12'h004: rdata <= mode_word;
        12'h005: rdata <= {acq_done, acq_found, acq_busy, 16'd0, acq_half, acq_chip};
        12'h050: rdata <= acq_cap_rx;
        12'h006: rdata <= acq_fd;
        12'h007: rdata <= meas_rx;
        default: ;
      endcase
      for (int c = 0; c < N_CH; c++) begin
        if (addr == 12'h010 + 12'(c)) rdata <= {25'd0, ch_prn[c], ch_enable[c]};
        if (addr == 12'h400 + 12'(c)) rdata <= {27'd0, ch_status[c]};
        if (addr == 12'h410 + 12'(c)) rdata <= {obs_chip[c], obs_frac[c][31:12]};
        if (addr == 12'h420 + 12'(c)) rdata <= obs_fd[c][FX_FRAC-16 +: 32];
        if (addr == 12'h430 + 12'(c)) rdata <= obs_epoch[c];
        if (addr == 12'h440 + 12'(c)) rdata <= {1'b0, nav_word[c]};
      end
    end
  end

endmodule
