// tb_reg_bank: checks the register map of the processor interface.
//
// Random values are written to every control register and read back or
// checked on the block outputs (Q16.16 to Q24 conversion of gains and
// frequencies, one-clock start and write pulses, code-memory selection);
// random status inputs are read through their addresses.
module tb_reg_bank;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 16;

  logic        wr_en, rd_en;
  logic [11:0] addr;
  logic [31:0] wdata, rdata;
  logic        force_stl, nav_ready, acq_start, acq_gal;
  logic [7:0]  gal_eph;
  logic [5:0]  acq_prn;
  lf_gains_t   gains_stl, gains_vtl;
  logic        ch_enable [N];
  logic [5:0]  ch_prn [N];
  logic        ch_start [N];
  logic [11:0] ch_chip [N];
  fx_t         ch_fd [N], ch_fdot [N];
  logic [N_GAL:0] code_wr_en;
  logic [6:0]  code_wr_addr;
  logic [31:0] code_wr_data;
  logic [31:0] mode_word, acq_cap_rx, meas_rx;
  logic        acq_done, acq_found, acq_busy, acq_half;
  logic [11:0] acq_chip;
  logic signed [31:0] acq_fd;
  logic [4:0]  ch_status [N];
  logic [11:0] obs_chip [N];
  logic [31:0] obs_frac [N], obs_epoch [N];
  fx_t         obs_fd [N];
  logic [30:0] nav_word [N];

  reg_bank #(.N_CH(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); wr_en = 1; addr = a; wdata = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); rd_en = 1; addr = a;
    @(negedge clk); rd_en = 0; d = rdata;
  endtask

  function automatic fx_t q16(input logic [31:0] v);
    return fx_t'(signed'(v)) * 256;
  endfunction

  initial begin
    logic [31:0] v, d;
    int starts, acqs;
    wr_en = 0; rd_en = 0; addr = 0; wdata = 0;
    mode_word = 0; acq_cap_rx = 0; meas_rx = 0; acq_done = 0; acq_found = 0;
    acq_busy = 0; acq_half = 0; acq_chip = 0; acq_fd = 0;
    for (int c = 0; c < N; c++) begin
      ch_status[c] = 0; obs_chip[c] = 0; obs_frac[c] = 0; obs_epoch[c] = 0; obs_fd[c] = 0; nav_word[c] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(gains_stl == GAINS_STL && gains_vtl == GAINS_VTL, "reset gains");

    for (int rep = 0; rep < 20; rep++) begin
      v = $urandom;
      wr(12'h000, v);
      check(force_stl == v[0] && nav_ready == v[1], "CTRL outputs");
      rd(12'h000, d);
      check(d == {30'd0, v[1:0]}, "CTRL read");
      v = $urandom;
      wr(12'h001, v);
      check(gal_eph == v[7:0], "GAL_EPH");
      // acquisition command: one-clock pulse
      v = $urandom;
      @(negedge clk); wr_en = 1; addr = 12'h002; wdata = v;
      @(negedge clk); wr_en = 0;
      check(acq_start && acq_prn == v[5:0] && acq_gal == v[8], "ACQ_CMD pulse");
      @(negedge clk);
      check(!acq_start, "ACQ_CMD pulse length");
      // gains
      for (int g = 0; g < 8; g++) begin
        v = $urandom;
        wr(12'h008 + 12'(g), v);
        case (g)
          0: check(gains_stl.k1 == q16(v), "K1 stl");
          1: check(gains_stl.k2 == q16(v), "K2 stl");
          2: check(gains_stl.k3 == q16(v), "K3 stl");
          3: check(gains_stl.kf == q16(v), "Kf stl");
          4: check(gains_vtl.k1 == q16(v), "K1 vtl");
          5: check(gains_vtl.k2 == q16(v), "K2 vtl");
          6: check(gains_vtl.k3 == q16(v), "K3 vtl");
          default: check(gains_vtl.kf == q16(v), "Kf vtl");
        endcase
      end
      // channels
      for (int c = 0; c < N; c++) begin
        v = $urandom;
        @(negedge clk); wr_en = 1; addr = 12'h010 + 12'(c); wdata = v;
        @(negedge clk); wr_en = 0;
        starts = 0;
        for (int k = 0; k < N; k++) if (ch_start[k]) starts++;
        check(ch_enable[c] == v[0] && ch_prn[c] == v[6:1] && ch_start[c] == v[31] &&
              starts == int'(v[31]), "CH_CFG");
        rd(12'h010 + 12'(c), d);
        check(d == {25'd0, v[6:0]}, "CH_CFG read");
        v = $urandom; wr(12'h020 + 12'(c), v); check(ch_chip[c] == v[11:0], "INIT_CHIP");
        v = $urandom; wr(12'h030 + 12'(c), v); check(ch_fd[c] == q16(v), "INIT_FD");
        v = $urandom; wr(12'h040 + 12'(c), v); check(ch_fdot[c] == q16(v), "FDOT");
      end
      // code memory writes go to the selected memory only
      for (int s = 0; s <= N_GAL; s++) begin
        wr(12'h003, 32'(s));
        v = $urandom; d = 32'($urandom_range(127));
        @(negedge clk); wr_en = 1; addr = 12'h080 + 12'(d); wdata = v;
        @(negedge clk); wr_en = 0;
        check(code_wr_en == (9'd1 << s) && code_wr_addr == d[6:0] && code_wr_data == v, "code write");
        @(negedge clk);
        check(code_wr_en == 0, "code write pulse length");
      end
      // status reads
      mode_word = $urandom; acq_cap_rx = $urandom; meas_rx = $urandom;
      acq_done = 1'($urandom); acq_found = 1'($urandom); acq_busy = 1'($urandom);
      acq_half = 1'($urandom); acq_chip = 12'($urandom); acq_fd = $urandom;
      for (int c = 0; c < N; c++) begin
        ch_status[c] = 5'($urandom); obs_chip[c] = 12'($urandom); obs_frac[c] = $urandom;
        obs_epoch[c] = $urandom; obs_fd[c] = {16'($urandom), 32'($urandom)}; nav_word[c] = 31'($urandom);
      end
      rd(12'h004, d); check(d == mode_word, "MODE read");
      rd(12'h005, d); check(d == {acq_done, acq_found, acq_busy, 16'd0, acq_half, acq_chip}, "ACQ_RES read");
      rd(12'h006, d); check(d == acq_fd, "ACQ_FD read");
      rd(12'h007, d); check(d == meas_rx, "MEAS_RX read");
      rd(12'h050, d); check(d == acq_cap_rx, "ACQ_CAP read");
      for (int c = 0; c < N; c++) begin
        rd(12'h400 + 12'(c), d); check(d == {27'd0, ch_status[c]}, "STATUS read");
        rd(12'h410 + 12'(c), d); check(d == {obs_chip[c], obs_frac[c][31:12]}, "OBS_CODE read");
        rd(12'h420 + 12'(c), d); check(d == obs_fd[c][39:8], "OBS_FD read");
        rd(12'h430 + 12'(c), d); check(d == obs_epoch[c], "OBS_EPOCH read");
        rd(12'h440 + 12'(c), d); check(d == {1'b0, nav_word[c]}, "NAV_WORD read");
      end
      rd(12'h7FF, d); check(d == 0, "unmapped read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
