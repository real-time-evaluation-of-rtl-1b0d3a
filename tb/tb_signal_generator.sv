// tb_signal_generator: checks the local replica for GPS and Galileo.
//
// GPS instance: after a PRN load (and `ready` exactly CODE_LEN+1 clocks
// later) the Early/Prompt/Late chips at random code phases are compared with
// a C/A model built from the G1/G2 sequences and the PRN's code delay, at
// phase +0.5, 0 and -0.5 chip, with wrap-around at both ends of the code.
// Galileo instance: a random code is written, and E/P/L at +-0.125 chip are
// compared with that code times the BOC(1,1) square wave. The carrier
// replica is compared with round(3*cos), round(3*sin) of the sector phase.
module tb_signal_generator;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prn_load, wr_en;
  logic [5:0] prn;
  logic [6:0] wr_addr;
  logic [31:0] wr_data;
  logic ready_g, ready_e;
  logic [9:0] chip_g;
  logic [11:0] chip_e;
  logic [31:0] frac, carr;
  logic eg, pg, lg, ee, pe, le;
  logic signed [2:0] cg, sg, ce, se;

  signal_generator #(.CONST(CONST_GPS), .CODE_LEN(1023)) dut_gps (
    .clk, .rst_n, .prn_load, .prn, .wr_en(1'b0), .wr_addr('0), .wr_data('0), .ready(ready_g),
    .code_chip(chip_g), .code_frac(frac), .carr_phase(carr),
    .rep_e(eg), .rep_p(pg), .rep_l(lg), .cos_rep(cg), .sin_rep(sg));
  signal_generator #(.CONST(CONST_GAL), .CODE_LEN(4092), .EL_HALF(32'h2000_0000)) dut_gal (
    .clk, .rst_n, .prn_load, .prn, .wr_en, .wr_addr, .wr_data, .ready(ready_e),
    .code_chip(chip_e), .code_frac(frac), .carr_phase(carr),
    .rep_e(ee), .rep_p(pe), .rep_l(le), .cos_rep(ce), .sin_rep(se));

  bit ca [1023];
  bit gal [4096];

  function automatic bit ca_at(input real p);
    int i;
    bit dummy;
    p = p - 1023.0 * $floor(p / 1023.0);
    i = int'($floor(p));
    return ca[i];
  endfunction
  function automatic bit gal_at(input real p);
    int i;
    real fr;
    p = p - 4092.0 * $floor(p / 4092.0);
    i = int'($floor(p));
    fr = p - $floor(p);
    return gal[i] ^ (fr >= 0.5);
  endfunction

  task automatic chk(input string what, input logic got, input bit exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [10:1] a, b;
    bit g1s [1023], g2s [1023];
    int waited;
    a = '1; b = '1;
    for (int n = 0; n < 1023; n++) begin
      g1s[n] = a[10]; g2s[n] = b[10];
      a = {a[9:1], a[3] ^ a[10]};
      b = {b[9:1], b[2] ^ b[3] ^ b[6] ^ b[8] ^ b[9] ^ b[10]};
    end
    for (int n = 0; n < 1023; n++) ca[n] = g1s[n] ^ g2s[(n - 18 + 1023) % 1023];   // PRN 6
    for (int n = 0; n < 4096; n++) gal[n] = bit'($urandom_range(1));
    prn_load = 0; prn = 6; wr_en = 0; wr_addr = 0; wr_data = 0; chip_g = 0; chip_e = 0; frac = 0; carr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Galileo code words
    for (int w = 0; w < 128; w++) begin
      @(negedge clk); wr_en = 1; wr_addr = 7'(w);
      for (int k = 0; k < 32; k++) wr_data[k] = gal[w * 32 + k];
    end
    @(negedge clk); wr_en = 0;
    @(negedge clk); prn_load = 1;
    @(negedge clk); prn_load = 0;
    waited = 1;
    while (!ready_g) begin @(negedge clk); waited++; end
    checks++;
    if (waited != 1024) begin failures++; $display("FAIL GPS fill took %0d clocks", waited); end
    chk("gal ready", ready_e, 1'b1);
    for (int n = 0; n < 3000; n++) begin
      real pgps, pgal;
      if (n < 4) begin chip_g = (n < 2) ? 10'd0 : 10'd1022; chip_e = (n < 2) ? 12'd0 : 12'd4091; end
      else begin chip_g = 10'($urandom_range(1022)); chip_e = 12'($urandom_range(4091)); end
      frac = $urandom;
      carr = $urandom;
      #1;
      pgps = real'(chip_g) + real'(frac) / 4294967296.0;
      pgal = real'(chip_e) + real'(frac) / 4294967296.0;
      chk("gps E", eg, ca_at(pgps + 0.5));
      chk("gps P", pg, ca_at(pgps));
      chk("gps L", lg, ca_at(pgps - 0.5));
      chk("gal E", ee, gal_at(pgal + 0.125));
      chk("gal P", pe, gal_at(pgal));
      chk("gal L", le, gal_at(pgal - 0.125));
      begin
        real ph;
        int ec, es;
        ph = 2.0 * 3.14159265358979 * real'(carr[31:29]) / 8.0;
        ec = int'($floor(3.0 * $cos(ph) + 0.5));
        es = int'($floor(3.0 * $sin(ph) + 0.5));
        if (ec == 2 || ec == -2 || ec == 1 || ec == -1) ec = (ec > 0) ? 2 : -2;
        if (es == 2 || es == -2 || es == 1 || es == -1) es = (es > 0) ? 2 : -2;
        checks++;
        if (int'(cg) != ec || int'(sg) != es || ce != cg || se != sg) begin
          failures++; $display("FAIL carrier sector %0d: %0d %0d", carr[31:29], cg, sg);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
