// tb_gps_ca_gen: checks the C/A generator against an independent model.
//
// The model builds the G1 and G2 maximal-length sequences on their own and
// forms each PRN's code as G1(n) xor G2(n - delay), with the code-phase
// delays of the GPS interface specification; all 1023 chips of PRN 1..32
// are compared. The first ten chips of PRN 1..10 are also checked against
// the octal values published in the specification.
module tb_gps_ca_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, step, chip;
  logic [5:0] prn;
  int checks = 0, failures = 0;

  gps_ca_gen dut (.*);

  int delay [32] = '{5, 6, 7, 8, 17, 18, 139, 140, 141, 251, 252, 254, 255, 256, 257, 258,
                     469, 470, 471, 472, 473, 474, 509, 512, 513, 514, 515, 516, 859, 860, 861, 862};
  int first10 [10] = '{'o1440, 'o1620, 'o1710, 'o1744, 'o1133, 'o1455, 'o1131, 'o1454, 'o1626, 'o1504};
  bit g1s [1023], g2s [1023];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [10:1] a, b;
    a = '1; b = '1;
    for (int n = 0; n < 1023; n++) begin
      g1s[n] = a[10];
      g2s[n] = b[10];
      a = {a[9:1], a[3] ^ a[10]};
      b = {b[9:1], b[2] ^ b[3] ^ b[6] ^ b[8] ^ b[9] ^ b[10]};
    end
    start = 0; step = 0; prn = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 1; p <= 32; p++) begin
      int errs, ones, f10;
      errs = 0; ones = 0; f10 = 0;
      @(negedge clk); prn = 6'(p); start = 1;
      @(negedge clk); start = 0; step = 1;
      for (int n = 0; n < 1023; n++) begin
        bit exp;
        exp = g1s[n] ^ g2s[(n - delay[p-1] + 1023) % 1023];
        if (chip != exp) errs++;
        ones += int'(chip);
        if (n < 10) f10 = (f10 << 1) | int'(chip);
        @(negedge clk);
      end
      step = 0;
      checks++;
      if (errs != 0) begin failures++; $display("FAIL PRN %0d: %0d chip errors", p, errs); end
      checks++;
      if (ones != 512) begin failures++; $display("FAIL PRN %0d: %0d ones", p, ones); end
      if (p <= 10) begin
        checks++;
        if (f10 != first10[p-1]) begin failures++; $display("FAIL PRN %0d first chips %o", p, f10); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
