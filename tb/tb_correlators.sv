// tb_correlators: checks carrier wipe-off and E/P/L integrate-and-dump.
//
// Random 8-bit samples and random replicas are fed for integration periods
// of random length; a model accumulates the six sums as
// sum(c * (i*cos + q*sin)) and sum(c * (q*cos - i*sin)), c = +-1, and the
// dumped values are compared. `dump` must come exactly one clock after the
// sample flagged `last`, once per period, and `clear` must restart the sums.
module tb_correlators;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, sample_en, last, rep_e, rep_p, rep_l, dump;
  sample_t sample;
  logic signed [2:0] cos_rep, sin_rep;
  corr_t corr;

  correlators dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint m [6];
  int dumps_seen;
  always @(posedge clk) if (dump) dumps_seen++;

  initial begin
    int len;
    clear = 0; sample_en = 0; last = 0; rep_e = 0; rep_p = 0; rep_l = 0; sample = '0;
    cos_rep = 0; sin_rep = 0; dumps_seen = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int per = 0; per < 40; per++) begin
      int d0;
      foreach (m[k]) m[k] = 0;
      len = 50 + $urandom_range(2000);
      if (per == 5) begin
        // partial period then clear: the partial sums must vanish
        for (int n = 0; n < 30; n++) begin
          @(negedge clk); sample_en = 1; sample.i = 8'($urandom); sample.q = 8'($urandom);
        end
        @(negedge clk); sample_en = 0; clear = 1;
        @(negedge clk); clear = 0;
      end
      for (int n = 0; n < len; n++) begin
        int im, qm, ci, cq;
        int tbl_c [8] = '{3, 2, 0, -2, -3, -2, 0, 2};
        int tbl_s [8] = '{0, 2, 3, 2, 0, -2, -3, -2};
        int k;
        @(negedge clk);
        sample_en = ($urandom_range(3) != 0);
        sample.i = 8'($urandom); sample.q = 8'($urandom);
        k = $urandom_range(7);
        cos_rep = 3'(tbl_c[k]); sin_rep = 3'(tbl_s[k]);
        rep_e = 1'($urandom); rep_p = 1'($urandom); rep_l = 1'($urandom);
        if (n == len - 1) sample_en = 1;
        last = (n == len - 1);
        if (sample_en) begin
          im = int'(sample.i) * int'(cos_rep) + int'(sample.q) * int'(sin_rep);
          qm = int'(sample.q) * int'(cos_rep) - int'(sample.i) * int'(sin_rep);
          m[0] += longint'(rep_e ? -im : im);  m[1] += longint'(rep_e ? -qm : qm);
          m[2] += longint'(rep_p ? -im : im);  m[3] += longint'(rep_p ? -qm : qm);
          m[4] += longint'(rep_l ? -im : im);  m[5] += longint'(rep_l ? -qm : qm);
        end
      end
      d0 = dumps_seen;
      @(negedge clk); sample_en = 0; last = 0;
      checks++;
      if (!dump) begin failures++; $display("FAIL dump timing in period %0d", per); end
      checks++;
      if (corr.ie != m[0] || corr.qe != m[1] || corr.ip != m[2] || corr.qp != m[3] ||
          corr.il != m[4] || corr.ql != m[5]) begin
        failures++;
        $display("FAIL sums period %0d: ip %0d exp %0d", per, corr.ip, m[2]);
      end
      @(negedge clk);
      checks++;
      if (dump) begin failures++; $display("FAIL dump longer than one clock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
