// tb_data_handler: checks sample dispatch, the acquisition capture window
// and the sample counter.
//
// Random samples arrive with random gaps. Every sample must reach the
// tracking side one clock later with its value; after a capture request,
// exactly ACQ_LEN samples must be flagged for acquisition (a request during
// a capture is ignored); rx_count must equal the number of samples sent.
module tb_data_handler;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic fe_valid, acq_req, trk_en, acq_en, acq_busy;
  sample_t fe_sample, sample;
  logic [63:0] rx_count;

  data_handler #(.ACQ_LEN(100)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent, acq_cnt, bad;
    sample_t last_s;
    bit last_v;
    fe_valid = 0; acq_req = 0; fe_sample = '0;
    sent = 0; acq_cnt = 0; bad = 0; last_v = 0; last_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // outputs of the previous clock's input
      checks++;
      if (trk_en != last_v || (last_v && sample != last_s) || (acq_en && !trk_en)) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL clock %0d: dispatch", n);
      end
      if (acq_en) acq_cnt++;
      fe_valid = ($urandom_range(2) != 0);
      fe_sample = 16'($urandom);
      acq_req = (n == 300 || n == 350 || n == 1200);
      last_v = fe_valid; last_s = fe_sample;
      if (fe_valid) sent++;
    end
    @(negedge clk); fe_valid = 0;
    if (acq_en) acq_cnt++;
    repeat (3) @(negedge clk);
    checks++;
    if (acq_cnt != 200) begin failures++; $display("FAIL %0d samples to acquisition, expected 200", acq_cnt); end
    checks++;
    if (rx_count != 64'(sent)) begin failures++; $display("FAIL rx_count %0d sent %0d", rx_count, sent); end
    checks++;
    if (acq_busy) begin failures++; $display("FAIL capture did not close"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
