// tb_obs_gen: checks the observation snapshot timing and contents.
//
// Channel inputs change every clock. A snapshot must be taken on every
// MEAS_PERIOD-th sample (counting only clocks with sample_en), all channels
// and rx_count in the same clock, with `meas_valid` one clock later.
module tb_obs_gen;
  import utalfa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int N = 4;

  logic sample_en, meas_valid;
  logic [63:0] rx_count, meas_rx_count;
  logic [11:0] code_chip [N], meas_chip [N];
  logic [31:0] code_frac [N], epochs [N], meas_frac [N], meas_epoch [N];
  fx_t f_d [N], meas_fd [N];

  obs_gen #(.N_CH(N), .MEAS_PERIOD(50)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int samples, snaps;
    logic [63:0] exp_rx;
    samples = 0; snaps = 0; sample_en = 0; rx_count = 0;
    for (int c = 0; c < N; c++) begin code_chip[c] = 0; code_frac[c] = 0; epochs[c] = 0; f_d[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (meas_valid) begin
        snaps++;
        checks++;
        if (meas_rx_count != exp_rx) begin failures++; $display("FAIL snapshot rx %0d exp %0d", meas_rx_count, exp_rx); end
        for (int c = 0; c < N; c++) begin
          checks++;
          if (meas_chip[c] != 12'(exp_rx + 64'(c)) || meas_frac[c] != 32'(exp_rx * 3) ||
              meas_epoch[c] != 32'(exp_rx + 64'(7 * c)) || meas_fd[c] != fx_t'(exp_rx) - fx_t'(c)) begin
            failures++; $display("FAIL channel %0d snapshot", c);
          end
        end
      end
      sample_en = ($urandom_range(1) == 1);
      rx_count = 64'(n);
      for (int c = 0; c < N; c++) begin
        code_chip[c] = 12'(n + c); code_frac[c] = 32'(n * 3); epochs[c] = 32'(n + 7 * c); f_d[c] = fx_t'(n) - fx_t'(c);
      end
      if (sample_en) begin
        samples++;
        if (samples % 50 == 0) exp_rx = 64'(n);
      end
    end
    checks++;
    if (snaps != samples / 50 && snaps != samples / 50 - 1) begin
      failures++; $display("FAIL %0d snapshots for %0d samples", snaps, samples);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
