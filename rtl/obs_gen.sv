// obs_gen: observation generator (OG) for all tracking channels.
//
// Every MEAS_PERIOD samples (default 400 000 samples = 100 ms at 4 MHz,
// the 10 Hz observable rate of the paper's experiments) it latches, in the
// same clock for every channel, the code NCO phase tau_NCO (chip index and
// chip fraction), the count of whole code periods, and the loop filter's
// Doppler estimate f_d, together with the receiver sample count T_RX. From
// these the navigation software forms the pseudorange (transmit time from
// tau_NCO and the decoded time of week, against T_RX) and the Doppler
// observation eta. `meas_valid` pulses one clock after the latch.
// The paper's OG takes tau_NCO and f_d and produces eta; making it a
// common snapshot with the arithmetic left to software is this design's
// own split.
module obs_gen
  import utalfa_pkg::*;
#(
  parameter int          N_CH        = N_GPS + N_GAL,
  parameter int unsigned MEAS_PERIOD = 400_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sample_en,
  input  logic [63:0]       rx_count,
  input  logic [11:0]       code_chip [N_CH],
  input  logic [31:0]       code_frac [N_CH],
  input  logic [31:0]       epochs    [N_CH],
  input  fx_t               f_d       [N_CH],
  output logic              meas_valid,
  output logic [63:0]       meas_rx_count,
  output logic [11:0]       meas_chip  [N_CH],
  output logic [31:0]       meas_frac  [N_CH],
  output logic [31:0]       meas_epoch [N_CH],
  output fx_t               meas_fd    [N_CH]
);

  logic [$clog2(MEAS_PERIOD)-1:0] cnt;
  logic                           tick;

  assign tick = sample_en && (cnt == $bits(cnt)'(MEAS_PERIOD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt           <= '0;
      meas_valid    <= 1'b0;
      meas_rx_count <= '0;
      for (int c = 0; c < N_CH; c++) begin
        meas_chip[c]  <= '0;
        meas_frac[c]  <= '0;
        meas_epoch[c] <= '0;
        meas_fd[c]    <= '0;
      end
    end else begin
      meas_valid <= tick;
      if (sample_en) cnt <= tick ? '0 : cnt + 1'b1;
      if (tick) begin
        meas_rx_count <= rx_count;
        for (int c = 0; c < N_CH; c++) begin
          meas_chip[c]  <= code_chip[c];
          meas_frac[c]  <= code_frac[c];
          meas_epoch[c] <= epochs[c];
          meas_fd[c]    <= f_d[c];
        end
      end
    end
  end

endmodule
