// mode_controller: switch between scalar (STL) and ultra-tight (VTL) mode.
//
// The receiver starts in scalar mode (FLL-assisted PLL, 10 Hz bandwidth).
// When at least MIN_SATS channels are phase locked with decoded ephemeris
// and the navigation filter reports that it is running (`nav_ready`, it
// then delivers the Doppler rates xi), the receiver switches to ultra-tight
// mode: every loop filter takes the Doppler rate in place of the FLL assist
// and the 3 Hz gain set. It falls back to scalar mode when the count drops
// below MIN_SATS, when the navigation filter stops, or when software forces
// it (`force_stl`). The mode and the gain set change together, in one
// registered step; `switches` counts transitions into ultra-tight mode.
// The rule "at least four satellites with valid decoded ephemeris" and the
// two bandwidths are the paper's; the fall-back rule is this design's own.
module mode_controller
  import utalfa_pkg::*;
#(
  parameter int N_CH     = N_GPS + N_GAL,
  parameter int MIN_SATS = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_CH-1:0]  locked,
  input  logic [N_CH-1:0]  eph_valid,
  input  logic             nav_ready,
  input  logic             force_stl,
  input  lf_gains_t        gains_stl,
  input  lf_gains_t        gains_vtl,
  output track_mode_e      mode,
  output lf_gains_t        gains,
  output logic [$clog2(N_CH+1)-1:0] n_usable,
  output logic [15:0]      switches
);

  logic [$clog2(N_CH+1)-1:0] cnt;
  always_comb begin
    cnt = '0;
    for (int c = 0; c < N_CH; c++) cnt += $bits(cnt)'(locked[c] & eph_valid[c]);
  end

  logic go_vtl;
  assign go_vtl = nav_ready && !force_stl && (int'(cnt) >= MIN_SATS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode     <= MODE_STL;
      gains    <= GAINS_STL;
      n_usable <= '0;
      switches <= '0;
    end else begin
      n_usable <= cnt;
      if (go_vtl) begin
        mode  <= MODE_VTL;
        gains <= gains_vtl;
        if (mode == MODE_STL) switches <= switches + 1'b1;
      end else begin
        mode  <= MODE_STL;
        gains <= gains_stl;
      end
    end
  end

endmodule
