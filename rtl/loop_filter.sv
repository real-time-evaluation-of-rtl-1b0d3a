// loop_filter: the UT-ALFA tracking loop filter of one channel.
//
// Once per integration period (strobe `update`) it turns the discriminator
// outputs into the code and carrier NCO commands:
//   f_DLL   = K1*dtau - SF*f_d
//   f_PLL   = K3*dphi + f_d
//   f_d    <= f_d + T*(K2*dphi + a)     (the z^-1 register)
// where `a` is the Doppler rate fdot (Hz/s) from the navigation filter in
// ultra-tight mode (MODE_VTL), and the FLL-assist term Kf*dfd in scalar mode
// (MODE_STL). The structure, the signs of the adders and the replacement of
// the FLL assist by the Doppler rate follow the paper's loop-filter figure;
// the FLL-assist gain Kf, the fixed-point format and the single-cycle
// evaluation are this design's own choices (the paper ran this filter as
// software on the processor).
//
// Interface: `init` loads f_d (e.g. the acquisition Doppler). `update` takes
// disc/fdot/gains and produces `out` with `out_valid` one clock later.
// `f_pll` and `f_dll` use the f_d held before the update, as the figure
// takes f_d from the z^-1 output.
module loop_filter
  import utalfa_pkg::*;
#(
  parameter fx_t T_INT = fx_t'(16777)   // integration period, s (1 ms)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  fx_t         init_fd,
  input  logic        update,
  input  track_mode_e mode,
  input  lf_gains_t   gains,
  input  disc_t       disc,
  input  fx_t         fdot,
  output lf_out_t     out,
  output logic        out_valid
);

  fx_t fd_q;
  fx_t rate_in;

  // input of the integrator: K2*dphi + (fdot | Kf*dfd)
  always_comb begin
    rate_in = fx_mul(gains.k2, disc.dphi) +
              ((mode == MODE_VTL) ? fdot : fx_mul(gains.kf, disc.dfd));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fd_q      <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (init) begin
        fd_q <= init_fd;
      end else if (update) begin
        fd_q       <= fd_q + fx_mul(T_INT, rate_in);
        out.f_d    <= fd_q;
        out.f_pll  <= fx_mul(gains.k3, disc.dphi) + fd_q;
        out.f_dll  <= fx_mul(gains.k1, disc.dtau) - fx_mul(SF_L1, fd_q);
        out_valid  <= 1'b1;
      end
    end
  end

endmodule
