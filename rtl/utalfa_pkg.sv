// utalfa_pkg: types and constants shared by the UT-ALFA GNSS receiver.
//
// All loop quantities (code error in chips, phase error in cycles,
// frequencies in Hz, Doppler rate in Hz/s, loop gains) travel as one signed
// fixed-point type, fx_t, with FX_FRAC fractional bits. The sampling rate,
// the 8-bit complex samples, the 1.023 MHz chip rate and the 1575.42 MHz
// carrier (GPS L1 C/A and Galileo E1 share it) follow the receiver this RTL
// implements; the fixed-point formats and the default loop gains are this
// design's own choices (the gains realise the 10 Hz scalar and 3 Hz
// ultra-tight PLL bandwidths with a damping factor of 0.707).
package utalfa_pkg;

  // ---------------------------------------------------------------- fixed point
  localparam int FX_W    = 48;
  localparam int FX_FRAC = 24;
  typedef logic signed [FX_W-1:0] fx_t;

  // multiply two fx_t values, result in fx_t (truncated toward -inf)
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FX_FRAC);
  endfunction

  // ---------------------------------------------------------------- signal
  localparam int unsigned FS_HZ       = 4_000_000;   // sample rate
  localparam int unsigned FCHIP_HZ    = 1_023_000;   // code chip rate
  localparam int          GPS_CODE_LEN = 1023;       // C/A code, chips
  localparam int          GAL_CODE_LEN = 4092;       // E1-B code, chips
  localparam int          N_GPS       = 8;           // GPS tracking channels
  localparam int          N_GAL       = 8;           // Galileo tracking channels

  // 2^32 / FS_HZ in fx_t: converts Hz into a 32-bit NCO phase increment
  localparam fx_t NCO_PER_HZ  = 48'sd18014398509;
  // nominal code rate in fx_t (Hz)
  localparam fx_t FCHIP_FX    = fx_t'(longint'(FCHIP_HZ) <<< FX_FRAC);
  // SF = f_chip / f_carrier = 1.023e6 / 1575.42e6, carrier-to-code aiding
  localparam fx_t SF_L1       = 48'sd10894;

  typedef struct packed {
    logic signed [7:0] i;
    logic signed [7:0] q;
  } sample_t;

  // integrate-and-dump outputs: in-phase and quadrature Early, Prompt, Late
  typedef struct packed {
    logic signed [31:0] ie, qe, ip, qp, il, ql;
  } corr_t;

  typedef enum logic {CONST_GPS = 1'b0, CONST_GAL = 1'b1} constellation_e;

  // STL: FLL-assisted PLL, wide bandwidth. VTL: Doppler rate from the
  // navigation filter replaces the FLL assist, narrow bandwidth.
  typedef enum logic {MODE_STL = 1'b0, MODE_VTL = 1'b1} track_mode_e;

  // loop filter gains (figure of the UT-ALFA loop filter: K1, K2, K3, SF),
  // plus the FLL-assist gain used in scalar mode
  typedef struct packed {
    fx_t k1;   // DLL gain, 1/s
    fx_t k2;   // PLL integral gain, 1/s^2
    fx_t k3;   // PLL proportional gain, 1/s
    fx_t kf;   // FLL-assist gain, 1/s
  } lf_gains_t;

  // 10 Hz PLL (scalar mode): K3 = 2*zeta*wn, K2 = wn^2, wn = 8*zeta*Bn/(1+4*zeta^2)
  localparam lf_gains_t GAINS_STL = '{
    k1: 48'sd67108864,      // 4 /s  (1 Hz DLL)
    k2: 48'sd5965270493,    // 355.56
    k3: 48'sd447389566,     // 26.67
    kf: 48'sd671088640      // 40 /s (10 Hz FLL assist)
  };
  // 3 Hz PLL (ultra-tight mode)
  localparam lf_gains_t GAINS_VTL = '{
    k1: 48'sd67108864,
    k2: 48'sd536874344,     // 32.0
    k3: 48'sd134216870,     // 8.0
    kf: 48'sd0
  };

  // discriminator outputs
  typedef struct packed {
    fx_t dtau;   // code delay error, chips
    fx_t dphi;   // carrier phase error, cycles
    fx_t dfd;    // Doppler error, Hz
  } disc_t;

  // loop filter outputs
  typedef struct packed {
    fx_t f_dll;  // code NCO correction, chips/s
    fx_t f_d;    // Doppler estimate, Hz
    fx_t f_pll;  // carrier NCO frequency, Hz
  } lf_out_t;

endpackage
