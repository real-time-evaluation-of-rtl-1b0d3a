# UT-ALFA: a GPS/Galileo tracking receiver whose PLL bandwidth is steered by inertial data

A GNSS receiver normally tracks each satellite with its own independent
code and carrier loops (scalar tracking). Wide loops survive vehicle
dynamics but let in noise; narrow loops filter noise but lose lock when the
vehicle turns or brakes. Vector tracking closes all loops through one
navigation filter, but then the filter has to steer every NCO in step with
the hardware, which is hard to time on a real receiver.

The ultra-tight adaptive loop filter (UT-ALFA) architecture, described in
"Real-Time Evaluation of an Ultra-Tight GNSS/INS Integration Based on
Adaptive PLL Bandwidth", takes a middle path:

- Every channel keeps its ordinary FLL-assisted PLL and DLL.
- A GNSS/INS navigation filter (an EKF with the IMU) estimates each
  satellite's Doppler rate ξ = ḟd.
- That rate is fed into the channel's loop filter, in place of the FLL
  assist.

The loop no longer has to follow the dynamics itself, so the PLL bandwidth
can drop from 10 Hz to 3 Hz. The filter's output only enters a loop-filter
integrator once per integration period, so no tight timing between software
and NCOs is needed. The receiver also keeps decoding the navigation message
in its own loops.

This repository is synthesizable SystemVerilog for the hardware side of
such a receiver:

- 8 GPS L1 C/A and 8 Galileo E1-B tracking channels, each with the UT-ALFA
  loop filter;
- an acquisition engine;
- a sample dispatcher;
- a 10 Hz observation latch;
- the scalar to ultra-tight mode switch;
- a processor register bank.

The navigation filter, the IMU and the management software are not
hardware. They sit behind the register bus.

## Structure

```
 8-bit I/Q, 4 MHz
 fe_valid/fe_sample
        |
  data_handler ---- T_RX sample count ---------------------------+
    |        \                                                   |
    |         acquisition  (serial search, GPS and Galileo)      |
    |                                                            |
    +--> tracking_channel x 16   (0..7 GPS, 8..15 Galileo)        |
    |      nco -> signal_generator -> correlators                 |
    |        ^                          |                         |
    |        |                    discriminators                  |
    |        |                          |                         |
    |        +------ loop_filter <------+  <-- xi (FDOT register) |
    |                                                             |
    |      nav_decoder_gps (GPS channels)                         |
    |                                                             |
    +--> obs_gen: tau_NCO, f_d of all channels + T_RX, 10 Hz <----+
         mode_controller: STL -> VTL when >= 4 usable satellites
         reg_bank: register bus to the processor
```

The package `utalfa_pkg` holds the shared types and constants: the sample
and correlator structs, the gain sets, the sample rate, and the code
lengths. `gps_parity_pkg` holds the GPS (32,26) parity.

| Module | What it is |
|---|---|
| `utalfa_receiver` | top; wires everything together |
| `data_handler` | registers samples, feeds tracking, opens a 16000-sample capture window for acquisition, counts samples (T_RX) |
| `acquisition` | serial search over Doppler bins × half-chip code phases on one captured code period |
| `tracking_channel` | one closed loop (GPS or Galileo by parameter) |
| `nco` | code and carrier phase accumulators |
| `signal_generator` | code memory, Early/Prompt/Late chips, BOC(1,1) sub-carrier, 8-phase carrier table |
| `gps_ca_gen` | G1/G2 C/A code generator, PRN 1..32 |
| `correlators` | carrier wipe-off and six E/P/L I/Q accumulators |
| `discriminators` | Costas PLL, FLL and normalised DLL errors; shared CORDIC (`cordic_vec`) and divider (`seq_div`) |
| `loop_filter` | the UT-ALFA loop filter |
| `nav_decoder_gps` | bit sync, frame sync, parity, subframe IDs, ephemeris flag |
| `obs_gen` | periodic snapshot of the code phase, the code-period count and f_d |
| `mode_controller` | scalar / ultra-tight switch and gain selection |
| `reg_bank` | register map |

## The loop filter

Everything else in the design is a conventional receiver; this block is
where the idea lives. Once per integration period T (1 ms for GPS, 4 ms for
Galileo) it receives three errors from the discriminators:

- δτ, the code error in chips;
- δφ, the carrier phase error in cycles;
- δfd, the frequency error in Hz.

With them it updates one state, the Doppler estimate f_d:

```
  f_DLL = K1·δτ − SF·f_d                      code NCO correction (chips/s)
  f_PLL = K3·δφ + f_d                         carrier NCO frequency (Hz)
  f_d  ← f_d + T·(K2·δφ + r)                  integrator
         r = Kf·δfd    scalar mode (FLL assist)
         r = ξ = ḟd    ultra-tight mode (from the navigation filter)
```

SF = 1.023 MHz / 1575.42 MHz is the carrier-to-code aiding factor. The code
NCO runs at 1.023 MHz − f_DLL, so a positive Doppler speeds up the code.

K2 = ωn² and K3 = 2ζωn, with ωn = 8ζBn/(1+4ζ²) and ζ = 0.707. This gives
the two gain sets below; both are reset values of registers and can be
rewritten.

| Mode | Bn | K2 (1/s²) | K3 (1/s) | K1 (1/s) | Kf (1/s) |
|---|---|---|---|---|---|
| scalar (STL) | 10 Hz | 355.56 | 26.67 | 4 | 40 |
| ultra-tight (VTL) | 3 Hz | 32 | 8 | 4 | 0 |

The values of K1 and Kf are this design's choices.

The block takes one clock per update. Its outputs are registered and reach
the NCOs on the next clock. All values are signed 48-bit with 24 fraction
bits (`fx_t`).

### Why the mode switch has a transient

In scalar mode the FLL term integrates Kf·δfd. In steady state δfd is the
derivative of δφ, so Kf in effect adds to the proportional gain. With
K2 = 355.56 and K3 + Kf = 66.67, the closed loop has one fast pole and one
slow pole near 5.8 s⁻¹.

The practical result is that f_d converges slowly. While it still lags the
true Doppler, the proportional path K3·δφ carries the difference.

When the receiver enters ultra-tight mode, K3 drops from 26.67 to 8. The
same 1 Hz lag then needs about 0.12 cycles (45°) of phase error. The
channel stays phase locked, but the lock indicator (|Ip| > 2|Qp|, about
27°) can drop until the 3 Hz loop has absorbed the lag. That can send the
receiver back to scalar mode once before it settles. The end-to-end
testbench shows this with Galileo channels that were started about a
second before the switch.

A longer scalar phase avoids it. Hysteresis in the mode controller would
also avoid it, but the published architecture does not describe any.

## Tracking channel timing

A channel runs at the sample rate; there is no separate epoch clock. In
each period:

1. For every sample the correlators multiply the sample by the 3-level
   carrier replica and accumulate the six E/P/L sums.
2. When the code NCO passes the last chip of the code (1023 or 4092
   chips), `last` is raised and the sums are dumped.
3. The discriminators then run for about 110 clocks: four 18-step CORDIC
   vectoring runs on a single CORDIC, then one 64-bit restoring division.
4. The loop filter updates in one clock.
5. The NCOs load the new increments.

At the 4 MHz sample rate with a faster system clock, the new frequencies
arrive long before the next sample. In the testbenches one sample comes
every clock, so the command lands about 110 samples into the next period;
the loops do not notice.

The replica uses E/L spacing of ±0.5 chip for GPS and ±0.125 chip for
Galileo BOC(1,1). The DLL discriminator is
s·(|L| − |E|)/(|L| + |E|), with s = 0.5 for GPS and s = 1/4.8 for Galileo.
The 1/4.8 comes from the 1 − 3|τ| slope of the BOC(1,1) correlation.

The lock indicator is an up/down counter from 0 to 63. It counts up when
|Ip| > 2|Qp| and down otherwise; the channel is locked at 16 or more.

**Hand-over.** `start` loads the NCOs with `init_chip` (whole chips) and
`init_fd`, sets the loop-filter state to `init_fd`, and, for GPS, refills
the code memory. The refill takes 1023 clocks.

The NCOs count every sample from `start` on, even while the memory fills.
Software can therefore project an acquisition result to the start time
with plain arithmetic:

```
chip_now = chip_acq + (T_RX_now − T_RX_capture) · (1.023e6 + SF·f_acq) / 4e6   (mod code length)
```

Software should start the channel at a sample where this is close to a
whole chip. The testbenches wait for a phase within 1/8 chip of a whole
chip, which is good enough for the ±0.125 chip Galileo discriminator.

## Acquisition

The engine first captures one code period of samples: 4000 for GPS, 16000
for Galileo. It then searches one cell at a time. For each cell it presets
an NCO to the cell's code phase and Doppler and replays the buffer through
its own signal generator and prompt correlator. It keeps the strongest
Ip² + Qp² and the sum over all cells. `found` is set if the peak exceeds 8
times the mean.

The default grid has:

- GPS: 21 bins of 500 Hz × 2046 half-chip phases;
- Galileo: 81 bins of 125 Hz × 8184 phases.

A cell costs one code period of clocks, so a full GPS search is about
1.7·10⁸ clocks. The result is reported as the code phase of the first
captured sample, together with that sample's T_RX, for the hand-over
above.

Galileo E1-B primary codes are memory codes. Software writes them into the
acquisition engine and into each Galileo channel: 128 words of 32 chips,
selected with `CODE_SEL`.

## GPS navigation decoder

The decoder works on the sign of Ip from each 1 ms period:

1. **Bit sync.** It keeps a 20-bin histogram of sign changes. The first bin
   to collect 8 changes marks the bit edge.
2. **Bits.** Each bit is the majority of its 20 signs.
3. **Frame sync.** A 30-bit window that holds the preamble 10001011 in
   either polarity and passes parity starts a subframe. Frame sync is
   dropped when a later TLM word no longer holds the preamble.
4. **Words.** Each word is checked against the (32,26) parity with the D29*
   and D30* bits of the previous word. It is put out on `word`, and the top
   raises `irq_word` and latches the word in `NAV_WORD`.
5. **Ephemeris flag.** Each parity-correct HOW gives a subframe ID; the
   D30* correction is included. `eph_valid` rises once subframes 1, 2 and 3
   have all been seen.

Galileo channels have no decoder. They give the prompt sign of each 4 ms
symbol. Software declares Galileo ephemeris through the `GAL_EPH`
register.

## Observations and mode control

Every `MEAS_PERIOD` samples (400000, that is 10 Hz at 4 MHz), `obs_gen`
latches, in the same clock, T_RX and for every channel:

- the code chip and chip fraction (τ_NCO);
- the count of code periods;
- f_d.

Software forms pseudoranges and Dopplers from these. The snapshot's code
phase belongs to the sample with index T_RX − 1 (0-based).

`mode_controller` puts all channels in ultra-tight mode when three things
hold: at least 4 channels are both locked and have ephemeris, software
reports the navigation filter running (`CTRL[1]`), and scalar mode is not
forced (`CTRL[0]`). Otherwise it keeps them in scalar mode. It counts the
switches into ultra-tight mode.

## Register bus

The bus is a single-cycle bus with 12-bit word addresses. A write takes
effect at the clock edge; a read returns data the next clock. The full map
is at the top of `rtl/reg_bank.sv`; in short:

| Address | Register |
|---|---|
| `0x000` | `CTRL`: force scalar, navigation filter running |
| `0x001` | `GAL_EPH` |
| `0x002` | `ACQ_CMD` |
| `0x003` | `CODE_SEL` |
| `0x004` | `MODE` |
| `0x005` | `ACQ_RES` |
| `0x006` | `ACQ_FD` |
| `0x007` | `MEAS_RX` |
| `0x008`–`0x00F` | the two gain sets, Q16.16 |
| `0x010+c` | channel enable/PRN/start |
| `0x020+c` | initial chip |
| `0x030+c` | initial Doppler |
| `0x040+c` | ξ = FDOT, Hz/s, Q16.16 |
| `0x050` | `ACQ_CAP` |
| `0x080`–`0x0FF` | code words |
| `0x400+c` | status |
| `0x410+c` | `OBS_CODE` |
| `0x420+c` | `OBS_FD` |
| `0x430+c` | `OBS_EPOCH` |
| `0x440+c` | `NAV_WORD` |

## Where this design departs from the published receiver

- **Loop filters.** The published receiver runs the loop filters as
  software on the processor, next to the navigation filter. Here each
  channel has its own hardware loop filter, and ξ reaches it through a
  register. The equations are the same.
- **Mode switch.** The STL→VTL decision was part of the management
  software; here it is a small hardware block with a software override.
- **Bus.** The processor interconnect (AMBA on the Zynq) is replaced by a
  plain register bus.
- **Fixed point.** All fixed-point formats, the 3-bit carrier table, the
  correlator widths, the discriminator laws, the CORDIC, the divider, the
  lock indicator, the acquisition method and grid, and the register map are
  this design's choices. The published description names these blocks
  without giving their insides.
- **Not built.** There is no Galileo I/NAV decoder (de-interleaving,
  Viterbi decoding, CRC), no navigation filter and no IMU interface. The
  navigation filter is software in the published work too.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. A testbench is built
and run with plain Verilator, for example:

```
verilator --binary --timing -y rtl rtl/utalfa_pkg.sv rtl/gps_parity_pkg.sv \
          tb/tb_tracking_channel.sv --top-module tb_tracking_channel -o sim
./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_loop_filter` | the equations above against a model, in both modes |
| `tb_nco` | phase accumulation, code wrap and epoch count |
| `tb_gps_ca_gen` | all 32 PRNs against an independent G1/G2-delay model and the published first-10-chip octal values |
| `tb_signal_generator` | E/P/L chips, BOC sub-carrier and carrier table |
| `tb_correlators` | sums against a model |
| `tb_discriminators` | the three error laws against real-valued references |
| `tb_nav_decoder_gps` | eight encoded subframes with inverted polarity, a mid-bit start, sign errors and one corrupted word |
| `tb_tracking_channel` | see below |
| `tb_acquisition` | a GPS satellite found, an absent PRN rejected, and a Galileo BOC satellite found, each on a reduced grid |
| `tb_data_handler`, `tb_obs_gen`, `tb_mode_controller`, `tb_reg_bank` | their rules, with random stimulus |
| `tb_utalfa_receiver` | see below |
| `tb_utalfa_receiver_full` | see below |

`tb_tracking_channel` is a closed-loop test on a synthetic GPS signal with
noise, a 1234 Hz Doppler and an 8 Hz/s Doppler rate. It runs in scalar
mode and then in ultra-tight mode with the true rate as ξ. It checks that
f_d stays within 5 Hz and the code phase within 0.1 chip, and that the
decoder reaches bit sync.

`tb_utalfa_receiver` runs the whole receiver on 2 GPS and 4 Galileo
satellites, with the testbench acting as the processor. It goes through:

- acquisition and hand-over;
- Galileo code loading;
- locks;
- a GPS TLM word decoded with correct parity;
- 10 ms snapshots checked against the true code phase (0.3 chip) and
  Doppler (5 Hz);
- the switch into ultra-tight mode, a forced return and re-entry.

It counts each of these and fails if any never happens. It reduces the
acquisition grid and the snapshot period.

`tb_utalfa_receiver_full` runs the same scenario with every parameter at
its default. The full acquisition search cannot finish in a simulation
run, so there it is only started and checked to be searching. About 1.15 s
of signal is simulated (4.6 million samples).

## Limits of the verification

- **Noise.** Tracking at low C/N0, down to 20–25 dB-Hz in the published
  experiments, was not simulated. The synthetic signals are strong.
- **Navigation data.** The GPS ephemeris flag has been tested only at block
  level, because eight subframes take 48 s of signal.
- **Acquisition.** A complete default-size search has not been simulated.
