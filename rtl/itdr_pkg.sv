// itdr_pkg: constants and types shared by the jitter-based analog-to-probability
// conversion (JAPC) time-domain reflectometer.
//
// The measurement defaults follow the prototype: a 10 ns real-time sampling
// period Ts, P = 10 real-time samples per probing, J = 560 phase positions per
// Ts (tau_d = Ts/J, about 17.86 ps, a 56 GSPS equivalent rate) and up to
// M = 100 000 repeated probings per phase position. The delay lines have 512
// taps spanning 1.1 ns. Times are kept in femtoseconds so that the phase
// position of the sampling clock can be tracked with integers. JIT_UNITS and
// PS_CYCLES describe the hardware around the logic (the logic drives one
// coarse tap value to all five lines and waits for the PLL's done signal
// rather than counting cycles); the testbenches use them, the RTL does not.
`timescale 1ps / 1fs
package itdr_pkg;

  // Real-time sampling period Ts in fs (100 MSPS).
  localparam int unsigned TS_FS      = 10_000_000;
  // Phase positions per Ts (ETS sub-samples in one SET).
  localparam int unsigned J_DEFAULT  = 560;
  // Real-time samples per probing (number of SETs).
  localparam int unsigned P_DEFAULT  = 10;
  // Largest number of repeated probings per phase position.
  localparam int unsigned M_DEFAULT  = 100_000;
  // Delay-line taps and the delay of one tap (1.1 ns / 512), in fs.
  localparam int unsigned TAPS       = 512;
  localparam int unsigned TAP_W      = $clog2(TAPS);
  localparam int unsigned TAP_FS     = 1_100_000 / TAPS;
  // Number of delay lines chained on the jitter-clock path.
  localparam int unsigned JIT_UNITS  = 5;
  // Clock cycles the PLL takes for one dynamic phase step.
  localparam int unsigned PS_CYCLES  = 12;

  typedef logic [TAP_W-1:0] tap_t;

  // Which of the two stored waveforms a measurement writes.
  typedef enum logic {
    BANK_PROBE      = 1'b0,   // probe transmitted
    BANK_BACKGROUND = 1'b1    // probe suppressed (system-tone background)
  } bank_e;

  // Read-out processing.
  typedef enum logic [1:0] {
    RD_RAW   = 2'd0,          // stored count
    RD_TONE  = 2'd1,          // probe waveform minus background waveform
    RD_LFN   = 2'd2           // SET p minus SET 0 at the same phase position
  } rd_mode_e;

  // Sampling-clock phase zone within Ts, used to pick a safe edge for
  // moving the sample into the system-clock domain (see rx_capture).
  typedef enum logic [1:0] {
    ZONE_EARLY = 2'd0,        // phase in [0, Ts/4)
    ZONE_MID   = 2'd1,        // phase in [Ts/4, 3Ts/4)
    ZONE_LATE  = 2'd2         // phase in [3Ts/4, Ts)
  } zone_e;

endpackage
