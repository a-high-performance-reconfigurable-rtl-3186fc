// bidi_diff_io_model: behavioural model of the bidirectional differential I/O
// used as a reflectometer, together with the line it is attached to. For
// simulation only.
//
// The negative-side output buffer (data D_N, enable T_N) launches the probe
// onto PAD_N; the positive-side buffer (data D_P, enable T_P) puts the jitter
// clock onto PAD_P; the differential receiver compares PAD_P (+) with PAD_N
// (-) and gives D_O. The analog behaviour is reduced to what a sampling
// flip-flop sees:
//
//  * PAD_N carries the reflection profile of the line, the sum of triangular
//    echoes (time after launch, amplitude, width), plus a system tone locked to
//    the clock period, a slow low-frequency drift and Gaussian thermal noise.
//  * PAD_P carries the jitter clock: around each rising edge of D_P a linear
//    ramp of slope K_MV_PER_PS, clipped to +-RAIL_MV, whose edge time has
//    Gaussian jitter SIGMA_J_PS.
//  * While T_N (with D_N = 1) is driving, PAD_N is high and D_O is 0.
//
// D_O is only evaluated when it is observed: at each rising edge of the
// model-only input sample_clk the comparison is made for that instant and D_O
// is updated. sample_clk should lead the receive clock slightly (the
// testbenches use 1 ps), so that the sampling flip-flop sees this decision.
// probes counts launched probes.
`timescale 1ps / 1fs
module bidi_diff_io_model #(
  parameter real TS_PS        = 10000.0,  // system clock period
  parameter real K_MV_PER_PS  = 2.0,      // slope of the jitter-clock edge
  parameter real RAIL_MV      = 600.0,
  parameter real SIGMA_J_PS   = 4.0,      // 8 mV of jitter noise at K = 2 mV/ps
  parameter real SIGMA_T_MV   = 0.5,      // thermal noise
  parameter real OFFSET_MV    = 20.0,     // comparator offset
  parameter real TONE_MV      = 3.0,      // system-tone amplitude
  parameter real LFN_MV       = 3.0,      // low-frequency drift amplitude
  parameter real LFN_PERIOD_PS = 3.0e8,   // drift period
  parameter real PROBE_MV     = 600.0,
  parameter real PROBE_W_PS   = 1000.0,
  parameter int  N_ECHO       = 2
) (
  input  logic T_P,
  input  logic D_P,
  input  logic T_N,
  input  logic D_N,
  output logic D_O,
  input  logic sample_clk      // model only: instants at which D_O is observed
);
  // echoes: delay after launch (ps), amplitude (mV), base width (ps)
  real echo_t [N_ECHO];
  real echo_a [N_ECHO];
  real echo_w [N_ECHO];

  realtime t_launch = -1.0e12;
  realtime t_jedge  = 0.0;
  int      probes   = 0;

  // default line: the connector echo at 2.9 ns and a weaker echo from the
  // far end of a cable 19.46 ns later (round trips reported for the prototype)
  initial begin
    D_O = 1'b0;
    echo_t[0] = 2900.0;  echo_a[0] = 20.0; echo_w[0] = 1000.0;
    if (N_ECHO > 1) begin
      echo_t[1] = 22360.0; echo_a[1] = -5.0; echo_w[1] = 1000.0;
    end
  end

  always @(posedge T_N) if (D_N) begin
    t_launch = $realtime;
    probes   = probes + 1;
  end
  always @(posedge D_P) t_jedge = $realtime;

  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  function automatic real tri_pulse(real x, real w);
    real ax = (x < 0.0) ? -x : x;
    return (ax >= w / 2.0) ? 0.0 : 1.0 - 2.0 * ax / w;
  endfunction

  // noise-free voltage on PAD_N tau ps after launch, mV
  function automatic real line_mv(real tau);
    real v = 0.0;
    if (tau >= 0.0 && tau < PROBE_W_PS) v += PROBE_MV;
    for (int i = 0; i < N_ECHO; i++) v += echo_a[i] * tri_pulse(tau - echo_t[i], echo_w[i]);
    return v;
  endfunction

  always @(posedge sample_clk) begin
    automatic real t     = $realtime;
    automatic real delta = t - t_jedge;
    automatic real vj, vs, ph;
    if (delta > TS_PS / 2.0) delta -= TS_PS;          // next edge is nearer
    vj = K_MV_PER_PS * (delta - SIGMA_J_PS * gauss());
    if (vj >  RAIL_MV) vj =  RAIL_MV;
    if (vj < -RAIL_MV) vj = -RAIL_MV;
    if (!T_P) vj = 0.0;
    ph = (t - TS_PS * $floor(t / TS_PS)) / TS_PS;
    vs = line_mv(t - t_launch)
       + TONE_MV * $sin(2.0 * 3.14159265358979 * ph)
       + LFN_MV  * $sin(2.0 * 3.14159265358979 * t / LFN_PERIOD_PS)
       + SIGMA_T_MV * gauss();
    if (T_N && D_N) D_O <= 1'b0;                      // blind spot while launching
    else            D_O <= (vj > vs + OFFSET_MV);
  end
endmodule
