// itdr_top: fabric logic of an integrated time-domain reflectometer built on a
// bidirectional differential I/O, using jitter-based analog-to-probability
// conversion (JAPC).
//
// The transmitter is the I/O's negative-side tristate buffer, pulsed on for
// about 1 ns (t_n); the receiver is the I/O's differential input, comparing the
// reflected signal on the negative pad with a jitter clock driven onto the
// positive pad. The jitter on the jitter clock's rising edge turns the
// comparator into a probability converter: the fraction of 1s over M
// repeated probings encodes the reflected voltage. Equivalent-time sampling
// moves the sampling clock through J phase steps of Ts/J using the PLL's
// dynamic phase shift, giving P*J samples per waveform.
//
// Blocks:
//   probe_pulse_gen  AND of the delayed and inverted system clock -> t_n
//   rx_capture       sampling flip-flop on rx_clk, hand-over to sys_clk
//   ets_sequencer    Steps 1-3 (probing, M-fold counting, phase stepping)
//   waveform_buffer  P x J counts for a probe and a background measurement
//   autocal          aligns jitter clock and sampling clock (p = 0.5)
//   noise_reduction  raw / minus background / minus SET 0 read-out
//
// Outside this module, as FPGA primitives: the PLL with dynamic phase shift
// (psen, psincdec, psdone; its output feeds the sampling and jitter clock
// paths), the delay line on the system clock that sets the probe width
// (probe_tap -> sys_clk_dly), the five chained delay lines on the jitter-clock
// path sharing coarse_tap (-> D_P of the I/O) and the delay line on the
// sampling-clock path (fine_tap -> rx_clk), and the I/O itself (t_n -> T_N,
// D_O -> d_o; D_N and T_P are tied to 1).
//
// Host side: plain configuration and status ports. A measurement (start_meas)
// or a calibration (start_cal) is accepted only while neither is running.
// Read-out requests return data two cycles later.
`timescale 1ps / 1fs
module itdr_top
  import itdr_pkg::*;
#(
  parameter int unsigned P_MAX  = P_DEFAULT,   // SETs per waveform
  parameter int unsigned J      = J_DEFAULT,   // phase positions per Ts
  parameter int unsigned M_MAX  = M_DEFAULT,   // largest M
  parameter int unsigned CAL_N  = 1024,        // samples per calibration trial
  localparam int unsigned P_W   = $clog2(P_MAX + 1),
  localparam int unsigned J_W   = $clog2(J),
  localparam int unsigned CNT_W = $clog2(M_MAX + 1),
  localparam int unsigned CAL_W = $clog2(CAL_N + 1)
) (
  // clocks and reset
  input  logic                  sys_clk,      // system (transmit) clock, period Ts
  input  logic                  sys_clk_dly,  // sys_clk after the probe-width delay line
  input  logic                  rx_clk,       // sampling clock: PLL output after fine delay line
  input  logic                  rst_n,        // synchronous to sys_clk
  // I/O buffer
  output logic                  t_n,          // probe: enable of the negative-side buffer
  input  logic                  d_o,          // differential receiver output
  // PLL dynamic phase shift (psclk = sys_clk)
  output logic                  psen,
  output logic                  psincdec,
  input  logic                  psdone,
  // delay-line settings
  output tap_t                  probe_tap,    // probe width
  output tap_t                  coarse_tap,   // each of the five jitter-clock lines
  output tap_t                  fine_tap,     // sampling-clock line
  // host configuration
  input  logic                  start_meas,
  input  logic [CNT_W-1:0]      cfg_m,
  input  logic [P_W-1:0]        cfg_p,
  input  logic [P_W-1:0]        cfg_slot,
  input  logic                  cfg_probe,    // 1: probe waveform, 0: background
  input  tap_t                  cfg_probe_tap,
  input  logic                  start_cal,
  input  logic                  cal_load,
  input  tap_t                  cfg_coarse,
  input  tap_t                  cfg_fine,
  // host status
  output logic                  meas_busy,
  output logic                  meas_done,
  output logic                  cal_busy,
  output logic                  cal_done,
  output logic [CAL_W-1:0]      cal_count,
  output logic [J_W-1:0]        phase_idx,
  output logic [31:0]           probe_count,
  // host read-out
  input  logic                  rd_req,
  input  rd_mode_e              rd_mode,
  input  bank_e                 rd_bank,
  input  logic [P_W-1:0]        rd_p,
  input  logic [J_W-1:0]        rd_j,
  output logic                  rd_valid,
  output logic signed [CNT_W:0] rd_data
);

  logic            fire;
  zone_e           zone;
  logic            sample;
  logic            wr_en;
  bank_e           wr_bank;
  logic [P_W-1:0]  wr_p;
  logic [J_W-1:0]  wr_j;
  logic [CNT_W-1:0] wr_data;
  bank_e           ra_bank, rb_bank;
  logic [P_W-1:0]  ra_p, rb_p;
  logic [J_W-1:0]  ra_j, rb_j;
  logic [CNT_W-1:0] ra_data, rb_data;

  always_ff @(posedge sys_clk) begin
    if (!rst_n) probe_tap <= '0;
    else        probe_tap <= cfg_probe_tap;
  end

  probe_pulse_gen u_probe (
    .sys_clk     (sys_clk),
    .sys_clk_dly (sys_clk_dly),
    .rst_n       (rst_n),
    .fire        (fire),
    .t_n         (t_n),
    .pulse_count (probe_count)
  );

  rx_capture u_rx (
    .rx_clk  (rx_clk),
    .sys_clk (sys_clk),
    .d_o     (d_o),
    .zone    (zone),
    .sample  (sample)
  );

  ets_sequencer #(
    .P_MAX (P_MAX),
    .J     (J),
    .M_MAX (M_MAX)
  ) u_seq (
    .clk       (sys_clk),
    .rst_n     (rst_n),
    .start     (start_meas && !cal_busy),
    .cfg_m     (cfg_m),
    .cfg_p     (cfg_p),
    .cfg_slot  (cfg_slot),
    .cfg_probe (cfg_probe),
    .fine_tap  (fine_tap),
    .busy      (meas_busy),
    .done      (meas_done),
    .fire      (fire),
    .zone      (zone),
    .sample    (sample),
    .psen      (psen),
    .psincdec  (psincdec),
    .psdone    (psdone),
    .wr_en     (wr_en),
    .wr_bank   (wr_bank),
    .wr_p      (wr_p),
    .wr_j      (wr_j),
    .wr_data   (wr_data),
    .phase_idx (phase_idx)
  );

  autocal #(
    .CAL_N (CAL_N)
  ) u_cal (
    .clk        (sys_clk),
    .rst_n      (rst_n),
    .start      (start_cal && !meas_busy),
    .load       (cal_load && !meas_busy),
    .cfg_coarse (cfg_coarse),
    .cfg_fine   (cfg_fine),
    .sample     (sample),
    .coarse_tap (coarse_tap),
    .fine_tap   (fine_tap),
    .busy       (cal_busy),
    .done       (cal_done),
    .last_count (cal_count)
  );

  waveform_buffer #(
    .P_MAX (P_MAX),
    .J     (J),
    .W     (CNT_W)
  ) u_buf (
    .clk     (sys_clk),
    .wr_en   (wr_en),
    .wr_bank (wr_bank),
    .wr_p    (wr_p),
    .wr_j    (wr_j),
    .wr_data (wr_data),
    .ra_bank (ra_bank),
    .ra_p    (ra_p),
    .ra_j    (ra_j),
    .ra_data (ra_data),
    .rb_bank (rb_bank),
    .rb_p    (rb_p),
    .rb_j    (rb_j),
    .rb_data (rb_data)
  );

  noise_reduction #(
    .P_MAX (P_MAX),
    .J     (J),
    .W     (CNT_W)
  ) u_nr (
    .clk      (sys_clk),
    .rst_n    (rst_n),
    .rd_req   (rd_req),
    .rd_mode  (rd_mode),
    .rd_bank  (rd_bank),
    .rd_p     (rd_p),
    .rd_j     (rd_j),
    .rd_valid (rd_valid),
    .rd_data  (rd_data),
    .ra_bank  (ra_bank),
    .ra_p     (ra_p),
    .ra_j     (ra_j),
    .ra_data  (ra_data),
    .rb_bank  (rb_bank),
    .rb_p     (rb_p),
    .rb_j     (rb_j),
    .rb_data  (rb_data)
  );

endmodule
