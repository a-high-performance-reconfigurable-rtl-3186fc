// ets_sequencer: one complete TDR measurement by phase-shift equivalent-time
// sampling (ETS) and analog-to-probability conversion (APC).
//
// The measurement follows the paper's three steps:
//   Step 1  one probing: the probe is launched once and P real-time samples
//           are taken, one per system-clock period Ts (sample index p).
//   Step 2  Step 1 is repeated M times; for every p the number of samples in
//           which the comparator said 1 is counted. The count divided by M is
//           the probability that encodes the voltage at that instant.
//   Step 3  the sampling clock is moved one phase step tau_d = Ts/J later
//           through the PLL's dynamic phase shift and Step 2 is repeated,
//           J times in all. Count (p, j) is the sample at p*Ts + j*tau_d.
// The J samples with the same p form SET p. The whole measurement takes about
// P*M*J*Ts plus the phase-shift time.
//
// Choices of this design, where the paper gives no detail:
//  * Each phase position starts with one extra probing that is not counted.
//    It fills the sample pipeline, lets the phase zone settle and makes the
//    echo of the previous probing the same for every counted probing.
//  * The probe is requested in the slot before cfg_slot, so the impulse
//    leaves in real-time slot cfg_slot; with cfg_slot = 1 SET 0 is taken before
//    the probe and can serve as the low-frequency noise reference.
//  * After the last position one more phase step is issued: J steps of Ts/J
//    bring the sampling clock back to where it started.
//  * The sampling-clock phase (j*tau_d plus the fine delay-line setting) is
//    tracked here to tell rx_capture which edge to use (zone) and to move the
//    sample index back by one when the fine delay pushes the phase past Ts.
//  * The P counts of a phase position are written to the waveform buffer one
//    per cycle after the last probing, then the counters are cleared.
//
// PLL handshake: psen is a one-cycle request with psincdec = 1 (later phase);
// the next position starts on psdone. rx_capture delivers each sample two
// cycles after its sampling cycle.
`timescale 1ps / 1fs
module ets_sequencer
  import itdr_pkg::*;
#(
  parameter int unsigned P_MAX   = P_DEFAULT,   // largest P (SETs)
  parameter int unsigned J       = J_DEFAULT,   // phase positions per Ts
  parameter int unsigned M_MAX   = M_DEFAULT,   // largest M (probings per position)
  parameter int unsigned TS      = TS_FS,       // sampling period, fs
  parameter int unsigned TAP     = TAP_FS,      // delay-line tap, fs
  localparam int unsigned P_W    = $clog2(P_MAX + 1),
  localparam int unsigned J_W    = $clog2(J),
  localparam int unsigned CNT_W  = $clog2(M_MAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration, held while busy
  input  logic             start,
  input  logic [CNT_W-1:0] cfg_m,        // M, 1..M_MAX
  input  logic [P_W-1:0]   cfg_p,        // P, 2..P_MAX
  input  logic [P_W-1:0]   cfg_slot,     // real-time slot of the probe, < cfg_p
  input  logic             cfg_probe,    // 1: transmit probes, 0: background
  input  tap_t             fine_tap,     // sampling-clock delay-line taps
  output logic             busy,
  output logic             done,         // one cycle at the end
  // probe and sampling
  output logic             fire,         // to probe_pulse_gen
  output zone_e            zone,         // to rx_capture
  input  logic             sample,       // from rx_capture
  // PLL dynamic phase shift
  output logic             psen,
  output logic             psincdec,
  input  logic             psdone,
  // waveform buffer write
  output logic             wr_en,
  output bank_e            wr_bank,
  output logic [P_W-1:0]   wr_p,
  output logic [J_W-1:0]   wr_j,
  output logic [CNT_W-1:0] wr_data,
  output logic [J_W-1:0]   phase_idx     // current phase position j
);

  localparam int unsigned STEP = TS / J;  // tau_d in fs

  typedef enum logic [2:0] {
    S_IDLE, S_RUN, S_DRAIN, S_WRITE, S_SHIFT, S_WAIT
  } state_e;

  state_e            state;
  logic [P_W-1:0]    c;          // real-time slot in the probing
  logic [CNT_W-1:0]  m;          // probing number, 0 = uncounted warm-up
  logic [J_W-1:0]    j;
  logic [1:0]        drain;
  logic [P_W-1:0]    wp;
  logic [CNT_W-1:0]  acc [P_MAX];
  bank_e             bank;

  // index pipeline, aligned with the two-cycle latency of rx_capture
  logic [2:0]        vld_pipe;
  logic [P_W-1:0]    idx_pipe [3];

  // ---- sampling phase and zone -------------------------------------------
  logic [31:0] phase_fs;
  logic        wrapped;
  logic [31:0] phase_mod;
  always_comb begin
    phase_fs  = 32'(j) * STEP + 32'(fine_tap) * TAP;
    wrapped   = (phase_fs >= TS);
    phase_mod = wrapped ? phase_fs - TS : phase_fs;
    if (phase_mod < TS / 4)          zone = ZONE_EARLY;
    else if (phase_mod < 3 * TS / 4) zone = ZONE_MID;
    else                             zone = ZONE_LATE;
  end

  logic [P_W-1:0] slot_prev;
  assign slot_prev = (cfg_slot == '0) ? P_W'(cfg_p - 1'b1) : cfg_slot - 1'b1;

  assign busy      = (state != S_IDLE);
  assign fire      = (state == S_RUN) && cfg_probe && (c == slot_prev);
  assign psen      = (state == S_SHIFT);
  assign psincdec  = 1'b1;
  assign phase_idx = j;

  assign wr_en   = (state == S_WRITE);
  assign wr_bank = bank;
  assign wr_p    = wp;
  assign wr_j    = j;
  assign wr_data = acc[wp];

  // ---- control -----------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      m     <= '0;
      j     <= '0;
      drain <= '0;
      wp    <= '0;
      done  <= 1'b0;
      bank  <= BANK_PROBE;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          c     <= '0;
          m     <= '0;
          j     <= '0;
          bank  <= cfg_probe ? BANK_PROBE : BANK_BACKGROUND;
        end
        S_RUN: begin
          if (c == P_W'(cfg_p - 1'b1)) begin
            c <= '0;
            if (m == cfg_m) begin
              state <= S_DRAIN;
              drain <= '0;
            end else begin
              m <= m + 1'b1;
            end
          end else begin
            c <= c + 1'b1;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 2'd3) begin
            state <= S_WRITE;
            wp    <= '0;
          end
        end
        S_WRITE: begin
          wp <= wp + 1'b1;
          if (wp == P_W'(cfg_p - 1'b1)) state <= S_SHIFT;
        end
        S_SHIFT: state <= S_WAIT;
        S_WAIT: if (psdone) begin
          if (j == J_W'(J - 1)) begin
            j     <= '0;
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            j     <= j + 1'b1;
            m     <= '0;
            c     <= '0;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- APC counting ------------------------------------------------------
  logic           acc_vld;
  logic [P_W-1:0] acc_idx;
  assign acc_vld = wrapped ? vld_pipe[2] : vld_pipe[1];
  assign acc_idx = wrapped ? idx_pipe[2] : idx_pipe[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_pipe <= '0;
      for (int i = 0; i < 3; i++) idx_pipe[i] <= '0;
      for (int i = 0; i < int'(P_MAX); i++) acc[i] <= '0;
    end else begin
      vld_pipe    <= {vld_pipe[1:0], (state == S_RUN) && (m != '0)};
      idx_pipe[0] <= c;
      idx_pipe[1] <= idx_pipe[0];
      idx_pipe[2] <= idx_pipe[1];
      if (acc_vld && sample) acc[acc_idx] <= acc[acc_idx] + 1'b1;
      if (state == S_WRITE) acc[wp] <= '0;
    end
  end

endmodule
