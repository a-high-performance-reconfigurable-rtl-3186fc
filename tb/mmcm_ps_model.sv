// mmcm_ps_model: behavioural model of a clock manager with dynamic phase
// shift, for simulation only.
//
// clkout is clkin delayed by phase_idx * TS_PS / J (clkin must have period
// TS_PS and a 50 % duty cycle). A one-cycle psen (on the
// rising edge of psclk) with psincdec = 1 moves phase_idx one step later,
// psincdec = 0 one step earlier, modulo J; psdone pulses for one psclk cycle
// PS_CYCLES cycles after psen, when the new phase takes effect. psen while a
// shift is in progress is ignored. shifts counts completed shifts. While rst
// is high (the clock manager's reset) the phase returns to 0 and psen is
// ignored, as the real part ignores phase-shift requests until it is running
// again; this also keeps a psen that has not yet been reset from starting a
// stray shift.
`timescale 1ps / 1fs
module mmcm_ps_model #(
  parameter real         TS_PS     = 10000.0,
  parameter int unsigned J         = 560,
  parameter int unsigned PS_CYCLES = 12
) (
  input  logic clkin,
  input  logic rst,
  input  logic psclk,
  input  logic psen,
  input  logic psincdec,
  output logic psdone,
  output logic clkout
);
  int unsigned phase_idx = 0;
  int unsigned cnt       = 0;
  bit          busy      = 1'b0;
  bit          dir       = 1'b1;
  int unsigned shifts    = 0;
  real         d_ps;

  assign d_ps = real'(phase_idx) * TS_PS / real'(J);

  initial begin
    clkout = 1'b0;
    psdone = 1'b0;
  end

  // each input rising edge schedules one output period; the delay may exceed
  // half a period, so every edge gets its own process
  always @(posedge clkin) begin
    automatic real d = d_ps;
    fork
      begin
        #(d) clkout = 1'b1;
        #(TS_PS / 2.0) clkout = 1'b0;
      end
    join_none
  end

  always @(posedge psclk) begin
    psdone <= 1'b0;
    if (rst) begin
      busy      = 1'b0;
      cnt       = 0;
      phase_idx = 0;
    end else if (busy) begin
      cnt = cnt + 1;
      if (cnt == PS_CYCLES) begin
        busy   = 1'b0;
        psdone <= 1'b1;
        shifts = shifts + 1;
        if (dir) phase_idx = (phase_idx + 1) % J;
        else     phase_idx = (phase_idx + J - 1) % J;
      end
    end else if (psen) begin
      busy = 1'b1;
      cnt  = 0;
      dir  = psincdec;
    end
  end
endmodule
