// probe_pulse_gen: probe impulse for the transmitter of the reflectometer.
//
// The transmitter is the negative-side tristate output buffer of a
// bidirectional differential I/O. Its data input is tied to 1 and its
// enable, T_N, is driven by this block: enabling the buffer for a short time
// launches an impulse-like probe into the device under test. The impulse is
// formed, as in the paper, by ANDing a delayed copy of the system clock with
// the inverted system clock:
//
//   t_n = sys_clk_dly & ~sys_clk & armed
//
// sys_clk_dly is the system clock after a tap-programmable delay line (the
// delay sets the pulse width, up to the line's 1.1 ns), so t_n is high from
// the falling edge of sys_clk for that delay. The paper's gate has no third
// input; this design adds "armed", a register that lets the pulse through
// only in the probing slot chosen by the sequencer (one pulse every P
// cycles) and lets a whole measurement run without any probe (background
// measurement for system-tone removal). armed is loaded from "fire" at a
// rising edge of sys_clk, while ~sys_clk is 0, and is stable across the
// falling edge, so it cannot clip or split the pulse provided the delay is
// less than half a clock period.
//
// Timing: fire high in cycle k gives one pulse starting at the falling edge
// of cycle k+1. pulse_count counts launched pulses (rising edges of armed).
`timescale 1ps / 1fs
module probe_pulse_gen (
  input  logic        sys_clk,      // system (transmit) clock
  input  logic        sys_clk_dly,  // system clock after the width delay line
  input  logic        rst_n,        // active-low reset, synchronous to sys_clk
  input  logic        fire,         // request one probe in the next cycle
  output logic        t_n,          // tristate enable of the transmit buffer
  output logic [31:0] pulse_count   // probes launched since reset
);

  logic armed;

  always_ff @(posedge sys_clk) begin
    if (!rst_n) begin
      armed       <= 1'b0;
      pulse_count <= '0;
    end else begin
      armed <= fire;
      if (fire) pulse_count <= pulse_count + 32'd1;
    end
  end

  // The AND gate of the clock structure (delayed clock, inverted clock).
  assign t_n = sys_clk_dly & ~sys_clk & armed;

endmodule
