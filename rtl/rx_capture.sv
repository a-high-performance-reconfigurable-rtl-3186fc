// rx_capture: samples the comparator output and hands it to the system clock.
//
// The differential receiver of the I/O acts as the comparator; its output
// D_O is sampled by a flip-flop on the sampling (receive) clock, as in the
// paper's schematic of the jitter-based scheme. The sampling clock has the
// same period Ts as the system clock but is shifted by a phase phi in [0, Ts)
// that the ETS sweep changes step by step, so the sample cannot be moved to
// the system clock by one fixed edge: for some phases it would change right at
// that edge. The paper does not describe this crossing; this design picks,
// from the sampling phase, the system-clock edge nearest the middle of the
// interval in which the sampled bit is stable, which leaves at least Ts/4 of
// margin on either side:
//
//   zone EARLY (phi <  Ts/4)         capture on the falling edge half a cycle
//                                    later, then one extra rising-edge stage
//   zone MID   (Ts/4 <= phi < 3Ts/4) capture on the next rising edge
//   zone LATE  (phi >= 3Ts/4)        capture on the falling edge 1.5 cycles
//                                    later
//
// Timing: the bit sampled at the receive edge that follows the rising system
// edge of cycle k appears on "sample" after the rising system edge of cycle
// k+2, in every zone, so the real-time index of a sample does not depend on the
// phase. "zone" must be held steady while samples are being used, and for two
// cycles after it changes the output is not meaningful.
`timescale 1ps / 1fs
module rx_capture
  import itdr_pkg::*;
(
  input  logic  rx_clk,    // phase-shifted sampling clock
  input  logic  sys_clk,   // system clock
  input  logic  d_o,       // comparator output
  input  zone_e zone,      // phase zone of rx_clk against sys_clk (sys_clk domain)
  output logic  sample     // D_O sample, sys_clk domain, latency 2 cycles
);

  logic s_rx;      // the sampling flip-flop
  logic s_fall;    // re-captured on the falling system edge
  logic s_rise;    // re-captured on the rising system edge
  logic s_early;   // falling-edge capture delayed to the rising edge

  always_ff @(posedge rx_clk)  s_rx   <= d_o;
  always_ff @(negedge sys_clk) s_fall <= s_rx;

  always_ff @(posedge sys_clk) begin
    s_rise  <= s_rx;
    s_early <= s_fall;
    unique case (zone)
      ZONE_EARLY: sample <= s_early;
      ZONE_MID:   sample <= s_rise;
      default:    sample <= s_fall;
    endcase
  end

endmodule
