// idelay3_model: behavioural model of a tap-programmable delay line (the
// FPGA's IDELAY3 primitive), for simulation only.
//
// 512 taps span 1.1 ns, so one tap is about 2.148 ps; the delay is linear in
// the tap value and has no insertion delay. The delay is a transport delay:
// every edge of idatain reappears on dataout after the current tap delay. The
// real primitive's load/increment control port is reduced to the tap value.
`timescale 1ps / 1fs
module idelay3_model #(
  parameter real TAP_PS = 1100.0 / 512.0
) (
  input  logic       idatain,
  input  logic [8:0] cntvaluein,
  output logic       dataout
);
  real d_ps;
  assign d_ps = real'(cntvaluein) * TAP_PS;
  initial dataout = 1'b0;
  always @(idatain) dataout <= #(d_ps) idatain;
endmodule
