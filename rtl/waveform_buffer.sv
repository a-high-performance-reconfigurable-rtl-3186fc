// waveform_buffer: storage for the ETS counts of two measurements.
//
// A measurement produces P x J counts (P SETs of J phase positions). The
// buffer keeps two such waveforms: bank PROBE, measured with the probe
// transmitted, and bank BACKGROUND, measured with the probe suppressed, which
// the paper subtracts to remove system tones. Word (bank, p, j) sits at
// address (bank*P_MAX + p)*J + j. The paper gives the sizes, not the memory
// organisation; this design uses one array with one write port and two
// registered read ports, so that the read-out stage can fetch a count and the
// reference it is corrected with in the same cycle (an FPGA would hold this in
// two copies of a simple dual-port block RAM).
//
// Timing: a write takes effect at the clock edge; a read returns the word one
// cycle after the address. A read of the word being written returns the old
// value.
`timescale 1ps / 1fs
module waveform_buffer
  import itdr_pkg::*;
#(
  parameter int unsigned P_MAX  = P_DEFAULT,
  parameter int unsigned J      = J_DEFAULT,
  parameter int unsigned W      = $clog2(M_DEFAULT + 1),  // count width
  localparam int unsigned P_W   = $clog2(P_MAX + 1),
  localparam int unsigned J_W   = $clog2(J),
  localparam int unsigned DEPTH = 2 * P_MAX * J
) (
  input  logic           clk,
  // write port
  input  logic           wr_en,
  input  bank_e          wr_bank,
  input  logic [P_W-1:0] wr_p,
  input  logic [J_W-1:0] wr_j,
  input  logic [W-1:0]   wr_data,
  // read port A
  input  bank_e          ra_bank,
  input  logic [P_W-1:0] ra_p,
  input  logic [J_W-1:0] ra_j,
  output logic [W-1:0]   ra_data,
  // read port B
  input  bank_e          rb_bank,
  input  logic [P_W-1:0] rb_p,
  input  logic [J_W-1:0] rb_j,
  output logic [W-1:0]   rb_data
);

  localparam int unsigned A_W = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];

  function automatic logic [A_W-1:0] addr(bank_e b, logic [P_W-1:0] p, logic [J_W-1:0] jj);
    return A_W'((32'(b) * P_MAX + 32'(p)) * J + 32'(jj));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_bank, wr_p, wr_j)] <= wr_data;
    ra_data <= mem[addr(ra_bank, ra_p, ra_j)];
    rb_data <= mem[addr(rb_bank, rb_p, rb_j)];
  end

endmodule
