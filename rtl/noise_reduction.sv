// noise_reduction: read-out of the measured waveform with the paper's two
// noise-reduction techniques.
//
//   RD_RAW   the stored count of (bank, p, j).
//   RD_TONE  system-tone reduction: count of the probe waveform minus the
//            count of the background waveform (measured without a probe) at
//            the same (p, j). Ripple locked to the system clock repeats in
//            both and cancels.
//   RD_LFN   low-frequency noise reduction: count of SET p minus count of
//            SET 0 at the same phase position j, both from the selected bank.
//            Noise that is slow against one probing (P*Ts) is the same in all
//            SETs of one phase position, and SET 0 holds no reflection, so the
//            difference keeps the reflection and drops that noise. It also
//            removes system tones, whose period is Ts.
//
// The paper gives the arithmetic but not where it runs; here it is done in
// hardware at read-out, one word per cycle, so the host receives corrected
// samples. The result is signed and one bit wider than a count; counts are
// probabilities scaled by M, and the paper uses the probability directly as
// the waveform value after calibration.
//
// Timing: a request (rd_req with mode, bank, p, j) is answered by rd_valid
// and rd_data two cycles later; requests may be issued every cycle.
`timescale 1ps / 1fs
module noise_reduction
  import itdr_pkg::*;
#(
  parameter int unsigned P_MAX = P_DEFAULT,
  parameter int unsigned J     = J_DEFAULT,
  parameter int unsigned W     = $clog2(M_DEFAULT + 1),
  localparam int unsigned P_W  = $clog2(P_MAX + 1),
  localparam int unsigned J_W  = $clog2(J)
) (
  input  logic                clk,
  input  logic                rst_n,
  // request
  input  logic                rd_req,
  input  rd_mode_e            rd_mode,
  input  bank_e               rd_bank,   // bank for RD_RAW and RD_LFN
  input  logic [P_W-1:0]      rd_p,
  input  logic [J_W-1:0]      rd_j,
  // response
  output logic                rd_valid,
  output logic signed [W:0]   rd_data,
  // waveform buffer read ports
  output bank_e               ra_bank,
  output logic [P_W-1:0]      ra_p,
  output logic [J_W-1:0]      ra_j,
  input  logic [W-1:0]        ra_data,
  output bank_e               rb_bank,
  output logic [P_W-1:0]      rb_p,
  output logic [J_W-1:0]      rb_j,
  input  logic [W-1:0]        rb_data
);

  always_comb begin
    ra_p = rd_p;
    ra_j = rd_j;
    rb_j = rd_j;
    unique case (rd_mode)
      RD_TONE: begin
        ra_bank = BANK_PROBE;
        rb_bank = BANK_BACKGROUND;
        rb_p    = rd_p;
      end
      RD_LFN: begin
        ra_bank = rd_bank;
        rb_bank = rd_bank;
        rb_p    = '0;
      end
      default: begin
        ra_bank = rd_bank;
        rb_bank = rd_bank;
        rb_p    = rd_p;
      end
    endcase
  end

  logic     req_q;
  rd_mode_e mode_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_q    <= 1'b0;
      mode_q   <= RD_RAW;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      req_q    <= rd_req;
      mode_q   <= rd_mode;
      rd_valid <= req_q;
      if (req_q) begin
        if (mode_q == RD_RAW) rd_data <= $signed({1'b0, ra_data});
        else                  rd_data <= $signed({1'b0, ra_data}) - $signed({1'b0, rb_data});
      end
    end
  end

endmodule
