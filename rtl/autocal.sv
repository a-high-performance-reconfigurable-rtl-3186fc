// autocal: aligns the jitter clock with the sampling clock.
//
// For the jitter-based scheme to work, the sampling instant must fall on the
// middle of the rising edge of the jitter clock: there the comparator output
// is 1 with probability 0.5, the comparator's offset and hysteresis are
// cancelled, and the probability varies linearly with the reflected voltage.
// The paper aligns the two clocks by adjusting two delays until the
// probability approaches 0.5: the five chained delay lines on the jitter-clock
// path, which must share one tap value (coarse, five taps per step), and an
// independent delay line on the sampling-clock path (fine, one tap per step).
// The paper gives that goal, not the search; this design uses two binary
// (successive-approximation) searches with the probe switched off:
//
//   1. coarse, fine = 0: find the largest coarse setting at which more than
//      half of CAL_N samples are 1 (more jitter-path delay puts the edge later,
//      so the probability falls as coarse grows), then step one past it;
//   2. fine: find the largest fine setting at which at most half of CAL_N
//      samples are 1 (more sampling delay samples higher on the edge, so the
//      probability rises as fine grows).
//
// Each trial waits SETTLE cycles after changing a tap (delay line and the
// sample pipeline), then counts CAL_N consecutive samples. load writes both
// taps directly. A last trial at the chosen setting gives last_count, the
// number of ones out of CAL_N there.
//
// Timing: start to done is 2*TAP_W + 1 trials of SETTLE + CAL_N + 1 cycles.
`timescale 1ps / 1fs
module autocal
  import itdr_pkg::*;
#(
  parameter int unsigned CAL_N  = 1024,  // samples per trial
  parameter int unsigned SETTLE = 8,     // cycles after a tap change
  localparam int unsigned N_W   = $clog2(CAL_N + 1),
  localparam int unsigned S_W   = $clog2(SETTLE + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           load,          // write coarse/fine from cfg_*
  input  tap_t           cfg_coarse,
  input  tap_t           cfg_fine,
  input  logic           sample,        // comparator sample from rx_capture
  output tap_t           coarse_tap,    // shared by the five jitter-path lines
  output tap_t           fine_tap,      // sampling-clock line
  output logic           busy,
  output logic           done,
  output logic [N_W-1:0] last_count
);

  typedef enum logic [1:0] {C_IDLE, C_SETTLE, C_COUNT, C_DECIDE} cstate_e;

  cstate_e          state;
  logic             fine_phase;   // 0: coarse search, 1: fine search
  logic             verify;       // final trial at the chosen setting
  logic [TAP_W-1:0] bit_mask;     // tap bit under trial
  tap_t             result;       // bits decided so far
  logic [S_W-1:0]   wait_cnt;
  logic [N_W-1:0]   n_cnt;
  logic [N_W-1:0]   ones;
  logic             above_half;

  assign busy       = (state != C_IDLE);
  assign above_half = (32'(ones) > CAL_N / 2);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      fine_phase <= 1'b0;
      verify     <= 1'b0;
      bit_mask   <= '0;
      result     <= '0;
      wait_cnt   <= '0;
      n_cnt      <= '0;
      ones       <= '0;
      coarse_tap <= '0;
      fine_tap   <= '0;
      done       <= 1'b0;
      last_count <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: begin
          if (load) begin
            coarse_tap <= cfg_coarse;
            fine_tap   <= cfg_fine;
          end else if (start) begin
            fine_phase <= 1'b0;
            verify     <= 1'b0;
            bit_mask   <= TAP_W'(1) << (TAP_W - 1);
            result     <= '0;
            coarse_tap <= TAP_W'(1) << (TAP_W - 1);
            fine_tap   <= '0;
            wait_cnt   <= '0;
            state      <= C_SETTLE;
          end
        end
        C_SETTLE: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (32'(wait_cnt) == SETTLE - 1) begin
            n_cnt <= '0;
            ones  <= '0;
            state <= C_COUNT;
          end
        end
        C_COUNT: begin
          n_cnt <= n_cnt + 1'b1;
          ones  <= ones + N_W'(sample);
          if (32'(n_cnt) == CAL_N - 1) state <= C_DECIDE;
        end
        C_DECIDE: begin
          automatic tap_t trial = result | bit_mask;
          automatic logic keep  = fine_phase ? !above_half : above_half;
          automatic tap_t res_n = keep ? trial : result;
          wait_cnt   <= '0;
          if (verify) begin
            // trial at the final setting
            last_count <= ones;
            verify     <= 1'b0;
            state      <= C_IDLE;
            done       <= 1'b1;
          end else if (bit_mask != TAP_W'(1)) begin
            // next bit of the same search
            result   <= res_n;
            bit_mask <= bit_mask >> 1;
            if (fine_phase) fine_tap   <= res_n | (bit_mask >> 1);
            else            coarse_tap <= res_n | (bit_mask >> 1);
            state    <= C_SETTLE;
          end else if (!fine_phase) begin
            // coarse done: one step past the last setting above one half
            coarse_tap <= (res_n == '1) ? res_n : res_n + 1'b1;
            fine_phase <= 1'b1;
            result     <= '0;
            bit_mask   <= TAP_W'(1) << (TAP_W - 1);
            fine_tap   <= TAP_W'(1) << (TAP_W - 1);
            state      <= C_SETTLE;
          end else begin
            fine_tap <= res_n;
            verify   <= 1'b1;
            state    <= C_SETTLE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
