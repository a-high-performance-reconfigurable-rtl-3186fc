// tb_autocal: checks the jitter-clock / sampling-clock alignment search.
//
// Reduced size: 64 samples per trial, 4 settling cycles. A deterministic
// front-end model gives, for the current taps, exactly
//   ones(c, f) = clamp(32 + f - 5*c + OFF, 0, 64)
// ones in every 64 consecutive samples (the sample is 1 when a sequence that
// visits each of 0..63 once per 64 cycles is below that number): the
// probability falls by five steps per coarse tap and rises by one per fine tap,
// as with five chained jitter-path delay lines against one sampling-path line.
// For each offset OFF the expected result is found here by exhaustive search:
// coarse = one past the largest coarse tap with more than half ones at fine 0,
// fine = the largest fine tap with at most half ones at that coarse tap. Also
// checked: last_count, the run time of 19 trials, and the direct load.
`timescale 1ps / 1fs
module tb_autocal;
  import itdr_pkg::*;
  localparam int unsigned CAL_N = 64, SETTLE = 4;
  localparam int unsigned N_W = $clog2(CAL_N + 1);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic clk = 1'b0;
  always #5000 clk = ~clk;
  logic rst_n, start = 0, load = 0, sample = 0, busy, done;
  tap_t cfg_coarse = '0, cfg_fine = '0, coarse_tap, fine_tap;
  logic [N_W-1:0] last_count;
  int off = 0;
  int t = 0;

  autocal #(.CAL_N(CAL_N), .SETTLE(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .load(load), .cfg_coarse(cfg_coarse),
    .cfg_fine(cfg_fine), .sample(sample), .coarse_tap(coarse_tap), .fine_tap(fine_tap),
    .busy(busy), .done(done), .last_count(last_count));

  function automatic int ones(int c, int f, int o);
    int v = 32 + f - 5 * c + o;
    return v < 0 ? 0 : (v > 64 ? 64 : v);
  endfunction

  always @(negedge clk) begin
    t++;
    sample = ((t * 37) % 64) < ones(int'(coarse_tap), int'(fine_tap), off);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int offs [4] = '{302, 1001, 57, -20};
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    foreach (offs[i]) begin
      automatic int ec = 0, ef = 0, cyc = 0;
      off = offs[i];
      for (int c = 0; c < 512; c++) if (ones(c, 0, off) > 32) ec = c;
      ec = (ec == 511) ? 511 : ec + 1;
      for (int f = 0; f < 512; f++) if (ones(ec, f, off) <= 32) ef = f;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(int'(coarse_tap) == ec, $sformatf("OFF %0d: coarse %0d expected %0d", off, coarse_tap, ec));
      check(int'(fine_tap) == ef, $sformatf("OFF %0d: fine %0d expected %0d", off, fine_tap, ef));
      check(int'(last_count) == ones(ec, ef, off), $sformatf("OFF %0d: last_count %0d", off, last_count));
      check(cyc == 19 * int'(SETTLE + CAL_N + 1), $sformatf("calibration took %0d cycles", cyc));
    end
    @(negedge clk) begin load = 1; cfg_coarse = 9'd123; cfg_fine = 9'd45; end
    @(negedge clk) load = 0;
    check(coarse_tap == 9'd123 && fine_tap == 9'd45, "direct load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
