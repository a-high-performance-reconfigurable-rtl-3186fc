// tb_itdr_full: end-to-end test of the reflectometer fabric logic with models of
// the FPGA clocking primitives, the delay lines and the differential I/O with
// a line attached.
//
// Full size: the top at its default parameters (P = 10, J = 560, counters for M up to 100 000, 1024 samples per calibration trial), run with M = 1000 probings per position as in the prototype's experiments.
//
// Sequence: reset; autocalibration (checked against the tap values at which the
// model's jitter-clock edge meets the sampling instant, and against the final
// probability of about 0.5); a background measurement without probes; a
// measurement with probes; read-out of every (p, j) in all modes. Checked:
// the cycle count of each measurement, the number of probes launched, that
// the read-out arithmetic is exact, that the blind spot reads 0, that the
// connector echo and the far-end echo appear with the right sign at the times
// the line model puts them, and that subtracting SET 0 lowers the noise of the
// quiet SETs. Every mechanism (calibration, probe pulses, background
// measurement, phase steps, the three capture zones, blind spot, both noise
// reductions) is counted and must occur.
`timescale 1ps / 1fs
module tb_itdr_full;
  import itdr_pkg::*;

  localparam int unsigned P_MAX    = P_DEFAULT;
  localparam int unsigned J        = J_DEFAULT;
  localparam int unsigned M_MAX    = M_DEFAULT;
  localparam int unsigned CAL_N    = 1024;
  localparam int unsigned M        = 1000;
  localparam int unsigned PS_CYCLES = itdr_pkg::PS_CYCLES;
  localparam real LFN_PERIOD       = 3.0e10;
  localparam int unsigned WATCHDOG = 12_000_000;
  localparam int unsigned P_W   = $clog2(P_MAX + 1);
  localparam int unsigned J_W   = $clog2(J);
  localparam int unsigned CNT_W = $clog2(M_MAX + 1);
  localparam int unsigned CAL_W = $clog2(CAL_N + 1);
  localparam real TS       = 10000.0;
  localparam real TAP      = 1100.0 / 512.0;
  localparam real RX_ROUTE = 600.0;      // routing delay of the sampling clock
  localparam int unsigned P_USE = 10;
  localparam int unsigned SLOT  = 1;
  localparam int unsigned PROBE_TAP = 465;   // about 1 ns

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- clocks and primitives ----------------------------------------------
  logic sys_clk = 1'b0;
  always #(TS / 2.0) sys_clk = ~sys_clk;

  logic rst_n;
  logic sys_clk_dly, mmcm_out, rx_pre, rx_clk, d_p, t_n, d_o;
  logic psen, psincdec, psdone;
  tap_t probe_tap, coarse_tap, fine_tap;
  logic jd [6];

  idelay3_model u_wdly (.idatain(sys_clk), .cntvaluein(probe_tap), .dataout(sys_clk_dly));
  mmcm_ps_model #(.TS_PS(TS), .J(J), .PS_CYCLES(PS_CYCLES)) u_mmcm (
    .clkin(sys_clk), .rst(!rst_n), .psclk(sys_clk), .psen(psen), .psincdec(psincdec),
    .psdone(psdone), .clkout(mmcm_out));
  idelay3_model u_fdly (.idatain(mmcm_out), .cntvaluein(fine_tap), .dataout(rx_pre));
  // the comparator is evaluated 1 ps before the sampling flip-flop clocks
  logic rx_eval;
  always @(rx_pre) rx_eval <= #(RX_ROUTE - 1.0) rx_pre;
  always @(rx_pre) rx_clk  <= #(RX_ROUTE) rx_pre;
  assign jd[0] = mmcm_out;
  for (genvar g = 0; g < 5; g++) begin : g_jit
    idelay3_model u_jdly (.idatain(jd[g]), .cntvaluein(coarse_tap), .dataout(jd[g+1]));
  end
  assign d_p = jd[5];
  bidi_diff_io_model #(.TS_PS(TS), .LFN_PERIOD_PS(LFN_PERIOD)) u_io (
    .T_P(1'b1), .D_P(d_p), .T_N(t_n), .D_N(1'b1), .D_O(d_o), .sample_clk(rx_eval));

  // ---- device under test ----------------------------------------------------
  logic                  start_meas = 0, start_cal = 0, cal_load = 0, cfg_probe = 0;
  logic [CNT_W-1:0]      cfg_m = '0;
  logic [P_W-1:0]        cfg_p = '0, cfg_slot = '0;
  tap_t                  cfg_probe_tap = '0, cfg_coarse = '0, cfg_fine = '0;
  logic                  meas_busy, meas_done, cal_busy, cal_done;
  logic [CAL_W-1:0]      cal_count;
  logic [J_W-1:0]        phase_idx;
  logic [31:0]           probe_count;
  logic                  rd_req = 0;
  rd_mode_e              rd_mode = RD_RAW;
  bank_e                 rd_bank = BANK_PROBE;
  logic [P_W-1:0]        rd_p = '0;
  logic [J_W-1:0]        rd_j = '0;
  logic                  rd_valid;
  logic signed [CNT_W:0] rd_data;

  itdr_top u_dut (
    .sys_clk(sys_clk), .sys_clk_dly(sys_clk_dly), .rx_clk(rx_clk), .rst_n(rst_n),
    .t_n(t_n), .d_o(d_o), .psen(psen), .psincdec(psincdec), .psdone(psdone),
    .probe_tap(probe_tap), .coarse_tap(coarse_tap), .fine_tap(fine_tap),
    .start_meas(start_meas), .cfg_m(cfg_m), .cfg_p(cfg_p), .cfg_slot(cfg_slot),
    .cfg_probe(cfg_probe), .cfg_probe_tap(cfg_probe_tap), .start_cal(start_cal),
    .cal_load(cal_load), .cfg_coarse(cfg_coarse), .cfg_fine(cfg_fine),
    .meas_busy(meas_busy), .meas_done(meas_done), .cal_busy(cal_busy),
    .cal_done(cal_done), .cal_count(cal_count), .phase_idx(phase_idx),
    .probe_count(probe_count), .rd_req(rd_req), .rd_mode(rd_mode),
    .rd_bank(rd_bank), .rd_p(rd_p), .rd_j(rd_j), .rd_valid(rd_valid),
    .rd_data(rd_data));

  // ---- mechanism counters ---------------------------------------------------
  int n_cal = 0, n_bg = 0, n_meas = 0, n_blind = 0, n_tone = 0, n_lfn = 0;
  int n_zone [3] = '{0, 0, 0};
  int n_tn_pulses = 0;
  longint busy_cycles = 0;
  always @(posedge sys_clk) begin
    if (meas_busy) begin
      busy_cycles++;
      if (u_dut.zone <= ZONE_LATE) n_zone[int'(u_dut.zone)]++;
    end
  end
  always @(posedge t_n) n_tn_pulses++;

  // ---- watchdog -------------------------------------------------------------
  initial begin
    repeat (WATCHDOG) @(posedge sys_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- read-out storage -----------------------------------------------------
  int raw_p [P_USE][J];
  int raw_b [P_USE][J];
  int tone  [P_USE][J];
  int lfn   [P_USE][J];

  task automatic read_word(rd_mode_e mode, bank_e bank, int p, int j, output int v);
    @(negedge sys_clk);
    rd_req = 1; rd_mode = mode; rd_bank = bank; rd_p = P_W'(p); rd_j = J_W'(j);
    @(negedge sys_clk);
    rd_req = 0;
    @(negedge sys_clk);
    if (!rd_valid) begin
      failures++;
      $display("FAIL: no rd_valid");
    end
    v = int'(rd_data);
  endtask

  task automatic run_meas(bit probe);
    longint c0 = busy_cycles;
    int pc0 = int'(probe_count);
    int sh0 = int'(u_mmcm.shifts);
    longint exp_cycles = longint'(J) * ((M + 1) * P_USE + 4 + P_USE + PS_CYCLES + 2);
    @(negedge sys_clk);
    cfg_probe = probe; start_meas = 1;
    @(negedge sys_clk);
    start_meas = 0;
    wait (meas_done);
    @(negedge sys_clk);
    check(busy_cycles - c0 == exp_cycles,
          $sformatf("measurement took %0d cycles, expected %0d", busy_cycles - c0, exp_cycles));
    check(int'(probe_count) - pc0 == (probe ? J * (M + 1) : 0),
          $sformatf("probes launched %0d", int'(probe_count) - pc0));
    check(int'(u_mmcm.shifts) - sh0 == J,
          $sformatf("phase steps %0d, expected %0d", int'(u_mmcm.shifts) - sh0, J));
    check(phase_idx == '0 && u_mmcm.phase_idx == 0, "phase back at the start");
    if (probe) n_meas++; else n_bg++;
  endtask

  // time after launch of sample (p, j), ps
  function automatic real tau_of(int p, int j);
    return (real'(p) - real'(SLOT) - 0.5) * TS + real'(j) * TS / real'(J)
           + real'(fine_tap) * TAP + RX_ROUTE - 1.0;
  endfunction

  initial begin
    real exp_c, mean, rms_raw, rms_lfn, best1, best2;
    int  n_q, b1p, b1j, b2p, b2j, v;
    rst_n = 0;
    repeat (4) @(posedge sys_clk);
    @(negedge sys_clk);
    rst_n = 1;
    cfg_m = CNT_W'(M); cfg_p = P_W'(P_USE); cfg_slot = P_W'(SLOT);
    cfg_probe_tap = tap_t'(PROBE_TAP);
    repeat (4) @(negedge sys_clk);

    // -- autocalibration --
    start_cal = 1;
    @(negedge sys_clk);
    start_cal = 0;
    wait (cal_done);
    n_cal++;
    // jitter edge (5 coarse lines) meets the sampling instant (fine line +
    // routing, less the 1 ps evaluation lead) where K*(t_s - t_e) = offset,
    // K = 2 mV/ps, offset 20 mV: 5*c*TAP = RX_ROUTE - 1 + f*TAP - 10 ps
    exp_c = (RX_ROUTE - 1.0 - 20.0 / 2.0) / (5.0 * TAP);
    $display("calibrated: coarse=%0d fine=%0d count=%0d/%0d (expected coarse near %0.1f)",
             coarse_tap, fine_tap, cal_count, CAL_N, exp_c);
    check(real'(coarse_tap) > exp_c - 1.5 && real'(coarse_tap) < exp_c + 2.5, "coarse tap");
    check(real'(5 * coarse_tap) * TAP - real'(fine_tap) * TAP - RX_ROUTE + 11.0 > -12.0 &&
          real'(5 * coarse_tap) * TAP - real'(fine_tap) * TAP - RX_ROUTE + 11.0 <  12.0,
          "edge and sampling instant within 12 ps");
    // one fine tap moves the edge voltage by about 0.54 sigma of the noise
    check(cal_count > CAL_W'(CAL_N / 4) && cal_count < CAL_W'(CAL_N * 3 / 4),
          "calibrated probability near 0.5");

    // -- measurements --
    run_meas(1'b0);
    run_meas(1'b1);

    // -- read-out --
    for (int p = 0; p < int'(P_USE); p++)
      for (int j = 0; j < int'(J); j++) begin
        read_word(RD_RAW,  BANK_PROBE,      p, j, raw_p[p][j]);
        read_word(RD_RAW,  BANK_BACKGROUND, p, j, raw_b[p][j]);
        read_word(RD_TONE, BANK_PROBE,      p, j, tone[p][j]);
        read_word(RD_LFN,  BANK_PROBE,      p, j, lfn[p][j]);
      end
    begin
      automatic int bad_range = 0, bad_tone = 0, bad_lfn = 0, bad_blind = 0;
      for (int p = 0; p < int'(P_USE); p++)
        for (int j = 0; j < int'(J); j++) begin
          if (raw_p[p][j] < 0 || raw_p[p][j] > int'(M) || raw_b[p][j] < 0 || raw_b[p][j] > int'(M))
            bad_range++;
          if (tone[p][j] != raw_p[p][j] - raw_b[p][j]) bad_tone++;
          else n_tone++;
          if (lfn[p][j] != raw_p[p][j] - raw_p[0][j]) bad_lfn++;
          else n_lfn++;
          if (tau_of(p, j) > 100.0 && tau_of(p, j) < 900.0) begin
            n_blind++;
            if (raw_p[p][j] != 0) bad_blind++;
          end
        end
      check(bad_range == 0, $sformatf("%0d counts above M", bad_range));
      check(bad_tone == 0, $sformatf("%0d background-subtracted words wrong", bad_tone));
      check(bad_lfn == 0, $sformatf("%0d SET-0-subtracted words wrong", bad_lfn));
      check(bad_blind == 0, $sformatf("%0d blind-spot samples not 0", bad_blind));
    end

    // echoes: the sample nearest each echo peak
    best1 = 1.0e12; best2 = 1.0e12; b1p = 0; b1j = 0; b2p = 0; b2j = 0;
    for (int p = 1; p < int'(P_USE); p++)
      for (int j = 0; j < int'(J); j++) begin
        real d1, d2;
        d1 = tau_of(p, j) - 2900.0;
        d2 = tau_of(p, j) - 22360.0;
        if (d1 < 0) d1 = -d1;
        if (d2 < 0) d2 = -d2;
        if (d1 < best1) begin best1 = d1; b1p = p; b1j = j; end
        if (d2 < best2) begin best2 = d2; b2p = p; b2j = j; end
      end
    $display("connector echo at (%0d,%0d): lfn=%0d; far-end echo at (%0d,%0d): lfn=%0d",
             b1p, b1j, lfn[b1p][b1j], b2p, b2j, lfn[b2p][b2j]);
    // the line is on the inverting input: a positive echo lowers the probability
    check(lfn[b1p][b1j] < -int'(M) / 8, "connector echo (+20 mV) seen");
    check(lfn[b2p][b2j] > int'(M) / 12, "far-end echo (-5 mV) seen");

    // quiet SETs: no echo within 2 ns
    n_q = 0; mean = 0.0;
    for (int p = 1; p < int'(P_USE); p++)
      for (int j = 0; j < int'(J); j++)
        if ((tau_of(p, j) < -1000.0 || tau_of(p, j) > 5000.0) &&
            (tau_of(p, j) < 20000.0 || tau_of(p, j) > 25000.0)) begin
          n_q++; mean += real'(raw_p[p][j]);
        end
    mean = mean / real'(n_q);
    rms_raw = 0.0; rms_lfn = 0.0;
    for (int p = 1; p < int'(P_USE); p++)
      for (int j = 0; j < int'(J); j++)
        if ((tau_of(p, j) < -1000.0 || tau_of(p, j) > 5000.0) &&
            (tau_of(p, j) < 20000.0 || tau_of(p, j) > 25000.0)) begin
          rms_raw += (real'(raw_p[p][j]) - mean) ** 2;
          rms_lfn += real'(lfn[p][j]) ** 2;
        end
    rms_raw = $sqrt(rms_raw / real'(n_q));
    rms_lfn = $sqrt(rms_lfn / real'(n_q));
    $display("quiet samples %0d: rms raw %0.2f, rms after SET-0 subtraction %0.2f", n_q, rms_raw, rms_lfn);
    check(rms_lfn < rms_raw, "SET-0 subtraction lowers the noise of quiet SETs");

    // mechanisms
    check(n_cal > 0, "calibration ran");
    check(n_bg > 0 && n_meas > 0, "background and probe measurements ran");
    check(n_tn_pulses == J * (M + 1) && u_io.probes == n_tn_pulses, "probe pulses reached the I/O");
    check(n_zone[0] > 0 && n_zone[1] > 0 && n_zone[2] > 0, "all capture zones used");
    check(n_blind > 0, "blind spot sampled");
    check(n_tone > 0 && n_lfn > 0, "both noise reductions read");
    $display("mechanisms: cal=%0d bg=%0d meas=%0d pulses=%0d zones=%0d/%0d/%0d blind=%0d tone=%0d lfn=%0d",
             n_cal, n_bg, n_meas, n_tn_pulses, n_zone[0], n_zone[1], n_zone[2], n_blind, n_tone, n_lfn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
