// tb_itdr_hdmi: end-to-end runs of the reflectometer against four cable
// set-ups like those used to evaluate the prototype: an open connector, a
// 193 cm cable left open at its far end, the same cable terminated, and the
// terminated cable bent at two places.
//
// The fabric logic, the clocking models and the I/O model are wired as in
// tb_itdr_top, at the same reduced size (J = 28 phase positions per Ts, P = 10)
// but with M = 200 probings per position. The line model gets up to four
// echoes. The round trips of 2.9 ns to the connector and 19.46 ns more along
// the cable are the prototype's; the amplitudes and the bend positions are
// this testbench's own. An open end gives a large positive echo, a terminated
// end a small negative one, and a bend a small positive one.
//
// Sequence: reset, one autocalibration, then for each set-up one measurement
// with probes, read out with SET 0 subtracted. Checked for each set-up: the
// measurement length and the number of probes, every echo seen with the right
// sign at the sample nearest its peak (the line is on the inverting input, so
// a positive echo lowers the count, by at least 30 % of the room between the
// SET 0 level and the end of the count range), and no false echo among the
// quiet samples. The system tone and the drift are set to 1 mV here, so that
// the quiet level stays well inside the count range; the noise reductions
// themselves are tested in tb_itdr_top and tb_itdr_full. The number of set-ups run and of echoes found are counted and must
// be complete.
`timescale 1ps / 1fs
module tb_itdr_hdmi;
  import itdr_pkg::*;

  localparam int unsigned P_MAX    = 10;
  localparam int unsigned J        = 28;
  localparam int unsigned M_MAX    = 1000;
  localparam int unsigned CAL_N    = 256;
  localparam int unsigned M        = 200;
  localparam int unsigned PS_CYCLES = 12;
  localparam real LFN_PERIOD       = 3.0e8;
  localparam int unsigned N_ECHO   = 4;
  localparam int unsigned N_SETUP  = 4;
  localparam int unsigned WATCHDOG = 600_000;

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
  bidi_diff_io_model #(.TS_PS(TS), .LFN_PERIOD_PS(LFN_PERIOD), .N_ECHO(N_ECHO),
                       .TONE_MV(1.0), .LFN_MV(1.0)) u_io (
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

  itdr_top #(.P_MAX(P_MAX), .J(J), .M_MAX(M_MAX), .CAL_N(CAL_N)) u_dut (
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

  // ---- watchdog -------------------------------------------------------------
  initial begin
    repeat (WATCHDOG) @(posedge sys_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- set-ups: echo delay after launch (ps) and amplitude (mV) -------------
  // 0: open connector; 1: cable, far end open; 2: cable, terminated;
  // 3: terminated cable bent twice
  real su_t [N_SETUP][N_ECHO] = '{
    '{2900.0,     0.0,     0.0, 22360.0},
    '{2900.0,     0.0,     0.0, 22360.0},
    '{2900.0,     0.0,     0.0, 22360.0},
    '{2900.0,  9000.0, 15000.0, 22360.0}};
  real su_a [N_SETUP][N_ECHO] = '{
    '{150.0,  0.0,  0.0,    0.0},
    '{ 15.0,  0.0,  0.0,  150.0},
    '{ 15.0,  0.0,  0.0,  -20.0},
    '{ 15.0, 12.0, 12.0,  -20.0}};
  string su_name [N_SETUP] = '{"open connector", "cable open", "cable terminated", "cable bent"};

  int lfn [P_USE][J];
  int set0 [J];
  int n_setups = 0, n_echo_found = 0, n_echo_expected = 0;

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

  // time after launch of sample (p, j), ps
  function automatic real tau_of(int p, int j);
    return (real'(p) - real'(SLOT) - 0.5) * TS + real'(j) * TS / real'(J)
           + real'(fine_tap) * TAP + RX_ROUTE - 1.0;
  endfunction

  task automatic measure(int s);
    longint c0 = 0;
    int pc0 = int'(probe_count);
    longint exp_cycles = longint'(J) * ((M + 1) * P_USE + 4 + P_USE + PS_CYCLES + 2);
    for (int e = 0; e < int'(N_ECHO); e++) begin
      u_io.echo_t[e] = su_t[s][e];
      u_io.echo_a[e] = su_a[s][e];
      u_io.echo_w[e] = 1000.0;
    end
    @(negedge sys_clk);
    cfg_probe = 1'b1; start_meas = 1;
    @(negedge sys_clk);
    start_meas = 0;
    while (!meas_done) begin
      @(posedge sys_clk);
      if (meas_busy) c0++;
    end
    @(negedge sys_clk);
    check(c0 == exp_cycles,
          $sformatf("%s: measurement took %0d cycles, expected %0d", su_name[s], c0, exp_cycles));
    check(int'(probe_count) - pc0 == J * (M + 1),
          $sformatf("%s: probes launched %0d", su_name[s], int'(probe_count) - pc0));
    check(phase_idx == '0 && u_mmcm.phase_idx == 0, $sformatf("%s: phase back at the start", su_name[s]));
    for (int p = 0; p < int'(P_USE); p++)
      for (int j = 0; j < int'(J); j++)
        read_word(RD_LFN, BANK_PROBE, p, j, lfn[p][j]);
    for (int j = 0; j < int'(J); j++)
      read_word(RD_RAW, BANK_PROBE, 0, j, set0[j]);
    n_setups++;
  endtask

  task automatic judge(int s);
    int false_hits = 0, n_quiet = 0;
    for (int e = 0; e < int'(N_ECHO); e++) begin
      real best = 1.0e12;
      int  bp = 1, bj = 0, room, need;
      bit  seen;
      if (su_a[s][e] == 0.0) continue;
      n_echo_expected++;
      for (int p = 1; p < int'(P_USE); p++)
        for (int j = 0; j < int'(J); j++) begin
          real d;
          d = tau_of(p, j) - su_t[s][e];
          if (d < 0.0) d = -d;
          if (d < best) begin best = d; bp = p; bj = j; end
        end
      // room the quiet level leaves: down to 0 for a positive echo, up to M
      // for a negative one; the echo must use 30 % of it and exceed 25 counts
      // (about 2.5 sigma of a difference of two counts at M = 200)
      room = (su_a[s][e] > 0.0) ? set0[bj] : int'(M) - set0[bj];
      need = (room * 3 / 10 > 25) ? room * 3 / 10 : 25;
      seen = (su_a[s][e] > 0.0) ? (-lfn[bp][bj] >= need) : (lfn[bp][bj] >= need);
      $display("%s: echo %0.1f mV at %0.2f ns -> sample (%0d,%0d) lfn=%0d (SET 0 level %0d, needed %0d)",
               su_name[s], su_a[s][e], su_t[s][e] / 1000.0, bp, bj, lfn[bp][bj], set0[bj], need);
      if (seen) n_echo_found++;
      check(seen, $sformatf("%s: echo at %0.2f ns seen with its sign", su_name[s], su_t[s][e] / 1000.0));
    end
    // quiet samples: past the blind spot and at least 1.5 ns from every echo
    for (int p = 1; p < int'(P_USE); p++)
      for (int j = 0; j < int'(J); j++) begin
        bit quiet = (tau_of(p, j) > 2000.0 || tau_of(p, j) < -1000.0);
        for (int e = 0; e < int'(N_ECHO); e++)
          if (su_a[s][e] != 0.0 && tau_of(p, j) > su_t[s][e] - 1500.0 &&
              tau_of(p, j) < su_t[s][e] + 1500.0)
            quiet = 1'b0;
        if (quiet) begin
          n_quiet++;
          if (lfn[p][j] > int'(M) / 4 || lfn[p][j] < -int'(M) / 4) false_hits++;
        end
      end
    check(n_quiet > 100 && false_hits == 0,
          $sformatf("%s: %0d of %0d quiet samples look like echoes", su_name[s], false_hits, n_quiet));
  endtask

  initial begin
    rst_n = 0;
    repeat (4) @(posedge sys_clk);
    @(negedge sys_clk);
    rst_n = 1;
    cfg_m = CNT_W'(M); cfg_p = P_W'(P_USE); cfg_slot = P_W'(SLOT);
    cfg_probe_tap = tap_t'(PROBE_TAP);
    for (int e = 0; e < int'(N_ECHO); e++) begin
      u_io.echo_t[e] = 0.0; u_io.echo_a[e] = 0.0; u_io.echo_w[e] = 1000.0;
    end
    repeat (4) @(negedge sys_clk);

    start_cal = 1;
    @(negedge sys_clk);
    start_cal = 0;
    wait (cal_done);
    $display("calibrated: coarse=%0d fine=%0d count=%0d/%0d", coarse_tap, fine_tap, cal_count, CAL_N);
    check(cal_count > CAL_W'(CAL_N / 4) && cal_count < CAL_W'(CAL_N * 3 / 4),
          "calibrated probability near 0.5");

    for (int s = 0; s < int'(N_SETUP); s++) begin
      measure(s);
      judge(s);
    end

    check(n_setups == int'(N_SETUP), "all set-ups measured");
    check(n_echo_found == n_echo_expected && n_echo_expected == 9, "all echoes found");
    $display("set-ups %0d, echoes found %0d of %0d", n_setups, n_echo_found, n_echo_expected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
