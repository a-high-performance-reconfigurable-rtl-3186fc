// tb_ets_sequencer: checks one complete ETS/APC measurement cycle by cycle.
//
// Reduced size: P = 4 SETs, J = 8 phase positions, M = 5 probings. A model of
// the PLL's phase-shift handshake (psdone 12 cycles after psen) answers psen.
// The testbench works out on its own, from the cycle number, which probing m,
// slot p and phase position j every cycle belongs to, and feeds the sequencer
// a sample bit pattern(p, j, m) two cycles later, as the capture stage would
// (three cycles later when the sampling phase plus the fine delay passes Ts).
// Samples outside the counted probings are 1, so counting them is caught.
// Checked: every fire and zone output, the measurement length
// J*((M+1)*P + P + 4 + 14) cycles, J phase steps, and every count written.
// The first run has no fine delay; the second uses a fine delay large enough
// (with a 5 ps tap) to push the last phase position past Ts.
`timescale 1ps / 1fs
module tb_ets_sequencer;
  import itdr_pkg::*;
  localparam int unsigned P_MAX = 4, J = 8, M_MAX = 15;
  localparam int unsigned TSF = 10_000_000, TAPF = 5_000;
  localparam int unsigned P_W = $clog2(P_MAX + 1), J_W = $clog2(J), CNT_W = $clog2(M_MAX + 1);
  localparam int unsigned M = 5, P = 4, SLOT = 1;
  localparam int unsigned L = (M + 1) * P + 4 + P + 14;   // cycles per phase position

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic clk = 1'b0;
  always #5000 clk = ~clk;
  logic rst_n, start = 0, cfg_probe = 0, busy, done, fire, sample = 0;
  logic psen, psincdec, psdone, wr_en, mmcm_clk;
  tap_t fine_tap = '0;
  zone_e zone;
  bank_e wr_bank;
  logic [P_W-1:0] wr_p;
  logic [J_W-1:0] wr_j, phase_idx;
  logic [CNT_W-1:0] wr_data;

  mmcm_ps_model #(.TS_PS(10000.0), .J(J), .PS_CYCLES(12)) u_pll (
    .clkin(clk), .rst(!rst_n), .psclk(clk), .psen(psen), .psincdec(psincdec), .psdone(psdone), .clkout(mmcm_clk));

  ets_sequencer #(.P_MAX(P_MAX), .J(J), .M_MAX(M_MAX), .TS(TSF), .TAP(TAPF)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg_m(CNT_W'(M)), .cfg_p(P_W'(P)),
    .cfg_slot(P_W'(SLOT)), .cfg_probe(cfg_probe), .fine_tap(fine_tap), .busy(busy),
    .done(done), .fire(fire), .zone(zone), .sample(sample), .psen(psen),
    .psincdec(psincdec), .psdone(psdone), .wr_en(wr_en), .wr_bank(wr_bank),
    .wr_p(wr_p), .wr_j(wr_j), .wr_data(wr_data), .phase_idx(phase_idx));

  function automatic bit pattern(int p, int j, int m);
    return ((p * 5 + j * 3 + m * 7 + (p * j) % 3) % 4) != 0;
  endfunction

  function automatic bit wraps(int j);
    return longint'(j) * (TSF / J) + longint'(fine_tap) * TAPF >= TSF;
  endfunction

  function automatic zone_e zone_of(int j);
    longint ph = longint'(j) * (TSF / J) + longint'(fine_tap) * TAPF;
    if (ph >= TSF) ph -= TSF;
    if (ph < TSF / 4) return ZONE_EARLY;
    if (ph < 3 * TSF / 4) return ZONE_MID;
    return ZONE_LATE;
  endfunction

  // sample bit the front end shows for (virtual) cycle q of the measurement
  function automatic bit front_end(longint q);
    int j, o, m, p;
    if (q < 0) return 1'b1;
    j = int'(q / L); o = int'(q % L);
    if (o >= int'((M + 1) * P)) return 1'b1;
    m = o / int'(P); p = o % int'(P);
    if (m == 0) return 1'b1;
    return pattern(p, j, m);
  endfunction

  int got [2][P][J];
  int nwr [2][P][J];
  always @(posedge clk) if (wr_en) begin
    got[int'(wr_bank)][wr_p][wr_j] = int'(wr_data);
    nwr[int'(wr_bank)][wr_p][wr_j]++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit probe, int fine);
    longint t = 0;
    int bad_fire = 0, bad_zone = 0, n_fire = 0, sh0, n_wrap = 0;
    sh0 = u_pll.shifts;
    fine_tap = tap_t'(fine);
    cfg_probe = probe;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;          // now in cycle 0 of the measurement
    while (busy) begin
      int j = int'(t / L), o = int'(t % L);
      bit exp_fire = probe && (o < int'((M + 1) * P)) && ((o % int'(P)) == int'(SLOT) - 1);
      if (fire != exp_fire) bad_fire++;
      if (fire) n_fire++;
      if (j < int'(J) && zone != zone_of(j)) bad_zone++;
      if (j < int'(J) && wraps(j)) n_wrap++;
      sample = (j < int'(J) && wraps(j)) ? front_end(t - 3) : front_end(t - 2);
      @(negedge clk);
      t++;
    end
    check(bad_fire == 0, $sformatf("%0d wrong fire cycles", bad_fire));
    check(n_fire == (probe ? int'(J * (M + 1)) : 0), $sformatf("%0d probes requested", n_fire));
    check(bad_zone == 0, $sformatf("%0d wrong zone cycles", bad_zone));
    check(t == longint'(J) * L, $sformatf("measurement took %0d cycles, expected %0d", t, J * L));
    check(u_pll.shifts - sh0 == int'(J), "J phase steps");
    if (fine != 0) check(n_wrap > 0, "fine delay pushed a phase past Ts");
  endtask

  initial begin
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(1'b1, 0);
    run(1'b0, 300);
    for (int b = 0; b < 2; b++) begin
      automatic int bad = 0, badn = 0;
      for (int p = 0; p < int'(P); p++)
        for (int j = 0; j < int'(J); j++) begin
          automatic int e = 0;
          for (int m = 1; m <= int'(M); m++) e += int'(pattern(p, j, m));
          if (got[b][p][j] != e) begin
            bad++;
            if (bad < 4) $display("bank %0d (%0d,%0d): got %0d expected %0d", b, p, j, got[b][p][j], e);
          end
          if (nwr[b][p][j] != 1) badn++;
        end
      check(bad == 0, $sformatf("bank %0d: %0d counts wrong", b, bad));
      check(badn == 0, $sformatf("bank %0d: %0d words not written exactly once", b, badn));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
