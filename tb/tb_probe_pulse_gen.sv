// tb_probe_pulse_gen: checks the probe impulse generator.
//
// The system clock (10 ns) goes through a delay-line model whose tap sets the
// pulse width. For several tap values, "fire" is raised in chosen cycles;
// every t_n pulse must start at the falling clock edge of the following cycle
// and last tap * 1.1 ns / 512, and no pulse may appear in other cycles.
`timescale 1ps / 1fs
module tb_probe_pulse_gen;
  localparam real TS  = 10000.0;
  localparam real TAP = 1100.0 / 512.0;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic sys_clk = 1'b0;
  always #(TS / 2.0) sys_clk = ~sys_clk;
  logic       rst_n, fire, sys_clk_dly, t_n;
  logic [8:0] tap;
  logic [31:0] pulse_count;

  idelay3_model u_dly (.idatain(sys_clk), .cntvaluein(tap), .dataout(sys_clk_dly));
  probe_pulse_gen dut (.sys_clk(sys_clk), .sys_clk_dly(sys_clk_dly), .rst_n(rst_n),
                       .fire(fire), .t_n(t_n), .pulse_count(pulse_count));

  realtime t_rise, t_fall, t_last_neg;
  int      n_pulses = 0;
  always @(negedge sys_clk) t_last_neg = $realtime;
  always @(posedge t_n) t_rise = $realtime;
  always @(negedge t_n) begin
    t_fall = $realtime;
    n_pulses++;
  end

  initial begin
    repeat (2000) @(posedge sys_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int taps [4] = '{465, 100, 300, 511};
    rst_n = 0; fire = 0; tap = 9'd465;
    repeat (3) @(posedge sys_clk);
    @(negedge sys_clk) rst_n = 1;
    foreach (taps[i]) begin
      tap = 9'(taps[i]);
      repeat (3) @(negedge sys_clk);
      for (int k = 0; k < 5; k++) begin
        int n0;
        realtime t_exp;
        n0 = n_pulses;
        // fire for one cycle, then watch the next two cycles
        @(negedge sys_clk) fire = 1;
        @(negedge sys_clk) begin
          fire = 0;
          t_exp = $realtime;         // falling edge of the next cycle
        end
        @(negedge sys_clk);
        #(TS / 2.0 - 1.0);
        check(n_pulses == n0 + 1, $sformatf("one pulse for tap %0d", tap));
        check(t_rise > t_exp - 1.0 && t_rise < t_exp + 1.0,
              $sformatf("pulse start %0.1f expected %0.1f", t_rise, t_exp));
        check((t_fall - t_rise) > real'(tap) * TAP - 1.0 && (t_fall - t_rise) < real'(tap) * TAP + 1.0,
              $sformatf("pulse width %0.1f ps for tap %0d", t_fall - t_rise, tap));
        // idle cycles: no pulse
        n0 = n_pulses;
        repeat (3) @(negedge sys_clk);
        check(n_pulses == n0, "no pulse without fire");
      end
    end
    check(pulse_count == 32'(n_pulses), $sformatf("pulse_count %0d vs %0d", pulse_count, n_pulses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
