// tb_rx_capture: checks that every comparator sample reaches the system-clock
// domain exactly two cycles after the cycle it was taken in, whatever the
// sampling-clock phase.
//
// The sampling clock is the 10 ns system clock delayed by phi; phi is swept
// over 40 values across the period. The testbench sets D_O 1 ps before each
// sampling edge to a random bit tagged with the index of the system-clock
// cycle whose rising edge precedes that sampling edge, computes the zone from
// phi on its own, and compares "sample" two cycles later with the tagged bit.
`timescale 1ps / 1fs
module tb_rx_capture;
  import itdr_pkg::*;
  localparam real TS = 10000.0;

  int checks = 0, failures = 0;
  logic sys_clk = 1'b0, rx_clk = 1'b0, d_o = 1'b0;
  zone_e zone = ZONE_MID;
  logic sample;
  real  phi = 1000.0;
  int   k = 0;                  // index of the current system-clock cycle
  bit   bits [256];
  int   n_zone [3] = '{0, 0, 0};

  always #(TS / 2.0) sys_clk = ~sys_clk;

  rx_capture dut (.rx_clk(rx_clk), .sys_clk(sys_clk), .d_o(d_o), .zone(zone), .sample(sample));

  always @(posedge sys_clk) begin
    automatic int   kk = k + 1;
    automatic real  ph = phi;
    automatic bit   b  = 1'($urandom);
    k = kk;
    bits[kk % 256] = b;
    fork
      begin
        #(ph - 1.0) d_o = b;
        #(1.0) rx_clk = 1'b1;
        #(TS / 2.0) rx_clk = 1'b0;
      end
    join_none
  end

  initial begin
    repeat (20000) @(posedge sys_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 40; s++) begin
      automatic int bad = 0;
      phi = 5.0 + real'(s) * TS / 40.0;
      if (phi < TS / 4.0)            zone = ZONE_EARLY;
      else if (phi < 3.0 * TS / 4.0) zone = ZONE_MID;
      else                           zone = ZONE_LATE;
      n_zone[int'(zone)]++;
      repeat (4) @(posedge sys_clk);     // let the new phase reach the output
      for (int n = 0; n < 50; n++) begin
        @(negedge sys_clk);
        // after the rising edge of cycle k, sample holds the bit of cycle k-2
        if (sample != bits[(k - 2) % 256]) bad++;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("FAIL: phi=%0.1f ps zone=%0d: %0d of 50 samples wrong", phi, zone, bad);
      end
    end
    checks++;
    if (n_zone[0] == 0 || n_zone[1] == 0 || n_zone[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
