// tb_waveform_buffer: checks the two-bank waveform memory.
//
// Reduced size (P = 3, J = 7, 10-bit counts). Every word of both banks is
// written with a random value while both read ports read random words; each
// read must return, one cycle later, the value a reference array held before
// that clock edge. A second pass overwrites half of the words.
`timescale 1ps / 1fs
module tb_waveform_buffer;
  import itdr_pkg::*;
  localparam int unsigned P_MAX = 3, J = 7, W = 10;
  localparam int unsigned P_W = $clog2(P_MAX + 1), J_W = $clog2(J);

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5000 clk = ~clk;

  logic           wr_en = 0;
  bank_e          wr_bank = BANK_PROBE, ra_bank = BANK_PROBE, rb_bank = BANK_PROBE;
  logic [P_W-1:0] wr_p = '0, ra_p = '0, rb_p = '0;
  logic [J_W-1:0] wr_j = '0, ra_j = '0, rb_j = '0;
  logic [W-1:0]   wr_data = '0, ra_data, rb_data;

  waveform_buffer #(.P_MAX(P_MAX), .J(J), .W(W)) dut (
    .clk(clk), .wr_en(wr_en), .wr_bank(wr_bank), .wr_p(wr_p), .wr_j(wr_j), .wr_data(wr_data),
    .ra_bank(ra_bank), .ra_p(ra_p), .ra_j(ra_j), .ra_data(ra_data),
    .rb_bank(rb_bank), .rb_p(rb_p), .rb_j(rb_j), .rb_data(rb_data));

  int  ref_mem [2][P_MAX][J];
  bit  written [2][P_MAX][J];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one clock: drive a write and two reads, then check the reads
  task automatic step(bit we, int wb, int wp, int wj, int wd);
    int eb_a, ep_a, ej_a, eb_b, ep_b, ej_b;
    @(negedge clk);
    wr_en = we; wr_bank = bank_e'(wb); wr_p = P_W'(wp); wr_j = J_W'(wj); wr_data = W'(wd);
    eb_a = $urandom_range(1); ep_a = $urandom_range(P_MAX - 1); ej_a = $urandom_range(J - 1);
    eb_b = $urandom_range(1); ep_b = $urandom_range(P_MAX - 1); ej_b = $urandom_range(J - 1);
    ra_bank = bank_e'(eb_a); ra_p = P_W'(ep_a); ra_j = J_W'(ej_a);
    rb_bank = bank_e'(eb_b); rb_p = P_W'(ep_b); rb_j = J_W'(ej_b);
    begin
      int exp_a = ref_mem[eb_a][ep_a][ej_a];
      int exp_b = ref_mem[eb_b][ep_b][ej_b];
      bit va = written[eb_a][ep_a][ej_a], vb = written[eb_b][ep_b][ej_b];
      @(posedge clk);
      if (we) begin
        ref_mem[wb][wp][wj] = wd;
        written[wb][wp][wj] = 1'b1;
      end
      @(negedge clk);
      wr_en = 0;
      if (va) begin
        checks++;
        if (int'(ra_data) != exp_a) begin
          failures++;
          $display("FAIL: port A (%0d,%0d,%0d) %0d expected %0d", eb_a, ep_a, ej_a, ra_data, exp_a);
        end
      end
      if (vb) begin
        checks++;
        if (int'(rb_data) != exp_b) begin
          failures++;
          $display("FAIL: port B (%0d,%0d,%0d) %0d expected %0d", eb_b, ep_b, ej_b, rb_data, exp_b);
        end
      end
    end
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < int'(P_MAX); p++)
        for (int j = 0; j < int'(J); j++)
          step(1'b1, b, p, j, int'($urandom_range(1023)));
    for (int n = 0; n < 200; n++)
      step(n % 2 == 0, $urandom_range(1), $urandom_range(P_MAX - 1), $urandom_range(J - 1),
           int'($urandom_range(1023)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
