// tb_noise_reduction: checks the read-out arithmetic.
//
// Reduced size (P = 4, J = 9, 12-bit counts). The testbench plays the
// waveform buffer itself (random contents, one-cycle read latency) and issues
// a random request every cycle. Each answer must arrive two cycles after its
// request and equal, computed here from the contents: the count (RD_RAW), the
// probe count minus the background count (RD_TONE) or the count of SET p minus
// that of SET 0 at the same phase position (RD_LFN).
`timescale 1ps / 1fs
module tb_noise_reduction;
  import itdr_pkg::*;
  localparam int unsigned P_MAX = 4, J = 9, W = 12;
  localparam int unsigned P_W = $clog2(P_MAX + 1), J_W = $clog2(J);

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5000 clk = ~clk;

  logic rst_n, rd_req = 0, rd_valid;
  rd_mode_e rd_mode = RD_RAW;
  bank_e rd_bank = BANK_PROBE, ra_bank, rb_bank;
  logic [P_W-1:0] rd_p = '0, ra_p, rb_p;
  logic [J_W-1:0] rd_j = '0, ra_j, rb_j;
  logic [W-1:0] ra_data, rb_data;
  logic signed [W:0] rd_data;

  noise_reduction #(.P_MAX(P_MAX), .J(J), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .rd_req(rd_req), .rd_mode(rd_mode), .rd_bank(rd_bank),
    .rd_p(rd_p), .rd_j(rd_j), .rd_valid(rd_valid), .rd_data(rd_data),
    .ra_bank(ra_bank), .ra_p(ra_p), .ra_j(ra_j), .ra_data(ra_data),
    .rb_bank(rb_bank), .rb_p(rb_p), .rb_j(rb_j), .rb_data(rb_data));

  int mem [2][P_MAX][J];
  always @(posedge clk) begin
    ra_data <= W'(mem[int'(ra_bank)][int'(ra_p) % P_MAX][int'(ra_j) % J]);
    rb_data <= W'(mem[int'(rb_bank)][int'(rb_p) % P_MAX][int'(rb_j) % J]);
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected answers, in request order
  int exp_q [$];
  bit vld_q [$];
  int n_mode [3] = '{0, 0, 0};

  initial begin
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < int'(P_MAX); p++)
        for (int j = 0; j < int'(J); j++) mem[b][p][j] = int'($urandom_range(4095));
    rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      automatic bit req = (n < 590) && ($urandom_range(3) != 0);
      automatic int md = $urandom_range(2);
      automatic int bk = $urandom_range(1);
      automatic int p = $urandom_range(P_MAX - 1);
      automatic int j = $urandom_range(J - 1);
      automatic int e;
      rd_req = req; rd_mode = rd_mode_e'(md); rd_bank = bank_e'(bk);
      rd_p = P_W'(p); rd_j = J_W'(j);
      case (md)
        0: e = mem[bk][p][j];
        1: e = mem[0][p][j] - mem[1][p][j];
        default: e = mem[bk][p][j] - mem[bk][0][j];
      endcase
      if (req) n_mode[md]++;
      exp_q.push_back(e);
      vld_q.push_back(req);
      @(negedge clk);
      // answer to the request made two cycles ago
      if (exp_q.size() == 2) begin
        automatic int  ee = exp_q.pop_front();
        automatic bit  vv = vld_q.pop_front();
        checks++;
        if (rd_valid != vv || (vv && int'(rd_data) != ee)) begin
          failures++;
          if (failures < 5) $display("FAIL: valid %0b data %0d, expected %0b %0d", rd_valid, rd_data, vv, ee);
        end
      end
    end
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
