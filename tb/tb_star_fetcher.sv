// tb_star_fetcher: self-checking test of the beat router at its default size.
// Random beats of every target are sent; the bank strobes, word addresses,
// lanes and data are compared with the buffer layout worked out here:
// X h -> bank h%4, word (buf*8+group)*40 + h/4; Q d -> bank d%2, word d/2;
// Wk/Wv h -> bank h%4, word h/4; codes h -> word h. The beat counter is
// checked at the end.
`timescale 1ns/1ps
module tb_star_fetcher;
  import star_pkg::*;
  localparam int XB = 4, QB = 2, NG = 8, HQ = 40;
  logic clk = 1'b0, rst_n = 1'b0, valid, bf;
  fetch_tgt_e tgt;
  logic [15:0] row;
  logic [7:0] col;
  logic [511:0] data;
  logic [XB-1:0] x_we, wk_we, wv_we;
  logic [QB-1:0] q_we;
  logic code_we;
  logic [$clog2(2*NG*HQ)-1:0] x_waddr;
  logic [15:0] addr;
  logic [7:0] lane;
  logic [511:0] data_o;
  logic [31:0] beats;
  int checks = 0, failures = 0, sent = 0;

  star_fetcher dut (.clk, .rst_n, .beat_valid_i(valid), .beat_tgt_i(tgt), .beat_row_i(row),
    .beat_col_i(col), .beat_buf_i(bf), .beat_data_i(data), .x_we_o(x_we), .x_waddr_o(x_waddr),
    .q_we_o(q_we), .wk_we_o(wk_we), .wv_we_o(wv_we), .code_we_o(code_we), .addr_o(addr),
    .lane_o(lane), .data_o(data_o), .beats_o(beats));

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    valid = 1'b0; tgt = TGT_X; row = '0; col = '0; bf = 1'b0; data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      int t, r;
      t = int'($urandom_range(4, 0));
      valid = $urandom_range(3, 0) != 0;
      tgt = fetch_tgt_e'(t);
      r = (t == 1) ? int'($urandom_range(127, 0)) : int'($urandom_range(159, 0));
      row = 16'(r);
      col = (t == 0) ? 8'($urandom_range(NG - 1, 0)) : 8'($urandom_range(3, 0));
      bf = $urandom;
      for (int j = 0; j < 16; j++) data[j*32 +: 32] = $urandom;
      #1;
      if (valid) sent++;
      chk(x_we == ((valid && t == 0) ? XB'(1 << (r % XB)) : '0), "x strobe");
      chk(q_we == ((valid && t == 1) ? QB'(1 << (r % QB)) : '0), "q strobe");
      chk(wk_we == ((valid && t == 2) ? XB'(1 << (r % XB)) : '0), "wk strobe");
      chk(wv_we == ((valid && t == 3) ? XB'(1 << (r % XB)) : '0), "wv strobe");
      chk(code_we == (valid && t == 4), "code strobe");
      if (valid && t == 0)
        chk(int'(x_waddr) == (int'(bf) * NG + int'(col)) * HQ + r / XB, "x address");
      if (valid && t == 1) chk(int'(addr) == r / QB, "q address");
      if (valid && (t == 2 || t == 3)) chk(int'(addr) == r / XB, "w address");
      if (valid && t == 4) chk(int'(addr) == r, "code address");
      chk(lane == col && data_o == data, "lane and data");
      @(posedge clk); #1;
    end
    valid = 1'b0;
    @(posedge clk); #1;
    chk(int'(beats) == sent, $sformatf("beat count %0d expected %0d", beats, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
