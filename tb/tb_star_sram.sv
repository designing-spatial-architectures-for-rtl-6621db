// tb_star_sram: self-checking test of the 1R1W buffer macro with 4 write
// lanes. Random lane writes and reads are compared with a software copy of
// the contents; read data must appear exactly one cycle after the address,
// and a read of the word being written returns the old contents.
`timescale 1ns/1ps
module tb_star_sram;
  localparam int WORDS = 64, LANES = 4, LW = 32;
  logic clk = 1'b0, we;
  logic [5:0] waddr, raddr;
  logic [1:0] wlane;
  logic [LW-1:0] wdata;
  logic [LANES*LW-1:0] rdata;
  logic [LANES*LW-1:0] model [WORDS];
  int checks = 0, failures = 0;

  star_sram #(.WORDS(WORDS), .LANES(LANES), .LANE_W(LW)) dut (
    .clk, .we_i(we), .waddr_i(waddr), .wlane_i(wlane), .wdata_i(wdata), .raddr_i(raddr),
    .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LANES*LW-1:0] expect_q;
    we = 1'b0; waddr = '0; raddr = '0; wlane = '0; wdata = '0;
    // fill every word
    for (int a = 0; a < WORDS; a++)
      for (int l = 0; l < LANES; l++) begin
        we = 1'b1; waddr = 6'(a); wlane = 2'(l); wdata = $urandom;
        model[a][l*LW +: LW] = wdata;
        @(posedge clk); #1;
      end
    we = 1'b0;
    for (int i = 0; i < 2000; i++) begin
      raddr = 6'($urandom_range(WORDS - 1, 0));
      we = $urandom_range(1, 0);
      waddr = ($urandom_range(3, 0) == 0) ? raddr : 6'($urandom_range(WORDS - 1, 0));
      wlane = 2'($urandom);
      wdata = $urandom;
      expect_q = model[raddr];
      if (we) model[waddr][wlane*LW +: LW] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d: %h expected %h", raddr, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
