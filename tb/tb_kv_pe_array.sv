// tb_kv_pe_array: self-checking test of the KV generation PE array at its
// full 128 lines x 4 MACs. Random X and W streams are accumulated for a
// random number of steps; K and V are latched with a random shift and
// compared with a software dot product, shifted and saturated to INT16.
// The array takes 4 products per line per cycle, so h values need h/4 cycles:
// the latch is issued exactly h/4 cycles after the clear.
`timescale 1ns/1ps
module tb_kv_pe_array;
  import star_pkg::*;
  localparam int L = 128, M = 4;
  logic clk = 1'b0, rst_n = 1'b0, clr, in_valid, latch_k, latch_v;
  logic signed [15:0] x [M];
  logic signed [15:0] w [L][M];
  logic [5:0] shift;
  logic signed [15:0] k [L];
  logic signed [15:0] v [L];
  int checks = 0, failures = 0;
  longint ref_s [L];

  kv_pe_array dut (.clk, .rst_n, .clr_i(clr), .in_valid_i(in_valid), .x_i(x), .w_i(w),
    .shift_i(shift), .latch_k_i(latch_k), .latch_v_i(latch_v), .k_o(k), .v_o(v));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  initial begin
    clr = 1'b0; in_valid = 1'b0; latch_k = 1'b0; latch_v = 1'b0; shift = '0;
    for (int m = 0; m < M; m++) x[m] = '0;
    for (int l = 0; l < L; l++) for (int m = 0; m < M; m++) w[l][m] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int run = 0; run < 8; run++) begin
      int steps;
      bit isv;
      steps = int'($urandom_range(40, 1));
      isv = run[0];
      shift = 6'($urandom_range(24, 8));
      for (int l = 0; l < L; l++) ref_s[l] = 0;
      clr = 1'b1;
      @(posedge clk); #1;
      clr = 1'b0;
      for (int s = 0; s < steps; s++) begin
        for (int m = 0; m < M; m++) x[m] = 16'($urandom);
        for (int l = 0; l < L; l++)
          for (int m = 0; m < M; m++) begin
            w[l][m] = 16'($urandom);
            ref_s[l] += longint'(x[m]) * longint'(w[l][m]);
          end
        in_valid = 1'b1;
        @(posedge clk); #1;
      end
      in_valid = 1'b0;
      if (isv) latch_v = 1'b1; else latch_k = 1'b1;
      @(posedge clk); #1;
      latch_k = 1'b0; latch_v = 1'b0;
      for (int l = 0; l < L; l++) begin
        logic signed [15:0] got;
        got = isv ? v[l] : k[l];
        checks++;
        if (longint'(got) != sat(ref_s[l] >>> shift)) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d line %0d: %0d expected %0d", run, l, got, sat(ref_s[l] >>> shift));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
