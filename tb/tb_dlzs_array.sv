// tb_dlzs_array: self-checking test of the DLZS shift-adder array at its full
// 128x32 size. Random accumulation runs in both modes (rows given as ready
// codes, and rows given as INT8 values encoded on line) are checked against
// a software model that multiplies each column value by the row value rounded
// down to a power of two. Zero rows are counted and compared. One input step
// is taken per cycle and the sums are visible one cycle after the last step.
`timescale 1ns/1ps
module tb_dlzs_array;
  import star_pkg::*;
  localparam int R = 128, C = 32;
  logic clk = 1'b0, rst_n = 1'b0, clr, in_valid, encode;
  logic signed [7:0] row [R];
  logic signed [7:0] col [C];
  logic signed [31:0] acc [R][C];
  logic [31:0] zero_rows;
  int checks = 0, failures = 0;
  longint ref_acc [R][C];
  longint ref_zero;

  dlzs_array dut (.clk, .rst_n, .clr_i(clr), .in_valid_i(in_valid), .encode_i(encode),
    .row_i(row), .col_i(col), .acc_o(acc), .zero_rows_o(zero_rows));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint p2floor(input int v);
    int m, p;
    m = (v < 0) ? -v : v;
    if (m > 127) m = 127;
    if (m == 0) return 0;
    p = 1;
    while (p * 2 <= m) p = p * 2;
    return (v < 0) ? -p : p;
  endfunction

  initial begin
    clr = 1'b0; in_valid = 1'b0; encode = 1'b0;
    for (int r = 0; r < R; r++) row[r] = '0;
    for (int c = 0; c < C; c++) col[c] = '0;
    ref_zero = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int run = 0; run < 6; run++) begin
      int steps;
      encode = run[0];
      steps = int'($urandom_range(40, 1));
      clr = 1'b1;
      @(posedge clk); #1;
      clr = 1'b0;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) ref_acc[r][c] = 0;
      for (int s = 0; s < steps; s++) begin
        for (int r = 0; r < R; r++) begin
          int bv, pos;
          bit zr;
          if ($urandom_range(9, 0) == 0) bv = 0;
          else bv = int'($urandom_range(255, 0)) - 128;
          if (encode) begin
            row[r] = 8'(bv);
            zr = (bv == 0);
          end else begin
            // code form {sign, position}; position 7 is a zero row
            pos = (bv == 0) ? 7 : int'($urandom_range(6, 0));
            row[r] = 8'({4'b0, bv < 0, 3'(pos)});
            bv = (pos == 7) ? 0 : ((bv < 0) ? -(1 << pos) : (1 << pos));
            zr = (pos == 7);
          end
          if (zr) ref_zero++;
          for (int c = 0; c < C; c++) begin
            if (r == 0) col[c] = ($urandom_range(7, 0) == 0) ? 8'sd0 : 8'($urandom_range(255, 0));
            ref_acc[r][c] += longint'(col[c]) * p2floor(bv);
          end
        end
        in_valid = 1'b1;
        @(posedge clk); #1;
        in_valid = 1'b0;
        if ($urandom_range(3, 0) == 0) begin @(posedge clk); #1; end   // idle gaps
      end
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (longint'(acc[r][c]) != ref_acc[r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL run %0d acc[%0d][%0d]=%0d expected %0d", run, r, c, acc[r][c], ref_acc[r][c]);
          end
        end
      checks++;
      if (longint'(zero_rows) != ref_zero) begin
        failures++;
        $display("FAIL zero rows %0d expected %0d", zero_rows, ref_zero);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
