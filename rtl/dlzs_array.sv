// dlzs_array: cross-stage DLZS prediction unit (ROWS x COLS shift-adder array).
//
// An output-stationary array of dlzs_cell. Every cycle with in_valid_i, each
// row receives one "B" operand (turned into a DLZS code by a per-row
// configurable LZE) and each column one INT8 "A" value; cell (r,c) adds
// A_c << pos(B_r) with the sign of B_r applied to A first. After N valid
// cycles cell (r,c) holds the estimate of sum_n A_c[n]*B_r[n].
//
// The same array serves both prediction phases:
//  * phase 1.1 (key prediction), encode_i = 0: rows carry the pre-converted
//    codes of Wk (one output dimension per row), columns carry X (one token per
//    column, 8 MSBs), reduction over the hidden dimension -> K_hat^T.
//  * phase 1.2 (attention prediction), encode_i = 1: rows carry Q (one query
//    per row), encoded on line, columns carry K_hat (one key per column),
//    reduction over d_h -> A_hat.
// Zero elimination: a row whose code is zero, or a column whose A is zero,
// does not update its cells; zero_rows_o counts eliminated row-steps.
//
// Interface/timing: clr_i clears all cells (one cycle). Results on acc_o one
// cycle after the last in_valid_i. Size 128 x 32 follows the paper; the
// row/column assignment of the two phases is this design's own choice.
module dlzs_array
  import star_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned COLS  = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr_i,
  input  logic                     in_valid_i,
  input  logic                     encode_i,
  input  logic signed [PRED_W-1:0] row_i [ROWS],
  input  logic signed [PRED_W-1:0] col_i [COLS],
  output logic signed [ACC_W-1:0]  acc_o [ROWS][COLS],
  output logic [31:0]              zero_rows_o
);
  logic [CODE_W-1:0] code [ROWS];
  logic              zero [ROWS];
  logic [$clog2(ROWS+1)-1:0] nzero;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    dlzs_lze u_lze (.b_i(row_i[r]), .bypass_i(!encode_i), .code_o(code[r]), .zero_o(zero[r]));
    for (genvar c = 0; c < COLS; c++) begin : g_col
      dlzs_cell #(.ACC_W(ACC_W)) u_cell (
        .clk, .rst_n, .clr_i,
        .en_i  (in_valid_i),
        .a_i   (col_i[c]),
        .code_i(code[r]),
        .acc_o (acc_o[r][c])
      );
    end
  end

  always_comb begin
    nzero = '0;
    for (int r = 0; r < ROWS; r++) nzero += $bits(nzero)'(zero[r]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)          zero_rows_o <= '0;
    else if (in_valid_i) zero_rows_o <= zero_rows_o + 32'(nzero);
  end
endmodule
