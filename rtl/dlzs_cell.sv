// dlzs_cell: one shift-adder cell of the DLZS prediction array.
//
// Accumulates the multiplier-free estimate of a dot product:
//   acc += (sign(B) ? -A : A) << pos(B)
// The opposite of A is taken before the shift (pre-flipping), so the shifted
// value never needs a sign fix-up. A step is skipped when either operand is
// zero (zero elimination), which leaves the accumulator untouched.
// Timing: clr_i clears in one cycle; each cycle with en_i adds one term.
module dlzs_cell
  import star_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr_i,
  input  logic                     en_i,
  input  logic signed [PRED_W-1:0] a_i,
  input  logic [CODE_W-1:0]        code_i,
  output logic signed [ACC_W-1:0]  acc_o
);
  logic signed [ACC_W-1:0] a_flip, term;

  always_comb begin
    a_flip = code_i[CODE_W-1] ? -ACC_W'(a_i) : ACC_W'(a_i);
    term   = a_flip <<< code_i[2:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                                         acc_o <= '0;
    else if (clr_i)                                     acc_o <= '0;
    else if (en_i && code_i[2:0] != LZ_ZERO_POS && a_i != '0) acc_o <= acc_o + term;
  end
endmodule
