// dlzs_lze: configurable leading-zero encoder (LZE) of the DLZS prediction unit.
//
// Converts one INT8 operand B into the 4-bit DLZS code used by the shift-adder
// array. Following the pre-flipping-via-symbol-prediction (PSP) steps, B is
// first turned into sign-magnitude form, then the position of the leading one
// of |B| is found; the product A*B is later approximated as
// (sign ? -A : A) << position, i.e. |B| is rounded down to a power of two
// (24 x 6 is estimated as 24 x 4 = 96).
//
// Interface (purely combinational, no clock):
//   b_i      INT8 operand to convert.
//   bypass_i 1: b_i already carries a pre-converted code in bits [3:0]
//            (the weights Wk are converted offline); it is passed through.
//   code_o   {sign, pos[2:0]}; pos = 7 marks B == 0.
//   zero_o   B is zero: the array skips it (zero elimination).
// Own choices: -128 is saturated to magnitude 127; position 7 encodes zero.
module dlzs_lze
  import star_pkg::*;
(
  input  logic signed [PRED_W-1:0] b_i,
  input  logic                     bypass_i,
  output logic [CODE_W-1:0]        code_o,
  output logic                     zero_o
);
  logic [PRED_W-2:0] mag;
  logic [2:0]        pos;

  always_comb begin
    // sign-magnitude conversion (step 1)
    if (b_i == -8'sd128)   mag = 7'd127;
    else if (b_i[PRED_W-1]) mag = 7'(-b_i);
    else                    mag = b_i[PRED_W-2:0];
    // leading-one position (step 2)
    pos = LZ_ZERO_POS;
    for (int i = 0; i < PRED_W-1; i++)
      if (mag[i]) pos = 3'(i);
    if (bypass_i) begin
      code_o = b_i[CODE_W-1:0];
    end else begin
      code_o = {b_i[PRED_W-1] & (mag != '0), pos};
    end
    zero_o = (code_o[2:0] == LZ_ZERO_POS);
  end
endmodule
