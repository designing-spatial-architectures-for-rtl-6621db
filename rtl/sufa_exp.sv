// sufa_exp: exponential unit of SU-FA for non-positive arguments.
//
// Computes e^x for x <= 0, with x in signed fixed point with EXP_FRAC
// fractional bits, as 2^(x*log2 e). log2 e is approximated by the shift-add
// 1 + 1/2 - 1/16 = 1.4375, the integer part of the exponent becomes a right
// shift and the fractional part f uses the linear approximation 2^f ~ 1 + f.
// Result is unsigned Q1.15 (1.0 = 0x8000); arguments above 0 are clamped to 0
// (result 1.0), results below 2^-16 flush to 0. The paper does not describe its
// exponent hardware: this base-2 shift-and-linear scheme is an own choice.
// Purely combinational.
module sufa_exp
  import star_pkg::*;
#(
  parameter int unsigned ARG_W = 32
) (
  input  logic signed [ARG_W-1:0] x_i,
  output logic [P_W-1:0]          y_o
);
  logic signed [ARG_W+1:0] xa, y2;
  logic signed [ARG_W+1:0] n;      // floor of the base-2 exponent (<= 0)
  logic [EXP_FRAC-1:0]     f;
  logic [P_W:0]            mant;   // 1.f in Q1.15, up to just below 2.0

  always_comb begin
    xa   = (x_i > 0) ? '0 : (ARG_W+2)'(x_i);
    y2   = xa + (xa >>> 1) - (xa >>> 4);
    n    = y2 >>> EXP_FRAC;
    f    = y2[EXP_FRAC-1:0];
    mant = (P_W+1)'(P_ONE) + ((P_W+1)'(f) << (P_FRAC - EXP_FRAC));
    if (n < -(ARG_W+2)'(16)) y_o = '0;
    else                     y_o = P_W'(mant >> (-n));
  end
endmodule
