// kv_pe_array: PE array for on-demand K/V generation (LINES PE lines x MACS).
//
// Produces one K or V row of a selected token: out[d] = sum_h x[h] * W[h][d].
// Each PE line owns one output dimension d and holds MACS INT16 multipliers;
// every cycle the token's next MACS input elements x[h..h+MACS-1] are
// broadcast to all lines (the row router) while each line receives its own
// MACS weights W[h..h+MACS-1][d] (the column router). A row of hidden size H
// therefore takes H/MACS cycles. The controller runs a K pass and a V pass for
// each key that the mask selects; latch_k_i / latch_v_i copy the accumulators,
// shifted right by shift_i and saturated to INT16, into the K or V register.
//
// Interface/timing: clr_i clears the accumulators; one MAC step per in_valid_i;
// accumulators are final one cycle after the last in_valid_i; latch_* takes
// one cycle. 128 lines x 4 follows the paper (Fig. "PE Array (128x4)"); the
// mapping of lines to output dimensions and the requantisation are own choices.
module kv_pe_array
  import star_pkg::*;
#(
  parameter int unsigned LINES = 128,
  parameter int unsigned MACS  = 4,
  parameter int unsigned ACC_W = 40
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr_i,
  input  logic                     in_valid_i,
  input  logic signed [DATA_W-1:0] x_i [MACS],
  input  logic signed [DATA_W-1:0] w_i [LINES][MACS],
  input  logic [5:0]               shift_i,
  input  logic                     latch_k_i,
  input  logic                     latch_v_i,
  output logic signed [DATA_W-1:0] k_o [LINES],
  output logic signed [DATA_W-1:0] v_o [LINES]
);
  logic signed [ACC_W-1:0] acc [LINES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < LINES; l++) begin acc[l] <= '0; k_o[l] <= '0; v_o[l] <= '0; end
    end else begin
      for (int l = 0; l < LINES; l++) begin
        if (clr_i) acc[l] <= '0;
        else if (in_valid_i) begin
          logic signed [ACC_W-1:0] sum;
          sum = acc[l];
          for (int m = 0; m < MACS; m++) sum += ACC_W'(x_i[m] * w_i[l][m]);
          acc[l] <= sum;
        end
        if (latch_k_i) k_o[l] <= sat16(64'(acc[l] >>> shift_i));
        if (latch_v_i) v_o[l] <= sat16(64'(acc[l] >>> shift_i));
      end
    end
  end
endmodule
