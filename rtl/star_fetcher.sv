// star_fetcher: Q / X / Wk / Wv fetcher of the STAR core.
//
// Takes the beats that arrive from external DRAM, each tagged with its
// destination (fetch_tgt_e) and logical position, and steers them into the
// banks of the on-chip SRAMs:
//   X    row h (hidden index), token group g, buffer b -> X bank h mod XB,
//        word (b*NG + g)*(H_MAX/XB) + h/XB, one beat = COLS tokens
//   Q    element d, lane c        -> Q bank d mod QB, word d/QB, lane c
//   Wk/Wv row h, lane c          -> W bank h mod XB, word h/XB, lane c
//   code row h                   -> code SRAM word h (DH 4-bit codes)
// The bank interleaving lets the DLZS array read one hidden row per cycle and
// the PE array read XB hidden rows per cycle. The DRAM-side request logic
// is outside the core: the paper names the fetcher but does not describe it,
// so this address map is an own choice. Combinational decode plus a
// registered beat counter; no back-pressure.
module star_fetcher
  import star_pkg::*;
#(
  parameter int unsigned SEG_LEN = 256,
  parameter int unsigned COLS    = 32,
  parameter int unsigned H_MAX   = 160,
  parameter int unsigned XB      = 4,
  parameter int unsigned QB      = 2,
  parameter int unsigned BEAT_W  = DRAM_W,
  localparam int unsigned NG     = SEG_LEN / COLS,
  localparam int unsigned XAW    = $clog2(2 * NG * H_MAX / XB)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 beat_valid_i,
  input  fetch_tgt_e           beat_tgt_i,
  input  logic [15:0]          beat_row_i,   // h (X, W, code) or d (Q)
  input  logic [7:0]           beat_col_i,   // token group (X) or lane (Q, W)
  input  logic                 beat_buf_i,   // X buffer
  input  logic [BEAT_W-1:0]    beat_data_i,
  output logic [XB-1:0]        x_we_o,
  output logic [XAW-1:0]       x_waddr_o,
  output logic [QB-1:0]        q_we_o,
  output logic [XB-1:0]        wk_we_o,
  output logic [XB-1:0]        wv_we_o,
  output logic                 code_we_o,
  output logic [15:0]          addr_o,       // word address for Q, W and code
  output logic [7:0]           lane_o,
  output logic [BEAT_W-1:0]    data_o,
  output logic [31:0]          beats_o
);
  always_comb begin
    x_we_o = '0; q_we_o = '0; wk_we_o = '0; wv_we_o = '0; code_we_o = 1'b0;
    x_waddr_o = XAW'((32'(beat_buf_i) * NG + 32'(beat_col_i)) * (H_MAX / XB) + 32'(beat_row_i) / XB);
    addr_o = '0;
    lane_o = beat_col_i;
    data_o = beat_data_i;
    if (beat_valid_i) begin
      unique case (beat_tgt_i)
        TGT_X:    x_we_o[32'(beat_row_i) % XB] = 1'b1;
        TGT_Q:    begin q_we_o[32'(beat_row_i) % QB] = 1'b1;  addr_o = 16'(32'(beat_row_i) / QB); end
        TGT_WK:   begin wk_we_o[32'(beat_row_i) % XB] = 1'b1; addr_o = 16'(32'(beat_row_i) / XB); end
        TGT_WV:   begin wv_we_o[32'(beat_row_i) % XB] = 1'b1; addr_o = 16'(32'(beat_row_i) / XB); end
        TGT_CODE: begin code_we_o = 1'b1;                     addr_o = beat_row_i; end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)            beats_o <= '0;
    else if (beat_valid_i) beats_o <= beats_o + 1'b1;
  end

  // every beat row must lie inside the buffers
  assert property (@(posedge clk) disable iff (!rst_n)
    (beat_valid_i && beat_tgt_i != TGT_Q) |-> 32'(beat_row_i) < H_MAX);
endmodule
