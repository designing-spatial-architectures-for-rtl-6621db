// star_ctrl: tiled computation controller of the STAR core.
//
// Sequences one attention operation: a block of LINES queries against
// n_tiles_i sub-segment tiles of SEG_LEN keys each. For every tile:
//   WAIT   request the tile (tile_req_o) and wait for tile_go_i, i.e. for the
//          fetcher to have filled X buffer (tile mod 2); the other buffer may be
//          filled meanwhile, so loading overlaps computation;
//   for each group of COLS keys:
//     P11  DLZS phase 1.1, h_len_i cycles: K_hat of COLS tokens x DH dims
//          from the pre-converted Wk codes (rows) and X MSBs (columns);
//     KL   latch K_hat into the K_hat buffer;
//     P12  DLZS phase 1.2, DH cycles: A_hat of LINES queries x COLS keys
//          with Q encoded on line;
//     DR   drain A_hat into the score SRAM, one query row per cycle;
//   SADS   feed each query row of the tile (SEG_LEN/COLS beats) to the SADS
//          unit and wait for its picks;
//   KEYS   start the mask scheduler; for every key it issues, generate K
//          (h_len_i/XB cycles) and V on the PE array, run SU-FA on it, then
//          acknowledge the key;
//   TEND   SU-FA tiles synchronisation; clear the mask.
// After the last tile SU-FA normalises and streams the outputs; done_o pulses.
//
// SRAM reads have one cycle of latency: every *_valid_o / *_d_o strobe that
// qualifies read data is the registered copy of the address-phase signal.
// The phase order follows the paper's pipeline (prediction, top-k, on-demand
// KV, SU-FA); the fine-grained sequencing and the stall-free serial order of
// the phases are own choices (the paper's detailed hardware appendix is not
// available).
module star_ctrl #(
  parameter int unsigned LINES   = 128,
  parameter int unsigned DH      = 128,
  parameter int unsigned COLS    = 32,
  parameter int unsigned SEG_LEN = 256,
  parameter int unsigned H_MAX   = 160,
  parameter int unsigned XB      = 4,
  localparam int unsigned NG     = SEG_LEN / COLS,
  localparam int unsigned HQ     = H_MAX / XB,
  localparam int unsigned IDX_W  = $clog2(SEG_LEN),
  localparam int unsigned XAW    = $clog2(2 * NG * HQ),
  localparam int unsigned SAW    = $clog2(LINES * NG),
  localparam int unsigned LINE_W = $clog2(LINES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start_i,
  input  logic [7:0]         n_tiles_i,
  input  logic [15:0]        h_len_i,      // multiple of XB, at most H_MAX
  input  logic               tile_go_i,
  output logic               busy_o,
  output logic               done_o,
  output logic               tile_req_o,
  output logic [7:0]         tile_o,
  output logic [31:0]        wait_cycles_o,
  // DLZS array
  output logic               dl_clr_o,
  output logic               dl_valid_o,   // data phase
  output logic               dl_encode_o,  // data phase: 1 = phase 1.2
  output logic [15:0]        dl_d_o,       // data phase: reduction index
  output logic               khat_latch_o,
  // token / weight SRAM reads (address phase)
  output logic [15:0]        code_raddr_o,
  output logic [XAW-1:0]     x_raddr_o,
  output logic [15:0]        q_raddr_o,    // element index d (phase 1.2)
  output logic [15:0]        w_raddr_o,
  output logic               w_sel_v_o,    // data phase: 0 = Wk, 1 = Wv
  output logic [IDX_W-1:0]   key_o,        // key in generation
  // score SRAM
  output logic               sc_we_o,
  output logic [SAW-1:0]     sc_waddr_o,
  output logic [LINE_W-1:0]  sc_row_o,
  output logic [SAW-1:0]     sc_raddr_o,
  // SADS
  output logic               sads_valid_o,
  output logic [LINE_W-1:0]  sads_tag_o,
  input  logic               sads_ready_i,
  input  logic               sads_done_i,
  // mask scheduler
  output logic               sched_clr_o,
  output logic               sched_start_o,
  input  logic               sched_done_i,
  input  logic               key_valid_i,
  input  logic [IDX_W-1:0]   key_idx_i,
  output logic               key_ack_o,
  // PE array
  output logic               pe_clr_o,
  output logic               pe_valid_o,   // data phase
  output logic               pe_latch_k_o,
  output logic               pe_latch_v_o,
  // SU-FA
  output logic               sufa_valid_o,
  output logic [1:0]         sufa_cmd_o,
  output logic               sufa_active_o,
  input  logic               sufa_ready_i,
  input  logic               sufa_done_i
);
  typedef enum logic [4:0] {
    C_IDLE, C_WAIT, C_P11, C_P11W, C_KL, C_P12, C_P12W, C_DR,
    C_SFEED, C_SWAIT, C_SCHED, C_KWAIT, C_KGEN, C_KGENW, C_KLAT,
    C_SUFA, C_SUFAW, C_TEND, C_TENDW, C_FIN, C_FINW
  } cstate_e;
  cstate_e state;

  logic [15:0]       cnt;
  logic [7:0]        tile;
  logic [$clog2(NG+1)-1:0] g;
  logic [LINE_W:0]   row;
  logic              vpass;     // 0: K pass, 1: V pass
  logic              xbuf;
  logic              rd11, rd12, rdsc, rdpe;

  assign xbuf       = tile[0];
  assign tile_o     = tile;
  assign busy_o     = (state != C_IDLE);
  assign tile_req_o = (state == C_WAIT);
  assign sufa_active_o = (state == C_SUFA) || (state == C_SUFAW) || (state == C_TEND) ||
                         (state == C_TENDW) || (state == C_FIN) || (state == C_FINW);

  // address-phase decode
  always_comb begin
    rd11 = (state == C_P11);
    rd12 = (state == C_P12);
    rdsc = (state == C_SFEED) && sads_ready_i;
    rdpe = (state == C_KGEN);
    dl_clr_o     = (rd11 || rd12) && cnt == '0;
    khat_latch_o = (state == C_KL);
    code_raddr_o = cnt;
    q_raddr_o    = cnt;
    w_raddr_o    = cnt;
    if (rdpe)
      x_raddr_o = XAW'((32'(xbuf) * NG + 32'(key_o) / COLS) * HQ + 32'(cnt));
    else
      x_raddr_o = XAW'((32'(xbuf) * NG + 32'(g)) * HQ + 32'(cnt) / XB);
    sc_we_o      = (state == C_DR);
    sc_row_o     = LINE_W'(cnt);
    sc_waddr_o   = SAW'(32'(cnt) * NG + 32'(g));
    sc_raddr_o   = SAW'(32'(row) * NG + 32'(cnt));
    pe_clr_o     = rdpe && cnt == '0;
    pe_latch_k_o = (state == C_KLAT) && !vpass;
    pe_latch_v_o = (state == C_KLAT) && vpass;
    sched_start_o = (state == C_SCHED);
    sufa_valid_o = (state == C_SUFA) || (state == C_TEND) || (state == C_FIN);
    sufa_cmd_o   = (state == C_TEND) ? 2'd1 : (state == C_FIN) ? 2'd2 : 2'd0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= C_IDLE; cnt <= '0; tile <= '0; g <= '0; row <= '0; vpass <= 1'b0;
      done_o <= 1'b0; wait_cycles_o <= '0; dl_valid_o <= 1'b0; dl_encode_o <= 1'b0;
      dl_d_o <= '0; sads_valid_o <= 1'b0; sads_tag_o <= '0; pe_valid_o <= 1'b0;
      w_sel_v_o <= 1'b0; key_o <= '0; key_ack_o <= 1'b0; sched_clr_o <= 1'b0;
    end else begin
      // data-phase strobes: registered copies of the address phase
      dl_valid_o   <= rd11 || rd12;
      dl_encode_o  <= rd12;
      dl_d_o       <= cnt;
      sads_valid_o <= rdsc;
      sads_tag_o   <= LINE_W'(row);
      pe_valid_o   <= rdpe;
      w_sel_v_o    <= vpass;
      done_o       <= 1'b0;
      key_ack_o    <= 1'b0;
      sched_clr_o  <= 1'b0;
      case (state)
        C_IDLE: if (start_i) begin
          tile <= '0; wait_cycles_o <= '0; sched_clr_o <= 1'b1;
          state <= (n_tiles_i == '0) ? C_IDLE : C_WAIT;
        end
        C_WAIT: if (tile_go_i) begin g <= '0; cnt <= '0; state <= C_P11; end
                else wait_cycles_o <= wait_cycles_o + 1'b1;
        C_P11: if (cnt == h_len_i - 1'b1) begin cnt <= '0; state <= C_P11W; end
               else cnt <= cnt + 1'b1;
        C_P11W: state <= C_KL;
        C_KL:   state <= C_P12;
        C_P12: if (cnt == 16'(DH - 1)) begin cnt <= '0; state <= C_P12W; end
               else cnt <= cnt + 1'b1;
        C_P12W: state <= C_DR;
        C_DR: if (cnt == 16'(LINES - 1)) begin
                cnt <= '0;
                if (g == $bits(g)'(NG - 1)) begin g <= '0; row <= '0; state <= C_SFEED; end
                else begin g <= g + 1'b1; state <= C_P11; end
              end else cnt <= cnt + 1'b1;
        C_SFEED: if (sads_ready_i) begin
                   if (cnt == 16'(NG - 1)) begin cnt <= '0; state <= C_SWAIT; end
                   else cnt <= cnt + 1'b1;
                 end
        C_SWAIT: if (sads_done_i) begin
                   if (row == (LINE_W+1)'(LINES - 1)) state <= C_SCHED;
                   else begin row <= row + 1'b1; state <= C_SFEED; end
                 end
        C_SCHED: state <= C_KWAIT;
        C_KWAIT: if (sched_done_i) state <= C_TEND;
                 else if (key_valid_i && !key_ack_o) begin  // the acked key is still shown for one cycle
                   key_o <= key_idx_i; vpass <= 1'b0; cnt <= '0; state <= C_KGEN;
                 end
        C_KGEN: if (cnt == h_len_i / 16'(XB) - 1'b1) begin cnt <= '0; state <= C_KGENW; end
                else cnt <= cnt + 1'b1;
        C_KGENW: state <= C_KLAT;
        C_KLAT: if (!vpass) begin vpass <= 1'b1; state <= C_KGEN; end
                else state <= C_SUFA;
        C_SUFA:  if (sufa_ready_i) state <= C_SUFAW;
        C_SUFAW: if (sufa_done_i) begin key_ack_o <= 1'b1; state <= C_KWAIT; end
        C_TEND:  if (sufa_ready_i) state <= C_TENDW;
        C_TENDW: if (sufa_done_i) begin
                   sched_clr_o <= 1'b1;
                   if (tile == n_tiles_i - 1'b1) state <= C_FIN;
                   else begin tile <= tile + 1'b1; state <= C_WAIT; end
                 end
        C_FIN:   if (sufa_ready_i) state <= C_FINW;
        C_FINW:  if (sufa_done_i) begin done_o <= 1'b1; state <= C_IDLE; end
        default: state <= C_IDLE;
      endcase
    end
  end

  // the hidden length must fit the weight SRAM and the bank interleave
  assert property (@(posedge clk) disable iff (!rst_n)
    start_i && state == C_IDLE |-> h_len_i <= 16'(H_MAX) && h_len_i % 16'(XB) == 0 && h_len_i != 0);
endmodule
