// star_core: one STAR sparse-attention accelerator core (top level).
//
// The core computes sparse attention for a block of LINES queries against a
// sequence cut into tiles (sub-segments) of SEG_LEN keys, without ever writing
// the attention matrix or intermediate rows off chip:
//   1. prediction: the DLZS shift-adder array estimates K_hat = X*Wk from
//      pre-converted leading-one codes of Wk, then A_hat = Q*K_hat^T with Q
//      encoded on line (multiplier-free, INT8 MSBs);
//   2. top-k: the SADS unit picks, per query row and tile, up to k_sel keys
//      inside the sphere of radius radius_i around the row maximum;
//   3. the mask scheduler turns the picks into a binary key mask and issues
//      each needed key once, maximum keys first;
//   4. the PE array generates K and V only for issued keys (on-demand KV);
//   5. SU-FA runs descend updating per query line, merges tiles and finally
//      normalises; outputs stream on out_valid_o, PES dimensions per cycle.
// Data arrives from DRAM as tagged beats through the fetcher. X is double
// buffered: the core raises tile_req_o for tile t and starts it on
// tile_go_i, once X buffer (t mod 2) holds it; Q, Wk, Wv and the Wk codes
// are loaded once before start_i.
//
// Configuration (sampled while busy): n_tiles_i, h_len_i (hidden size, a
// multiple of XB, <= H_MAX), k_sel_i (top-k/n picks per tile row), radius_i,
// and the right shifts that requantise K_hat (pred), A_hat (score), K/V (kv)
// and scale SU-FA exponent arguments (exp).
// Sizes follow the paper where it gives them (128 queries in parallel, a
// 128x32 DLZS array, a 128x4 PE array, 128 SU-FA lines with 2+2 PEs); the
// buffer organisation and H_MAX (what the 96 KB weight SRAM holds at
// d_h = 128) are own choices.
// Lint notes: the fetcher and controller drive 16-bit row and 8-bit lane
// buses shared by all buffers, and each buffer uses only the low address bits
// it needs, so the upper bits of f_addr, f_lane, code_raddr and w_raddr stay
// unused by design, as does the top bit of the SU-FA pair counter (it reaches
// d_h/2 only after the last Q read). The SADS pick score and last flag and the
// scheduler's own per-tile key counter are not needed here: the scheduler
// works from the pick indices, and keys are counted across tiles from the
// controller's acknowledges.
module star_core
  import star_pkg::*;
#(
  parameter int unsigned LINES   = 128,
  parameter int unsigned DH      = 128,
  parameter int unsigned COLS    = 32,
  parameter int unsigned SEG_LEN = 256,
  parameter int unsigned H_MAX   = 160,
  parameter int unsigned XB      = 4,
  parameter int unsigned QB      = 2,
  parameter int unsigned BEAT_W  = DRAM_W,
  localparam int unsigned NG     = SEG_LEN / COLS,
  localparam int unsigned HQ     = H_MAX / XB,
  localparam int unsigned IDX_W  = $clog2(SEG_LEN),
  localparam int unsigned LINE_W = $clog2(LINES),
  localparam int unsigned XAW    = $clog2(2 * NG * HQ),
  localparam int unsigned SAW    = $clog2(LINES * NG),
  localparam int unsigned NP     = DH / QB
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // DRAM beats into the fetcher
  input  logic                     beat_valid_i,
  input  fetch_tgt_e               beat_tgt_i,
  input  logic [15:0]              beat_row_i,
  input  logic [7:0]               beat_col_i,
  input  logic                     beat_buf_i,
  input  logic [BEAT_W-1:0]        beat_data_i,
  // operation control
  input  logic                     start_i,
  input  logic [7:0]               n_tiles_i,
  input  logic [15:0]              h_len_i,
  input  logic [IDX_W:0]           k_sel_i,
  input  logic [SCORE_W-1:0]       radius_i,
  input  logic [5:0]               pred_shift_i,
  input  logic [5:0]               score_shift_i,
  input  logic [5:0]               kv_shift_i,
  input  logic [5:0]               exp_shift_i,
  input  logic                     tile_go_i,
  output logic                     tile_req_o,
  output logic [7:0]               tile_o,
  output logic                     busy_o,
  output logic                     done_o,
  // attention output, PES (= QB) dimensions of every query per cycle
  output logic                     out_valid_o,
  output logic [$clog2(NP+1)-1:0]  out_pair_o,
  output logic signed [DATA_W-1:0] out_o [LINES][QB],
  output logic [SEG_LEN-1:0]       key_mask_o,   // keys whose K/V the tile needs
  output star_stats_t              stats_o
);
  localparam int unsigned XW  = COLS * DATA_W;
  localparam int unsigned QW  = LINES * DATA_W;
  localparam int unsigned WW  = DH * DATA_W;
  localparam int unsigned CW  = DH * CODE_W;
  localparam int unsigned QLW = (QW < BEAT_W) ? QW : BEAT_W;
  localparam int unsigned WLW = (WW < BEAT_W) ? WW : BEAT_W;
  localparam int unsigned CLW = (CW < BEAT_W) ? CW : BEAT_W;
  localparam int unsigned QAW = (DH / QB > 1) ? $clog2(DH / QB) : 1;
  localparam int unsigned WAW = (HQ > 1) ? $clog2(HQ) : 1;
  localparam int unsigned CAW = $clog2(H_MAX);
  localparam int unsigned QLN = (QW / QLW > 1) ? $clog2(QW / QLW) : 1;
  localparam int unsigned WLN = (WW / WLW > 1) ? $clog2(WW / WLW) : 1;
  localparam int unsigned CLN = (CW / CLW > 1) ? $clog2(CW / CLW) : 1;

  // ---------------- fetcher
  logic [XB-1:0]     f_x_we, f_wk_we, f_wv_we;
  logic [QB-1:0]     f_q_we;
  logic              f_code_we;
  logic [XAW-1:0]    f_x_waddr;
  logic [15:0]       f_addr;
  logic [7:0]        f_lane;
  logic [BEAT_W-1:0] f_data;
  logic [31:0]       f_beats;

  star_fetcher #(.SEG_LEN(SEG_LEN), .COLS(COLS), .H_MAX(H_MAX), .XB(XB), .QB(QB), .BEAT_W(BEAT_W)) u_fetch (
    .clk, .rst_n, .beat_valid_i, .beat_tgt_i, .beat_row_i, .beat_col_i, .beat_buf_i, .beat_data_i,
    .x_we_o(f_x_we), .x_waddr_o(f_x_waddr), .q_we_o(f_q_we), .wk_we_o(f_wk_we), .wv_we_o(f_wv_we),
    .code_we_o(f_code_we), .addr_o(f_addr), .lane_o(f_lane), .data_o(f_data), .beats_o(f_beats));

  // ---------------- controller
  logic              dl_clr, dl_valid, dl_encode, khat_latch;
  logic [15:0]       dl_d, code_raddr, q_raddr, w_raddr;
  logic [XAW-1:0]    x_raddr;
  logic              w_sel_v;
  logic [IDX_W-1:0]  key;
  logic              sc_we;
  logic [SAW-1:0]    sc_waddr, sc_raddr;
  logic [LINE_W-1:0] sc_row, sads_tag;
  logic              sads_valid, sads_ready, sads_done;
  logic              sched_clr, sched_start, sched_done, key_valid, key_ack;
  logic [IDX_W-1:0]  key_idx;
  logic              pe_clr, pe_valid, pe_latch_k, pe_latch_v;
  logic              sufa_valid, sufa_active, sufa_ready, sufa_done;
  logic [1:0]        sufa_cmd;
  logic [31:0]       wait_cycles;

  star_ctrl #(.LINES(LINES), .DH(DH), .COLS(COLS), .SEG_LEN(SEG_LEN), .H_MAX(H_MAX), .XB(XB)) u_ctrl (
    .clk, .rst_n, .start_i, .n_tiles_i, .h_len_i, .tile_go_i, .busy_o, .done_o, .tile_req_o, .tile_o,
    .wait_cycles_o(wait_cycles),
    .dl_clr_o(dl_clr), .dl_valid_o(dl_valid), .dl_encode_o(dl_encode), .dl_d_o(dl_d),
    .khat_latch_o(khat_latch), .code_raddr_o(code_raddr), .x_raddr_o(x_raddr), .q_raddr_o(q_raddr),
    .w_raddr_o(w_raddr), .w_sel_v_o(w_sel_v), .key_o(key),
    .sc_we_o(sc_we), .sc_waddr_o(sc_waddr), .sc_row_o(sc_row), .sc_raddr_o(sc_raddr),
    .sads_valid_o(sads_valid), .sads_tag_o(sads_tag), .sads_ready_i(sads_ready), .sads_done_i(sads_done),
    .sched_clr_o(sched_clr), .sched_start_o(sched_start), .sched_done_i(sched_done),
    .key_valid_i(key_valid), .key_idx_i(key_idx), .key_ack_o(key_ack),
    .pe_clr_o(pe_clr), .pe_valid_o(pe_valid), .pe_latch_k_o(pe_latch_k), .pe_latch_v_o(pe_latch_v),
    .sufa_valid_o(sufa_valid), .sufa_cmd_o(sufa_cmd), .sufa_active_o(sufa_active),
    .sufa_ready_i(sufa_ready), .sufa_done_i(sufa_done));

  // ---------------- token SRAM: X (XB banks, two tile buffers) and Q (QB banks)
  logic [XW-1:0] x_rd [XB];
  logic [QW-1:0] q_rd [QB];
  logic [$clog2(NP+1)-1:0] sufa_qaddr;

  for (genvar b = 0; b < XB; b++) begin : g_x
    star_sram #(.WORDS(2 * NG * HQ), .LANES(1), .LANE_W(XW)) u_x (
      .clk, .we_i(f_x_we[b]), .waddr_i(f_x_waddr), .wlane_i(1'b0), .wdata_i(f_data[XW-1:0]),
      .raddr_i(x_raddr), .rdata_o(x_rd[b]));
  end
  for (genvar b = 0; b < QB; b++) begin : g_q
    star_sram #(.WORDS(DH / QB), .LANES(QW / QLW), .LANE_W(QLW)) u_q (
      .clk, .we_i(f_q_we[b]), .waddr_i(QAW'(f_addr)), .wlane_i(QLN'(f_lane)),
      .wdata_i(f_data[QLW-1:0]),
      .raddr_i(sufa_active ? QAW'(sufa_qaddr) : QAW'(32'(q_raddr) / QB)), .rdata_o(q_rd[b]));
  end

  // ---------------- weight SRAM: Wk, Wv (XB banks each) and the Wk codes
  logic [WW-1:0] wk_rd [XB];
  logic [WW-1:0] wv_rd [XB];
  logic [CW-1:0] code_rd;

  for (genvar b = 0; b < XB; b++) begin : g_w
    star_sram #(.WORDS(HQ), .LANES(WW / WLW), .LANE_W(WLW)) u_wk (
      .clk, .we_i(f_wk_we[b]), .waddr_i(WAW'(f_addr)), .wlane_i(WLN'(f_lane)),
      .wdata_i(f_data[WLW-1:0]), .raddr_i(WAW'(w_raddr)), .rdata_o(wk_rd[b]));
    star_sram #(.WORDS(HQ), .LANES(WW / WLW), .LANE_W(WLW)) u_wv (
      .clk, .we_i(f_wv_we[b]), .waddr_i(WAW'(f_addr)), .wlane_i(WLN'(f_lane)),
      .wdata_i(f_data[WLW-1:0]), .raddr_i(WAW'(w_raddr)), .rdata_o(wv_rd[b]));
  end
  star_sram #(.WORDS(H_MAX), .LANES(CW / CLW), .LANE_W(CLW)) u_code (
    .clk, .we_i(f_code_we), .waddr_i(CAW'(f_addr)), .wlane_i(CLN'(f_lane)),
    .wdata_i(f_data[CLW-1:0]), .raddr_i(CAW'(code_raddr)), .rdata_o(code_rd));

  // ---------------- DLZS prediction array and the K_hat buffer
  logic signed [PRED_W-1:0] dl_row [LINES];
  logic signed [PRED_W-1:0] dl_col [COLS];
  logic signed [31:0]       dl_acc [LINES][COLS];
  logic signed [PRED_W-1:0] khat   [COLS][DH];
  logic [31:0]              zero_rows;

  always_comb begin
    for (int r = 0; r < LINES; r++) begin
      if (dl_encode)    dl_row[r] = q_rd[32'(dl_d) % QB][r*DATA_W + DATA_W - PRED_W +: PRED_W];
      else if (r < DH)  dl_row[r] = PRED_W'(code_rd[r*CODE_W +: CODE_W]);
      else              dl_row[r] = PRED_W'({1'b0, LZ_ZERO_POS});
    end
    for (int c = 0; c < COLS; c++) begin
      if (dl_encode) dl_col[c] = khat[c][32'(dl_d) % DH];
      else           dl_col[c] = x_rd[32'(dl_d) % XB][c*DATA_W + DATA_W - PRED_W +: PRED_W];
    end
  end

  dlzs_array #(.ROWS(LINES), .COLS(COLS), .ACC_W(32)) u_dlzs (
    .clk, .rst_n, .clr_i(dl_clr), .in_valid_i(dl_valid), .encode_i(dl_encode),
    .row_i(dl_row), .col_i(dl_col), .acc_o(dl_acc), .zero_rows_o(zero_rows));

  for (genvar c = 0; c < COLS; c++) begin : g_khc
    for (genvar d = 0; d < DH; d++) begin : g_khd
      always_ff @(posedge clk)
        if (khat_latch) khat[c][d] <= sat8(64'(dl_acc[d][c] >>> pred_shift_i));
    end
  end

  // ---------------- temp SRAM: estimated scores, one word = COLS keys of a row
  logic [XW-1:0] sc_wdata, sc_rd;
  always_comb
    for (int c = 0; c < COLS; c++)
      sc_wdata[c*SCORE_W +: SCORE_W] = sat16(64'(dl_acc[sc_row][c] >>> score_shift_i));

  star_sram #(.WORDS(LINES * NG), .LANES(1), .LANE_W(XW)) u_score (
    .clk, .we_i(sc_we), .waddr_i(sc_waddr), .wlane_i(1'b0), .wdata_i(sc_wdata),
    .raddr_i(sc_raddr), .rdata_o(sc_rd));

  // ---------------- SADS
  logic signed [SCORE_W-1:0] sads_in [COLS];
  logic                      pick_valid, pick_first, pick_last, seg_early;
  logic [IDX_W-1:0]          pick_idx;
  logic signed [SCORE_W-1:0] pick_score;
  logic [LINE_W-1:0]         pick_line;
  logic [IDX_W:0]            seg_evicted;
  always_comb for (int c = 0; c < COLS; c++) sads_in[c] = sc_rd[c*SCORE_W +: SCORE_W];

  sads_unit #(.SEG_LEN(SEG_LEN), .GROUP(COLS), .TAG_W(LINE_W)) u_sads (
    .clk, .rst_n, .k_sel_i, .radius_i, .in_valid_i(sads_valid), .in_ready_o(sads_ready),
    .in_tag_i(sads_tag), .in_score_i(sads_in), .out_valid_o(pick_valid), .out_idx_o(pick_idx),
    .out_score_o(pick_score), .out_first_o(pick_first), .out_last_o(pick_last), .out_tag_o(pick_line),
    .seg_done_o(sads_done), .evicted_o(seg_evicted), .early_o(seg_early));

  // ---------------- mask scheduler
  logic [LINES-1:0]   use_l, init_l;
  logic [15:0]        n_keys, n_rebcast;

  kv_sched #(.LINES(LINES), .SEG_LEN(SEG_LEN)) u_sched (
    .clk, .rst_n, .clr_i(sched_clr), .pick_valid_i(pick_valid), .pick_line_i(pick_line),
    .pick_idx_i(pick_idx), .pick_first_i(pick_first), .start_i(sched_start), .done_o(sched_done),
    .key_valid_o(key_valid), .key_idx_o(key_idx), .use_o(use_l), .init_o(init_l),
    .key_ack_i(key_ack), .union_o(key_mask_o), .n_keys_o(n_keys), .n_rebcast_o(n_rebcast));

  // ---------------- PE array: on-demand K/V generation
  logic signed [DATA_W-1:0] pe_x [XB];
  logic signed [DATA_W-1:0] pe_w [DH][XB];
  logic signed [DATA_W-1:0] k_row [DH];
  logic signed [DATA_W-1:0] v_row [DH];
  always_comb
    for (int b = 0; b < XB; b++) begin
      pe_x[b] = x_rd[b][(32'(key) % COLS)*DATA_W +: DATA_W];
      for (int d = 0; d < DH; d++)
        pe_w[d][b] = w_sel_v ? wv_rd[b][d*DATA_W +: DATA_W] : wk_rd[b][d*DATA_W +: DATA_W];
    end

  kv_pe_array #(.LINES(DH), .MACS(XB)) u_pe (
    .clk, .rst_n, .clr_i(pe_clr), .in_valid_i(pe_valid), .x_i(pe_x), .w_i(pe_w), .shift_i(kv_shift_i),
    .latch_k_i(pe_latch_k), .latch_v_i(pe_latch_v), .k_o(k_row), .v_o(v_row));

  // ---------------- SU-FA
  logic signed [DATA_W-1:0] sufa_q [QB][LINES];
  logic [31:0]              n_desc, n_fix, n_merge;
  always_comb
    for (int p = 0; p < QB; p++)
      for (int i = 0; i < LINES; i++) sufa_q[p][i] = q_rd[p][i*DATA_W +: DATA_W];

  sufa_unit #(.LINES(LINES), .DH(DH), .PES(QB)) u_sufa (
    .clk, .rst_n, .cmd_valid_i(sufa_valid), .cmd_i(sufa_cmd_e'(sufa_cmd)), .cmd_ready_o(sufa_ready),
    .cmd_done_o(sufa_done), .use_i(use_l), .init_i(init_l), .k_i(k_row), .v_i(v_row),
    .exp_shift_i, .q_addr_o(sufa_qaddr), .q_i(sufa_q), .out_valid_o, .out_pair_o, .out_o,
    .n_desc_o(n_desc), .n_fix_o(n_fix), .n_merge_o(n_merge));

  // ---------------- event counters
  logic [31:0] c_segs, c_early, c_evict, c_keys, c_rebcast;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c_segs <= '0; c_early <= '0; c_evict <= '0; c_keys <= '0; c_rebcast <= '0;
    end else begin
      if (sads_done) begin
        c_segs  <= c_segs + 1'b1;
        c_early <= c_early + 32'(seg_early);
        c_evict <= c_evict + 32'(seg_evicted);
      end
      if (key_ack) c_keys <= c_keys + 1'b1;
      if (sched_clr && busy_o) c_rebcast <= c_rebcast + 32'(n_rebcast);
    end
  end

  assign stats_o = '{zero_rows: zero_rows, sads_segs: c_segs, sads_early: c_early,
                     sads_evicted: c_evict, keys: c_keys, rebcast: c_rebcast, desc_upd: n_desc,
                     max_fix: n_fix, tile_merge: n_merge, tile_wait: wait_cycles, beats: f_beats};

  // structural rules of this organisation
  initial begin
    assert (DH <= LINES) else $error("phase 1.1 maps one output dimension per array row");
    assert (XW <= BEAT_W && COLS * SCORE_W == XW) else $error("one X word must fit a DRAM beat");
    assert (QB == 2) else $error("SU-FA lines read two Q elements per cycle");
  end
endmodule
