// tb_star_core_full: end-to-end test of star_core at its full default size
// (128 query lines, d_h = 128, 128x32 DLZS array, 256-key tiles), hidden size 32,
// two tiles. No parameter of the core is overridden.
//
// The test loads random Q, Wk, Wv, Wk codes and X through the fetcher port,
// runs NT tiles (loading tile t+1 into the second X buffer while tile t
// computes, and holding back tile_go to force a wait), and checks:
//  * the key mask of every query row and tile against an independent model
//    of DLZS prediction and SADS selection (exact);
//  * every output against a floating-point softmax over the selected keys,
//    computed from exact K, V (tolerance for the fixed-point exponent);
//  * that each mechanism happened at least once: zero elimination, sphere
//    eviction, early termination, rebroadcast, descend update, MAX ensure,
//    tile merge with rescale and tile-wait stalls.
`timescale 1ns/1ps
module tb_star_core_full;
  import star_pkg::*;
  localparam int LINES = 128, DH = 128, COLS = 32, SEG_LEN = 256, H_MAX = 160;
  localparam int NT = 2, HL = 32, KSEL = 16, RAD = 400;
  localparam int PSH = 8, SSH = 5, KSH = 16, ESH = 19;
  localparam int BEAT_W = 512;
  localparam int IDX_W = $clog2(SEG_LEN);
  localparam longint WATCHDOG = 3000000;

  logic clk, rst_n, beat_valid, beat_buf, start, tile_go, tile_req, busy, done, out_valid;
  fetch_tgt_e beat_tgt;
  logic [15:0] beat_row;
  logic [7:0]  beat_col;
  logic [BEAT_W-1:0] beat_data;
  logic [7:0] tile;
  logic [$clog2(DH/2+1)-1:0] out_pair;
  logic signed [15:0] out [LINES][2];
  logic [SEG_LEN-1:0] key_mask;
  star_stats_t stats;

  star_core dut (
    .clk, .rst_n, .beat_valid_i(beat_valid), .beat_tgt_i(beat_tgt), .beat_row_i(beat_row),
    .beat_col_i(beat_col), .beat_buf_i(beat_buf), .beat_data_i(beat_data),
    .start_i(start), .n_tiles_i(8'(NT)), .h_len_i(16'(HL)), .k_sel_i((IDX_W+1)'(KSEL)),
    .radius_i(16'(RAD)), .pred_shift_i(6'(PSH)), .score_shift_i(6'(SSH)), .kv_shift_i(6'(KSH)),
    .exp_shift_i(6'(ESH)), .tile_go_i(tile_go), .tile_req_o(tile_req), .tile_o(tile),
    .busy_o(busy), .done_o(done), .out_valid_o(out_valid), .out_pair_o(out_pair), .out_o(out),
    .key_mask_o(key_mask), .stats_o(stats));

  localparam int NGR = SEG_LEN / COLS;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  logic signed [15:0] Q  [LINES][DH];
  logic signed [15:0] WK [H_MAX][DH];
  logic signed [15:0] WV [H_MAX][DH];
  logic signed [15:0] X  [NT][SEG_LEN][H_MAX];
  logic signed [15:0] KK [NT][SEG_LEN][DH];
  logic signed [15:0] VV [NT][SEG_LEN][DH];
  logic               SEL[NT][LINES][SEG_LEN];
  int                 MAXI[NT][LINES];
  logic signed [15:0] OUTV [LINES][DH];

  initial begin
    #(WATCHDOG * 10);
    failures++;
    $display("watchdog expired (ctrl state %0d, sched state %0d, sufa state %0d, tile %0d)", dut.u_ctrl.state, dut.u_sched.state, dut.u_sufa.state, tile);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always #5 clk = ~clk;

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic int msb8(input logic signed [15:0] v);
    return int'(v) >>> 8;
  endfunction
  // DLZS estimate of a*b: |b| rounded down to a power of two, sign of b
  function automatic longint dlterm(input int a, input int b);
    int mag, p2;
    if (a == 0 || b == 0) return 0;
    mag = (b < 0) ? -b : b;
    if (mag > 127) mag = 127;
    p2 = 1;
    while (p2 * 2 <= mag) p2 = p2 * 2;
    return (b < 0) ? -longint'(a) * p2 : longint'(a) * p2;
  endfunction
  function automatic longint satv(input longint v, input longint lim);
    if (v > lim - 1) return lim - 1;
    if (v < -lim) return -lim;
    return v;
  endfunction
  function automatic logic [3:0] code_of(input int b);
    int mag, pos;
    if (b == 0) return 4'b0111;
    mag = (b < 0) ? -b : b;
    if (mag > 127) mag = 127;
    pos = 0;
    while ((1 << (pos + 1)) <= mag) pos++;
    return {b < 0, 3'(pos)};
  endfunction
  function automatic logic signed [15:0] rnd16(input int range);
    int v;
    v = int'($urandom_range(2 * range, 0)) - range;
    return 16'(v);
  endfunction

  task automatic send(input fetch_tgt_e tgt, input int row, input int col, input bit bf,
                      input logic [BEAT_W-1:0] data);
    beat_valid = 1'b1; beat_tgt = tgt; beat_row = 16'(row); beat_col = 8'(col);
    beat_buf = bf; beat_data = data;
    @(posedge clk); #1;
    beat_valid = 1'b0;
  endtask

  task automatic load_x(input int t);
    logic [BEAT_W-1:0] w;
    for (int h = 0; h < HL; h++)
      for (int g = 0; g < NGR; g++) begin
        w = '0;
        for (int c = 0; c < COLS; c++) w[c*16 +: 16] = X[t][g*COLS + c][h];
        send(TGT_X, h, g, t[0], w);
      end
  endtask

  task automatic load_static();
    localparam int QLWx = (LINES * 16 < BEAT_W) ? LINES * 16 : BEAT_W;
    localparam int WLWx = (DH * 16 < BEAT_W) ? DH * 16 : BEAT_W;
    localparam int CLWx = (DH * 4 < BEAT_W) ? DH * 4 : BEAT_W;
    logic [LINES*16-1:0] qw;
    logic [DH*16-1:0]    ww;
    logic [DH*4-1:0]     cw;
    for (int d = 0; d < DH; d++) begin
      for (int i = 0; i < LINES; i++) qw[i*16 +: 16] = Q[i][d];
      for (int l = 0; l < LINES * 16 / QLWx; l++) send(TGT_Q, d, l, 1'b0, BEAT_W'(qw[l*QLWx +: QLWx]));
    end
    for (int h = 0; h < HL; h++) begin
      for (int d = 0; d < DH; d++) ww[d*16 +: 16] = WK[h][d];
      for (int l = 0; l < DH * 16 / WLWx; l++) send(TGT_WK, h, l, 1'b0, BEAT_W'(ww[l*WLWx +: WLWx]));
      for (int d = 0; d < DH; d++) ww[d*16 +: 16] = WV[h][d];
      for (int l = 0; l < DH * 16 / WLWx; l++) send(TGT_WV, h, l, 1'b0, BEAT_W'(ww[l*WLWx +: WLWx]));
      for (int d = 0; d < DH; d++) cw[d*4 +: 4] = code_of(msb8(WK[h][d]));
      for (int l = 0; l < DH * 4 / CLWx; l++) send(TGT_CODE, h, l, 1'b0, BEAT_W'(cw[l*CLWx +: CLWx]));
    end
  endtask

  // independent model: prediction, selection, exact K/V
  task automatic build_model();
    for (int t = 0; t < NT; t++) begin
      int kh [SEG_LEN][DH];
      for (int k = 0; k < SEG_LEN; k++)
        for (int d = 0; d < DH; d++) begin
          longint a, kx, vx;
          a = 0; kx = 0; vx = 0;
          for (int h = 0; h < HL; h++) begin
            a  += dlterm(msb8(X[t][k][h]), msb8(WK[h][d]));
            kx += longint'(X[t][k][h]) * WK[h][d];
            vx += longint'(X[t][k][h]) * WV[h][d];
          end
          kh[k][d] = int'(satv(a >>> PSH, 128));
          KK[t][k][d] = 16'(satv(kx >>> KSH, 32768));
          VV[t][k][d] = 16'(satv(vx >>> KSH, 32768));
        end
      for (int i = 0; i < LINES; i++) begin
        int sc [SEG_LEN];
        int mx, mi, n;
        bit taken [SEG_LEN];
        for (int k = 0; k < SEG_LEN; k++) begin
          longint a;
          a = 0;
          for (int d = 0; d < DH; d++) a += dlterm(kh[k][d], msb8(Q[i][d]));
          sc[k] = int'(satv(a >>> SSH, 32768));
          SEL[t][i][k] = 1'b0;
          taken[k] = 1'b0;
        end
        mi = 0;
        for (int k = 1; k < SEG_LEN; k++) if (sc[k] > sc[mi]) mi = k;
        mx = sc[mi];
        MAXI[t][i] = mi;
        n = 0;
        while (n < KSEL) begin
          int b;
          b = -1;
          for (int k = 0; k < SEG_LEN; k++)
            if (!taken[k] && mx - sc[k] <= RAD && (b < 0 || sc[k] > sc[b])) b = k;
          if (b < 0) break;
          taken[b] = 1'b1; SEL[t][i][b] = 1'b1; n++;
        end
      end
    end
  endtask

  // compare the scheduler's mask with the model when it starts issuing
  int tile_seen = 0;
  always @(posedge clk) begin
    if (dut.u_sched.start_i) begin
      for (int i = 0; i < LINES; i++) begin
        int bad;
        bad = 0;
        for (int k = 0; k < SEG_LEN; k++) if (dut.u_sched.sel[i][k] != SEL[tile_seen][i][k]) bad++;
        if (dut.u_sched.maxi[i] != IDX_W'(MAXI[tile_seen][i])) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 10) $display("tile %0d row %0d: key mask differs in %0d places", tile_seen, i, bad);
        end
      end
      tile_seen++;
    end
    if (out_valid)
      for (int i = 0; i < LINES; i++)
        for (int p = 0; p < 2; p++) OUTV[i][2*int'(out_pair) + p] = out[i][p];
  end

  task automatic check_outputs();
    for (int i = 0; i < LINES; i++) begin
      real smax, den, vmax;
      real num [DH];
      smax = -1.0e300; den = 0.0; vmax = 1.0;
      for (int t = 0; t < NT; t++)
        for (int k = 0; k < SEG_LEN; k++)
          if (SEL[t][i][k]) begin
            real s;
            s = 0.0;
            for (int d = 0; d < DH; d++) s += real'(Q[i][d]) * real'(KK[t][k][d]);
            if (s > smax) smax = s;
          end
      for (int d = 0; d < DH; d++) num[d] = 0.0;
      for (int t = 0; t < NT; t++)
        for (int k = 0; k < SEG_LEN; k++)
          if (SEL[t][i][k]) begin
            real s, w;
            s = 0.0;
            for (int d = 0; d < DH; d++) s += real'(Q[i][d]) * real'(KK[t][k][d]);
            w = $exp((s - smax) / real'(longint'(1) << ESH) / 256.0);
            den += w;
            for (int d = 0; d < DH; d++) begin
              num[d] += w * real'(VV[t][k][d]);
              if (fabs(real'(VV[t][k][d])) > vmax) vmax = fabs(real'(VV[t][k][d]));
            end
          end
      for (int d = 0; d < DH; d++) begin
        real r, e;
        r = num[d] / den;
        e = fabs(real'(OUTV[i][d]) - r);
        checks++;
        if (e > 0.08 * vmax + 4.0) begin
          failures++;
          if (failures < 10) $display("out[%0d][%0d] = %0d, softmax reference %f", i, d, OUTV[i][d], r);
        end
      end
    end
  endtask

  task automatic mech(input string name, input longint n);
    checks++;
    $display("mechanism %-22s happened %0d times", name, n);
    if (n == 0) begin failures++; $display("  ... never happened"); end
  endtask

  initial begin
    int t0;
    clk = 1'b0; rst_n = 1'b0; beat_valid = 1'b0; start = 1'b0; tile_go = 1'b0;
    beat_tgt = TGT_X; beat_row = '0; beat_col = '0; beat_buf = 1'b0; beat_data = '0;
    for (int i = 0; i < LINES; i++)
      for (int d = 0; d < DH; d++) Q[i][d] = (d % 5 == 3) ? 16'(int'($urandom_range(255, 0)) - 128) : rnd16(16000);
    for (int h = 0; h < H_MAX; h++)
      for (int d = 0; d < DH; d++) begin
        WK[h][d] = ((h + d) % 7 == 0) ? 16'sd0 : rnd16(16000);
        WV[h][d] = rnd16(16000);
      end
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < SEG_LEN; k++)
        for (int h = 0; h < H_MAX; h++) X[t][k][h] = rnd16(16000);
    build_model();
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    load_static();
    load_x(0);
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    t0 = 0;
    for (int t = 0; t < NT; t++) begin
      while (!tile_req) begin @(posedge clk); #1; end
      repeat (5) @(posedge clk);          // hold the tile back: the core waits
      #1 tile_go = 1'b1;
      @(posedge clk); #1;
      tile_go = 1'b0;
      if (t + 1 < NT) load_x(t + 1);      // fill the other buffer meanwhile
      while (tile_req) begin @(posedge clk); #1; end
    end
    while (!done) @(posedge clk);
    @(posedge clk);
    check_outputs();
    mech("zero elimination", stats.zero_rows);
    mech("sphere eviction", stats.sads_evicted);
    mech("SADS early stop", stats.sads_early);
    mech("key rebroadcast", stats.rebcast);
    mech("descend update", stats.desc_upd);
    mech("MAX ensure", stats.max_fix);
    mech("tile merge rescale", stats.tile_merge);
    mech("tile wait", stats.tile_wait);
    $display("keys issued %0d, segments %0d, beats %0d, cycles %0d", stats.keys, stats.sads_segs,
             stats.beats, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
