// tb_star_ctrl: self-checking test of the tile controller at reduced size
// (4 lines, d_h = 4, 4 columns, 16-key tiles, hidden length 8, two tiles).
// Models of the SADS unit, the mask scheduler and the SU-FA unit answer its
// handshakes with random delays. Checked against counts worked out from the
// sizes: prediction steps of both phases, K_hat latches, score writes (each
// address once per tile), SADS beats, K/V generation cycles and latches per
// key, SU-FA commands of each kind, acknowledges, tile waits and the done
// pulse; and the cycle count of the prediction phase: one tile takes
// NG*(h + d_h + lines + 3) cycles from tile_go to the first SADS beat.
`timescale 1ns/1ps
module tb_star_ctrl;
  localparam int L = 4, DH = 4, COLS = 4, SEG = 16, HM = 16, XB = 4, NG = SEG / COLS;
  localparam int NT = 2, H = 8;
  localparam int IW = $clog2(SEG);
  logic clk = 1'b0, rst_n = 1'b0, start, tile_go, busy, done, tile_req;
  logic [7:0] tile;
  logic [31:0] wait_cycles;
  logic dl_clr, dl_valid, dl_encode, khat_latch, w_sel_v, sc_we, sads_valid, sads_ready, sads_done;
  logic [15:0] dl_d, code_raddr, q_raddr, w_raddr;
  logic [$clog2(2*NG*HM/XB)-1:0] x_raddr;
  logic [IW-1:0] key, key_idx;
  logic [$clog2(L*NG)-1:0] sc_waddr, sc_raddr;
  logic [$clog2(L)-1:0] sc_row, sads_tag;
  logic sched_clr, sched_start, sched_done, key_valid, key_ack;
  logic pe_clr, pe_valid, pe_latch_k, pe_latch_v;
  logic sufa_valid, sufa_active, sufa_ready, sufa_done;
  logic [1:0] sufa_cmd;
  int checks = 0, failures = 0;

  star_ctrl #(.LINES(L), .DH(DH), .COLS(COLS), .SEG_LEN(SEG), .H_MAX(HM), .XB(XB)) dut (
    .clk, .rst_n, .start_i(start), .n_tiles_i(8'(NT)), .h_len_i(16'(H)), .tile_go_i(tile_go),
    .busy_o(busy), .done_o(done), .tile_req_o(tile_req), .tile_o(tile), .wait_cycles_o(wait_cycles),
    .dl_clr_o(dl_clr), .dl_valid_o(dl_valid), .dl_encode_o(dl_encode), .dl_d_o(dl_d),
    .khat_latch_o(khat_latch), .code_raddr_o(code_raddr), .x_raddr_o(x_raddr), .q_raddr_o(q_raddr),
    .w_raddr_o(w_raddr), .w_sel_v_o(w_sel_v), .key_o(key), .sc_we_o(sc_we), .sc_waddr_o(sc_waddr),
    .sc_row_o(sc_row), .sc_raddr_o(sc_raddr), .sads_valid_o(sads_valid), .sads_tag_o(sads_tag),
    .sads_ready_i(sads_ready), .sads_done_i(sads_done), .sched_clr_o(sched_clr),
    .sched_start_o(sched_start), .sched_done_i(sched_done), .key_valid_i(key_valid),
    .key_idx_i(key_idx), .key_ack_o(key_ack), .pe_clr_o(pe_clr), .pe_valid_o(pe_valid),
    .pe_latch_k_o(pe_latch_k), .pe_latch_v_o(pe_latch_v), .sufa_valid_o(sufa_valid),
    .sufa_cmd_o(sufa_cmd), .sufa_active_o(sufa_active), .sufa_ready_i(sufa_ready),
    .sufa_done_i(sufa_done));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---- neighbour models
  int sads_beats_in = 0, sads_busy = 0;
  always @(posedge clk) if (rst_n) begin
    sads_done <= 1'b0;
    if (sads_busy > 0) begin
      sads_busy <= sads_busy - 1;
      if (sads_busy == 1) begin sads_done <= 1'b1; sads_ready <= 1'b1; end
    end else if (sads_valid) begin
      sads_beats_in <= sads_beats_in + 1;
      if ((sads_beats_in + 1) % NG == 0) begin sads_ready <= 1'b0; sads_busy <= int'($urandom_range(5, 1)); end
    end
  end

  int keys_left = 0, keys_total = 0, sched_gap = 0;
  always @(posedge clk) if (rst_n) begin
    sched_done <= 1'b0;
    if (sched_start) begin
      keys_left <= int'($urandom_range(4, 1)); sched_gap <= 1; key_valid <= 1'b0;
    end else if (key_valid) begin
      if (key_ack) begin key_valid <= 1'b0; keys_left <= keys_left - 1; sched_gap <= 1; end
    end else if (sched_gap > 0) begin
      sched_gap <= sched_gap - 1;
      if (sched_gap == 1) begin
        if (keys_left > 0) begin key_valid <= 1'b1; key_idx <= IW'($urandom); keys_total <= keys_total + 1; end
        else sched_done <= 1'b1;
      end
    end
  end

  int sufa_busy = 0;
  int n_cmd [3] = '{0, 0, 0};
  always @(posedge clk) if (rst_n) begin
    sufa_done <= 1'b0;
    if (sufa_busy > 0) begin
      sufa_busy <= sufa_busy - 1;
      if (sufa_busy == 1) begin sufa_done <= 1'b1; sufa_ready <= 1'b1; end
    end else if (sufa_valid && sufa_ready) begin
      n_cmd[sufa_cmd] <= n_cmd[sufa_cmd] + 1;
      sufa_ready <= 1'b0;
      sufa_busy <= int'($urandom_range(4, 1));
    end
  end

  // ---- event counters
  int n11 = 0, n12 = 0, nkl = 0, nsc = 0, nsched = 0, npe = 0, nlk = 0, nlv = 0, nack = 0;
  int ndone = 0, nclr = 0, d_exp = 0, sads_first = -1, go_cyc = -1, cyc = 0;
  int sc_hits [L * NG];
  // nothing is counted while reset is applied (outputs start at random values)
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dl_valid && !dl_encode) begin n11++; chk(int'(dl_d) == d_exp % H, "phase 1.1 index"); d_exp++; end
    if (dl_valid && dl_encode) n12++;
    if (khat_latch) nkl++;
    if (sc_we) begin nsc++; sc_hits[sc_waddr]++; end
    if (sched_start) nsched++;
    if (pe_valid) npe++;
    if (pe_latch_k) nlk++;
    if (pe_latch_v) nlv++;
    if (key_ack) nack++;
    if (done) ndone++;
    if (sched_clr) nclr++;
    if (sads_valid && sads_first < 0) sads_first = cyc;
    if (tile_go && tile_req && go_cyc < 0) go_cyc = cyc;
  end

  initial begin
    int waited;
    start = 1'b0; tile_go = 1'b0; sads_ready = 1'b1; sufa_ready = 1'b1; key_valid = 1'b0;
    key_idx = '0; sads_done = 1'b0; sched_done = 1'b0; sufa_done = 1'b0;
    for (int a = 0; a < L * NG; a++) sc_hits[a] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0;
    waited = 0;
    for (int t = 0; t < NT; t++) begin
      while (!tile_req) begin @(posedge clk); #1; end
      repeat (3) begin @(posedge clk); #1; end
      waited += 3;                       // cycles in WAIT without tile_go
      tile_go = 1'b1;
      @(posedge clk); #1;
      tile_go = 1'b0;
      while (tile_req) begin @(posedge clk); #1; end
    end
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    chk(n11 == NT * NG * H, $sformatf("phase 1.1 steps %0d", n11));
    chk(n12 == NT * NG * DH, $sformatf("phase 1.2 steps %0d", n12));
    chk(nkl == NT * NG, "K_hat latches");
    chk(nsc == NT * NG * L, "score writes");
    for (int a = 0; a < L * NG; a++) chk(sc_hits[a] == NT, $sformatf("score address %0d written %0d times", a, sc_hits[a]));
    chk(sads_beats_in == NT * L * NG, $sformatf("SADS beats %0d", sads_beats_in));
    chk(nsched == NT, "scheduler starts");
    chk(npe == keys_total * 2 * H / XB, $sformatf("PE cycles %0d for %0d keys", npe, keys_total));
    chk(nlk == keys_total && nlv == keys_total, "K/V latches");
    chk(nack == keys_total, "key acknowledges");
    chk(n_cmd[0] == keys_total && n_cmd[1] == NT && n_cmd[2] == 1,
        $sformatf("SU-FA commands %0d/%0d/%0d", n_cmd[0], n_cmd[1], n_cmd[2]));
    chk(ndone == 1, "done pulses");
    chk(nclr == NT + 1, "scheduler clears");
    chk(int'(wait_cycles) == waited, $sformatf("wait cycles %0d expected %0d", wait_cycles, waited));
    chk(sads_first - go_cyc == NG * (H + DH + L + 3) + 2,
        $sformatf("prediction phase took %0d cycles", sads_first - go_cyc));
    $display("keys %0d", keys_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
