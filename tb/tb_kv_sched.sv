// tb_kv_sched: self-checking test of the mask scheduler at reduced size
// (8 lines, 16-key segments). Each round loads random selections (the first
// pick of a line is its maximum), runs the scheduler and acknowledges keys
// after random delays. Checked, from the selections alone:
//  * every selected (line, key) pair is used exactly once, nothing else is;
//  * a line's first used key is its maximum and carries init, no other does;
//  * the maximum keys are issued first, in ascending order, each once;
//  * the key and rebroadcast counters and the done pulse.
`timescale 1ns/1ps
module tb_kv_sched;
  localparam int L = 8, S = 16, IW = $clog2(S), LW = $clog2(L);
  logic clk = 1'b0, rst_n = 1'b0, clr, pick_valid, pick_first, start, done, key_valid, key_ack;
  logic [LW-1:0] pick_line;
  logic [IW-1:0] pick_idx, key_idx;
  logic [L-1:0] use_l, init_l;
  logic [S-1:0] union_m;
  logic [15:0] n_keys, n_rebcast;
  int checks = 0, failures = 0;

  kv_sched #(.LINES(L), .SEG_LEN(S)) dut (.clk, .rst_n, .clr_i(clr), .pick_valid_i(pick_valid),
    .pick_line_i(pick_line), .pick_idx_i(pick_idx), .pick_first_i(pick_first), .start_i(start),
    .done_o(done), .key_valid_o(key_valid), .key_idx_o(key_idx), .use_o(use_l), .init_o(init_l),
    .key_ack_i(key_ack), .union_o(union_m), .n_keys_o(n_keys), .n_rebcast_o(n_rebcast));

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int total_rebcast = 0;
    clr = 1'b0; pick_valid = 1'b0; pick_first = 1'b0; start = 1'b0; key_ack = 1'b0;
    pick_line = '0; pick_idx = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int round = 0; round < 40; round++) begin
      bit sel [L][S];
      bit got [L][S];
      bit seen_key [S];
      bit started [L];
      int mx [L];
      int nb, nreb, last_a;
      bit in_a;
      logic [S-1:0] exp_union;
      clr = 1'b1;
      @(posedge clk); #1;
      clr = 1'b0;
      exp_union = '0;
      for (int j = 0; j < S; j++) seen_key[j] = 1'b0;
      for (int i = 0; i < L; i++) begin
        started[i] = 1'b0;
        for (int j = 0; j < S; j++) begin sel[i][j] = 1'b0; got[i][j] = 1'b0; end
        if ($urandom_range(7, 0) == 0) begin mx[i] = -1; continue; end   // a line with nothing
        mx[i] = int'($urandom_range(S - 1, 0));
        sel[i][mx[i]] = 1'b1;
        for (int j = 0; j < S; j++) if ($urandom_range(3, 0) == 0) sel[i][j] = 1'b1;
        // the maximum first, the rest in random order
        pick_valid = 1'b1; pick_line = LW'(i); pick_idx = IW'(mx[i]); pick_first = 1'b1;
        @(posedge clk); #1;
        pick_first = 1'b0;
        for (int j = 0; j < S; j++)
          if (sel[i][j] && j != mx[i]) begin
            pick_idx = IW'(j);
            @(posedge clk); #1;
          end
        pick_valid = 1'b0;
        for (int j = 0; j < S; j++) if (sel[i][j]) exp_union[j] = 1'b1;
      end
      chk(union_m == exp_union, "union mask");
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      nb = 0; nreb = 0; last_a = -1; in_a = 1'b1;
      while (!done) begin
        if (key_valid) begin
          int kk;
          bit is_max;
          kk = int'(key_idx);
          is_max = 1'b0;
          for (int i = 0; i < L; i++) if (mx[i] == kk) is_max = 1'b1;
          if (seen_key[kk]) nreb++;
          // phase A: line maxima, ascending, before any other key
          if (in_a && !seen_key[kk] && is_max && kk > last_a) last_a = kk;
          else in_a = 1'b0;
          seen_key[kk] = 1'b1;
          for (int i = 0; i < L; i++) begin
            if (use_l[i]) begin
              chk(sel[i][kk] && !got[i][kk], $sformatf("line %0d key %0d used wrongly", i, kk));
              got[i][kk] = 1'b1;
            end
            if (init_l[i]) chk(kk == mx[i] && !started[i] && use_l[i], $sformatf("line %0d init on key %0d", i, kk));
            if (use_l[i] && !started[i]) chk(init_l[i] == 1'b1, $sformatf("line %0d first key %0d without init", i, kk));
            if (use_l[i]) started[i] = 1'b1;
          end
          nb++;
          repeat ($urandom_range(3, 0)) @(posedge clk);
          #1 key_ack = 1'b1;
          @(posedge clk); #1;
          key_ack = 1'b0;
        end else begin
          @(posedge clk); #1;
        end
      end
      for (int i = 0; i < L; i++) for (int j = 0; j < S; j++)
        chk(got[i][j] == sel[i][j], $sformatf("round %0d line %0d key %0d never delivered", round, i, j));
      for (int i = 0; i < L; i++)
        if (mx[i] >= 0) begin
          bit ok;
          ok = 1'b0;
          for (int j = 0; j <= last_a; j++) if (j == mx[i]) ok = 1'b1;
          chk(ok, $sformatf("round %0d: max key %0d of line %0d not in the first phase", round, mx[i], i));
        end
      chk(int'(n_keys) == nb && int'(n_rebcast) == nreb,
          $sformatf("counters %0d/%0d expected %0d/%0d", n_keys, n_rebcast, nb, nreb));
      total_rebcast += nreb;
      @(posedge clk); #1;
    end
    chk(total_rebcast > 0, "no rebroadcast ever happened");
    $display("rebroadcasts %0d", total_rebcast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
