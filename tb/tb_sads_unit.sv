// tb_sads_unit: self-checking test of the sphere-search sorter at its default
// size (256-element segments, 32 scores per load beat).
// For random segments, radii and k it checks against a software selection:
// the pick order (descending score, lower index first on ties), the scores,
// the first/last flags, the tag, the eviction count, the early-stop flag, and
// the rate: after the last load beat one pick leaves every cycle.
`timescale 1ns/1ps
module tb_sads_unit;
  import star_pkg::*;
  localparam int SEG = 256, GRP = 32, NB = SEG / GRP, IW = $clog2(SEG);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [IW:0] k_sel;
  logic [15:0] radius;
  logic in_valid, in_ready;
  logic [6:0] in_tag;
  logic signed [15:0] in_score [GRP];
  logic out_valid, out_first, out_last, seg_done, early;
  logic [IW-1:0] out_idx;
  logic signed [15:0] out_score;
  logic [6:0] out_tag;
  logic [IW:0] evicted;
  int checks = 0, failures = 0;

  sads_unit dut (.clk, .rst_n, .k_sel_i(k_sel), .radius_i(radius), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .in_tag_i(in_tag), .in_score_i(in_score), .out_valid_o(out_valid),
    .out_idx_o(out_idx), .out_score_o(out_score), .out_first_o(out_first), .out_last_o(out_last),
    .out_tag_o(out_tag), .seg_done_o(seg_done), .evicted_o(evicted), .early_o(early));

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    int sc [SEG];
    in_valid = 1'b0; k_sel = '0; radius = '0; in_tag = '0;
    for (int g = 0; g < GRP; g++) in_score[g] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int seg = 0; seg < 60; seg++) begin
      int exp_idx [$];
      bit taken [SEG];
      int mx, mi, ev, kk, rad, n, t_last, picks;
      bit exp_early;
      exp_idx.delete();
      // data: narrow ranges give many ties
      for (int j = 0; j < SEG; j++)
        sc[j] = (seg % 3 == 0) ? int'($urandom_range(40, 0)) - 20 : int'($urandom_range(4000, 0)) - 2000;
      kk  = (seg == 5) ? 0 : int'($urandom_range(40, 1));
      rad = (seg % 4 == 0) ? 0 : int'($urandom_range(600, 0));
      // reference selection
      mi = 0;
      for (int j = 1; j < SEG; j++) if (sc[j] > sc[mi]) mi = j;
      mx = sc[mi];
      ev = 0;
      for (int j = 0; j < SEG; j++) begin taken[j] = 1'b0; if (mx - sc[j] > rad) ev++; end
      n = 0;
      while (n < kk) begin
        int b;
        b = -1;
        for (int j = 0; j < SEG; j++)
          if (!taken[j] && mx - sc[j] <= rad && (b < 0 || sc[j] > sc[b])) b = j;
        if (b < 0) break;
        taken[b] = 1'b1; exp_idx.push_back(b); n++;
      end
      exp_early = (kk != 0) && (n < kk);
      // load
      k_sel = (IW+1)'(kk); radius = 16'(rad); in_tag = 7'(seg);
      for (int b = 0; b < NB; b++) begin
        while (!in_ready) begin @(posedge clk); #1; end
        in_valid = 1'b1;
        for (int g = 0; g < GRP; g++) in_score[g] = 16'(sc[b * GRP + g]);
        @(posedge clk); #1;
      end
      in_valid = 1'b0;
      // collect
      picks = 0; t_last = 0;
      for (int cyc = 1; cyc < SEG + 8; cyc++) begin
        if (out_valid) begin
          chk(picks < exp_idx.size(), $sformatf("seg %0d: extra pick", seg));
          if (picks < exp_idx.size()) begin
            chk(int'(out_idx) == exp_idx[picks] && int'(out_score) == sc[exp_idx[picks]],
                $sformatf("seg %0d pick %0d: idx %0d expected %0d", seg, picks, out_idx, exp_idx[picks]));
            chk(out_first == (picks == 0), "first flag");
            chk(out_last == (picks == exp_idx.size() - 1), "last flag");
            chk(out_tag == 7'(seg), "tag");
            chk(cyc == picks + 2, $sformatf("seg %0d: pick %0d came at cycle %0d", seg, picks, cyc));
          end
          picks++;
        end
        if (seg_done) begin
          t_last = cyc;
          chk(int'(evicted) == ev, $sformatf("seg %0d: evicted %0d expected %0d", seg, evicted, ev));
          chk(early == exp_early, $sformatf("seg %0d: early %0b expected %0b", seg, early, exp_early));
          break;
        end
        @(posedge clk); #1;
      end
      chk(picks == exp_idx.size(), $sformatf("seg %0d: %0d picks, expected %0d", seg, picks, exp_idx.size()));
      // rate: the segment ends with its last pick (two cycles when nothing is picked)
      chk(t_last == ((exp_idx.size() == 0) ? 2 : exp_idx.size() + 1),
          $sformatf("seg %0d: done at cycle %0d", seg, t_last));
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
