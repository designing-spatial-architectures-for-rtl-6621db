// tb_sufa_unit: self-checking test of the SU-FA unit at reduced size
// (4 query lines, d_h = 8, 2 PEs per line). Three tiles of random keys are
// sent; each line uses a random subset of them, starting every tile with an
// "init" key. Checked against values worked out here:
//  * the descend-update and MAX-ensure counts, from exact dot products and
//    the running maximum of each line;
//  * the number of line merges into an existing running state;
//  * the outputs, against a floating-point softmax over every key a line
//    used (tolerance for the piecewise-linear exponent);
//  * the latency of each command: KEY 2*d_h/2+4 cycles, TILE_END d_h/2+3,
//    FINISH 42+d_h/2+1 cycles from acceptance to done.
`timescale 1ns/1ps
module tb_sufa_unit;
  import star_pkg::*;
  localparam int L = 4, DH = 8, PES = 2, NP = DH / PES, CW = $clog2(NP + 1);
  localparam int ESH = 14;
  logic clk = 1'b0, rst_n = 1'b0, cmd_valid, cmd_ready, cmd_done, out_valid;
  sufa_cmd_e cmd;
  logic [L-1:0] use_l, init_l;
  logic signed [15:0] k [DH];
  logic signed [15:0] v [DH];
  logic [CW-1:0] q_addr, out_pair;
  logic signed [15:0] q [PES][L];
  logic signed [15:0] out [L][PES];
  logic [31:0] n_desc, n_fix, n_merge;
  logic signed [15:0] Q [L][DH];
  logic signed [15:0] OUTV [L][DH];
  int checks = 0, failures = 0;

  sufa_unit #(.LINES(L), .DH(DH)) dut (.clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_i(cmd),
    .cmd_ready_o(cmd_ready), .cmd_done_o(cmd_done), .use_i(use_l), .init_i(init_l), .k_i(k),
    .v_i(v), .exp_shift_i(6'(ESH)), .q_addr_o(q_addr), .q_i(q), .out_valid_o(out_valid),
    .out_pair_o(out_pair), .out_o(out), .n_desc_o(n_desc), .n_fix_o(n_fix), .n_merge_o(n_merge));

  always #5 clk = ~clk;

  // Q buffer with the one-cycle read latency of the SRAM
  always @(posedge clk)
    for (int p = 0; p < PES; p++)
      for (int i = 0; i < L; i++) q[p][i] <= (int'(q_addr) < NP) ? Q[i][int'(q_addr) * PES + p] : '0;
  always @(posedge clk)
    if (out_valid)
      for (int i = 0; i < L; i++)
        for (int p = 0; p < PES; p++) OUTV[i][int'(out_pair) * PES + p] = out[i][p];

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

  task automatic run_cmd(input sufa_cmd_e c, input int lat);
    int n;
    cmd = c; cmd_valid = 1'b1;
    while (!cmd_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    n = 1;
    while (!cmd_done) begin @(posedge clk); #1; n++; end
    chk(n == lat, $sformatf("command %s took %0d cycles, expected %0d", c.name(), n, lat));
  endtask

  initial begin
    real smax [L];
    real den [L];
    real num [L][DH];
    longint mrun [L];
    bit started [L];
    int exp_desc = 0, exp_fix = 0, vmax = 1;
    real sv [3][12][L];
    logic signed [15:0] VS [3][12][DH];
    bit used [3][12][L];
    cmd_valid = 1'b0; cmd = SUFA_KEY; use_l = '0; init_l = '0;
    for (int d = 0; d < DH; d++) begin k[d] = '0; v[d] = '0; end
    for (int i = 0; i < L; i++) for (int d = 0; d < DH; d++) Q[i][d] = 16'($urandom_range(8000, 0) - 4000);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < L; i++) started[i] = 1'b0;
      for (int key = 0; key < 12; key++) begin
        longint s [L];
        for (int d = 0; d < DH; d++) begin
          k[d] = 16'($urandom_range(8000, 0) - 4000);
          v[d] = 16'($urandom_range(20000, 0) - 10000);
          VS[t][key][d] = v[d];
          if ((v[d] < 0 ? -v[d] : v[d]) > vmax) vmax = (v[d] < 0 ? -v[d] : v[d]);
        end
        use_l = '0; init_l = '0;
        for (int i = 0; i < L; i++) begin
          s[i] = 0;
          for (int d = 0; d < DH; d++) s[i] += longint'(Q[i][d]) * k[d];
          used[t][key][i] = ($urandom_range(2, 0) != 0) || key == 11;
          sv[t][key][i] = real'(s[i]);
          if (used[t][key][i]) begin
            use_l[i] = 1'b1;
            if (!started[i]) begin init_l[i] = 1'b1; started[i] = 1'b1; mrun[i] = s[i]; end
            else if (s[i] <= mrun[i]) exp_desc++;
            else begin exp_fix++; mrun[i] = s[i]; end
          end
        end
        run_cmd(SUFA_KEY, 2 * NP + 4);
      end
      run_cmd(SUFA_TILE_END, NP + 3);
    end
    run_cmd(SUFA_FINISH, 42 + NP + 1);
    chk(int'(n_desc) == exp_desc, $sformatf("descend updates %0d expected %0d", n_desc, exp_desc));
    chk(int'(n_fix) == exp_fix, $sformatf("MAX ensures %0d expected %0d", n_fix, exp_fix));
    // every line holds running state after tile 0, so tiles 1 and 2 merge into it
    chk(int'(n_merge) == 2 * L, $sformatf("line merges %0d expected %0d", n_merge, 2 * L));
    // floating-point softmax reference
    for (int i = 0; i < L; i++) begin
      smax[i] = -1.0e300; den[i] = 0.0;
      for (int d = 0; d < DH; d++) num[i][d] = 0.0;
      for (int t = 0; t < 3; t++) for (int key = 0; key < 12; key++)
        if (used[t][key][i] && sv[t][key][i] > smax[i]) smax[i] = sv[t][key][i];
      for (int t = 0; t < 3; t++) for (int key = 0; key < 12; key++)
        if (used[t][key][i]) begin
          real w;
          w = $exp((sv[t][key][i] - smax[i]) / real'(1 << ESH) / 256.0);
          den[i] += w;
          for (int d = 0; d < DH; d++) num[i][d] += w * real'(VS[t][key][d]);
        end
      for (int d = 0; d < DH; d++) begin
        real r, e;
        r = num[i][d] / den[i];
        e = real'(OUTV[i][d]) - r;
        if (e < 0.0) e = -e;
        chk(e <= 0.08 * real'(vmax) + 4.0, $sformatf("out[%0d][%0d] = %0d, reference %f", i, d, OUTV[i][d], r));
      end
    end
    $display("descend %0d, MAX ensure %0d", n_desc, n_fix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
