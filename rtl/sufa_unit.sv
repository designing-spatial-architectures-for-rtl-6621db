// sufa_unit: sorted-updating FlashAttention (SU-FA) execution unit.
//
// LINES query lines work in parallel on one broadcast key at a time. Each line
// has a Q.K^T PE line and an S.V PE line of PES multipliers each (128x2x2 in
// the paper). Per key (command SUFA_KEY):
//   1. QK:  s = q . k over DH elements, PES per cycle (q read from the Q SRAM,
//           one cycle latency);
//   2. UPD: per line, one of
//        init    (the key is the line's tile maximum): m = s, l = 1, o = v;
//        descend (s <= m): p = e^(s-m), l += p, o += p*v   -- no max update,
//                only one addition on l, as in descend updating;
//        MAX ensure (s > m, the estimated maximum was wrong): the classic
//                online-softmax rescale c = e^(m-s): l = l*c + 1,
//                o = o*c + v, m = s;
//   3. SV:  o update over DH elements, PES per cycle.
// SUFA_TILE_END ("tiles synchronisation") merges the tile state (m, l, o) of
// every line into its running state (M, L, O), rescaling whichever side has
// the smaller maximum, and clears the tile state. SUFA_FINISH computes 1/L
// per line with a restoring divider (41 cycles) and streams O/L as INT16,
// PES elements per line and cycle.
// Exponent arguments are (score difference) >>> exp_shift_i, read as fixed
// point with EXP_FRAC fractional bits; exp_shift_i thus folds in 1/sqrt(d_h)
// and the quantisation scales. Probabilities are Q1.15.
//
// What follows the paper: descend updating, the MAX-ensure and tiles-synch
// stages and the line counts. Own choices: the fixed-point formats, merging
// tiles into a running state at each tile end rather than storing every
// tile's partials, the divider and all cycle timing.
//
// The o/O arrays are not reset: a line's first write to them always uses a
// zero factor on the old contents (init and first merge).
// Interface: cmd_valid_i is taken when cmd_ready_o; cmd_done_o pulses when the
// command ends. k_i/v_i/use_i/init_i must stay stable during a SUFA_KEY.
// Timing: KEY = DH/PES + 1 (QK) + 1 (UPD) + DH/PES (SV) + 1 cycles;
// TILE_END = DH/PES + 2; FINISH = 42 + DH/PES.
module sufa_unit
  import star_pkg::*;
#(
  parameter int unsigned LINES = 128,
  parameter int unsigned DH    = 128,
  parameter int unsigned PES   = 2,
  parameter int unsigned S_W   = 40,
  parameter int unsigned L_W   = 32,
  parameter int unsigned O_W   = 48,
  localparam int unsigned NP   = DH / PES,
  localparam int unsigned C_W  = $clog2(NP + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid_i,
  input  sufa_cmd_e                cmd_i,
  output logic                     cmd_ready_o,
  output logic                     cmd_done_o,
  input  logic [LINES-1:0]         use_i,
  input  logic [LINES-1:0]         init_i,
  input  logic signed [DATA_W-1:0] k_i [DH],
  input  logic signed [DATA_W-1:0] v_i [DH],
  input  logic [5:0]               exp_shift_i,
  output logic [C_W-1:0]           q_addr_o,
  input  logic signed [DATA_W-1:0] q_i [PES][LINES],
  output logic                     out_valid_o,
  output logic [C_W-1:0]           out_pair_o,
  output logic signed [DATA_W-1:0] out_o [LINES][PES],
  output logic [31:0]              n_desc_o,
  output logic [31:0]              n_fix_o,
  output logic [31:0]              n_merge_o
);
  typedef enum logic [3:0] {S_IDLE, S_QK, S_UPD, S_SV, S_MCALC, S_MERGE, S_DIV, S_OUT, S_DONE} state_e;
  state_e state;

  localparam int unsigned RB = 40;   // reciprocal scale 2^RB

  logic [C_W-1:0]           cnt;
  logic [5:0]               dcnt;
  logic signed [S_W-1:0]    s   [LINES];
  logic signed [S_W-1:0]    m   [LINES];
  logic [L_W-1:0]           l   [LINES];
  logic signed [O_W-1:0]    o_t [LINES][DH];
  logic                     tile_v [LINES];
  logic signed [S_W-1:0]    mm  [LINES];
  logic [L_W-1:0]           ll  [LINES];
  logic signed [O_W-1:0]    o_r [LINES][DH];
  logic                     run_v  [LINES];
  // per-line factors of the current O/o update: o_new = o*a >> 15 + p*v
  logic [P_W-1:0]           fa  [LINES];
  logic [P_W-1:0]           fp  [LINES];
  logic                     act [LINES];
  logic [RB:0]              rem [LINES];
  logic [RB:0]              rcp [LINES];

  // exponent units, one per line
  logic signed [S_W-1:0]    earg [LINES];
  logic [P_W-1:0]           eval [LINES];
  for (genvar i = 0; i < LINES; i++) begin : g_exp
    sufa_exp #(.ARG_W(S_W)) u_exp (.x_i(earg[i]), .y_o(eval[i]));
  end

  // exponent argument: in UPD the key score against m, in MCALC the
  // smaller of the two maxima against the larger one
  always_comb begin
    for (int i = 0; i < LINES; i++) begin
      if (state == S_UPD)
        earg[i] = (s[i] <= m[i]) ? (s[i] - m[i]) >>> exp_shift_i : (m[i] - s[i]) >>> exp_shift_i;
      else
        earg[i] = (m[i] > mm[i]) ? (mm[i] - m[i]) >>> exp_shift_i : (m[i] - mm[i]) >>> exp_shift_i;
    end
  end

  assign cmd_ready_o = (state == S_IDLE);
  assign q_addr_o    = cnt;

  function automatic logic signed [O_W-1:0] scale(input logic signed [O_W-1:0] x, input logic [P_W-1:0] a);
    logic signed [O_W+P_W:0] t;
    t = (O_W+P_W+1)'(x) * $signed({1'b0, a});
    return O_W'(t >>> P_FRAC);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; dcnt <= '0; cmd_done_o <= 1'b0; out_valid_o <= 1'b0;
      out_pair_o <= '0; n_desc_o <= '0; n_fix_o <= '0; n_merge_o <= '0;
      for (int i = 0; i < LINES; i++) begin
        s[i] <= '0; m[i] <= '0; l[i] <= '0; tile_v[i] <= 1'b0; mm[i] <= '0; ll[i] <= '0;
        run_v[i] <= 1'b0; fa[i] <= '0; fp[i] <= '0; act[i] <= 1'b0; rem[i] <= '0; rcp[i] <= '0;
        for (int p = 0; p < PES; p++) out_o[i][p] <= '0;
      end
    end else begin
      cmd_done_o  <= 1'b0;
      out_valid_o <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid_i) begin
          cnt <= '0;
          unique case (cmd_i)
            SUFA_KEY: begin
              state <= S_QK;
              for (int i = 0; i < LINES; i++) s[i] <= '0;
            end
            SUFA_TILE_END: state <= S_MCALC;
            default: begin
              state <= S_DIV; dcnt <= '0;
              for (int i = 0; i < LINES; i++) begin rem[i] <= '0; rcp[i] <= '0; end
            end
          endcase
        end
        // ---- Q.K^T: address c issued at cnt = c, data used at cnt = c+1
        S_QK: begin
          if (cnt != '0)
            for (int i = 0; i < LINES; i++) begin
              logic signed [S_W-1:0] acc;
              acc = s[i];
              for (int p = 0; p < PES; p++)
                acc += S_W'(q_i[p][i] * k_i[PES*(32'(cnt)-1)+p]);
              s[i] <= acc;
            end
          if (cnt == C_W'(NP)) begin cnt <= '0; state <= S_UPD; end
          else cnt <= cnt + 1'b1;
        end
        // ---- descend update / MAX ensure
        S_UPD: begin
          for (int i = 0; i < LINES; i++) begin
            act[i] <= use_i[i];
            if (use_i[i]) begin
              if (init_i[i] || !tile_v[i]) begin
                m[i] <= s[i]; l[i] <= L_W'(P_ONE); fa[i] <= '0; fp[i] <= P_ONE; tile_v[i] <= 1'b1;
              end else if (s[i] <= m[i]) begin
                l[i] <= l[i] + L_W'(eval[i]); fa[i] <= P_ONE; fp[i] <= eval[i];
              end else begin
                l[i]  <= L_W'((64'(l[i]) * 64'(eval[i])) >> P_FRAC) + L_W'(P_ONE);
                m[i]  <= s[i]; fa[i] <= eval[i]; fp[i] <= P_ONE;
              end
            end
          end
          begin
            logic [31:0] nd, nf;
            nd = '0; nf = '0;
            for (int i = 0; i < LINES; i++)
              if (use_i[i] && !init_i[i] && tile_v[i]) begin
                if (s[i] <= m[i]) nd++; else nf++;
              end
            n_desc_o <= n_desc_o + nd;
            n_fix_o  <= n_fix_o + nf;
          end
          state <= S_SV;
        end
        // ---- S.V: o = o*fa + fp*v
        S_SV: begin
          for (int i = 0; i < LINES; i++)
            if (act[i])
              for (int p = 0; p < PES; p++) begin
                logic signed [O_W-1:0] pv;
                pv = O_W'($signed({1'b0, fp[i]}) * v_i[PES*32'(cnt)+p]);
                o_t[i][PES*32'(cnt)+p] <= scale(o_t[i][PES*32'(cnt)+p], fa[i]) + pv;
              end
          if (cnt == C_W'(NP-1)) begin cnt <= '0; state <= S_DONE; end
          else cnt <= cnt + 1'b1;
        end
        // ---- tiles synchronisation: factors
        S_MCALC: begin
          logic [31:0] nm;
          nm = '0;
          for (int i = 0; i < LINES; i++) begin
            act[i] <= tile_v[i];
            if (tile_v[i]) begin
              if (!run_v[i]) begin
                fa[i] <= '0; fp[i] <= P_ONE; mm[i] <= m[i]; ll[i] <= l[i];
              end else if (m[i] > mm[i]) begin
                fa[i] <= eval[i]; fp[i] <= P_ONE; mm[i] <= m[i];
                ll[i] <= L_W'((64'(ll[i]) * 64'(eval[i])) >> P_FRAC) + l[i];
                nm++;
              end else begin
                fa[i] <= P_ONE; fp[i] <= eval[i];
                ll[i] <= ll[i] + L_W'((64'(l[i]) * 64'(eval[i])) >> P_FRAC);
                if (m[i] != mm[i]) nm++;
              end
              run_v[i] <= 1'b1;
            end
          end
          n_merge_o <= n_merge_o + nm;
          state <= S_MERGE;
        end
        S_MERGE: begin
          for (int i = 0; i < LINES; i++)
            if (act[i]) begin
              for (int p = 0; p < PES; p++)
                o_r[i][PES*32'(cnt)+p] <= scale(o_r[i][PES*32'(cnt)+p], fa[i]) +
                                          scale(o_t[i][PES*32'(cnt)+p], fp[i]);
              tile_v[i] <= 1'b0;
            end
          if (cnt == C_W'(NP-1)) begin cnt <= '0; state <= S_DONE; end
          else cnt <= cnt + 1'b1;
        end
        // ---- 1/L: restoring division of 2^RB by L, one quotient bit per cycle
        S_DIV: begin
          for (int i = 0; i < LINES; i++) begin
            logic [RB+1:0] r2;
            r2 = {rem[i], (dcnt == '0)};
            if (r2 >= (RB+2)'(ll[i]) && ll[i] != '0) begin
              rem[i] <= (RB+1)'(r2 - (RB+2)'(ll[i]));
              rcp[i] <= {rcp[i][RB-1:0], 1'b1};
            end else begin
              rem[i] <= r2[RB:0];
              rcp[i] <= {rcp[i][RB-1:0], 1'b0};
            end
          end
          if (dcnt == 6'(RB)) begin dcnt <= '0; cnt <= '0; state <= S_OUT; end
          else dcnt <= dcnt + 1'b1;
        end
        S_OUT: begin
          for (int i = 0; i < LINES; i++)
            for (int p = 0; p < PES; p++) begin
              logic signed [O_W+RB+2:0] t;
              t = (O_W+RB+3)'(o_r[i][PES*32'(cnt)+p]) * $signed({1'b0, rcp[i]});
              out_o[i][p] <= run_v[i] ? sat16(64'(t >>> RB)) : '0;
            end
          out_valid_o <= 1'b1;
          out_pair_o  <= cnt;
          if (cnt == C_W'(NP-1)) begin
            cnt <= '0; state <= S_DONE;
            for (int i = 0; i < LINES; i++) run_v[i] <= 1'b0;
          end else cnt <= cnt + 1'b1;
        end
        S_DONE: begin cmd_done_o <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
