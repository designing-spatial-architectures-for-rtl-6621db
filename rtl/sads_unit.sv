// sads_unit: iterative sphere-search-aided distributed sorting (SADS) engine.
//
// Handles one sub-segment of one row of the estimated attention matrix
// (SEG_LEN scores) at a time. The segment is loaded in beats of GROUP scores.
// Selection then runs one element per cycle:
//   1. the first pick is the largest entry A of the segment;
//   2. every element x with A - x > radius is evicted (outside the sphere);
//   3. following picks take the largest remaining feasible element, until
//      k_sel elements are out or no feasible element is left (early stop).
// Picks therefore leave in descending score order, with the segment maximum
// first, which is the order SU-FA's descend updating relies on.
// Ties are broken towards the lower index (own choice).
//
// Interface:
//   in_valid_i/in_ready_o  beat handshake; in_tag_i (row id) is sampled with
//                          the first beat and returned on out_tag_o.
//   out_valid_o            one pick per cycle (no back-pressure): out_idx_o,
//                          out_score_o, out_first_o (segment max), out_last_o.
//   evicted_o/early_o      per finished segment: evicted count and whether the
//                          sphere ended the selection before k_sel.
// Timing: SEG_LEN/GROUP load cycles, then one cycle per pick.
module sads_unit
  import star_pkg::*;
#(
  parameter int unsigned SEG_LEN = 256,
  parameter int unsigned GROUP   = 32,
  parameter int unsigned TAG_W   = 7,
  localparam int unsigned IDX_W  = $clog2(SEG_LEN),
  localparam int unsigned NBEAT  = SEG_LEN / GROUP
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [IDX_W:0]            k_sel_i,    // picks per segment (top-k/n)
  input  logic [SCORE_W-1:0]        radius_i,   // sphere radius in score units
  input  logic                      in_valid_i,
  output logic                      in_ready_o,
  input  logic [TAG_W-1:0]          in_tag_i,
  input  logic signed [SCORE_W-1:0] in_score_i [GROUP],
  output logic                      out_valid_o,
  output logic [IDX_W-1:0]          out_idx_o,
  output logic signed [SCORE_W-1:0] out_score_o,
  output logic                      out_first_o,
  output logic                      out_last_o,
  output logic [TAG_W-1:0]          out_tag_o,
  output logic                      seg_done_o,
  output logic [IDX_W:0]            evicted_o,
  output logic                      early_o
);
  typedef enum logic [1:0] {S_LOAD, S_SEL} state_e;
  state_e state;

  logic signed [SCORE_W-1:0] score [SEG_LEN];
  logic [SEG_LEN-1:0]        avail;          // not yet picked, not evicted
  logic [$clog2(NBEAT+1)-1:0] beat;
  logic [IDX_W:0]            npick;
  logic signed [SCORE_W-1:0] amax;
  logic                      have_max;
  logic [TAG_W-1:0]          tag;

  // combinational arg-max over the available elements inside the sphere
  logic signed [SCORE_W-1:0] ref_s;          // sphere centre after this pick
  logic [SEG_LEN-1:0]        feas, rest;
  logic                      found;
  logic [IDX_W-1:0]          best;
  logic signed [SCORE_W-1:0] best_s;
  logic [IDX_W:0]            n_evict;
  logic                      stop_now;

  always_comb begin
    for (int j = 0; j < SEG_LEN; j++) begin
      logic signed [SCORE_W+1:0] dlt;
      dlt     = (SCORE_W+2)'(amax) - (SCORE_W+2)'(score[j]);
      feas[j] = avail[j] && (!have_max || dlt <= (SCORE_W+2)'({1'b0, radius_i}));
    end
    found  = 1'b0;
    best   = '0;
    best_s = '0;
    for (int j = 0; j < SEG_LEN; j++)
      if (feas[j] && (!found || score[j] > best_s)) begin
        found  = 1'b1;
        best   = IDX_W'(j);
        best_s = score[j];
      end
    ref_s   = have_max ? amax : best_s;
    n_evict = '0;
    for (int j = 0; j < SEG_LEN; j++) begin
      logic signed [SCORE_W+1:0] dlt;
      dlt     = (SCORE_W+2)'(ref_s) - (SCORE_W+2)'(score[j]);
      rest[j] = avail[j] && (IDX_W'(j) != best) && dlt <= (SCORE_W+2)'({1'b0, radius_i});
      if (dlt > (SCORE_W+2)'({1'b0, radius_i})) n_evict += 1'b1;
    end
    stop_now = !found || (k_sel_i == '0) || (npick + 1'b1 >= k_sel_i) || (rest == '0);
  end

  assign in_ready_o = (state == S_LOAD);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_LOAD; beat <= '0; npick <= '0; have_max <= 1'b0; amax <= '0;
      avail <= '0; tag <= '0;
      out_valid_o <= 1'b0; out_idx_o <= '0; out_score_o <= '0; out_first_o <= 1'b0;
      out_last_o <= 1'b0; out_tag_o <= '0; seg_done_o <= 1'b0; evicted_o <= '0; early_o <= 1'b0;
      for (int j = 0; j < SEG_LEN; j++) score[j] <= '0;
    end else begin
      out_valid_o <= 1'b0;
      out_last_o  <= 1'b0;
      seg_done_o  <= 1'b0;
      case (state)
        S_LOAD: if (in_valid_i) begin
          for (int g = 0; g < GROUP; g++)
            score[32'(beat) * GROUP + g] <= in_score_i[g];
          if (beat == '0) tag <= in_tag_i;
          if (beat == $bits(beat)'(NBEAT - 1)) begin
            beat <= '0; state <= S_SEL; avail <= '1; npick <= '0; have_max <= 1'b0;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_SEL: begin
          if (found && k_sel_i != '0) begin
            out_valid_o <= 1'b1;
            out_idx_o   <= best;
            out_score_o <= best_s;
            out_first_o <= !have_max;
            out_tag_o   <= tag;
            out_last_o  <= stop_now;
            avail[best] <= 1'b0;
            npick       <= npick + 1'b1;
            if (!have_max) begin amax <= best_s; have_max <= 1'b1; end
          end
          if (stop_now) begin
            state      <= S_LOAD;
            seg_done_o <= 1'b1;
            evicted_o  <= n_evict;
            early_o    <= found && (k_sel_i != '0) && (npick + 1'b1 < k_sel_i);
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
