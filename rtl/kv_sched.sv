// kv_sched: binary-mask scheduler with reuse-aware key ordering.
//
// Collects the SADS picks of every query line of one tile into a binary
// selection mask sel[line][key] and remembers each line's first pick, its
// tile maximum. The union of the mask is the set of keys whose K/V rows must be
// generated on demand. Keys are then broadcast to all SU-FA lines, each needed
// key once, in two phases:
//   A: keys that are the maximum of at least one line, in ascending index;
//   B: every key some line still needs, in ascending index.
// A line only accepts a key once it has seen its own maximum, so that the
// first value of every line's tile is the tile maximum (descend updating).
// Keys a line skipped in phase A are rebroadcast in phase B; rebroadcasts are
// counted. This ordering policy is this design's own reading of the paper's
// "reuse-aware scheduler"; the paper gives no algorithm for it.
//
// Interface:
//   clr_i                       clear the masks for a new tile
//   pick_*                      SADS picks (line, key index, first-of-segment)
//   start_i                     begin issuing; done_o pulses at the end
//   key_valid_o/key_ack_i       one key at a time: key_idx_o, and per line
//                               use_o (process it) and init_o (it is the max)
//   union_o                     the binary key mask of the tile
//   n_keys_o, n_rebcast_o       keys issued / keys issued twice in this tile
module kv_sched #(
  parameter int unsigned LINES   = 128,
  parameter int unsigned SEG_LEN = 256,
  localparam int unsigned IDX_W  = $clog2(SEG_LEN),
  localparam int unsigned LINE_W = $clog2(LINES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr_i,
  input  logic               pick_valid_i,
  input  logic [LINE_W-1:0]  pick_line_i,
  input  logic [IDX_W-1:0]   pick_idx_i,
  input  logic               pick_first_i,
  input  logic               start_i,
  output logic               done_o,
  output logic               key_valid_o,
  output logic [IDX_W-1:0]   key_idx_o,
  output logic [LINES-1:0]   use_o,
  output logic [LINES-1:0]   init_o,
  input  logic               key_ack_i,
  output logic [SEG_LEN-1:0] union_o,
  output logic [15:0]        n_keys_o,
  output logic [15:0]        n_rebcast_o
);
  typedef enum logic [2:0] {S_IDLE, S_FIND_A, S_EMIT_A, S_FIND_B, S_EMIT_B} state_e;
  state_e state;

  logic [SEG_LEN-1:0] sel    [LINES];
  logic [SEG_LEN-1:0] done   [LINES];
  logic [IDX_W-1:0]   maxi   [LINES];
  logic [LINES-1:0]   hasmax, inited;
  logic [SEG_LEN-1:0] issued_a;

  logic [SEG_LEN-1:0] mask_a, need;
  logic               any_a, any_b;
  logic [IDX_W-1:0]   first_a, first_b;

  always_comb begin
    mask_a  = '0;
    need    = '0;
    union_o = '0;
    for (int i = 0; i < LINES; i++) begin
      if (hasmax[i]) mask_a[maxi[i]] = 1'b1;
      need    |= sel[i] & ~done[i];
      union_o |= sel[i];
    end
    mask_a &= ~issued_a;
    any_a = 1'b0; first_a = '0;
    any_b = 1'b0; first_b = '0;
    for (int t = SEG_LEN-1; t >= 0; t--) begin
      if (mask_a[t]) begin any_a = 1'b1; first_a = IDX_W'(t); end
      if (need[t])   begin any_b = 1'b1; first_b = IDX_W'(t); end
    end
    for (int i = 0; i < LINES; i++) begin
      init_o[i] = hasmax[i] && !inited[i] && (maxi[i] == key_idx_o);
      use_o[i]  = sel[i][key_idx_o] && !done[i][key_idx_o] && (inited[i] || init_o[i]);
    end
  end

  assign key_valid_o = (state == S_EMIT_A) || (state == S_EMIT_B);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; key_idx_o <= '0; done_o <= 1'b0;
      hasmax <= '0; inited <= '0; issued_a <= '0; n_keys_o <= '0; n_rebcast_o <= '0;
      for (int i = 0; i < LINES; i++) begin sel[i] <= '0; done[i] <= '0; maxi[i] <= '0; end
    end else begin
      done_o <= 1'b0;
      if (clr_i) begin
        hasmax <= '0; inited <= '0; issued_a <= '0; n_keys_o <= '0; n_rebcast_o <= '0;
        for (int i = 0; i < LINES; i++) begin sel[i] <= '0; done[i] <= '0; end
      end else if (pick_valid_i) begin
        sel[pick_line_i][pick_idx_i] <= 1'b1;
        if (pick_first_i) begin
          maxi[pick_line_i]   <= pick_idx_i;
          hasmax[pick_line_i] <= 1'b1;
        end
      end
      case (state)
        S_IDLE:   if (start_i) state <= S_FIND_A;
        S_FIND_A: if (any_a) begin key_idx_o <= first_a; state <= S_EMIT_A; end
                  else state <= S_FIND_B;
        S_FIND_B: if (any_b) begin key_idx_o <= first_b; state <= S_EMIT_B; end
                  else begin state <= S_IDLE; done_o <= 1'b1; end
        S_EMIT_A, S_EMIT_B: if (key_ack_i) begin
          for (int i = 0; i < LINES; i++)
            if (use_o[i]) done[i][key_idx_o] <= 1'b1;
          inited   <= inited | init_o;
          n_keys_o <= n_keys_o + 1'b1;
          if (state == S_EMIT_A) begin
            issued_a[key_idx_o] <= 1'b1;
            state <= S_FIND_A;
          end else begin
            if (issued_a[key_idx_o]) n_rebcast_o <= n_rebcast_o + 1'b1;
            state <= S_FIND_B;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a key is only broadcast when some line will use it
  assert property (@(posedge clk) disable iff (!rst_n) key_valid_o |-> (use_o != '0));
endmodule
