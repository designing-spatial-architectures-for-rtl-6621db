// star_pkg: shared widths, encodings and types of the STAR sparse-attention core.
//
// Numeric formats used throughout:
//  * Formal computation (KV generation, SU-FA) works on INT16 operands, the
//    precision of the accuracy baseline.
//  * Sparsity prediction (DLZS) works on the 8 most significant bits of those
//    INT16 operands (an INT8 value) and on a 4-bit leading-one code for the
//    operand that is converted to the log domain.
//  * Probabilities and rescale factors inside SU-FA are unsigned Q1.15
//    (1.0 = 2**15).
// The 4-bit code layout {sign, position[2:0]} and the use of position 7 as the
// "operand is zero" marker are choices of this implementation.
package star_pkg;

  localparam int unsigned DATA_W  = 16;   // formal operands (INT16)
  localparam int unsigned PRED_W  = 8;    // prediction operands (INT8)
  localparam int unsigned CODE_W  = 4;    // DLZS leading-one code
  localparam int unsigned P_W     = 16;   // Q1.15 probability / scale
  localparam int unsigned P_FRAC  = 15;
  localparam logic [P_W-1:0] P_ONE = 16'h8000;
  localparam int unsigned EXP_FRAC = 8;   // fractional bits of the exp argument
  localparam int unsigned SCORE_W = 16;   // stored estimated score
  localparam int unsigned DRAM_W  = 512;  // fetcher beat width (one 64-byte beat)

  // DLZS code: bit 3 = sign of B, bits 2:0 = position of the leading one of |B|.
  // Position 7 cannot occur for a 7-bit magnitude and marks B == 0.
  localparam logic [2:0] LZ_ZERO_POS = 3'd7;

  // Targets of the fetcher (which on-chip buffer a DRAM beat is written into).
  typedef enum logic [2:0] {
    TGT_X    = 3'd0,   // token SRAM, X tile (two buffers)
    TGT_Q    = 3'd1,   // token SRAM, Q block
    TGT_WK   = 3'd2,   // weight SRAM, Wk (INT16)
    TGT_WV   = 3'd3,   // weight SRAM, Wv (INT16)
    TGT_CODE = 3'd4    // weight SRAM, Wk pre-converted to DLZS codes
  } fetch_tgt_e;

  // Command to the SU-FA unit.
  typedef enum logic [1:0] {
    SUFA_KEY      = 2'd0,  // process one broadcast key
    SUFA_TILE_END = 2'd1,  // tiles synchronisation: merge tile state
    SUFA_FINISH   = 2'd2   // normalise and stream the outputs
  } sufa_cmd_e;

  // Event counters of one operation, brought out of the core for profiling.
  typedef struct packed {
    logic [31:0] zero_rows;    // DLZS row-steps skipped by zero elimination
    logic [31:0] sads_segs;    // SADS segments sorted
    logic [31:0] sads_early;   // segments ended early by the sphere radius
    logic [31:0] sads_evicted; // elements evicted outside the sphere
    logic [31:0] keys;         // keys broadcast to SU-FA (K/V generated)
    logic [31:0] rebcast;      // keys broadcast a second time in a tile
    logic [31:0] desc_upd;     // descend updates (no max refresh)
    logic [31:0] max_fix;      // MAX-ensure corrections
    logic [31:0] tile_merge;   // tiles synchronised with a rescale
    logic [31:0] tile_wait;    // cycles spent waiting for a tile's data
    logic [31:0] beats;        // DRAM beats written by the fetcher
  } star_stats_t;

  // Saturate a signed value to a narrower signed width.
  function automatic logic signed [15:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sd32767;
    else if (v < -64'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

  function automatic logic signed [7:0] sat8(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

endpackage
