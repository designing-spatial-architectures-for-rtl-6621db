# STAR core: sparse attention with cross-stage tiling

Long-context attention is dominated by work that sparse attention would like to
skip: most query–key pairs carry almost no probability mass. Skipping them is
only profitable if three things are cheap: finding the few keys that matter for
each query, producing K and V for just those keys, and running a numerically
safe softmax over them. This core does all three inside one tile of the
sequence, so that nothing of size *S×S* or *S×d* ever goes back to DRAM.

* **Prediction without multipliers.** The core works out an estimate of every
  attention score from the 8 most significant bits of the operands. One
  operand of each product is first rounded down to a power of two, so each
  product becomes a shift. The estimate of K (written K̂) is computed from
  X and the weights Wk, and the estimated scores Â from Q and K̂.
* **Sorting in pieces.** Each tile of `SEG_LEN` keys is sorted on its own, per
  query row. Elements further than a radius below the row maximum are dropped
  without being compared, and the sort ends early when nothing is left inside
  that radius.
* **K/V on demand.** K and V are generated in INT16 only for keys that some query
  selected.
* **Descend-ordered softmax.** Each query line sees its predicted maximum key
  first. Every later key then usually adds `e^(s−m) ≤ 1` without rescaling
  anything. A rare late key that beats the maximum is fixed up ("MAX ensure").
  Tiles are merged once at the end of each tile.

The RTL is one core as described for the single-chip case: 128 query lines, a
128×32 prediction array, a 128×4 MAC array and 128 softmax lines with two
2-multiplier PEs each. The multi-core spatial version (a 2-D mesh of such cores
streaming Q between them) is not part of this RTL.

## Numbers in the datapath

| quantity | format |
| --- | --- |
| Q, X, Wk, Wv, K, V, outputs | INT16 |
| prediction operands | INT8: bits [15:8] of the INT16 value |
| leading-one code | 4 bits `{sign, pos[2:0]}`; `pos` is the position of the leading one of \|b\|, `pos = 7` means b = 0 |
| K̂ (estimated K) | INT8, requantised with `pred_shift_i` |
| Â (estimated score) | INT16, requantised with `score_shift_i`, stored in the score buffer |
| exact score s = q·k | 40-bit |
| probabilities and rescale factors | unsigned Q1.15 |
| exponent argument | `(s − m) >>> exp_shift_i`, read with 8 fractional bits |

`exp_shift_i` folds in both 1/√d_h and the scale of Q·K.

The four run-time shifts (`pred_shift_i`, `score_shift_i`, `kv_shift_i`,
`exp_shift_i`) stand in for the quantisation scales a software flow would
compute. They should be set so that K̂ and Â use most of their range without
saturating much. For uniform INT16 data, the testbenches use:

| size | pred | score | kv | exp |
| --- | --- | --- | --- | --- |
| d_h = 8, h = 16 | 7 | 4 | 15 | 17 |
| d_h = 128, h = 32 | 8 | 5 | 16 | 19 |

## Prediction: the shift-adder array (`dlzs_array`, `dlzs_lze`, `dlzs_cell`)

Each cell holds a 32-bit accumulator. Each step it adds `±a << pos`:

* `a` is the INT8 value on its column.
* `{sign, pos}` is the code on its row.

A step is skipped when the row code says zero or `a` is zero (zero
elimination). The counter `zero_rows` in the statistics records how many
row-steps were skipped. Negating `a` when the code is negative stands in for
a signed multiply.

Each row has a leading-one encoder with a bypass, and the array runs in two
modes.

* **Phase 1.1, K̂ = X·Wk.** `encode_i = 0`.
  * Rows are the `d_h` output dimensions. They take Wk codes that were
    converted once when the weights were loaded, so the encoder is bypassed.
  * Columns are 32 tokens of the current group and take X[15:8].
  * Steps run over the hidden index h: `h_len` cycles.
  * At the end, the 32×d_h sums are shifted and saturated into the K̂
    register file (32 tokens × d_h INT8).
* **Phase 1.2, Â = Q·K̂ᵀ.** `encode_i = 1`.
  * Rows are the 128 queries. They take Q[15:8], encoded on line.
  * Columns are the 32 tokens again and take K̂.
  * Steps run over d: `d_h` cycles.
  * Then the 128 rows × 32 scores are written to the score buffer, one row per
    cycle.

A tile of `SEG_LEN = 256` keys is 8 such groups. The prediction of one tile
takes exactly `NG·(h_len + d_h + LINES + 3)` cycles, where `NG = SEG_LEN/32`.
At full size with `h_len = 32` that is 8·291 = 2328 cycles.

## Sorting a tile: SADS (`sads_unit`)

Per query row the controller streams the row's 256 estimated scores into the
sorter, 32 per beat. In the following cycles the sorter emits picks, one per
cycle:

* The first pick is the row maximum `A`.
* Each next pick is the largest remaining score with `A − score ≤ radius_i`.
  Ties go to the lower index.
* It stops after `k_sel_i` picks, or as soon as no remaining element lies
  inside the radius (early termination, flagged on `early_o`).
* `evicted_o` reports how many elements lay outside the radius.

The pick order is exactly the order a full descending sort would produce,
cut off at the radius. One segment therefore takes 8 load beats plus
`picks + 1` cycles.

## Key scheduling and K/V generation (`kv_sched`, `kv_pe_array`)

The scheduler collects the picks of all rows as a 128×256 bit mask, and
remembers each row's first pick (its maximum). When all rows are sorted, it
broadcasts keys in two phases:

1. **Phase A.** The distinct row maxima, in ascending key order.
2. **Phase B.** Every key that some row still needs, lowest index first.

With each key it gives two per-line flags:

* `use`: this line takes the key.
* `init`: this is the line's maximum and the line starts from it.

A line never takes a key before its own maximum. If a line needs key 3 but
its maximum is key 9, it skips key 3 in phase A and gets it again in phase B.
That is a rebroadcast, counted in `rebcast`. Every (line, key) pair is
delivered exactly once.

For each broadcast key, the PE array generates K and then V:

* There are 128 lines (output dimensions), each with 4 INT16 MACs.
* Each cycle broadcasts 4 hidden elements of the token's X row. Each line
  takes 4 weights from the 4 Wk (or Wv) banks.
* Each pass takes `h_len/4` cycles.
* The 40-bit sums are shifted by `kv_shift_i` and saturated to INT16.

## Softmax in descending order (`sufa_unit`, `sufa_exp`)

Each of the 128 lines keeps the state of one query:

* a tile state `(m, l, o[d_h])`;
* a running state `(M, L, O[d_h])` over all finished tiles.

For one key, the line works as follows:

1. **Score.** It computes `s = q·k`, 2 products per PE and 2 PEs per line, in
   `d_h/2` cycles. q is read from the Q buffer, 2 dimensions per cycle.
2. **Update.** One cycle:
   * *init*: `m = s, l = 1, o = v`
   * *descend* (`s ≤ m`): `p = e^(s−m)`, `l += p`, `o += p·v`
   * *MAX ensure* (`s > m`): `c = e^(m−s)`, `l = l·c + 1`, `o = o·c + v`,
     `m = s`
3. **Accumulate.** It updates o, 2 dimensions per cycle, in `d_h/2` cycles.

Lines that do not use the key hold their state. A key takes `d_h + 4` cycles
from acceptance to done (68 at d_h = 128).

**Tile end (`SUFA_TILE_END`).** Each line merges its tile state into the
running state, rescaling the side with the smaller maximum. This takes
`d_h/2 + 3` cycles. A line without keys in this tile is left alone.

**Finish (`SUFA_FINISH`).**

1. Every line computes `2^40 / L` with a 41-step restoring divider, 42 cycles.
2. It then streams `O·(2^40/L) >> 40`, saturated to INT16, as `d_h/2` beats.
   `out_pair_o` names the dimension pair and `out_o[line][0..1]` holds the two
   values.

**The exponential** is `2^(x·1.4375)`, using `1.4375 ≈ log2 e` as
`x + x/2 − x/16`. The integer part of the power is a right shift. The
fraction uses the linear approximation `2^f ≈ 1 + f`. Results below 2^-16 are
flushed to 0. The error is up to about 6 % per weight and partly cancels
between numerator and denominator. The end-to-end tests accept 8 % of the
largest |V| plus 4 LSB against a double-precision softmax over the same
selected keys.

## Buffers and loading (`star_fetcher`, `star_sram`)

All buffers are instances of one 1R1W macro. It has lane writes and a
registered read (one cycle of latency).

| buffer | organisation | bytes at default size |
| --- | --- | --- |
| X (token) | 2 tile buffers × 4 banks (h mod 4); word = 32 tokens × 16 bit; address `(buf·NG + group)·40 + h/4` | 2 × 80 KB |
| Q (token) | 2 banks (d mod 2); word = 128 queries × 16 bit | 32 KB |
| Wk, Wv (weight) | 4 banks each (h mod 4); word = d_h × 16 bit | 40 KB each |
| Wk codes (weight) | word h = d_h × 4 bit | 10 KB |
| scores (temp) | word `row·NG + group` = 32 × 16 bit | 64 KB |
| K̂ | 32 × d_h × 8 bit registers | 4 KB |

Data comes in as 512-bit beats tagged with:

* a target (`fetch_tgt_e`);
* a row: h for X, Wk, Wv and codes; d for Q;
* a column: the token group for X, the 512-bit lane for the wide words;
* an X buffer bit.

The Wk codes are loaded by the host like any other weight: converting Wk
offline is the point of the scheme.

Loading order and the tile handshake:

1. Before `start_i`, load Q, Wk, Wv, the codes and tile 0.
2. The core raises `tile_req_o` with `tile_o = t`, and starts when it sees
   `tile_go_i`.
3. While tile t computes, tile t+1 may be written into the other buffer
   (t+1 mod 2).
4. Cycles spent waiting in step 2 are counted in `tile_wait`.

## Controller (`star_ctrl`)

One tile runs these phases in sequence:

1. **Prediction.** For each group: phase 1.1, K̂ latch, phase 1.2, then the
   score write-back.
2. **Sorting.** SADS for each row.
3. **Key loop.** The scheduler starts. For each key it issues: K pass → K
   latch → V pass → V latch → SU-FA key → acknowledge.
4. **Tile end.** SU-FA tile end, and the mask is cleared.

After the last tile comes SU-FA finish, then the `done_o` pulse.

The read address is issued one cycle before the data is used. Every data-phase
strobe (`dl_valid`, `sads_valid`, `pe_valid`) is the registered copy of the
address-phase condition. The one subtle handshake is the key acknowledge:

* `key_ack_o` is registered, so the scheduler still shows the old key for one
  cycle.
* The controller therefore ignores `key_valid_i` in that cycle.

## Statistics

`stats_o` (`star_stats_t`) exposes a counter for each mechanism of the design.
The end-to-end tests require every one to be non-zero.

| counter | what it counts |
| --- | --- |
| `zero_rows` | row-steps skipped by zero elimination |
| `sads_segs` | segments sorted |
| `sads_early` | segments ended early |
| `sads_evicted` | elements evicted |
| `keys` | keys broadcast |
| `rebcast` | rebroadcasts |
| `desc_upd` | descend updates |
| `max_fix` | MAX-ensure fixes |
| `tile_merge` | line merges into an existing running state |
| `tile_wait` | tile-wait cycles |
| `beats` | DRAM beats |

## Where this design departs from, or goes beyond, the published description

* **Score buffer size.** The buffer holds one whole tile of estimated scores,
  so SADS can see a full row. That is 64 KB at 128 rows × 256 keys, more than
  the 28 KB temp SRAM quoted for the chip. A 28 KB buffer would fit about 112
  keys per row at 16 bits.
* **Hidden size per pass.** The weight SRAM holds Wk, Wv and the codes for at
  most `H_MAX = 160` hidden elements at d_h = 128 (90 of 96 KB). Models with a
  larger hidden size need several passes, with partial K/V and K̂ sums carried
  between passes. That carry is not implemented. By the same arithmetic,
  BERT-base (H = 768) needs 5 passes and LLaMA-7B (H = 4096) needs 26.
* **Tile merge.** The running output is merged once per tile with both sides
  rescaled. This keeps l and o on the same reference maximum.
* **Own choices where no circuit is given.** Neither the scheduler's key order
  nor the exponential/divider circuits are specified in the published
  description, and both are this design's own. So are the phase-by-phase
  sequencing (no overlap between prediction of tile t+1 and the key loop of
  tile t), the code layout, all accumulator widths and the buffer banking.
* **Not built.** The spatial extension is not built: the mesh routers and the
  controller that streams Q chunks between cores. DRAM, HBM and the die-to-die
  links are outside the core, which instead exposes the fetcher's beat port.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench, prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
| --- | --- |
| `tb_dlzs_lze` | all 256 INT8 inputs and the bypass |
| `tb_dlzs_array` | full 128×32 array, both modes, against power-of-two products; zero-row count |
| `tb_sads_unit` | 60 random segments, with ties, k = 0 and radius 0: pick order, flags, eviction and early-stop counts, one pick per cycle |
| `tb_kv_sched` | 40 random masks: every pair delivered once, init only on the line maximum, maxima first and ascending, counters |
| `tb_kv_pe_array` | dot products, shift and saturation at 128×4 |
| `tb_sufa_unit` | 3 tiles of random keys: descend/MAX counts from exact scores, merges, outputs against a float softmax, command latencies |
| `tb_star_sram` | read-old-data semantics and one-cycle latency |
| `tb_star_fetcher` | bank, address and lane mapping for every target |
| `tb_star_ctrl` | all sequencing counts; prediction takes `NG·(h+d_h+LINES+3)` cycles |
| `tb_star_core` | reduced-size core, whole operation: 2 tiles, overlapped loading, held-back tile; checks below |
| `tb_star_core_full` | the same test with the core at its default size (no parameter overrides) |

The two core tests check:

* each row's key mask, exactly, against a software model of prediction and
  sorting;
* every output, against the softmax;
* that each mechanism in the statistics occurred.

At full size (`h_len = 32`, 2 tiles) the full test does 16,648 checks. The
operation takes 117,625 cycles.

To run one with plain Verilator:

    verilator --binary --timing --assert -y rtl -Itb rtl/star_pkg.sv tb/tb_star_core.sv --top-module tb_star_core
    ./obj_dir/Vtb_star_core

All resets are synchronous and active low (`rst_n`). The big state arrays of
SU-FA (`o`, per line and dimension) are not reset. They are always written
with a zero factor first.
