// star_sram: one bank of on-chip SRAM (1 write port, 1 read port).
//
// WORDS words of LANES x LANE_W bits. A write fills one lane of one word, so
// a word wider than a DRAM beat is assembled from several beats; a read
// returns the whole word one cycle after raddr_i (registered output, as a
// synchronous SRAM macro). The token, weight and temporary SRAMs of the core
// are built from banks of this module. Written as a plain array, which
// synthesis maps to memory; no macro-specific behaviour is modelled.
module star_sram #(
  parameter int unsigned WORDS  = 256,
  parameter int unsigned LANES  = 1,
  parameter int unsigned LANE_W = 512,
  localparam int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                    clk,
  input  logic                    we_i,
  input  logic [AW-1:0]           waddr_i,
  input  logic [LW-1:0]           wlane_i,
  input  logic [LANE_W-1:0]       wdata_i,
  input  logic [AW-1:0]           raddr_i,
  output logic [LANES*LANE_W-1:0] rdata_o
);
  logic [LANES*LANE_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i][32'(wlane_i)*LANE_W +: LANE_W] <= wdata_i;
    rdata_o <= mem[raddr_i];
  end
endmodule
