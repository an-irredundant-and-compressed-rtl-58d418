// marker_cache: on-chip store of compression metadata (markers).
//
// One slot per tile whose output is kept compressed in off-chip memory. A
// slot holds NB_POS bit positions, each a marker made of a coarse part (upper
// bits: bus word from the tile's base address) and a fine part (low
// log2(BUS_W) bits: first bit of the MARS in that word). Entries 0..2 are the
// starts of MARS O3, O2 and O4 in the packed stream, entry 3 its end. The
// write stage fills a slot after compressing a tile; the read stage of a
// later tile reads the slots of its producers. Slot numbers come from the
// host, which reuses them as tiles retire; the contents persist between runs.
// Timing: write in one cycle; read is synchronous (data the cycle after
// rd_en), like a block RAM. The structure follows the paper
// (markers[COMPRESSION_METADATA_SIZE][NB_MARKERS]); keeping the end position
// as a fourth entry is this design's choice, needed to size the last burst.
module marker_cache #(
  parameter int META_SIZE = 256,
  parameter int POS_W     = 16,
  localparam int SLOT_W   = $clog2(META_SIZE),
  localparam int NPOS     = mars_pkg::NB_POS
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [SLOT_W-1:0] wr_slot,
  input  logic [POS_W-1:0]  wr_pos [NPOS],
  input  logic              rd_en,
  input  logic [SLOT_W-1:0] rd_slot,
  output logic [POS_W-1:0]  rd_pos [NPOS]
);
  logic [NPOS*POS_W-1:0] mem [META_SIZE];
  logic [NPOS*POS_W-1:0] wr_word, rd_word;

  always_comb begin
    for (int m = 0; m < NPOS; m++) begin
      wr_word[m*POS_W +: POS_W] = wr_pos[m];
      rd_pos[m] = rd_word[m*POS_W +: POS_W];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot] <= wr_word;
    if (rd_en) rd_word <= mem[rd_slot];
  end
endmodule
