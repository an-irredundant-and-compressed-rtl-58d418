// tile_buffer: the on-chip scratchpad of one tile.
//
// Holds every point a tile reads or computes, in the tile's own allocation:
// local skewed coordinates (ul, vl) in [-2, T-1]^2 at address
// (ul+2)*(T+2) + (vl+2) (see mars_pkg). One synchronous write port and three
// asynchronous read ports, so the Jacobi engine can read a point's three
// operands and write its result every cycle; port 0 also serves the collect
// step. Asynchronous reads make this distributed (LUT) RAM, as the paper
// reports for the on-chip arrays of jacobi-1d. Port count and the address
// map are this design's choices.
module tile_buffer #(
  parameter int TILE   = 64,
  parameter int DATA_W = 18,
  localparam int DEPTH = mars_pkg::buf_depth(TILE),
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr [3],
  output logic [DATA_W-1:0] rdata [3]
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  always_comb
    for (int p = 0; p < 3; p++) rdata[p] = mem[raddr[p]];
endmodule
