// mars_writer: write stage, one contiguous burst per tile.
//
// The packed words from the compressor are first held in an on-chip FIFO
// large enough for a whole uncompressed tile output (2T-2 words): the length
// of a compressed burst is only known once compression has finished, and a
// burst length must be given before the request. Meanwhile the marker pulses
// of the compressor (bit positions of the starts of O3, O2, O4) are captured.
// When the last packed word is in, the markers and the total bit count are
// stored in the tile's marker-cache slot (compressed tiles only), one write
// request of exactly the packed length is issued at the tile's block address
// mars_base + (a*grid_b + b) * (2T-2), and the FIFO is streamed out with
// wr_last on the final word. Every tile therefore writes with one burst.
// Interface: start clears the FIFO and counters; done is high when idle.
// The single write burst per tile, the tile-level block allocation and the
// markers follow the paper; FIFO sizing and handshakes are this design's.
module mars_writer #(
  parameter int TILE      = 64,
  parameter int BUS_W     = 32,
  parameter int ADDR_W    = 32,
  parameter int COORD_W   = 16,
  parameter int META_SIZE = 256,
  parameter int POS_W     = 16,
  parameter int LEN_W     = 10,
  localparam int SLOT_W   = $clog2(META_SIZE),
  localparam int NPOS     = mars_pkg::NB_POS,
  localparam int TILE_WORDS = mars_pkg::out_len(TILE),
  localparam int FAW      = $clog2(TILE_WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [COORD_W-1:0] tile_a,
  input  logic [COORD_W-1:0] tile_b,
  input  logic [COORD_W-1:0] grid_b,
  input  logic [ADDR_W-1:0]  mars_base,
  input  logic               self_comp,
  input  logic [SLOT_W-1:0]  self_meta,
  // packed stream from the compressor
  input  logic               c_valid,
  output logic               c_ready,
  input  logic [BUS_W-1:0]   c_word,
  input  logic               c_last,
  input  logic               mk_valid,
  input  logic [1:0]         mk_index,
  input  logic [POS_W-1:0]   mk_pos,
  input  logic [POS_W-1:0]   bit_count,
  // marker cache write port
  output logic               mc_wr_en,
  output logic [SLOT_W-1:0]  mc_wr_slot,
  output logic [POS_W-1:0]   mc_wr_pos [NPOS],
  // memory write
  output logic               wr_req_valid,
  input  logic               wr_req_ready,
  output logic [ADDR_W-1:0]  wr_req_addr,
  output logic [LEN_W-1:0]   wr_req_len,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [BUS_W-1:0]   wr_data,
  output logic               wr_last,
  output logic               done
);
  typedef enum logic [1:0] {IDLE, FILL, REQ, DATA} state_e;

  state_e           state;
  logic [POS_W-1:0] marks [mars_pkg::NB_MARKERS];
  logic [LEN_W-1:0] nwords, left;
  logic             f_in_ready, f_out_valid;
  logic [FAW:0]     f_count;

  sync_fifo #(.WIDTH(BUS_W), .DEPTH(TILE_WORDS)) u_fifo (
    .clk, .rst_n, .clear(start),
    .in_valid(c_valid && state == FILL), .in_ready(f_in_ready), .in_data(c_word),
    .out_valid(f_out_valid), .out_ready(wr_ready && state == DATA),
    .out_data(wr_data), .count(f_count)
  );

  assign c_ready      = (state == FILL) && f_in_ready;
  assign mc_wr_en     = (state == REQ) && wr_req_ready && self_comp;
  assign mc_wr_slot   = self_meta;
  always_comb begin
    for (int m = 0; m < mars_pkg::NB_MARKERS; m++) mc_wr_pos[m] = marks[m];
    mc_wr_pos[mars_pkg::NB_MARKERS] = bit_count;
  end
  assign wr_req_valid = (state == REQ);
  assign wr_req_addr  = mars_base + ADDR_W'((ADDR_W'(tile_a) * ADDR_W'(grid_b)
                        + ADDR_W'(tile_b)) * ADDR_W'(TILE_WORDS));
  assign wr_req_len   = nwords;
  assign wr_valid     = (state == DATA) && f_out_valid;
  assign wr_last      = (left == LEN_W'(1));
  assign done         = (state == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; nwords <= '0; left <= '0;
      for (int m = 0; m < mars_pkg::NB_MARKERS; m++) marks[m] <= '0;
    end else begin
      if (mk_valid && mk_index != 2'd0) marks[mk_index - 2'd1] <= mk_pos;
      case (state)
        IDLE: if (start) begin
          state <= FILL; nwords <= '0;
        end
        FILL: if (c_valid && c_ready) begin
          nwords <= nwords + LEN_W'(1);
          if (c_last) state <= REQ;
        end
        REQ: if (wr_req_ready) begin
          state <= DATA; left <= nwords;
        end
        DATA: if (wr_valid && wr_ready) begin
          left <= left - LEN_W'(1);
          if (left == LEN_W'(1)) state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_fifo_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (c_valid && state == FILL) |-> f_in_ready);
endmodule
