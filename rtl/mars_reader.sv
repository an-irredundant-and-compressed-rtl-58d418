// mars_reader: read stage of the tile, issuing the coalesced MARS bursts.
//
// A tile (a, b) of the tile grid reads the output of three producer tiles:
// SW = (a-1, b), S = (a-1, b-1), SE = (a, b-1). Every tile owns a contiguous
// block of TILE_WORDS = 2T-2 bus words at mars_base + (a*grid_b + b) *
// TILE_WORDS (the size of its uncompressed output), so the block address needs
// a true multiplication since grid_b is a run-time register. Thanks to the
// layout O1, O3, O2, O4 each producer is read with a single burst:
//   SW: from the start of O3 to the end of O4   (markers 0 .. 3)
//   S : from the start of O2 to the start of O4 (markers 1 .. 2)
//   SE: from the tile start to the start of O4  (0 .. marker 2)
// For a compressed producer the bit positions come from its marker-cache
// slot (given by the host); for a plain producer they are the constant
// positions T-2, T-1, T, 2T-2 times BUS_W. The burst spans the bus words from
// the one holding the first bit to the one holding the last bit, so at most
// one partly used word enters at each end. For every burst the decompressor
// gets a job: fine offset, mode and the lengths of the MARS inside.
// Timing: per producer one marker-cache read (one cycle), then the request
// and the job are offered together; three bursts are issued back to back
// and done rises after the third. The burst structure and markers follow the
// paper; the address formula, the request interface and the order SW, S, SE
// are this design's choices.
module mars_reader #(
  parameter int TILE      = 64,
  parameter int BUS_W     = 32,
  parameter int ADDR_W    = 32,
  parameter int COORD_W   = 16,
  parameter int META_SIZE = 256,
  parameter int POS_W     = 16,
  parameter int LEN_W     = 10,
  localparam int LOGB     = $clog2(BUS_W),
  localparam int SLOT_W   = $clog2(META_SIZE),
  localparam int NPOS     = mars_pkg::NB_POS,
  localparam int TILE_WORDS = mars_pkg::out_len(TILE)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [COORD_W-1:0] tile_a,
  input  logic [COORD_W-1:0] tile_b,
  input  logic [COORD_W-1:0] grid_b,
  input  logic [ADDR_W-1:0]  mars_base,
  input  logic               dep_comp [mars_pkg::NB_DEPS],
  input  logic [SLOT_W-1:0]  dep_meta [mars_pkg::NB_DEPS],
  // marker cache read port
  output logic               mc_rd_en,
  output logic [SLOT_W-1:0]  mc_rd_slot,
  input  logic [POS_W-1:0]   mc_rd_pos [NPOS],
  // memory read requests
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic [ADDR_W-1:0]  rd_req_addr,
  output logic [LEN_W-1:0]   rd_req_len,
  // decompressor jobs
  output logic               job_valid,
  input  logic               job_ready,
  output logic [LOGB-1:0]    job_fine,
  output logic               job_compressed,
  output logic [1:0]         job_nseg,
  output logic [LEN_W-1:0]   job_seg_len [mars_pkg::MAX_SEGS],
  output logic               done
);
  typedef enum logic [1:0] {IDLE, LOOKUP, ISSUE} state_e;

  state_e            state;
  logic [1:0]        d;
  logic              req_sent, job_sent;
  logic [POS_W-1:0]  pos [NPOS];
  logic [POS_W-1:0]  start_pos, end_pos;
  logic [POS_W-1:0]  start_word, end_word;
  logic [COORD_W-1:0] pa, pb;
  logic [ADDR_W-1:0] base;

  // producer coordinates and block address
  always_comb begin
    pa = (d == 2'(mars_pkg::DEP_SE)) ? tile_a : tile_a - COORD_W'(1);
    pb = (d == 2'(mars_pkg::DEP_SW)) ? tile_b : tile_b - COORD_W'(1);
    base = mars_base +
           ADDR_W'((ADDR_W'(pa) * ADDR_W'(grid_b) + ADDR_W'(pb)) * ADDR_W'(TILE_WORDS));
  end

  // burst boundaries in bits
  always_comb begin
    for (int m = 0; m < NPOS; m++)
      pos[m] = dep_comp[d] ? mc_rd_pos[m]
                           : POS_W'(mars_pkg::plain_marker(TILE, m) * BUS_W);
    start_pos = (mars_pkg::dep_first_marker(int'(d)) < 0) ? '0
                : pos[mars_pkg::dep_first_marker(int'(d))];
    end_pos   = pos[mars_pkg::dep_end_marker(int'(d))];
    start_word = start_pos >> LOGB;
    end_word   = (end_pos + POS_W'(BUS_W - 1)) >> LOGB;
  end

  assign mc_rd_en     = (state == LOOKUP);
  assign mc_rd_slot   = dep_meta[d];
  assign rd_req_valid = (state == ISSUE) && !req_sent;
  assign rd_req_addr  = base + ADDR_W'(start_word);
  assign rd_req_len   = LEN_W'(end_word - start_word);
  assign job_valid    = (state == ISSUE) && !job_sent;
  assign job_fine     = start_pos[LOGB-1:0];
  assign job_compressed = dep_comp[d];
  assign job_nseg     = 2'(mars_pkg::dep_nseg(int'(d)));
  always_comb
    for (int s = 0; s < mars_pkg::MAX_SEGS; s++)
      job_seg_len[s] = LEN_W'(mars_pkg::dep_seg_len(TILE, int'(d), s));
  assign done = (state == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; d <= '0; req_sent <= 1'b0; job_sent <= 1'b0;
    end else begin
      case (state)
        IDLE: if (start) begin
          state <= LOOKUP; d <= '0;
        end
        LOOKUP: begin
          state <= ISSUE; req_sent <= 1'b0; job_sent <= 1'b0;
        end
        ISSUE: begin
          if (rd_req_valid && rd_req_ready) req_sent <= 1'b1;
          if (job_valid && job_ready)       job_sent <= 1'b1;
          if ((req_sent || rd_req_ready) && (job_sent || job_ready)) begin
            if (d == 2'd2) state <= IDLE;
            else begin
              d <= d + 2'd1;
              state <= LOOKUP;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req_valid |-> rd_req_len != '0);
endmodule
