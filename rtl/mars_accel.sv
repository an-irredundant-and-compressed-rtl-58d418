// mars_accel: Jacobi-1D tile accelerator with a MARS-based off-chip layout.
//
// For each tile the host starts, the accelerator runs the steps
//   read      3 coalesced bursts of packed (optionally compressed) MARS
//   decompress into a FIFO
//   dispatch  each word to its scratchpad address (input MARS ROM)
//   execute   the Jacobi-1D diamond tile (T*T/2 points)
//   collect   the output MARS from the scratchpad in layout order O1,O3,O2,O4
//   compress  and pack them bit-contiguously, recording markers
//   write     one burst into the tile's own block of off-chip memory
// one after the other. The marker cache that links the write of a producer
// to the reads of its consumers persists across tiles, so the read, execute
// and write stages are not overlapped (a read-execute-write macro-pipeline
// over consecutive tiles is the usual structure, but it is not built here).
//
// Host interface (registers, sampled while start is high and held until
// done): tile coordinates (tile_a, tile_b) in the skewed tile grid, the grid
// width grid_b, the base word address of the MARS region, whether this tile's
// output is compressed (self_comp) and its marker slot (self_meta), and per
// producer (SW, S, SE) whether its output is compressed and its marker slot.
// Tiles computed by the host are stored plain, one element per bus word.
// read_cycles / exec_cycles / write_cycles count the clock cycles spent in
// each phase of the last tile (the I/O-cycle counter).
//
// Memory interface: word-addressed (BUS_W-bit words) burst requests
// rd_req_* / wr_req_* with a length in words, followed by the data beats with
// valid/ready and a last flag. It stands in for the AXI master port of the
// device; bursts are not split at 256 beats.
// The pipeline of steps, MARS layout, compression and markers follow the
// paper; the sequential control, the address formula and the interfaces are
// this design's own. Requires code_max(DATA_W) <= BUS_W so a compressed tile
// never outgrows its plain-sized block.
module mars_accel #(
  parameter int TILE       = 64,
  parameter int DATA_W     = 18,
  parameter int BUS_W      = 32,
  parameter int ADDR_W     = 32,
  parameter int COORD_W    = 16,
  parameter int META_SIZE  = 256,
  parameter int FIFO_DEPTH = 16,
  localparam int LOGB      = $clog2(BUS_W),
  localparam int SLOT_W    = $clog2(META_SIZE),
  localparam int TILE_WORDS = mars_pkg::out_len(TILE),
  localparam int LEN_W     = $clog2(TILE_WORDS + 1),
  localparam int POS_W     = $clog2(TILE_WORDS * BUS_W + 1),
  localparam int AW        = $clog2(mars_pkg::buf_depth(TILE))
) (
  input  logic               clk,
  input  logic               rst_n,
  // host registers
  input  logic               start,
  output logic               busy,
  output logic               done,
  input  logic [COORD_W-1:0] tile_a,
  input  logic [COORD_W-1:0] tile_b,
  input  logic [COORD_W-1:0] grid_b,
  input  logic [ADDR_W-1:0]  mars_base,
  input  logic               self_comp,
  input  logic [SLOT_W-1:0]  self_meta,
  input  logic               dep_comp [mars_pkg::NB_DEPS],
  input  logic [SLOT_W-1:0]  dep_meta [mars_pkg::NB_DEPS],
  output logic [31:0]        read_cycles,
  output logic [31:0]        exec_cycles,
  output logic [31:0]        write_cycles,
  // off-chip memory read
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic [ADDR_W-1:0]  rd_req_addr,
  output logic [LEN_W-1:0]   rd_req_len,
  input  logic               rd_valid,
  output logic               rd_ready,
  input  logic [BUS_W-1:0]   rd_data,
  input  logic               rd_last,
  // off-chip memory write
  output logic               wr_req_valid,
  input  logic               wr_req_ready,
  output logic [ADDR_W-1:0]  wr_req_addr,
  output logic [LEN_W-1:0]   wr_req_len,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [BUS_W-1:0]   wr_data,
  output logic               wr_last
);
  if (mars_pkg::code_max(DATA_W) > BUS_W) begin : g_check_width
    $error("mars_accel: a compressed word must fit in one bus word");
  end

  typedef enum logic [1:0] {IDLE, READ, EXEC, WRITE} state_e;
  state_e state;
  logic   go_read, go_exec, go_write;

  // ---------------- marker cache
  logic              mc_wr_en, mc_rd_en;
  logic [SLOT_W-1:0] mc_wr_slot, mc_rd_slot;
  logic [POS_W-1:0]  mc_wr_pos [mars_pkg::NB_POS];
  logic [POS_W-1:0]  mc_rd_pos [mars_pkg::NB_POS];

  marker_cache #(.META_SIZE(META_SIZE), .POS_W(POS_W)) u_markers (
    .clk, .wr_en(mc_wr_en), .wr_slot(mc_wr_slot), .wr_pos(mc_wr_pos),
    .rd_en(mc_rd_en), .rd_slot(mc_rd_slot), .rd_pos(mc_rd_pos)
  );

  // ---------------- read stage
  logic              job_valid, job_ready, job_comp, rd_done;
  logic [LOGB-1:0]   job_fine;
  logic [1:0]        job_nseg;
  logic [LEN_W-1:0]  job_seg_len [mars_pkg::MAX_SEGS];

  mars_reader #(.TILE(TILE), .BUS_W(BUS_W), .ADDR_W(ADDR_W), .COORD_W(COORD_W),
                .META_SIZE(META_SIZE), .POS_W(POS_W), .LEN_W(LEN_W)) u_reader (
    .clk, .rst_n, .start(go_read), .tile_a, .tile_b, .grid_b, .mars_base,
    .dep_comp, .dep_meta,
    .mc_rd_en, .mc_rd_slot, .mc_rd_pos,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .job_valid, .job_ready, .job_fine, .job_compressed(job_comp),
    .job_nseg, .job_seg_len, .done(rd_done)
  );

  logic             rf_valid, rf_ready;
  logic [BUS_W:0]   rf_data;

  sync_fifo #(.WIDTH(BUS_W + 1), .DEPTH(FIFO_DEPTH)) u_rd_fifo (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(rd_valid), .in_ready(rd_ready), .in_data({rd_last, rd_data}),
    .out_valid(rf_valid), .out_ready(rf_ready), .out_data(rf_data), .count()
  );

  logic              de_valid, de_ready, de_first;
  logic [DATA_W-1:0] de_data;

  decompressor #(.DATA_W(DATA_W), .BUS_W(BUS_W), .LEN_W(LEN_W)) u_decomp (
    .clk, .rst_n,
    .job_valid, .job_ready, .job_fine, .job_compressed(job_comp),
    .job_nseg, .job_seg_len,
    .w_valid(rf_valid), .w_ready(rf_ready), .w_data(rf_data[BUS_W-1:0]),
    .w_last(rf_data[BUS_W]),
    .e_valid(de_valid), .e_ready(de_ready), .e_data(de_data), .e_mars_first(de_first)
  );

  logic              df_valid, df_ready;
  logic [DATA_W-1:0] df_data;

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_dec_fifo (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(de_valid), .in_ready(de_ready), .in_data(de_data),
    .out_valid(df_valid), .out_ready(df_ready), .out_data(df_data), .count()
  );

  logic              dp_we, dp_done;
  logic [AW-1:0]     dp_waddr;
  logic [DATA_W-1:0] dp_wdata;

  mars_dispatch #(.TILE(TILE), .DATA_W(DATA_W)) u_dispatch (
    .clk, .rst_n, .start(go_read),
    .e_valid(df_valid), .e_ready(df_ready), .e_data(df_data),
    .we(dp_we), .waddr(dp_waddr), .wdata(dp_wdata), .done(dp_done)
  );

  // ---------------- scratchpad and execution engine
  logic              en_we, en_done;
  logic [AW-1:0]     en_waddr;
  logic [DATA_W-1:0] en_wdata;
  logic [AW-1:0]     en_raddr [3];
  logic              tb_we;
  logic [AW-1:0]     tb_waddr;
  logic [DATA_W-1:0] tb_wdata;
  logic [AW-1:0]     tb_raddr [3];
  logic [DATA_W-1:0] tb_rdata [3];
  logic [AW-1:0]     co_raddr;

  jacobi_engine #(.TILE(TILE), .DATA_W(DATA_W)) u_engine (
    .clk, .rst_n, .start(go_exec),
    .raddr(en_raddr), .rdata(tb_rdata),
    .we(en_we), .waddr(en_waddr), .wdata(en_wdata), .done(en_done)
  );

  always_comb begin
    tb_we    = (state == READ) ? dp_we    : (state == EXEC) && en_we;
    tb_waddr = (state == READ) ? dp_waddr : en_waddr;
    tb_wdata = (state == READ) ? dp_wdata : en_wdata;
    tb_raddr = en_raddr;
    if (state == WRITE) tb_raddr[0] = co_raddr;
  end

  tile_buffer #(.TILE(TILE), .DATA_W(DATA_W)) u_buffer (
    .clk, .we(tb_we), .waddr(tb_waddr), .wdata(tb_wdata),
    .raddr(tb_raddr), .rdata(tb_rdata)
  );

  // ---------------- write stage
  logic              cs_valid, cs_ready, cs_first, cs_last, co_done;
  logic [DATA_W-1:0] cs_data;

  mars_collect #(.TILE(TILE), .DATA_W(DATA_W)) u_collect (
    .clk, .rst_n, .start(go_write), .raddr(co_raddr), .rdata(tb_rdata[0]),
    .s_valid(cs_valid), .s_ready(cs_ready), .s_data(cs_data),
    .s_first(cs_first), .s_last(cs_last), .done(co_done)
  );

  logic             cm_valid, cm_ready, cm_last, mk_valid;
  logic [BUS_W-1:0] cm_word;
  logic [1:0]       mk_index;
  logic [POS_W-1:0] mk_pos, bit_count;

  compressor #(.DATA_W(DATA_W), .BUS_W(BUS_W), .POS_W(POS_W)) u_comp (
    .clk, .rst_n, .clear(go_write), .compressed(self_comp),
    .s_valid(cs_valid), .s_ready(cs_ready), .s_data(cs_data),
    .s_first(cs_first), .s_last(cs_last),
    .m_valid(cm_valid), .m_ready(cm_ready), .m_word(cm_word), .m_last(cm_last),
    .mk_valid, .mk_index, .mk_pos, .bit_count
  );

  logic wr_done;

  mars_writer #(.TILE(TILE), .BUS_W(BUS_W), .ADDR_W(ADDR_W), .COORD_W(COORD_W),
                .META_SIZE(META_SIZE), .POS_W(POS_W), .LEN_W(LEN_W)) u_writer (
    .clk, .rst_n, .start(go_write), .tile_a, .tile_b, .grid_b, .mars_base,
    .self_comp, .self_meta,
    .c_valid(cm_valid), .c_ready(cm_ready), .c_word(cm_word), .c_last(cm_last),
    .mk_valid, .mk_index, .mk_pos, .bit_count,
    .mc_wr_en, .mc_wr_slot, .mc_wr_pos,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_len,
    .wr_valid, .wr_ready, .wr_data, .wr_last, .done(wr_done)
  );

  // ---------------- tile sequencing and cycle counters
  assign go_read  = (state == IDLE) && start;
  assign go_exec  = (state == READ) && rd_done && dp_done && job_ready && !go_read;
  assign go_write = (state == EXEC) && en_done;
  assign busy     = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; done <= 1'b0;
      read_cycles <= '0; exec_cycles <= '0; write_cycles <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= READ;
          read_cycles <= '0; exec_cycles <= '0; write_cycles <= '0;
        end
        READ: begin
          read_cycles <= read_cycles + 32'd1;
          if (go_exec) state <= EXEC;
        end
        EXEC: begin
          exec_cycles <= exec_cycles + 32'd1;
          if (go_write) state <= WRITE;
        end
        WRITE: begin
          write_cycles <= write_cycles + 32'd1;
          if (wr_done && co_done && !go_write) begin
            state <= IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // decompressed words only flow during the read phase, and each tile's
  // input stream starts with the first word of a MARS
  a_dec_in_read: assert property (@(posedge clk) disable iff (!rst_n)
    (de_valid && de_ready) |-> (state == READ));
  a_stream_start: assert property (@(posedge clk) disable iff (!rst_n)
    (go_read ##1 (de_valid && de_ready)[->1]) |-> de_first);
endmodule
