// decompressor: unpacks and decodes one read burst of packed MARS.
//
// A job describes one burst: the fine marker (bit offset of the first MARS in
// the first bus word), whether the producer tile was compressed, and the
// lengths (in data words) of the up to three MARS the burst holds. The bus
// words of the burst arrive on w_*, with w_last on the final one. The first
// fine bits of the burst are dropped, then codes are taken LSB-first from a
// bit buffer: the first word of each MARS raw (N bits), the others as
// length field K, sign s and K-1 low bits, from which the difference D is
// rebuilt (bit K-1 = ~s, the bits above = s) and added to the previous word.
// In plain mode each bus word carries one data word in its low bits. Once all
// words of the job are out, the rest of the burst (the trailing bits of the
// last MARS's final bus word, at most one word, or a word that only pads) is
// dropped, and the next job is accepted.
// Timing: one data word per cycle while the buffer holds a whole code; a new
// bus word is loaded whenever it fits. The algorithm follows the paper; the
// job interface, seeking by fine offset and the buffer organisation are this
// design's own.
module decompressor #(
  parameter int DATA_W = 18,
  parameter int BUS_W  = 32,
  parameter int LEN_W  = 10,
  localparam int LOGB  = $clog2(BUS_W),
  localparam int H     = mars_pkg::hdr_w(DATA_W),
  localparam int CODE_W = mars_pkg::code_max(DATA_W),
  localparam int IN_W  = mars_pkg::max2(CODE_W, BUS_W)
) (
  input  logic              clk,
  input  logic              rst_n,
  // job
  input  logic              job_valid,
  output logic              job_ready,
  input  logic [LOGB-1:0]   job_fine,
  input  logic              job_compressed,
  input  logic [1:0]        job_nseg,
  input  logic [LEN_W-1:0]  job_seg_len [mars_pkg::MAX_SEGS],
  // packed bus words
  input  logic              w_valid,
  output logic              w_ready,
  input  logic [BUS_W-1:0]  w_data,
  input  logic              w_last,
  // decoded data words
  output logic              e_valid,
  input  logic              e_ready,
  output logic [DATA_W-1:0] e_data,
  output logic              e_mars_first
);
  localparam int BUFW  = BUS_W + IN_W;
  localparam int CNT_W = $clog2(BUFW + 1);

  logic              busy, compressed, first_word, got_last, words_done;
  logic [LOGB-1:0]   fine;
  logic [1:0]        nseg, seg;
  logic [LEN_W-1:0]  seg_len [mars_pkg::MAX_SEGS];
  logic [LEN_W-1:0]  left;        // words still to decode in this MARS
  logic              seg_first;
  logic [BUFW-1:0]   bbuf;
  logic [CNT_W-1:0]  cnt;
  logic [DATA_W-1:0] prev;

  // decode of the code at the bottom of the buffer
  logic [H-1:0]      k;
  logic              sgn;
  logic [DATA_W-1:0] delta;
  logic [CNT_W-1:0]  use_len;
  logic              emit, load;
  logic [CNT_W-1:0]  cnt_after;
  logic [BUFW-1:0]   buf_after;
  logic [BUS_W-1:0]  word_in;
  logic [CNT_W-1:0]  word_bits;

  always_comb begin
    k   = bbuf[H-1:0];
    sgn = bbuf[H];
    delta = '0;
    for (int b = 0; b < DATA_W; b++) begin
      if (b + 1 < int'(k))       delta[b] = bbuf[H + 1 + b];
      else if (b + 1 == int'(k)) delta[b] = ~sgn;
      else                       delta[b] = sgn;
    end
    if (!compressed)    use_len = CNT_W'(BUS_W);
    else if (seg_first) use_len = CNT_W'(DATA_W);
    else if (k == '0)   use_len = CNT_W'(H + 1);
    else                use_len = CNT_W'(H + int'(k));
    if (!compressed || seg_first) e_data = bbuf[DATA_W-1:0];
    else                          e_data = prev + delta;
  end

  assign e_valid      = busy && !words_done && cnt >= use_len;
  assign e_mars_first = seg_first;
  assign emit         = e_valid && e_ready;
  assign job_ready    = !busy;

  always_comb begin
    cnt_after = emit ? cnt - use_len : cnt;
    buf_after = emit ? bbuf >> use_len : bbuf;
    // the first word of a burst is shifted by the fine marker
    word_in   = first_word ? (w_data >> fine) : w_data;
    word_bits = first_word ? CNT_W'(BUS_W - int'(fine)) : CNT_W'(BUS_W);
    // take words while they fit; once all data words are out, drain the burst
    w_ready   = busy && !got_last &&
                (words_done || (int'(cnt_after) + BUS_W <= BUFW));
  end
  assign load = w_valid && w_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; compressed <= 1'b0; first_word <= 1'b0; got_last <= 1'b0;
      words_done <= 1'b0; fine <= '0; nseg <= '0; seg <= '0; left <= '0;
      seg_first <= 1'b0; bbuf <= '0; cnt <= '0; prev <= '0;
      for (int s = 0; s < mars_pkg::MAX_SEGS; s++) seg_len[s] <= '0;
    end else if (!busy) begin
      if (job_valid) begin
        busy       <= 1'b1;
        compressed <= job_compressed;
        fine       <= job_fine;
        nseg       <= job_nseg;
        seg_len    <= job_seg_len;
        seg        <= '0;
        left       <= job_seg_len[0];
        seg_first  <= 1'b1;
        first_word <= 1'b1;
        got_last   <= 1'b0;
        words_done <= 1'b0;
        bbuf       <= '0;
        cnt        <= '0;
      end
    end else begin
      bbuf <= buf_after;
      cnt  <= cnt_after;
      if (load) begin
        first_word <= 1'b0;
        if (w_last) got_last <= 1'b1;
        if (!words_done) begin
          bbuf <= buf_after | (BUFW'(word_in) << cnt_after);
          cnt  <= cnt_after + word_bits;
        end
      end
      if (emit) begin
        prev      <= e_data;
        seg_first <= 1'b0;
        if (left == LEN_W'(1)) begin
          if (seg + 2'd1 == nseg) begin
            words_done <= 1'b1;
          end else begin
            seg       <= seg + 2'd1;
            left      <= seg_len[seg + 2'd1];
            seg_first <= 1'b1;
          end
        end else begin
          left <= left - LEN_W'(1);
        end
      end
      // job ends once every word is decoded and the whole burst was taken
      if ((words_done || (emit && left == LEN_W'(1) && seg + 2'd1 == nseg)) &&
          (got_last || (load && w_last))) begin
        busy <= 1'b0;
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> int'(cnt) <= BUFW);
endmodule
