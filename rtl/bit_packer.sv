// bit_packer: packs variable-length codes into bus words with no padding.
//
// Codes are appended least significant bit first at the current bit position
// of the stream, so a code may straddle two bus words (packing, as opposed to
// padding every element to a word). A full word is emitted as soon as BUS_W
// bits are held; the code flagged in_last also flushes the final partial word
// (zero filled), which carries out_last. bit_pos is the number of bits
// accepted since clear: its upper bits are the coarse position (bus word) and
// its low log2(BUS_W) bits the fine position (bit in word) of the next code,
// which is what a marker records.
// Timing: one code per cycle as long as IN_W <= BUS_W; in_ready depends
// combinationally on out_ready. Packing itself follows the paper; the LSB-first
// order and the handshakes are this design's choices.
module bit_packer #(
  parameter int BUS_W = 32,
  parameter int IN_W  = 23,
  parameter int POS_W = 16,
  localparam int LEN_W = $clog2(IN_W + 1),
  localparam int CNT_W = $clog2(BUS_W + IN_W + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_code,
  input  logic [LEN_W-1:0] in_len,
  input  logic             in_last,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [BUS_W-1:0] out_word,
  output logic             out_last,
  output logic [POS_W-1:0] bit_pos
);
  localparam int ACC_W = BUS_W + IN_W;

  logic [ACC_W-1:0] acc;
  logic [CNT_W-1:0] cnt;
  logic             flushing;
  logic             emit;
  logic [CNT_W-1:0] cnt_after;
  logic [ACC_W-1:0] acc_after;
  logic [IN_W-1:0]  masked;

  assign out_valid = (cnt >= CNT_W'(BUS_W)) || (flushing && cnt != '0);
  assign out_word  = acc[BUS_W-1:0];
  assign out_last  = flushing && cnt <= CNT_W'(BUS_W);
  assign emit      = out_valid && out_ready;

  always_comb begin
    cnt_after = cnt;
    acc_after = acc;
    if (emit) begin
      cnt_after = (cnt >= CNT_W'(BUS_W)) ? cnt - CNT_W'(BUS_W) : '0;
      acc_after = acc >> BUS_W;
    end
    in_ready = !flushing && (cnt_after < CNT_W'(BUS_W));
    masked = '0;
    for (int b = 0; b < IN_W; b++)
      if (b < int'(in_len)) masked[b] = in_code[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      cnt      <= '0;
      flushing <= 1'b0;
      bit_pos  <= '0;
    end else if (clear) begin
      acc      <= '0;
      cnt      <= '0;
      flushing <= 1'b0;
      bit_pos  <= '0;
    end else begin
      acc <= acc_after;
      cnt <= cnt_after;
      if (emit && out_last) flushing <= 1'b0;
      if (in_valid && in_ready) begin
        acc      <= acc_after | (ACC_W'(masked) << cnt_after);
        cnt      <= cnt_after + CNT_W'(in_len);
        bit_pos  <= bit_pos + POS_W'(in_len);
        if (in_last) flushing <= 1'b1;
      end
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (in_len != '0 && int'(in_len) <= IN_W));
endmodule
