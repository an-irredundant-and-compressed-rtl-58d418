// compressor: runtime compression and packing of one tile's output MARS.
//
// Takes the collect stream (one data word per beat, s_first marking the first
// word of each MARS, s_last the last word of the tile) and produces the packed
// bus-word stream written to off-chip memory. In compressed mode each word is
// encoded by diff_encoder against the previous word of the same MARS (the
// first word of a MARS raw); in plain mode (compressed = 0) each word is
// zero-padded to one bus word, which is the layout the host uses for tiles it
// computes itself. Because the codes of consecutive MARS go through the same
// bit_packer, each compressed MARS starts at the bit right after the previous
// one: MARS packing comes for free.
// At every MARS start mk_valid pulses with the MARS index and the bit position
// where it starts (a marker); bit_count is the total stream length in bits
// once the last word has been accepted.
// Timing: initiation interval of 1 cycle (the loop-carried "previous word" is
// a single register), as stated in the paper; clear must be pulsed before
// each tile. The encoding follows the paper; the marker interface is this
// design's own.
module compressor #(
  parameter int DATA_W = 18,
  parameter int BUS_W  = 32,
  parameter int POS_W  = 16,
  localparam int CODE_W = mars_pkg::code_max(DATA_W),
  localparam int IN_W   = mars_pkg::max2(CODE_W, BUS_W),
  localparam int LEN_W  = $clog2(IN_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              compressed,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [DATA_W-1:0] s_data,
  input  logic              s_first,
  input  logic              s_last,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [BUS_W-1:0]  m_word,
  output logic              m_last,
  output logic              mk_valid,
  output logic [1:0]        mk_index,
  output logic [POS_W-1:0]  mk_pos,
  output logic [POS_W-1:0]  bit_count
);
  localparam int ELEN_W = $clog2(CODE_W + 1);

  logic [DATA_W-1:0] prev;
  logic [CODE_W-1:0] enc_code;
  logic [ELEN_W-1:0] enc_len;
  logic [IN_W-1:0]   p_code;
  logic [LEN_W-1:0]  p_len;
  logic              accept;
  logic [1:0]        mars_cnt;

  diff_encoder #(.DATA_W(DATA_W)) u_enc (
    .word(s_data), .prev(prev), .first(s_first),
    .code(enc_code), .code_len(enc_len)
  );

  always_comb begin
    if (compressed) begin
      p_code = IN_W'(enc_code);
      p_len  = LEN_W'(enc_len);
    end else begin
      p_code = IN_W'(s_data);
      p_len  = LEN_W'(BUS_W);
    end
  end

  bit_packer #(.BUS_W(BUS_W), .IN_W(IN_W), .POS_W(POS_W)) u_pack (
    .clk, .rst_n, .clear,
    .in_valid(s_valid), .in_ready(s_ready), .in_code(p_code), .in_len(p_len),
    .in_last(s_last),
    .out_valid(m_valid), .out_ready(m_ready), .out_word(m_word), .out_last(m_last),
    .bit_pos(bit_count)
  );

  assign accept   = s_valid && s_ready;
  assign mk_valid = accept && s_first;
  assign mk_index = mars_cnt;
  assign mk_pos   = bit_count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev     <= '0;
      mars_cnt <= '0;
    end else if (clear) begin
      prev     <= '0;
      mars_cnt <= '0;
    end else if (accept) begin
      prev <= s_data;
      if (s_first) mars_cnt <= mars_cnt + 2'd1;
    end
  end
endmodule
