// diff_encoder: combinational encoder of the differential compression code.
//
// For a word w and the previous word p of the same MARS it forms
// D = w - p (modulo 2^N, so decoding p + D restores w exactly), counts the
// leading bits of D equal to its sign (leading zeros for D >= 0, leading ones
// for D < 0), L, and emits, least significant bit first:
//   [H-1:0]  K = N - L, with H = floor(1 + log2 N) bits
//   [H]      the sign bit of D
//   above    the K-1 low bits of D (bit K-1 is implied: it is ~sign)
// The code length is H + 1 + max(K-1, 0) bits. The first word of a MARS is
// emitted raw (N bits) so that every MARS can be decoded on its own.
// The code and the rule "first word as is" follow the paper's algorithm; the
// LSB-first bit order and the modulo-2^N difference are this design's choices.
// Interface: purely combinational; code bits above code_len are zero.
module diff_encoder #(
  parameter int DATA_W = 18,
  localparam int H     = mars_pkg::hdr_w(DATA_W),
  localparam int CODE_W = mars_pkg::code_max(DATA_W),
  localparam int LEN_W = $clog2(CODE_W + 1)
) (
  input  logic [DATA_W-1:0] word,
  input  logic [DATA_W-1:0] prev,
  input  logic              first,
  output logic [CODE_W-1:0] code,
  output logic [LEN_W-1:0]  code_len
);
  logic [DATA_W-1:0] delta;
  logic              sgn;
  logic [H-1:0]      k;
  logic [DATA_W-1:0] low;

  always_comb begin
    delta = word - prev;
    sgn   = delta[DATA_W-1];
    k     = '0;
    for (int b = 0; b < DATA_W; b++)
      if (delta[b] != sgn) k = H'(b + 1);
    // low K-1 bits of delta
    low = '0;
    for (int b = 0; b < DATA_W - 1; b++)
      if (b + 1 < int'(k)) low[b] = delta[b];
    if (first) begin
      code     = CODE_W'(word);
      code_len = LEN_W'(DATA_W);
    end else begin
      code     = CODE_W'({low, sgn, k});
      code_len = (k == '0) ? LEN_W'(H + 1) : LEN_W'(H + int'(k));
    end
  end
endmodule
