// mars_collect: streams a tile's output MARS out of the scratchpad.
//
// Walks a read-only table of 2T-2 scratchpad addresses, the unrolled output
// MARS in their memory layout order O1, O3, O2, O4, and presents each word
// to the compressor with s_first on the first word of every MARS and s_last
// on the final word of the tile. The table is computed at elaboration from
// mars_pkg. Interface: start resets the walk; one word per cycle while
// s_ready is high; the scratchpad is read asynchronously through raddr /
// rdata; done is high once the last word was accepted. Following the paper:
// the ROM-driven collect loop and the layout order; own choice: handshakes.
module mars_collect #(
  parameter int TILE   = 64,
  parameter int DATA_W = 18,
  localparam int NOUT  = mars_pkg::out_len(TILE),
  localparam int AW    = $clog2(mars_pkg::buf_depth(TILE)),
  localparam int KW    = $clog2(NOUT + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic [AW-1:0]     raddr,
  input  logic [DATA_W-1:0] rdata,
  output logic              s_valid,
  input  logic              s_ready,
  output logic [DATA_W-1:0] s_data,
  output logic              s_first,
  output logic              s_last,
  output logic              done
);
  typedef logic [AW-1:0] rom_t [NOUT];
  typedef logic          flag_t [NOUT];

  function automatic rom_t gen_rom();
    rom_t r;
    for (int k = 0; k < NOUT; k++) r[k] = AW'(mars_pkg::out_addr(TILE, k));
    return r;
  endfunction

  function automatic flag_t gen_first();
    flag_t f;
    for (int k = 0; k < NOUT; k++) f[k] = mars_pkg::out_mars_first(TILE, k);
    return f;
  endfunction

  localparam rom_t  OUT_ROM   = gen_rom();
  localparam flag_t FIRST_ROM = gen_first();

  logic [KW-1:0] k;

  assign s_valid = int'(k) < NOUT;
  assign raddr   = s_valid ? OUT_ROM[k] : '0;
  assign s_data  = rdata;
  assign s_first = s_valid && FIRST_ROM[k];
  assign s_last  = int'(k) == NOUT - 1;
  assign done    = !s_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    k <= KW'(NOUT);
    else if (start)                k <= '0;
    else if (s_valid && s_ready)   k <= k + KW'(1);
  end
endmodule
