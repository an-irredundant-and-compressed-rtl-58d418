// mars_dispatch: moves decompressed input words into the tile scratchpad.
//
// The words of the three read bursts arrive in the contiguous MARS order
// (SW: O3, O2, O4; S: O2; SE: O1, O3, O2 of the producers). The k-th word is
// written at the scratchpad address held in entry k of a read-only table,
// the unrolled list of on-chip addresses of the input MARS. The table is
// computed at elaboration from the tile geometry in mars_pkg, so its size
// (2T+1 entries) depends only on the tile size.
// Interface: start clears the word counter; one word per cycle is accepted
// on e_*; done is high once all 2T+1 words have been written. Following the
// paper: the ROM-driven dispatch loop; own choice: the handshakes.
module mars_dispatch #(
  parameter int TILE   = 64,
  parameter int DATA_W = 18,
  localparam int NIN   = mars_pkg::in_len(TILE),
  localparam int AW    = $clog2(mars_pkg::buf_depth(TILE)),
  localparam int KW    = $clog2(NIN + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              e_valid,
  output logic              e_ready,
  input  logic [DATA_W-1:0] e_data,
  output logic              we,
  output logic [AW-1:0]     waddr,
  output logic [DATA_W-1:0] wdata,
  output logic              done
);
  typedef logic [AW-1:0] rom_t [NIN];

  function automatic rom_t gen_rom();
    rom_t r;
    for (int k = 0; k < NIN; k++) r[k] = AW'(mars_pkg::in_addr(TILE, k));
    return r;
  endfunction

  localparam rom_t IN_ROM = gen_rom();

  logic [KW-1:0] k;
  logic          active;

  assign active  = int'(k) < NIN;
  assign e_ready = active;
  assign we      = e_valid && active;
  assign waddr   = active ? IN_ROM[k[KW-1:0]] : '0;
  assign wdata   = e_data;
  assign done    = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      k <= KW'(NIN);
    else if (start)  k <= '0;
    else if (we)     k <= k + KW'(1);
  end
endmodule
