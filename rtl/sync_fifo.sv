// sync_fifo: single-clock first-in first-out buffer with valid/ready ports.
//
// Used between the I/O stages (memory read data, decompressed words, the
// packed output of a tile awaiting its write burst). DEPTH entries of WIDTH
// bits in a circular array; a word written is visible at the output the next
// cycle. in_ready is low when full, out_valid low when empty; a write and a
// read may happen in the same cycle. count gives the occupancy.
// The FIFOs between the I/O steps follow the described accelerator; their
// depths and the circular-buffer build are this design's own.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = count < (AW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= incr(wp);
      if (pop)  rp <= incr(rp);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    int'(count) <= DEPTH);
endmodule
