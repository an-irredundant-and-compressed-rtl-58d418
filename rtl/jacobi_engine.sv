// jacobi_engine: execution engine of one Jacobi-1D diamond tile.
//
// Computes c(t,i) = 0.33 * (c(t-1,i-1) + c(t-1,i) + c(t-1,i+1)) for the
// T*T/2 points of a tile, in skewed local coordinates (ul, vl): ul = 0..T-1
// outer, vl = ul mod 2 .. T-1 step 2 inner. A point's operands are
// (ul-2, vl), (ul-1, vl-1) and (ul, vl-2); with this order each was written
// in an earlier cycle or was dispatched as input. Data are signed N-bit
// fixed-point numbers; the scaling 0.33 is applied as the constant
// COEF = round(0.33 * 2^16) followed by an arithmetic right shift of 16, the
// binary point of the data does not matter for this linear step.
// Interface: start begins the tile; one point per cycle through three
// scratchpad read ports and one write port; done is high when idle.
// The update formula and coefficient are those of the benchmark (the
// PolyBench code uses 0.33); the schedule and arithmetic are this design's
// own, as the paper leaves the compute engine out of its scope.
module jacobi_engine #(
  parameter int TILE   = 64,
  parameter int DATA_W = 18,
  localparam int AW    = $clog2(mars_pkg::buf_depth(TILE)),
  localparam int CW    = $clog2(TILE + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic [AW-1:0]     raddr [3],
  input  logic [DATA_W-1:0] rdata [3],
  output logic              we,
  output logic [AW-1:0]     waddr,
  output logic [DATA_W-1:0] wdata,
  output logic              done
);
  localparam int COEF_SHIFT = 16;
  localparam logic signed [17:0] COEF = 18'sd21627;  // round(0.33 * 65536)

  logic          busy;
  logic [CW-1:0] ul, vl;
  logic signed [DATA_W+1:0]  sum;
  logic signed [DATA_W+19:0] prod;

  function automatic logic [AW-1:0] addr(input int u, input int v);
    return AW'((u + 2) * (TILE + 2) + (v + 2));
  endfunction

  always_comb begin
    raddr[0] = addr(int'(ul) - 2, int'(vl));
    raddr[1] = addr(int'(ul) - 1, int'(vl) - 1);
    raddr[2] = addr(int'(ul),     int'(vl) - 2);
    waddr    = addr(int'(ul),     int'(vl));
    sum  = (DATA_W+2)'(signed'(rdata[0])) + (DATA_W+2)'(signed'(rdata[1]))
         + (DATA_W+2)'(signed'(rdata[2]));
    prod = (DATA_W+20)'(sum) * (DATA_W+20)'(COEF);
    wdata = DATA_W'(prod >>> COEF_SHIFT);
  end

  assign we   = busy;
  assign done = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; ul <= '0; vl <= '0;
    end else if (start) begin
      busy <= 1'b1; ul <= '0; vl <= '0;
    end else if (busy) begin
      if (int'(vl) + 2 < TILE) begin
        vl <= vl + CW'(2);
      end else if (int'(ul) + 1 < TILE) begin
        ul <= ul + CW'(1);
        vl <= CW'((int'(ul) + 1) % 2);
      end else begin
        busy <= 1'b0;
      end
    end
  end
endmodule
