// tb_jacobi_engine: runs the 6 x 6 example tile. The 13 input points of the
// figure get random values; the test computes the 18 tile points in (t, i)
// coordinates, c(t,i) = (0.33 * 2^16 rounded) * (c(t-1,i-1) + c(t-1,i) +
// c(t-1,i+1)) >> 16 in 18-bit two's complement, and compares the scratchpad
// afterwards. It also checks that the tile takes one cycle per point.
module tb_jacobi_engine;
  localparam int T = 6, N = 18, DEPTH = (T + 2) * (T + 2), AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] raddr [3], waddr;
  logic [N-1:0] rdata [3], wdata;
  logic we, done;
  int checks = 0, failures = 0;
  logic [N-1:0] mem [DEPTH];
  int ref_v [3:9][4:11];   // [i][t]
  int nwrites = 0;

  jacobi_engine #(.TILE(T), .DATA_W(N)) dut (.*);

  always_comb for (int p = 0; p < 3; p++) rdata[p] = mem[raddr[p]];
  always @(posedge clk) if (rst_n && we) begin mem[waddr] <= wdata; nwrites++; end

  function automatic int addr(input int i, input int t);
    return (t + i - 10) * (T + 2) + (t - i + 2);
  endfunction
  function automatic int wrapn(input longint x);
    longint m = x & ((64'd1 << N) - 1);
    return (m >= (64'd1 << (N - 1))) ? int'(m - (64'd1 << N)) : int'(m);
  endfunction
  function automatic bit in_tile(input int i, input int t);
    int u = t + i - 12, v = t - i;
    return u >= 0 && u < T && v >= 0 && v < T;
  endfunction

  initial begin
    static int in_i[13] = '{3, 3, 5, 5, 4, 4, 6, 7, 7, 8, 8, 9, 9};
    static int in_t[13] = '{7, 8, 5, 6, 6, 7, 5, 5, 6, 6, 7, 7, 8};
    int c0;
    for (int a = 0; a < DEPTH; a++) mem[a] = '0;
    for (int k = 0; k < 13; k++) begin
      ref_v[in_i[k]][in_t[k]] = wrapn($urandom_range(100000) - 50000);
      mem[addr(in_i[k], in_t[k])] = N'(ref_v[in_i[k]][in_t[k]]);
    end
    for (int t = 6; t <= 11; t++)
      for (int i = 4; i <= 8; i++)
        if (in_tile(i, t))
          ref_v[i][t] = wrapn(((longint'(ref_v[i-1][t-1]) + ref_v[i][t-1] + ref_v[i+1][t-1]) * 21627) >>> 16);
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    c0 = $time / 10;
    wait (done);
    checks++;
    if ($time / 10 - c0 > 18) begin failures++; $display("FAIL %0d cycles", $time / 10 - c0); end
    @(negedge clk);
    checks++; if (nwrites != 18) begin failures++; $display("FAIL %0d writes", nwrites); end
    for (int t = 6; t <= 11; t++)
      for (int i = 4; i <= 8; i++)
        if (in_tile(i, t)) begin
          checks++;
          if (wrapn(mem[addr(i, t)]) != ref_v[i][t]) begin
            failures++; $display("FAIL (i%0d,t%0d) %0d vs %0d", i, t, wrapn(mem[addr(i, t)]), ref_v[i][t]);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
