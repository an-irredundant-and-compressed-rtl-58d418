// tb_mars_collect: for the 6 x 6 example tile, checks that the output stream
// visits the points of O1 (i4,t8) (i4,t9) (i5,t9) (i5,t10), O3 (i6,t10),
// O2 (i6,t11), O4 (i8,t8) (i8,t9) (i7,t9) (i7,t10) in that order (the
// memory layout O1, O3, O2, O4), with MARS-start and last flags, under
// random back-pressure.
module tb_mars_collect;
  localparam int T = 6, N = 18, DEPTH = (T + 2) * (T + 2), AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] raddr;
  logic [N-1:0] rdata, s_data;
  logic s_valid, s_ready, s_first, s_last, done;
  int checks = 0, failures = 0;
  int pts_i[10] = '{4, 4, 5, 5, 6, 6, 8, 8, 7, 7};
  int pts_t[10] = '{8, 9, 9, 10, 10, 11, 8, 9, 9, 10};
  bit firsts[10] = '{1, 0, 0, 0, 1, 1, 1, 0, 0, 0};
  int mem [DEPTH];
  int n = 0;

  mars_collect #(.TILE(T), .DATA_W(N)) dut (.*);
  assign rdata = N'(mem[raddr]);

  always @(posedge clk) s_ready <= $urandom_range(2) != 0;

  int ea;
  always @(posedge clk) if (rst_n && s_valid && s_ready) begin
    ea = (pts_t[n] + pts_i[n] - 10) * (T + 2) + (pts_t[n] - pts_i[n] + 2);
    checks++;
    if (n >= 10 || int'(s_data) != mem[ea] || s_first != firsts[n] || s_last != (n == 9)) begin
      failures++; $display("FAIL word %0d", n);
    end
    n++;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) mem[a] = a * 37 + 5;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    wait (done);
    repeat (3) @(posedge clk);
    checks++; if (n != 10) begin failures++; $display("FAIL %0d words", n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
