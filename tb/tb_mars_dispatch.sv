// tb_mars_dispatch: for the 6 x 6 tile of the running example, feeds the 13
// input words and checks that each lands at the scratchpad cell of the
// point the example's figure names for it, in burst order
//   SW: I2 (i3,t7), I1 (i3,t8), I3 (i5,t5) (i5,t6) (i4,t6) (i4,t7)
//   S : I4 (i6,t5)
//   SE: I5 (i7,t5) (i7,t6) (i8,t6) (i8,t7), I7 (i9,t7), I6 (i9,t8)
// converted to the scratchpad address (t+i-12+2)*8 + (t-i+2) by the test.
module tb_mars_dispatch;
  localparam int T = 6, N = 18, AW = $clog2((T + 2) * (T + 2));
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic e_valid, e_ready, we, done;
  logic [N-1:0] e_data, wdata;
  logic [AW-1:0] waddr;
  int checks = 0, failures = 0;
  int pts_i[13] = '{3, 3, 5, 5, 4, 4, 6, 7, 7, 8, 8, 9, 9};
  int pts_t[13] = '{7, 8, 5, 6, 6, 7, 5, 5, 6, 6, 7, 7, 8};
  int got_addr[$], got_data[$];

  mars_dispatch #(.TILE(T), .DATA_W(N)) dut (.*);

  always @(posedge clk) if (rst_n && we) begin got_addr.push_back(int'(waddr)); got_data.push_back(int'(wdata)); end

  initial begin
    int sent[13];
    int ea;
    e_valid = 0; e_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    checks++; if (done) begin failures++; $display("FAIL done too early"); end
    for (int k = 0; k < 13; k++) begin
      sent[k] = $urandom_range(200000);
      e_valid = 1; e_data = N'(sent[k]);
      while (!e_ready) @(negedge clk);
      @(negedge clk);
      e_valid = 0;
      if ($urandom_range(2) == 0) @(negedge clk);
    end
    @(negedge clk);
    checks++; if (!done) begin failures++; $display("FAIL not done"); end
    checks++; if (got_addr.size() != 13) begin failures++; $display("FAIL %0d writes", got_addr.size()); end
    for (int k = 0; k < 13 && k < got_addr.size(); k++) begin
      ea = (pts_t[k] + pts_i[k] - 10) * (T + 2) + (pts_t[k] - pts_i[k] + 2);
      checks++;
      if (got_addr[k] != ea || got_data[k] != (sent[k] & ((1 << N) - 1))) begin
        failures++; $display("FAIL word %0d addr %0d want %0d", k, got_addr[k], ea);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
