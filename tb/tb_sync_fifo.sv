// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// data, full / empty flags and the occupancy count.
// 3000 cycles: a first half with rare pops fills the FIFO, a second half
// with frequent pops drains it. Small parameters (5 entries of 16 bits).
module tb_sync_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [3:0] count;
  int checks = 0, failures = 0;
  int q[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = $urandom_range(1); in_data = W'($urandom);
      out_ready = (i < 1500) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      check(int'(count) == q.size(), "count");
      check(in_ready == (q.size() < D), "full flag");
      check(out_valid == (q.size() > 0), "empty flag");
      if (out_valid) check(int'(out_data) == q[0], $sformatf("data %0d vs %0d", out_data, q[0]));
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(int'(in_data));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
