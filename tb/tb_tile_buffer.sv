// tb_tile_buffer: writes random data to random scratchpad addresses and reads
// them back on all three asynchronous ports, against a shadow array.
// Each cycle: one random write, then the three read ports sampled
// combinationally against the shadow copy. Runs at a 6 x 6 tile.
module tb_tile_buffer;
  localparam int T = 6, N = 18, DEPTH = (T + 2) * (T + 2), AW = $clog2(DEPTH);
  logic clk = 0, we;
  always #5 clk = ~clk;
  logic [AW-1:0] waddr, raddr [3];
  logic [N-1:0] wdata, rdata [3];
  int checks = 0, failures = 0;
  int shadow [DEPTH];
  bit valid [DEPTH];

  tile_buffer #(.TILE(T), .DATA_W(N)) dut (.*);

  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int p = 0; p < 3; p++) raddr[p] = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'($urandom_range(DEPTH - 1)); wdata = N'($urandom);
      for (int p = 0; p < 3; p++) raddr[p] = AW'($urandom_range(DEPTH - 1));
      #1;
      for (int p = 0; p < 3; p++)
        if (valid[raddr[p]]) begin
          checks++;
          if (int'(rdata[p]) != shadow[raddr[p]]) begin
            failures++; if (failures < 10) $display("FAIL port %0d addr %0d", p, raddr[p]);
          end
        end
      @(posedge clk);
      shadow[waddr] = int'(wdata); valid[waddr] = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
