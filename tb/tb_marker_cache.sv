// tb_marker_cache: random writes of four-marker slots and reads, compared
// with a shadow copy kept by the test; checks the one-cycle read latency and
// that slots persist while other slots are written.
// Runs with 64 slots of 12-bit positions; a read issued in cycle n is checked in
// cycle n+1.
module tb_marker_cache;
  localparam int MS = 64, PW = 12;
  logic clk = 0, wr_en, rd_en;
  always #5 clk = ~clk;
  logic [5:0] wr_slot, rd_slot;
  logic [PW-1:0] wr_pos [4], rd_pos [4];
  int checks = 0, failures = 0;
  int shadow [MS][4];
  bit valid [MS];

  marker_cache #(.META_SIZE(MS), .POS_W(PW)) dut (.*);

  initial begin
    wr_en = 0; rd_en = 0; wr_slot = 0; rd_slot = 0;
    for (int m = 0; m < 4; m++) wr_pos[m] = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      wr_en = $urandom_range(1); wr_slot = 6'($urandom_range(MS - 1));
      for (int m = 0; m < 4; m++) wr_pos[m] = PW'($urandom);
      rd_en = 1; rd_slot = 6'($urandom_range(MS - 1));
      if (rd_slot == wr_slot) wr_en = 0;
      @(posedge clk); #1;
      if (valid[rd_slot])
        for (int m = 0; m < 4; m++) begin
          checks++;
          if (int'(rd_pos[m]) != shadow[rd_slot][m]) begin
            failures++;
            if (failures < 10) $display("FAIL slot %0d m %0d: %0d vs %0d", rd_slot, m, rd_pos[m], shadow[rd_slot][m]);
          end
        end
      if (wr_en) begin
        valid[wr_slot] = 1;
        for (int m = 0; m < 4; m++) shadow[wr_slot][m] = int'(wr_pos[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
