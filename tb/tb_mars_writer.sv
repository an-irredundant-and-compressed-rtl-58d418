// tb_mars_writer: feeds a packed tile stream of random length with marker
// pulses, under random memory back-pressure, and checks that nothing is
// requested before the stream ends, that one write request of exactly the
// stream's length goes to the tile's block address, that the data beats
// come out in order with last on the final one, and that the marker cache
// write carries the three captured markers and the bit count (compressed
// tiles only).
module tb_mars_writer;
  localparam int T = 6, BW = 32, PW = 9, LW = 4, TW = 2 * T - 2;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic [15:0] tile_a, tile_b, grid_b; logic [31:0] mars_base;
  logic self_comp; logic [7:0] self_meta;
  logic c_valid, c_ready, c_last, mk_valid; logic [BW-1:0] c_word;
  logic [1:0] mk_index; logic [PW-1:0] mk_pos, bit_count;
  logic mc_wr_en; logic [7:0] mc_wr_slot; logic [PW-1:0] mc_wr_pos [4];
  logic wr_req_valid, wr_req_ready, wr_valid, wr_ready, wr_last, done;
  logic [31:0] wr_req_addr; logic [LW-1:0] wr_req_len; logic [BW-1:0] wr_data;
  int checks = 0, failures = 0;
  int beats[$], lasts[$], req_a[$], req_l[$], mcw[$];
  int n_in_before_req;
  bit fed_all;

  mars_writer #(.TILE(T), .BUS_W(BW), .META_SIZE(256), .POS_W(PW), .LEN_W(LW)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    wr_req_ready <= $urandom_range(1);
    wr_ready <= $urandom_range(2) != 0;
    if (wr_req_valid && wr_req_ready) begin
      req_a.push_back(int'(wr_req_addr)); req_l.push_back(int'(wr_req_len));
      if (!fed_all) n_in_before_req++;
    end
    if (wr_valid && wr_ready) begin beats.push_back(int'(wr_data)); lasts.push_back(int'(wr_last)); end
    if (mc_wr_en) begin
      mcw.push_back(int'(mc_wr_slot));
      for (int m = 0; m < 4; m++) mcw.push_back(int'(mc_wr_pos[m]));
    end
  end

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    c_valid = 0; c_last = 0; c_word = 0; mk_valid = 0; mk_index = 0; mk_pos = 0; bit_count = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      int n = $urandom_range(1, TW), words[$], mkp[4];
      @(negedge clk);
      tile_a = 16'($urandom_range(5)); tile_b = 16'($urandom_range(5)); grid_b = 16'(7);
      mars_base = 32'($urandom_range(500)); self_comp = (r % 3 != 0); self_meta = 8'($urandom_range(255));
      beats.delete(); lasts.delete(); req_a.delete(); req_l.delete(); mcw.delete();
      n_in_before_req = 0; fed_all = 0;
      start = 1; @(negedge clk) start = 0;
      mkp = '{$urandom_range(300), $urandom_range(300), $urandom_range(300), $urandom_range(300)};
      for (int m = 0; m < 4; m++) begin
        mk_valid = 1; mk_index = 2'(m); mk_pos = PW'(m == 0 ? 0 : mkp[m - 1]);
        @(negedge clk);
      end
      mk_valid = 0;
      bit_count = PW'(mkp[3]);
      for (int w = 0; w < n; w++) begin
        words.push_back($urandom);
        c_valid = 1; c_word = BW'(words[w]); c_last = (w == n - 1);
        while (!c_ready) @(negedge clk);
        @(negedge clk);
      end
      c_valid = 0; c_last = 0; fed_all = 1;
      wait (done && beats.size() == n); @(negedge clk);
      check(n_in_before_req == 0, "request before stream end");
      check(req_a.size() == 1, "one write burst");
      if (req_a.size() == 1) begin
        check(req_a[0] == int'(mars_base) + (int'(tile_a) * 7 + int'(tile_b)) * TW, "burst address");
        check(req_l[0] == n, "burst length");
      end
      for (int w = 0; w < n; w++) begin
        check(beats[w] == words[w], "data beat");
        check(lasts[w] == (w == n - 1), "last flag");
      end
      if (self_comp) begin
        check(mcw.size() == 5, "marker write");
        if (mcw.size() == 5) begin
          check(mcw[0] == int'(self_meta), "slot");
          for (int m = 0; m < 4; m++) check(mcw[1 + m] == mkp[m], $sformatf("marker %0d", m));
        end
      end else check(mcw.size() == 0, "no marker write when plain");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
