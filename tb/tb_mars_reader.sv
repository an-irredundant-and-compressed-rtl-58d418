// tb_mars_reader: for a 6 x 6 tile at random grid positions and random
// marker values, checks the three burst requests (SW, S, SE producers:
// address, length in words) and the decompressor jobs (fine offset, mode,
// MARS count and lengths) against values the test derives from the layout
// O1 (4 words), O3, O2, O4 (4 words): SW reads O3..end, S reads O2, SE reads
// start..O2. Compressed producers take their bit positions from a marker
// cache model, plain ones use word positions 4, 5, 6, 10.
module tb_mars_reader;
  localparam int T = 6, BW = 32, PW = 9, LW = 4, TW = 2 * T - 2;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic [15:0] tile_a, tile_b, grid_b;
  logic [31:0] mars_base;
  logic dep_comp [3];
  logic [7:0] dep_meta [3];
  logic mc_rd_en; logic [7:0] mc_rd_slot; logic [PW-1:0] mc_rd_pos [4];
  logic rd_req_valid, rd_req_ready; logic [31:0] rd_req_addr; logic [LW-1:0] rd_req_len;
  logic job_valid, job_ready, job_compressed; logic [4:0] job_fine;
  logic [1:0] job_nseg; logic [LW-1:0] job_seg_len [3];
  logic done;
  int checks = 0, failures = 0;
  int mk [256][4];
  int reqs_a[$], reqs_l[$], jobs[$];

  mars_reader #(.TILE(T), .BUS_W(BW), .META_SIZE(256), .POS_W(PW), .LEN_W(LW)) dut (.*);

  always @(posedge clk) if (mc_rd_en) for (int m = 0; m < 4; m++) mc_rd_pos[m] <= PW'(mk[mc_rd_slot][m]);
  always @(posedge clk) if (rst_n) begin
    rd_req_ready <= $urandom_range(1);
    job_ready <= $urandom_range(1);
    if (rd_req_valid && rd_req_ready) begin reqs_a.push_back(int'(rd_req_addr)); reqs_l.push_back(int'(rd_req_len)); end
    if (job_valid && job_ready)
      jobs.push_back(int'(job_fine) | (int'(job_compressed) << 5) | (int'(job_nseg) << 6) |
                     (int'(job_seg_len[0]) << 8) | (int'(job_seg_len[1]) << 12) | (int'(job_seg_len[2]) << 16));
  end

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    for (int r = 0; r < 20; r++) begin
      int a = $urandom_range(1, 6), b = $urandom_range(1, 6), gb = 8, base = $urandom_range(1000);
      int pa[3], pb[3], p[4], s, e, nl[3][3], ns[3], fs[3], lo, hi;
      pa = '{a - 1, a - 1, a}; pb = '{b, b - 1, b - 1};
      ns = '{3, 1, 3};
      nl[0] = '{1, 1, 4}; nl[1] = '{1, 1, 1}; nl[2] = '{4, 1, 1};
      fs = '{0, 1, -1};
      @(negedge clk);
      tile_a = 16'(a); tile_b = 16'(b); grid_b = 16'(gb); mars_base = 32'(base);
      for (int d = 0; d < 3; d++) begin
        dep_comp[d] = $urandom_range(1); dep_meta[d] = 8'($urandom_range(255));
        // increasing marker positions of a plausible compressed tile
        mk[dep_meta[d]][0] = $urandom_range(18, 80);
        mk[dep_meta[d]][1] = mk[dep_meta[d]][0] + 18;
        mk[dep_meta[d]][2] = mk[dep_meta[d]][1] + 18;
        mk[dep_meta[d]][3] = mk[dep_meta[d]][2] + $urandom_range(18, 120);
      end
      reqs_a.delete(); reqs_l.delete(); jobs.delete();
      rst_n = 1; start = 1; @(negedge clk) start = 0;
      wait (done); @(negedge clk);
      check(reqs_a.size() == 3 && jobs.size() == 3, "three bursts");
      for (int d = 0; d < 3 && d < reqs_a.size() && d < jobs.size(); d++) begin
        for (int m = 0; m < 4; m++) p[m] = dep_comp[d] ? mk[dep_meta[d]][m] : ((m == 3) ? TW : T - 2 + m) * BW;
        lo = (fs[d] < 0) ? 0 : p[fs[d]];
        hi = (d == 0) ? p[3] : p[2];
        s = lo / BW; e = (hi + BW - 1) / BW;
        check(reqs_a[d] == base + ((pa[d] * gb + pb[d]) * TW) + s, $sformatf("addr d%0d %0d", d, reqs_a[d]));
        check(reqs_l[d] == e - s, $sformatf("len d%0d %0d vs %0d", d, reqs_l[d], e - s));
        check((jobs[d] & 31) == lo % BW, "fine");
        check(((jobs[d] >> 5) & 1) == int'(dep_comp[d]), "mode");
        check(((jobs[d] >> 6) & 3) == ns[d], "nseg");
        for (int q = 0; q < ns[d]; q++) check(((jobs[d] >> (8 + 4 * q)) & 15) == nl[d][q], "seg len");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
