// tb_mars_accel: end-to-end test of the accelerator at its default sizes.
//
// A grid of NA x NB diamond tiles is set up. Tiles on row a = 0 and column
// b = 0 stand for tiles the host computes: the test gives all their points
// smooth random values and stores their output MARS plain (one element per
// bus word, layout O1, O3, O2, O4) in memory. The accelerator then runs
// every other tile in order, with its own output compressed or plain
// according to a fixed pattern, so that compressed and plain producers are
// both read. The test keeps an independent model: a global value field over
// the skewed coordinates (U, V), updated with the Jacobi-1D step, its own
// list of output points, and its own bit-level decoder of the compressed
// stream. After each tile it decodes the tile's block from memory and
// compares every output value, the burst length, and the marker positions.
// It counts how often each mechanism happens (compressed / plain write and
// read, non-zero fine offset, over-read word at a burst end, zero and
// negative differences, memory stalls) and fails if one never happened.
module tb_mars_accel;
  import mars_pkg::*;

  localparam int T      = 64;
  localparam int N      = 18;
  localparam int BW     = 32;
  localparam int NA     = 4;
  localparam int NB     = 4;
  localparam int OUTL   = 2 * T - 2;
  localparam int HW     = $clog2(N + 1);
  localparam int BASE   = 16;
  localparam int WORDS  = 4096;
  localparam int LEN_W  = $clog2(OUTL + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, busy, done;
  logic [15:0] tile_a, tile_b, grid_b;
  logic [31:0] mars_base;
  logic        self_comp;
  logic [7:0]  self_meta;
  logic        dep_comp [3];
  logic [7:0]  dep_meta [3];
  logic [31:0] read_cycles, exec_cycles, write_cycles;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready, rd_last;
  logic [31:0] rd_req_addr; logic [LEN_W-1:0] rd_req_len; logic [BW-1:0] rd_data;
  logic wr_req_valid, wr_req_ready, wr_valid, wr_ready, wr_last;
  logic [31:0] wr_req_addr; logic [LEN_W-1:0] wr_req_len; logic [BW-1:0] wr_data;

  mars_accel dut (.*);

  mem_model #(.BUS_W(BW), .ADDR_W(32), .LEN_W(LEN_W), .WORDS(WORDS), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rd_valid, .rd_ready, .rd_data, .rd_last,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_len,
    .wr_valid, .wr_ready, .wr_data, .wr_last);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_comp_wr, n_plain_wr, n_comp_rd, n_plain_rd, n_fine, n_overread;
  int n_zero, n_neg, n_first;

  // global field over skewed coordinates U = a*T+ul, V = b*T+vl
  int field [NA*T][NB*T];
  bit comp_of [NA][NB];

  function automatic int wrapn(input longint x);
    longint m = x & ((64'd1 << N) - 1);
    return (m >= (64'd1 << (N - 1))) ? int'(m - (64'd1 << N)) : int'(m);
  endfunction

  // k-th output point of a tile, layout O1, O3, O2, O4 (test's own list)
  task automatic out_point(input int k, output int ul, output int vl);
    if (k < T - 2) begin ul = k; vl = ((k % 2) == (T % 2)) ? T - 2 : T - 1; end
    else if (k == T - 2) begin ul = T - 2; vl = T - 2; end
    else if (k == T - 1) begin ul = T - 1; vl = T - 1; end
    else begin vl = k - T; ul = ((vl % 2) == (T % 2)) ? T - 2 : T - 1; end
  endtask

  function automatic int blk(input int a, input int b);
    return BASE + (a * NB + b) * OUTL;
  endfunction

  function automatic bit mars_first(input int k);
    return k == 0 || k == T - 2 || k == T - 1 || k == T;
  endfunction

  // bit reader over the memory block of a tile
  function automatic int getbits(input int a, input int b, input int pos, input int n);
    int v = 0;
    for (int i = 0; i < n; i++) begin
      int p = pos + i;
      if (u_mem.mem[blk(a, b) + p / BW][p % BW]) v |= (1 << i);
    end
    return v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // verify one finished tile in memory against the field
  task automatic verify_tile(input int a, input int b);
    int ul, vl, pos, prev, val, kk, sg, d, starts[4];
    pos = 0; prev = 0;
    for (int k = 0; k < OUTL; k++) begin
      out_point(k, ul, vl);
      if (k == T - 2) starts[0] = pos;
      if (k == T - 1) starts[1] = pos;
      if (k == T)     starts[2] = pos;
      if (comp_of[a][b]) begin
        if (mars_first(k)) begin
          val = wrapn(getbits(a, b, pos, N)); pos += N; n_first++;
        end else begin
          kk = getbits(a, b, pos, HW); sg = getbits(a, b, pos + HW, 1);
          pos += HW + 1;
          if (kk == 0) d = (sg != 0) ? -1 : 0;
          else begin
            d = getbits(a, b, pos, kk - 1) + ((sg != 0) ? -(1 << kk) : (1 << (kk - 1)));
            pos += kk - 1;
          end
          if (kk == 0) n_zero++;
          if (sg != 0) n_neg++;
          val = wrapn(prev + d);
        end
      end else begin
        val = wrapn(u_mem.mem[blk(a, b) + k]);
        check(u_mem.mem[blk(a, b) + k] >> N == 0, "plain padding is zero");
      end
      check(val == field[a*T+ul][b*T+vl],
            $sformatf("tile (%0d,%0d) word %0d: got %0d want %0d", a, b, k, val,
                      field[a*T+ul][b*T+vl]));
      prev = val;
    end
    starts[3] = comp_of[a][b] ? pos : OUTL * BW;
    if (comp_of[a][b]) begin
      for (int m = 0; m < 4; m++)
        check(int'(dut.u_markers.mem[a * NB + b][m*dut.POS_W +: dut.POS_W]) == starts[m],
              $sformatf("marker %0d of tile (%0d,%0d)", m, a, b));
      check(int'(u_mem.wr_bursts) > 0, "write burst seen");
    end
  endtask

  // smooth random values for host tiles
  task automatic host_tile(input int a, input int b);
    int ul, vl, v;
    v = $urandom_range(2000) - 1000;
    for (int u = 0; u < T; u++)
      for (int w = 0; w < T; w++) begin
        v = v + int'($urandom_range(6)) - 3;
        if ($urandom_range(99) == 0) v = v + int'($urandom_range(40000)) - 20000;
        field[a*T+u][b*T+w] = wrapn(v);
      end
    for (int k = 0; k < OUTL; k++) begin
      out_point(k, ul, vl);
      u_mem.mem[blk(a, b) + k] = BW'(field[a*T+ul][b*T+vl] & ((1 << N) - 1));
    end
    comp_of[a][b] = 1'b0;
  endtask

  task automatic model_tile(input int a, input int b);
    longint s;
    for (int ul = 0; ul < T; ul++)
      for (int vl = ul % 2; vl < T; vl += 2) begin
        int U = a*T+ul, V = b*T+vl;
        s = longint'(field[U-2][V]) + longint'(field[U-1][V-1]) + longint'(field[U][V-2]);
        field[U][V] = wrapn((s * 21627) >>> 16);
      end
  endtask

  int words_written;
  always @(posedge clk) if (rst_n && wr_req_valid && wr_req_ready) words_written = int'(wr_req_len);
  always @(posedge clk)
    if (rst_n && dut.job_valid && dut.job_ready) begin
      if (dut.job_comp) n_comp_rd++; else n_plain_rd++;
      if (dut.job_fine != 0) n_fine++;
    end
  // a burst whose last word holds bits past the end of the requested MARS
  always @(posedge clk)
    if (rst_n && dut.u_decomp.emit && dut.u_decomp.left == 1 &&
        dut.u_decomp.seg + 2'd1 == dut.u_decomp.nseg &&
        (dut.u_decomp.cnt_after != 0 || !dut.u_decomp.got_last)) n_overread++;

  initial begin
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    start = 0; tile_a = 0; tile_b = 0; grid_b = 16'(NB); mars_base = BASE;
    self_comp = 0; self_meta = 0;
    for (int d = 0; d < 3; d++) begin dep_comp[d] = 0; dep_meta[d] = 0; end
    for (int a = 0; a < NA; a++) for (int b = 0; b < NB; b++)
      if (a == 0 || b == 0) host_tile(a, b);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int a = 1; a < NA; a++)
      for (int b = 1; b < NB; b++) begin
        comp_of[a][b] = ((a + 2 * b) % 4) != 0;
        model_tile(a, b);
        tile_a = 16'(a); tile_b = 16'(b);
        self_comp = comp_of[a][b]; self_meta = 8'(a * NB + b);
        dep_comp[0] = comp_of[a-1][b];   dep_meta[0] = 8'((a-1) * NB + b);
        dep_comp[1] = comp_of[a-1][b-1]; dep_meta[1] = 8'((a-1) * NB + b - 1);
        dep_comp[2] = comp_of[a][b-1];   dep_meta[2] = 8'(a * NB + b - 1);
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        wait (done);
        @(negedge clk);
        if (comp_of[a][b]) n_comp_wr++; else n_plain_wr++;
        verify_tile(a, b);
        check(words_written == (comp_of[a][b] ?
              (int'(dut.u_markers.mem[a * NB + b][3*dut.POS_W +: dut.POS_W]) + BW - 1) / BW
              : OUTL), "write burst length");
        check(exec_cycles >= T * T / 2 && exec_cycles <= T * T / 2 + 2, "one point per cycle");
        $display("tile (%0d,%0d) comp=%0d read=%0d exec=%0d write=%0d cycles, %0d words",
                 a, b, comp_of[a][b], read_cycles, exec_cycles, write_cycles, words_written);
      end
    check(u_mem.errors == 0, "write last flag");
    check(n_comp_wr > 0, "compressed write happened");
    check(n_plain_wr > 0, "plain write happened");
    check(n_comp_rd > 0, "compressed read happened");
    check(n_plain_rd > 0, "plain read happened");
    check(n_fine > 0, "burst starting mid-word happened");
    check(n_overread > 0, "over-read bits at burst end happened");
    check(n_zero > 0, "zero difference code happened");
    check(n_neg > 0, "negative difference happened");
    check(u_mem.rd_stalls > 0 && u_mem.wr_stalls > 0, "memory stalls happened");
    $display("mechanisms: comp_wr=%0d plain_wr=%0d comp_rd=%0d plain_rd=%0d fine=%0d overread=%0d zero=%0d neg=%0d first=%0d rd_stall=%0d wr_stall=%0d",
             n_comp_wr, n_plain_wr, n_comp_rd, n_plain_rd, n_fine, n_overread, n_zero, n_neg,
             n_first, u_mem.rd_stalls, u_mem.wr_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
