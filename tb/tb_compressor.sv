// tb_compressor: streams a tile-like sequence of MARS (lengths 5, 1, 1, 5 and
// a longer smooth one) through the compressor, decodes the packed output with
// the test's own bit-level decoder, and checks every word, the marker pulses
// (MARS index and bit position), the final bit count, the plain mode (one
// word per bus word) and the initiation interval of one word per cycle.
module tb_compressor;
  localparam int N = 18, BW = 32, PW = 16;
  localparam int H = $clog2(N + 1);
  logic clk = 0, rst_n = 0, clear = 0, compressed;
  always #5 clk = ~clk;
  logic s_valid, s_ready, s_first, s_last, m_valid, m_ready, m_last, mk_valid;
  logic [N-1:0] s_data; logic [BW-1:0] m_word; logic [1:0] mk_index;
  logic [PW-1:0] mk_pos, bit_count;
  int checks = 0, failures = 0;
  logic [BW-1:0] words[$];
  int mk_seen[$], mk_idx_seen[$];
  bit done_flag;

  compressor #(.DATA_W(N), .BUS_W(BW), .POS_W(PW)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin words.push_back(m_word); if (m_last) done_flag = 1; end
    if (mk_valid) begin mk_seen.push_back(int'(mk_pos)); mk_idx_seen.push_back(int'(mk_index)); end
  end

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  function automatic int gb(input int pos, input int n);
    int v = 0;
    for (int i = 0; i < n; i++) if (words[(pos + i) / BW][(pos + i) % BW]) v |= 1 << i;
    return v;
  endfunction

  task automatic run(input bit comp, input int lens[5]);
    int data[$], firsts[$], nm, pos, prev, v, k, sg, t0, cyc, mstart[$];
    words.delete(); mk_seen.delete(); mk_idx_seen.delete(); done_flag = 0;
    compressed = comp;
    v = $urandom_range(1000);
    for (int m = 0; m < 5; m++)
      for (int j = 0; j < lens[m]; j++) begin
        v += int'($urandom_range(20)) - 10;
        if (j == 2) v += 3000;
        data.push_back(v & ((1 << N) - 1)); firsts.push_back(j == 0);
      end
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    t0 = $time / 10;
    for (int i = 0; i < data.size(); i++) begin
      s_valid = 1; s_data = N'(data[i]); s_first = firsts[i][0]; s_last = (i == data.size() - 1);
      do @(posedge clk); while (!s_ready);
      #1;
    end
    s_valid = 0; s_last = 0;
    cyc = $time / 10 - t0;
    if (comp) check(cyc <= data.size() + 1, $sformatf("II=1: %0d cycles for %0d words", cyc, data.size()));
    wait (done_flag); @(negedge clk);
    pos = 0; prev = 0; nm = 0;
    for (int i = 0; i < data.size(); i++) begin
      if (firsts[i]) begin mstart.push_back(pos); end
      if (!comp) begin v = words[i]; pos += BW; end
      else if (firsts[i]) begin v = gb(pos, N); pos += N; end
      else begin
        k = gb(pos, H); sg = gb(pos + H, 1); pos += H + 1;
        if (k == 0) v = prev + (sg ? -1 : 0);
        else begin v = prev + gb(pos, k - 1) + (sg ? -(1 << k) : (1 << (k - 1))); pos += k - 1; end
        v &= (1 << N) - 1;
      end
      check(v == data[i], $sformatf("word %0d: %0d vs %0d", i, v, data[i]));
      prev = v;
    end
    check(int'(bit_count) == pos, "bit count");
    check(words.size() == (pos + BW - 1) / BW, "word count");
    check(mk_seen.size() == 5, "marker pulses");
    for (int m = 0; m < mk_seen.size() && m < 5; m++) begin
      check(mk_seen[m] == mstart[m], $sformatf("marker %0d pos %0d vs %0d", m, mk_seen[m], mstart[m]));
      check(mk_idx_seen[m] == (m & 3), "marker index");
    end
  endtask

  always @(posedge clk) m_ready <= ($urandom_range(7) != 0) || compressed;

  initial begin
    s_valid = 0; s_first = 0; s_last = 0; s_data = 0; compressed = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    run(1, '{5, 1, 1, 5, 40});
    run(0, '{5, 1, 1, 5, 4});
    run(1, '{62, 1, 1, 62, 3});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
