// tb_decompressor: builds packed bursts with the test's own encoder (random
// garbage before the fine offset and after the last code, 1 to 3 MARS per
// burst, compressed and plain), feeds them with random gaps and output
// back-pressure, and checks every decoded word and MARS-start flag. Several
// jobs run back to back so the dropping of a burst's trailing bits is
// exercised. A last run without stalls checks one word per cycle.
module tb_decompressor;
  localparam int N = 18, BW = 32, LW = 10;
  localparam int H = $clog2(N + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic job_valid, job_ready, job_compressed, w_valid, w_ready, w_last;
  logic e_valid, e_ready, e_mars_first;
  logic [4:0] job_fine; logic [1:0] job_nseg; logic [LW-1:0] job_seg_len [3];
  logic [BW-1:0] w_data; logic [N-1:0] e_data;
  int checks = 0, failures = 0;
  int exp_q[$], expf_q[$];
  logic [BW-1:0] wq[$]; bit lq[$];
  bit stall = 1;

  decompressor #(.DATA_W(N), .BUS_W(BW), .LEN_W(LW)) dut (.*);

  always @(posedge clk) if (rst_n && e_valid && e_ready) begin
    checks++;
    if (exp_q.size() == 0 || int'(e_data) != exp_q[0] || e_mars_first != expf_q[0][0]) begin
      failures++;
      if (failures < 10) $display("FAIL got %0d/%0d want %0d/%0d", e_data, e_mars_first,
                                  exp_q.size() ? exp_q[0] : -1, expf_q.size() ? expf_q[0] : -1);
    end
    if (exp_q.size()) begin void'(exp_q.pop_front()); void'(expf_q.pop_front()); end
  end
  always @(posedge clk) e_ready <= stall ? ($urandom_range(4) != 0) : 1'b1;

  // word feeder
  always @(posedge clk) begin
    if (w_valid && w_ready) begin void'(wq.pop_front()); void'(lq.pop_front()); end
  end
  always_comb begin
    w_valid = wq.size() != 0 && !gap;
    w_data  = wq.size() ? wq[0] : '0;
    w_last  = lq.size() ? lq[0] : 1'b0;
  end
  logic gap;
  always @(posedge clk) gap <= stall && ($urandom_range(4) == 0);

  task automatic burst(input bit comp, input int nseg, input int lens[3]);
    bit bits[$];
    int fine = comp ? $urandom_range(BW - 1) : 0, v = $urandom_range(60000), prev;
    for (int i = 0; i < fine; i++) bits.push_back($urandom_range(1));
    for (int s = 0; s < nseg; s++)
      for (int j = 0; j < lens[s]; j++) begin
        logic [N-1:0] d;
        int L, k;
        v = (v + int'($urandom_range(j % 7 == 3 ? 20000 : 8)) - 4) & ((1 << N) - 1);
        exp_q.push_back(v); expf_q.push_back(j == 0);
        if (!comp) begin for (int b = 0; b < BW; b++) bits.push_back(b < N ? v[b] : 1'b0); end
        else if (j == 0) begin for (int b = 0; b < N; b++) bits.push_back(v[b]); end
        else begin
          d = N'(v - prev);
          L = 0; for (int b = N - 1; b >= 0; b--) if (d[b] == d[N-1]) L++; else break;
          k = N - L;
          for (int b = 0; b < H; b++) bits.push_back(k[b]);
          bits.push_back(d[N-1]);
          for (int b = 0; b < k - 1; b++) bits.push_back(d[b]);
        end
        prev = v;
      end
    while (bits.size() % BW != 0 || $urandom_range(3) == 0) bits.push_back($urandom_range(1));
    for (int w = 0; w < bits.size() / BW; w++) begin
      logic [BW-1:0] x;
      for (int b = 0; b < BW; b++) x[b] = bits[w * BW + b];
      wq.push_back(x); lq.push_back(w == bits.size() / BW - 1);
    end
    @(negedge clk);
    job_fine = 5'(fine); job_compressed = comp; job_nseg = 2'(nseg);
    for (int s = 0; s < 3; s++) job_seg_len[s] = LW'(lens[s]);
    job_valid = 1;
    while (!job_ready) @(negedge clk);
    @(posedge clk);
    #1 job_valid = 0;
  endtask

  initial begin
    int t0;
    job_valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    burst(1, 3, '{1, 1, 4});
    burst(1, 1, '{1, 0, 0});
    burst(0, 3, '{4, 1, 1});
    burst(1, 3, '{62, 1, 1});
    burst(0, 1, '{1, 0, 0});
    for (int r = 0; r < 20; r++)
      burst($urandom_range(1), $urandom_range(2) + 1, '{$urandom_range(30) + 1, $urandom_range(3) + 1, $urandom_range(30) + 1});
    wait (exp_q.size() == 0 && job_ready);
    stall = 0;
    repeat (4) @(posedge clk);
    t0 = $time / 10;
    burst(1, 1, '{100, 0, 0});
    wait (exp_q.size() == 0);
    checks++;
    if ($time / 10 - t0 > 110) begin failures++; $display("FAIL rate %0d cycles", $time / 10 - t0); end
    repeat (4) @(posedge clk);
    checks++;
    if (!job_ready || wq.size() != 0) begin failures++; $display("FAIL burst not drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
