// tb_bit_packer: random variable-length codes are pushed into the packer
// with random output back-pressure; the words that come out are compared
// with a bit-serial reference stream built in the test (LSB first, no gaps,
// last word zero filled), and bit_pos with the number of bits pushed. A
// second run without back-pressure checks one code per cycle.
module tb_bit_packer;
  localparam int BW = 32, IW = 32, PW = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [IW-1:0] in_code; logic [5:0] in_len;
  logic [BW-1:0] out_word; logic [PW-1:0] bit_pos;
  int checks = 0, failures = 0;
  bit ref_bits[$];
  logic [BW-1:0] got[$];
  int got_last_idx;

  bit_packer #(.BUS_W(BW), .IN_W(IW), .POS_W(PW)) dut (.*);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    got.push_back(out_word);
    if (out_last) got_last_idx = got.size();
  end

  task automatic run(input int ncodes, input bit stall, output int cycles);
    int total = 0, c0;
    ref_bits.delete(); got.delete(); got_last_idx = -1;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    c0 = $time / 10;
    for (int i = 0; i < ncodes; i++) begin
      int len = (i % 5 == 0) ? 32 : $urandom_range(IW - 1) + 1;
      logic [IW-1:0] c = IW'({$urandom, $urandom});
      in_valid = 1; in_code = c; in_len = 6'(len); in_last = (i == ncodes - 1);
      for (int b = 0; b < len; b++) ref_bits.push_back(c[b]);
      total += len;
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0;
    cycles = $time / 10 - c0;
    wait (got_last_idx > 0);
    @(negedge clk);
    checks++;
    if (int'(bit_pos) != total) begin failures++; $display("FAIL bit_pos %0d %0d", bit_pos, total); end
    checks++;
    if (got.size() != (total + BW - 1) / BW) begin failures++; $display("FAIL words %0d", got.size()); end
    for (int w = 0; w < got.size(); w++) begin
      logic [BW-1:0] e = '0;
      for (int b = 0; b < BW; b++) if (w * BW + b < total) e[b] = ref_bits[w * BW + b];
      checks++;
      if (got[w] !== e) begin failures++; if (failures < 10) $display("FAIL word %0d %h %h", w, got[w], e); end
    end
  endtask

  always @(posedge clk) out_ready <= stall_mode ? ($urandom_range(3) != 0) : 1'b1;
  bit stall_mode;

  initial begin
    int cyc;
    in_valid = 0; in_code = 0; in_len = 1; in_last = 0; stall_mode = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    run(300, 1, cyc);
    stall_mode = 0;
    repeat (3) @(posedge clk);
    run(200, 0, cyc);
    checks++;
    if (cyc > 205) begin failures++; $display("FAIL rate: %0d cycles for 200 codes", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
