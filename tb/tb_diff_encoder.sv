// tb_diff_encoder: checks the differential code of random word pairs
// against a reference written from the algorithm's description: the length
// field N - L where L counts the leading zeros (D >= 0) or ones (D < 0) of
// D = w - p, then the sign, then the N-L-1 low bits; raw word when first.
module tb_diff_encoder;
  localparam int N = 18;
  localparam int H = $clog2(N + 1);
  localparam int CW = N + H - 1;
  logic [N-1:0] word, prev;
  logic first;
  logic [CW-1:0] code;
  logic [$clog2(CW+1)-1:0] code_len;
  int checks = 0, failures = 0;

  diff_encoder #(.DATA_W(N)) dut (.*);

  task automatic one(input logic [N-1:0] w, input logic [N-1:0] p, input bit f);
    logic [N-1:0] d;
    int L, k, len;
    longint exp_code;
    word = w; prev = p; first = f;
    #1;
    d = w - p;
    L = 0;
    for (int b = N - 1; b >= 0; b--) if (d[b] == d[N-1]) L++; else break;
    k = N - L;
    if (f) begin exp_code = longint'(w); len = N; end
    else begin
      len = H + 1 + ((k > 0) ? k - 1 : 0);
      exp_code = longint'(k) | (longint'(d[N-1]) << H);
      if (k > 1) exp_code |= (longint'(d) & ((64'd1 << (k - 1)) - 1)) << (H + 1);
    end
    checks++;
    if (longint'(code) != exp_code || int'(code_len) != len) begin
      failures++;
      if (failures < 10) $display("FAIL w=%0h p=%0h f=%0d code=%0h/%0d want %0h/%0d",
                                  w, p, f, code, code_len, exp_code, len);
    end
  endtask

  initial begin
    one(18'd5, 18'd5, 0);          // zero difference
    one(18'd4, 18'd5, 0);          // -1
    one(18'd6, 18'd5, 0);          // +1
    one(18'h1FFFF, 18'h20000, 0);  // wrap
    one(18'h3, 18'h0, 1);          // raw
    for (int i = 0; i < 3000; i++) begin
      logic [N-1:0] w = N'($urandom), p;
      p = (i % 3 == 0) ? N'($urandom) : w + N'($urandom_range(64)) - N'(32);
      one(w, p, ($urandom_range(9) == 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
