// tb_mega_lzc: checks the tree leading zero counter against a bit-by-bit
// reference: every one-hot vector, the all-zero vector, and random vectors
// of varied density, at the full 96-bit width.
module tb_mega_lzc;
  localparam int W = 96;
  logic [W-1:0] vec;
  logic [6:0]   cnt;
  logic         zero;
  int checks = 0, failures = 0;

  mega_lzc #(.WIDTH(W)) dut (.vec(vec), .cnt(cnt), .zero(zero));

  task automatic check();
    int exp = -1;
    for (int i = W - 1; i >= 0; i--) if (vec[i] && exp < 0) exp = W - 1 - i;
    #1;
    checks++;
    if ((exp < 0) != zero || (exp >= 0 && int'(cnt) != exp)) begin
      failures++;
      if (failures < 5) $display("vec %h: cnt %0d zero %0d, expected %0d", vec, cnt, zero, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec = '0; check();
    for (int i = 0; i < W; i++) begin vec = '0; vec[i] = 1'b1; check(); end
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < W; i++) vec[i] = (($urandom % 64) < (n % 8) + 1);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
