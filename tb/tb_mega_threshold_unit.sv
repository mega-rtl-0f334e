// tb_mega_threshold_unit: a threshold unit on a behavioural bank filled
// with random states. Several runs with different base, length, leak and
// threshold (negative and positive); each written word, spike vector and
// word index is compared with a model (leak toward zero, fire when the
// leaked state exceeds the threshold, reset to zero). The unit must handle
// one word per cycle: a run of n words finishes within n + 5 cycles.
module tb_mega_threshold_unit;
  import mega_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic start = 0;
  ns_addr_t base;
  logic [XP_W:0] count;
  logic [STATE_W-1:0] leak;
  state_t thresh;
  logic re, we, spk_valid, busy, done;
  ns_addr_t raddr, waddr;
  ns_word_t rdata, wdata;
  logic [XP_W-1:0] spk_xp;
  logic [LANES-1:0] spk;
  int checks = 0, failures = 0;

  mega_threshold_unit dut (.*);

  ns_word_t mem [NS_DEPTH];
  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

  ns_word_t exp_word [NS_DEPTH];
  logic [LANES-1:0] exp_spk [NS_DEPTH];

  always @(posedge clk) begin
    if (spk_valid) begin
      int a;
      a = int'(base) + int'(spk_xp);
      checks++;
      if (wdata !== exp_word[a] || spk !== exp_spk[a] || waddr !== ns_addr_t'(a) || !we) begin
        failures++;
        if (failures < 5) $display("word %0d mismatch", a);
      end
    end
  end

  task automatic run(int b, int n, int lk, int th);
    longint t0;
    base = ns_addr_t'(b); count = (XP_W+1)'(n); leak = 8'(lk); thresh = state_t'(th);
    for (int a = b; a < b + n; a++)
      for (int i = 0; i < LANES; i++) begin
        int v = int'(signed'(mem[a][i*8 +: 8]));
        if (v > 0)      v = v > lk ? v - lk : 0;
        else if (v < 0) v = -v > lk ? v + lk : 0;
        exp_spk[a][i] = v > th;
        exp_word[a][i*8 +: 8] = exp_spk[a][i] ? 8'd0 : 8'(v);
      end
    @(negedge clk); start = 1; t0 = $time;
    @(negedge clk); start = 0;
    @(posedge done);
    checks++;
    if (($time - t0) / 10 > n + 5) begin failures++; $display("run of %0d words took %0d cycles", n, ($time - t0) / 10); end
    for (int a = b; a < b + n; a++) begin
      checks++;
      if (mem[a] !== exp_word[a]) failures++;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NS_DEPTH; i++) for (int j = 0; j < 8; j++) mem[i][j*32 +: 32] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, 32, 5, 40);
    run(100, 7, 0, 0);
    run(479, 32, 130, -20);
    run(300, 1, 1, -128);
    run(10, 20, 17, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
