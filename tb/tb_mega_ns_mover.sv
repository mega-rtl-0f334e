// tb_mega_ns_mover: nine behavioural banks and a memory model with random
// ready and delays. Loads 9 x 37 random words from memory into the banks and
// checks each bank word (bank b, word w comes from base + b*words + w), then
// stores them to a second area and compares.
module tb_mega_ns_mover;
  import mega_pkg::*;
  localparam int WORDS = 37;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic start = 0, dir = 0;
  logic [NS_AW:0] words = (NS_AW+1)'(WORDS);
  logic [ADDR_W-1:0] base;
  logic req_valid, req_ready, req_we, rsp_valid, busy, done;
  logic [ADDR_W-1:0] req_addr;
  ns_word_t req_wdata, rsp_rdata, b_wdata;
  logic [KERNEL-1:0] b_re, b_we;
  ns_addr_t b_addr;
  ns_word_t b_rdata [KERNEL];
  int checks = 0, failures = 0;

  mega_ns_mover dut (.*);

  ns_word_t mem [1024];
  ns_word_t banks [KERNEL][64];
  ns_word_t q[$];
  always_ff @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (q.size() > 0 && ($urandom % 3) != 0) begin rsp_valid <= 1'b1; rsp_rdata <= q.pop_front(); end
    if (req_valid && req_ready) begin
      if (req_we) mem[req_addr[9:0]] <= req_wdata;
      else        q.push_back(mem[req_addr[9:0]]);
    end
    req_ready <= ($urandom % 4) != 0;
    for (int b = 0; b < KERNEL; b++) begin
      if (b_re[b]) b_rdata[b] <= banks[b][b_addr[5:0]];
      if (b_we[b]) banks[b][b_addr[5:0]] <= b_wdata;
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) for (int j = 0; j < 8; j++) mem[i][j*32 +: 32] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    base = 10; dir = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge done);
    for (int b = 0; b < KERNEL; b++)
      for (int w = 0; w < WORDS; w++) begin
        checks++;
        if (banks[b][w] !== mem[10 + b*WORDS + w]) begin
          failures++; if (failures < 5) $display("load bank %0d word %0d", b, w);
        end
      end
    base = 500; dir = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge done);
    @(negedge clk);
    for (int i = 0; i < KERNEL * WORDS; i++) begin
      checks++;
      if (mem[500 + i] !== mem[10 + i]) begin
        failures++; if (failures < 5) $display("store word %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
