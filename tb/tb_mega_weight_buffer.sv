// tb_mega_weight_buffer: loads 64 channels x 9 random kernel words through a
// memory model with random ready and delays, then reads every channel and
// checks all nine words against the memory (word base + ch*9 + k goes to
// offset k of channel ch), including the one-cycle read latency.
module tb_mega_weight_buffer;
  import mega_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic load_start = 0, rd_en = 0;
  logic [CH_W:0] cin;
  logic [ADDR_W-1:0] base = 3;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, load_busy, load_done;
  logic [ADDR_W-1:0] rd_req_addr;
  w_word_t rd_rsp_data;
  logic [CH_W-1:0] rd_ch;
  w_word_t w_out [KERNEL];
  int checks = 0, failures = 0;

  mega_weight_buffer dut (.*);

  w_word_t mem [1024];
  w_word_t q[$];
  always_ff @(posedge clk) begin
    rd_rsp_valid <= 1'b0;
    if (q.size() > 0 && ($urandom % 3) != 0) begin
      rd_rsp_valid <= 1'b1;
      rd_rsp_data  <= q.pop_front();
    end
    if (rd_req_valid && rd_req_ready) q.push_back(mem[rd_req_addr[9:0]]);
    rd_req_ready <= ($urandom % 4) != 0;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) for (int j = 0; j < 4; j++) mem[i][j*32 +: 32] = $urandom;
    cin = (CH_W+1)'(CH_MAX);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); load_start = 1; @(negedge clk); load_start = 0;
    @(posedge load_done);
    for (int ch = CH_MAX - 1; ch >= 0; ch--) begin
      @(negedge clk); rd_en = 1; rd_ch = CH_W'(ch);
      @(negedge clk); rd_en = 0;
      for (int k = 0; k < KERNEL; k++) begin
        checks++;
        if (w_out[k] !== mem[3 + ch*9 + k]) begin
          failures++;
          if (failures < 5) $display("ch %0d k %0d mismatch", ch, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
