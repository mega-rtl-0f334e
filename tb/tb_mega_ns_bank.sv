// tb_mega_ns_bank: writes random words to a full-size bank, reads them back
// with the one-cycle read latency, and checks that a read of the word being
// written in the same cycle returns the old contents.
module tb_mega_ns_bank;
  import mega_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0;
  ns_addr_t raddr = '0, waddr = '0;
  ns_word_t rdata, wdata = '0;
  ns_word_t ref_mem [NS_DEPTH];
  int checks = 0, failures = 0;

  mega_ns_bank dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NS_DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = ns_addr_t'(i);
      for (int j = 0; j < 8; j++) wdata[j*32 +: 32] = $urandom;
      ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      ns_addr_t a;
      ns_word_t old;
      a = ns_addr_t'($urandom);
      @(negedge clk);
      re = 1; raddr = a;
      we = ($urandom % 2) == 1;
      waddr = ($urandom % 3 == 0) ? a : ns_addr_t'($urandom);
      for (int j = 0; j < 8; j++) wdata[j*32 +: 32] = $urandom;
      old = ref_mem[a];
      if (we) ref_mem[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== old) begin
        failures++;
        if (failures < 5) $display("addr %0d read mismatch", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
