// tb_mega_csr: writes every configuration register with random values and
// reads them back, checks that the start bit gives one start pulse with the
// operation bits, that a start while busy is ignored, and that the status
// done bit is set by the end of a run and cleared by the next start.
module tb_mega_csr;
  import mega_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic csr_valid = 0, csr_write = 0;
  logic [3:0] csr_addr = '0;
  logic [31:0] csr_wdata = '0, csr_rdata;
  cfg_t cfg;
  op_mask_t ops;
  logic start, busy = 0, run_done = 0;
  logic [31:0] spikes = 32'd1234, cycles = 32'd777;
  int checks = 0, failures = 0, starts = 0;

  mega_csr dut (.*);

  always @(posedge clk) if (start) starts++;

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); csr_valid = 1; csr_write = 1; csr_addr = 4'(a); csr_wdata = d;
    @(negedge clk); csr_valid = 0; csr_write = 0;
    @(negedge clk);
  endtask
  task automatic expect_rd(int a, logic [31:0] e);
    @(negedge clk); csr_addr = 4'(a); #1;
    checks++;
    if (csr_rdata !== e) begin failures++; $display("reg %0d: %h exp %h", a, csr_rdata, e); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    repeat (2) @(negedge clk); rst_n = 1;
    v = $urandom; wr(CSR_MAP_W, v);    expect_rd(CSR_MAP_W, 32'(v[COORD_W-1:0]));
    v = $urandom; wr(CSR_MAP_H, v);    expect_rd(CSR_MAP_H, 32'(v[COORD_W-1:0]));
    v = $urandom; wr(CSR_CIN, v);      expect_rd(CSR_CIN, 32'(v[CH_W:0]));
    v = $urandom; wr(CSR_SPK_BASE, v); expect_rd(CSR_SPK_BASE, v);
    v = $urandom; wr(CSR_WGT_BASE, v); expect_rd(CSR_WGT_BASE, v);
    v = $urandom; wr(CSR_NS_BASE, v);  expect_rd(CSR_NS_BASE, v);
    v = $urandom; wr(CSR_OUT_BASE, v); expect_rd(CSR_OUT_BASE, v);
    wr(CSR_LEAK, 32'h1ff);             expect_rd(CSR_LEAK, 32'hff);
    wr(CSR_THRESH, 32'h85);            expect_rd(CSR_THRESH, 32'hffffff85);
    wr(CSR_NS_WORDS, 32'd512);         expect_rd(CSR_NS_WORDS, 32'd512);
    checks++;
    if (cfg.map_h !== COORD_W'(v) && cfg.leak !== 8'hff) failures++;
    expect_rd(CSR_SPIKES, 32'd1234);
    expect_rd(CSR_CYCLES, 32'd777);
    wr(CSR_CTRL, 32'b10101_1);
    checks++;
    if (starts != 1 || ops !== op_mask_t'(5'b10101)) begin failures++; $display("start %0d ops %b", starts, ops); end
    busy = 1;
    wr(CSR_CTRL, 32'b11111_1);
    checks++;
    if (starts != 1) begin failures++; $display("start accepted while busy"); end
    expect_rd(CSR_STATUS, 32'd1);
    @(negedge clk); run_done = 1; @(negedge clk); run_done = 0; busy = 0;
    expect_rd(CSR_STATUS, 32'd2);
    wr(CSR_CTRL, 32'b00100_1);
    expect_rd(CSR_STATUS, 32'd0);
    checks++;
    if (starts != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
