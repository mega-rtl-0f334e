// tb_mega_ctrl: the sequencer with its sub-units played by the testbench,
// each answering its start pulse with a done pulse after a random delay.
// The log of starts is compared with the expected sequence: weight load,
// state load, convolution (with bank mode CONV, spikes counted), then per
// map row y the threshold start for bank row y mod 3 with base
// (y div 3)*row_words in THRESH mode followed by the flush of row y, then
// state store, then run_done. A second run enables only convolution and
// threshold. row_words must be ceil(map_w/3).
module tb_mega_ctrl;
  import mega_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic start = 0;
  op_mask_t ops;
  cfg_t cfg;
  logic busy, run_done, wb_load_start, wb_load_done = 0, mv_start, mv_dir, mv_done = 0;
  logic ss_start, ss_done = 0, ss_spk_valid = 0, sb_flush, sb_flush_done = 0, th_busy = 0;
  bank_mode_e bank_mode;
  logic [XP_W:0] row_words;
  logic [2:0] th_start;
  ns_addr_t th_base;
  logic [COORD_W-1:0] sb_row;
  logic [31:0] spikes, cycles;
  int checks = 0, failures = 0;
  string log[$];

  mega_ctrl dut (.*);

  task automatic pulse_later(ref logic sig, input int d);
    repeat (d) @(posedge clk);
    #1 sig = 1;
    @(posedge clk); #1 sig = 0;
  endtask

  always @(posedge clk) begin
    if (wb_load_start) begin log.push_back("W"); fork pulse_later(wb_load_done, 1 + $urandom % 5); join_none end
    if (mv_start) begin log.push_back(mv_dir ? "S" : "L"); fork pulse_later(mv_done, 1 + $urandom % 5); join_none end
    if (ss_start) begin
      log.push_back("C");
      if (bank_mode != MODE_CONV) begin failures++; $display("mode during conv %0d", bank_mode); end
      fork begin
        repeat (2) @(posedge clk);
        for (int i = 0; i < 17; i++) begin #1 ss_spk_valid = 1; @(posedge clk); end
        #1 ss_spk_valid = 0;
        pulse_later(ss_done, 1);
      end join_none
    end
    if (|th_start) begin
      log.push_back($sformatf("T%0d@%0d", $clog2(th_start), th_base));
      if (bank_mode != MODE_THRESH) failures++;
      fork begin #1 th_busy = 1; repeat (1 + $urandom % 6) @(posedge clk); #1 th_busy = 0; end join_none
    end
    if (sb_flush) begin log.push_back($sformatf("F%0d", sb_row)); fork pulse_later(sb_flush_done, 1 + $urandom % 4); join_none end
    if (run_done) log.push_back("D");
  end

  task automatic do_run(op_mask_t m, string expect_s);
    string got = "";
    log.delete();
    ops = m;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge run_done); @(posedge clk); @(negedge clk);
    foreach (log[i]) got = {got, log[i], " "};
    checks++;
    if (got != expect_s) begin failures++; $display("sequence\n  got %s\n  exp %s", got, expect_s); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; cfg.map_w = 20; cfg.map_h = 5;
    repeat (2) @(negedge clk); rst_n = 1;
    do_run(op_mask_t'(5'b11111), "W L C T0@0 F0 T1@0 F1 T2@0 F2 T0@7 F3 T1@7 F4 S D ");
    checks++;
    if (row_words != 7) begin failures++; $display("row_words %0d", row_words); end
    checks++;
    if (spikes != 17) begin failures++; $display("spikes %0d", spikes); end
    cfg.map_w = 96; cfg.map_h = 4;
    do_run(op_mask_t'(5'b01100), "C T0@0 F0 T1@0 F1 T2@0 F2 T0@32 F3 D ");
    do_run(op_mask_t'(5'b00001), "W D ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
