// tb_mega_spike_streamer: feeds random spike maps through a memory model
// with random ready and response delay and compares every emitted spike
// address, in order, with the expected list (channel, row, column ascending,
// x' = x div 3, bx = x mod 3, y' = y div 3, by = y mod 3, edge flags); bits
// beyond the map width carry garbage that must be ignored. A second part
// uses an always-ready memory with one-cycle latency and full 96-spike
// vectors and checks the rate: one spike per cycle, with no bubble when the
// streamer moves from one vector to the prefetched next one.
module tb_mega_spike_streamer;
  import mega_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic start = 0;
  logic [COORD_W-1:0] map_w, map_h;
  logic [CH_W:0] cin;
  logic [ADDR_W-1:0] base;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [ADDR_W-1:0] rd_req_addr;
  spike_vec_t rd_rsp_data;
  logic spk_valid, busy, done;
  spike_addr_t spk;
  int checks = 0, failures = 0;
  bit random_timing = 1;

  mega_spike_streamer dut (.*);

  spike_vec_t mem [1024];
  spike_vec_t q[$];
  always_ff @(posedge clk) begin
    rd_rsp_valid <= 1'b0;
    if (q.size() > 0 && (!random_timing || ($urandom % 3) != 0)) begin
      rd_rsp_valid <= 1'b1;
      rd_rsp_data  <= q.pop_front();
    end
    if (rd_req_valid && rd_req_ready) q.push_back(mem[rd_req_addr[9:0]]);
    rd_req_ready <= !random_timing || ($urandom % 4) != 0;
  end

  spike_addr_t exp_q[$];
  int first_cycle, last_cycle, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (spk_valid) begin
      spike_addr_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected spike");
      end else begin
        e = exp_q.pop_front();
        if (spk !== e) begin
          failures++;
          if (failures < 5) $display("got %p exp %p", spk, e);
        end
      end
      if (first_cycle < 0) first_cycle = cyc;
      last_cycle = cyc;
    end
  end

  task automatic run_map(int w, int h, int c, int density);
    map_w = COORD_W'(w); map_h = COORD_W'(h); cin = (CH_W+1)'(c); base = 5;
    for (int ch = 0; ch < c; ch++)
      for (int y = 0; y < h; y++) begin
        spike_vec_t v;
        for (int x = 0; x < VEC_W; x++) begin
          bit b = (($urandom % 100) < density);
          v[VEC_W-1-x] = b;
          if (b && x < w) begin
            spike_addr_t e;
            e.xp = XP_W'(x / 3); e.bx = 2'(x % 3);
            e.yp = YP_W'(y / 3); e.by = 2'(y % 3);
            e.ch = CH_W'(ch);
            e.first_x = (x == 0); e.last_x = (x == w - 1);
            e.first_y = (y == 0); e.last_y = (y == h - 1);
            exp_q.push_back(e);
          end
        end
        mem[5 + ch*h + y] = v;
      end
    first_cycle = -1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge done);
    @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d spikes missing", exp_q.size()); end
    exp_q.delete();
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_map(96, 7, 2, 20);
    run_map(20, 9, 3, 35);
    run_map(1, 4, 1, 60);
    run_map(50, 6, 2, 0);
    // rate: three full vectors, ideal memory
    random_timing = 0;
    run_map(96, 3, 1, 100);
    checks++;
    if (last_cycle - first_cycle != 3 * 96 - 1) begin
      failures++;
      $display("288 spikes took %0d cycles", last_cycle - first_cycle + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
