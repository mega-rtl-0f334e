// tb_mega_spike_buffer: feeds the spike buffer random threshold-unit output
// for several rows of a 31-wide map (columns 31..32 of the last word lie
// beyond the map and carry spikes that must be dropped), flushes each row
// through a write port with random ready and checks the 32 vectors: address
// out_base + ch*map_h + row, bit 95-x set where channel ch fired at x, and
// the buffer cleared between rows. Also checks the output spike counter.
module tb_mega_spike_buffer;
  import mega_pkg::*;
  localparam int W = 31, H = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic [COORD_W-1:0] map_w = COORD_W'(W), map_h = COORD_W'(H), row;
  logic [ADDR_W-1:0] out_base = 200;
  logic in_valid = 0, flush = 0;
  logic [XP_W-1:0] in_xp;
  logic [LANES-1:0] in_spk [3];
  logic wr_req_valid, wr_req_ready, flush_done;
  logic [ADDR_W-1:0] wr_req_addr;
  spike_vec_t wr_req_data;
  logic [15:0] spike_count;
  int checks = 0, failures = 0, total = 0;

  mega_spike_buffer dut (.*);

  spike_vec_t mem [512];
  always_ff @(posedge clk) begin
    if (wr_req_valid && wr_req_ready) mem[wr_req_addr[8:0]] <= wr_req_data;
    wr_req_ready <= ($urandom % 3) != 0;
  end

  spike_vec_t expv [LANES][H];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int y = 0; y < H; y++) begin
      for (int o = 0; o < LANES; o++) expv[o][y] = '0;
      for (int xp = 0; xp < (W + 2) / 3; xp++) begin
        @(negedge clk);
        in_valid = 1; in_xp = XP_W'(xp);
        for (int b = 0; b < 3; b++) begin
          in_spk[b] = $urandom;
          for (int o = 0; o < LANES; o++)
            if (3 * xp + b < W) begin
              expv[o][y][VEC_W-1-(3*xp+b)] = in_spk[b][o];
              total += int'(in_spk[b][o]);
            end else begin
              total += int'(in_spk[b][o]);   // counted, but not stored
            end
        end
      end
      @(negedge clk); in_valid = 0; row = COORD_W'(y); flush = 1;
      @(negedge clk); flush = 0;
      @(posedge flush_done);
    end
    @(negedge clk);
    for (int y = 0; y < H; y++)
      for (int o = 0; o < LANES; o++) begin
        checks++;
        if (mem[200 + o*H + y] !== expv[o][y]) begin
          failures++;
          if (failures < 5) $display("row %0d ch %0d: %h exp %h", y, o, mem[200 + o*H + y], expv[o][y]);
        end
      end
    checks++;
    if (int'(spike_count) != (total & 16'hffff)) begin failures++; $display("count %0d exp %0d", spike_count, total); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
