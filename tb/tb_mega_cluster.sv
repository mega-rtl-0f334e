// tb_mega_cluster: cluster (BX=1, BY=2) on a 14x8 map with random weights
// for 2 input channels. The bank is filled through the transfer port, then
// 1500 random spikes (random order, back to back or with gaps, so every
// hazard case occurs) are applied in convolution mode, with the weight words
// arriving one cycle after each spike as the weight buffer delivers them.
// The bank is read back and every state of the positions this bank holds is
// compared with a sequential model of the 3x3 event-driven update with
// clipping. Then one bank row is thresholded and its spikes and states are
// checked. Also checked: a spike is taken every cycle, and the update,
// forwarding and clipping events occur.
module tb_mega_cluster;
  import mega_pkg::*;
  localparam int BXP = 1, BYP = 2, W = 14, H = 8, RW = (W + 2) / 3;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  bank_mode_e mode = MODE_IDLE;
  logic [XP_W:0] row_words = (XP_W+1)'(RW);
  logic spk_valid = 0;
  spike_addr_t spk;
  w_word_t w_all [KERNEL];
  logic th_start = 0;
  ns_addr_t th_base;
  logic [STATE_W-1:0] leak = 8'd2;
  state_t thresh = 8'sd10;
  logic th_spk_valid, th_busy, th_done;
  logic [XP_W-1:0] th_spk_xp;
  logic [LANES-1:0] th_spk;
  logic x_re = 0, x_we = 0;
  ns_addr_t x_raddr, x_waddr;
  ns_word_t x_rdata, x_wdata;
  logic ev_update, ev_fwd1, ev_fwd2, ev_clip;
  int checks = 0, failures = 0, n_upd = 0, n_f1 = 0, n_f2 = 0, n_clip = 0;

  mega_cluster #(.BX(BXP), .BY(BYP)) dut (.*);

  int wgt [2][9][LANES];
  int V [LANES][H][W];
  logic [CH_W-1:0] ch_d;

  // weight buffer stand-in: one-cycle read latency
  always_ff @(posedge clk) begin
    if (spk_valid)
      for (int k = 0; k < 9; k++)
        for (int o = 0; o < LANES; o++) w_all[k][o*4 +: 4] <= 4'(wgt[spk.ch][k][o]);
    n_upd  <= n_upd + int'(ev_update);
    n_f1   <= n_f1 + int'(ev_fwd1);
    n_f2   <= n_f2 + int'(ev_fwd2);
    n_clip <= n_clip + int'(ev_clip);
  end

  function automatic bit mine(int x, int y);
    return (x % 3 == BXP) && (y % 3 == BYP);
  endfunction
  function automatic ns_addr_t addr_of(int x, int y);
    return ns_addr_t'((y / 3) * RW + x / 3);
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int u, v, c, cyc0, nspk;
    for (int cc = 0; cc < 2; cc++)
      for (int k = 0; k < 9; k++)
        for (int o = 0; o < LANES; o++) wgt[cc][k][o] = int'($urandom % 16) - 8;
    for (int o = 0; o < LANES; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) V[o][y][x] = (o < 2) ? 100 : int'($urandom % 61) - 30;
    for (int k = 0; k < 9; k++) begin wgt[0][k][0] = 7; wgt[1][k][0] = 7; end
    repeat (2) @(negedge clk); rst_n = 1;
    // fill the bank
    mode = MODE_XFER;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        if (mine(x, y)) begin
          @(negedge clk);
          x_we = 1; x_waddr = addr_of(x, y);
          for (int o = 0; o < LANES; o++) x_wdata[o*8 +: 8] = 8'(V[o][y][x]);
        end
    @(negedge clk); x_we = 0; mode = MODE_CONV;
    // spikes
    nspk = 0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      if (($urandom % 4) == 0) begin spk_valid = 0; continue; end
      u = int'($urandom % W); v = int'($urandom % H); c = int'($urandom % 2);
      if (($urandom % 2) == 0) begin u = 4; v = 5; end   // a hot spot
      spk_valid = 1; nspk++;
      spk.xp = XP_W'(u / 3); spk.bx = 2'(u % 3); spk.yp = YP_W'(v / 3); spk.by = 2'(v % 3);
      spk.ch = CH_W'(c);
      spk.first_x = (u == 0); spk.last_x = (u == W - 1);
      spk.first_y = (v == 0); spk.last_y = (v == H - 1);
      for (int b = -1; b <= 1; b++)
        for (int a = -1; a <= 1; a++) begin
          int x, y;
          x = u - a; y = v - b;
          if (x >= 0 && x < W && y >= 0 && y < H)
            for (int o = 0; o < LANES; o++) begin
              int s;
              s = V[o][y][x] + wgt[c][3*(b+1)+(a+1)][o];
              V[o][y][x] = s > 127 ? 127 : (s < -128 ? -128 : s);
            end
        end
    end
    @(negedge clk); spk_valid = 0;
    repeat (6) @(negedge clk);
    // read back
    mode = MODE_XFER;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        if (mine(x, y)) begin
          @(negedge clk); x_re = 1; x_raddr = addr_of(x, y);
          @(negedge clk); x_re = 0;
          for (int o = 0; o < LANES; o++) begin
            checks++;
            if (int'(signed'(x_rdata[o*8 +: 8])) != V[o][y][x]) begin
              failures++;
              if (failures < 5) $display("(%0d,%0d) ch %0d: %0d exp %0d", x, y, o,
                                         signed'(x_rdata[o*8 +: 8]), V[o][y][x]);
            end
          end
        end
    // threshold bank row y' = 1 (map row 5)
    mode = MODE_THRESH; th_base = ns_addr_t'(RW);
    @(negedge clk); th_start = 1; @(negedge clk); th_start = 0;
    cyc0 = 0;
    while (!th_done) begin
      @(negedge clk);
      if (th_spk_valid) begin
        int x, l;
        x = 3 * int'(th_spk_xp) + BXP;
        for (int o = 0; o < LANES; o++) begin
          l = V[o][5][x];
          if (l > 0) l = l > 2 ? l - 2 : 0; else if (l < 0) l = -l > 2 ? l + 2 : 0;
          checks++;
          if (th_spk[o] != (l > 10)) failures++;
        end
        cyc0++;
      end
    end
    checks++;
    if (cyc0 != RW) begin failures++; $display("threshold words %0d", cyc0); end
    checks++;
    if (n_upd == 0 || n_f1 == 0 || n_f2 == 0 || n_clip == 0) begin
      failures++; $display("coverage upd %0d f1 %0d f2 %0d clip %0d", n_upd, n_f1, n_f2, n_clip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
