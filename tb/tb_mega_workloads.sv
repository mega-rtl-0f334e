// tb_mega_workloads: runs the layer shapes the evaluation uses through the
// whole accelerator and checks them against the same reference model as
// tb_mega (convolution with clipping, leak, threshold, reset).
//   * the convolution layers of the DVS gesture network (32x32 input with 2
//     polarity channels; 32-channel layers at 32x32 and 16x16; 64-channel
//     layers at 8x8, run as two passes of 32 output channels each, the
//     second layer with 64 input channels), one timestep each, at about 90%
//     input sparsity;
//   * a 96-wide map at 75% and 98% sparsity, the widest map a spike vector
//     holds; 48 rows are used, the most a bank holds at this width.
// For every run it prints the input spikes and the cycles of the run, which
// is how latency scales with sparsity in this design.
module tb_mega_workloads;
  import mega_pkg::*;

  localparam int MAXW = 96, MAXH = 48, MAXC = 64;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- DUT
  logic        csr_valid = 1'b0, csr_write = 1'b0;
  logic [3:0]  csr_addr = '0;
  logic [31:0] csr_wdata = '0, csr_rdata;
  logic        irq_done;
  logic        spk_req_valid, spk_req_ready, spk_rsp_valid;
  logic [ADDR_W-1:0] spk_req_addr;
  spike_vec_t  spk_rsp_data;
  logic        wgt_req_valid, wgt_req_ready, wgt_rsp_valid;
  logic [ADDR_W-1:0] wgt_req_addr;
  w_word_t     wgt_rsp_data;
  logic        ns_req_valid, ns_req_ready, ns_req_we, ns_rsp_valid;
  logic [ADDR_W-1:0] ns_req_addr;
  ns_word_t    ns_req_wdata, ns_rsp_rdata;
  logic        out_req_valid, out_req_ready;
  logic [ADDR_W-1:0] out_req_addr;
  spike_vec_t  out_req_data;

  mega dut (.*);

  // ---------------------------------------------------------------- memory
  spike_vec_t spk_mem [8192];
  w_word_t    wgt_mem [1024];
  ns_word_t   ns_mem  [8192];
  spike_vec_t out_mem [4096];

  spike_vec_t spk_q[$];
  w_word_t    wgt_q[$];
  ns_word_t   ns_q[$];
  int         stall_cycles = 0;

  always_ff @(posedge clk) begin
    spk_rsp_valid <= 1'b0;
    wgt_rsp_valid <= 1'b0;
    ns_rsp_valid  <= 1'b0;
    if (spk_q.size() > 0 && ($urandom % 4) != 0) begin
      spk_rsp_valid <= 1'b1;
      spk_rsp_data  <= spk_q.pop_front();
    end
    if (wgt_q.size() > 0 && ($urandom % 4) != 0) begin
      wgt_rsp_valid <= 1'b1;
      wgt_rsp_data  <= wgt_q.pop_front();
    end
    if (ns_q.size() > 0 && ($urandom % 4) != 0) begin
      ns_rsp_valid <= 1'b1;
      ns_rsp_rdata <= ns_q.pop_front();
    end
    if (spk_req_valid && spk_req_ready) spk_q.push_back(spk_mem[spk_req_addr[12:0]]);
    if (wgt_req_valid && wgt_req_ready) wgt_q.push_back(wgt_mem[wgt_req_addr[9:0]]);
    if (ns_req_valid && ns_req_ready) begin
      if (ns_req_we) ns_mem[ns_req_addr[12:0]] <= ns_req_wdata;
      else           ns_q.push_back(ns_mem[ns_req_addr[12:0]]);
    end
    if (out_req_valid && out_req_ready) out_mem[out_req_addr[11:0]] <= out_req_data;
    if ((spk_req_valid && !spk_req_ready) || (out_req_valid && !out_req_ready) ||
        (ns_req_valid && !ns_req_ready) || (wgt_req_valid && !wgt_req_ready))
      stall_cycles <= stall_cycles + 1;
    spk_req_ready <= ($urandom % 5) != 0;
    wgt_req_ready <= ($urandom % 5) != 0;
    ns_req_ready  <= ($urandom % 5) != 0;
    out_req_ready <= ($urandom % 5) != 0;
  end

  // ---------------------------------------------------------------- model
  int unsigned W, H, CIN;
  int          leak, thr;
  bit          in_spk [MAXC][MAXH][MAXW];
  int          wgt    [MAXC][9][LANES];
  int          V      [LANES][MAXH][MAXW];
  bit          out_spk[LANES][MAXH][MAXW];
  int          model_spikes;

  localparam int SPK_BASE = 16, WGT_BASE = 8, NS_BASE = 32, OUT_BASE = 100;

  function automatic int clip8(int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  task automatic model_conv();
    model_spikes = 0;
    for (int c = 0; c < CIN; c++)
      for (int v = 0; v < H; v++)
        for (int u = 0; u < W; u++)
          if (in_spk[c][v][u]) begin
            model_spikes++;
            for (int b = -1; b <= 1; b++)
              for (int a = -1; a <= 1; a++) begin
                int x = u - a, y = v - b;
                if (x >= 0 && x < W && y >= 0 && y < H)
                  for (int o = 0; o < LANES; o++)
                    V[o][y][x] = clip8(V[o][y][x] + wgt[c][3*(b+1)+(a+1)][o]);
              end
          end
  endtask

  task automatic model_threshold();
    for (int o = 0; o < LANES; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          int l = V[o][y][x];
          if (l > 0)      l = (l > leak) ? l - leak : 0;
          else if (l < 0) l = (-l > leak) ? l + leak : 0;
          out_spk[o][y][x] = (l > thr);
          V[o][y][x] = out_spk[o][y][x] ? 0 : l;
        end
  endtask

  function automatic int row_words();
    return (W + 2) / 3;
  endfunction

  function automatic int ns_words();
    return ((H + 2) / 3) * row_words();
  endfunction

  // word address of (x, y) in the shared-memory image of the banks
  function automatic int ns_index(int x, int y);
    return NS_BASE + (3 * (y % 3) + (x % 3)) * ns_words() + (y / 3) * row_words() + x / 3;
  endfunction

  task automatic write_states_to_mem();
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int o = 0; o < LANES; o++)
          ns_mem[ns_index(x, y)][o*8 +: 8] = 8'(V[o][y][x]);
  endtask

  task automatic write_inputs_to_mem();
    for (int c = 0; c < CIN; c++)
      for (int v = 0; v < H; v++) begin
        spike_vec_t vec = '0;
        for (int u = 0; u < W; u++) vec[VEC_W-1-u] = in_spk[c][v][u];
        // garbage beyond the map width must be ignored
        for (int u = W; u < VEC_W; u++) vec[VEC_W-1-u] = 1'($urandom);
        spk_mem[SPK_BASE + c*H + v] = vec;
      end
  endtask

  task automatic write_weights_to_mem();
    for (int c = 0; c < CIN; c++)
      for (int k = 0; k < 9; k++)
        for (int o = 0; o < LANES; o++)
          wgt_mem[WGT_BASE + c*9 + k][o*4 +: 4] = 4'(wgt[c][k][o]);
  endtask

  // ---------------------------------------------------------------- host
  task automatic csr_wr(input csr_addr_e a, input logic [31:0] d);
    @(negedge clk);
    csr_valid = 1'b1; csr_write = 1'b1; csr_addr = a; csr_wdata = d;
    @(negedge clk);
    csr_valid = 1'b0; csr_write = 1'b0;
  endtask

  task automatic csr_rd(input csr_addr_e a, output logic [31:0] d);
    @(negedge clk);
    csr_addr = a;
    #1 d = csr_rdata;
  endtask

  int conv_cycles;

  task automatic run(input op_mask_t ops);
    logic [31:0] st, sp;
    csr_wr(CSR_MAP_W, W);
    csr_wr(CSR_MAP_H, H);
    csr_wr(CSR_CIN, CIN);
    csr_wr(CSR_SPK_BASE, SPK_BASE);
    csr_wr(CSR_WGT_BASE, WGT_BASE);
    csr_wr(CSR_NS_BASE, NS_BASE);
    csr_wr(CSR_OUT_BASE, OUT_BASE);
    csr_wr(CSR_LEAK, 32'(leak));
    csr_wr(CSR_THRESH, 32'(thr));
    csr_wr(CSR_NS_WORDS, 32'(ns_words()));
    csr_wr(CSR_CTRL, {26'd0, ops, 1'b1});
    @(posedge irq_done);
    @(posedge clk);
    csr_rd(CSR_STATUS, st);
    checks++;
    if (st[1:0] != 2'b10) begin failures++; $display("status %b", st[1:0]); end
    if (ops.conv) begin
      csr_rd(CSR_SPIKES, sp);
      checks++;
      if (sp != 32'(model_spikes)) begin
        failures++; $display("spike count %0d, model %0d", sp, model_spikes);
      end
      // one spike per cycle, plus at most 3 cycles per vector for fetch
      // latency and empty vectors, plus pipeline start and drain
      checks++;
      if (conv_cycles < model_spikes || conv_cycles > model_spikes + 6 * CIN * H + 20) begin
        failures++; $display("conv took %0d cycles for %0d spikes", conv_cycles, model_spikes);
      end
    end
  endtask

  always @(posedge clk) begin
    if (dut.u_ctrl.st == dut.u_ctrl.S_CONV && dut.u_ctrl.waiting) conv_cycles <= conv_cycles + 1;
  end

  task automatic compare_outputs();
    int bad = 0;
    for (int o = 0; o < LANES; o++)
      for (int y = 0; y < H; y++) begin
        spike_vec_t vec = out_mem[OUT_BASE + o*H + y];
        for (int x = 0; x < VEC_W; x++) begin
          bit exp = (x < W) ? out_spk[o][y][x] : 1'b0;
          checks++;
          if (vec[VEC_W-1-x] != exp) begin
            failures++; bad++;
            if (bad < 5) $display("out spike ch %0d (%0d,%0d): %0d exp %0d", o, x, y, vec[VEC_W-1-x], exp);
          end
        end
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int o = 0; o < LANES; o++) begin
          int got = int'(signed'(ns_mem[ns_index(x, y)][o*8 +: 8]));
          checks++;
          if (got != V[o][y][x]) begin
            failures++; bad++;
            if (bad < 10) $display("state ch %0d (%0d,%0d): %0d exp %0d", o, x, y, got, V[o][y][x]);
          end
        end
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wl_cycles;
  int wl_pass = 0;

  task automatic layer(string name, int w, int h, int cin, int density, int pass_of);
    logic [31:0] cyc;
    W = w; H = h; CIN = cin; leak = 1; thr = 6;
    for (int c = 0; c < CIN; c++) begin
      for (int v = 0; v < H; v++)
        for (int u = 0; u < W; u++) in_spk[c][v][u] = (($urandom % 1000) < density);
      for (int k = 0; k < 9; k++)
        for (int o = 0; o < LANES; o++) wgt[c][k][o] = int'($urandom % 7) - 3;
    end
    for (int o = 0; o < LANES; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) V[o][y][x] = int'($urandom % 11) - 5;
    write_inputs_to_mem();
    write_weights_to_mem();
    write_states_to_mem();
    model_conv();
    model_threshold();
    conv_cycles = 0;
    run(op_mask_t'(5'b11111));
    csr_rd(CSR_CYCLES, cyc);
    compare_outputs();
    $display("%-26s pass %0d: %0dx%0d, %0d in-ch, %5d spikes, conv %6d cycles, run %6d cycles, failures %0d",
             name, pass_of, W, H, CIN, model_spikes, conv_cycles, cyc, failures);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    layer("DVS conv1 32x32x2->32", 32, 32, 2, 100, 0);
    layer("DVS conv2 32x32x32->32", 32, 32, 32, 100, 0);
    layer("DVS conv3 16x16x32->32", 16, 16, 32, 100, 0);
    layer("DVS conv5 8x8x32->64", 8, 8, 32, 100, 0);
    layer("DVS conv5 8x8x32->64", 8, 8, 32, 100, 1);
    layer("DVS conv6 8x8x64->64", 8, 8, 64, 100, 0);
    layer("DVS conv6 8x8x64->64", 8, 8, 64, 100, 1);
    layer("96x48 map, 75% sparse", 96, 48, 1, 250, 0);
    layer("96x48 map, 98% sparse", 96, 48, 1, 20, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
