// tb_mega: end-to-end test of the accelerator at its full size.
//
// A behavioural shared memory answers the four memory ports with random
// ready and random response delays. The test runs three timesteps:
//   run 1  20x7 map, 3 input channels, random spikes, random INT8 start
//          states (some near the limits), all five operations;
//   run 2  the same layer's next timestep: new spikes, states stay in the
//          banks and weights in the weight buffer (only convolution,
//          threshold and store), so the run depends on the state left
//          behind by run 1;
//   run 3  a 96x5 map (full vector width), 2 input channels, crafted rows
//          (empty, single spike, full row), all operations.
// After each run the output spike vectors and the stored neuron states are
// compared with a sequential reference model in this file (event-driven 3x3
// convolution with clipping, linear leak toward zero, fire above threshold,
// reset to zero). The spike count register is checked against the model and
// the convolution time against one spike per cycle plus overhead.
// Mechanisms counted, each must occur: forwarding at distance 1 and 2,
// clipping, targets dropped at the map edge, an empty spike vector, the
// prefetched vector continuing without a bubble, a cycle with all 288
// updates, output spikes, memory back-pressure, a run that skips operations.
module tb_mega;
  import mega_pkg::*;

  localparam int MAXW = 96, MAXH = 16, MAXC = 4;

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
  spike_vec_t spk_mem [4096];
  w_word_t    wgt_mem [1024];
  ns_word_t   ns_mem  [2048];
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
    if (spk_req_valid && spk_req_ready) spk_q.push_back(spk_mem[spk_req_addr[11:0]]);
    if (wgt_req_valid && wgt_req_ready) wgt_q.push_back(wgt_mem[wgt_req_addr[9:0]]);
    if (ns_req_valid && ns_req_ready) begin
      if (ns_req_we) ns_mem[ns_req_addr[10:0]] <= ns_req_wdata;
      else           ns_q.push_back(ns_mem[ns_req_addr[10:0]]);
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

  // ---------------------------------------------------------------- events
  int n_fwd1 = 0, n_fwd2 = 0, n_clip = 0, n_edge = 0, n_empty = 0, n_cont = 0, n_full = 0;
  int n_outspk = 0, n_partial_run = 0;

  always_ff @(posedge clk) begin
    n_fwd1 <= n_fwd1 + $countones(dut.ev_fwd1);
    n_fwd2 <= n_fwd2 + $countones(dut.ev_fwd2);
    n_clip <= n_clip + $countones(dut.ev_clip);
    if (dut.ss_valid && $countones(dut.ev_update) < 9) n_edge <= n_edge + 1;
    if (&dut.ev_update) n_full <= n_full + 1;
    if (dut.u_ss.from_nxt && dut.u_ss.nxt_zero) n_empty <= n_empty + 1;
    if (dut.u_ss.from_nxt && dut.u_ss.emit) n_cont <= n_cont + 1;
    if (out_req_valid && out_req_ready) n_outspk <= n_outspk + $countones(out_req_data);
  end

  task automatic report(input string name, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", name); end
    else $display("  %-28s %0d", name, n);
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- run 1
    W = 20; H = 7; CIN = 3; leak = 3; thr = 20;
    for (int c = 0; c < CIN; c++) begin
      for (int v = 0; v < H; v++)
        for (int u = 0; u < W; u++) in_spk[c][v][u] = (($urandom % 100) < 30);
      for (int k = 0; k < 9; k++)
        for (int o = 0; o < LANES; o++) wgt[c][k][o] = int'($urandom % 16) - 8;
    end
    for (int u = 0; u < W; u++) in_spk[1][3][u] = 1'b0;    // an empty vector
    for (int o = 0; o < LANES; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          V[o][y][x] = (o < 4) ? ((o % 2) ? 120 : -120) : int'($urandom % 41) - 20;
    for (int k = 0; k < 9; k++) begin  // drive lanes 0..3 into the limits
      for (int c = 0; c < CIN; c++) begin
        wgt[c][k][0] = -8; wgt[c][k][1] = 7; wgt[c][k][2] = -8; wgt[c][k][3] = 7;
      end
    end
    write_inputs_to_mem();
    write_weights_to_mem();
    write_states_to_mem();
    model_conv();
    model_threshold();
    conv_cycles = 0;
    run(op_mask_t'(5'b11111));
    compare_outputs();
    $display("run 1 done: %0d spikes, %0d conv cycles, failures %0d", model_spikes, conv_cycles, failures);

    // ---- run 2: next timestep, states and weights stay on chip
    for (int c = 0; c < CIN; c++)
      for (int v = 0; v < H; v++)
        for (int u = 0; u < W; u++) in_spk[c][v][u] = (($urandom % 100) < 15);
    write_inputs_to_mem();
    for (int i = 0; i < 2048; i++) ns_mem[i] = '0;   // prove nothing is reloaded
    model_conv();
    model_threshold();
    conv_cycles = 0;
    run(op_mask_t'(5'b11100));
    n_partial_run++;
    compare_outputs();
    $display("run 2 done: %0d spikes, failures %0d", model_spikes, failures);

    // ---- run 3: full-width map, crafted rows
    W = 96; H = 5; CIN = 2; leak = 1; thr = 5;
    for (int c = 0; c < CIN; c++) begin
      for (int v = 0; v < H; v++)
        for (int u = 0; u < W; u++) in_spk[c][v][u] = (($urandom % 100) < 10);
      for (int k = 0; k < 9; k++)
        for (int o = 0; o < LANES; o++) wgt[c][k][o] = int'($urandom % 16) - 8;
    end
    for (int u = 0; u < W; u++) begin
      in_spk[0][0][u] = (u == 40);          // single spikes in consecutive rows:
      in_spk[0][1][u] = (u == 40);          // the second arrives after a bubble
      in_spk[0][2][u] = 1'b0;
      in_spk[0][3][u] = (u <= 20);          // then spikes at 20 of row 3 and
      in_spk[0][4][u] = (u == 0 || u == 20);// 0, 20 of row 4: distance-2 hazard
      in_spk[1][4][u] = 1'b1;               // full row of 96 spikes
    end
    in_spk[1][0][0] = 1'b1; in_spk[1][0][95] = 1'b1;
    for (int o = 0; o < LANES; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) V[o][y][x] = int'($urandom % 21) - 10;
    write_inputs_to_mem();
    write_weights_to_mem();
    write_states_to_mem();
    model_conv();
    model_threshold();
    conv_cycles = 0;
    run(op_mask_t'(5'b11111));
    compare_outputs();
    $display("run 3 done: %0d spikes, %0d conv cycles, failures %0d", model_spikes, conv_cycles, failures);

    @(posedge clk);
    $display("mechanisms:");
    report("forward distance 1", n_fwd1);
    report("forward distance 2", n_fwd2);
    report("clipping", n_clip);
    report("edge target dropped", n_edge);
    report("empty spike vector", n_empty);
    report("prefetched vector continues", n_cont);
    report("cycle with 288 updates", n_full);
    report("output spikes", n_outspk);
    report("memory back-pressure", stall_cycles);
    report("run with skipped ops", n_partial_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
