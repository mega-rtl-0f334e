// tb_mega_cu: one convolution-unit lane in an environment that plays the
// rest of its cluster: a small synchronous-read state memory (read in stage
// 2, written from stage 4) and the stage-1 hazard flags, computed here from
// the addresses one and two spikes ahead. Random spikes hit only four
// addresses, so both forwarding distances occur constantly, with bubbles in
// between; weights near the limits drive the states into clipping. Every
// written value and the final memory are compared with a sequential model.
module tb_mega_cu;
  import mega_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;
  logic s1_valid = 0, s1_fwd1 = 0, s1_fwd2 = 0;
  weight_t s2_weight;
  state_t  s3_rdata;
  logic wb_valid, clipped;
  state_t wb_data;
  int checks = 0, failures = 0, n_f1 = 0, n_f2 = 0, n_clip = 0;

  mega_cu dut (.*);

  state_t  mem [4];
  int      model [4];
  int      exp_q[$];
  logic    v2, v3, v4; logic [1:0] a2, a3, a4; weight_t w1;
  logic [1:0] a1;

  // environment: pipeline of addresses and the memory
  always_ff @(posedge clk) begin
    v2 <= s1_valid; a2 <= a1; s2_weight <= w1;
    v3 <= v2; a3 <= a2;
    v4 <= v3; a4 <= a3;
    if (v2) s3_rdata <= mem[a2];
    if (wb_valid) mem[a4] <= wb_data;
  end

  always @(posedge clk) begin
    if (wb_valid) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(wb_data) != e) begin
        failures++;
        if (failures < 5) $display("wb %0d exp %0d", wb_data, e);
      end
    end
    if (clipped) n_clip++;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin mem[i] = state_t'(i * 40 - 60); model[i] = i * 40 - 60; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      s1_valid = ($urandom % 5) != 0;
      a1 = 2'($urandom);
      w1 = weight_t'((n / 500) % 2 ? (($urandom % 3) ? 7 : -3) : (($urandom % 3) ? -8 : 2));
      s1_fwd1 = s1_valid && v2 && (a2 == a1);
      s1_fwd2 = s1_valid && !s1_fwd1 && v3 && (a3 == a1);
      if (s1_fwd1) n_f1++;
      if (s1_fwd2) n_f2++;
      if (s1_valid) begin
        int s;
        s = model[a1] + int'(w1);
        model[a1] = s > 127 ? 127 : (s < -128 ? -128 : s);
        exp_q.push_back(model[a1]);
      end
    end
    @(negedge clk); s1_valid = 0;
    repeat (6) @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (int'(mem[i]) != model[i]) failures++;
    end
    checks++;
    if (n_f1 == 0 || n_f2 == 0 || n_clip == 0) begin
      failures++; $display("coverage f1 %0d f2 %0d clip %0d", n_f1, n_f2, n_clip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
