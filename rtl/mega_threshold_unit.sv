// mega_threshold_unit: leak, fire and reset for the neurons of one bank.
//
// After all input spikes of a timestep have been accumulated, the threshold
// unit sweeps a run of consecutive bank words (one map row of this bank) in a
// four-stage pipeline, one word of 32 neuron states per cycle:
//   (1) address: a counter adds 0..count-1 to base;
//   (2) fetch:   the word is read from the bank (synchronous read);
//   (3) leak and threshold: each signed 8-bit state moves toward zero by
//       leak (linear decay, never past zero); a neuron whose leaked state
//       exceeds thresh (strictly greater) fires;
//   (4) write-back: a neuron that fired is reset to zero, the others keep the
//       leaked state. The 32 spike bits leave on spk with spk_xp, the word
//       index within the run.
// Each address is visited once, so there are no hazards. done pulses when
// the last word has been written.
//
// From the paper: the four stages, the counter, linear leak on signed 8-bit
// states, threshold compare, reset to zero. The leak's sign handling
// (toward zero), the strict compare and the ports are this design's choice.
module mega_threshold_unit
  import mega_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  ns_addr_t          base,
  input  logic [XP_W:0]     count,    // 1..32 words
  input  logic [STATE_W-1:0] leak,    // unsigned
  input  state_t            thresh,
  output logic              re,
  output ns_addr_t          raddr,
  input  ns_word_t          rdata,
  output logic              we,
  output ns_addr_t          waddr,
  output ns_word_t          wdata,
  output logic              spk_valid,
  output logic [XP_W-1:0]   spk_xp,
  output logic [LANES-1:0]  spk,
  output logic              busy,
  output logic              done
);

  logic [XP_W:0]   cnt;
  logic            run;
  logic            s2_valid, s3_valid;
  ns_addr_t        s2_addr, s3_addr;
  logic [XP_W-1:0] s2_xp, s3_xp;

  assign re    = s2_valid;
  assign raddr = s2_addr;
  assign busy  = run || s2_valid || s3_valid || we;

  ns_word_t           nxt_word;
  logic [LANES-1:0]   nxt_spk;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [STATE_W+1:0] v, l;
      state_t                    lk;
      v = 10'(signed'(rdata[i*STATE_W +: STATE_W]));
      l = $signed({2'b00, leak});
      if (v > 0)      lk = (v > l)  ? state_t'(v - l) : '0;
      else if (v < 0) lk = (-v > l) ? state_t'(v + l) : '0;
      else            lk = '0;
      nxt_spk[i] = (lk > thresh);
      nxt_word[i*STATE_W +: STATE_W] = nxt_spk[i] ? '0 : lk;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      run       <= 1'b0;
      s2_valid  <= 1'b0;
      s2_addr   <= '0;
      s2_xp     <= '0;
      s3_valid  <= 1'b0;
      s3_addr   <= '0;
      s3_xp     <= '0;
      we        <= 1'b0;
      waddr     <= '0;
      wdata     <= '0;
      spk_valid <= 1'b0;
      spk_xp    <= '0;
      spk       <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      // stage 1: address counter
      if (start && !busy) begin
        run <= 1'b1;
        cnt <= '0;
      end else if (run) begin
        cnt <= cnt + 1'b1;
        if (cnt + 1'b1 == count) run <= 1'b0;
      end
      s2_valid <= run;
      s2_addr  <= base + ns_addr_t'(cnt);
      s2_xp    <= cnt[XP_W-1:0];
      // stage 2 -> 3: bank read in flight
      s3_valid <= s2_valid;
      s3_addr  <= s2_addr;
      s3_xp    <= s2_xp;
      // stage 3 -> 4: leak, threshold, write-back
      we        <= s3_valid;
      spk_valid <= s3_valid;
      if (s3_valid) begin
        waddr  <= s3_addr;
        wdata  <= nxt_word;
        spk    <= nxt_spk;
        spk_xp <= s3_xp;
      end
      if (we && !s3_valid && !s2_valid && !run) done <= 1'b1;
    end
  end

endmodule
