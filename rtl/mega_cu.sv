// mega_cu: convolution unit, the update lane of one output channel.
//
// A spike moves through four stages: (1) address generation, (2) neuron
// state fetch, (3) update, (4) write-back. Stage 1 is shared by the 32 units
// of a cluster (all lanes of a cluster update the same map position) and
// lives in mega_cluster; it hands this unit a valid bit and two hazard flags.
// This unit carries them through stages 2 to 4:
//   stage 2: the weight of this lane arrives from the weight buffer;
//   stage 3: the 8-bit state read from the bank is replaced by a forwarded
//            value when a hazard was flagged, then the INT4 weight is added
//            with clipping to [-128, 127];
//   stage 4: the result is written back (wb_valid/wb_data drive the bank).
// Read-after-write hazards: the spike one cycle ahead (fwd1) is still in
// stage 4 when this spike is in stage 3, so its result is taken from the
// stage-4 register; the spike two cycles ahead (fwd2) has written the bank in
// the same cycle this spike read it, so its result is taken from a copy of
// the last written value. fwd1 takes priority. The pipeline never stalls.
//
// From the paper: the four stages, INT8 state, INT4 weight, clipping, and
// hazards detected in address generation and resolved by forwarding. The
// split of stage 1 into the cluster and the two forwarding distances, which
// follow from the one-cycle synchronous bank, are this design's.
module mega_cu
  import mega_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    s1_valid,
  input  logic    s1_fwd1,
  input  logic    s1_fwd2,
  input  weight_t s2_weight,
  input  state_t  s3_rdata,
  output logic    wb_valid,
  output state_t  wb_data,
  output logic    clipped    // stage-4 result was clipped
);

  logic    s2_valid, s2_f1, s2_f2;
  logic    s3_valid, s3_f1, s3_f2;
  weight_t s3_w;
  state_t  s5_data;          // value written one cycle ago
  state_t  base, upd;
  logic signed [STATE_W:0] wide;

  always_comb begin
    if (s3_f1)      base = wb_data;
    else if (s3_f2) base = s5_data;
    else            base = s3_rdata;
    upd  = sat_add(base, s3_w);
    wide = $signed({base[STATE_W-1], base}) + $signed({{(STATE_W+1-WEIGHT_W){s3_w[WEIGHT_W-1]}}, s3_w});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;  s2_f1 <= 1'b0;  s2_f2 <= 1'b0;
      s3_valid <= 1'b0;  s3_f1 <= 1'b0;  s3_f2 <= 1'b0;
      s3_w     <= '0;
      wb_valid <= 1'b0;
      wb_data  <= '0;
      s5_data  <= '0;
      clipped  <= 1'b0;
    end else begin
      s2_valid <= s1_valid;
      s2_f1    <= s1_fwd1;
      s2_f2    <= s1_fwd2;
      s3_valid <= s2_valid;
      s3_f1    <= s2_f1;
      s3_f2    <= s2_f2;
      s3_w     <= s2_weight;
      wb_valid <= s3_valid;
      s5_data  <= wb_data;
      if (s3_valid) begin
        wb_data <= upd;
        clipped <= (wide != $signed({upd[STATE_W-1], upd}));
      end else begin
        clipped <= 1'b0;
      end
    end
  end

endmodule
