// mega_cluster: one of the nine compute clusters.
//
// Cluster (BX, BY) owns neuron state bank (BX, BY): the states of all map
// positions (x, y) with x mod 3 = BX and y mod 3 = BY, 32 output channels per
// word. A spike at (u, v) adds W[a, b] to the neurons at (u - a, v - b) for
// the nine offsets (a, b) in {-1,0,1}^2. Exactly one of those nine targets
// falls into this bank, so every cluster handles one kernel offset of every
// spike, and the nine clusters together apply the whole 3x3 kernel in one
// cycle: 9 x 32 = 288 neuron updates per cycle.
//
// Stage 1 (address generation, shared by the 32 convolution units): from
// the spike's interlaced coordinates (x', bx, y', by) the cluster finds its
// target column: with d = (BX - bx) mod 3, d = 0 is the spike's own column,
// d = 1 the column to the right (x' + 1 if bx = 2), d = 2 the column to the
// left (x' - 1 if bx = 0); rows likewise. Targets off the map edge are
// dropped (zero padding). The word address is y' * row_words + x' and the
// kernel offset index is k = 3*(b+1) + (a+1). The target address is compared
// with the addresses one and two cycles ahead to flag read-after-write
// hazards for forwarding. Stage 2 reads the bank and selects the weight
// word for offset k; stages 3 and 4 are in the 32 mega_cu lanes.
//
// The bank ports are shared between the convolution units, the threshold
// unit and transfers to the shared memory, selected by mode.
//
// Timing: spk is sampled in the cycle spk_valid is high; w_all must hold the
// weights of that spike's input channel one cycle later. A write reaches the
// bank four cycles after the spike. The cluster never stalls.
//
// From the paper: nine clusters, one offset each, 32 CUs, local bank and
// threshold unit, the interlaced addressing of Fig. 3. The edge handling,
// the row-major word address and the port sharing are this design's.
module mega_cluster
  import mega_pkg::*;
#(
  parameter int unsigned BX = 0,
  parameter int unsigned BY = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  bank_mode_e         mode,
  input  logic [XP_W:0]      row_words,  // words per map row in one bank
  // convolution
  input  logic               spk_valid,
  input  spike_addr_t        spk,
  input  w_word_t            w_all [KERNEL],
  // threshold
  input  logic               th_start,
  input  ns_addr_t           th_base,
  input  logic [STATE_W-1:0] leak,
  input  state_t             thresh,
  output logic               th_spk_valid,
  output logic [XP_W-1:0]    th_spk_xp,
  output logic [LANES-1:0]   th_spk,
  output logic               th_busy,
  output logic               th_done,
  // transfers
  input  logic               x_re,
  input  ns_addr_t           x_raddr,
  output ns_word_t           x_rdata,
  input  logic               x_we,
  input  ns_addr_t           x_waddr,
  input  ns_word_t           x_wdata,
  // activity, for status and tests
  output logic               ev_update,  // a valid target entered stage 1
  output logic               ev_fwd1,
  output logic               ev_fwd2,
  output logic               ev_clip     // some lane clipped in stage 4
);

  // ------------------------------------------------ stage 1: address gen
  typedef struct packed {
    logic            valid;
    logic [YP_W-1:0] coarse;
    logic [1:0]      idx;     // offset + 1 of the kernel index
  } target_t;

  function automatic target_t find_target(input int unsigned own, input logic [1:0] sub,
                                          input logic [YP_W-1:0] coarse,
                                          input logic first, input logic last);
    target_t    t;
    logic [1:0] d;
    d = 2'((own + 3 - 32'(sub)) % 3);
    unique case (d)
      2'd0: begin t.valid = 1'b1;   t.coarse = coarse;                          t.idx = 2'd1; end
      2'd1: begin t.valid = !last;  t.coarse = (sub == 2'd2) ? coarse + 1'b1 : coarse; t.idx = 2'd0; end
      default: begin t.valid = !first; t.coarse = (sub == 2'd0) ? coarse - 1'b1 : coarse; t.idx = 2'd2; end
    endcase
    return t;
  endfunction

  target_t  tx, ty;
  ns_addr_t s1_addr;
  logic     s1_valid, s1_f1, s1_f2;
  logic [3:0] s1_k;

  logic     s2_valid, s3_valid;
  ns_addr_t s2_addr, s3_addr, s4_addr;
  logic [3:0] s2_k;

  always_comb begin
    tx       = find_target(BX, spk.bx, YP_W'(spk.xp), spk.first_x, spk.last_x);
    ty       = find_target(BY, spk.by, spk.yp, spk.first_y, spk.last_y);
    s1_addr  = ns_addr_t'(ty.coarse * YP_W'(row_words) + tx.coarse);
    s1_k     = 4'(3 * ty.idx + tx.idx);
    s1_valid = (mode == MODE_CONV) && spk_valid && tx.valid && ty.valid;
    s1_f1    = s1_valid && s2_valid && (s2_addr == s1_addr);
    s1_f2    = s1_valid && !s1_f1 && s3_valid && (s3_addr == s1_addr);
  end

  assign ev_update = s1_valid;
  assign ev_fwd1   = s1_f1;
  assign ev_fwd2   = s1_f2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s3_valid <= 1'b0;
      s2_addr  <= '0;
      s3_addr  <= '0;
      s4_addr  <= '0;
      s2_k     <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_addr  <= s1_addr;
      s2_k     <= s1_k;
      s3_valid <= s2_valid;
      s3_addr  <= s2_addr;
      s4_addr  <= s3_addr;
    end
  end

  // ------------------------------------------------ bank
  logic     b_re, b_we;
  ns_addr_t b_raddr, b_waddr;
  ns_word_t b_rdata, b_wdata;

  logic     tu_re, tu_we;
  ns_addr_t tu_raddr, tu_waddr;
  ns_word_t tu_wdata;

  logic [LANES-1:0] cu_wb_valid, cu_clip;
  ns_word_t         cu_wdata;

  always_comb begin
    unique case (mode)
      MODE_CONV: begin
        b_re = s2_valid;  b_raddr = s2_addr;
        b_we = cu_wb_valid[0]; b_waddr = s4_addr; b_wdata = cu_wdata;
      end
      MODE_THRESH: begin
        b_re = tu_re;     b_raddr = tu_raddr;
        b_we = tu_we;     b_waddr = tu_waddr; b_wdata = tu_wdata;
      end
      MODE_XFER: begin
        b_re = x_re;      b_raddr = x_raddr;
        b_we = x_we;      b_waddr = x_waddr;  b_wdata = x_wdata;
      end
      default: begin
        b_re = 1'b0;      b_raddr = '0;
        b_we = 1'b0;      b_waddr = '0;       b_wdata = '0;
      end
    endcase
  end

  mega_ns_bank u_bank (
    .clk  (clk),
    .re   (b_re),
    .raddr(b_raddr),
    .rdata(b_rdata),
    .we   (b_we),
    .waddr(b_waddr),
    .wdata(b_wdata)
  );

  assign x_rdata = b_rdata;

  // ------------------------------------------------ 32 convolution units
  w_word_t s2_wsel;
  assign s2_wsel = w_all[s2_k];

  for (genvar i = 0; i < LANES; i++) begin : g_cu
    state_t wb;
    mega_cu u_cu (
      .clk      (clk),
      .rst_n    (rst_n),
      .s1_valid (s1_valid),
      .s1_fwd1  (s1_f1),
      .s1_fwd2  (s1_f2),
      .s2_weight(s2_wsel[i*WEIGHT_W +: WEIGHT_W]),
      .s3_rdata (b_rdata[i*STATE_W +: STATE_W]),
      .wb_valid (cu_wb_valid[i]),
      .wb_data  (wb),
      .clipped  (cu_clip[i])
    );
    assign cu_wdata[i*STATE_W +: STATE_W] = wb;
  end

  assign ev_clip = |cu_clip;

  // ------------------------------------------------ threshold unit
  mega_threshold_unit u_tu (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (th_start),
    .base     (th_base),
    .count    (row_words),
    .leak     (leak),
    .thresh   (thresh),
    .re       (tu_re),
    .raddr    (tu_raddr),
    .rdata    (b_rdata),
    .we       (tu_we),
    .waddr    (tu_waddr),
    .wdata    (tu_wdata),
    .spk_valid(th_spk_valid),
    .spk_xp   (th_spk_xp),
    .spk      (th_spk),
    .busy     (th_busy),
    .done     (th_done)
  );

endmodule
