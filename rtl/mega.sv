// mega: top level of the Mega convolutional spiking neural network
// accelerator.
//
// Mega runs 3x3 spiking convolutions event by event. Input spikes arrive as
// dense binary maps (one 96-bit vector per row and input channel) in a
// shared memory. The spike streamer turns them into spike addresses, one per
// cycle, and broadcasts each to nine compute clusters. Cluster (bx, by) holds
// the neuron states of every map position with x mod 3 = bx, y mod 3 = by,
// 32 output channels per word, so the nine neurons a spike touches sit in
// nine different clusters and are all updated in the same cycle by 9 x 32
// convolution units (288 updates per cycle). When every spike of the
// timestep is in, the threshold units apply leak and fire row by row (three
// clusters at a time) and the spike buffer writes the output spike map back
// to the shared memory in the input format. Weights (INT4) are loaded into
// the weight buffer, neuron states (INT8) can be moved between the shared
// memory and the banks.
//
// Blocks: mega_csr (host registers), mega_ctrl (sequencer), mega_weight_buffer,
// mega_spike_streamer, 9 x mega_cluster (each: mega_ns_bank, 32 x mega_cu,
// mega_threshold_unit), mega_spike_buffer, mega_ns_mover.
//
// Interfaces: a host register port (see mega_csr) and four ports into the
// shared memory, one per stream, each a valid/ready request with an in-order
// response (reads) that is always accepted: input spike vectors (96 bit,
// read), weight words (128 bit, read), neuron state words (256 bit, read and
// write) and output spike vectors (96 bit, write). Addresses count words of
// the port's own width. In the chip all four reach the same memory; the
// arbitration there is outside this design.
//
// The architecture follows the paper; port widths, the memory layouts, the
// register map and the run sequence are this design's choices.
module mega
  import mega_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // host registers
  input  logic               csr_valid,
  input  logic               csr_write,
  input  logic [3:0]         csr_addr,
  input  logic [31:0]        csr_wdata,
  output logic [31:0]        csr_rdata,
  output logic               irq_done,      // pulse at the end of a run
  // input spike vectors
  output logic               spk_req_valid,
  input  logic               spk_req_ready,
  output logic [ADDR_W-1:0]  spk_req_addr,
  input  logic               spk_rsp_valid,
  input  spike_vec_t         spk_rsp_data,
  // weights
  output logic               wgt_req_valid,
  input  logic               wgt_req_ready,
  output logic [ADDR_W-1:0]  wgt_req_addr,
  input  logic               wgt_rsp_valid,
  input  w_word_t            wgt_rsp_data,
  // neuron states
  output logic               ns_req_valid,
  input  logic               ns_req_ready,
  output logic               ns_req_we,
  output logic [ADDR_W-1:0]  ns_req_addr,
  output ns_word_t           ns_req_wdata,
  input  logic               ns_rsp_valid,
  input  ns_word_t           ns_rsp_rdata,
  // output spike vectors
  output logic               out_req_valid,
  input  logic               out_req_ready,
  output logic [ADDR_W-1:0]  out_req_addr,
  output spike_vec_t         out_req_data
);

  cfg_t       cfg;
  op_mask_t   ops;
  logic       start, busy, run_done;
  logic [31:0] spikes, cycles;
  bank_mode_e bank_mode;
  logic [XP_W:0] row_words;

  mega_csr u_csr (
    .clk      (clk),
    .rst_n    (rst_n),
    .csr_valid(csr_valid),
    .csr_write(csr_write),
    .csr_addr (csr_addr),
    .csr_wdata(csr_wdata),
    .csr_rdata(csr_rdata),
    .cfg      (cfg),
    .ops      (ops),
    .start    (start),
    .busy     (busy),
    .run_done (run_done),
    .spikes   (spikes),
    .cycles   (cycles)
  );

  assign irq_done = run_done;

  logic wb_load_start, wb_load_done, wb_load_busy;
  logic mv_start, mv_dir, mv_done, mv_busy;
  logic ss_start, ss_done, ss_busy;
  logic [2:0] th_start;
  ns_addr_t th_base;
  logic th_busy;
  logic sb_flush, sb_flush_done;
  logic [COORD_W-1:0] sb_row;

  logic        ss_valid;
  spike_addr_t ss_spk;

  mega_ctrl u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .ops          (ops),
    .cfg          (cfg),
    .busy         (busy),
    .run_done     (run_done),
    .bank_mode    (bank_mode),
    .row_words    (row_words),
    .wb_load_start(wb_load_start),
    .wb_load_done (wb_load_done),
    .mv_start     (mv_start),
    .mv_dir       (mv_dir),
    .mv_done      (mv_done),
    .ss_start     (ss_start),
    .ss_done      (ss_done),
    .ss_spk_valid (ss_valid),
    .th_start     (th_start),
    .th_base      (th_base),
    .th_busy      (th_busy),
    .sb_flush     (sb_flush),
    .sb_row       (sb_row),
    .sb_flush_done(sb_flush_done),
    .spikes       (spikes),
    .cycles       (cycles)
  );

  // ------------------------------------------------ weight buffer
  w_word_t w_all [KERNEL];

  mega_weight_buffer u_wbuf (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_start  (wb_load_start),
    .cin         (cfg.cin),
    .base        (cfg.wgt_base),
    .rd_req_valid(wgt_req_valid),
    .rd_req_ready(wgt_req_ready),
    .rd_req_addr (wgt_req_addr),
    .rd_rsp_valid(wgt_rsp_valid),
    .rd_rsp_data (wgt_rsp_data),
    .load_busy   (wb_load_busy),
    .load_done   (wb_load_done),
    .rd_en       (ss_valid),
    .rd_ch       (ss_spk.ch),
    .w_out       (w_all)
  );

  // ------------------------------------------------ spike streamer
  mega_spike_streamer u_ss (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (ss_start),
    .map_w       (cfg.map_w),
    .map_h       (cfg.map_h),
    .cin         (cfg.cin),
    .base        (cfg.spk_base),
    .rd_req_valid(spk_req_valid),
    .rd_req_ready(spk_req_ready),
    .rd_req_addr (spk_req_addr),
    .rd_rsp_valid(spk_rsp_valid),
    .rd_rsp_data (spk_rsp_data),
    .spk_valid   (ss_valid),
    .spk         (ss_spk),
    .busy        (ss_busy),
    .done        (ss_done)
  );

  // ------------------------------------------------ neuron state mover
  logic [KERNEL-1:0] mv_re, mv_we;
  ns_addr_t          mv_addr;
  ns_word_t          mv_wdata;
  ns_word_t          bank_rdata [KERNEL];

  mega_ns_mover u_mover (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (mv_start),
    .dir      (mv_dir),
    .words    (cfg.ns_words),
    .base     (cfg.ns_base),
    .req_valid(ns_req_valid),
    .req_ready(ns_req_ready),
    .req_we   (ns_req_we),
    .req_addr (ns_req_addr),
    .req_wdata(ns_req_wdata),
    .rsp_valid(ns_rsp_valid),
    .rsp_rdata(ns_rsp_rdata),
    .b_re     (mv_re),
    .b_we     (mv_we),
    .b_addr   (mv_addr),
    .b_wdata  (mv_wdata),
    .b_rdata  (bank_rdata),
    .busy     (mv_busy),
    .done     (mv_done)
  );

  // ------------------------------------------------ nine compute clusters
  logic                 cl_th_valid [KERNEL];
  logic [XP_W-1:0]      cl_th_xp    [KERNEL];
  logic [LANES-1:0]     cl_th_spk   [KERNEL];
  logic [KERNEL-1:0]    cl_th_busy, cl_th_done;
  logic [KERNEL-1:0]    ev_update, ev_fwd1, ev_fwd2, ev_clip;

  for (genvar by = 0; by < 3; by++) begin : g_row
    for (genvar bx = 0; bx < 3; bx++) begin : g_col
      localparam int unsigned B = 3 * by + bx;
      mega_cluster #(.BX(bx), .BY(by)) u_cluster (
        .clk         (clk),
        .rst_n       (rst_n),
        .mode        (bank_mode),
        .row_words   (row_words),
        .spk_valid   (ss_valid),
        .spk         (ss_spk),
        .w_all       (w_all),
        .th_start    (th_start[by]),
        .th_base     (th_base),
        .leak        (cfg.leak),
        .thresh      (cfg.thresh),
        .th_spk_valid(cl_th_valid[B]),
        .th_spk_xp   (cl_th_xp[B]),
        .th_spk      (cl_th_spk[B]),
        .th_busy     (cl_th_busy[B]),
        .th_done     (cl_th_done[B]),
        .x_re        (mv_re[B]),
        .x_raddr     (mv_addr),
        .x_rdata     (bank_rdata[B]),
        .x_we        (mv_we[B]),
        .x_waddr     (mv_addr),
        .x_wdata     (mv_wdata),
        .ev_update   (ev_update[B]),
        .ev_fwd1     (ev_fwd1[B]),
        .ev_fwd2     (ev_fwd2[B]),
        .ev_clip     (ev_clip[B])
      );
    end
  end

  assign th_busy = |cl_th_busy;

  // ------------------------------------------------ spike buffer
  // The three clusters of the row being thresholded feed columns bx = 0..2.
  logic [1:0]       th_by;
  logic             sb_in_valid;
  logic [XP_W-1:0]  sb_in_xp;
  logic [LANES-1:0] sb_in_spk [3];
  logic [15:0]      out_spikes;

  assign th_by = 2'(sb_row % 3);

  always_comb begin
    sb_in_valid = cl_th_valid[3 * th_by];
    sb_in_xp    = cl_th_xp[3 * th_by];
    for (int b = 0; b < 3; b++) sb_in_spk[b] = cl_th_spk[3 * th_by + b];
  end

  mega_spike_buffer u_sbuf (
    .clk         (clk),
    .rst_n       (rst_n),
    .map_w       (cfg.map_w),
    .map_h       (cfg.map_h),
    .out_base    (cfg.out_base),
    .in_valid    (sb_in_valid),
    .in_xp       (sb_in_xp),
    .in_spk      (sb_in_spk),
    .flush       (sb_flush),
    .row         (sb_row),
    .wr_req_valid(out_req_valid),
    .wr_req_ready(out_req_ready),
    .wr_req_addr (out_req_addr),
    .wr_req_data (out_req_data),
    .flush_done  (sb_flush_done),
    .spike_count (out_spikes)
  );

endmodule
