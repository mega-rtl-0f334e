// mega_ctrl: sequencer for one run of the accelerator.
//
// A run processes one timestep of one layer (or one 32-output-channel pass
// of it). Each operation enabled in ops runs in this order:
//   1. load weights: the weight buffer reads cin x 9 kernel words;
//   2. load states:  neuron states move from the shared memory to the banks;
//   3. convolution:  the spike streamer walks every input spike vector, the
//                    clusters accumulate; after the streamer is done the
//                    controller waits for the four-stage pipelines to drain;
//   4. threshold:    row by row (y = 0..map_h-1), the three threshold units
//                    of the clusters with by = y mod 3 sweep the row's
//                    words y'*row_words .. +row_words-1 together, then the
//                    spike buffer writes the row's 32 output vectors;
//   5. store states: neuron states move back to the shared memory.
// It also decides who owns the bank ports (bank_mode), computes the words
// per bank row, row_words = ceil(map_w / 3), once per run, and counts the
// run's cycles and input spikes.
//
// Interface: start is a one-cycle pulse from the CSRs, the *_start outputs
// are one-cycle pulses, the *_done inputs are one-cycle pulses. run_done
// pulses when the run is over.
//
// The paper gives the order convolution, then row-wise thresholding with
// three units at a time; the rest of the sequence and the counters are this
// design's.
module mega_ctrl
  import mega_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  op_mask_t           ops,
  input  cfg_t               cfg,
  output logic               busy,
  output logic               run_done,
  output bank_mode_e         bank_mode,
  output logic [XP_W:0]      row_words,
  // weight buffer
  output logic               wb_load_start,
  input  logic               wb_load_done,
  // neuron state mover
  output logic               mv_start,
  output logic               mv_dir,
  input  logic               mv_done,
  // spike streamer
  output logic               ss_start,
  input  logic               ss_done,
  input  logic               ss_spk_valid,
  // threshold units, one start per bank row (by)
  output logic [2:0]         th_start,
  output ns_addr_t           th_base,
  input  logic               th_busy,
  // spike buffer
  output logic               sb_flush,
  output logic [COORD_W-1:0] sb_row,
  input  logic               sb_flush_done,
  // statistics
  output logic [31:0]        spikes,
  output logic [31:0]        cycles
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD_W, S_LOAD_NS, S_CONV, S_DRAIN, S_TH_ROW, S_TH_WAIT, S_TH_RUN,
    S_FLUSH, S_STORE_NS, S_END
  } state_e;

  state_e          st, st_nxt_op;
  logic            waiting;     // a sub-unit was started and its done is due
  logic [2:0]      drain;
  logic [YP_W-1:0] yp;
  logic [1:0]      by;
  ns_addr_t        row_base;

  assign busy    = (st != S_IDLE);
  assign sb_row  = COORD_W'(3 * yp + by);
  assign th_base = row_base;

  // the next enabled operation after the given state
  function automatic state_e next_op(input state_e cur, input op_mask_t m);
    if (cur == S_IDLE    && m.load_weights) return S_LOAD_W;
    if (cur <= S_LOAD_W  && m.load_states)  return S_LOAD_NS;
    if (cur <= S_LOAD_NS && m.conv)         return S_CONV;
    if (cur <= S_DRAIN   && m.threshold)    return S_TH_ROW;
    if (cur <= S_FLUSH   && m.store_states) return S_STORE_NS;
    return S_END;
  endfunction

  always_comb begin
    unique case (st)
      S_LOAD_NS, S_STORE_NS: bank_mode = MODE_XFER;
      S_CONV, S_DRAIN:       bank_mode = MODE_CONV;
      S_TH_ROW, S_TH_WAIT, S_TH_RUN, S_FLUSH: bank_mode = MODE_THRESH;
      default:               bank_mode = MODE_IDLE;
    endcase
  end

  assign st_nxt_op = next_op(st, ops);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      waiting       <= 1'b0;
      drain         <= '0;
      yp            <= '0;
      by            <= '0;
      row_base      <= '0;
      row_words     <= '0;
      run_done      <= 1'b0;
      wb_load_start <= 1'b0;
      mv_start      <= 1'b0;
      mv_dir        <= 1'b0;
      ss_start      <= 1'b0;
      th_start      <= '0;
      sb_flush      <= 1'b0;
      spikes        <= '0;
      cycles        <= '0;
    end else begin
      run_done      <= 1'b0;
      wb_load_start <= 1'b0;
      mv_start      <= 1'b0;
      ss_start      <= 1'b0;
      th_start      <= '0;
      sb_flush      <= 1'b0;
      if (busy) cycles <= cycles + 1'b1;
      if (ss_spk_valid) spikes <= spikes + 1'b1;

      unique case (st)
        S_IDLE: if (start) begin
          st        <= next_op(S_IDLE, ops);
          waiting   <= 1'b0;
          cycles    <= '0;
          spikes    <= '0;
          row_words <= (XP_W+1)'((32'(cfg.map_w) + 2) / 3);
        end
        S_LOAD_W: begin
          if (!waiting) begin
            wb_load_start <= 1'b1;
            waiting       <= 1'b1;
          end else if (wb_load_done) begin
            waiting <= 1'b0;
            st      <= st_nxt_op;
          end
        end
        S_LOAD_NS, S_STORE_NS: begin
          if (!waiting) begin
            mv_start <= 1'b1;
            mv_dir   <= (st == S_STORE_NS);
            waiting  <= 1'b1;
          end else if (mv_done) begin
            waiting <= 1'b0;
            st      <= st_nxt_op;
          end
        end
        S_CONV: begin
          if (!waiting) begin
            ss_start <= 1'b1;
            waiting  <= 1'b1;
          end else if (ss_done) begin
            waiting <= 1'b0;
            drain   <= '0;
            st      <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          // the last spike leaves stage 4 of the clusters within 5 cycles
          drain <= drain + 1'b1;
          if (drain == 3'd5) begin
            st <= st_nxt_op;
            yp <= '0;
            by <= '0;
            row_base <= '0;
          end
        end
        S_TH_ROW: begin
          th_start[by] <= 1'b1;
          st           <= S_TH_WAIT;
        end
        S_TH_WAIT: st <= S_TH_RUN;          // let busy rise
        S_TH_RUN: if (!th_busy) begin
          sb_flush <= 1'b1;
          st       <= S_FLUSH;
        end
        S_FLUSH: if (sb_flush_done) begin
          if (sb_row == cfg.map_h - 1'b1) begin
            st <= st_nxt_op;
          end else begin
            st <= S_TH_ROW;
            if (by == 2'd2) begin
              by       <= '0;
              yp       <= yp + 1'b1;
              row_base <= row_base + ns_addr_t'(row_words);
            end else begin
              by <= by + 1'b1;
            end
          end
        end
        S_END: begin
          run_done <= 1'b1;
          st       <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
