// mega_weight_buffer: local store of the 3x3 kernels of one layer.
//
// For every input channel it holds nine weight words, one per kernel offset
// (a, b) in {-1,0,1}^2, each with the 32 INT4 weights of the 32 output
// channels (lane i at bits 4i+3:4i). The words are stored in nine separate
// arrays indexed by input channel, so that all nine offsets of one channel
// can be read in the same cycle: each of the nine clusters needs a different
// offset for the same spike.
//
// Loading: a load_start pulse reads cin*9 words from memory, starting at
// base, in the order channel, then offset k = 3*(b+1) + (a+1) (a is the
// column offset, b the row offset of W[a,b]). Requests are issued back to
// back while the port is ready; responses return in order and are always
// accepted. load_done pulses when the last word is written.
//
// Reading: rd_en with rd_ch gives all nine words of that channel in w_out
// one cycle later (registered, like a synchronous SRAM).
//
// The paper names the weight buffer and its place between the shared memory
// and the clusters; its organisation, the 64-channel depth and the loader
// are this design's own.
module mega_weight_buffer
  import mega_pkg::*;
#(
  parameter int unsigned DEPTH = CH_MAX
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load_start,
  input  logic [CH_W:0]      cin,
  input  logic [ADDR_W-1:0]  base,
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic [ADDR_W-1:0]  rd_req_addr,
  input  logic               rd_rsp_valid,
  input  w_word_t            rd_rsp_data,
  output logic               load_busy,
  output logic               load_done,
  input  logic               rd_en,
  input  logic [CH_W-1:0]    rd_ch,
  output w_word_t            w_out [KERNEL]
);

  localparam int unsigned TOT_W = $clog2(KERNEL * DEPTH + 1);

  w_word_t mem [KERNEL][DEPTH];

  logic [TOT_W-1:0] total, req_cnt, rsp_cnt;
  logic [3:0]       rsp_k;
  logic [CH_W-1:0]  rsp_ch;

  assign total        = TOT_W'(cin) * TOT_W'(KERNEL);
  assign rd_req_valid = load_busy && (req_cnt != total);
  assign rd_req_addr  = base + ADDR_W'(req_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load_busy <= 1'b0;
      load_done <= 1'b0;
      req_cnt   <= '0;
      rsp_cnt   <= '0;
      rsp_k     <= '0;
      rsp_ch    <= '0;
    end else begin
      load_done <= 1'b0;
      if (load_start && !load_busy) begin
        load_busy <= 1'b1;
        req_cnt   <= '0;
        rsp_cnt   <= '0;
        rsp_k     <= '0;
        rsp_ch    <= '0;
      end else if (load_busy) begin
        if (rd_req_valid && rd_req_ready) req_cnt <= req_cnt + 1'b1;
        if (rd_rsp_valid) begin
          rsp_cnt <= rsp_cnt + 1'b1;
          if (rsp_k == 4'(KERNEL - 1)) begin
            rsp_k  <= '0;
            rsp_ch <= rsp_ch + 1'b1;
          end else begin
            rsp_k <= rsp_k + 1'b1;
          end
          if (rsp_cnt + 1'b1 == total) begin
            load_busy <= 1'b0;
            load_done <= 1'b1;
          end
        end
      end
    end
  end

  // storage (no reset, like an SRAM)
  always_ff @(posedge clk) begin
    if (load_busy && rd_rsp_valid) mem[rsp_k][rsp_ch] <= rd_rsp_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int k = 0; k < KERNEL; k++) w_out[k] <= mem[k][rd_ch];
    end
  end

endmodule
