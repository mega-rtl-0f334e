// mega_spike_buffer: collects the output spikes of one map row and writes
// them back to the shared memory as dense spike vectors.
//
// Thresholding runs row by row: the three threshold units of the clusters
// that hold the current row each deliver, per cycle, the 32 output-channel
// spikes of one column x = 3*x' + bx (bx = 0, 1, 2). The buffer keeps one
// 96-bit vector per output channel and sets bit 95-x of each. When the row
// is complete, flush writes the 32 vectors, channel 0 first, to
// out_base + ch*map_h + row, i.e. in the same layout the spike streamer
// reads, so the output of one layer is the input of the next. The vectors
// are cleared once written. Columns at or beyond map_w are ignored.
//
// Interface: in_valid/in_xp/in_spk come straight from the threshold units;
// flush is a pulse with row stable until flush_done; the write port uses a
// valid/ready handshake.
//
// The paper says only that output spikes are buffered before they are
// written back; the row-vector organisation and the memory layout are this
// design's.
module mega_spike_buffer
  import mega_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] map_w,
  input  logic [COORD_W-1:0] map_h,
  input  logic [ADDR_W-1:0]  out_base,
  input  logic               in_valid,
  input  logic [XP_W-1:0]    in_xp,
  input  logic [LANES-1:0]   in_spk [3],
  input  logic               flush,
  input  logic [COORD_W-1:0] row,
  output logic               wr_req_valid,
  input  logic               wr_req_ready,
  output logic [ADDR_W-1:0]  wr_req_addr,
  output spike_vec_t         wr_req_data,
  output logic               flush_done,
  output logic [15:0]        spike_count  // output spikes since reset
);

  spike_vec_t                 rowbuf [LANES];
  logic                       flushing;
  logic [$clog2(LANES)-1:0]   ch;
  logic [ADDR_W-1:0]          addr;

  assign wr_req_valid = flushing;
  assign wr_req_addr  = addr;
  assign wr_req_data  = rowbuf[ch];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flushing    <= 1'b0;
      ch          <= '0;
      addr        <= '0;
      flush_done  <= 1'b0;
      spike_count <= '0;
      for (int c = 0; c < LANES; c++) rowbuf[c] <= '0;
    end else begin
      flush_done <= 1'b0;
      if (in_valid) begin
        for (int b = 0; b < 3; b++) begin
          logic [COORD_W-1:0]        x;
          logic [$clog2(VEC_W)-1:0]  bi;    // bit of column x
          x  = COORD_W'(3 * in_xp + b);
          bi = $clog2(VEC_W)'(COORD_W'(VEC_W - 1) - x);
          if (x < map_w) begin
            for (int c = 0; c < LANES; c++) rowbuf[c][bi] <= in_spk[b][c];
          end
        end
        spike_count <= spike_count + 16'($countones(in_spk[0]) + $countones(in_spk[1])
                                        + $countones(in_spk[2]));
      end
      if (flush && !flushing) begin
        flushing <= 1'b1;
        ch       <= '0;
        addr     <= out_base + ADDR_W'(row);
      end else if (flushing && wr_req_ready) begin
        rowbuf[ch] <= '0;
        addr       <= addr + ADDR_W'(map_h);
        ch         <= ch + 1'b1;
        if (ch == $clog2(LANES)'(LANES - 1)) begin
          flushing   <= 1'b0;
          flush_done <= 1'b1;
        end
      end
    end
  end

endmodule
