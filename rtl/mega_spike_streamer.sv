// mega_spike_streamer: turns dense spike maps into a stream of spike addresses.
//
// The input of a layer is stored as one 96-bit spike vector per map row and
// input channel, channel after channel, rows in order (pixel x at bit 95-x).
// The streamer reads these vectors one after the other and emits one spike
// address per clock cycle:
//   * a leading zero counter (LZC) finds the first set bit of the current
//     vector; the bit is cleared and the LZC finds the next one;
//   * the next vector is fetched while the current one is being worked on. A
//     second LZC looks at that prefetched vector, so when the current vector
//     runs empty the first spike of the next one goes out in the very next
//     cycle, without a bubble;
//   * the column x from the LZC is turned into (x', bx) = (x div 3, x mod 3)
//     by two 96-entry lookup tables; the row (y', by) comes from counters
//     that step alongside the vector address, so no divider is needed.
// Bits beyond the configured map width are masked off. An all-zero vector
// costs one cycle. Edge flags tell the clusters which neighbours lie outside
// the map.
//
// Interface: a start pulse latches nothing; the configuration inputs must be
// stable from start to done. Memory reads use a valid/ready request and an
// in-order response one or more cycles later that is always accepted; at
// most one read is outstanding. spk_valid/spk is a registered output with no
// back-pressure (the clusters never stall). done pulses one cycle after the
// last spike left the output register.
//
// From the paper: 96-bit vectors, tree LZC, clear-and-repeat, the prefetch
// with a second LZC, LUTs for x' and bx, counters for y' and by. This
// design's choices: the bit order, the vector layout in memory, a single
// outstanding read, and the edge flags.
module mega_spike_streamer
  import mega_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [COORD_W-1:0]  map_w,     // 1..96
  input  logic [COORD_W-1:0]  map_h,     // >= 1
  input  logic [CH_W:0]       cin,       // 1..CH_MAX
  input  logic [ADDR_W-1:0]   base,
  // memory read port
  output logic                rd_req_valid,
  input  logic                rd_req_ready,
  output logic [ADDR_W-1:0]   rd_req_addr,
  input  logic                rd_rsp_valid,
  input  spike_vec_t          rd_rsp_data,
  // spike addresses to the clusters
  output logic                spk_valid,
  output spike_addr_t         spk,
  output logic                busy,
  output logic                done
);

  typedef struct packed {
    logic [YP_W-1:0] yp;
    logic [1:0]      by;
    logic [CH_W-1:0] ch;
    logic            first_y;
    logic            last_y;
  } row_info_t;

  typedef logic [XP_W-1:0] xp_lut_t [VEC_W];
  typedef logic [1:0]      bx_lut_t [VEC_W];

  function automatic xp_lut_t make_xp_lut();
    xp_lut_t t;
    for (int i = 0; i < VEC_W; i++) t[i] = XP_W'(i / 3);
    return t;
  endfunction

  function automatic bx_lut_t make_bx_lut();
    bx_lut_t t;
    for (int i = 0; i < VEC_W; i++) t[i] = 2'(i % 3);
    return t;
  endfunction

  localparam xp_lut_t XP_LUT = make_xp_lut();
  localparam bx_lut_t BX_LUT = make_bx_lut();

  // ---------------------------------------------------------------- fetch
  logic [YP_W-1:0]    f_yp;
  logic [1:0]         f_by;
  logic [COORD_W-1:0] f_y;
  logic [CH_W-1:0]    f_ch;
  logic [ADDR_W-1:0]  f_addr;
  logic               f_done;     // every vector has been requested
  logic               pend;       // a read is outstanding
  row_info_t          pend_info;

  spike_vec_t         cur_vec, nxt_vec;
  row_info_t          cur_info, nxt_info;
  logic               nxt_valid;

  spike_vec_t         col_mask;
  assign col_mask = ~({VEC_W{1'b1}} >> map_w);

  assign rd_req_valid = busy && !f_done && !pend && !nxt_valid;
  assign rd_req_addr  = f_addr;

  // ---------------------------------------------------------------- detect
  logic [LZC_W-1:0] cur_cnt, nxt_cnt;
  logic             cur_zero, nxt_zero;

  mega_lzc #(.WIDTH(VEC_W)) u_lzc_cur (.vec(cur_vec), .cnt(cur_cnt), .zero(cur_zero));
  mega_lzc #(.WIDTH(VEC_W)) u_lzc_nxt (.vec(nxt_vec), .cnt(nxt_cnt), .zero(nxt_zero));

  logic             emit;
  logic             from_nxt;
  logic [LZC_W-1:0] x;
  row_info_t        info;
  spike_vec_t       hit;

  always_comb begin
    from_nxt = cur_zero && nxt_valid;
    emit     = !cur_zero || (nxt_valid && !nxt_zero);
    x        = from_nxt ? nxt_cnt  : cur_cnt;
    info     = from_nxt ? nxt_info : cur_info;
    hit      = spike_vec_t'(1) << (LZC_W'(VEC_W - 1) - x);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      f_yp      <= '0;
      f_by      <= '0;
      f_y       <= '0;
      f_ch      <= '0;
      f_addr    <= '0;
      f_done    <= 1'b0;
      pend      <= 1'b0;
      pend_info <= '0;
      cur_vec   <= '0;
      cur_info  <= '0;
      nxt_vec   <= '0;
      nxt_info  <= '0;
      nxt_valid <= 1'b0;
      spk_valid <= 1'b0;
      spk       <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        f_yp   <= '0;
        f_by   <= '0;
        f_y    <= '0;
        f_ch   <= '0;
        f_addr <= base;
        f_done <= 1'b0;
      end

      // request the next vector and step the row counters
      if (rd_req_valid && rd_req_ready) begin
        pend              <= 1'b1;
        pend_info.yp      <= f_yp;
        pend_info.by      <= f_by;
        pend_info.ch      <= f_ch;
        pend_info.first_y <= (f_y == '0);
        pend_info.last_y  <= (f_y == map_h - 1'b1);
        f_addr            <= f_addr + 1'b1;
        if (f_y == map_h - 1'b1) begin
          f_y  <= '0;
          f_yp <= '0;
          f_by <= '0;
          f_ch <= f_ch + 1'b1;
          if ({1'b0, f_ch} == cin - 1'b1) f_done <= 1'b1;
        end else begin
          f_y <= f_y + 1'b1;
          if (f_by == 2'd2) begin
            f_by <= '0;
            f_yp <= f_yp + 1'b1;
          end else begin
            f_by <= f_by + 1'b1;
          end
        end
      end

      if (rd_rsp_valid && pend) begin
        pend      <= 1'b0;
        nxt_vec   <= rd_rsp_data & col_mask;
        nxt_info  <= pend_info;
        nxt_valid <= 1'b1;
      end

      // extract one spike per cycle
      spk_valid <= emit;
      if (emit) begin
        spk.xp      <= XP_LUT[x];
        spk.bx      <= BX_LUT[x];
        spk.yp      <= info.yp;
        spk.by      <= info.by;
        spk.ch      <= info.ch;
        spk.first_x <= (x == '0);
        spk.last_x  <= ({{(COORD_W-LZC_W){1'b0}}, x} == map_w - 1'b1);
        spk.first_y <= info.first_y;
        spk.last_y  <= info.last_y;
      end
      if (from_nxt) begin
        nxt_valid <= 1'b0;
        cur_vec   <= nxt_vec & ~hit;   // all zero if the vector was empty
        cur_info  <= nxt_info;
      end else if (!cur_zero) begin
        cur_vec   <= cur_vec & ~hit;
      end

      if (busy && f_done && !pend && !nxt_valid && cur_zero && !(start && !busy)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
