// mega_csr: control and status registers of the accelerator.
//
// The host processor configures a layer (map size, input channel count,
// memory base addresses, leak, threshold) and starts a run through a simple
// register port: one access per cycle, writes take effect at the clock edge,
// reads are combinational. Register map (word addresses, see csr_addr_e):
//   0 CTRL     write: bit 0 start, bits 5:1 operations (load weights, load
//              states, convolution, threshold, store states); reads the last
//              operations written
//   1 STATUS   bit 0 busy, bit 1 done (set at the end of a run, cleared by
//              the next start)
//   2..11      configuration, see mega_pkg
//   12 SPIKES  input spikes of the last run, 13 CYCLES cycles of the last run
// A start written while busy is ignored.
//
// The paper says the host sets parameters such as leak and threshold
// through CSRs; the register map is this design's own.
module mega_csr
  import mega_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_valid,
  input  logic        csr_write,
  input  logic [3:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output cfg_t        cfg,
  output op_mask_t    ops,
  output logic        start,
  input  logic        busy,
  input  logic        run_done,
  input  logic [31:0] spikes,
  input  logic [31:0] cycles
);

  logic done_flag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg       <= '0;
      ops       <= '0;
      start     <= 1'b0;
      done_flag <= 1'b0;
    end else begin
      start <= 1'b0;
      if (run_done) done_flag <= 1'b1;
      if (csr_valid && csr_write) begin
        unique case (csr_addr_e'(csr_addr))
          CSR_CTRL: begin
            ops <= op_mask_t'(csr_wdata[5:1]);
            if (csr_wdata[0] && !busy) begin
              start     <= 1'b1;
              done_flag <= 1'b0;
            end
          end
          CSR_MAP_W:    cfg.map_w    <= COORD_W'(csr_wdata);
          CSR_MAP_H:    cfg.map_h    <= COORD_W'(csr_wdata);
          CSR_CIN:      cfg.cin      <= (CH_W+1)'(csr_wdata);
          CSR_SPK_BASE: cfg.spk_base <= csr_wdata;
          CSR_WGT_BASE: cfg.wgt_base <= csr_wdata;
          CSR_NS_BASE:  cfg.ns_base  <= csr_wdata;
          CSR_OUT_BASE: cfg.out_base <= csr_wdata;
          CSR_LEAK:     cfg.leak     <= csr_wdata[STATE_W-1:0];
          CSR_THRESH:   cfg.thresh   <= csr_wdata[STATE_W-1:0];
          CSR_NS_WORDS: cfg.ns_words <= (NS_AW+1)'(csr_wdata);
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (csr_addr_e'(csr_addr))
      CSR_CTRL:     csr_rdata = 32'({ops, 1'b0});
      CSR_STATUS:   csr_rdata = {30'd0, done_flag, busy};
      CSR_MAP_W:    csr_rdata = 32'(cfg.map_w);
      CSR_MAP_H:    csr_rdata = 32'(cfg.map_h);
      CSR_CIN:      csr_rdata = 32'(cfg.cin);
      CSR_SPK_BASE: csr_rdata = cfg.spk_base;
      CSR_WGT_BASE: csr_rdata = cfg.wgt_base;
      CSR_NS_BASE:  csr_rdata = cfg.ns_base;
      CSR_OUT_BASE: csr_rdata = cfg.out_base;
      CSR_LEAK:     csr_rdata = 32'(cfg.leak);
      CSR_THRESH:   csr_rdata = 32'(signed'(cfg.thresh));
      CSR_NS_WORDS: csr_rdata = 32'(cfg.ns_words);
      CSR_SPIKES:   csr_rdata = spikes;
      CSR_CYCLES:   csr_rdata = cycles;
      default:      csr_rdata = '0;
    endcase
  end

endmodule
