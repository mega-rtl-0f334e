// mega_ns_bank: one neuron state memory bank, a dual-ported SRAM.
//
// 512 words of 256 bits = 16 kB; a word holds the INT8 states of 32 output
// channels of one map position. One read port and one write port work in the
// same cycle. Reads are synchronous: rdata shows the word addressed in the
// previous cycle. A read of the address being written in the same cycle
// returns the old word; the convolution pipeline forwards around this.
//
// Written as an array so it synthesises to a memory; in silicon this is an
// SRAM macro. Size and dual porting follow the paper, the read latency and
// the read-during-write behaviour are this design's assumptions. Contents are
// not reset.
module mega_ns_bank
  import mega_pkg::*;
#(
  parameter int unsigned DEPTH = NS_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output ns_word_t      rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  ns_word_t      wdata
);

  ns_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

endmodule
