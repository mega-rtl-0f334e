// mega_ns_mover: copies neuron states between the shared memory and the
// nine neuron state banks.
//
// Neuron states of a layer live in the shared memory between timesteps (or
// between the passes of a layer with more than 32 output channels) and are
// brought into the banks before the convolution and back afterwards. The
// shared memory holds them as an image of the banks: bank 0 (bx=0, by=0)
// words 0..words-1, then bank 1, and so on, bank index 3*by + bx, starting at
// base. dir = 0 loads (memory to banks), dir = 1 stores (banks to memory).
//
// One word moves at a time. Load: a read request, then the response is
// written into the bank in the cycle it arrives. Store: the bank is read,
// then a write request carries the word until it is accepted. start is a
// pulse; done pulses after the last word.
//
// The paper shows neuron states travelling between the shared memory and
// the clusters but not how; this sequential mover and the layout are this
// design's.
module mega_ns_mover
  import mega_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              dir,
  input  logic [NS_AW:0]    words,
  input  logic [ADDR_W-1:0] base,
  // shared memory port
  output logic              req_valid,
  input  logic              req_ready,
  output logic              req_we,
  output logic [ADDR_W-1:0] req_addr,
  output ns_word_t          req_wdata,
  input  logic              rsp_valid,
  input  ns_word_t          rsp_rdata,
  // banks
  output logic [KERNEL-1:0] b_re,
  output logic [KERNEL-1:0] b_we,
  output ns_addr_t          b_addr,
  output ns_word_t          b_wdata,
  input  ns_word_t          b_rdata [KERNEL],
  output logic              busy,
  output logic              done
);

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_WAIT, S_BRD, S_WR} state_e;
  state_e          st;
  logic [3:0]      bank;
  logic [NS_AW:0]  word;
  logic [ADDR_W-1:0] addr;
  logic            last;

  assign busy      = (st != S_IDLE);
  assign last      = (bank == 4'(KERNEL - 1)) && (word + 1'b1 == words);
  assign req_valid = (st == S_REQ) || (st == S_WR);
  assign req_we    = (st == S_WR);
  assign req_addr  = addr;
  assign req_wdata = b_rdata[bank];
  assign b_addr    = ns_addr_t'(word);
  assign b_wdata   = rsp_rdata;

  always_comb begin
    b_re = '0;
    b_we = '0;
    if (st == S_BRD)                b_re[bank] = 1'b1;
    if (st == S_WAIT && rsp_valid)  b_we[bank] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      bank <= '0;
      word <= '0;
      addr <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          bank <= '0;
          word <= '0;
          addr <= base;
          if (words == '0) done <= 1'b1;
          else             st   <= dir ? S_BRD : S_REQ;
        end
        S_REQ:  if (req_ready) st <= S_WAIT;
        S_BRD:  st <= S_WR;
        S_WAIT, S_WR: begin
          if ((st == S_WAIT && rsp_valid) || (st == S_WR && req_ready)) begin
            addr <= addr + 1'b1;
            if (last) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              if (word + 1'b1 == words) begin
                word <= '0;
                bank <= bank + 1'b1;
              end else begin
                word <= word + 1'b1;
              end
              st <= dir ? S_BRD : S_REQ;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
