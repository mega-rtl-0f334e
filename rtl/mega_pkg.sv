// mega_pkg: sizes, types and helper functions shared by the Mega convolutional
// spiking neural network accelerator.
//
// The accelerator spreads the neuron states of a feature map over nine banks
// by position: a neuron at (x, y) lives in bank (bx, by) = (x mod 3, y mod 3)
// at word (x', y') = (x div 3, y div 3). Any 3x3 window then touches each
// bank exactly once, so the nine updates a spike causes run in parallel.
// Every bank word holds the 8-bit states of 32 output channels.
//
// Sizes that follow the paper: 9 clusters, 32 lanes (output channels) per
// cluster, INT8 states, INT4 weights, 16 kB per bank (512 words of 256 bits),
// 96-bit spike vectors. The word widths of the memory ports, the address
// width and the maximum number of input channels are this design's choice.
package mega_pkg;

  localparam int unsigned LANES      = 32;   // output channels per bank word
  localparam int unsigned STATE_W    = 8;    // signed neuron state
  localparam int unsigned WEIGHT_W   = 4;    // signed weight
  localparam int unsigned VEC_W      = 96;   // spike vector width = max map width
  localparam int unsigned NS_DEPTH   = 512;  // 16 kB / (32 x 8 bit)
  localparam int unsigned NS_AW      = $clog2(NS_DEPTH);
  localparam int unsigned XP_W       = 5;    // x' = x div 3 < 32
  localparam int unsigned YP_W       = 9;    // y' up to NS_DEPTH-1
  localparam int unsigned COORD_W    = 11;   // x, y and map sizes
  localparam int unsigned CH_MAX     = 64;   // input channels held in the weight buffer
  localparam int unsigned CH_W       = $clog2(CH_MAX);
  localparam int unsigned KERNEL     = 9;    // 3x3 offsets
  localparam int unsigned ADDR_W     = 32;   // TCDM word address
  localparam int unsigned LZC_W      = $clog2(VEC_W + 1);

  typedef logic signed [STATE_W-1:0]        state_t;
  typedef logic signed [WEIGHT_W-1:0]       weight_t;
  typedef logic [LANES*STATE_W-1:0]         ns_word_t;   // lane i at [8i+7:8i]
  typedef logic [LANES*WEIGHT_W-1:0]        w_word_t;    // lane i at [4i+3:4i]
  typedef logic [VEC_W-1:0]                 spike_vec_t; // pixel x at bit VEC_W-1-x
  typedef logic [NS_AW-1:0]                 ns_addr_t;

  // A spike in interlaced coordinates, as sent from the spike streamer to all
  // nine clusters. The edge flags tell a cluster which neighbours fall outside
  // the map (the map is zero padded: such targets are skipped).
  typedef struct packed {
    logic [XP_W-1:0] xp;
    logic [1:0]      bx;
    logic [YP_W-1:0] yp;
    logic [1:0]      by;
    logic [CH_W-1:0] ch;
    logic            first_x;
    logic            last_x;
    logic            first_y;
    logic            last_y;
  } spike_addr_t;

  // Layer configuration held in the CSRs.
  typedef struct packed {
    logic [COORD_W-1:0] map_w;
    logic [COORD_W-1:0] map_h;
    logic [CH_W:0]      cin;
    logic [ADDR_W-1:0]  spk_base;
    logic [ADDR_W-1:0]  wgt_base;
    logic [ADDR_W-1:0]  ns_base;
    logic [ADDR_W-1:0]  out_base;
    logic [STATE_W-1:0] leak;
    state_t             thresh;
    logic [NS_AW:0]     ns_words;
  } cfg_t;

  // Operations one start command may run, in this order.
  typedef struct packed {
    logic store_states;
    logic threshold;
    logic conv;
    logic load_states;
    logic load_weights;
  } op_mask_t;

  // Who owns the neuron state bank ports of the clusters.
  typedef enum logic [1:0] {
    MODE_IDLE   = 2'd0,
    MODE_CONV   = 2'd1,  // convolution units
    MODE_THRESH = 2'd2,  // threshold units
    MODE_XFER   = 2'd3   // transfers to and from the shared memory
  } bank_mode_e;

  // CSR word addresses.
  typedef enum logic [3:0] {
    CSR_CTRL      = 4'd0,  // W: bit0 start, bits 5:1 op_mask_t
    CSR_STATUS    = 4'd1,  // R: bit0 busy, bit1 done
    CSR_MAP_W     = 4'd2,  // map width, 1..96
    CSR_MAP_H     = 4'd3,  // map height
    CSR_CIN       = 4'd4,  // input channels, 1..64
    CSR_SPK_BASE  = 4'd5,  // input spike vectors
    CSR_WGT_BASE  = 4'd6,  // weight words
    CSR_NS_BASE   = 4'd7,  // neuron state words
    CSR_OUT_BASE  = 4'd8,  // output spike vectors
    CSR_LEAK      = 4'd9,  // linear leak, unsigned
    CSR_THRESH    = 4'd10, // threshold, signed 8 bit
    CSR_NS_WORDS  = 4'd11, // words per bank moved by load/store
    CSR_SPIKES    = 4'd12, // R: input spikes processed by the last run
    CSR_CYCLES    = 4'd13  // R: cycles of the last run
  } csr_addr_e;

  // x div 3 and x mod 3 for a pixel column. Synthesised as a constant table
  // (the two 96-entry lookup tables of the spike streamer).
  function automatic logic [XP_W-1:0] div3(input logic [LZC_W-1:0] x);
    return XP_W'(x / 3);
  endfunction

  function automatic logic [1:0] mod3(input logic [LZC_W-1:0] x);
    return 2'(x % 3);
  endfunction

  // Saturating add of a weight to a state: overflow clips to the range.
  function automatic state_t sat_add(input state_t s, input weight_t w);
    logic signed [STATE_W:0] sum;
    sum = $signed({s[STATE_W-1], s}) + $signed({{(STATE_W+1-WEIGHT_W){w[WEIGHT_W-1]}}, w});
    if (sum > 9'sd127)       return 8'sd127;
    else if (sum < -9'sd128) return -8'sd128;
    else                     return sum[STATE_W-1:0];
  endfunction

endpackage
