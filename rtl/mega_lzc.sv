// mega_lzc: leading zero counter built as a binary tree.
//
// The spike streamer uses it to find the first set bit of a spike vector.
// The vector is zero-extended at its least significant end to a power of two.
// Each leaf looks at one bit, most significant first; each tree node merges
// two children: if the left (more significant) child is all zero, the count
// is the left child's size plus the right child's count, otherwise the left
// child's count. Depth is log2(width), so the critical path grows with the
// logarithm of the width rather than linearly as in a priority chain.
//
// Interface: vec is the vector, cnt the number of zeros above the first set
// bit (counting from bit WIDTH-1), zero is set when vec has no set bit (cnt
// is then meaningless). Purely combinational.
//
// The paper states the tree structure and the 96-bit width; the node
// arrangement is this design's own.
module mega_lzc #(
  parameter int unsigned WIDTH = 96,
  localparam int unsigned CW   = $clog2(WIDTH + 1)
) (
  input  logic [WIDTH-1:0] vec,
  output logic [CW-1:0]    cnt,
  output logic             zero
);
  localparam int unsigned LEVELS = $clog2(WIDTH);
  localparam int unsigned P      = 1 << LEVELS;
  localparam int unsigned TW     = LEVELS + 1;  // width of a node count

  logic [P-1:0] padded;
  assign padded = {vec, {(P-WIDTH){1'b0}}};

  // Level l has P >> l nodes; node i covers 2**l leaf bits starting at leaf
  // i * 2**l, counted from the most significant end.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned N = P >> l;
    logic [N-1:0]         z;  // node covers only zeros
    logic [N-1:0][TW-1:0] c;  // zeros above the first one within the node
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_n
        assign z[i] = ~padded[P-1-i];
        assign c[i] = '0;
      end
    end else begin : g_node
      for (genvar i = 0; i < N; i++) begin : g_n
        assign z[i] = g_lvl[l-1].z[2*i] & g_lvl[l-1].z[2*i+1];
        assign c[i] = g_lvl[l-1].z[2*i] ? TW'((1 << (l-1)) + g_lvl[l-1].c[2*i+1])
                                        : g_lvl[l-1].c[2*i];
      end
    end
  end

  assign zero = g_lvl[LEVELS].z[0];
  assign cnt  = CW'(g_lvl[LEVELS].c[0]);

endmodule
