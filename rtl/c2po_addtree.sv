// c2po_addtree -- pipelined binary adder tree of the C2PO precoder.
//
// Completes the wide product w = sum_w H~_w (tau x~_w): for each of the
// LANES = U+1 entries it adds the NA = B/U accumulator values (18 bits, 15
// fraction bits) of the arrays, in 21-bit arithmetic with 15 fraction bits
// that wraps on overflow. The tree has L = log2(NA) adder levels; levels
// 1..L-1 are registered here, and the last level is registered by the b
// registers of the PEs, so w is available L cycles after the accumulators
// are, as in the paper (wide product plus tree in U + L + 2 cycles).
// The output is truncated to the b-register format (18 bits, 11 fraction
// bits) and the same w is broadcast to every array.
module c2po_addtree
  import c2po_pkg::*;
#(
  parameter int unsigned NA    = 16,
  parameter int unsigned LANES = 17
) (
  input  logic clk_i,
  input  acc_t acc_i [NA][LANES],
  output b_t   w_o   [LANES]
);

  // heap-ordered tree: node 1 is the root, node i has children 2i and 2i+1,
  // nodes NA .. 2NA-1 are the leaves (accumulators of arrays 0 .. NA-1). The depth of node
  // i is floor(log2(i)); nodes of depth 1 .. L-1 are registered.
  for (genvar i = 1; i < 2 * NA; i++) begin : g_n
    tree_t v [LANES];
    if (i >= NA) begin : g_leaf
      for (genvar k = 0; k < LANES; k++) begin : g_lane
        assign v[k].re = TW'(acc_i[i-NA][k].re);
        assign v[k].im = TW'(acc_i[i-NA][k].im);
      end
    end else begin : g_add
      tree_t s [LANES];
      for (genvar k = 0; k < LANES; k++) begin : g_lane
        assign s[k].re = g_n[2*i].v[k].re + g_n[2*i+1].v[k].re;
        assign s[k].im = g_n[2*i].v[k].im + g_n[2*i+1].v[k].im;
      end
      if (i == 1) begin : g_root
        assign v = s;
      end else begin : g_reg
        always_ff @(posedge clk_i) v <= s;
      end
    end
  end

  for (genvar k = 0; k < LANES; k++) begin : g_out
    tree_t t;
    assign t.re = g_n[1].v[k].re >>> (TF - BF);
    assign t.im = g_n[1].v[k].im >>> (TF - BF);
    assign w_o[k].re = t.re[BW-1:0];
    assign w_o[k].im = t.im[BW-1:0];
  end

endmodule
