// reduction_tree: balanced binary tree of FP16 adders.
//
// Sums the N FP16 values of in_vec (element i in bits 16*i+15 : 16*i) into
// one FP16 value. Level l holds N/2^(l+1) fp16_adder nodes; element pairs
// (2i, 2i+1) are added at every level, so the rounding order is fixed and
// reproducible. N must be a power of two. Combinational; the caller places
// pipeline registers around it.
//
// The source architecture names a reduction-tree-based accumulator for the
// GEMV unit; the tree shape and the absence of internal pipelining are this
// design's choices.
module reduction_tree #(
  parameter int N = 2048
) (
  input  logic [16*N-1:0] in_vec,
  output logic [15:0]     sum
);
  localparam int LEVELS = $clog2(N);

  initial assert (N >= 2 && (1 << LEVELS) == N) else $error("reduction_tree: N must be a power of two");

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int W = N >> (l + 1);
    logic [16*W-1:0] s;
    for (genvar i = 0; i < W; i++) begin : g_node
      if (l == 0) begin : g_leaf
        fp16_adder u_add (.a(in_vec[32*i +: 16]), .b(in_vec[32*i+16 +: 16]), .sum(s[16*i +: 16]));
      end else begin : g_inner
        fp16_adder u_add (.a(g_lvl[l-1].s[32*i +: 16]), .b(g_lvl[l-1].s[32*i+16 +: 16]),
                          .sum(s[16*i +: 16]));
      end
    end
  end

  assign sum = g_lvl[LEVELS-1].s[15:0];
endmodule
