// g_unit -- G function of a decoder-tree node.
//
// For a node of NV LLRs and the NV/2 partial sums beta of its left child it
// produces the right child's LLRs:
//   y[i] = a[i+NV/2] + (1 - 2 beta[i]) * a[i],
// saturated symmetrically to +-31 (the saturation is this design's choice).
// Purely combinational; the node selects the LLRs of the surviving path and
// registers the result.
module g_unit import fssl_pkg::*; #(
  parameter int NV = 8
) (
  input  llr_t          a [NV],
  input  logic [NV/2-1:0] beta,
  output llr_t          y [NV/2]
);
  always_comb
    for (int i = 0; i < NV/2; i++) y[i] = g_func(a[i], a[i + NV/2], beta[i]);
endmodule
