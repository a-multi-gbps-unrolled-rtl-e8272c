// f_unit -- min-sum F function of a decoder-tree node.
//
// For a node of NV LLRs it produces the NV/2 LLRs of the left child:
//   y[i] = sign(a[i]) * sign(a[i+NV/2]) * min(|a[i]|, |a[i+NV/2]|).
// This is the F block of the unrolled decoder; the min-sum approximation
// follows the published design. Purely combinational; the node registers the
// result.
module f_unit import fssl_pkg::*; #(
  parameter int NV = 8
) (
  input  llr_t a [NV],
  output llr_t y [NV/2]
);
  always_comb
    for (int i = 0; i < NV/2; i++) y[i] = f_minsum(a[i], a[i + NV/2]);
endmodule
