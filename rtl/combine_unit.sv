// combine_unit -- path concatenation and one polar-encoder stage (Combine).
//
// The right child of a node was fed, on its input path k, with the LLRs that
// follow from the left child's output path k. After the right child has kept
// its L best paths, output path p descends from right-child input path
// src_r[p], so it joins the left estimate beta_l[src_r[p]] with beta_r[p] and
// applies one stage of the polar encoder (bit i is index i of the node):
//   beta[p] = { beta_r[p], beta_l[src_r[p]] ^ beta_r[p] }
// The lower half of the indices gets beta_l ^ beta_r, the upper half beta_r.
// The survivor index passed up to the parent is src_l[src_r[p]].
// The published design keeps whole path histories in registers that are
// reordered at every sort ("&" blocks and l-registers); selecting the left
// estimate here, once, yields the same bits. Purely combinational.
module combine_unit import fssl_pkg::*; #(
  parameter int NV = 8
) (
  input  logic [NV/2-1:0] beta_l [L],
  input  src_t            src_l  [L],
  input  logic [NV/2-1:0] beta_r [L],
  input  src_t            src_r  [L],
  output logic [NV-1:0]   beta   [L],
  output src_t            src    [L]
);
  always_comb
    for (int p = 0; p < L; p++) begin
      beta[p] = {beta_r[p], beta_l[src_r[p]] ^ beta_r[p]};
      src[p]  = src_l[src_r[p]];
    end
endmodule
