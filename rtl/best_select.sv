// best_select -- "Best Candidate" stage and output register (beta_c).
//
// At the end of the tree, the list holds L codeword estimates with their
// path metrics. The path with the smallest metric (path 0 on a tie) is
// chosen; no CRC is used, as in the published (512,427) configuration. The
// chosen estimate, its path index and its metric are registered when en is
// high (one cycle).
module best_select import fssl_pkg::*; #(
  parameter int NV = N
) (
  input  logic           clk,
  input  logic           en,
  input  logic [NV-1:0]  beta [L],
  input  pm_t            pm   [L],
  output logic [NV-1:0]  cw,
  output src_t           path,
  output pm_t            pm_best
);
  src_t b;
  always_comb begin
    b = 1'b0;
    for (int p = 1; p < L; p++) if (pm[p] < pm[b]) b = src_t'(p);
  end
  always_ff @(posedge clk)
    if (en) begin
      cw      <= beta[b];
      path    <= b;
      pm_best <= pm[b];
    end
endmodule
