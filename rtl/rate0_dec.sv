// rate0_dec -- Rate-0 constituent decoder (all NV bits frozen, NV <= 8).
//
// The only codeword is all-zero, so every path keeps its history and its
// metric grows by the sum of |alpha_i| over the LLRs that favour a one
// (alpha_i < 0). With two live paths the metrics are normalized (best becomes
// 0) and saturated to 0..63; with one live path its metric is simply 0.
// Normalizing here too is this design's choice; the penalty rule is the usual
// list-decoding metric. One clock cycle: inputs valid from stage S, outputs
// registered at stage S and valid from S+1. Path 1 mirrors path 0 while only
// one path is live (P_IN = 1).
module rate0_dec import fssl_pkg::*; #(
  parameter int NV    = 8,
  parameter int P_IN  = 2,
  parameter int S     = 1,
  parameter int DEPTH = 16
) (
  input  logic            clk,
  input  logic [DEPTH:0]  stg,
  input  llr_t            alpha  [L][NV],
  input  pm_t             pm_in  [L],
  output logic [NV-1:0]   beta   [L],
  output pm_t             pm_out [L],
  output src_t            src    [L]
);
  pmw_t c [L];
  pmw_t mn;

  always_comb begin
    for (int p = 0; p < L; p++) begin
      c[p] = (P_IN == 1) ? '0 : pmw_t'(pm_in[p]);
      for (int i = 0; i < NV; i++)
        if (alpha[p][i] < 0) c[p] = c[p] + pmw_t'(abs_llr(alpha[p][i]));
    end
    mn = (P_IN == 1) ? c[0] : ((c[1] < c[0]) ? c[1] : c[0]);
  end

  always_ff @(posedge clk)
    if (stg[S])
      for (int p = 0; p < L; p++) begin
        beta[p]   <= '0;
        src[p]    <= (P_IN == 1) ? 1'b0 : src_t'(p);
        pm_out[p] <= (P_IN == 1) ? '0 : sat_pm(c[p] - mn);
      end
endmodule
