// rep_dec -- Repetition constituent decoder (only the last of NV <= 8 bits is
// information).
//
// Each live path p yields two candidates: all-zero, with metric PM_p plus the
// sum of |alpha_i| over alpha_i < 0, and all-one, with PM_p plus the sum of
// |alpha_i| over alpha_i > 0 (exact, as in the published design).
//   P_IN = 1 (the first fork of the tree): both candidates are kept without a
//     sort; metrics are normalized. Latency 1: registered at stage S.
//   P_IN = 2: the four candidate metrics are saturated to 7 bits (0..63) and
//     registered at stage S; the L-Best sorter picks two at stage S+1.
//     Latency 2.
// Outputs: the L estimates, their normalized metrics and, per output path,
// the index of the input path it extends (src).
module rep_dec import fssl_pkg::*; #(
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
  localparam int M = 2 * L;
  pmw_t c [M];              // candidate 2p+b: path p, all bits = b

  always_comb
    for (int p = 0; p < L; p++) begin
      c[2*p]   = (P_IN == 1) ? '0 : pmw_t'(pm_in[p]);
      c[2*p+1] = c[2*p];
      for (int i = 0; i < NV; i++)
        if (alpha[p][i] < 0) c[2*p]   = c[2*p]   + pmw_t'(abs_llr(alpha[p][i]));
        else                 c[2*p+1] = c[2*p+1] + pmw_t'(abs_llr(alpha[p][i]));
    end

  if (P_IN == 1) begin : g_fork
    pmw_t mn;
    assign mn = (c[1] < c[0]) ? c[1] : c[0];
    always_ff @(posedge clk)
      if (stg[S])
        for (int p = 0; p < L; p++) begin
          beta[p]   <= {NV{p[0]}};
          src[p]    <= 1'b0;
          pm_out[p] <= sat_pm(c[p] - mn);
        end
  end else begin : g_list
    pm_t         c_q [M];
    logic [1:0]  sel [L];
    pm_t         pmn [L];
    always_ff @(posedge clk)
      if (stg[S]) for (int j = 0; j < M; j++) c_q[j] <= sat_pm(c[j]);
    lbest_sort #(.M(M), .LO(L)) u_sort (.pm(c_q), .sel(sel), .pm_out(pmn));
    always_ff @(posedge clk)
      if (stg[S+1])
        for (int k = 0; k < L; k++) begin
          beta[k]   <= {NV{sel[k][0]}};
          src[k]    <= sel[k][1];
          pm_out[k] <= pmn[k];
        end
  end
endmodule
