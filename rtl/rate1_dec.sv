// rate1_dec -- Rate-1 constituent decoder (all NV bits are information; NV is
// not limited, 128 at most in the default code).
//
// Each live path p yields two candidates: its hard decisions h (bit = 1 where
// alpha < 0) with metric PM_p, and h with its least reliable bit flipped, with
// metric PM_p + min|alpha|. Considering only the L-1 = 1 least reliable bit is
// the approximation this design uses; the published design states that an
// approximation is used but not which.
//   P_IN = 1: both candidates are kept, registered at stage S (latency 1).
//   P_IN = 2: the four candidates (metrics saturated to 7 bits) are
//     registered at stage S and the L-Best sorter picks two at stage S+1
//     (latency 2).
module rate1_dec import fssl_pkg::*; #(
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
  logic [NV-1:0] cb [M];    // candidate 2p: hard decision, 2p+1: least reliable bit flipped
  pmw_t          c  [M];

  always_comb
    for (int p = 0; p < L; p++) begin
      automatic int mn = LLR_MAX + 1;
      automatic int mi = 0;
      for (int i = 0; i < NV; i++) begin
        cb[2*p][i] = alpha[p][i] < 0;
        if (abs_llr(alpha[p][i]) < mn) begin
          mn = abs_llr(alpha[p][i]);
          mi = i;
        end
      end
      cb[2*p+1]     = cb[2*p];
      cb[2*p+1][mi] = ~cb[2*p][mi];
      c[2*p]        = (P_IN == 1) ? '0 : pmw_t'(pm_in[p]);
      c[2*p+1]      = c[2*p] + pmw_t'(mn);
    end

  if (P_IN == 1) begin : g_fork
    always_ff @(posedge clk)
      if (stg[S])
        for (int p = 0; p < L; p++) begin
          beta[p]   <= cb[p];
          src[p]    <= 1'b0;
          pm_out[p] <= sat_pm(c[p] - c[0]);
        end
  end else begin : g_list
    logic [NV-1:0] cb_q [M];
    pm_t           c_q  [M];
    logic [1:0]    sel  [L];
    pm_t           pmn  [L];
    always_ff @(posedge clk)
      if (stg[S]) begin
        cb_q <= cb;
        for (int j = 0; j < M; j++) c_q[j] <= sat_pm(c[j]);
      end
    lbest_sort #(.M(M), .LO(L)) u_sort (.pm(c_q), .sel(sel), .pm_out(pmn));
    always_ff @(posedge clk)
      if (stg[S+1])
        for (int k = 0; k < L; k++) begin
          beta[k]   <= cb_q[sel[k]];
          src[k]    <= sel[k][1];
          pm_out[k] <= pmn[k];
        end
  end
endmodule
