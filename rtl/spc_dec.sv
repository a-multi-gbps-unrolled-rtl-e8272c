// spc_dec -- single-parity-check constituent decoder (the first of NV <= 4
// bits is frozen, so the estimate must have even parity).
//
// Pipelined over two cycles, as in the published design:
//   stage S  : per path, hard decisions h, their parity, and the two least
//              reliable positions i1, i2 with magnitudes m1 <= m2.
//   stage S+1: two candidates per path. Parity even: h (PM) and h with i1 and
//              i2 flipped (PM + m1 + m2). Parity odd: h with i1 flipped
//              (PM + m1) and h with i2 flipped (PM + m2).
// For L = 2 these are the two most likely even-parity words of each path; the
// published design says an approximation is used for SPC nodes but does not
// give it, so this candidate rule is this design's.
//   P_IN = 1: both candidates are kept (normalized) at stage S+1, latency 2.
//   P_IN = 2: the candidates are registered at stage S+1 with metrics
//     saturated to 7 bits, and the L-Best sorter keeps two of the four at
//     stage S+2, latency 3.
module spc_dec import fssl_pkg::*; #(
  parameter int NV    = 4,
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
  localparam int M  = 2 * L;
  localparam int IW = $clog2(NV);

  typedef struct packed {
    logic [NV-1:0] h;
    logic          par;
    logic [QI-1:0] m1, m2;
    logic [IW-1:0] i1, i2;
    pm_t           pm;
  } spc_s1_t;

  spc_s1_t s1 [L], s1_q [L];

  // ---- stage S: hard decisions, parity, two smallest magnitudes
  always_comb
    for (int p = 0; p < L; p++) begin
      automatic int a1 = LLR_MAX + 1, a2 = LLR_MAX + 1, x1 = 0, x2 = 0;
      for (int i = 0; i < NV; i++) begin
        automatic int m = abs_llr(alpha[p][i]);
        s1[p].h[i] = alpha[p][i] < 0;
        if (m < a1) begin
          a2 = a1; x2 = x1; a1 = m; x1 = i;
        end else if (m < a2) begin
          a2 = m; x2 = i;
        end
      end
      s1[p].par = ^s1[p].h;
      s1[p].m1  = QI'(a1);
      s1[p].m2  = QI'(a2);
      s1[p].i1  = IW'(x1);
      s1[p].i2  = IW'(x2);
      s1[p].pm  = (P_IN == 1) ? '0 : pm_in[p];
    end

  always_ff @(posedge clk)
    if (stg[S]) s1_q <= s1;

  // ---- stage S+1: candidates
  logic [NV-1:0] cb [M];
  pmw_t          c  [M];

  always_comb
    for (int p = 0; p < L; p++) begin
      logic [NV-1:0] f1, f2;
      f1 = '0; f1[s1_q[p].i1] = 1'b1;
      f2 = '0; f2[s1_q[p].i2] = 1'b1;
      if (!s1_q[p].par) begin
        cb[2*p]   = s1_q[p].h;
        c[2*p]    = pmw_t'(s1_q[p].pm);
        cb[2*p+1] = s1_q[p].h ^ f1 ^ f2;
        c[2*p+1]  = pmw_t'(s1_q[p].pm) + pmw_t'(s1_q[p].m1) + pmw_t'(s1_q[p].m2);
      end else begin
        cb[2*p]   = s1_q[p].h ^ f1;
        c[2*p]    = pmw_t'(s1_q[p].pm) + pmw_t'(s1_q[p].m1);
        cb[2*p+1] = s1_q[p].h ^ f2;
        c[2*p+1]  = pmw_t'(s1_q[p].pm) + pmw_t'(s1_q[p].m2);
      end
    end

  if (P_IN == 1) begin : g_fork
    always_ff @(posedge clk)
      if (stg[S+1])
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
      if (stg[S+1]) begin
        cb_q <= cb;
        for (int j = 0; j < M; j++) c_q[j] <= sat_pm(c[j]);
      end
    lbest_sort #(.M(M), .LO(L)) u_sort (.pm(c_q), .sel(sel), .pm_out(pmn));
    always_ff @(posedge clk)
      if (stg[S+2])
        for (int k = 0; k < L; k++) begin
          beta[k]   <= cb_q[sel[k]];
          src[k]    <= sel[k][1];
          pm_out[k] <= pmn[k];
        end
  end
endmodule
