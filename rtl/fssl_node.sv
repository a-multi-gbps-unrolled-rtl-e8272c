// fssl_node -- one node of the fully-unrolled Fast-SSC-List decoder tree.
//
// The node decodes NV LLRs per live path, where bit i of FR says whether
// index i of the node is frozen. If the node is a constituent code that the
// Fast-SSC-List algorithm decodes directly (Rate-0 <= 8, Repetition <= 8,
// SPC <= 4, Rate-1 of any size) it instantiates that decoder; otherwise it
// splits into two children of NV/2 and instantiates itself twice:
//   stage S      F of every path -> register; left child starts at S+1.
//   stage T      (left child's outputs valid) the LLRs of the path each
//                survivor came from are selected (the multiplexers the
//                published design places after each sort), G is applied with
//                the left estimate -> register; right child starts at T+1.
//   stage U      (right child's outputs valid) Combine joins the left and right
//                estimates of each survivor -> register; outputs valid at U+1.
// The node's input LLRs and the left child's results are kept for the right
// side by delay_line retention registers. Latency = LAT_L + LAT_R + 3; the
// shape, the latencies and the stages are fixed at elaboration from FR.
//
// Interface: alpha[p] and pm_in[p] of the P_IN live paths (path 1 unused while
// P_IN = 1) are valid from stage S for II cycles; beta[p] (codeword estimate
// of the node), pm_out[p] (normalized metric) and src[p] (input path it
// extends) are valid from stage S + latency for II cycles. stg[k] is the
// decoder-wide one-hot stage token of the frame in flight.
//
// Lint note: when this module is linted on its own as the top of a hierarchy,
// the linter does not elaborate the two child instances of the module itself
// and reports beta_l/pm_l/src_l and beta_r/pm_r/src_r as undriven (and the F
// and G registers as unused). The warning does not appear when the node sits
// under fssl_decoder or a testbench, where both children are built and
// driven; the unit and end-to-end simulations exercise those connections.
module fssl_node import fssl_pkg::*; #(
  parameter int            NV    = N,
  parameter logic [N-1:0]  FR    = FROZEN,
  parameter int            P_IN  = 1,
  parameter int            S     = 1,
  parameter int            DEPTH = DEC_LAT
) (
  input  logic            clk,
  input  logic [DEPTH:0]  stg,
  input  llr_t            alpha  [L][NV],
  input  pm_t             pm_in  [L],
  output logic [NV-1:0]   beta   [L],
  output pm_t             pm_out [L],
  output src_t            src    [L]
);
  localparam node_kind_e KIND = node_kind(NV, FR);

  if (KIND == NODE_RATE0) begin : g_rate0
    rate0_dec #(.NV(NV), .P_IN(P_IN), .S(S), .DEPTH(DEPTH)) u_dec (.*);
  end else if (KIND == NODE_RATE1) begin : g_rate1
    rate1_dec #(.NV(NV), .P_IN(P_IN), .S(S), .DEPTH(DEPTH)) u_dec (.*);
  end else if (KIND == NODE_REP) begin : g_rep
    rep_dec   #(.NV(NV), .P_IN(P_IN), .S(S), .DEPTH(DEPTH)) u_dec (.*);
  end else if (KIND == NODE_SPC) begin : g_spc
    spc_dec   #(.NV(NV), .P_IN(P_IN), .S(S), .DEPTH(DEPTH)) u_dec (.*);
  end else begin : g_split
    localparam int           H     = NV / 2;
    localparam logic [N-1:0] FR_R  = FR >> H;
    localparam int           LAT_L = node_lat(H, FR, P_IN);
    localparam int           P_L   = node_pout(H, FR, P_IN);
    localparam int           LAT_R = node_lat(H, FR_R, P_L);
    localparam int           T     = S + 1 + LAT_L;
    localparam int           U     = T + 1 + LAT_R;
    localparam int           WA    = L * NV * QI;
    localparam int           WB    = L * H + L;

    // ---- F stage
    llr_t fy   [L][H];
    llr_t al_q [L][H];
    pm_t  pml_q [L];
    for (genvar p = 0; p < L; p++) begin : g_f
      f_unit #(.NV(NV)) u_f (.a(alpha[p]), .y(fy[p]));
    end
    always_ff @(posedge clk)
      if (stg[S]) begin
        al_q  <= fy;
        pml_q <= pm_in;
      end

    // ---- left child
    logic [H-1:0] beta_l [L];
    pm_t          pm_l   [L];
    src_t         src_l  [L];
    fssl_node #(.NV(H), .FR(FR), .P_IN(P_IN), .S(S + 1), .DEPTH(DEPTH)) u_left (
      .clk, .stg, .alpha(al_q), .pm_in(pml_q), .beta(beta_l), .pm_out(pm_l), .src(src_l));

    // ---- parent LLRs retained until stage T
    logic [WA-1:0] a_pk, a_dpk;
    llr_t          a_d [L][NV];
    always_comb
      for (int p = 0; p < L; p++)
        for (int i = 0; i < NV; i++) begin
          a_pk[(p*NV + i)*QI +: QI] = alpha[p][i];
          a_d[p][i] = llr_t'(a_dpk[(p*NV + i)*QI +: QI]);
        end
    delay_line #(.W(WA), .R(T - S), .S(S), .II(II), .DEPTH(DEPTH)) u_keep_a (
      .clk, .stg, .d(a_pk), .q(a_dpk));

    // ---- survivor LLR multiplexers + G stage
    llr_t a_sel [L][NV];
    llr_t gy    [L][H];
    llr_t ar_q  [L][H];
    pm_t  pmr_q [L];
    always_comb
      for (int p = 0; p < L; p++) a_sel[p] = a_d[src_l[p]];
    for (genvar p = 0; p < L; p++) begin : g_g
      g_unit #(.NV(NV)) u_g (.a(a_sel[p]), .beta(beta_l[p]), .y(gy[p]));
    end
    always_ff @(posedge clk)
      if (stg[T]) begin
        ar_q  <= gy;
        pmr_q <= pm_l;
      end

    // ---- right child
    logic [H-1:0] beta_r [L];
    pm_t          pm_r   [L];
    src_t         src_r  [L];
    fssl_node #(.NV(H), .FR(FR_R), .P_IN(P_L), .S(T + 1), .DEPTH(DEPTH)) u_right (
      .clk, .stg, .alpha(ar_q), .pm_in(pmr_q), .beta(beta_r), .pm_out(pm_r), .src(src_r));

    // ---- left results retained until stage U
    logic [WB-1:0] b_pk, b_dpk;
    logic [H-1:0]  beta_ld [L];
    src_t          src_ld  [L];
    always_comb
      for (int p = 0; p < L; p++) begin
        b_pk[p*H +: H]   = beta_l[p];
        b_pk[L*H + p]    = src_l[p];
        beta_ld[p]       = b_dpk[p*H +: H];
        src_ld[p]        = b_dpk[L*H + p];
      end
    delay_line #(.W(WB), .R(U - T), .S(T), .II(II), .DEPTH(DEPTH)) u_keep_b (
      .clk, .stg, .d(b_pk), .q(b_dpk));

    // ---- Combine stage
    logic [NV-1:0] cbeta [L];
    src_t          csrc  [L];
    combine_unit #(.NV(NV)) u_comb (
      .beta_l(beta_ld), .src_l(src_ld), .beta_r(beta_r), .src_r(src_r), .beta(cbeta), .src(csrc));
    always_ff @(posedge clk)
      if (stg[U]) begin
        beta   <= cbeta;
        src    <= csrc;
        pm_out <= pm_r;
      end
  end
endmodule
