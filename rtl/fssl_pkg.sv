// fssl_pkg -- shared constants, types and compile-time functions of the
// unrolled Fast-SSC-List polar decoder.
//
// The decoder is built for one fixed (N=512, K=427) systematic polar code and a
// list of L=2 paths. LLRs use the Qi.Qc.Qf = 6.5.0 format (6-bit internal LLRs,
// 5-bit channel LLRs, no fractional bits) and path metrics (PMs) use 7 bits,
// all two's complement; these numbers and the node-size limits (Rate-0 <= 8,
// Repetition <= 8, SPC <= 4, Rate-1 unlimited) and the initiation interval of
// 20 cycles follow the published design.
//
// The frozen set is this design's own: it was obtained with the Bhattacharyya
// parameter construction (z of the base channel exp(-R*Eb/N0), at a design
// Eb/N0 of 4 dB; minus-channel z -> 2z - z^2, plus-channel z -> z^2, applied
// from the most significant index bit down) keeping the 427 indices with the
// smallest z. With the node-size limits it gives a largest Rate-1 node of 128
// bits, as the published design reports. Bit i of FROZEN is 1 when u_i is
// frozen; indices are in natural order and a node's left child owns the lower
// half of its indices.
//
// The functions node_kind / node_lat / node_pout are evaluated at elaboration
// time to shape the recursive decoder tree and to place each register on its
// pipeline stage.
package fssl_pkg;

  localparam int N       = 512;
  localparam int K       = 427;
  localparam int L       = 2;      // list size; the datapath is written for L = 2
  localparam int QI      = 6;      // internal LLR bits
  localparam int QC      = 5;      // channel LLR bits
  localparam int QF      = 0;      // fractional bits (none)
  localparam int QPM     = 7;      // path metric bits (Qi + 1)
  localparam int QW      = 12;     // width for candidate-metric arithmetic before normalization
  localparam int II      = 20;     // initiation interval in clock cycles
  localparam int MAX_R0  = 8;
  localparam int MAX_REP = 8;
  localparam int MAX_SPC = 4;
  localparam int SPC_STAGES = 2;   // the SPC decoder is pipelined over 2 cycles

  localparam logic [N-1:0] FROZEN =
    512'h000000000000000000000000000000000000000000000000000000000001011f0000000000000001000000010001037f000000030007177f01173fff7fffffff;

  localparam int LLR_MAX = (1 << (QI-1)) - 1;   // +31; LLRs saturate symmetrically
  localparam int PM_MAX  = (1 << (QPM-1)) - 1;  // +63; metrics are never negative

  typedef logic signed [QI-1:0]  llr_t;
  typedef logic signed [QC-1:0]  chllr_t;
  typedef logic        [QPM-1:0] pm_t;         // two's complement, always >= 0
  typedef logic        [QW-1:0]  pmw_t;        // wide unsigned candidate metric
  typedef logic                  src_t;        // index of a path (L = 2)

  typedef enum logic [2:0] {
    NODE_SPLIT = 3'd0,
    NODE_RATE0 = 3'd1,
    NODE_RATE1 = 3'd2,
    NODE_REP   = 3'd3,
    NODE_SPC   = 3'd4
  } node_kind_e;

  // ---------------------------------------------------------------- arithmetic
  function automatic llr_t sat_llr(input int v);
    if (v > LLR_MAX)       return llr_t'(LLR_MAX);
    else if (v < -LLR_MAX) return llr_t'(-LLR_MAX);
    else                   return llr_t'(v);
  endfunction

  function automatic int abs_llr(input llr_t a);
    return (a < 0) ? -int'(a) : int'(a);
  endfunction

  // min-sum F: sign(a) sign(b) min(|a|,|b|)
  function automatic llr_t f_minsum(input llr_t a, input llr_t b);
    int m;
    m = (abs_llr(a) < abs_llr(b)) ? abs_llr(a) : abs_llr(b);
    return ((a < 0) != (b < 0)) ? sat_llr(-m) : sat_llr(m);
  endfunction

  // G: b + (1 - 2 beta) a
  function automatic llr_t g_func(input llr_t a, input llr_t b, input logic beta);
    return beta ? sat_llr(int'(b) - int'(a)) : sat_llr(int'(b) + int'(a));
  endfunction

  function automatic pm_t sat_pm(input pmw_t v);
    return (v > pmw_t'(PM_MAX)) ? pm_t'(PM_MAX) : pm_t'(v);
  endfunction

  // ------------------------------------------------- decoder-tree shape (elaboration)
  function automatic logic all_frozen(input int n, input logic [N-1:0] m);
    for (int i = 0; i < n; i++) if (!m[i]) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic none_frozen(input int n, input logic [N-1:0] m);
    for (int i = 0; i < n; i++) if (m[i]) return 1'b0;
    return 1'b1;
  endfunction

  function automatic node_kind_e node_kind(input int n, input logic [N-1:0] m);
    logic rep, spc;
    if (n <= MAX_R0 && all_frozen(n, m)) return NODE_RATE0;
    if (none_frozen(n, m))               return NODE_RATE1;
    rep = (n <= MAX_REP) && (n >= 2) && !m[n-1];
    for (int i = 0; i < n - 1; i++) if (!m[i]) rep = 1'b0;
    if (rep) return NODE_REP;
    spc = (n <= MAX_SPC) && (n >= 2) && m[0];
    for (int i = 1; i < n; i++) if (m[i]) spc = 1'b0;
    if (spc) return NODE_SPC;
    return NODE_SPLIT;
  endfunction

  // number of live paths leaving a node entered by p_in live paths
  function automatic int node_pout(input int n, input logic [N-1:0] m, input int p_in);
    return all_frozen(n, m) ? p_in : L;
  endfunction

  // cycles from the first cycle a node's inputs are valid to the first cycle its
  // outputs are valid
  function automatic int node_lat(input int n, input logic [N-1:0] m, input int p_in);
    int ll, lr, pl;
    case (node_kind(n, m))
      NODE_RATE0: return 1;
      NODE_RATE1: return (p_in == 1) ? 1 : 2;
      NODE_REP:   return (p_in == 1) ? 1 : 2;
      NODE_SPC:   return (p_in == 1) ? SPC_STAGES : SPC_STAGES + 1;
      default: begin
        ll = node_lat(n/2, m, p_in);
        pl = node_pout(n/2, m, p_in);
        lr = node_lat(n/2, m >> (n/2), pl);
        return ll + lr + 3;
      end
    endcase
  endfunction

  // pipeline depth of the whole decoder, from input acceptance to valid output:
  // input register (1) + tree + best-candidate register (1)
  localparam int TREE_LAT = node_lat(N, FROZEN, 1);
  localparam int DEC_LAT  = TREE_LAT + 2;

endpackage
