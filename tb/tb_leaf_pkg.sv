// tb_leaf_pkg -- reference model used by the constituent-decoder testbenches.
//
// It works out, by plain enumeration, which candidate words a constituent
// decoder may output for each live path and what their path metrics are:
//   metric(word) = PM_in + sum of |alpha_i| over bits where word_i differs
//   from the hard decision (alpha_i < 0 means 1).
// Rate-0: the zero word. Repetition: all-zero and all-one. Rate-1: the hard
// decision and the single flip of a least reliable bit. SPC: the two best
// even-parity words. check_leaf() compares a decoder's L outputs with that:
// each output must be an allowed word of the path it names, the multiset of
// their metrics must be the L smallest candidate metrics, the reported
// metrics must be normalized to the best and saturated at 63, and with two
// live paths the outputs must be sorted. Where a sort is made, candidate
// metrics are first clipped to 63 (they are 7-bit values at the sorter).
package tb_leaf_pkg;
  import fssl_pkg::*;

  typedef enum int {K_RATE0, K_REP, K_RATE1, K_SPC} kind_e;
  localparam int MAXN = 128;

  typedef int           alpha_t [L][MAXN];
  typedef logic [MAXN-1:0] word_t;

  function automatic int metric(input alpha_t a, input int pm, input int p, input int nv, input word_t w);
    int m = pm;
    for (int i = 0; i < nv; i++)
      if (w[i] != (a[p][i] < 0)) m += (a[p][i] < 0) ? -a[p][i] : a[p][i];
    return m;
  endfunction

  function automatic logic allowed(input kind_e k, input alpha_t a, input int p, input int nv, input word_t w);
    word_t h = '0, ones = '0;
    int mn = 1000, nd = 0, pos = 0;
    for (int i = 0; i < nv; i++) begin
      h[i] = a[p][i] < 0;
      ones[i] = 1'b1;
      if (((a[p][i] < 0) ? -a[p][i] : a[p][i]) < mn) mn = (a[p][i] < 0) ? -a[p][i] : a[p][i];
    end
    for (int i = nv; i < MAXN; i++) if (w[i]) return 1'b0;
    case (k)
      K_RATE0: return w == '0;
      K_REP:   return w == '0 || w == ones;
      K_RATE1: begin
        for (int i = 0; i < nv; i++) if (w[i] != h[i]) begin nd++; pos = i; end
        return nd == 0 || (nd == 1 && ((a[p][pos] < 0) ? -a[p][pos] : a[p][pos]) == mn);
      end
      default: return ^w == 1'b0;
    endcase
  endfunction

  // candidate metrics of path p, ascending
  function automatic void cand_metrics(input kind_e k, input alpha_t a, input int pm, input int p,
                                       input int nv, ref int q[$]);
    word_t w, ones = '0;
    int all [$];
    for (int i = 0; i < nv; i++) ones[i] = 1'b1;
    case (k)
      K_RATE0: q.push_back(metric(a, pm, p, nv, '0));
      K_REP: begin q.push_back(metric(a, pm, p, nv, '0)); q.push_back(metric(a, pm, p, nv, ones)); end
      K_RATE1: begin
        int mn = 1000;
        w = '0;
        for (int i = 0; i < nv; i++) begin
          w[i] = a[p][i] < 0;
          if (((a[p][i] < 0) ? -a[p][i] : a[p][i]) < mn) mn = (a[p][i] < 0) ? -a[p][i] : a[p][i];
        end
        q.push_back(pm); q.push_back(pm + mn);
      end
      default: begin
        for (int v = 0; v < (1 << nv); v++) begin
          w = word_t'(v);
          if (^w == 1'b0) all.push_back(metric(a, pm, p, nv, w));
        end
        all.sort();
        q.push_back(all[0]); q.push_back(all[1]);
      end
    endcase
  endfunction

  function automatic void check_leaf(input kind_e k, input int nv, input int p_in,
                                     input alpha_t a, input int pm_in [L],
                                     input word_t beta [L], input int pm_out [L], input int src [L],
                                     inout int checks, inout int failures);
    int q [$];
    int pm_eff [L];
    int got [$];
    int nexp, best;
    logic srt;
    srt = (p_in == L) && (k != K_RATE0);
    for (int p = 0; p < L; p++) pm_eff[p] = (p_in == 1) ? 0 : pm_in[p];
    for (int p = 0; p < p_in; p++) cand_metrics(k, a, pm_eff[p], p, nv, q);
    if (srt) foreach (q[j]) if (q[j] > 63) q[j] = 63;
    q.sort();
    nexp = (q.size() < L) ? q.size() : L;
    best = q[0];
    for (int s = 0; s < nexp; s++) begin
      int m;
      checks++;
      if (src[s] >= p_in || !allowed(k, a, src[s], nv, beta[s])) begin
        failures++;
        if (failures < 6) $display("slot %0d: word %h from path %0d is not a candidate", s, beta[s], src[s]);
        continue;
      end
      m = metric(a, pm_eff[src[s]], src[s], nv, beta[s]);
      if (srt && m > 63) m = 63;
      got.push_back(m);
      checks++;
      if (pm_out[s] != ((m - best > 63) ? 63 : m - best)) begin
        failures++;
        if (failures < 6) $display("slot %0d: metric %0d, expected %0d", s, pm_out[s], m - best);
      end
    end
    got.sort();
    checks++;
    for (int s = 0; s < nexp; s++)
      if (s >= got.size() || got[s] != q[s]) begin
        failures++;
        if (failures < 6) $display("kept metrics %p, expected the smallest of %p", got, q);
        break;
      end
    if (nexp == L) begin
      checks++;
      if (src[0] == src[1] && beta[0] == beta[1]) begin failures++; $display("both slots hold the same candidate"); end
      if (srt) begin
        checks++;
        if (pm_out[0] > pm_out[1]) begin failures++; $display("outputs not sorted"); end
      end
    end
  endfunction
endpackage
