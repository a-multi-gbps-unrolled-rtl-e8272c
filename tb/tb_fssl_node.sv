// tb_fssl_node -- decoder-tree node on the (8,4) example code with L = 2:
// indices 0,1,2,4 frozen, so the node splits into a Repetition node of 4
// (first fork, no sort) and an SPC node of 4 fed by both paths. The
// reference enumerates every codeword x = {w, w ^ bbbb} (b the repetition
// bit, w an even-parity word), with metric = normalized repetition metric of
// b (saturated at 63) + sum of |alpha| of the right-half LLRs of path b that
// disagree with w; each path keeps its two best w, and the two best of the
// four survive, candidate metrics being clipped to 63 at the sorter. Each
// output must be such a codeword with that metric (after
// normalization), and the kept metrics must be the two smallest. Frames are
// sent every II = 20 cycles and checked in the exact cycle the node's
// latency (1 + 3 + 3 = 7 cycles) says.
module tb_fssl_node;
  import fssl_pkg::*;
  localparam int NV = 8, S = 1, DEPTH = 40, LAT = 7;
  localparam logic [N-1:0] FR = N'(8'h17);

  logic            clk = 0, start = 0;
  logic [DEPTH:0]  stg = '0;
  llr_t            alpha [L][NV];
  pm_t             pm_in [L];
  logic [NV-1:0]   beta [L];
  pm_t             pm_out [L];
  src_t            src [L];
  int checks = 0, failures = 0, n_chk = 0, n_second = 0;

  fssl_node #(.NV(NV), .FR(FR), .P_IN(1), .S(S), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) stg <= {stg[DEPTH-1:0], 1'b0} | (DEPTH+1)'(start);

  function automatic int iabs(input int v); return v < 0 ? -v : v; endfunction
  function automatic int fmin(input int a, input int b);
    int m = iabs(a) < iabs(b) ? iabs(a) : iabs(b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction
  function automatic int gfun(input int a, input int b, input int bit_);
    int v = bit_ ? b - a : b + a;
    return v > 31 ? 31 : (v < -31 ? -31 : v);
  endfunction

  int a_in [NV];
  int rep_pm [2];
  int ar [2][4];

  function automatic int cap(input int v); return v > 63 ? 63 : v; endfunction
  function automatic int right_metric(input int b, input logic [3:0] w);
    int m = rep_pm[b];
    for (int i = 0; i < 4; i++) if (w[i] != (ar[b][i] < 0)) m += iabs(ar[b][i]);
    return m;
  endfunction

  task automatic check_frame();
    int al [4], r [2], mn;
    int q [$], all [$], got [$];
    // reference: repetition node on the F outputs
    for (int i = 0; i < 4; i++) al[i] = fmin(a_in[i], a_in[i+4]);
    r[0] = 0; r[1] = 0;
    for (int i = 0; i < 4; i++) if (al[i] < 0) r[0] += -al[i]; else r[1] += al[i];
    mn = r[0] < r[1] ? r[0] : r[1];
    for (int b = 0; b < 2; b++) begin
      rep_pm[b] = (r[b] - mn > 63) ? 63 : r[b] - mn;
      for (int i = 0; i < 4; i++) ar[b][i] = gfun(a_in[i], a_in[i+4], b);
    end
    for (int b = 0; b < 2; b++) begin
      all.delete();
      for (int v = 0; v < 16; v++) if (^v[3:0] == 1'b0) all.push_back(cap(right_metric(b, v[3:0])));
      all.sort();
      q.push_back(all[0]); q.push_back(all[1]);
    end
    q.sort();
    for (int s = 0; s < L; s++) begin
      logic [3:0] w, bb;
      int m, b;
      w  = beta[s][7:4];
      bb = beta[s][3:0] ^ w;
      checks++;
      if (!(bb == 4'h0 || bb == 4'hf) || ^w) begin
        failures++; $display("slot %0d: %b is not a codeword", s, beta[s]); continue;
      end
      b = bb[0];
      m = cap(right_metric(b, w));
      got.push_back(m);
      checks++;
      if (int'(pm_out[s]) != ((m - q[0] > 63) ? 63 : m - q[0])) begin
        failures++; $display("slot %0d: metric %0d expected %0d", s, pm_out[s], m - q[0]);
      end
      if (s == 0 && b == 1) n_second++;
    end
    got.sort();
    checks++;
    if (got.size() != 2 || got[0] != q[0] || got[1] != q[1]) begin
      failures++; $display("kept %p, expected the two smallest of %p", got, q);
    end
    checks++;
    if (beta[0] == beta[1]) failures++;
  endtask

  // frames: new LLRs every II cycles; LLRs of frame f are applied from stage S
  int frames_in = 0;
  int a_hist [400][NV];
  int n_rd = 0;
  always @(posedge clk) begin
    #1;
    if (stg[S]) begin
      int r;
      r = (frames_in % 3 == 0) ? 31 : 8;
      for (int i = 0; i < NV; i++) begin
        a_hist[frames_in][i] = $urandom_range(2*r) - r;
        alpha[0][i] = llr_t'(a_hist[frames_in][i]);
        alpha[1][i] = llr_t'($urandom);   // path 1 is not live: must be ignored
      end
      pm_in[0] = pm_t'($urandom); pm_in[1] = pm_t'($urandom);
      frames_in++;
    end
  end
  always @(negedge clk) if (stg[S + LAT]) begin
    for (int i = 0; i < NV; i++) a_in[i] = a_hist[n_rd][i];
    n_rd++;
    check_frame();
    n_chk++;
  end

  initial begin
    repeat (3) @(negedge clk);
    for (int f = 0; f < 300; f++) begin
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      repeat (II - 1 + (f % 5 == 0 ? 3 : 0)) @(negedge clk);
    end
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (n_chk != 300) failures++;
    $display("frames=%0d best-from-one-path=%0d", n_chk, n_second);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300 * 25 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
