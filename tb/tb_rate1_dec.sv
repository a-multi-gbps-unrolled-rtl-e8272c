// tb_rate1_dec -- self-checking test of the Rate-1 constituent decoder.
//
// Two instances are driven with the same random LLRs: one with a single live
// path (P_IN = 1, the first fork) and one with two live paths and random
// input metrics (P_IN = 2). A stage token is started, and the outputs are
// checked in exactly the cycle the decoder's latency says they become valid
// (1 and 2 cycles), against the enumeration model of tb_leaf_pkg.
// Inputs are mostly small so that saturation and ties also occur.
module tb_rate1_dec;
  import fssl_pkg::*;
  import tb_leaf_pkg::*;
  localparam int NV = 16, S = 1, DEPTH = 8;
  localparam int LAT1 = 1, LAT2 = 2;

  logic            clk = 0;
  logic [DEPTH:0]  stg = '0;
  logic            start = 0;
  llr_t            alpha [L][NV];
  pm_t             pm_in [L];
  logic [NV-1:0]   beta1 [L], beta2 [L];
  pm_t             pm1 [L], pm2 [L];
  src_t            src1 [L], src2 [L];
  int checks = 0, failures = 0, n1 = 0, n2 = 0;

  rate1_dec #(.NV(NV), .P_IN(1), .S(S), .DEPTH(DEPTH)) u1 (
    .clk, .stg, .alpha, .pm_in, .beta(beta1), .pm_out(pm1), .src(src1));
  rate1_dec #(.NV(NV), .P_IN(2), .S(S), .DEPTH(DEPTH)) u2 (
    .clk, .stg, .alpha, .pm_in, .beta(beta2), .pm_out(pm2), .src(src2));

  always #5 clk = ~clk;
  always_ff @(posedge clk) stg <= {stg[DEPTH-1:0], 1'b0} | (DEPTH+1)'(start);

  task automatic check(input int p_in);
    alpha_t a;
    int pmi [L], pmo [L], sr [L];
    word_t b [L];
    for (int p = 0; p < L; p++) begin
      for (int i = 0; i < NV; i++) a[p][i] = alpha[p][i];
      pmi[p] = pm_in[p];
      b[p]   = (p_in == 1) ? word_t'(beta1[p]) : word_t'(beta2[p]);
      pmo[p] = (p_in == 1) ? int'(pm1[p]) : int'(pm2[p]);
      sr[p]  = (p_in == 1) ? int'(src1[p]) : int'(src2[p]);
    end
    check_leaf(K_RATE1, NV, p_in, a, pmi, b, pmo, sr, checks, failures);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      int r;
      r = (t % 4 == 0) ? 31 : ((t % 4 == 1) ? 3 : 12);
      for (int p = 0; p < L; p++) begin
        for (int i = 0; i < NV; i++) alpha[p][i] = llr_t'($urandom_range(2*r) - r);
        pm_in[p] = pm_t'($urandom_range((t % 2) ? 63 : 4));
      end
      // the token reaches stage k k cycles after the start pulse
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      // outputs are valid in the cycle the token is at stage S + latency
      for (int c = 0; c <= S + LAT2 + 1; c++) begin
        if (stg[S + LAT1]) begin check(1); n1++; end
        if (stg[S + LAT2]) begin check(2); n2++; end
        @(negedge clk);
      end
    end
    checks++; if (n1 != 400 || n2 != 400) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400 * 20 + 100) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
